// conv_encoder -- rate-1/2 convolutional encoder.
//
// Every cycle with in_valid high, the information bit u is encoded into the
// code pair v = {V1, V2} and the state {m1, ..., m(K-1)} shifts to
// {u, m1, ..., m(K-2)}. Vi is the parity of the shift-register bits selected
// by generator mask Gi (see viterbi_pkg). With the defaults (K = 3,
// G1 = 110, G2 = 010) this is the published two-memory-element encoder. Its
// transitions match the printed state diagram. From state 00 the bits
// 1 1 0 1 0 0 (four data bits, two zero flush bits) give 10 01 11 10 11 00.
//
// Timing: v and out_valid are registered, one cycle after in_valid.
// Reset (synchronous, active high) returns the encoder to state 0; the
// reset style, the output register and the generator-mask parameters are
// this design's choices.
module conv_encoder
  import viterbi_pkg::*;
#(
  parameter int unsigned      K  = DEF_K,    // constraint length
  parameter logic [MAX_K-1:0] G1 = DEF_G1,   // generator mask of V1
  parameter logic [MAX_K-1:0] G2 = DEF_G2,   // generator mask of V2
  localparam int unsigned     SB = K - 1     // state bits
) (
  input  logic          clk,
  input  logic          reset,
  input  logic          in_valid,
  input  logic          u,
  output logic          out_valid,
  output sym_t          v,
  output logic [SB-1:0] state     // {m1 .. m(K-1)}, m1 = newest bit
);

  if (K < 3 || K > MAX_K) begin : g_bad_k
    $error("conv_encoder: K must be 3..%0d", MAX_K);
  end

  logic [K-1:0] r;   // shift register contents {u, state}
  assign r = {u, state};

  always_ff @(posedge clk) begin
    if (reset) begin
      state     <= '0;
      v         <= 2'b00;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        v     <= code_pair(G1, G2, MAX_K'(r));
        state <= r[K-1:1];
      end
    end
  end

endmodule
