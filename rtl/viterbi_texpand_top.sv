// viterbi_texpand_top -- both ends of the rate-1/2 coded link.
//
// The transmit end is the convolutional encoder: information bits in, code
// pairs out. The receive end is the Texpand custom-instruction unit, which a
// soft processor drives through its custom-instruction port. The processor
// and the noisy channel between the two ends lie outside this module. So the
// encoder's input and output and the full custom-instruction port are
// brought out as top-level ports; the two halves share only clock and
// reset.
//
// Timing: the encoder output follows its input by one cycle; see
// texpand_ci for the custom-instruction operations and latencies. STAGES
// (30, i.e. 60 received bits) sets the deepest trellis the decoder holds;
// K, G1 and G2 select the code, by default the published four-state one.
module viterbi_texpand_top
  import viterbi_pkg::*;
#(
  parameter int unsigned      STAGES = 30,
  parameter int unsigned      K      = DEF_K,    // constraint length
  parameter logic [MAX_K-1:0] G1     = DEF_G1,   // generator mask of V1
  parameter logic [MAX_K-1:0] G2     = DEF_G2,   // generator mask of V2
  localparam int unsigned     SB     = K - 1
) (
  input  logic        clk,
  input  logic        reset,
  // transmit end
  input  logic        enc_in_valid,
  input  logic        enc_u,
  output logic        enc_out_valid,
  output sym_t        enc_v,
  output logic [SB-1:0] enc_state,
  // custom-instruction port, driven by the processor
  input  logic        ci_clk_en,
  input  logic        ci_start,
  input  logic [7:0]  ci_n,
  input  logic [31:0] ci_dataa,
  output logic [31:0] ci_result,
  output logic        ci_done
);

  conv_encoder #(.K(K), .G1(G1), .G2(G2)) u_enc (
    .clk      (clk),
    .reset    (reset),
    .in_valid (enc_in_valid),
    .u        (enc_u),
    .out_valid(enc_out_valid),
    .v        (enc_v),
    .state    (enc_state)
  );

  texpand_ci #(.STAGES(STAGES), .K(K), .G1(G1), .G2(G2)) u_ci (
    .clk   (clk),
    .reset (reset),
    .clk_en(ci_clk_en),
    .start (ci_start),
    .n     (ci_n),
    .dataa (ci_dataa),
    .result(ci_result),
    .done  (ci_done)
  );

endmodule
