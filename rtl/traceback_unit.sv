// traceback_unit -- recovers the decoded bits from the survivor record.
//
// The decoded sequence is the path that ends in state 0 after the last stage
// (the code is flushed back to the all-zero state). Starting there, the unit
// walks the survivor memory backwards, one stage per clock: at stage t it
// outputs the newest bit m1 of the current state as information bit t, reads
// the survivor bit of the current state from row t, and moves to the
// predecessor {m2 .. m(K-1), survivor bit}.
//
// Interface: pulse start with num_stages; rd_addr/rd_row form a combinational
// read port to survivor_mem. busy is high during the walk; done pulses for
// one cycle with bits valid (bit t = information bit of stage t, bits above
// num_stages zero). Latency: the start cycle loads the walk, one cycle per
// stage follows, so done is high num_stages+1 cycles after the start cycle
// (one cycle for an empty trellis).
//
// The paper asks for a trace-back from state 00 but does not say how it is
// built; the one-stage-per-clock walk and the bit order are this design's
// choices. STAGES may not exceed 32, the width of the result word.
module traceback_unit
  import viterbi_pkg::*;
#(
  parameter int unsigned STAGES = 30,
  parameter int unsigned K      = DEF_K,
  localparam int unsigned SB    = K - 1,
  localparam int unsigned NS    = 1 << SB,
  localparam int unsigned AW    = (STAGES > 1) ? $clog2(STAGES) : 1,
  localparam int unsigned SW    = $clog2(STAGES + 1)
) (
  input  logic          clk,
  input  logic          reset,
  input  logic          start,
  input  logic [SW-1:0] num_stages,
  output logic [AW-1:0] rd_addr,
  input  logic [NS-1:0] rd_row,
  output logic          busy,
  output logic          done,
  output logic [31:0]   bits
);

  if (STAGES > 32) begin : g_too_deep
    $error("traceback_unit: STAGES must be at most 32");
  end

  logic [SW-1:0] t;      // stages still to walk
  logic [SB-1:0] st;     // state at stage t

  assign rd_addr = AW'(t - 1'b1);

  always_ff @(posedge clk) begin
    if (reset) begin
      busy <= 1'b0;
      done <= 1'b0;
      t    <= '0;
      st   <= '0;
      bits <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        t    <= num_stages;
        st   <= '0;
        bits <= '0;
        busy <= (num_stages != 0);
        done <= (num_stages == 0);
      end else if (busy) begin
        bits[5'(t - 1'b1)] <= st[SB-1];
        st <= {st[SB-2:0], rd_row[st]};
        t  <= t - 1'b1;
        if (t == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
