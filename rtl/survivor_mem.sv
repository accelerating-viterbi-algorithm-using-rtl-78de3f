// survivor_mem -- record of surviving paths, one row per trellis stage.
//
// Row t holds, for each state reached at stage t+1, one bit: the last
// (oldest) bit of the surviving predecessor state. The rest of the
// predecessor is the destination shifted by one place, so that bit is enough
// to walk the path backwards. Rows are written whole once a stage is
// complete.
//
// Synchronous write, combinational read. NS is the number of states (4 for
// the default code). The storage format and the depth (30 stages = the 60
// received bits the paper evaluates at most) are this design's choices; the
// paper only says the path is kept track of.
module survivor_mem #(
  parameter int unsigned STAGES = 30,
  parameter int unsigned NS     = 4,
  localparam int unsigned AW    = (STAGES > 1) ? $clog2(STAGES) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [NS-1:0] wdata,
  input  logic [AW-1:0] raddr,
  output logic [NS-1:0] rdata
);

  logic [NS-1:0] mem [STAGES];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < STAGES))
      mem[waddr] <= wdata;
  end

  assign rdata = (32'(raddr) < STAGES) ? mem[raddr] : '0;

endmodule
