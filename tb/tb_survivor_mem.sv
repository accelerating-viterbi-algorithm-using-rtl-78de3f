// tb_survivor_mem -- self-checking test of the survivor record.
//
// Fills every row with random data, reads all rows back through the
// combinational read port, rewrites some rows, checks that a write with we low
// changes nothing and that the read follows the address in the same cycle.
module tb_survivor_mem;
  localparam int STAGES = 30;
  logic       clk = 1'b0, we = 1'b0;
  logic [4:0] waddr = '0, raddr = '0;
  logic [3:0] wdata = '0, rdata;
  logic [3:0] model [STAGES];
  int checks = 0, failures = 0;

  survivor_mem dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic wr(int a, logic [3:0] d, logic en);
    @(negedge clk);
    we = en; waddr = 5'(a); wdata = d;
    @(negedge clk);
    we = 1'b0;
    if (en) model[a] = d;
  endtask

  initial begin
    for (int a = 0; a < STAGES; a++) wr(a, 4'($urandom), 1'b1);
    for (int a = 0; a < STAGES; a++) begin
      raddr = 5'(a); #1;
      check($sformatf("row %0d", a), int'(rdata), int'(model[a]));
    end
    for (int k = 0; k < 100; k++) begin
      int a;
      a = $urandom_range(STAGES - 1);
      wr(a, 4'($urandom), 1'($urandom));
      raddr = 5'($urandom_range(STAGES - 1)); #1;
      check("random read", int'(rdata), int'(model[raddr]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
