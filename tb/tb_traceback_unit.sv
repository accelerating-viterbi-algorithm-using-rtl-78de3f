// tb_traceback_unit -- self-checking test of the trace-back walk.
//
// For random information sequences ending in two zero flush bits, the test
// builds a survivor record in which the transmitted path survives at every
// node on it (other entries random), so the walk from state 00 must return
// the sequence. It checks the decoded bits and that done comes num_stages+1
// cycles after start, and busy in between.
module tb_traceback_unit;
  localparam int STAGES = 30;
  logic        clk = 1'b0, reset = 1'b1, start = 1'b0;
  logic [4:0]  num_stages = '0, rd_addr;
  logic [3:0]  rd_row;
  logic        busy, done;
  logic [31:0] bits;
  logic [3:0]  mem [STAGES];
  int checks = 0, failures = 0;

  traceback_unit dut (.clk, .reset, .start, .num_stages, .rd_addr, .rd_row, .busy, .done, .bits);

  assign rd_row = mem[rd_addr];
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
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

  initial begin
    @(negedge clk); @(negedge clk);
    reset = 1'b0;
    for (int trial = 0; trial < 60; trial++) begin
      int n, lat;
      logic [31:0] info;
      logic [1:0]  st [STAGES + 1];
      n = (trial == 0) ? 0 : (trial == 1) ? STAGES : $urandom_range(STAGES, 3);
      info = $urandom;
      info = (n > 0) ? info & ((32'd1 << (n - 2)) - 1) : 0;  // last two bits zero (flush)
      for (int t = 0; t < STAGES; t++) mem[t] = 4'($urandom);
      st[0] = 2'b00;
      for (int t = 0; t < n; t++) begin
        st[t+1] = {info[t], st[t][1]};
        // surviving predecessor of st[t+1] is st[t]; record its low bit
        mem[t][st[t+1]] = st[t][0];
      end
      @(negedge clk);
      start = 1'b1; num_stages = 5'(n);
      @(negedge clk);
      start = 1'b0; lat = 1;
      while (!done) begin
        check("busy while walking", int'(busy), 1);
        @(negedge clk); lat++;
      end
      check($sformatf("bits n=%0d", n), int'(bits), int'(info));
      check($sformatf("latency n=%0d", n), lat, (n == 0) ? 1 : n + 1);
      @(negedge clk);
      check("done is one pulse", int'(done), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
