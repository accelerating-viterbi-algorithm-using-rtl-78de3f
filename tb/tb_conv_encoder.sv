// tb_conv_encoder -- self-checking test of the rate-1/2 encoder.
//
// Checks the worked example 110100 -> 10 01 11 10 11 00, then every edge of
// the state diagram from every state, then a long random stream, against an
// edge list kept here (from-state, input, to-state, output pair), and the
// one-cycle output latency.
module tb_conv_encoder;
  logic       clk = 1'b0, reset = 1'b1, in_valid = 1'b0, u = 1'b0;
  logic       out_valid;
  logic [1:0] v, state;
  int checks = 0, failures = 0;

  conv_encoder dut (.clk, .reset, .in_valid, .u, .out_valid, .v, .state);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Edge list: {from, in} -> {to, out}
  function automatic logic [3:0] edge_of(logic [1:0] s, logic b);
    case ({s, b})
      3'b000: return {2'b00, 2'b00};
      3'b001: return {2'b10, 2'b10};
      3'b010: return {2'b00, 2'b00};
      3'b011: return {2'b10, 2'b10};
      3'b100: return {2'b01, 2'b11};
      3'b101: return {2'b11, 2'b01};
      3'b110: return {2'b01, 2'b11};
      default: return {2'b11, 2'b01};
    endcase
  endfunction

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic do_reset();
    reset = 1'b1; in_valid = 1'b0;
    @(negedge clk); @(negedge clk);
    reset = 1'b0;
  endtask

  // Drive one bit; return the pair produced one cycle later.
  task automatic enc(input logic b, output logic [1:0] pair);
    in_valid = 1'b1; u = b;
    @(negedge clk);
    in_valid = 1'b0;
    check("out_valid after one cycle", 32'(out_valid), 1);
    pair = v;
  endtask

  initial begin
    logic [5:0]  info;
    logic [11:0] code;
    logic [1:0]  pair, ms;
    logic [3:0]  e;

    do_reset();
    check("reset state", 32'(state), 0);
    info = 6'b110100;
    code = 12'b10_01_11_10_11_00;
    for (int i = 5; i >= 0; i--) begin
      enc(info[i], pair);
      check($sformatf("example pair %0d", 5 - i), 32'(pair), 32'(code[2*i +: 2]));
    end
    check("example ends in 00", 32'(state), 0);

    // Every edge from every state.
    for (int s = 0; s < 4; s++) begin
      for (int b = 0; b < 2; b++) begin
        do_reset();
        // reach state s: feed its older bit then its newer bit
        enc(s[0], pair);
        enc(s[1], pair);
        check("reached state", 32'(state), 32'(s));
        e = edge_of(2'(s), 1'(b));
        enc(1'(b), pair);
        check($sformatf("edge %0d/%0d out", s, b), 32'(pair), 32'(e[1:0]));
        check($sformatf("edge %0d/%0d next", s, b), 32'(state), 32'(e[3:2]));
      end
    end

    // Random stream; idle cycles keep the state.
    do_reset();
    ms = 2'b00;
    for (int i = 0; i < 500; i++) begin
      logic b;
      b = 1'($urandom);
      if ($urandom_range(3) == 0) begin
        @(negedge clk);
        check("idle keeps state", 32'(state), 32'(ms));
        check("idle no out_valid", 32'(out_valid), 0);
      end
      e = edge_of(ms, b);
      enc(b, pair);
      check("random out", 32'(pair), 32'(e[1:0]));
      check("random state", 32'(state), 32'(e[3:2]));
      ms = e[3:2];
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
