// tb_texpand_ci -- self-checking test of the Texpand custom-instruction unit.
//
// 1. The 12-bit example: received 10 11 11 00 11 00 (two channel errors in
//    10 01 11 10 11 00). Expands every reachable node, 19 calls in all, and
//    checks the unit's path weights after every stage against the reference
//    decoder below, the reference itself against the weights published for
//    the first stages of this example, the final weight 2 at state 00, and
//    the decoded bits 110100.
// 2. Random received sequences of 2..30 stages, expanded in ascending and in
//    descending node order, against a Viterbi decoder written here. After
//    every stage the four path weights are read back and compared.
// 3. Refusal of a call beyond the deepest trellis, clk_en low, latencies.
module tb_texpand_ci;
  localparam int STAGES = 30;
  logic        clk = 1'b0, reset = 1'b1, clk_en = 1'b1, start = 1'b0;
  logic [7:0]  n = '0;
  logic [31:0] dataa = '0, result;
  logic        done;
  int checks = 0, failures = 0;
  int n_calls = 0, n_ties = 0, n_commits = 0, n_deleted = 0;

  texpand_ci dut (.clk, .reset, .clk_en, .start, .n, .dataa, .result, .done);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 30) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // ---------------------------------------------------- reference decoder
  localparam int OUT_PAIR [8] = '{0, 2, 0, 2, 3, 1, 3, 1};   // index s*2+u
  localparam int INF = 1000;
  int ref_w [STAGES + 1][4];        // path weight per stage and state
  int ref_surv [STAGES][4];

  function automatic int hd(int a, int b);
    return ((a >> 1) != (b >> 1) ? 1 : 0) + ((a & 1) != (b & 1) ? 1 : 0);
  endfunction

  function automatic int ref_run(input int rxs [STAGES], input int ns);
    int bits, st;
    for (int s = 0; s < 4; s++) ref_w[0][s] = (s == 0) ? 0 : INF;
    for (int t = 0; t < ns; t++)
      for (int d = 0; d < 4; d++) begin
        ref_w[t+1][d] = INF;
        for (int b = 0; b < 2; b++) begin          // predecessor {d[0], b}
          int p, c;
          p = ((d & 1) << 1) | b;
          if (ref_w[t][p] >= INF) continue;
          c = ref_w[t][p] + hd(rxs[t], OUT_PAIR[p*2 + (d >> 1)]);
          if (c < ref_w[t+1][d]) begin             // strict: lower p kept on tie
            ref_w[t+1][d] = c;
            ref_surv[t][d] = p;
          end
        end
      end
    bits = 0; st = 0;
    for (int t = ns - 1; t >= 0; t--) begin
      bits |= (st >> 1) << t;
      st = ref_surv[t][st];
    end
    return bits;
  endfunction

  // ------------------------------------------------------------- driver
  task automatic ci(input logic [7:0] op, input logic [31:0] a,
                    output logic [31:0] r, output int lat);
    @(negedge clk);
    start = 1'b1; n = op; dataa = a;
    @(negedge clk);
    start = 1'b0; lat = 1;
    while (!done && lat < 100) begin @(negedge clk); lat++; end
    r = result;
  endtask

  task automatic texpand(int rx, int src, bit first, output logic [31:0] r);
    int lat;
    ci(8'd0, 32'(rx) | (32'(first) << 2) | (32'(src) << 8), r, lat);
    check("texpand latency", lat, 1);
    n_calls++;
    if (r[20] || r[21]) n_ties++;
    if (r[18]) n_commits++;
    if (!r[16] || !r[17]) n_deleted++;
  endtask

  task automatic check_stage(int t, string tag);
    logic [31:0] r;
    int lat;
    for (int s = 0; s < 4; s++) begin
      ci(8'd2, 32'(s) << 8, r, lat);
      check($sformatf("%s read latency", tag), lat, 1);
      check($sformatf("%s stage %0d state %0d reachable", tag, t, s),
            int'(r[31]), (ref_w[t][s] < INF) ? 1 : 0);
      if (ref_w[t][s] < INF)
        check($sformatf("%s stage %0d state %0d weight", tag, t, s), int'(r[7:0]), ref_w[t][s]);
    end
  endtask

  // Decode one received sequence; order 0 ascending, 1 descending.
  task automatic decode(input int rxs [STAGES], input int ns, input int order, string tag,
                        output int bits, output int calls);
    logic [31:0] r;
    int lat;
    bit first;
    calls = 0;
    first = 1'b1;
    void'(ref_run(rxs, ns));
    for (int t = 0; t < ns; t++) begin
      for (int k = 0; k < 4; k++) begin
        int s;
        s = (order == 0) ? k : 3 - k;
        if (ref_w[t][s] >= INF) continue;
        texpand(rxs[t], s, first, r);
        first = 1'b0;
        calls++;
        check($sformatf("%s stage counter", tag), int'(r[31:24]), r[18] ? t + 1 : t);
      end
      check_stage(t + 1, tag);
    end
    ci(8'd1, 32'd0, r, lat);
    check($sformatf("%s traceback latency", tag), lat, ns + 1);
    bits = int'(r);
  endtask

  initial begin
    int rxs [STAGES];
    int bits, calls, exp_bits;
    logic [31:0] r;
    int lat;
    @(negedge clk); @(negedge clk);
    reset = 1'b0;

    // ---- 1. the 12-bit example
    rxs = '{default: 0};
    rxs[0] = 2'b10; rxs[1] = 2'b11; rxs[2] = 2'b11;
    rxs[3] = 2'b00; rxs[4] = 2'b11; rxs[5] = 2'b00;
    decode(rxs, 6, 0, "example", bits, calls);
    check("example calls", calls, 19);
    check("example decoded 110100", bits, 32'b001011);
    ci(8'd2, 32'd0, r, lat);
    check("example final weight at 00", int'(r[7:0]), 2);
    // weights published for the example trellis, stages 1 to 3
    check("fig stage1 00", ref_w[1][0], 1);
    check("fig stage1 10", ref_w[1][2], 0);
    check("fig stage2 00", ref_w[2][0], 3);
    check("fig stage2 01", ref_w[2][1], 0);
    check("fig stage2 10", ref_w[2][2], 2);
    check("fig stage2 11", ref_w[2][3], 1);
    check("fig stage3 00", ref_w[3][0], 2);
    check("fig stage3 01", ref_w[3][1], 1);

    // ---- 2. random sequences, both expansion orders
    for (int trial = 0; trial < 40; trial++) begin
      int ns;
      ns = (trial < 2 || trial == 39) ? STAGES : $urandom_range(STAGES, 2);
      for (int t = 0; t < STAGES; t++) rxs[t] = $urandom_range(3);
      exp_bits = ref_run(rxs, ns);
      decode(rxs, ns, trial % 2, "random", bits, calls);
      check("random decoded", bits, exp_bits);
      check("random calls", calls, (ns == 1) ? 1 : 1 + 2 + 4 * (ns - 2));
      ci(8'd2, 32'd0, r, lat);
      check("random final weight", int'(r[7:0]), ref_w[ns][0]);
    end

    // ---- 3. refusal beyond STAGES (trellis now full from the last trial)
    texpand(0, 0, 1'b0, r);
    check("refused flag", int'(r[19]), 1);
    check("refused stage count", int'(r[31:24]), STAGES);
    // clk_en low: start is ignored, no done
    @(negedge clk);
    clk_en = 1'b0; start = 1'b1; n = 8'd2; dataa = 0;
    @(negedge clk);
    start = 1'b0;
    @(negedge clk);
    check("no done without clk_en", int'(done), 0);
    clk_en = 1'b1;

    check("ties happened", int'(n_ties > 0), 1);
    check("paths deleted", int'(n_deleted > 0), 1);
    check("stages committed", int'(n_commits > 0), 1);
    $display("calls=%0d ties=%0d commits=%0d deletions=%0d", n_calls, n_ties, n_commits, n_deleted);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
