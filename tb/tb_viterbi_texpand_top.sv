// tb_viterbi_texpand_top -- end-to-end test of the coded link at full size.
//
// For each evaluated size (12, 18, 30, 40 and 60 received bits) and several
// trials: random information bits with two zero flush bits are encoded by
// the top's encoder; a software channel flips 0 to 3 of the code bits; the
// received pairs are decoded by driving the custom-instruction port the way
// a program would (one Texpand call per reachable node, then a trace-back).
// Checks: decoded bits and final path weight against a Viterbi decoder
// written here; error-free decoding when at most one bit was flipped; the
// number of Texpand calls per size (19 for 12 bits); latencies. Each
// mechanism -- path deletion by select, the tie rule, stage commit,
// trace-back, restart of a trellis, refusal of a call past the deepest
// trellis, and a start held off by clk_en -- is counted, and one that never
// occurs counts as a failure. The top runs with its default parameters.
module tb_viterbi_texpand_top;
  localparam int STAGES = 30;
  logic        clk = 1'b0, reset = 1'b1;
  logic        enc_in_valid = 1'b0, enc_u = 1'b0, enc_out_valid;
  logic [1:0]  enc_v, enc_state;
  logic        ci_clk_en = 1'b1, ci_start = 1'b0, ci_done;
  logic [7:0]  ci_n = '0;
  logic [31:0] ci_dataa = '0, ci_result;
  int checks = 0, failures = 0;
  int m_deleted = 0, m_tie = 0, m_commit = 0, m_traceback = 0, m_restart = 0,
      m_refused = 0, m_clk_en_hold = 0;

  viterbi_texpand_top dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
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
  int ref_w [STAGES + 1][4];
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
        for (int b = 0; b < 2; b++) begin
          int p, c;
          p = ((d & 1) << 1) | b;
          if (ref_w[t][p] >= INF) continue;
          c = ref_w[t][p] + hd(rxs[t], OUT_PAIR[p*2 + (d >> 1)]);
          if (c < ref_w[t+1][d]) begin
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

  // ------------------------------------------------------------- drivers
  task automatic ci(input logic [7:0] op, input logic [31:0] a,
                    output logic [31:0] r, output int lat);
    @(negedge clk);
    ci_start = 1'b1; ci_n = op; ci_dataa = a;
    @(negedge clk);
    ci_start = 1'b0; lat = 1;
    while (!ci_done && lat < 100) begin @(negedge clk); lat++; end
    r = ci_result;
  endtask

  task automatic encode_bit(input logic b, output int pair);
    @(negedge clk);
    enc_in_valid = 1'b1; enc_u = b;
    @(negedge clk);
    enc_in_valid = 1'b0;
    check("encoder out_valid", int'(enc_out_valid), 1);
    pair = int'(enc_v);
  endtask

  // One workload: ns stages (2*ns received bits). Returns Texpand calls.
  task automatic run_one(input int ns, input int nerr, output int calls);
    int info, pairs [STAGES], rxs [STAGES], exp_bits, lat, errs;
    logic [31:0] r;
    bit first;
    info = int'($urandom) & ((1 << (ns - 2)) - 1);       // two zero flush bits
    // transmit
    @(negedge clk); reset = 1'b1; @(negedge clk); reset = 1'b0;   // encoder to 00
    for (int t = 0; t < ns; t++) encode_bit(1'((info >> t) & 1), pairs[t]);
    check("encoder back in 00", int'(enc_state), 0);
    // channel
    rxs = pairs;
    for (int e = 0; e < nerr; e++) begin
      int pos;
      pos = $urandom_range(2 * ns - 1);
      rxs[pos / 2] ^= (pos % 2 == 0) ? 2 : 1;
    end
    errs = 0;
    for (int t = 0; t < ns; t++) errs += hd(rxs[t], pairs[t]);
    exp_bits = ref_run(rxs, ns);
    // receive: the decoding program
    calls = 0; first = 1'b1;
    for (int t = 0; t < ns; t++)
      for (int s = 0; s < 4; s++) begin
        if (ref_w[t][s] >= INF) continue;
        ci(8'd0, 32'(rxs[t]) | (32'(first) << 2) | (32'(s) << 8), r, lat);
        check("texpand latency", lat, 1);
        if (first && r[31:24] <= 1) m_restart++;
        first = 1'b0;
        calls++;
        if (r[20] || r[21]) m_tie++;
        if (r[18]) m_commit++;
        if (!r[16] || !r[17]) m_deleted++;
      end
    ci(8'd1, 32'd0, r, lat);
    m_traceback++;
    check($sformatf("%0d bits decoded", 2 * ns), int'(r), exp_bits);
    check("traceback latency", lat, ns + 1);
    if (errs <= 1) check($sformatf("%0d bits, %0d error: info recovered", 2 * ns, errs), int'(r), info);
    ci(8'd2, 32'd0, r, lat);
    check("final weight at 00", int'(r[7:0]), ref_w[ns][0]);
    check("final weight <= channel errors", int'(int'(r[7:0]) <= errs), 1);
  endtask

  initial begin
    int sizes [5] = '{12, 18, 30, 40, 60};
    int calls;
    logic [31:0] r;
    @(negedge clk); @(negedge clk);
    reset = 1'b0;
    foreach (sizes[i]) begin
      for (int trial = 0; trial < 8; trial++) begin
        run_one(sizes[i] / 2, trial % 4, calls);
        check($sformatf("%0d bits: Texpand calls", sizes[i]), calls, 1 + 2 + 4 * (sizes[i] / 2 - 2));
      end
      $display("%0d received bits: %0d Texpand calls per block", sizes[i], calls);
    end
    // The last run filled all 30 stages: one more call is refused.
    begin
      int lat;
      ci(8'd0, 32'd0, r, lat);
      if (r[19]) m_refused++;
      check("refused call leaves stage count", int'(r[31:24]), STAGES);
    end
    // Start with clk_en low is not taken.
    @(negedge clk);
    ci_clk_en = 1'b0; ci_start = 1'b1; ci_n = 8'd2;
    @(negedge clk);
    ci_start = 1'b0;
    @(negedge clk);
    if (!ci_done) m_clk_en_hold++;
    ci_clk_en = 1'b1;

    $display("mechanisms: deleted=%0d tie=%0d commit=%0d traceback=%0d restart=%0d refused=%0d clk_en_hold=%0d",
             m_deleted, m_tie, m_commit, m_traceback, m_restart, m_refused, m_clk_en_hold);
    check("mechanism path deletion", int'(m_deleted > 0), 1);
    check("mechanism tie rule", int'(m_tie > 0), 1);
    check("mechanism stage commit", int'(m_commit > 0), 1);
    check("mechanism trace-back", int'(m_traceback > 0), 1);
    check("mechanism trellis restart", int'(m_restart > 0), 1);
    check("mechanism refusal", int'(m_refused > 0), 1);
    check("mechanism clk_en hold", int'(m_clk_en_hold > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
