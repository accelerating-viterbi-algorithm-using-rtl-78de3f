// tb_gsm_workload -- the instruction applied to the GSM full-rate speech
// channel code: rate 1/2, constraint length 5, 16 states, generators
// G0 = 1 + D^3 + D^4 and G1 = 1 + D + D^3 + D^4 (GSM 05.03).
//
// The top is instantiated with K = 5 and the matching generator masks. For
// the same block sizes as the four-state tests (12 to 60 received bits,
// four zero flush bits each), information bits are encoded, 0 to 4 code bits
// flipped, and the received pairs decoded with one Texpand call per
// reachable node and a trace-back. Checks: decoded bits and final weight
// against a 16-state Viterbi decoder written here from the tap lists;
// error-free decoding with up to three flipped bits (the code's free
// distance is 7); calls per block = 1+2+4+8+16*(stages-4).
module tb_gsm_workload;
  localparam int STAGES = 30;
  localparam int K  = 5;
  localparam int SB = K - 1;
  localparam int NS = 1 << SB;
  logic        clk = 1'b0, reset = 1'b1;
  logic        enc_in_valid = 1'b0, enc_u = 1'b0, enc_out_valid;
  logic [1:0]  enc_v;
  logic [3:0]  enc_state;
  logic        ci_clk_en = 1'b1, ci_start = 1'b0, ci_done;
  logic [7:0]  ci_n = '0;
  logic [31:0] ci_dataa = '0, ci_result;
  int checks = 0, failures = 0;

  viterbi_texpand_top #(
    .STAGES(STAGES), .K(K), .G1(9'b000010011), .G2(9'b000011011)
  ) dut (.*);

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

  // Tap delays of each generator (0 = current bit).
  localparam int TAPS0 [3] = '{0, 3, 4};
  localparam int TAPS1 [4] = '{0, 1, 3, 4};

  // Code pair from state s ({u(t-1) .. u(t-4)}, newest first) and input u.
  function automatic int pair_of(int s, int u);
    int h [5], v0, v1;
    h[0] = u;
    for (int i = 1; i <= SB; i++) h[i] = (s >> (SB - i)) & 1;
    v0 = 0; v1 = 0;
    foreach (TAPS0[i]) v0 ^= h[TAPS0[i]];
    foreach (TAPS1[i]) v1 ^= h[TAPS1[i]];
    return (v0 << 1) | v1;
  endfunction

  function automatic int hd(int a, int b);
    return ((a >> 1) != (b >> 1) ? 1 : 0) + ((a & 1) != (b & 1) ? 1 : 0);
  endfunction

  localparam int INF = 1000;
  int ref_w [STAGES + 1][NS];
  int ref_surv [STAGES][NS];

  function automatic int ref_run(input int rxs [STAGES], input int ns);
    int bits, st;
    for (int s = 0; s < NS; s++) ref_w[0][s] = (s == 0) ? 0 : INF;
    for (int t = 0; t < ns; t++) begin
      for (int d = 0; d < NS; d++) ref_w[t+1][d] = INF;
      for (int p = 0; p < NS; p++) begin          // ascending: lower p wins ties
        if (ref_w[t][p] >= INF) continue;
        for (int u = 0; u < 2; u++) begin
          int d, c;
          d = (u << (SB - 1)) | (p >> 1);
          c = ref_w[t][p] + hd(rxs[t], pair_of(p, u));
          if (c < ref_w[t+1][d]) begin
            ref_w[t+1][d] = c;
            ref_surv[t][d] = p;
          end
        end
      end
    end
    bits = 0; st = 0;
    for (int t = ns - 1; t >= 0; t--) begin
      bits |= (st >> (SB - 1)) << t;
      st = ref_surv[t][st];
    end
    return bits;
  endfunction

  task automatic ci(input logic [7:0] op, input logic [31:0] a,
                    output logic [31:0] r, output int lat);
    @(negedge clk);
    ci_start = 1'b1; ci_n = op; ci_dataa = a;
    @(negedge clk);
    ci_start = 1'b0; lat = 1;
    while (!ci_done && lat < 100) begin @(negedge clk); lat++; end
    r = ci_result;
  endtask

  task automatic run_one(input int ns, input int nerr, output int calls);
    int info, pairs [STAGES], rxs [STAGES], exp_bits, lat, errs, st;
    logic [31:0] r;
    bit first;
    info = int'($urandom) & ((1 << (ns - SB)) - 1);      // four zero flush bits
    @(negedge clk); reset = 1'b1; @(negedge clk); reset = 1'b0;
    st = 0;
    for (int t = 0; t < ns; t++) begin
      int b;
      b = (info >> t) & 1;
      @(negedge clk);
      enc_in_valid = 1'b1; enc_u = 1'(b);
      @(negedge clk);
      enc_in_valid = 1'b0;
      pairs[t] = int'(enc_v);
      check("encoder pair", pairs[t], pair_of(st, b));
      st = (b << (SB - 1)) | (st >> 1);
    end
    check("encoder flushed", int'(enc_state), 0);
    rxs = pairs;
    for (int e = 0; e < nerr; e++) begin
      int pos;
      pos = $urandom_range(2 * ns - 1);
      rxs[pos / 2] ^= (pos % 2 == 0) ? 2 : 1;
    end
    errs = 0;
    for (int t = 0; t < ns; t++) errs += hd(rxs[t], pairs[t]);
    exp_bits = ref_run(rxs, ns);
    calls = 0; first = 1'b1;
    for (int t = 0; t < ns; t++)
      for (int s = 0; s < NS; s++) begin
        if (ref_w[t][s] >= INF) continue;
        ci(8'd0, 32'(rxs[t]) | (32'(first) << 2) | (32'(s) << 8), r, lat);
        first = 1'b0;
        calls++;
      end
    ci(8'd1, 32'd0, r, lat);
    check($sformatf("%0d bits decoded", 2 * ns), int'(r), exp_bits);
    check("traceback latency", lat, ns + 1);
    if (errs <= 3) check($sformatf("%0d bits, %0d errors: info recovered", 2 * ns, errs), int'(r), info);
    ci(8'd2, 32'd0, r, lat);
    check("final weight at state 0", int'(r[7:0]), ref_w[ns][0]);
  endtask

  initial begin
    int sizes [5] = '{12, 18, 30, 40, 60};
    int calls;
    @(negedge clk); @(negedge clk);
    reset = 1'b0;
    foreach (sizes[i]) begin
      for (int trial = 0; trial < 6; trial++) begin
        run_one(sizes[i] / 2, trial % 5, calls);
        check($sformatf("%0d bits: Texpand calls", sizes[i]), calls, 15 + 16 * (sizes[i] / 2 - 4));
      end
      $display("GSM code, %0d received bits: %0d Texpand calls per block", sizes[i], calls);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
