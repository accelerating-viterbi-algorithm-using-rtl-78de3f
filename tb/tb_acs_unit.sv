// tb_acs_unit -- exhaustive self-checking test of the add-compare-select.
//
// Sweeps received pair, source state, branch input, source validity and a
// set of weights for the source and for the destination entry, and compares
// destination, updated entry, taken and tie flags with values computed here
// from the published trellis edge list and the selection rule (lighter wins; on equal
// weights the lower predecessor state wins; an empty entry is always filled).
module tb_acs_unit;
  logic [1:0] rx, src;
  logic       u, src_valid;
  logic [7:0] src_weight;
  logic       dst_valid_i, dst_valid_o;
  logic [7:0] dst_weight_i, dst_weight_o;
  logic [1:0] dst_pred_i, dst_pred_o, dst;
  logic       taken, tie;
  int checks = 0, failures = 0;

  acs_unit dut (.rx, .src, .u, .src_weight, .src_valid, .dst_valid_i, .dst_weight_i, .dst_pred_i,
                .dst, .dst_valid_o, .dst_weight_o, .dst_pred_o, .taken, .tie);

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int OUT_PAIR [8] = '{0, 2, 0, 2, 3, 1, 3, 1};  // index {s, u}
  localparam int NEXT     [8] = '{0, 2, 0, 2, 1, 3, 1, 3};

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int weights [5] = '{0, 1, 5, 6, 60};
    int exp_w, bm, o, e_taken, e_tie;
    for (int r = 0; r < 4; r++)
    for (int s = 0; s < 4; s++)
    for (int b = 0; b < 2; b++)
    for (int sv = 0; sv < 2; sv++)
    for (int dv = 0; dv < 2; dv++)
    for (int p = 0; p < 4; p++)
    for (int iw = 0; iw < 5; iw++)
    for (int jw = 0; jw < 5; jw++) begin
      rx = 2'(r); src = 2'(s); u = 1'(b); src_valid = 1'(sv);
      src_weight = 8'(weights[iw]);
      dst_valid_i = 1'(dv); dst_weight_i = 8'(weights[jw]); dst_pred_i = 2'(p);
      #1;
      o    = OUT_PAIR[s*2 + b];
      bm = ((r >> 1) != (o >> 1) ? 1 : 0) + ((r & 1) != (o & 1) ? 1 : 0);
      exp_w = weights[iw] + bm;
      e_tie = (sv == 1 && dv == 1 && exp_w == weights[jw]) ? 1 : 0;
      if (sv == 0)                 e_taken = 0;
      else if (dv == 0)            e_taken = 1;
      else if (exp_w < weights[jw]) e_taken = 1;
      else if (e_tie == 1 && s < p) e_taken = 1;
      else                          e_taken = 0;
      check("dst", int'(dst), NEXT[s*2 + b]);
      check("taken", int'(taken), e_taken);
      check("tie", int'(tie), e_tie);
      if (e_taken == 1) begin
        check("weight", int'(dst_weight_o), exp_w);
        check("pred", int'(dst_pred_o), s);
        check("valid", int'(dst_valid_o), 1);
      end else begin
        check("kept", int'({dst_valid_o, dst_weight_o, dst_pred_o} ==
                           {dst_valid_i, dst_weight_i, dst_pred_i}), 1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
