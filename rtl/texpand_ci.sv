// texpand_ci -- the Texpand trellis-expansion custom instruction, as logic
// attached to a soft processor's ALU through a multi-cycle custom-instruction
// port (clk, reset, clk_en, start, n, dataa -> result, done).
//
// How it is used: the program packs the received code pair and one source
// state into dataa and issues Texpand once per reachable trellis node. For
// the default four-state code and 12 received bits that is
// 1+2+4+4+4+4 = 19 calls, the count the paper quotes. Each call does the
// paper's first task, add-compare-select: both branches leaving the source
// node go through an acs_unit, and the two destination entries of the next
// stage are updated. It also does the second task, keeping track of the
// path. The unit holds the path weights of the current and next stage and a
// survivor memory. Once every reachable node of the current stage has been
// expanded, the stage is committed by itself: the next-stage weights become
// current, and one survivor row is written. After the last stage, the
// trace-back operation walks back from state 0 and returns the decoded bits.
//
// Operations (n):
//   0 OP_TEXPAND   dataa[1:0] received pair (dataa[1] first bit),
//                  dataa[2] start a new trellis first (all weights cleared,
//                  only state 0 reachable), dataa[15:8] source state.
//                  result[7:0]/[15:8] weight of the u=0 / u=1 destination
//                  after select, [16]/[17] this source became its survivor,
//                  [18] stage committed, [19] refused (trellis already
//                  STAGES deep), [20]/[21] tie at the u=0 / u=1 destination,
//                  [31:24] stages committed so far.
//   1 OP_TRACEBACK result = decoded bits, bit t = information bit of stage t.
//   2 OP_READ      dataa[15:8] state; result[7:0] its current path weight,
//                  result[31] it is reachable.
// Timing: OP_TEXPAND and OP_READ raise done one cycle after start;
// OP_TRACEBACK raises it stages+1 cycles after start (1 if empty). start is
// honoured only with clk_en high; a trace-back, once started, runs to the end.
//
// From the paper: one node per call, add/compare/select with the lowest-state
// tie rule, the path record, trace-back from state 00, the four-state code,
// and 60 received bits (STAGES = 30) as the largest size. This design's own
// choices: the port signal set, the operand and result layout, the extra
// trace-back and read operations, automatic stage commit, the latencies, and
// the K/G1/G2 parameters that select another rate-1/2 code.
module texpand_ci
  import viterbi_pkg::*;
#(
  parameter int unsigned      STAGES = 30,
  parameter int unsigned      K      = DEF_K,
  parameter logic [MAX_K-1:0] G1     = DEF_G1,
  parameter logic [MAX_K-1:0] G2     = DEF_G2,
  localparam int unsigned     SB     = K - 1,
  localparam int unsigned     NS     = 1 << SB,
  localparam int unsigned     AW     = (STAGES > 1) ? $clog2(STAGES) : 1,
  localparam int unsigned     SW     = $clog2(STAGES + 1)
) (
  input  logic        clk,
  input  logic        reset,
  input  logic        clk_en,
  input  logic        start,
  input  logic [7:0]  n,
  input  logic [31:0] dataa,
  output logic [31:0] result,
  output logic        done
);

  typedef logic [SB-1:0] state_t;

  // One node of the stage being built.
  typedef struct packed {
    logic    valid;   // some path reaches it
    weight_t weight;  // best path weight so far
    state_t  pred;    // predecessor of that path
  } node_t;

  // ---------------------------------------------------------------- state
  weight_t       cur_w [NS];
  logic [NS-1:0] cur_v;
  node_t         nxt   [NS];
  logic [NS-1:0] expanded;
  logic [SW-1:0] stage;
  logic [31:0]   result_q;   // result of Texpand / read
  logic          done_q;

  // ------------------------------------------------------ operand decode
  logic   issue, is_tex, is_tb, is_rd, new_trellis;
  sym_t   rx;
  state_t src;

  assign issue       = start && clk_en;
  assign is_tex      = issue && (n == 8'(OP_TEXPAND));
  assign is_tb       = issue && (n == 8'(OP_TRACEBACK));
  assign is_rd       = issue && (n == 8'(OP_READ));
  assign rx          = dataa[DA_RX_LSB +: 2];
  assign new_trellis = dataa[DA_NEW_BIT];
  assign src         = dataa[DA_SRC_LSB +: SB];

  // State as seen by this call (a new trellis starts from state 0 alone).
  weight_t       e_cur_w [NS];
  logic [NS-1:0] e_cur_v;
  node_t         e_nxt   [NS];
  logic [NS-1:0] e_exp;
  logic [SW-1:0] e_stage;

  always_comb begin
    for (int s = 0; s < NS; s++) begin
      e_cur_w[s] = new_trellis ? '0 : cur_w[s];
      e_nxt[s]   = new_trellis ? '0 : nxt[s];
    end
    e_cur_v = new_trellis ? NS'(1) : cur_v;
    e_exp   = new_trellis ? '0     : expanded;
    e_stage = new_trellis ? '0     : stage;
  end

  // ------------------------------------------ add-compare-select, 2 branches
  state_t dst   [2];
  node_t  d_in  [2];
  node_t  d_out [2];
  logic   taken [2];
  logic   tie   [2];

  for (genvar b = 0; b < 2; b++) begin : g_acs
    assign d_in[b] = e_nxt[{1'(b), src[SB-1:1]}];
    acs_unit #(.K(K), .G1(G1), .G2(G2)) u_acs (
      .rx          (rx),
      .src         (src),
      .u           (1'(b)),
      .src_weight  (e_cur_w[src]),
      .src_valid   (e_cur_v[src]),
      .dst_valid_i (d_in[b].valid),
      .dst_weight_i(d_in[b].weight),
      .dst_pred_i  (d_in[b].pred),
      .dst         (dst[b]),
      .dst_valid_o (d_out[b].valid),
      .dst_weight_o(d_out[b].weight),
      .dst_pred_o  (d_out[b].pred),
      .taken       (taken[b]),
      .tie         (tie[b])
    );
  end

  node_t         u_nxt [NS];   // next stage after this call
  logic [NS-1:0] exp_new;
  logic          full, complete;
  logic [NS-1:0] row;

  always_comb begin
    for (int s = 0; s < NS; s++) u_nxt[s] = e_nxt[s];
    u_nxt[dst[0]] = d_out[0];
    u_nxt[dst[1]] = d_out[1];
    exp_new  = e_exp | (NS'(1) << src);
    full     = (32'(e_stage) >= STAGES);
    complete = &(exp_new | ~e_cur_v);
    for (int s = 0; s < NS; s++) row[s] = u_nxt[s].pred[0];
  end

  // ------------------------------------------------------ survivor record
  logic [AW-1:0] tb_addr;
  logic [NS-1:0] tb_row;
  logic          tb_busy, tb_done;
  logic [31:0]   tb_bits;
  logic          mem_we;

  assign mem_we = is_tex && !full && complete;

  survivor_mem #(.STAGES(STAGES), .NS(NS)) u_mem (
    .clk  (clk),
    .we   (mem_we),
    .waddr(AW'(e_stage)),
    .wdata(row),
    .raddr(tb_addr),
    .rdata(tb_row)
  );

  traceback_unit #(.STAGES(STAGES), .K(K)) u_tb (
    .clk       (clk),
    .reset     (reset),
    .start     (is_tb),
    .num_stages(stage),
    .rd_addr   (tb_addr),
    .rd_row    (tb_row),
    .busy      (tb_busy),
    .done      (tb_done),
    .bits      (tb_bits)
  );

  // ----------------------------------------------------------- registers
  always_ff @(posedge clk) begin
    if (reset) begin
      for (int s = 0; s < NS; s++) begin
        cur_w[s] <= '0;
        nxt[s]   <= '0;
      end
      cur_v    <= NS'(1);
      expanded <= '0;
      stage    <= '0;
      result_q <= '0;
      done_q   <= 1'b0;
    end else begin
      done_q <= 1'b0;
      if (is_tex) begin
        if (full) begin
          result_q <= {8'(e_stage), 4'b0, 4'b1000, 16'h0000};
        end else begin
          if (complete) begin
            for (int s = 0; s < NS; s++) begin
              cur_w[s] <= u_nxt[s].weight;
              cur_v[s] <= u_nxt[s].valid;
              nxt[s]   <= '0;
            end
            expanded <= '0;
            stage    <= SW'(e_stage + 1'b1);
          end else begin
            for (int s = 0; s < NS; s++) begin
              cur_w[s] <= e_cur_w[s];
              nxt[s]   <= u_nxt[s];
            end
            cur_v    <= e_cur_v;
            expanded <= exp_new;
            stage    <= e_stage;
          end
          result_q <= {8'(complete ? SW'(e_stage + 1'b1) : e_stage), 2'b00,
                       tie[1], tie[0], 1'b0, complete, taken[1], taken[0],
                       d_out[1].weight, d_out[0].weight};
        end
        done_q <= 1'b1;
      end else if (is_rd) begin
        result_q <= {cur_v[src], 15'h0000, 8'h00, cur_w[src]};
        done_q   <= 1'b1;
      end else if (issue && !is_tb) begin
        result_q <= '0;           // unknown operation: complete with zero
        done_q   <= 1'b1;
      end
    end
  end

  // The trace-back result comes straight from the walk's output register.
  assign done   = done_q | tb_done;
  assign result = tb_done ? tb_bits : result_q;

  // -------------------------------------------------------- port protocol
  // A new instruction may not be issued while a trace-back is running.
  a_no_issue_while_busy : assert property (@(posedge clk) disable iff (reset)
    issue |-> !tb_busy);
  // done is a single-cycle pulse unless a new instruction was issued.
  a_done_pulse : assert property (@(posedge clk) disable iff (reset)
    done |=> !done || $past(issue) || tb_done);

endmodule
