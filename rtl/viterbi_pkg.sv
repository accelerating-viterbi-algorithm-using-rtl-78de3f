// viterbi_pkg -- types, constants and code helpers shared by the rate-1/2
// convolutional encoder and the Texpand custom-instruction decoder.
//
// A rate-1/2 code of constraint length K is described by two generator
// masks over the shift register {u, m1, ..., m(K-1)}: bit K-1 taps the
// incoming bit u, bit K-2 taps m1 (the newest stored bit), bit 0 taps the
// oldest. The state is {m1, ..., m(K-1)}, newest bit first, so the next state
// from state s with input u is {u, s} without its last bit.
//
// The default code is the four-state one published with the design: G1 =
// 3'b110 and G2 = 3'b010. These two masks are not read off a schematic. They
// are the unique masks that reproduce the eight printed transition labels of
// its state diagram (input / V1 V2): 00 -0/00-> 00, 00 -1/10-> 10,
// 01 -0/00-> 00, 01 -1/10-> 10, 10 -0/11-> 01, 10 -1/01-> 11, 11 -0/11-> 01,
// 11 -1/01-> 11. They also give the worked example 110100 -> 10 01 11 10 11 00.
// Expressing a code as generator masks is this design's way of making the
// instruction usable for other rate-1/2 codes.
//
// Weight width and the custom-instruction operation codes and field layout
// are this design's own choices.
package viterbi_pkg;

  localparam int unsigned MAX_K    = 9;   // state index must fit dataa[15:8]
  localparam int unsigned WEIGHT_W = 8;   // path weight width

  typedef logic [1:0]          sym_t;     // code pair {V1, V2}
  typedef logic [WEIGHT_W-1:0] weight_t;

  // Default code (four states).
  localparam int unsigned      DEF_K  = 3;
  localparam logic [MAX_K-1:0] DEF_G1 = MAX_K'(3'b110);
  localparam logic [MAX_K-1:0] DEF_G2 = MAX_K'(3'b010);

  // Operation select on the custom-instruction port (n).
  typedef enum logic [7:0] {
    OP_TEXPAND   = 8'd0,  // expand one trellis node
    OP_TRACEBACK = 8'd1,  // trace back from state 0, return decoded bits
    OP_READ      = 8'd2   // read path weight of a state of the current stage
  } ci_op_e;

  // dataa fields
  localparam int unsigned DA_RX_LSB  = 0;  // [1:0]  received pair {first, second}
  localparam int unsigned DA_NEW_BIT = 2;  // [2]    start a new trellis first
  localparam int unsigned DA_SRC_LSB = 8;  // [15:8] source state (OP_READ: state)

  // Code pair for shift-register contents r = {u, state}, right-aligned.
  function automatic sym_t code_pair(logic [MAX_K-1:0] g1, logic [MAX_K-1:0] g2,
                                     logic [MAX_K-1:0] r);
    return {^(g1 & r), ^(g2 & r)};
  endfunction

  // Branch metric: number of received bits that differ from the edge output.
  function automatic logic [1:0] hamming2(sym_t a, sym_t b);
    return {1'b0, a[1] ^ b[1]} + {1'b0, a[0] ^ b[0]};
  endfunction

endpackage
