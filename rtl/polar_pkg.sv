// polar_pkg: types, constants and helper functions shared by the fast
// simplified successive-cancellation (Fast-SSC) polar decoder.
//
// The decoder is a small processor: it executes an offline-compiled list of
// 5-bit instructions, 4 bits of opcode and 1 bit telling whether the node the
// instruction finishes is a left or a right child. The twelve opcodes are the
// twelve decoder functions F, G, COMBINE, COMBINE-0R, G-0R, P-R1, P-RSPC,
// P-01, P-0SPC, ML, REP and REP-SPC. The list of functions and the 4+1 bit
// instruction size follow the paper; the numeric opcode values are this
// design's own choice.
//
// LLRs are two's complement and kept in the symmetric range
// [-(2^(W-1)-1), 2^(W-1)-1], so a magnitude always fits in W-1 bits.
//
// Memory layout (this design's choice, after the semi-parallel SC layout the
// paper builds on): a node of length 2^s ("stage s") stores its alpha and beta
// vectors in words of 2P values. A stage with fewer than 2P values still takes
// a whole word. Stage n-1 sits at word 0, stage n-2 right after it, and so on
// down to stage 1; stage n (the root) lives in the channel RAM (alpha) and the
// codeword RAM (beta).
package polar_pkg;

  typedef enum logic [3:0] {
    OP_F          = 4'd0,   // alpha_l = f(alpha_v)                      descend
    OP_G          = 4'd1,   // alpha_r = g(alpha_v, beta_l)              descend
    OP_COMBINE    = 4'd2,   // beta_v = combine(beta_l, beta_r)          ascend
    OP_COMBINE_0R = 4'd3,   // beta_v = combine(0, beta_r)               ascend
    OP_G_0R       = 4'd4,   // alpha_r = g(alpha_v, 0)                   descend
    OP_P_R1       = 4'd5,   // beta_v = combine(beta_l, sign(g(...)))    ascend
    OP_P_RSPC     = 4'd6,   // beta_v = combine(beta_l, spc(g(...)))     ascend
    OP_P_01       = 4'd7,   // P-R1 with beta_l = 0                      ascend
    OP_P_0SPC     = 4'd8,   // P-RSPC with beta_l = 0                    ascend
    OP_ML         = 4'd9,   // beta_v = ML decision, length 4            ascend
    OP_REP        = 4'd10,  // beta_v = repetition decision, length<=16  ascend
    OP_REP_SPC    = 4'd11   // beta_v = REP-SPC decision, length 8       ascend
  } op_e;

  typedef enum logic {
    CHILD_LEFT  = 1'b0,
    CHILD_RIGHT = 1'b1
  } child_e;

  typedef struct packed {
    op_e    op;
    child_e child;
  } instr_t;


  // Instructions that move down the tree (produce an alpha vector).
  function automatic logic op_descends(op_e op);
    return (op == OP_F) || (op == OP_G) || (op == OP_G_0R);
  endfunction

  // Instructions whose left-child beta is known to be all zero.
  function automatic logic op_left_zero(op_e op);
    return (op == OP_G_0R) || (op == OP_COMBINE_0R) || (op == OP_P_01) ||
           (op == OP_P_0SPC);
  endfunction

  // Instructions that use the multi-word SPC path.
  function automatic logic op_is_spc(op_e op);
    return (op == OP_P_RSPC) || (op == OP_P_0SPC);
  endfunction

  // Number of 2P-value words a stage-s vector occupies.
  function automatic int unsigned stage_words(int unsigned s, int unsigned log2p2);
    return (s > log2p2) ? (32'd1 << (s - log2p2)) : 32'd1;
  endfunction

  // First word of stage s (1 <= s <= n-1) in the alpha and beta memories.
  function automatic int unsigned stage_base(int unsigned s, int unsigned n,
                                             int unsigned log2p2);
    int unsigned b;
    b = 0;
    for (int unsigned t = 31; t >= 1; t--) begin
      if (t < n && t > s) b += stage_words(t, log2p2);
    end
    return b;
  endfunction

  // Total words needed for stages 1..n-1.
  function automatic int unsigned mem_depth(int unsigned n, int unsigned log2p2);
    int unsigned d;
    d = 0;
    for (int unsigned t = 1; t < 32; t++) begin
      if (t < n) d += stage_words(t, log2p2);
    end
    return d;
  endfunction

endpackage
