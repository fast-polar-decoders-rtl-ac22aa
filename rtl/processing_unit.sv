// processing_unit: the data processing unit (the decoder's ALU).
//
// One 2P-LLR alpha word and P bits each of the left (beta0) and right (beta1)
// child estimates come in; one P-LLR alpha' word and a 2P-bit beta word go
// out, in the same cycle. The structure is the paper's: multiplexer m0 feeds
// the g block and COMBINE either the stored left estimate or zeros; m1 picks
// f or g as alpha'; the sign of g (a rate-1 right child) or the SPC decision
// (an SPC right child) or the stored right estimate feeds COMBINE through m3;
// m2 picks REP, REP-SPC, ML or COMBINE as beta0'. beta1' is the COMBINE
// output, which is what the root node writes to the codeword RAM.
//
// Multi-word SPC nodes (P-RSPC / P-0SPC with an SPC child longer than P):
// each word is written with the plain hard decisions. Whenever the SPC block
// reports a new least-reliable bit, this unit keeps a copy of the current
// COMBINE word and its word index. In the extra cycle the controller adds
// after the last word (`fix`), both beta outputs carry that copy with the two
// bits that depend on the least reliable bit flipped, and `fix_write` is high
// if the parity was odd. The saved-word register and the extra cycle are this
// design's choice; the paper only says the SPC output of such nodes is ready
// some cycles after the last input word.
module processing_unit
  import polar_pkg::*;
#(
  parameter int unsigned P  = 256,
  parameter int unsigned W  = 7,
  parameter int unsigned SW = 5,    // width of the stage number
  parameter int unsigned KW = 7     // width of the word index
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                valid,     // a word to process this cycle
  input  logic                fix,       // SPC correction cycle
  input  op_e                 op,
  input  logic [SW-1:0]       stage,     // log2 of the node length
  input  logic                first,     // first word of the instruction
  input  logic [KW-1:0]       word,      // word index within the node
  input  logic signed [W-1:0] alpha_in  [2*P],
  input  logic                beta0_in  [P],
  input  logic                beta1_in  [P],
  output logic signed [W-1:0] alpha_out [P],
  output logic                beta0_out [2*P],
  output logic                beta1_out [2*P],
  output logic                fix_write,
  output logic [KW-1:0]       fix_word
);
  localparam int unsigned IW = $clog2(P+1);

  logic                bl        [P];
  logic signed [W-1:0] f_out     [P];
  logic signed [W-1:0] g_out     [P];
  logic                sgn       [P];
  logic                spc_out   [P];
  logic                br        [P];
  logic                comb_out  [2*P];
  logic                rep_bit;
  logic                repspc_out[8];
  logic                ml_out    [4];
  logic signed [W-1:0] rep_in    [16];
  logic signed [W-1:0] rs_in     [8];
  logic signed [W-1:0] ml_in     [4];
  logic                spc_new_min, spc_par;
  logic [IW-1:0]       spc_lane;
  logic                saved     [2*P];
  logic [KW-1:0]       saved_word;
  logic [SW-1:0]       spc_len;

  // m0: left estimate or zero
  always_comb
    for (int i = 0; i < P; i++) bl[i] = op_left_zero(op) ? 1'b0 : beta0_in[i];

  f_unit #(.P(P), .W(W)) u_f (.alpha_in(alpha_in), .alpha_out(f_out));
  g_unit #(.P(P), .W(W)) u_g (.alpha_in(alpha_in), .beta_l(bl), .alpha_out(g_out));

  // sign block and the small leaf decoders, which read the first lanes
  always_comb begin
    for (int i = 0; i < P; i++) sgn[i] = g_out[i][W-1];
    for (int i = 0; i < 16; i++) rep_in[i] = alpha_in[i];
    for (int i = 0; i < 8; i++)  rs_in[i]  = alpha_in[i];
    for (int i = 0; i < 4; i++)  ml_in[i]  = alpha_in[i];
    spc_len = stage - SW'(1);
  end

  rep_dec #(.W(W)) u_rep (
    .alpha_in(rep_in),
    .len_log2(stage > SW'(4) ? 3'd4 : stage[2:0]),
    .dec(rep_bit));
  repspc_dec #(.W(W)) u_repspc (.alpha_in(rs_in), .beta_out(repspc_out));
  ml_dec #(.W(W)) u_ml (.alpha_in(ml_in), .beta_out(ml_out));

  spc_dec #(.P(P), .W(W), .LW(SW)) u_spc (
    .clk       (clk),
    .rst_n     (rst_n),
    .en        (valid && op_is_spc(op)),
    .first     (first),
    .len_log2  (spc_len),
    .alpha_in  (g_out),
    .beta_out  (spc_out),
    .new_min   (spc_new_min),
    .fix_parity(spc_par),
    .fix_lane  (spc_lane));

  // m3: right estimate into COMBINE
  always_comb begin
    for (int i = 0; i < P; i++) begin
      unique case (op)
        OP_P_R1, OP_P_01:     br[i] = sgn[i];
        OP_P_RSPC, OP_P_0SPC: br[i] = spc_out[i];
        default:              br[i] = beta1_in[i];
      endcase
    end
  end

  combine_unit #(.P(P)) u_comb (.beta_l(bl), .beta_r(br), .beta_v(comb_out));

  // copy of the word holding the least reliable SPC bit
  always_ff @(posedge clk) begin
    if (spc_new_min) begin
      saved      <= comb_out;
      saved_word <= word;
    end
  end

  assign fix_write = fix && spc_par;
  assign fix_word  = saved_word;

  // m1, m2 and the output of the correction cycle
  always_comb begin
    for (int i = 0; i < P; i++) alpha_out[i] = (op == OP_F) ? f_out[i] : g_out[i];
    for (int i = 0; i < 2*P; i++) begin
      logic fixed;
      fixed = saved[i] ^ (IW'(i >> 1) == spc_lane);
      beta1_out[i] = fix ? fixed : comb_out[i];
      unique case (op)
        OP_REP:     beta0_out[i] = rep_bit;
        OP_REP_SPC: beta0_out[i] = (i < 8) ? repspc_out[i % 8] : 1'b0;
        OP_ML:      beta0_out[i] = (i < 4) ? ml_out[i % 4] : 1'b0;
        default:    beta0_out[i] = fix ? fixed : comb_out[i];
      endcase
    end
  end
endmodule
