// repspc_dec: the REP-SPC block, a length-8 node whose left child is a
// length-4 repetition code and whose right child is a length-4 SPC code.
//
// As in the paper, four f elements form the repetition child's LLRs and a
// small repetition decoder takes their sign of sum. At the same time eight g
// elements form both candidate inputs of the SPC child, one assuming the
// repetition output is all zeros (SPC0) and one assuming all ones (SPC1).
// The repetition decision selects between the two SPC results and the two
// children are combined (bit-reversed layout): beta_v[2i] = rep ^ spc[i],
// beta_v[2i+1] = spc[i]. Purely combinational.
// The shared SPC helper also reports the uncorrected decisions, parity and
// minimum of each candidate; only the corrected vectors are used here, so the
// linter lists the other helper outputs as unused.
module repspc_dec #(
  parameter int unsigned W = 7
) (
  input  logic signed [W-1:0] alpha_in [8],
  output logic                beta_out [8]
);
  logic signed [W-1:0] a_rep  [4];
  logic signed [W-1:0] a_rep16[16];
  logic signed [W-1:0] a_spc0 [4];
  logic signed [W-1:0] a_spc1 [4];
  logic                zero4  [4];
  logic                one4   [4];
  logic                rep;
  logic                b0 [4], b1 [4], h0 [4], h1 [4];
  logic                p0, p1;
  logic [W-2:0]        m0, m1;
  logic [2:0]          i0, i1;

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      zero4[i] = 1'b0;
      one4[i]  = 1'b1;
    end
    for (int i = 0; i < 16; i++) a_rep16[i] = (i < 4) ? a_rep[i] : '0;
  end

  f_unit #(.P(4), .W(W)) u_f (.alpha_in(alpha_in), .alpha_out(a_rep));
  g_unit #(.P(4), .W(W)) u_g0 (.alpha_in(alpha_in), .beta_l(zero4), .alpha_out(a_spc0));
  g_unit #(.P(4), .W(W)) u_g1 (.alpha_in(alpha_in), .beta_l(one4),  .alpha_out(a_spc1));
  rep_dec #(.W(W)) u_rep (.alpha_in(a_rep16), .len_log2(3'd2), .dec(rep));
  spc_comb #(.N(4), .W(W), .LW(2)) u_spc0 (
    .alpha_in(a_spc0), .len_log2(2'd2), .hd(h0), .corrected(b0),
    .parity(p0), .min_mag(m0), .min_idx(i0));
  spc_comb #(.N(4), .W(W), .LW(2)) u_spc1 (
    .alpha_in(a_spc1), .len_log2(2'd2), .hd(h1), .corrected(b1),
    .parity(p1), .min_mag(m1), .min_idx(i1));

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      logic s;
      s = rep ? b1[i] : b0[i];
      beta_out[2*i]   = rep ^ s;
      beta_out[2*i+1] = s;
    end
  end
endmodule
