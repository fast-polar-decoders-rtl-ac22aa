// g_unit: P parallel g elements (the "g" block of the processing unit).
//
// Element i computes alpha_r[i] = alpha[2i+1] + alpha[2i] when beta_l[i] = 0
// and alpha[2i+1] - alpha[2i] when beta_l[i] = 1, saturated to the symmetric
// range +-(2^(W-1)-1) as the paper prescribes. The adder is one bit wider than
// the LLRs so the saturation test sees the true sum. Purely combinational; it
// sits on the decoder's critical path (g -> SPC -> COMBINE), which is why the
// paper keeps f and g as separate two's-complement blocks.
module g_unit #(
  parameter int unsigned P = 256,
  parameter int unsigned W = 7
) (
  input  logic signed [W-1:0] alpha_in  [2*P],
  input  logic                beta_l    [P],
  output logic signed [W-1:0] alpha_out [P]
);
  localparam logic signed [W:0] MAXV = (W+1)'((1 << (W-1)) - 1);

  always_comb begin
    for (int i = 0; i < P; i++) begin
      logic signed [W:0] a, b, s;
      a = {alpha_in[2*i][W-1],   alpha_in[2*i]};
      b = {alpha_in[2*i+1][W-1], alpha_in[2*i+1]};
      s = beta_l[i] ? (b - a) : (b + a);
      if (s > MAXV)       alpha_out[i] = MAXV[W-1:0];
      else if (s < -MAXV) alpha_out[i] = -MAXV[W-1:0];
      else                alpha_out[i] = s[W-1:0];
    end
  end
endmodule
