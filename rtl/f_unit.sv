// f_unit: P parallel min-sum f elements (the "f" block of the processing unit).
//
// Element i computes alpha_l[i] = sign(a)sign(b)min(|a|,|b|) with
// a = alpha[2i], b = alpha[2i+1]. Because the decoder keeps its vectors in
// bit-reversed order, the two inputs of an element are adjacent values and
// the output lands in the right place for every constituent-code length.
// Inputs are two's complement in the symmetric range +-(2^(W-1)-1), so the
// result needs no saturation. Purely combinational. The min-sum rule and the
// separate f and g blocks in two's complement follow the paper.
module f_unit #(
  parameter int unsigned P = 256,   // number of f elements
  parameter int unsigned W = 7      // internal LLR width
) (
  input  logic signed [W-1:0] alpha_in  [2*P],
  output logic signed [W-1:0] alpha_out [P]
);
  always_comb begin
    for (int i = 0; i < P; i++) begin
      logic signed [W-1:0] a, b, ma, mb, m;
      a  = alpha_in[2*i];
      b  = alpha_in[2*i+1];
      ma = a[W-1] ? -a : a;
      mb = b[W-1] ? -b : b;
      m  = (ma < mb) ? ma : mb;
      alpha_out[i] = (a[W-1] ^ b[W-1]) ? -m : m;
    end
  end
endmodule
