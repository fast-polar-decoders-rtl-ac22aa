// combine_unit: the COMBINE block, beta_v from the two children's estimates.
//
// In the bit-reversed layout the decoder uses, Eq. (4) of the SC recursion
// becomes an interleave: beta_v[2i] = beta_l[i] xor beta_r[i] and
// beta_v[2i+1] = beta_r[i]. P pairs give one 2P-bit output word per cycle.
// COMBINE-0R and the P-01 / P-0SPC functions reuse this block with beta_l
// forced to zero by multiplexer m0 in the processing unit. Purely
// combinational.
module combine_unit #(
  parameter int unsigned P = 256
) (
  input  logic beta_l [P],
  input  logic beta_r [P],
  output logic beta_v [2*P]
);
  always_comb begin
    for (int i = 0; i < P; i++) begin
      beta_v[2*i]   = beta_l[i] ^ beta_r[i];
      beta_v[2*i+1] = beta_r[i];
    end
  end
endmodule
