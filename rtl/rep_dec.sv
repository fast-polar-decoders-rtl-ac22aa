// rep_dec: repetition-code decoder (the "REP" block of the processing unit).
//
// A repetition constituent code has only its last bit unfrozen, so every
// output bit equals the sign of the sum of the node's LLRs. The sum is a
// four-level adder tree over 16 inputs whose width grows by one bit per level,
// so it never saturates (both as in the paper). Inputs at positions at or
// above the node length 2^len_log2 are replaced with zeros. The output is the
// decision bit (1 when the sum is negative); the processing unit replicates
// it. Purely combinational.
module rep_dec #(
  parameter int unsigned W = 7
) (
  input  logic signed [W-1:0] alpha_in [16],
  input  logic [2:0]          len_log2,   // node length 2..16 as log2
  output logic                dec
);
  logic signed [W:0]   l1 [8];
  logic signed [W+1:0] l2 [4];
  logic signed [W+2:0] l3 [2];
  logic signed [W+3:0] l4;
  logic signed [W-1:0] x  [16];

  always_comb begin
    for (int i = 0; i < 16; i++)
      x[i] = (i < (1 << len_log2)) ? alpha_in[i] : '0;
    for (int i = 0; i < 8; i++) l1[i] = (W+1)'(x[2*i]) + (W+1)'(x[2*i+1]);
    for (int i = 0; i < 4; i++) l2[i] = (W+2)'(l1[2*i]) + (W+2)'(l1[2*i+1]);
    for (int i = 0; i < 2; i++) l3[i] = (W+3)'(l2[2*i]) + (W+3)'(l2[2*i+1]);
    l4  = (W+4)'(l3[0]) + (W+4)'(l3[1]);
    dec = l4[W+3];
  end
endmodule
