// ml_dec: the ML block, exhaustive-search maximum-likelihood decoding of the
// one length-4 constituent code the decoder supports.
//
// That code has its first and third leaf bits frozen and the second and
// fourth unfrozen, u = (0, a, 0, b). In the decoder's bit-reversed layout
// its four codewords are x = (a^b, b, a^b, b): 0000, 1111, 0101 and 1010.
// Four depth-two adder trees add +alpha[i] where x[i] = 0 and -alpha[i]
// where x[i] = 1 (the correlation of the codeword with the LLRs); a depth-two
// comparator tree picks the largest, ties going to the earlier candidate.
// Purely combinational, as in the paper.
module ml_dec #(
  parameter int unsigned W = 7
) (
  input  logic signed [W-1:0] alpha_in [4],
  output logic                beta_out [4]
);
  // Candidate codewords, lane 0 in bit 0.
  localparam logic [3:0] CW [4] = '{4'b0000, 4'b1111, 4'b1010, 4'b0101};

  logic signed [W+1:0] rel [4];
  logic [1:0]          w01, w23, win;

  always_comb begin
    for (int c = 0; c < 4; c++) begin
      logic signed [W:0] s0, s1;
      s0 = (CW[c][0] ? -(W+1)'(alpha_in[0]) : (W+1)'(alpha_in[0])) +
           (CW[c][1] ? -(W+1)'(alpha_in[1]) : (W+1)'(alpha_in[1]));
      s1 = (CW[c][2] ? -(W+1)'(alpha_in[2]) : (W+1)'(alpha_in[2])) +
           (CW[c][3] ? -(W+1)'(alpha_in[3]) : (W+1)'(alpha_in[3]));
      rel[c] = (W+2)'(s0) + (W+2)'(s1);
    end
    w01 = (rel[1] > rel[0]) ? 2'd1 : 2'd0;
    w23 = (rel[3] > rel[2]) ? 2'd3 : 2'd2;
    win = (rel[w23] > rel[w01]) ? w23 : w01;
    for (int i = 0; i < 4; i++) beta_out[i] = CW[win][i];
  end
endmodule
