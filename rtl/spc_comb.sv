// spc_comb: one word of single-parity-check decoding (helper of spc_dec and
// repspc_dec).
//
// For the first 2^len_log2 of its N inputs it forms the hard decisions
// HD[i] = sign bit, their parity (Eq. (5)), and the index of the least
// reliable input (smallest magnitude) with a compare-select tree. Ties go to
// the lower index. Inputs beyond the node length are masked: they add no
// parity and never win the compare. `corrected` is HD with the least reliable
// bit flipped when the parity is odd (Eq. (6)), i.e. the full SPC decision
// when the whole node fits in this word. Purely combinational.
module spc_comb #(
  parameter int unsigned N  = 8,    // lanes (power of two)
  parameter int unsigned W  = 7,
  parameter int unsigned LW = 4     // width of len_log2
) (
  input  logic signed [W-1:0]     alpha_in [N],
  input  logic [LW-1:0]           len_log2,
  output logic                    hd        [N],
  output logic                    corrected [N],
  output logic                    parity,
  output logic [W-2:0]            min_mag,
  output logic [$clog2(N+1)-1:0]  min_idx
);
  localparam int unsigned IW = $clog2(N+1);
  // Heap-ordered compare-select tree: node k has children 2k and 2k+1,
  // the leaves are nodes N..2N-1.
  logic [W-2:0]  cs_mag [2*N];
  logic [IW-1:0] cs_idx [2*N];

  always_comb begin
    parity = 1'b0;
    for (int i = 0; i < N; i++) begin
      logic valid;
      logic [W-1:0] mag;
      valid = (64'(i) < (64'd1 << len_log2));
      mag   = alpha_in[i][W-1] ? -alpha_in[i] : alpha_in[i];
      hd[i] = valid & alpha_in[i][W-1];
      parity ^= hd[i];
      cs_mag[N+i] = valid ? mag[W-2:0] : '1;
      cs_idx[N+i] = IW'(i);
    end
    cs_mag[0] = '1;
    cs_idx[0] = '0;
    for (int k = N-1; k >= 1; k--) begin
      if (cs_mag[2*k+1] < cs_mag[2*k]) begin
        cs_mag[k] = cs_mag[2*k+1];
        cs_idx[k] = cs_idx[2*k+1];
      end else begin
        cs_mag[k] = cs_mag[2*k];
        cs_idx[k] = cs_idx[2*k];
      end
    end
    min_mag = cs_mag[1];
    min_idx = cs_idx[1];
    for (int i = 0; i < N; i++)
      corrected[i] = hd[i] ^ (parity && (IW'(i) == min_idx));
  end
endmodule
