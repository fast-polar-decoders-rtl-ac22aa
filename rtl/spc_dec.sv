// spc_dec: the SPC block of the processing unit.
//
// Decodes a single-parity-check constituent code of length 2^len_log2 whose
// LLRs arrive P per cycle from the g elements. When the code fits in one word
// (length <= P) the corrected decision is produced in the same cycle. Longer
// codes arrive over several words (first ... last): each word's hard
// decisions leave immediately, while a register stage keeps the running
// parity and the smallest magnitude seen so far with its lane. `new_min`
// tells the processing unit that the current word now holds the least
// reliable bit, so it can keep a copy of that output word; after the last
// word, fix_parity / fix_lane say whether and where that copy must have its
// bit flipped. Comparing each new word with the running result and updating
// a register follows the paper. The paper also puts pipeline registers inside
// the compare-select tree (1 cycle for lengths 9..64, 2 for 65..256); this
// design keeps the tree combinational and has one correction cycle in total.
module spc_dec #(
  parameter int unsigned P  = 256,
  parameter int unsigned W  = 7,
  parameter int unsigned LW = 5
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,        // a valid SPC word this cycle
  input  logic                   first,     // first word of the node
  input  logic [LW-1:0]          len_log2,  // log2 of the SPC code length
  input  logic signed [W-1:0]    alpha_in [P],
  output logic                   beta_out [P],
  output logic                   new_min,
  output logic                   fix_parity,
  output logic [$clog2(P+1)-1:0] fix_lane
);
  localparam int unsigned IW = $clog2(P+1);
  localparam int unsigned LOGP = $clog2(P);

  logic          multi;
  logic          hd [P];
  logic          corr [P];
  logic          w_par;
  logic [W-2:0]  w_mag;
  logic [IW-1:0] w_idx;
  logic [LW-1:0] word_len;
  logic [W-2:0]  run_mag;

  assign multi    = (32'(len_log2) > LOGP);
  assign word_len = multi ? LW'(LOGP) : len_log2;

  spc_comb #(.N(P), .W(W), .LW(LW)) u_word (
    .alpha_in (alpha_in),
    .len_log2 (word_len),
    .hd       (hd),
    .corrected(corr),
    .parity   (w_par),
    .min_mag  (w_mag),
    .min_idx  (w_idx)
  );

  always_comb begin
    for (int i = 0; i < P; i++) beta_out[i] = multi ? hd[i] : corr[i];
    new_min = en && multi && (first || (w_mag < run_mag));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_mag    <= '1;
      fix_lane   <= '0;
      fix_parity <= 1'b0;
    end else if (en && multi) begin
      fix_parity <= first ? w_par : (fix_parity ^ w_par);
      if (new_min) begin
        run_mag  <= w_mag;
        fix_lane <= w_idx;
      end
    end
  end
endmodule
