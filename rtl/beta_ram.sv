// beta_ram: memory for the internal beta (hard-decision) vectors.
//
// Two memories, 2P bits wide: one holds the outputs of left children, the
// other those of right children. A write stores a whole 2P-bit word in the
// memory chosen by wr_sel (what COMBINE produces in one cycle; shorter
// outputs such as REP or ML still take a full word). A read addresses P-bit
// half words: both memories are read at word rd_addr>>1 and the lower or upper
// half of each is returned according to rd_addr[0], giving P bits of beta_l
// and P bits of beta_r. Reads are synchronous, with the same write bypass
// register as the alpha memory (this design adds it here because beta is
// also read in the cycle it is written). Two 2P-bit memories and the even/odd
// half selection follow the paper.
module beta_ram #(
  parameter int unsigned P     = 256,
  parameter int unsigned DEPTH = 71,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic [AW:0]   rd_addr,     // half-word address
  output logic          rd_left  [P],
  output logic          rd_right [P],
  input  logic          we,
  input  logic          wr_sel,      // 0: left memory, 1: right memory
  input  logic [AW-1:0] wr_addr,
  input  logic          wr_data  [2*P]
);
  logic [2*P-1:0] meml [DEPTH];
  logic [2*P-1:0] memr [DEPTH];
  logic [2*P-1:0] ql, qr, byp, wr_packed;
  logic           hitl, hitr, half;
  logic [AW-1:0]  rd_word;

  assign rd_word = rd_addr[AW:1];

  always_comb
    for (int i = 0; i < 2*P; i++) wr_packed[i] = wr_data[i];

  always_ff @(posedge clk) begin
    if (we && !wr_sel) meml[wr_addr] <= wr_packed;
    if (we &&  wr_sel) memr[wr_addr] <= wr_packed;
    ql   <= meml[rd_word];
    qr   <= memr[rd_word];
    byp  <= wr_packed;
    half <= rd_addr[0];
    hitl <= we && !wr_sel && (wr_addr == rd_word);
    hitr <= we &&  wr_sel && (wr_addr == rd_word);
  end

  always_comb begin
    logic [2*P-1:0] l, r;
    l = hitl ? byp : ql;
    r = hitr ? byp : qr;
    for (int i = 0; i < P; i++) begin
      rd_left[i]  = half ? l[P+i] : l[i];
      rd_right[i] = half ? r[P+i] : r[i];
    end
  end
endmodule
