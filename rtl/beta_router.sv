// beta_router: address generation and destination selection for beta values.
//
// Read side (issue cycle): G, COMBINE and the P- instructions of a stage-s
// node need the estimates of its children, which live in stage s-1. Word k
// of the instruction needs bits [kP, (k+1)P) of them, found at half-word
// address 2*base(s-1) + k of both beta memories (left and right).
// Write side (execute cycle): the 2P-bit result of word k of a node at
// stage s goes to the codeword RAM (word k) when s = n, and otherwise to the
// left or right beta memory, chosen by the instruction's child bit, at word
// base(s)+k. In the SPC correction cycle the word index comes from the
// processing unit. The routing roles follow the paper; the address map is
// this design's.
module beta_router
  import polar_pkg::*;
#(
  parameter int unsigned N   = 32768,
  parameter int unsigned P   = 256,
  parameter int unsigned SW  = 5,
  parameter int unsigned KW  = 7,
  parameter int unsigned AW  = 7,          // beta RAM word address width
  parameter int unsigned CWW = 6           // codeword RAM write address width
) (
  // issue cycle
  input  logic [SW-1:0]  rd_stage,
  input  logic [KW-1:0]  rd_word,
  output logic [AW:0]    bram_rd_addr,
  // execute cycle
  input  logic           wr_en,
  input  logic [SW-1:0]  wr_stage,
  input  logic [KW-1:0]  wr_word,
  input  logic           wr_child,
  input  logic           fix,
  input  logic           fix_write,
  input  logic [KW-1:0]  fix_word,
  output logic           bram_we,
  output logic           bram_wr_sel,
  output logic [AW-1:0]  bram_wr_addr,
  output logic           cw_we,
  output logic [CWW-1:0] cw_wr_addr
);
  localparam int unsigned LOGN  = $clog2(N);
  localparam int unsigned LOG2P = $clog2(2*P);

  logic          en, root;
  logic [KW-1:0] k;

  always_comb begin
    bram_rd_addr = (AW+1)'(2 * stage_base(32'(rd_stage) - 1, LOGN, LOG2P)) + (AW+1)'(rd_word);
    en           = fix ? fix_write : wr_en;
    k            = fix ? fix_word : wr_word;
    root         = (32'(wr_stage) == LOGN);
    bram_we      = en && !root;
    bram_wr_sel  = wr_child;
    bram_wr_addr = AW'(stage_base(32'(wr_stage), LOGN, LOG2P)) + AW'(k);
    cw_we        = en && root;
    cw_wr_addr   = CWW'(k);
  end
endmodule
