// alpha_router: address generation and source selection for alpha values.
//
// Read side (issue cycle): for a node of stage s (length 2^s) and word k it
// reads from the channel RAM when s = n (the root; word k of the half being
// decoded) and from the alpha RAM otherwise (word base(s)+k). One cycle later,
// when the synchronous RAMs deliver, it forwards the selected 2P LLRs to the
// processing unit, sign-extending the WC-bit channel LLRs to W bits.
// Write side (execute cycle): the P outputs of word k of an F/G instruction at
// stage s belong to stage s-1; they go to memory k mod 2 at word
// base(s-1) + k div 2. Only the alpha RAM is written through this router.
// The split into channel and internal memories follows the paper; the address
// map (polar_pkg) is this design's.
module alpha_router
  import polar_pkg::*;
#(
  parameter int unsigned N   = 32768,
  parameter int unsigned P   = 256,
  parameter int unsigned W   = 7,
  parameter int unsigned WC  = 5,
  parameter int unsigned SW  = 5,
  parameter int unsigned KW  = 7,
  parameter int unsigned AW  = 7,          // alpha RAM address width
  parameter int unsigned CAW = 7           // channel RAM address width
) (
  input  logic                 clk,
  // issue cycle
  input  logic [SW-1:0]        rd_stage,
  input  logic [KW-1:0]        rd_word,
  input  logic                 chan_half,
  output logic [CAW-1:0]       chan_rd_addr,
  output logic [AW-1:0]        aram_rd_addr,
  // execute cycle
  input  logic signed [WC-1:0] chan_data [2*P],
  input  logic signed [W-1:0]  aram_data [2*P],
  output logic signed [W-1:0]  alpha_out [2*P],
  input  logic                 wr_en,
  input  logic [SW-1:0]        wr_stage,
  input  logic [KW-1:0]        wr_word,
  output logic                 aram_we,
  output logic                 aram_wr_sel,
  output logic [AW-1:0]        aram_wr_addr
);
  localparam int unsigned LOGN  = $clog2(N);
  localparam int unsigned LOG2P = $clog2(2*P);

  logic from_chan;

  always_comb begin
    chan_rd_addr = {chan_half, (CAW-1)'(rd_word)};
    aram_rd_addr = AW'(stage_base(32'(rd_stage), LOGN, LOG2P)) + AW'(rd_word);
    aram_we      = wr_en;
    aram_wr_sel  = wr_word[0];
    aram_wr_addr = AW'(stage_base(32'(wr_stage) - 1, LOGN, LOG2P)) + AW'(wr_word >> 1);
  end

  always_ff @(posedge clk) from_chan <= (32'(rd_stage) == LOGN);

  always_comb
    for (int i = 0; i < 2*P; i++)
      alpha_out[i] = from_chan ? W'(chan_data[i]) : aram_data[i];
endmodule
