// polar_decoder: flexible Fast-SSC polar decoder (top level).
//
// Decodes any polar code of length N = 2^n for which it is given a program:
// the list of node functions of the code's pruned decoder tree, compiled
// offline and written into the instruction RAM. Channel LLRs enter BUS per
// cycle through a valid/ready port into a two-frame channel RAM, so the next
// frame loads while the current one is decoded. The controller walks the
// program; the alpha and beta routers map each (stage, word) onto the channel
// RAM, the internal alpha RAM, the internal beta RAM or the codeword RAM; the
// processing unit evaluates up to P f/g pairs (2P LLRs) per cycle. The
// estimated codeword (systematic, in channel order) is left in the codeword
// RAM and est_valid goes high; the host reads it RDW bits per cycle through
// est_rd_addr/est_rd_data (one-cycle read latency) and pulses est_release.
// The decoder stalls before writing the next frame's estimate if the previous
// one has not been released.
//
// Default sizes are the paper's main configuration: N = 32768, P = 256,
// (7,5,1) quantisation (7-bit internal and 5-bit channel LLRs; fractional
// bits do not change the hardware), 32 LLRs per input beat, 256-bit estimate
// read bus and a 3000-instruction program memory. Requires 2P >= 16 and
// 2P >= RDW and 2P >= BUS.
//
// Latency: one cycle per 2P-LLR word of every instruction, plus one cycle per
// multi-word SPC node and one cycle of pipeline fill per frame.
//
// Lint notes: the controller's a_valid, busy and stall outputs are left
// unused here (they are status signals for observation), and the asynchronous
// reset also feeds the disable condition of the loader's handshake assertion,
// which the linter reports as a mixed sync/async use; neither is logic.
module polar_decoder
  import polar_pkg::*;
#(
  parameter int unsigned N      = 32768,
  parameter int unsigned P      = 256,
  parameter int unsigned W      = 7,
  parameter int unsigned WC     = 5,
  parameter int unsigned BUS    = 32,
  parameter int unsigned RDW    = 256,
  parameter int unsigned IDEPTH = 3000,
  parameter int unsigned IAW    = $clog2(IDEPTH),
  parameter int unsigned ERAW   = $clog2(N/RDW)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 run,
  // program load
  input  logic                 instr_we,
  input  logic [IAW-1:0]       instr_addr,
  input  instr_t               instr_data,
  // channel input
  input  logic                 ch_valid,
  output logic                 ch_ready,
  input  logic signed [WC-1:0] ch_data [BUS],
  // estimate output
  output logic                 est_valid,
  input  logic [ERAW-1:0]      est_rd_addr,
  output logic [RDW-1:0]       est_rd_data,
  input  logic                 est_release
);
  localparam int unsigned LOGN   = $clog2(N);
  localparam int unsigned LOG2P  = $clog2(2*P);
  localparam int unsigned SW     = $clog2(LOGN + 2);
  localparam int unsigned KW     = $clog2(N/(2*P)) + 1;
  localparam int unsigned MDEPTH = mem_depth(LOGN, LOG2P);
  localparam int unsigned MAW    = $clog2(MDEPTH);
  localparam int unsigned CAW    = $clog2(2*N/(2*P));
  localparam int unsigned CWW    = (N/(2*P) > 1) ? $clog2(N/(2*P)) : 1;
  localparam int unsigned BANKS  = 2*P/BUS;
  localparam int unsigned BW     = (BANKS > 1) ? $clog2(BANKS) : 1;

  // instruction path
  logic [IAW-1:0] ir_addr;
  instr_t         ir;
  // loader
  logic                 frame_ready, frame_done, rd_half;
  logic                 cr_we;
  logic [BW-1:0]        cr_bank;
  logic [CAW-1:0]       cr_addr;
  logic signed [WC-1:0] cr_data [BUS];
  // controller
  logic           a_valid, b_valid, b_fix, b_child, b_first, b_frame_end, busy, stall;
  logic [SW-1:0]  a_stage, b_stage;
  logic [KW-1:0]  a_word, b_word;
  op_e            b_op;
  // memories
  logic [CAW-1:0]       chan_rd_addr;
  logic signed [WC-1:0] chan_q [2*P];
  logic [MAW-1:0]       aram_rd_addr, aram_wr_addr;
  logic signed [W-1:0]  aram_q [2*P];
  logic                 aram_we, aram_wr_sel;
  logic [MAW:0]         bram_rd_addr;
  logic                 bram_we, bram_wr_sel;
  logic [MAW-1:0]       bram_wr_addr;
  logic                 beta_l [P];
  logic                 beta_r [P];
  logic                 cw_we;
  logic [CWW-1:0]       cw_wr_addr;
  // processing unit
  logic signed [W-1:0]  alpha_in  [2*P];
  logic signed [W-1:0]  alpha_out [P];
  logic                 beta0_out [2*P];
  logic                 beta1_out [2*P];
  logic                 fix_write;
  logic [KW-1:0]        fix_word;

  instr_ram #(.DEPTH(IDEPTH), .AW(IAW)) u_iram (
    .clk(clk), .we(instr_we), .wr_addr(instr_addr), .wr_data(instr_data),
    .rd_addr(ir_addr), .rd_data(ir));

  controller #(.N(N), .P(P), .IDEPTH(IDEPTH), .SW(SW), .KW(KW), .IAW(IAW)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .run(run),
    .ir_addr(ir_addr), .ir(ir),
    .frame_ready(frame_ready), .frame_done(frame_done),
    .est_busy(est_valid),
    .a_valid(a_valid), .a_stage(a_stage), .a_word(a_word),
    .b_valid(b_valid), .b_fix(b_fix), .b_op(b_op), .b_child(b_child),
    .b_stage(b_stage), .b_word(b_word), .b_first(b_first),
    .b_frame_end(b_frame_end), .busy(busy), .stall(stall));

  channel_loader #(.N(N), .P(P), .WC(WC), .BUS(BUS), .BANKS(BANKS), .AW(CAW), .BW(BW)) u_load (
    .clk(clk), .rst_n(rst_n),
    .in_valid(ch_valid), .in_ready(ch_ready), .in_data(ch_data),
    .ram_we(cr_we), .ram_bank(cr_bank), .ram_addr(cr_addr), .ram_data(cr_data),
    .frame_done(frame_done), .frame_ready(frame_ready), .rd_half(rd_half));

  channel_ram #(.N(N), .P(P), .WC(WC), .BUS(BUS), .BANKS(BANKS), .DEPTH(2*N/(2*P)),
                .AW(CAW), .BW(BW)) u_cram (
    .clk(clk), .we(cr_we), .wr_bank(cr_bank), .wr_addr(cr_addr), .wr_data(cr_data),
    .rd_addr(chan_rd_addr), .rd_data(chan_q));

  alpha_router #(.N(N), .P(P), .W(W), .WC(WC), .SW(SW), .KW(KW), .AW(MAW), .CAW(CAW)) u_arouter (
    .clk(clk),
    .rd_stage(a_stage), .rd_word(a_word), .chan_half(rd_half),
    .chan_rd_addr(chan_rd_addr), .aram_rd_addr(aram_rd_addr),
    .chan_data(chan_q), .aram_data(aram_q), .alpha_out(alpha_in),
    .wr_en(b_valid && op_descends(b_op)), .wr_stage(b_stage), .wr_word(b_word),
    .aram_we(aram_we), .aram_wr_sel(aram_wr_sel), .aram_wr_addr(aram_wr_addr));

  alpha_ram #(.P(P), .W(W), .DEPTH(MDEPTH), .AW(MAW)) u_aram (
    .clk(clk), .rd_addr(aram_rd_addr), .rd_data(aram_q),
    .we(aram_we), .wr_sel(aram_wr_sel), .wr_addr(aram_wr_addr), .wr_data(alpha_out));

  processing_unit #(.P(P), .W(W), .SW(SW), .KW(KW)) u_pu (
    .clk(clk), .rst_n(rst_n), .valid(b_valid), .fix(b_fix), .op(b_op),
    .stage(b_stage), .first(b_first), .word(b_word),
    .alpha_in(alpha_in), .beta0_in(beta_l), .beta1_in(beta_r),
    .alpha_out(alpha_out), .beta0_out(beta0_out), .beta1_out(beta1_out),
    .fix_write(fix_write), .fix_word(fix_word));

  beta_router #(.N(N), .P(P), .SW(SW), .KW(KW), .AW(MAW), .CWW(CWW)) u_brouter (
    .rd_stage(a_stage), .rd_word(a_word), .bram_rd_addr(bram_rd_addr),
    .wr_en(b_valid && !op_descends(b_op)), .wr_stage(b_stage), .wr_word(b_word),
    .wr_child(b_child), .fix(b_fix), .fix_write(fix_write), .fix_word(fix_word),
    .bram_we(bram_we), .bram_wr_sel(bram_wr_sel), .bram_wr_addr(bram_wr_addr),
    .cw_we(cw_we), .cw_wr_addr(cw_wr_addr));

  beta_ram #(.P(P), .DEPTH(MDEPTH), .AW(MAW)) u_bram (
    .clk(clk), .rd_addr(bram_rd_addr), .rd_left(beta_l), .rd_right(beta_r),
    .we(bram_we), .wr_sel(bram_wr_sel), .wr_addr(bram_wr_addr), .wr_data(beta0_out));

  codeword_ram #(.N(N), .P(P), .RDW(RDW), .WDEPTH(N/(2*P)), .WAW(CWW), .RAW(ERAW)) u_cwram (
    .clk(clk), .we(cw_we), .wr_addr(cw_wr_addr), .wr_data(beta1_out),
    .rd_addr(est_rd_addr), .rd_data(est_rd_data));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           est_valid <= 1'b0;
    else if (b_frame_end) est_valid <= 1'b1;
    else if (est_release) est_valid <= 1'b0;
  end
endmodule
