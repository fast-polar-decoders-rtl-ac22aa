// controller: fetches and decodes the decoding program and sequences the
// datapath.
//
// The program is the node functions of the decoder tree in depth-first order,
// compiled offline. The controller only tracks the stage s of the current node
// (log2 of its length) and a word counter: F, G and G-0R move one stage down,
// every other function produces the node's estimate and moves one stage up.
// An instruction at stage s takes max(1, 2^s/(2P)) words; ML, REP and REP-SPC
// take one. The frame ends with the function that produces the root's
// estimate; the program counter then returns to 0.
//
// Two-stage pipeline: in the issue cycle (a_*) the routers turn stage and word
// into RAM read addresses; in the execute cycle (b_*) the RAM data reach the
// processing unit and the result is written. One word is issued per cycle,
// back to back across instructions; a value written in the execute cycle and
// read in the same cycle by the next instruction is supplied by the RAM
// bypass registers. After the last word of a P-RSPC/P-0SPC instruction whose
// SPC child spans several words one issue slot is left for the SPC correction
// write (b_fix). A new frame starts when `run` is high and the channel loader
// reports a full half; the controller tells the loader when that frame is
// done. The root's estimate is not written while the previous estimate still
// waits in the codeword RAM (est_busy): the decoder then stalls.
// Fetch/decode of a precompiled instruction list, stage tracking, starting
// channel loading and triggering the processing unit follow the paper; the
// pipeline and the stall rule are this design's.
module controller
  import polar_pkg::*;
#(
  parameter int unsigned N     = 32768,
  parameter int unsigned P     = 256,
  parameter int unsigned IDEPTH = 3000,
  parameter int unsigned SW    = 5,
  parameter int unsigned KW    = 7,
  parameter int unsigned IAW   = $clog2(IDEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           run,
  // instruction memory
  output logic [IAW-1:0] ir_addr,
  input  instr_t         ir,
  // channel loader
  input  logic           frame_ready,
  output logic           frame_done,
  // codeword buffer
  input  logic           est_busy,
  // issue cycle
  output logic           a_valid,
  output logic [SW-1:0]  a_stage,
  output logic [KW-1:0]  a_word,
  // execute cycle
  output logic           b_valid,
  output logic           b_fix,
  output op_e            b_op,
  output logic           b_child,
  output logic [SW-1:0]  b_stage,
  output logic [KW-1:0]  b_word,
  output logic           b_first,
  output logic           b_frame_end,
  output logic           busy,
  output logic           stall
);
  localparam int unsigned LOGN  = $clog2(N);
  localparam int unsigned LOG2P = $clog2(2*P);

  logic [IAW-1:0] pc, pc_next;
  logic [SW-1:0]  s;
  logic [KW-1:0]  k;
  logic           fix_pending, fix_end;
  logic [SW-1:0]  fix_stage;
  logic           fix_child;
  logic           start;
  logic           root_op, last_word, issue;
  logic [KW-1:0]  nwords_m1;

  always_comb begin
    root_op   = !op_descends(ir.op) && (32'(s) == LOGN);
    if (ir.op == OP_ML || ir.op == OP_REP || ir.op == OP_REP_SPC)
      nwords_m1 = '0;
    else
      nwords_m1 = KW'(stage_words(32'(s), LOG2P) - 1);
    last_word = (k == nwords_m1);
    stall     = busy && !fix_pending && root_op && est_busy;
    issue     = busy && !fix_pending && !stall;
    start     = !busy && run && frame_ready && !fix_pending;
    a_valid   = issue;
    a_stage   = s;
    a_word    = k;
    frame_done = issue && last_word && root_op;
    pc_next   = (issue && last_word) ? (root_op ? '0 : pc + 1'b1) : pc;
    ir_addr   = pc_next;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc          <= '0;
      s           <= SW'(LOGN);
      k           <= '0;
      busy        <= 1'b0;
      fix_pending <= 1'b0;
      fix_end     <= 1'b0;
      fix_stage   <= '0;
      fix_child   <= 1'b0;
      b_valid     <= 1'b0;
      b_fix       <= 1'b0;
      b_op        <= OP_F;
      b_child     <= 1'b0;
      b_stage     <= '0;
      b_word      <= '0;
      b_first     <= 1'b0;
      b_frame_end <= 1'b0;
    end else begin
      pc <= pc_next;
      if (start) begin
        busy <= 1'b1;
        s    <= SW'(LOGN);
        k    <= '0;
      end
      // execute-stage control
      b_valid     <= issue;
      b_fix       <= fix_pending;
      b_first     <= (k == '0);
      b_frame_end <= fix_pending ? fix_end
                                 : (issue && last_word && root_op && !(op_is_spc(ir.op) && nwords_m1 != '0));
      if (fix_pending) begin
        b_stage <= fix_stage;
        b_child <= fix_child;
        fix_pending <= 1'b0;
      end else begin
        b_op    <= ir.op;
        b_child <= ir.child;
        b_stage <= s;
        b_word  <= k;
      end
      if (issue) begin
        if (last_word) begin
          k <= '0;
          s <= op_descends(ir.op) ? s - 1'b1 : s + 1'b1;
          if (root_op) busy <= 1'b0;
          if (op_is_spc(ir.op) && nwords_m1 != '0) begin
            fix_pending <= 1'b1;
            fix_end     <= root_op;
            fix_stage   <= s;
            fix_child   <= ir.child;
          end
        end else begin
          k <= k + 1'b1;
        end
      end
    end
  end

  // A descending instruction never runs at stage 1 (its children would be
  // single bits, which the program never visits).
  assert property (@(posedge clk) disable iff (!rst_n)
                   issue |-> !(op_descends(ir.op) && s <= SW'(1)));
endmodule
