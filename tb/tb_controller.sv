// tb_controller: checks the instruction sequencer at N = 64, P = 4 (one
// word = 8 LLRs, so stages 4, 5 and 6 take 2, 4 and 8 words).
// Random decoder trees are generated here: each node is a repetition node
// (length <= 16), a REP-SPC (length 8) or ML (length 4) node, a P-R1/P-RSPC
// node with or without a rate-0 left child, a node with a rate-0 left child
// (G-0R ... COMBINE-0R), or a general node (F ... G ... COMBINE). From the
// tree the testbench builds both the program and the expected execute-stage
// trace: one entry per word (op, stage, word index, first flag, child bit),
// one correction entry after a multi-word P-RSPC/P-0SPC, and the frame end
// on the last entry. Three frames of each of several programs are run with
// the estimate buffer randomly busy, which must stall only the root
// instruction; the trace, the number of frames and the cycle count (one
// cycle per entry plus one per stall cycle) are checked.
module tb_controller;
  import polar_pkg::*;
  localparam int N = 64, P = 4, IDEPTH = 256, SW = 3, KW = 4, IAW = 8, LOGN = 6;
  logic clk = 0, rst_n = 0, run = 0, frame_ready = 0, est_busy = 0;
  logic [IAW-1:0] ir_addr;
  instr_t ir;
  logic frame_done, a_valid, b_valid, b_fix, b_child, b_first, b_frame_end, busy, stall;
  logic [SW-1:0] a_stage, b_stage;
  logic [KW-1:0] a_word, b_word;
  op_e b_op;
  instr_t imem [IDEPTH];
  int checks = 0, failures = 0, nstall = 0, nfix = 0;

  typedef struct { op_e op; int s; int k; bit first; bit child; bit fix; } entry_t;
  instr_t prog [$];
  entry_t trace [$];

  controller #(.N(N), .P(P), .IDEPTH(IDEPTH), .SW(SW), .KW(KW), .IAW(IAW)) dut (.*);

  always #5 clk = !clk;
  always_ff @(posedge clk) ir <= imem[ir_addr];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("%s", what);
    end
  endtask

  function automatic void emit(op_e o, int s, bit child);
    int nw;
    nw = (o == OP_ML || o == OP_REP || o == OP_REP_SPC || s <= 3) ? 1 : (1 << (s - 3));
    prog.push_back('{op: o, child: child_e'(child)});
    for (int k = 0; k < nw; k++)
      trace.push_back('{op: o, s: s, k: k, first: (k == 0), child: child, fix: 0});
    if (op_is_spc(o) && nw > 1) trace.push_back('{op: o, s: s, k: 0, first: 0, child: child, fix: 1});
  endfunction

  function automatic void gen(int s, bit child);
    int c;
    c = int'($urandom_range(9));
    if (s <= 4 && s < LOGN && c < 2) emit(OP_REP, s, child);
    else if (s == 3 && c < 4) emit(OP_REP_SPC, s, child);
    else if (s == 2 && c < 5) emit(OP_ML, s, child);
    else if (s == 1) emit(OP_P_01, s, child);
    else if (c < 5) begin
      op_e o;
      bit lz;
      lz = 1'($urandom);
      o = (c % 2) ? (lz ? OP_P_0SPC : OP_P_RSPC) : (lz ? OP_P_01 : OP_P_R1);
      if (!lz) begin
        emit(OP_F, s, child);
        gen(s - 1, 0);
      end
      emit(o, s, child);
    end else if (c < 7) begin
      emit(OP_G_0R, s, child);
      gen(s - 1, 1);
      emit(OP_COMBINE_0R, s, child);
    end else begin
      emit(OP_F, s, child);
      gen(s - 1, 0);
      emit(OP_G, s, child);
      gen(s - 1, 1);
      emit(OP_COMBINE, s, child);
    end
  endfunction

  initial begin
    foreach (imem[i]) imem[i] = '{op: OP_F, child: CHILD_LEFT};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int pgm = 0; pgm < 12; pgm++) begin
      prog.delete(); trace.delete();
      gen(LOGN, 0);
      if (pgm == 0 || prog.size() > IDEPTH) begin
        // a fixed program whose root is an eight-word P-RSPC
        prog.delete(); trace.delete();
        emit(OP_F, 6, 0); emit(OP_G_0R, 5, 0); emit(OP_REP, 4, 1);
        emit(OP_COMBINE_0R, 5, 0); emit(OP_P_RSPC, 6, 0);
      end
      foreach (prog[i]) imem[i] = prog[i];
      @(negedge clk);
      run = 1; frame_ready = 1;
      for (int f = 0; f < 3; f++) begin
        int idx, ncyc, nst;
        bit ended;
        idx = 0; ncyc = 0; nst = 0; ended = 0;
        while (!ended) begin
          @(negedge clk);
          est_busy = ($urandom_range(3) == 0);
          #1;
          if (stall) begin nstall++; if (idx > 0) nst++; end
          if (idx > 0) ncyc++;
          @(posedge clk);
          #1;
          if (b_valid || b_fix) begin
            entry_t e;
            if (idx >= trace.size()) begin
              check(0, "more entries than expected");
              break;
            end
            e = trace[idx];
            if (b_fix) nfix++;
            check(b_fix == e.fix && b_valid == !e.fix, $sformatf("program %0d entry %0d: fix flag", pgm, idx));
            if (!e.fix)
              check(b_op == e.op && int'(b_stage) == e.s && int'(b_word) == e.k &&
                    b_first == e.first && b_child == e.child,
                    $sformatf("program %0d entry %0d: %s s%0d k%0d, expected %s s%0d k%0d",
                              pgm, idx, b_op.name(), b_stage, b_word, e.op.name(), e.s, e.k));
            else
              check(int'(b_stage) == e.s && b_child == e.child, "correction entry stage");
            check(b_frame_end == (idx == trace.size() - 1), $sformatf("frame end at entry %0d", idx));
            if (b_frame_end) ended = 1;
            idx++;
          end
        end
        check(idx == trace.size(), "trace length");
        check(ncyc == idx - 1 + nst, $sformatf("frame took %0d cycles for %0d entries and %0d stalls", ncyc + 1, idx, nst));
      end
      @(negedge clk);
      run = 0; frame_ready = 0;
      repeat (3) @(posedge clk);
    end
    check(nstall > 0 && nfix > 0, "stall or correction never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
