// tb_beta_router: checks beta address generation at N = 64, P = 4 (stage
// bases 0, 4, 6, 7, 8 for stages 5..1, written out here). Reads for a node
// at stage s must address half word 2*base(s-1) + k. Results at stage s
// must go to the beta memory chosen by the child bit at word base(s) + k,
// or to the codeword RAM at word k for the root (stage 6); in an SPC
// correction cycle the word comes from fix_word and the write happens only
// if fix_write is set.
module tb_beta_router;
  localparam int N = 64, P = 4, SW = 3, KW = 4, AW = 4, CWW = 3;
  logic [SW-1:0] rd_stage, wr_stage;
  logic [KW-1:0] rd_word, wr_word, fix_word;
  logic [AW:0] bram_rd_addr;
  logic wr_en, wr_child, fix, fix_write;
  logic bram_we, bram_wr_sel, cw_we;
  logic [AW-1:0] bram_wr_addr;
  logic [CWW-1:0] cw_wr_addr;
  int base [7] = '{-1, 8, 7, 6, 4, 0, -1};
  int words [7] = '{1, 1, 1, 1, 2, 4, 8};
  int checks = 0, failures = 0, nroot = 0, nfix = 0;

  beta_router #(.N(N), .P(P), .SW(SW), .KW(KW), .AW(AW), .CWW(CWW)) dut (.*);

  initial begin
    #100000;
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

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int rs, rk, ws, wk, fk, k, en;
      rs = 2 + int'($urandom_range(4));
      rk = int'($urandom_range(2*words[rs-1]-1));
      ws = 1 + int'($urandom_range(5));
      wk = int'($urandom_range(words[ws]-1));
      fk = int'($urandom_range(words[ws]-1));
      rd_stage = SW'(rs); rd_word = KW'(rk);
      wr_stage = SW'(ws); wr_word = KW'(wk); fix_word = KW'(fk);
      wr_en = 1'($urandom); wr_child = 1'($urandom);
      fix = ($urandom_range(3) == 0); fix_write = 1'($urandom);
      #1;
      en = fix ? int'(fix_write) : int'(wr_en);
      k  = fix ? fk : wk;
      if (ws == 6 && en != 0) nroot++;
      if (fix && fix_write) nfix++;
      check(bram_rd_addr == (AW+1)'(2*base[rs-1] + rk), $sformatf("beta read address stage %0d word %0d", rs, rk));
      if (ws == 6)
        check(!bram_we && cw_we == 1'(en) && cw_wr_addr == CWW'(k), "root write misrouted");
      else
        check(!cw_we && bram_we == 1'(en) && bram_wr_sel == wr_child && bram_wr_addr == AW'(base[ws] + k),
              $sformatf("beta write stage %0d word %0d misrouted", ws, k));
    end
    check(nroot > 0 && nfix > 0, "root or correction write never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
