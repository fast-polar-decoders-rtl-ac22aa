// tb_alpha_router: checks alpha address generation and source selection at
// N = 64, P = 4. There, 2P = 8 and the internal stages 5..1 take 4, 2, 1, 1
// and 1 words, so they start at words 0, 4, 6, 7 and 8 (a table written out
// here, not computed by the package). Reads at stage 6 (the root) must go to
// the channel RAM half being decoded; the LLRs delivered one cycle later must
// be the channel LLRs sign-extended, or the alpha RAM data for inner stages.
// F/G results of word k at stage s must be written to memory k mod 2, word
// base(s-1) + k div 2.
module tb_alpha_router;
  localparam int N = 64, P = 4, W = 7, WC = 5, SW = 3, KW = 4, AW = 4, CAW = 4;
  logic clk = 0;
  logic [SW-1:0] rd_stage = '0, wr_stage = '0;
  logic [KW-1:0] rd_word = '0, wr_word = '0;
  logic chan_half = 0, wr_en = 0;
  logic [CAW-1:0] chan_rd_addr;
  logic [AW-1:0] aram_rd_addr, aram_wr_addr;
  logic signed [WC-1:0] chan_data [2*P];
  logic signed [W-1:0] aram_data [2*P];
  logic signed [W-1:0] alpha_out [2*P];
  logic aram_we, aram_wr_sel;
  int base [7] = '{-1, 8, 7, 6, 4, 0, -1};
  int words [7] = '{1, 1, 1, 1, 2, 4, 8};
  int checks = 0, failures = 0;

  alpha_router #(.N(N), .P(P), .W(W), .WC(WC), .SW(SW), .KW(KW), .AW(AW), .CAW(CAW)) dut (.*);

  always #5 clk = !clk;

  initial begin
    repeat (100000) @(posedge clk);
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
    for (int t = 0; t < 2000; t++) begin
      int rs, rk, ws, wk, h;
      @(negedge clk);
      rs = 1 + int'($urandom_range(5));
      rk = int'($urandom_range(words[rs]-1));
      h  = int'($urandom_range(1));
      ws = 2 + int'($urandom_range(4));
      wk = int'($urandom_range(words[ws]-1));
      rd_stage = SW'(rs); rd_word = KW'(rk); chan_half = 1'(h);
      wr_stage = SW'(ws); wr_word = KW'(wk); wr_en = 1'($urandom);
      #1;
      if (rs == 6) check(chan_rd_addr == CAW'(h*8 + rk), "channel address wrong");
      else         check(aram_rd_addr == AW'(base[rs] + rk), $sformatf("alpha read address stage %0d word %0d", rs, rk));
      check(aram_we == wr_en && aram_wr_sel == 1'(wk % 2) && aram_wr_addr == AW'(base[ws-1] + wk/2),
            $sformatf("alpha write address stage %0d word %0d", ws, wk));
      @(posedge clk);
      @(negedge clk);
      foreach (chan_data[i]) chan_data[i] = WC'(int'($urandom_range(30)) - 15);
      foreach (aram_data[i]) aram_data[i] = W'(int'($urandom_range(126)) - 63);
      #1;
      for (int i = 0; i < 2*P; i++)
        check(int'(alpha_out[i]) == ((rs == 6) ? int'(chan_data[i]) : int'(aram_data[i])),
              $sformatf("alpha lane %0d from the wrong source", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
