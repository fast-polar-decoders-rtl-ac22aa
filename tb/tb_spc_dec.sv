// tb_spc_dec: checks the SPC decoder with eight lanes.
// Single-word codes (length 2, 4, 8): the output must be the hard decision
// with the least reliable bit (lowest index on ties) flipped when the parity
// is odd. Multi-word codes (length 16, 32, spread over 2 and 4 words): each
// word's output must be the plain hard decision, new_min must pulse on the
// words that lower the running minimum, and after the last word fix_parity
// and fix_lane must name the overall parity and the lane of the overall
// least reliable bit. The testbench computes all of this from the LLRs alone.
module tb_spc_dec;
  localparam int P = 8, W = 7, LW = 4, IW = $clog2(P+1);
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  logic [LW-1:0] len = '0;
  logic signed [W-1:0] ain [P];
  logic bout [P];
  logic new_min, fix_parity;
  logic [IW-1:0] fix_lane;
  int checks = 0, failures = 0, nflip = 0, nmulti_fix = 0;

  spc_dec #(.P(P), .W(W), .LW(LW)) dut (.*, .len_log2(len), .alpha_in(ain),
                                        .beta_out(bout));

  always #5 clk = !clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int mag(int v);
    return (v < 0) ? -v : v;
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("%s", what);
    end
  endtask

  initial begin
    foreach (ain[i]) ain[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      int l, nw, minm, minw, minl, par;
      l  = 1 + (t % 5);
      nw = (l > 3) ? (1 << (l - 3)) : 1;
      minm = 1000; minw = 0; minl = 0; par = 0;
      for (int w = 0; w < nw; w++) begin
        int a [P], wm, wl, wp;
        bit hd [P];
        foreach (a[i]) a[i] = (t % 7 == 0) ? int'($urandom_range(6)) - 3 : int'($urandom_range(126)) - 63;
        @(negedge clk);
        en = 1; first = (w == 0); len = LW'(l);
        foreach (ain[i]) ain[i] = W'(a[i]);
        wm = 1000; wl = 0; wp = 0;
        for (int i = 0; i < P && i < (1 << l); i++) begin
          hd[i] = (a[i] < 0);
          wp ^= int'(hd[i]);
          if (mag(a[i]) < wm) begin wm = mag(a[i]); wl = i; end
        end
        par ^= wp;
        #1;
        if (nw == 1) begin
          if (wp != 0) begin hd[wl] = !hd[wl]; nflip++; end
          for (int i = 0; i < (1 << l); i++)
            check(bout[i] == hd[i], $sformatf("len %0d lane %0d wrong", 1 << l, i));
        end else begin
          for (int i = 0; i < P; i++)
            check(bout[i] == hd[i], $sformatf("len %0d word %0d lane %0d wrong", 1 << l, w, i));
          check(new_min == (w == 0 || wm < minm), $sformatf("new_min wrong in word %0d", w));
        end
        if (wm < minm) begin minm = wm; minw = w; minl = wl; end
      end
      @(negedge clk);
      en = 0;
      if (nw > 1) begin
        check(fix_parity == 1'(par), "fix_parity wrong");
        check(fix_lane == IW'(minl), $sformatf("fix_lane %0d, expected %0d", fix_lane, minl));
        if (par != 0) nmulti_fix++;
      end
    end
    check(nflip > 0 && nmulti_fix > 0, "no correction exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
