// tb_ml_dec: checks the length-4 ML block against an exhaustive search.
// The code has frozen pattern u = (0, a, 0, b); its four codewords in the
// decoder's bit-reversed order are x = (a^b, b, a^b, b). The reference picks
// the codeword with the largest correlation sum(x_i ? -alpha_i : alpha_i),
// the earliest of (a,b) = 00, 01, 11, 10 (x = 0000, 1111, 0101, 1010) on a tie, and encodes it from u.
module tb_ml_dec;
  localparam int W = 7;
  logic signed [W-1:0] ain [4];
  logic                bout [4];
  int checks = 0, failures = 0;

  ml_dec #(.W(W)) dut (.alpha_in(ain), .beta_out(bout));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ua [4] = '{0, 0, 1, 1};
    int ub [4] = '{0, 1, 1, 0};
    for (int t = 0; t < 3000; t++) begin
      int a [4], best, bc;
      bit x [4];
      foreach (a[i]) a[i] = (t < 100) ? int'($urandom_range(6)) - 3 : int'($urandom_range(126)) - 63;
      foreach (ain[i]) ain[i] = W'(a[i]);
      best = -100000; bc = 0;
      for (int c = 0; c < 4; c++) begin
        int r;
        bit xc [4];
        xc[1] = 1'(ub[c]); xc[3] = 1'(ub[c]);
        xc[0] = 1'(ua[c] ^ ub[c]); xc[2] = 1'(ua[c] ^ ub[c]);
        r = 0;
        for (int i = 0; i < 4; i++) r += xc[i] ? -a[i] : a[i];
        if (r > best) begin best = r; bc = c; x = xc; end
      end
      #1;
      checks++;
      if (bout[0] != x[0] || bout[1] != x[1] || bout[2] != x[2] || bout[3] != x[3]) begin
        failures++;
        if (failures < 10) $display("alpha %0d %0d %0d %0d: wrong codeword", a[0], a[1], a[2], a[3]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
