// tb_g_unit: checks the g block on random LLRs and partial-sum bits.
// Output i must be alpha[2i+1] + alpha[2i] (beta_l = 0) or alpha[2i+1] -
// alpha[2i] (beta_l = 1), saturated to +-63. Full-scale inputs are included
// so that both saturation limits are reached.
module tb_g_unit;
  localparam int P = 8, W = 7;
  logic signed [W-1:0] ain [2*P];
  logic                bl  [P];
  logic signed [W-1:0] aout [P];
  int checks = 0, failures = 0, nsat = 0;

  g_unit #(.P(P), .W(W)) dut (.alpha_in(ain), .beta_l(bl), .alpha_out(aout));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      int a [2*P];
      foreach (a[i]) a[i] = (t < 20) ? (($urandom_range(1)) ? 63 : -63) : int'($urandom_range(126)) - 63;
      foreach (ain[i]) ain[i] = W'(a[i]);
      foreach (bl[i]) bl[i] = 1'($urandom);
      #1;
      for (int i = 0; i < P; i++) begin
        int e;
        e = bl[i] ? a[2*i+1] - a[2*i] : a[2*i+1] + a[2*i];
        if (e > 63)  begin e = 63;  nsat++; end
        if (e < -63) begin e = -63; nsat++; end
        checks++;
        if (int'(aout[i]) != e) begin
          failures++;
          if (failures < 10) $display("g lane %0d = %0d, expected %0d", i, aout[i], e);
        end
      end
    end
    checks++;
    if (nsat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
