// tb_f_unit: checks the f block (min-sum) on random and corner-case LLRs.
// Eight elements are driven with values in the symmetric range +-63; each
// output must equal sign(a)sign(b)min(|a|,|b|), worked out here with integer
// arithmetic. Purely combinational, so a short delay separates the vectors.
module tb_f_unit;
  localparam int P = 8, W = 7;
  logic signed [W-1:0] ain [2*P];
  logic signed [W-1:0] aout [P];
  int checks = 0, failures = 0;

  f_unit #(.P(P), .W(W)) dut (.alpha_in(ain), .alpha_out(aout));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd();
    return int'($urandom_range(126)) - 63;
  endfunction

  initial begin
    for (int t = 0; t < 500; t++) begin
      int a [2*P];
      foreach (a[i]) a[i] = (t < 4) ? ((t % 2) ? 63 : -63) * ((i % 2) ? 1 : (t < 2 ? 1 : -1)) : rnd();
      foreach (ain[i]) ain[i] = W'(a[i]);
      #1;
      for (int i = 0; i < P; i++) begin
        int x, y, m, e;
        x = a[2*i]; y = a[2*i+1];
        m = ((x < 0) ? -x : x) < ((y < 0) ? -y : y) ? ((x < 0) ? -x : x) : ((y < 0) ? -y : y);
        e = ((x < 0) != (y < 0)) ? -m : m;
        checks++;
        if (int'(aout[i]) != e) begin
          failures++;
          if (failures < 10) $display("f(%0d,%0d) = %0d, expected %0d", x, y, aout[i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
