// tb_rep_dec: checks the repetition decoder for every length it supports
// (2, 4, 8, 16). The decision must be 1 exactly when the sum of the first
// 2^len_log2 LLRs is negative; LLRs beyond the node length must be ignored.
module tb_rep_dec;
  localparam int W = 7;
  logic signed [W-1:0] ain [16];
  logic [2:0]          len;
  logic                dec;
  int checks = 0, failures = 0;

  rep_dec #(.W(W)) dut (.alpha_in(ain), .len_log2(len), .dec(dec));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int a [16], s;
      len = 3'(1 + (t % 4));
      foreach (a[i]) a[i] = (t < 40) ? -63 : int'($urandom_range(126)) - 63;
      foreach (ain[i]) ain[i] = W'(a[i]);
      s = 0;
      for (int i = 0; i < (1 << len); i++) s += a[i];
      #1;
      checks++;
      if (dec != (s < 0)) begin
        failures++;
        if (failures < 10) $display("len %0d sum %0d: dec %0d", 1 << len, s, dec);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
