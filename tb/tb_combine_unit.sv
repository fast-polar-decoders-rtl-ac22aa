// tb_combine_unit: checks the COMBINE block. For random left and right
// partial sums, output 2i must be beta_l[i] xor beta_r[i] and output 2i+1
// must be beta_r[i] (bit-reversed order of the partial-sum vector).
module tb_combine_unit;
  localparam int P = 8;
  logic bl [P], br [P], bv [2*P];
  int checks = 0, failures = 0;

  combine_unit #(.P(P)) dut (.beta_l(bl), .beta_r(br), .beta_v(bv));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      foreach (bl[i]) bl[i] = 1'($urandom);
      foreach (br[i]) br[i] = 1'($urandom);
      #1;
      for (int i = 0; i < P; i++) begin
        checks++;
        if (bv[2*i] != (bl[i] ^ br[i]) || bv[2*i+1] != br[i]) begin
          failures++;
          if (failures < 10) $display("lane %0d wrong", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
