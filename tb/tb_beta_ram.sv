// tb_beta_ram: checks the beta memory: a left and a right memory of 2P-bit
// words, written a whole word at a time, read as P-bit half words one cycle
// after the half-word address. Random traffic is compared against arrays
// kept by the testbench; same-cycle write/read of one word must return the
// new data (bypass), and the test fails if that case never occurred.
module tb_beta_ram;
  localparam int P = 4, DEPTH = 8, AW = 3;
  logic clk = 0, we = 0, wr_sel = 0;
  logic [AW:0] rd_addr = '0;
  logic [AW-1:0] wr_addr = '0;
  logic rd_left [P], rd_right [P];
  logic wr_data [2*P];
  bit ref_m [2][DEPTH][2*P];
  bit el [P], er [P];
  int checks = 0, failures = 0, nbyp = 0;

  beta_ram #(.P(P), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = !clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 2; s++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        we = 1; wr_sel = 1'(s); wr_addr = AW'(a);
        for (int i = 0; i < 2*P; i++) begin
          ref_m[s][a][i] = 1'($urandom);
          wr_data[i] = ref_m[s][a][i];
        end
      end
    for (int t = 0; t < 2000; t++) begin
      int s, wa, ra, h;
      @(negedge clk);
      s  = int'($urandom_range(1));
      wa = int'($urandom_range(DEPTH-1));
      ra = ($urandom_range(3) == 0) ? wa : int'($urandom_range(DEPTH-1));
      h  = int'($urandom_range(1));
      we = 1'($urandom_range(1)); wr_sel = 1'(s); wr_addr = AW'(wa);
      rd_addr = {AW'(ra), 1'(h)};
      if (we && wa == ra) nbyp++;
      for (int i = 0; i < 2*P; i++) wr_data[i] = 1'($urandom);
      if (we) for (int i = 0; i < 2*P; i++) ref_m[s][wa][i] = wr_data[i];
      for (int i = 0; i < P; i++) begin
        el[i] = ref_m[0][ra][h*P+i];
        er[i] = ref_m[1][ra][h*P+i];
      end
      @(posedge clk);
      #1;
      for (int i = 0; i < P; i++) begin
        checks++;
        if (rd_left[i] != el[i] || rd_right[i] != er[i]) begin
          failures++;
          if (failures < 10) $display("t %0d lane %0d wrong", t, i);
        end
      end
    end
    checks++;
    if (nbyp == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
