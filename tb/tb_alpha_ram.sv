// tb_alpha_ram: checks the alpha memory (two P-wide halves, one read port
// returning both halves of a 2P word one cycle after the address).
// Random writes to either half and random reads are compared against an
// array kept by the testbench. Reads of the word being written in the same
// cycle must return the new data (the bypass register); the test counts
// how often that case occurred and fails if it never did.
module tb_alpha_ram;
  localparam int P = 4, W = 7, DEPTH = 8, AW = 3;
  logic clk = 0, we = 0, wr_sel = 0;
  logic [AW-1:0] rd_addr = '0, wr_addr = '0;
  logic signed [W-1:0] rd_data [2*P];
  logic signed [W-1:0] wr_data [P];
  int ref_m [2][DEPTH][P];
  int exp_q [2*P];
  int checks = 0, failures = 0, nbyp = 0;

  alpha_ram #(.P(P), .W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = !clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // initialise both halves
    for (int s = 0; s < 2; s++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        we = 1; wr_sel = 1'(s); wr_addr = AW'(a);
        for (int i = 0; i < P; i++) begin
          ref_m[s][a][i] = int'($urandom_range(126)) - 63;
          wr_data[i] = W'(ref_m[s][a][i]);
        end
      end
    for (int t = 0; t < 2000; t++) begin
      int s, wa, ra;
      @(negedge clk);
      s  = int'($urandom_range(1));
      wa = int'($urandom_range(DEPTH-1));
      ra = ($urandom_range(3) == 0) ? wa : int'($urandom_range(DEPTH-1));
      we = 1'($urandom_range(1)); wr_sel = 1'(s); wr_addr = AW'(wa); rd_addr = AW'(ra);
      if (we && wa == ra) nbyp++;
      for (int i = 0; i < P; i++) wr_data[i] = W'(int'($urandom_range(126)) - 63);
      if (we) for (int i = 0; i < P; i++) ref_m[s][wa][i] = int'(wr_data[i]);
      for (int i = 0; i < P; i++) begin
        exp_q[i]   = ref_m[0][ra][i];
        exp_q[P+i] = ref_m[1][ra][i];
      end
      @(posedge clk);
      #1;
      for (int i = 0; i < 2*P; i++) begin
        checks++;
        if (int'(rd_data[i]) != exp_q[i]) begin
          failures++;
          if (failures < 10) $display("t %0d lane %0d: %0d, expected %0d", t, i, rd_data[i], exp_q[i]);
        end
      end
    end
    checks++;
    if (nbyp == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
