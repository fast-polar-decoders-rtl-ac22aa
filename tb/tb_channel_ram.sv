// tb_channel_ram: checks the banked channel memory at a small size
// (N = 64, P = 8, 4-value input bus: 4 banks of 8 rows, two frames).
// Every row of every bank is written with random 5-bit LLRs through the
// bus-wide write port, then every 2P-value row is read back (one cycle of
// latency) and compared, value by value, with what was written.
module tb_channel_ram;
  localparam int N = 64, P = 8, WC = 5, BUS = 4, BANKS = 4, DEPTH = 8;
  localparam int AW = 3, BW = 2;
  logic clk = 0, we = 0;
  logic [BW-1:0] wr_bank = '0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic signed [WC-1:0] wr_data [BUS];
  logic signed [WC-1:0] rd_data [2*P];
  int ref_m [DEPTH][2*P];
  int checks = 0, failures = 0;

  channel_ram #(.N(N), .P(P), .WC(WC), .BUS(BUS)) dut (.*);

  always #5 clk = !clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 4; rep++) begin
      for (int k = 0; k < DEPTH*BANKS; k++) begin
        int a, b;
        a = int'($urandom_range(DEPTH-1)); b = int'($urandom_range(BANKS-1));
        if (rep == 0) begin a = k / BANKS; b = k % BANKS; end
        @(negedge clk);
        we = 1; wr_bank = BW'(b); wr_addr = AW'(a);
        for (int i = 0; i < BUS; i++) begin
          ref_m[a][b*BUS+i] = int'($urandom_range(30)) - 15;
          wr_data[i] = WC'(ref_m[a][b*BUS+i]);
        end
      end
      @(negedge clk);
      we = 0;
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        rd_addr = AW'(a);
        @(posedge clk);
        #1;
        for (int i = 0; i < 2*P; i++) begin
          checks++;
          if (int'(rd_data[i]) != ref_m[a][i]) begin
            failures++;
            if (failures < 10) $display("row %0d value %0d: %0d, expected %0d", a, i, rd_data[i], ref_m[a][i]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
