// tb_codeword_ram: checks the codeword memory at a small size (N = 64,
// P = 8, 8-bit read port): 2P-bit words are written, then read back as
// 8-bit slices, slice j of the frame being bits 8j..8j+7. Reads take one
// cycle. Writes and reads are interleaved at random.
module tb_codeword_ram;
  localparam int N = 64, P = 8, RDW = 8, WDEPTH = 4, WAW = 2, RAW = 3;
  logic clk = 0, we = 0;
  logic [WAW-1:0] wr_addr = '0;
  logic wr_data [2*P];
  logic [RAW-1:0] rd_addr = '0;
  logic [RDW-1:0] rd_data;
  bit ref_b [N];
  int checks = 0, failures = 0;

  codeword_ram #(.N(N), .P(P), .RDW(RDW)) dut (.*);

  always #5 clk = !clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < WDEPTH; a++) begin
      @(negedge clk);
      we = 1; wr_addr = WAW'(a);
      for (int i = 0; i < 2*P; i++) begin
        ref_b[a*2*P+i] = 1'($urandom);
        wr_data[i] = ref_b[a*2*P+i];
      end
    end
    for (int t = 0; t < 1000; t++) begin
      int wa, ra;
      logic [RDW-1:0] e;
      @(negedge clk);
      wa = int'($urandom_range(WDEPTH-1));
      ra = int'($urandom_range(N/RDW-1));
      we = 1'($urandom_range(1)); wr_addr = WAW'(wa); rd_addr = RAW'(ra);
      for (int i = 0; i < RDW; i++) e[i] = ref_b[ra*RDW+i];
      for (int i = 0; i < 2*P; i++) wr_data[i] = 1'($urandom);
      if (we) for (int i = 0; i < 2*P; i++) ref_b[wa*2*P+i] = wr_data[i];
      @(posedge clk);
      #1;
      checks++;
      if (rd_data != e) begin
        failures++;
        if (failures < 10) $display("slice %0d: %h, expected %h", ra, rd_data, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
