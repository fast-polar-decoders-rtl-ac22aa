// tb_instr_ram: checks the instruction memory: a program of random 5-bit
// instructions is written, then read back at random addresses with one
// cycle of latency, interleaved with further writes.
module tb_instr_ram;
  import polar_pkg::*;
  localparam int DEPTH = 40, AW = 6;
  logic clk = 0, we = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  instr_t wr_data, rd_data;
  logic [4:0] ref_m [DEPTH];
  int checks = 0, failures = 0;

  instr_ram #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = !clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; wr_addr = AW'(a);
      ref_m[a] = {4'($urandom_range(11)), 1'($urandom)};
      wr_data = instr_t'(ref_m[a]);
    end
    for (int t = 0; t < 1000; t++) begin
      int wa, ra;
      logic [4:0] e;
      @(negedge clk);
      wa = int'($urandom_range(DEPTH-1));
      ra = int'($urandom_range(DEPTH-1));
      we = 1'($urandom_range(1)); wr_addr = AW'(wa); rd_addr = AW'(ra);
      e = ref_m[ra];
      wr_data = instr_t'({4'($urandom_range(11)), 1'($urandom)});
      if (we && wa != ra) ref_m[wa] = wr_data;
      if (we && wa == ra) begin
        we = 0;
      end
      @(posedge clk);
      #1;
      checks++;
      if (rd_data != instr_t'(e)) begin
        failures++;
        if (failures < 10) $display("addr %0d: %b, expected %b", ra, rd_data, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
