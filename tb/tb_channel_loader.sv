// tb_channel_loader: checks the ping-pong channel loader at N = 64, P = 8
// with a 4-value bus (16 beats per frame, 4 banks). Frames are offered with
// random gaps in valid; the decoder side finishes frames after random delays.
// Checked: beat b of the frame loaded into half h is written to bank b mod 4,
// row 4h + b div 4, with the bus data; the loader accepts at most two frames
// ahead of the decoder and refuses input (ready low) while both halves are
// full; frame_ready names a full half and rd_half alternates. Back-pressure
// must have occurred at least once.
module tb_channel_loader;
  localparam int N = 64, P = 8, WC = 5, BUS = 4, AW = 3, BW = 2;
  logic clk = 0, rst_n = 0, in_valid = 0, frame_done = 0;
  logic in_ready, ram_we, frame_ready, rd_half;
  logic signed [WC-1:0] in_data [BUS];
  logic signed [WC-1:0] ram_data [BUS];
  logic [BW-1:0] ram_bank;
  logic [AW-1:0] ram_addr;
  int checks = 0, failures = 0, nbackp = 0;
  int loaded = 0, done = 0, beat = 0;

  channel_loader #(.N(N), .P(P), .WC(WC), .BUS(BUS)) dut (.*);

  always #5 clk = !clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("%s", what);
    end
  endtask

  // scoreboard on the RAM write side
  always @(posedge clk) if (rst_n) begin
    check(in_ready == (loaded - done < 2), "ready does not match the number of full halves");
    check(frame_ready == (loaded > done), "frame_ready wrong");
    check(rd_half == 1'(done % 2), "rd_half wrong");
    if (in_valid && !in_ready) nbackp++;
    check(ram_we == (in_valid && in_ready), "ram_we wrong");
    if (in_valid && in_ready) begin
      check(ram_bank == BW'(beat % 4) && ram_addr == AW'((loaded % 2) * 4 + beat / 4),
            $sformatf("beat %0d of frame %0d at bank %0d row %0d", beat, loaded, ram_bank, ram_addr));
      for (int i = 0; i < BUS; i++) check(ram_data[i] == in_data[i], "data not passed to the RAM");
      beat = beat + 1;
      if (beat == N/BUS) begin beat = 0; loaded = loaded + 1; end
    end
    if (frame_done) done = done + 1;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    fork
      for (int t = 0; t < 3000; t++) begin
        @(negedge clk);
        in_valid = ($urandom_range(3) != 0);
        foreach (in_data[i]) in_data[i] = WC'($urandom);
      end
      for (int t = 0; t < 3000; t++) begin
        @(negedge clk);
        frame_done = frame_ready && ($urandom_range(40) == 0);
      end
    join
    check(nbackp > 0 && done > 4, "back-pressure or frame turnover never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
