// tb_polar_decoder_n16k: runs the decoder on a (16384, 14746) polar code,
// the code used for the comparison with a two-phase SC decoder, built for
// Eb/N0 = 5 dB (noise variance 1/(2 R 10^0.5) = 0.1757 for R = 0.9).
// The decoder is instantiated with N = 16384 and the default P = 256,
// quantisation and buffers. Three frames are encoded, sent through the
// channel, quantised and streamed in; every estimate is compared bit for
// bit with the software model in polar_model_pkg and every frame's decode
// time with the model's cycle count. Loading while decoding must occur.
module tb_polar_decoder_n16k;
  import polar_pkg::*;
  import polar_model_pkg::*;

  localparam int unsigned N      = 16384;
  localparam int unsigned P      = 256;
  localparam int unsigned W      = 7;
  localparam int unsigned WC     = 5;
  localparam int unsigned FR     = 1;
  localparam int unsigned BUS    = 32;
  localparam int unsigned RDW    = 256;
  localparam int unsigned IDEPTH = 3000;
  localparam int unsigned LOGN   = $clog2(N);
  localparam int unsigned IAW    = $clog2(IDEPTH);
  localparam int unsigned ERAW   = $clog2(N/RDW);
  localparam int          NFRAMES = 3;
  localparam int          NCODES  = 1;
  localparam real         SIGMA2  = 0.1757;

  logic                 clk = 0, rst_n = 0, run = 0;
  logic                 instr_we = 0;
  logic [IAW-1:0]       instr_addr = '0;
  instr_t               instr_data;
  logic                 ch_valid = 0, ch_ready;
  logic signed [WC-1:0] ch_data [BUS];
  logic                 est_valid, est_release = 0;
  logic [ERAW-1:0]      est_rd_addr = '0;
  logic [RDW-1:0]       est_rd_data;

  polar_decoder #(.N(N)) dut (.*);

  always #5 clk = !clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // per-frame data prepared ahead of time
  int  llr_q [NFRAMES][];
  bit  ref_q [NFRAMES][];
  bit  tx_q  [NFRAMES][];
  int  expc_q[NFRAMES];
  instr_t prog_q [NCODES][$];
  int  code_of [NFRAMES] = '{0, 0, 0};
  real sig_of  [NFRAMES] = '{0.1757, 0.1757, 0.1757};
  int  K_of [NCODES] = '{14746};
  int  model_ops [12];

  // mechanism counters
  int hw_ops [12];
  int n_fix, n_abyp, n_bbyp, n_overlap, n_backp, n_stall, n_done;
  longint t_start [NFRAMES];
  longint t_end [NFRAMES];
  int     stall_of [NFRAMES];
  int     n_start, n_end, n_read, prog_loaded;

  // --------------------------------------------------------------- monitors
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.issue && dut.u_ctrl.k == '0) hw_ops[int'(dut.u_ctrl.ir.op)]++;
    if (dut.u_pu.fix_write) n_fix++;
    if (dut.u_aram.hit0 || dut.u_aram.hit1) n_abyp++;
    if (dut.u_bram.hitl || dut.u_bram.hitr) n_bbyp++;
    if (ch_valid && ch_ready && dut.u_ctrl.busy) n_overlap++;
    if (ch_valid && !ch_ready) n_backp++;
    if (dut.u_ctrl.stall) begin
      n_stall++;
      if (n_start > 0 && n_start <= NFRAMES) stall_of[n_start-1]++;
    end
    if (dut.u_ctrl.start && n_start < NFRAMES) begin
      t_start[n_start] <= cycle;
      n_start <= n_start + 1;
    end
    if (dut.u_ctrl.b_frame_end && n_end < NFRAMES) begin
      t_end[n_end] <= cycle;
      n_end <= n_end + 1;
    end
  end

  // ------------------------------------------------------------- watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------- program
  task automatic load_program(int c);
    foreach (prog_q[c][i]) begin
      @(negedge clk);
      instr_we   = 1;
      instr_addr = IAW'(i);
      instr_data = prog_q[c][i];
    end
    @(negedge clk);
    instr_we = 0;
  endtask

  // ------------------------------------------------------------ feeder
  task automatic feed_frame(int f);
    for (int b = 0; b < N/BUS; b++) begin
      @(negedge clk);
      ch_valid = 1;
      for (int i = 0; i < BUS; i++) ch_data[i] = WC'(llr_q[f][b*BUS + i]);
      @(posedge clk);
      while (!ch_ready) @(posedge clk);
    end
    @(negedge clk);
    ch_valid = 0;
  endtask

  // ------------------------------------------------------------ reader
  task automatic read_frame(int f, int hold);
    int errs, txerrs;
    while (!est_valid) @(posedge clk);
    errs = 0; txerrs = 0;
    for (int a = 0; a < N/RDW; a++) begin
      @(negedge clk);
      est_rd_addr = ERAW'(a);
      @(posedge clk);
      #1;
      for (int j = 0; j < RDW; j++) begin
        if (est_rd_data[j] != ref_q[f][a*RDW + j]) errs++;
        if (est_rd_data[j] != tx_q[f][a*RDW + j]) txerrs++;
      end
    end
    checks++;
    if (errs != 0) begin
      failures++;
      $display("frame %0d: %0d bits differ from the model", f, errs);
    end
    $display("frame %0d (code %0d): %0d bit errors vs transmitted codeword", f, code_of[f], txerrs);
    repeat (hold) @(posedge clk);
    @(negedge clk);
    est_release = 1;
    @(negedge clk);
    est_release = 0;
  endtask

  initial begin
    PolarModel m [NCODES];
    for (int c = 0; c < NCODES; c++) begin
      m[c] = new(LOGN, P, W, WC, FR);
      m[c].construct(K_of[c], SIGMA2);
      checks++;
      if (m[c].k_of() != K_of[c]) begin
        failures++;
        $display("code %0d has %0d information bits", c, m[c].k_of());
      end
    end
    for (int f = 0; f < NFRAMES; f++) begin
      bit u[];
      bit x[];
      int c;
      c = code_of[f];
      u = new[N];
      foreach (u[i]) u[i] = 1'($urandom);
      m[c].encode(u, x);
      m[c].channel(x, sig_of[f], llr_q[f]);
      checks++;
      if (!m[c].run(llr_q[f])) begin
        failures++;
        $display("code %0d: tree not expressible", c);
      end
      ref_q[f] = m[c].cw;
      tx_q[f]  = x;
      expc_q[f] = m[c].exp_cycles;
      prog_q[c] = m[c].prog;
      foreach (model_ops[i]) model_ops[i] += m[c].op_count[i];
    end
    for (int c = 0; c < NCODES; c++) begin
      $display("code %0d: %0d instructions", c, prog_q[c].size());
      checks++;
      if (prog_q[c].size() > IDEPTH) begin
        failures++;
        $display("code %0d: program does not fit the instruction RAM", c);
      end
    end

    repeat (3) @(posedge clk);
    rst_n = 1;
    load_program(0);
    run = 1;

    fork
      for (int f = 0; f < NFRAMES; f++) begin
        if (f > 0 && code_of[f] != code_of[f-1])
          wait (n_read == f && prog_loaded == code_of[f]);
        feed_frame(f);
      end
      for (int f = 0; f < NFRAMES; f++) begin
        if (f > 0 && code_of[f] != code_of[f-1]) begin
          @(negedge clk);
          run = 0;
          while (dut.u_ctrl.busy) @(posedge clk);
          load_program(code_of[f]);
          prog_loaded = code_of[f];
          run = 1;
        end
        read_frame(f, 0);
        n_read = f + 1;
      end
    join

    for (int f = 0; f < NFRAMES; f++) begin
      longint d;
      d = t_end[f] - t_start[f] - longint'(stall_of[f]);
      $display("frame %0d: %0d decode cycles (%0d stall cycles), expected %0d",
               f, d, stall_of[f], expc_q[f]);
      checks++;
      if (d != longint'(expc_q[f])) begin
        failures++;
        $display("frame %0d: cycle count differs from the expected one", f);
      end
    end

    $display("load_while_decoding=%0d", n_overlap);
    checks++;
    if (n_overlap == 0) begin
      failures++;
      $display("no frame was loaded while another was decoded");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
