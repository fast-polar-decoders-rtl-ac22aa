// tb_polar_decoder: end-to-end test of the decoder at its default size
// (N = 32768, P = 256, 7-bit internal / 5-bit channel LLRs).
//
// Three rate-0.9 (32768, 29492) frames and two rate-0.84 (32768, 27568)
// frames, both codes built for an AWGN channel of noise variance 0.1936, are
// encoded, sent through the channel (two of them at a higher noise variance,
// 0.30), quantised and streamed into the decoder. A last frame uses a test
// code derived from the rate-0.84 one in which some length-4 nodes with
// pattern 0011 are changed to 0101, the one pattern the ML block decodes and
// which the constructed codes do not contain. Whenever the code changes the
// decoder is idled and its program replaced (a code switch). Every estimate is compared bit for bit with the software
// model in polar_model_pkg, and the decode time of every frame (from start to
// the last codeword write) with the cycle count the model predicts.
// The test also requires each datapath mechanism to happen at least once:
// all twelve instructions, the multi-word SPC correction write, the alpha and
// beta RAM bypass registers, loading a frame while another is decoded, input
// back-pressure and the stall on an unread estimate.
module tb_polar_decoder;
  import polar_pkg::*;
  import polar_model_pkg::*;

  localparam int unsigned N      = 32768;
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
  localparam int          NFRAMES = 6;
  localparam int          NCODES  = 3;
  localparam real         SIGMA2  = 0.1936;

  logic                 clk = 0, rst_n = 0, run = 0;
  logic                 instr_we = 0;
  logic [IAW-1:0]       instr_addr = '0;
  instr_t               instr_data;
  logic                 ch_valid = 0, ch_ready;
  logic signed [WC-1:0] ch_data [BUS];
  logic                 est_valid, est_release = 0;
  logic [ERAW-1:0]      est_rd_addr = '0;
  logic [RDW-1:0]       est_rd_data;

  polar_decoder dut (.*);

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
  int  code_of [NFRAMES] = '{0, 0, 0, 1, 1, 2};
  real sig_of  [NFRAMES] = '{0.1936, 0.1936, 0.30, 0.1936, 0.30, 0.1936};
  int  K_of [NCODES] = '{29492, 27568, 27568};
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
      if (c == 2) begin
        int nch;
        nch = 0;
        for (int j = 0; j < N/4 && nch < 16; j++)
          if (!m[c].info[4*j] && !m[c].info[4*j+1] && m[c].info[4*j+2] && m[c].info[4*j+3]) begin
            m[c].info[4*j+1] = 1;
            m[c].info[4*j+2] = 0;
            nch++;
          end
        m[c].count_tree();
      end
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
        // frame 0 is released late so that frame 1 stalls on its root write
        read_frame(f, (f == 0) ? 6000 : 0);
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

    for (int i = 0; i < 12; i++) begin
      checks++;
      if (hw_ops[i] == 0) begin
        failures++;
        $display("instruction %0d never executed", i);
      end
      checks++;
      if (hw_ops[i] != model_ops[i]) begin
        failures++;
        $display("instruction %0d executed %0d times, model %0d", i, hw_ops[i], model_ops[i]);
      end
    end
    $display("mechanisms: spc_fix=%0d alpha_bypass=%0d beta_bypass=%0d load_while_decoding=%0d backpressure=%0d stall=%0d",
             n_fix, n_abyp, n_bbyp, n_overlap, n_backp, n_stall);
    for (int i = 0; i < 6; i++) begin
      int v;
      v = (i == 0) ? n_fix : (i == 1) ? n_abyp : (i == 2) ? n_bbyp :
          (i == 3) ? n_overlap : (i == 4) ? n_backp : n_stall;
      checks++;
      if (v == 0) begin
        failures++;
        $display("mechanism %0d never happened", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
