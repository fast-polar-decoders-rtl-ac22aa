// tb_processing_unit: checks every instruction of the processing unit with
// eight lanes (P = 8, one word = 16 LLRs). For each instruction random LLRs
// and child estimates are applied and the outputs that matter for the
// node's length are compared with a reference built here from scalar f, g,
// hard decision, SPC, repetition, REP-SPC, ML and COMBINE rules:
//   F, G, G-0R           alpha_out (2^(s-1) values)
//   COMBINE(-0R), P-R1, P-01, P-RSPC, P-0SPC  beta0_out and beta1_out
//   REP (s = 1..4), REP-SPC (s = 3), ML (s = 2)  beta0_out
// P-RSPC/P-0SPC are also run at s = 5, where the SPC child spans two words:
// each word must carry the uncorrected result, and the correction cycle that
// follows must flag a write exactly when the parity is odd, name the word of
// the least reliable bit and carry that word with the bit flipped.
module tb_processing_unit;
  import polar_pkg::*;
  localparam int P = 8, W = 7, SW = 3, KW = 4;
  logic clk = 0, rst_n = 0, valid = 0, fix = 0, first = 0;
  op_e op = OP_F;
  logic [SW-1:0] stage = '0;
  logic [KW-1:0] word = '0;
  logic signed [W-1:0] alpha_in [2*P];
  logic beta0_in [P], beta1_in [P];
  logic signed [W-1:0] alpha_out [P];
  logic beta0_out [2*P], beta1_out [2*P];
  logic fix_write;
  logic [KW-1:0] fix_word;
  int checks = 0, failures = 0;
  int seen [12];
  int nfix = 0;

  processing_unit #(.P(P), .W(W), .SW(SW), .KW(KW)) dut (.*);

  always #5 clk = !clk;

  initial begin
    repeat (200000) @(posedge clk);
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

  function automatic int mag(int v);  return (v < 0) ? -v : v; endfunction
  function automatic int fref(int a, int b);
    int m;
    m = (mag(a) < mag(b)) ? mag(a) : mag(b);
    return ((a < 0) != (b < 0)) ? -m : m;
  endfunction
  function automatic int gref(int a, int b, bit u);
    int s;
    s = u ? b - a : b + a;
    return (s > 63) ? 63 : (s < -63) ? -63 : s;
  endfunction

  // SPC decision of n values; returns the index of the least reliable bit
  function automatic int spc(input int v [], input int n, output bit d [], output bit par);
    int m, ml;
    d = new[n];
    par = 0; m = 1000; ml = 0;
    for (int i = 0; i < n; i++) begin
      d[i] = (v[i] < 0);
      par ^= d[i];
      if (mag(v[i]) < m) begin m = mag(v[i]); ml = i; end
    end
    return ml;
  endfunction

  initial begin
    op_e ops [12] = '{OP_F, OP_G, OP_COMBINE, OP_COMBINE_0R, OP_G_0R, OP_P_R1,
                      OP_P_RSPC, OP_P_01, OP_P_0SPC, OP_ML, OP_REP, OP_REP_SPC};
    foreach (alpha_in[i]) alpha_in[i] = '0;
    foreach (beta0_in[i]) begin beta0_in[i] = 0; beta1_in[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      op_e o;
      int s, n, h, nw, a [], ar [], ml;
      bit bl [], br [], bv [], d [], par;
      o = ops[t % 12];
      case (o)
        OP_ML:      s = 2;
        OP_REP_SPC: s = 3;
        OP_REP:     s = 1 + int'($urandom_range(3));
        OP_P_RSPC, OP_P_0SPC: s = 2 + int'($urandom_range(3));
        default:    s = 1 + int'($urandom_range(3));
      endcase
      n = 1 << s; h = n / 2;
      nw = (n > 2*P) ? n / (2*P) : 1;
      a = new[n]; ar = new[h]; bl = new[h]; br = new[h]; bv = new[n];
      foreach (a[i]) a[i] = int'($urandom_range(126)) - 63;
      foreach (bl[i]) begin
        bl[i] = op_left_zero(o) ? 1'b0 : 1'($urandom);
        br[i] = 1'($urandom);
      end
      // reference for the whole node
      foreach (ar[i]) ar[i] = (o == OP_F) ? fref(a[2*i], a[2*i+1]) : gref(a[2*i], a[2*i+1], bl[i]);
      ml = 0; par = 0;
      case (o)
        OP_P_R1, OP_P_01: foreach (br[i]) br[i] = (ar[i] < 0);
        OP_P_RSPC, OP_P_0SPC: begin
          ml = spc(ar, h, d, par);
          foreach (br[i]) br[i] = d[i];
          if (nw == 1 && par) br[ml] = !br[ml];
        end
        default: ;
      endcase
      foreach (br[i]) begin bv[2*i] = bl[i] ^ br[i]; bv[2*i+1] = br[i]; end
      if (o == OP_REP) begin
        int sum;
        sum = 0;
        foreach (a[i]) sum += a[i];
        foreach (bv[i]) bv[i] = (sum < 0);
      end
      if (o == OP_ML) begin
        // exhaustive search over x = (a^b, b, a^b, b)
        int best;
        best = -1000;
        for (int c = 0; c < 4; c++) begin
          bit xa, xb;
          int r;
          xa = (c == 2 || c == 3); xb = (c == 1 || c == 2);
          r = ((xa ^ xb) ? -a[0] : a[0]) + (xb ? -a[1] : a[1]) + ((xa ^ xb) ? -a[2] : a[2]) + (xb ? -a[3] : a[3]);
          if (r > best) begin
            best = r;
            bv[0] = xa ^ xb; bv[1] = xb; bv[2] = xa ^ xb; bv[3] = xb;
          end
        end
      end
      if (o == OP_REP_SPC) begin
        int sum, g4 [];
        bit r;
        sum = 0;
        for (int i = 0; i < 4; i++) sum += fref(a[2*i], a[2*i+1]);
        r = (sum < 0);
        g4 = new[4];
        for (int i = 0; i < 4; i++) g4[i] = gref(a[2*i], a[2*i+1], r);
        ml = spc(g4, 4, d, par);
        if (par) d[ml] = !d[ml];
        for (int i = 0; i < 4; i++) begin bv[2*i] = r ^ d[i]; bv[2*i+1] = d[i]; end
      end
      seen[int'(o)]++;
      // apply word by word
      for (int w = 0; w < nw; w++) begin
        @(negedge clk);
        valid = 1; fix = 0; op = o; stage = SW'(s); first = (w == 0); word = KW'(w);
        for (int i = 0; i < 2*P; i++) alpha_in[i] = (w*2*P + i < n) ? W'(a[w*2*P + i]) : W'(0);
        for (int i = 0; i < P; i++) begin
          beta0_in[i] = (w*P + i < h) ? (op_left_zero(o) ? 1'($urandom) : bl[w*P + i]) : 1'b0;
          beta1_in[i] = (w*P + i < h) ? br[w*P + i] : 1'b0;
        end
        #1;
        if (op_descends(o)) begin
          for (int i = 0; i < P && w*P + i < h; i++)
            check(int'(alpha_out[i]) == ar[w*P + i], $sformatf("%s s=%0d lane %0d alpha", o.name(), s, i));
        end else begin
          for (int i = 0; i < 2*P && w*2*P + i < n; i++) begin
            check(beta0_out[i] == bv[w*2*P + i], $sformatf("%s s=%0d word %0d lane %0d beta0", o.name(), s, w, i));
            if (o != OP_REP && o != OP_ML && o != OP_REP_SPC)
              check(beta1_out[i] == bv[w*2*P + i], $sformatf("%s s=%0d lane %0d beta1", o.name(), s, i));
          end
        end
      end
      if (nw > 1) begin
        @(negedge clk);
        valid = 0; fix = 1;
        #1;
        check(fix_write == par, "correction write flag differs from the parity");
        if (par) begin
          int fw;
          nfix++;
          fw = ml / P;
          check(fix_word == KW'(fw), $sformatf("correction word %0d, expected %0d", fix_word, fw));
          br[ml] = !br[ml];
          bv[2*ml] = bl[ml] ^ br[ml]; bv[2*ml+1] = br[ml];
          for (int i = 0; i < 2*P; i++)
            check(beta1_out[i] == bv[fw*2*P + i], $sformatf("corrected word lane %0d", i));
        end
      end
      @(negedge clk);
      valid = 0; fix = 0;
    end
    foreach (seen[i]) check(seen[i] > 0, "instruction not exercised");
    check(nfix > 0, "no multi-word SPC correction");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
