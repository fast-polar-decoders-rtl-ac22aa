// polar_model_pkg: software side of the decoder testbenches.
//
// PolarModel builds a polar code (frozen set from the Bhattacharyya-parameter
// recursion for a BPSK/AWGN channel of noise variance sigma2), encodes random
// frames, passes them through the channel and quantises the LLRs, compiles
// the code's decoder tree into the decoder's instruction list and, at the same
// time, decodes a frame with a bit-accurate model of the same arithmetic
// (saturating g, min-sum f, lowest-index tie breaks). The model works on whole
// vectors per node and knows nothing of the hardware's words, memories or
// pipeline, so it is an independent reference for the RTL.
//
// Conventions (same as the RTL): a node of length L has children of length
// L/2; alpha_l[i] = f(alpha[2i], alpha[2i+1]), alpha_r[i] = g(alpha[2i],
// alpha[2i+1], beta_l[i]), beta[2i] = beta_l[i] ^ beta_r[i],
// beta[2i+1] = beta_r[i]. Leaf i of the tree is source bit u_i.
package polar_model_pkg;
  import polar_pkg::*;

  typedef enum int {C_RATE0, C_RATE1, C_REP, C_SPC, C_ML, C_REPSPC, C_R} cls_e;

  class PolarModel;
    int n, N, P, W, WC, FR;
    int lim;                       // internal LLR saturation limit
    bit info[];                    // 1 = information leaf
    int cnt[][];                   // cnt[s][j]: information leaves under node (s, j)
    instr_t prog[$];
    int op_count[12];
    // reference state
    int alpha[][];
    bit betaL[][];
    bit betaR[][];
    bit cw[];
    int exp_cycles;                // cycle count the RTL should need (see RTL timing)

    function new(int n_, int P_, int W_, int WC_, int FR_);
      n = n_; N = 1 << n; P = P_; W = W_; WC = WC_; FR = FR_;
      lim = (1 << (W-1)) - 1;
      info = new[N];
      cnt = new[n+1];
      alpha = new[n+1];
      betaL = new[n+1];
      betaR = new[n+1];
      for (int s = 0; s <= n; s++) begin
        cnt[s]   = new[N >> s];
        alpha[s] = new[1 << s];
        betaL[s] = new[1 << s];
        betaR[s] = new[1 << s];
      end
      cw = new[N];
    endfunction

    // ---------------------------------------------------------------- code
    function void construct(int K, real sigma2);
      real lz[];
      real lo, hi, mid, t;
      int c, need;
      lz = new[N];
      for (int i = 0; i < N; i++) begin
        real z;
        z = -1.0 / (2.0 * sigma2);
        for (int b = n-1; b >= 0; b--) begin
          if (((i >> b) & 1) != 0) z = 2.0 * z;
          else              z = z + $ln(2.0 - $exp(z));
        end
        lz[i] = z;
      end
      lo = -1.0e9; hi = 1.0;
      for (int it = 0; it < 200; it++) begin
        mid = (lo + hi) / 2.0;
        c = 0;
        for (int i = 0; i < N; i++) if (lz[i] <= mid) c++;
        if (c >= K) hi = mid; else lo = mid;
      end
      t = hi;
      need = K;
      for (int i = 0; i < N; i++) begin
        info[i] = (lz[i] <= lo);
        if (info[i]) need--;
      end
      for (int i = N-1; i >= 0 && need > 0; i--)
        if (!info[i] && lz[i] <= t) begin info[i] = 1; need--; end
      count_tree();
    endfunction

    function void count_tree();
      for (int i = 0; i < N; i++) cnt[0][i] = int'(info[i]);
      for (int s = 1; s <= n; s++)
        for (int j = 0; j < (N >> s); j++)
          cnt[s][j] = cnt[s-1][2*j] + cnt[s-1][2*j+1];
    endfunction

    function int k_of();
      return cnt[n][0];
    endfunction

    function cls_e classify(int s, int j);
      int L, b;
      L = 1 << s;
      b = j * L;
      if (cnt[s][j] == 0) return C_RATE0;
      if (cnt[s][j] == L) return C_RATE1;
      if (cnt[s][j] == 1 && info[b+L-1] && L <= 16) return C_REP;
      if (cnt[s][j] == L-1 && !info[b] && L >= 4) return C_SPC;
      if (L == 4 && !info[b] && info[b+1] && !info[b+2] && info[b+3]) return C_ML;
      if (L == 8 && classify(2, 2*j) == C_REP && classify(2, 2*j+1) == C_SPC) return C_REPSPC;
      return C_R;
    endfunction

    // ------------------------------------------------------------- frames
    function void encode(input bit u[], output bit x[]);
      bit cur[];
      bit nxt[];
      cur = new[N];
      nxt = new[N];
      foreach (u[i]) cur[i] = u[i] & info[i];
      for (int s = 1; s <= n; s++) begin
        int L;
        L = 1 << s;
        for (int blk = 0; blk < N; blk += L)
          for (int i = 0; i < L/2; i++) begin
            nxt[blk + 2*i]   = cur[blk + i] ^ cur[blk + L/2 + i];
            nxt[blk + 2*i+1] = cur[blk + L/2 + i];
          end
        cur = nxt;
        nxt = new[N];
      end
      x = cur;
    endfunction

    function real gauss();
      real u1, u2;
      u1 = (real'($urandom % 1000000) + 0.5) / 1000000.0;
      u2 = (real'($urandom % 1000000) + 0.5) / 1000000.0;
      return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
    endfunction

    // BPSK (0 -> +1), AWGN, LLR = 2y/sigma2, FR fractional bits, WC-bit
    // symmetric saturation.
    function void channel(input bit x[], input real sigma2, output int llr[]);
      int cl;
      cl = (1 << (WC-1)) - 1;
      llr = new[N];
      foreach (x[i]) begin
        real y, l;
        int q;
        y = (x[i] ? -1.0 : 1.0) + $sqrt(sigma2) * gauss();
        l = 2.0 * y / sigma2 * real'(1 << FR);
        q = int'($floor(l + 0.5));
        if (q > cl) q = cl;
        if (q < -cl) q = -cl;
        llr[i] = q;
      end
    endfunction

    // --------------------------------------------------- model arithmetic
    function int f_m(int a, int b);
      int ma, mb, m;
      ma = (a < 0) ? -a : a;
      mb = (b < 0) ? -b : b;
      m = (ma < mb) ? ma : mb;
      return ((a < 0) != (b < 0)) ? -m : m;
    endfunction

    function int g_m(int a, int b, bit u);
      int r;
      r = u ? b - a : b + a;
      if (r > lim) r = lim;
      if (r < -lim) r = -lim;
      return r;
    endfunction

    // SPC decision (hard decision, flip least reliable on odd parity)
    function void spc_m(input int a[], output bit o[]);
      int jmin, mmin;
      bit par;
      o = new[a.size()];
      par = 0; jmin = 0; mmin = 1 << 30;
      foreach (a[i]) begin
        int m;
        o[i] = (a[i] < 0);
        par ^= o[i];
        m = (a[i] < 0) ? -a[i] : a[i];
        if (m < mmin) begin mmin = m; jmin = i; end
      end
      if (par) o[jmin] = !o[jmin];
    endfunction

    function int words(int s);
      int w;
      w = (1 << s) / (2*P);
      return (w < 1) ? 1 : w;
    endfunction

    // Execute one instruction on node (s) and record it.
    function void exec(op_e op, int s, bit child);
      int L, H;
      bit bl[];
      bit br[];
      bit bv[];
      int ar[];
      instr_t ins;
      L = 1 << s; H = L / 2;
      ins.op = op;
      ins.child = child_e'(child);
      prog.push_back(ins);
      op_count[int'(op)]++;
      bl = new[H]; br = new[H]; ar = new[H]; bv = new[L];
      exp_cycles += (op == OP_ML || op == OP_REP || op == OP_REP_SPC) ? 1 : words(s);
      if (op_is_spc(op) && words(s) > 1) exp_cycles += 1;
      for (int i = 0; i < H; i++) bl[i] = op_left_zero(op) ? 1'b0 : betaL[s-1][i];
      case (op)
        OP_F: begin
          for (int i = 0; i < H; i++) alpha[s-1][i] = f_m(alpha[s][2*i], alpha[s][2*i+1]);
          return;
        end
        OP_G, OP_G_0R: begin
          for (int i = 0; i < H; i++) alpha[s-1][i] = g_m(alpha[s][2*i], alpha[s][2*i+1], bl[i]);
          return;
        end
        OP_COMBINE, OP_COMBINE_0R: begin
          for (int i = 0; i < H; i++) br[i] = betaR[s-1][i];
        end
        OP_P_R1, OP_P_01: begin
          for (int i = 0; i < H; i++) br[i] = (g_m(alpha[s][2*i], alpha[s][2*i+1], bl[i]) < 0);
        end
        OP_P_RSPC, OP_P_0SPC: begin
          for (int i = 0; i < H; i++) ar[i] = g_m(alpha[s][2*i], alpha[s][2*i+1], bl[i]);
          spc_m(ar, br);
        end
        default: ;
      endcase
      case (op)
        OP_REP: begin
          int sum;
          sum = 0;
          for (int i = 0; i < L; i++) sum += alpha[s][i];
          for (int i = 0; i < L; i++) bv[i] = (sum < 0);
        end
        OP_ML: begin
          // u = (0,a,0,b) -> x = (a^b, b, a^b, b); candidates in u order
          // (a,b) = 00, 01, 11, 10
          int best, bestc;
          bit ca[4];
          bit cb[4];
          ca = '{0, 0, 1, 1};
          cb = '{0, 1, 1, 0};
          best = -(1 << 30); bestc = 0;
          for (int c = 0; c < 4; c++) begin
            int r;
            bit xx[4];
            xx[0] = ca[c] ^ cb[c]; xx[1] = cb[c]; xx[2] = ca[c] ^ cb[c]; xx[3] = cb[c];
            r = 0;
            for (int i = 0; i < 4; i++) r += xx[i] ? -alpha[s][i] : alpha[s][i];
            if (r > best) begin best = r; bestc = c; end
          end
          bv[0] = ca[bestc] ^ cb[bestc]; bv[1] = cb[bestc];
          bv[2] = ca[bestc] ^ cb[bestc]; bv[3] = cb[bestc];
        end
        OP_REP_SPC: begin
          int sum;
          bit rep;
          int a4[];
          bit o4[];
          a4 = new[4];
          sum = 0;
          for (int i = 0; i < 4; i++) sum += f_m(alpha[s][2*i], alpha[s][2*i+1]);
          rep = (sum < 0);
          for (int i = 0; i < 4; i++) a4[i] = g_m(alpha[s][2*i], alpha[s][2*i+1], rep);
          spc_m(a4, o4);
          for (int i = 0; i < 4; i++) begin
            bv[2*i] = rep ^ o4[i];
            bv[2*i+1] = o4[i];
          end
        end
        default: begin
          for (int i = 0; i < H; i++) begin
            bv[2*i] = bl[i] ^ br[i];
            bv[2*i+1] = br[i];
          end
        end
      endcase
      if (s == n) begin
        for (int i = 0; i < L; i++) cw[i] = bv[i];
      end else if (child) begin
        for (int i = 0; i < L; i++) betaR[s][i] = bv[i];
      end else begin
        for (int i = 0; i < L; i++) betaL[s][i] = bv[i];
      end
    endfunction

    // Walk the decoder tree depth first: emit the program and decode the
    // frame whose channel LLRs are given. Returns 0 if the tree holds a node
    // the instruction set cannot express.
    function bit run(input int llr[]);
      int st_s[$], st_j[$], st_c[$], st_ph[$];
      prog.delete();
      exp_cycles = 1;   // one cycle of pipeline fill
      foreach (op_count[i]) op_count[i] = 0;
      for (int i = 0; i < N; i++) alpha[n][i] = llr[i];
      st_s.push_back(n); st_j.push_back(0); st_c.push_back(0); st_ph.push_back(0);
      while (st_s.size() > 0) begin
        int s, j, c, ph, top;
        cls_e cl, lc, rc;
        top = st_s.size() - 1;
        s = st_s[top]; j = st_j[top]; c = st_c[top]; ph = st_ph[top];
        cl = classify(s, j);
        if (ph == 0 && (cl == C_REP || cl == C_ML || cl == C_REPSPC)) begin
          exec(cl == C_REP ? OP_REP : (cl == C_ML ? OP_ML : OP_REP_SPC), s, c[0]);
          void'(st_s.pop_back()); void'(st_j.pop_back()); void'(st_c.pop_back()); void'(st_ph.pop_back());
          continue;
        end
        if (s < 2) return 0;
        lc = classify(s-1, 2*j);
        rc = classify(s-1, 2*j+1);
        if (rc == C_RATE0 || (ph == 0 && (lc == C_RATE1 || lc == C_SPC))) return 0;
        case (ph)
          0: begin
            if (lc == C_RATE0) begin
              if (rc == C_RATE1 || rc == C_SPC) begin
                exec(rc == C_RATE1 ? OP_P_01 : OP_P_0SPC, s, c[0]);
                void'(st_s.pop_back()); void'(st_j.pop_back()); void'(st_c.pop_back()); void'(st_ph.pop_back());
              end else begin
                exec(OP_G_0R, s, c[0]);
                st_ph[top] = 2;
                st_s.push_back(s-1); st_j.push_back(2*j+1); st_c.push_back(1); st_ph.push_back(0);
              end
            end else begin
              exec(OP_F, s, c[0]);
              st_ph[top] = 1;
              st_s.push_back(s-1); st_j.push_back(2*j); st_c.push_back(0); st_ph.push_back(0);
            end
          end
          1: begin
            if (rc == C_RATE1 || rc == C_SPC) begin
              exec(rc == C_RATE1 ? OP_P_R1 : OP_P_RSPC, s, c[0]);
              void'(st_s.pop_back()); void'(st_j.pop_back()); void'(st_c.pop_back()); void'(st_ph.pop_back());
            end else begin
              exec(OP_G, s, c[0]);
              st_ph[top] = 3;
              st_s.push_back(s-1); st_j.push_back(2*j+1); st_c.push_back(1); st_ph.push_back(0);
            end
          end
          2: begin
            exec(OP_COMBINE_0R, s, c[0]);
            void'(st_s.pop_back()); void'(st_j.pop_back()); void'(st_c.pop_back()); void'(st_ph.pop_back());
          end
          default: begin
            exec(OP_COMBINE, s, c[0]);
            void'(st_s.pop_back()); void'(st_j.pop_back()); void'(st_c.pop_back()); void'(st_ph.pop_back());
          end
        endcase
      end
      return 1;
    endfunction
  endclass
endpackage
