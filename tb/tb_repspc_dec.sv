// tb_repspc_dec: checks the length-8 REP-SPC block on random LLRs.
// The reference decodes the node the long way: f over the pairs gives the
// LLRs of the length-4 repetition child, whose bit r is 1 when their sum is
// negative; g with partial sums r gives the LLRs of the length-4 SPC child,
// which is hard-decided and has its least reliable bit flipped on odd
// parity; the two children are combined as (r ^ s_i, s_i).
module tb_repspc_dec;
  localparam int W = 7;
  logic signed [W-1:0] ain [8];
  logic bout [8];
  int checks = 0, failures = 0, nrep = 0;

  repspc_dec #(.W(W)) dut (.alpha_in(ain), .beta_out(bout));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(int v);
    return (v > 63) ? 63 : (v < -63) ? -63 : v;
  endfunction

  function automatic int mag(int v);
    return (v < 0) ? -v : v;
  endfunction

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int a [8], s, r, m, ml, par, al [4], ar [4];
      bit sb [4];
      foreach (a[i]) a[i] = int'($urandom_range(126)) - 63;
      foreach (ain[i]) ain[i] = W'(a[i]);
      s = 0;
      for (int i = 0; i < 4; i++) begin
        al[i] = (((a[2*i] < 0) != (a[2*i+1] < 0)) ? -1 : 1) *
                ((mag(a[2*i]) < mag(a[2*i+1])) ? mag(a[2*i]) : mag(a[2*i+1]));
        s += al[i];
      end
      r = (s < 0);
      nrep += r;
      par = 0; m = 1000; ml = 0;
      for (int i = 0; i < 4; i++) begin
        ar[i] = sat(r ? a[2*i+1] - a[2*i] : a[2*i+1] + a[2*i]);
        sb[i] = (ar[i] < 0);
        par ^= int'(sb[i]);
        if (mag(ar[i]) < m) begin m = mag(ar[i]); ml = i; end
      end
      if (par != 0) sb[ml] = !sb[ml];
      #1;
      for (int i = 0; i < 4; i++) begin
        checks++;
        if (bout[2*i] != (1'(r) ^ sb[i]) || bout[2*i+1] != sb[i]) begin
          failures++;
          if (failures < 10) $display("test %0d pair %0d wrong", t, i);
        end
      end
    end
    checks++;
    if (nrep == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
