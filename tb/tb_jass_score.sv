// tb_jass_score -- score unit. Builds random unit-norm a_1, a_2 (16 entries),
// a random Hermitian Phi and c in floating point, derives the unit's inputs
// (b~, v, ||c||^2, tr(Phi), W A) in its number formats, and compares N, D and
// the decision N - tau D >= 0 with the floating-point values of
// (1-|b|^2)||c||^2 - v^H B v and (1-|b|^2)tr(Phi) - tr(B W A). tau is set
// just below and just above N/D to exercise both outcomes. Latency: 3 cycles.
module tb_jass_score;
  timeunit 1ns; timeprecision 1ps;
  import jass_pkg::*;
  logic clk = 0, rst_n = 0, cn2_we = 0, tr_we = 0, wa_we = 0, start = 0, done, pass;
  logic [1:0] wa_idx = 0;
  ctr_t tree_sum;
  ca_t bt;
  cv_t v [IMAX];
  logic [TAUW-1:0] tau;
  logic signed [95:0] n_o, d_o;
  always #1 clk = ~clk;

  jass_score dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  function automatic real urand(); return (real'($urandom % 65536) - 32768.0) / 32768.0; endfunction

  task automatic load(input int sel, input int idx, input real re, input real im);
    @(negedge clk);
    tree_sum.re = TRW'(longint'(re)); tree_sum.im = TRW'(longint'(im));
    cn2_we = (sel == 0); tr_we = (sel == 1); wa_we = (sel == 2); wa_idx = 2'(idx);
    @(negedge clk);
    cn2_we = 0; tr_we = 0; wa_we = 0;
  endtask

  initial begin
    real ar [2][B], ai [2][B], cr [B], ci [B], nrm, br, bi, v1r, v1i, v2r, v2i, cn2, trp;
    real war [2][2], wai [2][2], nref, dref, vbv, tbwa, omb, ratio;
    real pr [B][B], pi [B][B];
    int lat;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      for (int i = 0; i < 2; i++) begin
        nrm = 0;
        for (int n = 0; n < B; n++) begin ar[i][n] = urand(); ai[i][n] = urand(); nrm += ar[i][n]**2 + ai[i][n]**2; end
        for (int n = 0; n < B; n++) begin ar[i][n] /= $sqrt(nrm); ai[i][n] /= $sqrt(nrm); end
      end
      // Phi = X X^H with X random (16 x 16), c random
      for (int n = 0; n < B; n++) begin cr[n] = 40000.0 * urand(); ci[n] = 40000.0 * urand(); end
      for (int n = 0; n < B; n++) for (int m = 0; m < B; m++) begin pr[n][m] = 0; pi[n][m] = 0; end
      for (int k = 0; k < K; k++) begin
        real xr [B], xi [B];
        for (int n = 0; n < B; n++) begin xr[n] = 8000.0 * urand(); xi[n] = 8000.0 * urand(); end
        for (int n = 0; n < B; n++) for (int m = 0; m < B; m++) begin
          pr[n][m] += xr[n] * xr[m] + xi[n] * xi[m];
          pi[n][m] += xi[n] * xr[m] - xr[n] * xi[m];
        end
      end
      br = 0; bi = 0; v1r = 0; v1i = 0; v2r = 0; v2i = 0; cn2 = 0; trp = 0;
      for (int n = 0; n < B; n++) begin
        br += ar[0][n] * ar[1][n] + ai[0][n] * ai[1][n];
        bi += ar[0][n] * ai[1][n] - ai[0][n] * ar[1][n];
        v1r += ar[0][n] * cr[n] + ai[0][n] * ci[n]; v1i += ar[0][n] * ci[n] - ai[0][n] * cr[n];
        v2r += ar[1][n] * cr[n] + ai[1][n] * ci[n]; v2i += ar[1][n] * ci[n] - ai[1][n] * cr[n];
        cn2 += cr[n] ** 2 + ci[n] ** 2;
        trp += pr[n][n];
      end
      for (int i = 0; i < 2; i++) for (int j = 0; j < 2; j++) begin
        war[i][j] = 0; wai[i][j] = 0;
        for (int k = 0; k < B; k++) for (int n = 0; n < B; n++) begin
          // conj(a_i,n) Phi_nk a_j,k
          real tr_, ti_;
          tr_ = pr[n][k] * ar[j][k] - pi[n][k] * ai[j][k];
          ti_ = pr[n][k] * ai[j][k] + pi[n][k] * ar[j][k];
          war[i][j] += ar[i][n] * tr_ + ai[i][n] * ti_;
          wai[i][j] += ar[i][n] * ti_ - ai[i][n] * tr_;
        end
      end
      omb  = 1.0 - br * br - bi * bi;
      vbv  = v1r**2 + v1i**2 + v2r**2 + v2i**2 - 2.0 * (br * (v1r * v2r + v1i * v2i) - bi * (v1r * v2i - v1i * v2r));
      nref = omb * cn2 - vbv;
      tbwa = war[0][0] + war[1][1] - (br * war[1][0] - bi * wai[1][0]) - (br * war[0][1] + bi * wai[0][1]);
      dref = omb * trp - tbwa;
      // unit inputs in their formats
      bt.re = AW'(longint'(br * 1048576.0)); bt.im = AW'(longint'(bi * 1048576.0));
      v[0].re = VW'(longint'(v1r * 16.0)); v[0].im = VW'(longint'(v1i * 16.0));
      v[1].re = VW'(longint'(v2r * 16.0)); v[1].im = VW'(longint'(v2i * 16.0));
      load(0, 0, cn2 / 16.0, 0.0);
      load(1, 0, trp, 0.0);
      for (int i = 0; i < 2; i++) for (int j = 0; j < 2; j++)
        load(2, 2 * i + j, war[i][j] / 1024.0, wai[i][j] / 1024.0);
      ratio = nref / dref;
      for (int s = 0; s < 2; s++) begin
        real tv;
        tv = s ? ratio * 1.02 + 0.01 : ratio * 0.98 - 0.01;
        if (tv < 0) tv = 0;
        tau = TAUW'(longint'(tv * 4096.0));
        @(negedge clk);
        start = 1;
        @(negedge clk);
        start = 0;
        lat = 1;
        while (!done && lat < 20) begin @(negedge clk); lat++; end
        chk(lat == 3, $sformatf("latency %0d", lat));
        chk(pass == (s == 0) || tv == 0, $sformatf("decision t=%0d ratio=%f tau=%f pass=%0d", t, ratio, tv, pass));
        chk((real'(n_o) / 65536.0 - nref) < 1e-3 * cn2 + 1e4 && (nref - real'(n_o) / 65536.0) < 1e-3 * cn2 + 1e4,
            $sformatf("N %f vs %f", real'(n_o) / 65536.0, nref));
        chk((real'(d_o) / 1048576.0 - dref) < 1e-3 * trp + 1e4 && (dref - real'(d_o) / 1048576.0) < 1e-3 * trp + 1e4,
            $sformatf("D %f vs %f", real'(d_o) / 1048576.0, dref));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
