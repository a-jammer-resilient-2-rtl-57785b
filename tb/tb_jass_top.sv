// tb_jass_top -- end-to-end test of the JASS core at its default sizes.
//
// Generates 16-antenna receive data y[k] = h s[k] + J w[k] + n[k] with a
// two-antenna barrage jammer and noise, feeds it through the sample port and
// checks:
//   run A  sequence at L = 6, jammer about 10 dB above the user: found = 1 and
//          index = 6; every evaluated index's score (16 num/den) is compared
//          with a floating-point model of the JASS score (same start vectors
//          from the same xorshift generator, two power iterations,
//          deflation, tolerance 0.1); cycles per delay index are measured
//          against the schedule of the control unit (286).
//   run B  no sequence, lmax = 5: a miss (found = 0, index = 5, 6 indices).
//   run C  sequence at L = 3 with samples arriving slowly: the core stalls
//          waiting for samples and still finds index 3.
//   run D  1100 samples pushed at once with lmax = 1023 and no sequence: the
//          1024-entry buffer fills and in_ready drops (back-pressure); the
//          run walks all 1024 indices and ends in a miss.
// Each mechanism (detection, miss, stall, back-pressure, Lambda deflation,
// PRNG start vectors) is counted and a failure is counted if it never occurs.
module tb_jass_top;
  timeunit 1ns; timeprecision 1ps;
  import jass_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic [K-1:0] s;
  logic [TAUW-1:0] tau;
  logic [LW-1:0] lmax;
  logic [31:0] seed;
  logic start, in_valid, in_ready, busy, done, found, index_tick, stall;
  logic [LW-1:0] index;
  cy_t in_sample [B];
  logic signed [95:0] score_num, score_den;

  jass_top dut (.*);

  int checks = 0, failures = 0;
  int n_found = 0, n_miss = 0, n_stall = 0, n_bp = 0, n_defl = 0, n_prng = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (stall) n_stall++;
    if (in_valid && !in_ready) n_bp++;
    if (dut.cmd.op == OP_DEFL && dut.cmd.k == 0) n_defl++;
    if (dut.prng_en) n_prng++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- scenario data ----------------
  localparam int MAXS = 1100;
  int yre [MAXS][B];
  int yim [MAXS][B];
  int nsamp;

  function automatic real urand();  // uniform in [-1, 1)
    return (real'($urandom % 65536) - 32768.0) / 32768.0;
  endfunction
  function automatic real grand();   // roughly unit-variance Gaussian
    return (urand() + urand() + urand() + urand()) * 0.866;
  endfunction
  function automatic int clip(input real x);
    if (x > 16383.0) return 16383;
    if (x < -16384.0) return -16384;
    return $rtoi(x);
  endfunction

  task automatic gen(input int L, input bit with_seq, input int n, input real hamp,
                     input real jamp, input real namp);
    real hr [B], hi [B], jr [B][2], ji [B][2];
    nsamp = n;
    for (int b = 0; b < B; b++) begin
      hr[b] = hamp * grand(); hi[b] = hamp * grand();
      for (int j = 0; j < 2; j++) begin jr[b][j] = urand(); ji[b][j] = urand(); end
    end
    for (int k = 0; k < n; k++) begin
      real sym, w0r, w0i, w1r, w1i;
      if (k < L) sym = 0.0;
      else if (k < L + K) sym = s[k - L] ? 1.0 : -1.0;
      else sym = ($urandom % 2) ? 1.0 : -1.0;
      if (!with_seq) sym = 0.0;
      w0r = jamp * grand(); w0i = jamp * grand(); w1r = jamp * grand(); w1i = jamp * grand();
      for (int b = 0; b < B; b++) begin
        real re, im;
        re = hr[b] * sym + jr[b][0] * w0r - ji[b][0] * w0i + jr[b][1] * w1r - ji[b][1] * w1i + namp * grand();
        im = hi[b] * sym + jr[b][0] * w0i + ji[b][0] * w0r + jr[b][1] * w1i + ji[b][1] * w1r + namp * grand();
        yre[k][b] = clip(re);
        yim[k][b] = clip(im);
      end
    end
  endtask

  // ---------------- floating-point JASS score for window l ----------------
  // Same steps as Algorithm 1 (two power iterations from the PRNG's start
  // vectors, deflation with a'), but in floating point and with an explicit
  // orthonormal projection instead of the b~ / B~ formulation.
  logic [31:0] ref_state;
  function automatic logic [31:0] xs32(input logic [31:0] x);
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

  function automatic real ref_score(input int l);
    real cr [B], ci [B], pr [B][B], pi [B][B], lr [B][B], li [B][B];
    real ar [2][B], ai [2][B], tr_, tim, nrm, cn2, trphi, num, den;
    real qr [2][B], qi [2][B];
    for (int n = 0; n < B; n++) begin
      cr[n] = 0; ci[n] = 0;
      for (int k = 0; k < K; k++) begin
        cr[n] += (s[k] ? 1.0 : -1.0) * yre[l+k][n];
        ci[n] += (s[k] ? 1.0 : -1.0) * yim[l+k][n];
      end
    end
    for (int n = 0; n < B; n++)
      for (int m = 0; m < B; m++) begin
        pr[n][m] = 0; pi[n][m] = 0;
        for (int k = 0; k < K; k++) begin
          pr[n][m] += yre[l+k][n] * yre[l+k][m] + yim[l+k][n] * yim[l+k][m];
          pi[n][m] += yim[l+k][n] * yre[l+k][m] - yre[l+k][n] * yim[l+k][m];
        end
        lr[n][m] = 16.0 * pr[n][m] - (cr[n] * cr[m] + ci[n] * ci[m]);
        li[n][m] = 16.0 * pi[n][m] - (ci[n] * cr[m] - cr[n] * ci[m]);
      end
    for (int i = 0; i < 2; i++) begin
      real apr [B], api [B];
      // start vector: the same xorshift sequence as the PRNG block
      for (int n = 0; n < B; n++) begin
        logic [31:0] x1, x2;
        x1 = xs32(ref_state); x2 = xs32(x1); ref_state = x2;
        ar[i][n] = real'($signed(x1[31:11])) / 1048576.0;
        ai[i][n] = real'($signed(x2[31:11])) / 1048576.0;
      end
      for (int t = 0; t < 2; t++) begin
        nrm = 0;
        for (int n = 0; n < B; n++) begin
          apr[n] = 0; api[n] = 0;
          for (int m = 0; m < B; m++) begin
            apr[n] += lr[n][m] * ar[i][m] - li[n][m] * ai[i][m];
            api[n] += lr[n][m] * ai[i][m] + li[n][m] * ar[i][m];
          end
          nrm += apr[n] * apr[n] + api[n] * api[n];
        end
        nrm = $sqrt(nrm);
        for (int n = 0; n < B; n++) begin ar[i][n] = apr[n] / nrm; ai[i][n] = api[n] / nrm; end
      end
      // deflate: Lambda -= a' a^H
      for (int n = 0; n < B; n++)
        for (int m = 0; m < B; m++) begin
          lr[n][m] -= apr[n] * ar[i][m] + api[n] * ai[i][m];
          li[n][m] -= api[n] * ar[i][m] - apr[n] * ai[i][m];
        end
    end
    // orthonormal basis q1, q2 of span(a1, a2)
    for (int n = 0; n < B; n++) begin qr[0][n] = ar[0][n]; qi[0][n] = ai[0][n]; end
    tr_ = 0; tim = 0;  // q1^H a2
    for (int n = 0; n < B; n++) begin
      tr_ += qr[0][n] * ar[1][n] + qi[0][n] * ai[1][n];
      tim += qr[0][n] * ai[1][n] - qi[0][n] * ar[1][n];
    end
    nrm = 0;
    for (int n = 0; n < B; n++) begin
      qr[1][n] = ar[1][n] - (tr_ * qr[0][n] - tim * qi[0][n]);
      qi[1][n] = ai[1][n] - (tr_ * qi[0][n] + tim * qr[0][n]);
      nrm += qr[1][n] * qr[1][n] + qi[1][n] * qi[1][n];
    end
    nrm = $sqrt(nrm);
    for (int n = 0; n < B; n++) begin qr[1][n] /= nrm; qi[1][n] /= nrm; end
    cn2 = 0; trphi = 0;
    for (int n = 0; n < B; n++) begin cn2 += cr[n] * cr[n] + ci[n] * ci[n]; trphi += pr[n][n]; end
    num = cn2; den = trphi;
    for (int i = 0; i < 2; i++) begin
      real vr, vi, xr, xi;
      vr = 0; vi = 0;
      for (int n = 0; n < B; n++) begin
        vr += qr[i][n] * cr[n] + qi[i][n] * ci[n];
        vi += qr[i][n] * ci[n] - qi[i][n] * cr[n];
      end
      num -= vr * vr + vi * vi;
      for (int n = 0; n < B; n++) begin
        xr = 0; xi = 0;
        for (int m = 0; m < B; m++) begin
          xr += pr[n][m] * qr[i][m] - pi[n][m] * qi[i][m];
          xi += pr[n][m] * qi[i][m] + pi[n][m] * qr[i][m];
        end
        den -= qr[i][n] * xr + qi[i][n] * xi;
      end
    end
    return num / den;
  endfunction

  // ---------------- one run ----------------
  int gap;
  bit verbose = 0;
  int nidx;
  longint cpi;

  // sample feeder: pushes y[0..nsamp-1] after each reset, gap idle cycles apart
  bit feed_go = 0;
  int fk = 0, fg = 0;
  always @(posedge clk) begin
    if (!feed_go || !rst_n) begin
      in_valid <= 1'b0;
      fk <= 0;
      fg <= 0;
    end else if (in_valid && !in_ready) begin
      // hold the sample until it is accepted
    end else if (fk < nsamp && fg >= gap) begin
      for (int b = 0; b < B; b++) begin
        in_sample[b].re <= YW'(yre[fk][b]);
        in_sample[b].im <= YW'(yim[fk][b]);
      end
      in_valid <= 1'b1;
      fk <= fk + 1;
      fg <= 0;
    end else begin
      in_valid <= 1'b0;
      fg <= fg + 1;
    end
  end

  task automatic run(input int lm, input bit compare);
    int l;
    longint t_prev;
    real hw, rf;
    feed_go = 0;
    rst_n = 0; start = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    lmax = LW'(lm);
    feed_go = 1;
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    l = 0; nidx = 0; cpi = 0; t_prev = 0;
    ref_state = seed;
    while (!done) begin
      @(posedge clk);
      if (index_tick) begin
        if (l >= 2 && cpi == 0) cpi = cyc - t_prev;
        t_prev = cyc;
        if (compare) begin
          hw = 16.0 * real'(score_num) / real'(score_den);
          rf = ref_score(l);
          if (verbose) $display("  l=%0d score hw=%f ref=%f", l, hw, rf);
          check(hw - rf < 0.1 && rf - hw < 0.1,
                $sformatf("score l=%0d hw=%f ref=%f", l, hw, rf));
        end
        l++;
        nidx++;
      end
    end
    feed_go = 0;
  endtask

  initial begin
    void'($urandom(7));
    s    = 16'b1011_0010_1110_0101;
    tau  = TAUW'(8 * 4096);  // tau = 8.0
    seed = 32'h2545_F491;
    in_valid = 0; start = 0;
    for (int b = 0; b < B; b++) in_sample[b] = '0;

    // run A: detection under a strong barrage jammer
    gen(6, 1, 40, 600.0, 2000.0, 100.0);
    gap = 0;
    run(30, 1);
    check(found == 1'b1, "run A: sequence found");
    check(index == 10'd6, $sformatf("run A: index %0d, expected 6", index));
    check(nidx == 7, $sformatf("run A: %0d indices evaluated", nidx));
    if (found) n_found++;
    $display("run A: found=%0d index=%0d cycles per delay index=%0d", found, index, cpi);
    check(cpi == 286, $sformatf("cycles per delay index %0d", cpi));

    // run B: miss
    gen(0, 0, 40, 600.0, 2000.0, 100.0);
    run(5, 1);
    check(found == 1'b0 && index == 10'd5 && nidx == 6, "run B: miss after lmax = 5");
    if (!found) n_miss++;

    // run C: slow samples -> stalls
    gen(3, 1, 30, 600.0, 1000.0, 100.0);
    gap = 600;
    run(20, 0);
    check(found == 1'b1 && index == 10'd3, $sformatf("run C: found=%0d index=%0d", found, index));
    if (found) n_found++;

    // run D: full buffer, all 1024 indices
    gen(0, 0, 1100, 600.0, 2000.0, 100.0);
    gap = 0;
    run(1023, 0);
    check(found == 1'b0 && nidx == 1024, $sformatf("run D: found=%0d indices=%0d", found, nidx));
    if (!found) n_miss++;

    $display("mechanisms: found=%0d miss=%0d stall_cycles=%0d backpressure_cycles=%0d deflations=%0d prng_draws=%0d",
             n_found, n_miss, n_stall, n_bp, n_defl, n_prng);
    check(n_found > 0, "detection happened");
    check(n_miss > 0, "miss happened");
    check(n_stall > 0, "stall happened");
    check(n_bp > 0, "back-pressure happened");
    check(n_defl > 0, "deflation happened");
    check(n_prng > 0, "PRNG used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
