// tb_jass_jammers -- runs the core at its default sizes against the four
// two-antenna jammer types of the chip's error-rate evaluation, each at the
// jammer-to-signal ratio used there and a per-antenna SNR of 5 dB:
//   delayed spoofing  0 dB  -- the jammer repeats the user's stream one sample
//                              late, so it also carries the training sequence
//   antenna switching 10 dB -- Gaussian symbols from one antenna at a time
//   erratic           20 dB -- Gaussian symbols from both antennas, on and off
//                              at random times
//   barrage           30 dB -- white Gaussian noise from both antennas
// Each type is run for TRIALS random channels with the sequence at a random
// delay L in 4..12 and lmax = L + 8. For every evaluated delay the hardware
// score 16 num/den is compared with a floating-point model of the same
// algorithm (same PRNG start vectors; tolerance 0.1), and the hardware's
// pass/fail decision must equal the model's wherever the model's score is
// more than 0.1 away from tau. At least TRIALS - 1 trials per type must
// report exactly L. As in the evaluation, the model also scores each delay
// without mitigation (A = 0, score ||c||^2 / tr(Phi)); for the three
// jammers of 10 dB and more that baseline must find L in fewer trials than
// the core does. The channel, jammer and noise models (uniform-based
// Gaussian approximations, switching probability 1/8 per sample) and
// tau = 6 are this testbench's choices; signal amplitudes are set so that
// the strongest jammer stays within the 15-bit sample range.
module tb_jass_jammers;
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
  int n_ok [4], n_un [4];
  int un_first;  // first delay at which the unmitigated score reaches tau
  localparam int TRIALS = 6;
  localparam real TAU = 6.0;
  string names [4] = '{"delayed-spoofing 0 dB", "antenna-switching 10 dB", "erratic 20 dB", "barrage 30 dB"};
  real rhos [4] = '{0.0, 10.0, 20.0, 30.0};
  real hamps [4] = '{1500.0, 800.0, 300.0, 100.0};

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

  // jammer types of the evaluation: 0 delayed spoofing (repeats the user's
  // stream one sample later), 1 antenna switching (Gaussian symbols from one
  // of the two antennas, switching at random), 2 erratic (Gaussian symbols
  // from both antennas at random times, silent otherwise), 3 barrage (white
  // Gaussian from both antennas). rho = jammer-to-signal power ratio while
  // the jammer transmits, snr = signal-to-noise ratio, both per antenna.
  int L_true;
  task automatic gen_jam(input int jt, input int L, input int n, input real hamp,
                         input real rho_db, input real snr_db);
    real hr [B], hi [B], jr [B][2], ji [B][2];
    real rho, namp, jamp, prev_sym;
    int ant;
    bit on;
    rho  = 10.0 ** (rho_db / 10.0);
    namp = hamp / (10.0 ** (snr_db / 20.0));
    nsamp = n;
    for (int b = 0; b < B; b++) begin
      hr[b] = hamp * grand(); hi[b] = hamp * grand();
      for (int j = 0; j < 2; j++) begin jr[b][j] = urand(); ji[b][j] = urand(); end
    end
    // per-antenna jammer power: sum_j |J_bj|^2 E|w_j|^2 with E|J|^2 = 2/3
    case (jt)
      0: jamp = hamp * $sqrt(1.5 * rho);   // two antennas, same real symbol: |J1+J2|^2 = 4/3
      1: jamp = hamp * $sqrt(0.75 * rho);  // one antenna, complex symbol
      default: jamp = hamp * $sqrt(0.375 * rho);  // two antennas, complex symbols
    endcase
    prev_sym = 0.0; ant = 0; on = 1;
    for (int k = 0; k < n; k++) begin
      real sym, w0r, w0i, w1r, w1i;
      if (k < L) sym = 0.0;
      else if (k < L + K) sym = s[k - L] ? 1.0 : -1.0;
      else sym = ($urandom % 2) ? 1.0 : -1.0;
      w0r = jamp * grand(); w0i = jamp * grand(); w1r = jamp * grand(); w1i = jamp * grand();
      case (jt)
        0: begin w0r = jamp * prev_sym; w0i = 0.0; w1r = w0r; w1i = 0.0; end
        1: begin
          if ($urandom % 8 == 0) ant = 1 - ant;
          if (ant == 0) begin w1r = 0.0; w1i = 0.0; end
          else begin w0r = 0.0; w0i = 0.0; end
        end
        2: begin
          if ($urandom % 8 == 0) on = !on;
          if (!on) begin w0r = 0.0; w0i = 0.0; w1r = 0.0; w1i = 0.0; end
        end
        default: ;
      endcase
      prev_sym = sym;
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
  real un_score;  // unmitigated score (A = 0) of the last ref_score call
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
    un_score = cn2 / trphi;
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
    l = 0; nidx = 0; cpi = 0; t_prev = 0; un_first = -1;
    ref_state = seed;
    while (!done) begin
      @(posedge clk);
      if (index_tick) begin
        if (l >= 2 && cpi == 0) cpi = cyc - t_prev;
        t_prev = cyc;
        if (compare) begin
          hw = 16.0 * real'(score_num) / real'(score_den);
          rf = ref_score(l);
          if (un_first < 0 && un_score >= TAU) un_first = l;
          if (verbose) $display("  l=%0d score hw=%f ref=%f", l, hw, rf);
          check(hw - rf < 0.1 && rf - hw < 0.1,
                $sformatf("score l=%0d hw=%f ref=%f", l, hw, rf));
          if (rf > TAU + 0.1 || rf < TAU - 0.1)
            check(dut.u_score.pass == (rf >= TAU), $sformatf("decision l=%0d ref=%f", l, rf));
        end
        l++;
        nidx++;
      end
    end
    feed_go = 0;
    // finish the unmitigated search up to the true delay if the core
    // stopped earlier
    while (compare && un_first < 0 && l <= L_true) begin
      rf = ref_score(l);
      if (un_score >= TAU) un_first = l;
      l++;
    end
  endtask

  initial begin
    void'($urandom(11));
    s    = 16'b1011_0010_1110_0101;
    tau  = TAUW'(int'(TAU * 4096.0));
    seed = 32'h1F2E_3D4C;
    in_valid = 0; start = 0;
    gap = 0;
    for (int b = 0; b < B; b++) in_sample[b] = '0;
    for (int jt = 0; jt < 4; jt++) begin
      int ok, un;
      ok = 0; un = 0;
      for (int t = 0; t < TRIALS; t++) begin
        L_true = 4 + int'($urandom % 9);
        gen_jam(jt, L_true, L_true + K + 12, hamps[jt], rhos[jt], 5.0);
        run(L_true + 8, 1);
        $display("%s trial %0d: L=%0d found=%0d index=%0d", names[jt], t, L_true, found, index);
        if (found && index == LW'(L_true)) ok++;
        if (un_first == L_true) un++;
        if (found) n_found++; else n_miss++;
      end
      n_ok[jt] = ok;
      n_un[jt] = un;
      $display("%s: JASS %0d of %0d correct, unmitigated %0d of %0d", names[jt], ok, TRIALS, un, TRIALS);
      // the evaluation's baseline: without mitigation the strong jammers
      // hide the sequence, so JASS must do strictly better there
      if (jt > 0)
        check(un < ok, $sformatf("%s: unmitigated %0d not below JASS %0d", names[jt], un, ok));
      // the hardware must agree with the floating-point model on every
      // decision (checked in run); in addition most trials must detect L
      check(ok >= TRIALS - 1, $sformatf("%s: %0d of %0d trials detected the true delay", names[jt], ok, TRIALS));
    end
    check(n_found > 0, "detection happened");
    check(n_defl > 0, "deflation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
