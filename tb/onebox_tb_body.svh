// Shared body of the end-to-end testbenches of onebox_top. The including module defines the
// localparams B, U, W, K, LOG2W, WG (guard subcarriers), SNR_DB1/SNR_DB2 and PSK8 (0: 16-QAM, 1: 8-PSK),
// and instantiates the detector as `dut` on the signals declared here; it calls run_all() and then
// prints the result line. A watchdog here ends the run if the detector hangs.
//
// Scenario: two detection tasks. For each, a random frequency-selective channel with L_TAPS
// Rayleigh taps (unit-variance coefficients per subcarrier), random 16-QAM or 8-PSK symbols
// (unit energy, PSK8 selects) on the used subcarriers and zeros on the guard subcarriers, OFDM modulation, complex
// Gaussian noise at the task's SNR, and 1-bit quantisation are simulated here. The omega~
// region below -4 is reported but not required here: the detector drives alpha towards agreement with r,
// so it is rare on consistent data; it is covered by the omega LUT and FTF unit tests. Task 1's data
// is loaded while idle; task 2's is loaded during task 1's last iteration, trailing the
// detector's reads. Every result is compared with a floating-point model of the same algorithm
// (same scalings, same 1/sigma~ table value), and after normalisation and slicing with the
// transmitted symbols.
// Checks: result relative error, slicer agreement, symbol error rate, number of result
// columns, cycle count per task, and that every mechanism occurred: first-iteration output
// reset, accumulator reset, update bypass through the MUX, loading during the last iteration,
// the mid and high omega~ regions, sigma below and above the threshold.
  localparam int  L_TAPS = 4;
  localparam int  AW = $clog2(B * W);
  localparam int  LOG2U = $clog2(U);
  localparam int  L_MVM1 = 2 + LOG2U;
  localparam int  L_FTF = 2 * (W + LOG2W) + 4;
  localparam int  L_MVM2 = 4;
  localparam int  PERIOD = (B - 1) * W + 2 + L_MVM1 + L_FTF + L_MVM2;
  localparam int  TASK_CYCLES = K * PERIOD + W + 3;
  localparam real PI = 3.14159265358979;
  localparam int  S_MAX = PSK8 ? 128 : 121;    // box bound in [2.7]: 1 for 8-PSK, 3/sqrt(10) for 16-QAM
  localparam int  SIGMA_MIN = 65;

  logic clk = 0, rst_n = 0, start = 0;
  logic [7:0] sigma = '0;
  logic [8:0] s_max = 9'(S_MAX);
  logic busy, done, load_ready, h_wr_en = 0, r_wr_en = 0, s_valid;
  logic [AW-1:0] h_wr_addr = '0, r_wr_addr = '0;
  onebox_pkg::h_t [U-1:0] h_wr_data = '0;
  onebox_pkg::r_t r_wr_data = '0;
  logic [LOG2W-1:0] s_w;
  onebox_pkg::s_t [U-1:0] s_out;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // ---- task data, two tasks ---------------------------------------------------------------
  int  hq_re [2][B][W][U], hq_im [2][B][W][U];     // quantised channel, [4.4] integers
  bit  rr_re [2][B][W], rr_im [2][B][W];           // 1 = -1
  real x_re [2][W][U], x_im [2][W][U];             // transmitted symbols
  int  sig_code [2];
  real s_hw_re [2][W][U], s_hw_im [2][W][U];
  int  ncol [2];
  real cs [W], sn [W];

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1, 1000000))) / 1000001.0;
    u2 = (real'($urandom_range(0, 1000000))) / 1000001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * PI * u2);
  endfunction

  function automatic bit used_sc(input int w);    // bins near W/2 are the guard band
    return !(w >= W / 2 - WG / 2 && w < W / 2 + (WG + 1) / 2);
  endfunction

  function automatic real qam(input int i);
    return (real'(2 * i - 3)) / $sqrt(10.0);
  endfunction

  // nearest constellation point of (xr, xi): per part for 16-QAM, by angle for 8-PSK
  task automatic decide(input real xr, input real xi, output real dr, output real di);
    if (PSK8) begin
      int k;
      real bd, d;
      k = 0; bd = -1.0e9;
      for (int i = 0; i < 8; i++) begin
        d = xr * $cos(2.0 * PI * i / 8.0) + xi * $sin(2.0 * PI * i / 8.0);
        if (d > bd) begin bd = d; k = i; end
      end
      dr = $cos(2.0 * PI * k / 8.0); di = $sin(2.0 * PI * k / 8.0);
    end else begin
      dr = slice(xr); di = slice(xi);
    end
  endtask

  function automatic real slice(input real x);
    real best, bd;
    best = qam(0); bd = (x - best) * (x - best);
    for (int i = 1; i < 4; i++) if ((x - qam(i)) * (x - qam(i)) < bd) begin best = qam(i); bd = (x - best) * (x - best); end
    return best;
  endfunction

  task automatic make_task(input int t, input real snr_db);
    real tr [L_TAPS][B][U], ti [L_TAPS][B][U];
    real n0, sd, yr, yi, zr [W], zi [W], hr, hi;
    for (int l = 0; l < L_TAPS; l++) for (int b = 0; b < B; b++) for (int u = 0; u < U; u++) begin
      tr[l][b][u] = gauss() / $sqrt(2.0 * L_TAPS); ti[l][b][u] = gauss() / $sqrt(2.0 * L_TAPS);
    end
    for (int w = 0; w < W; w++) for (int u = 0; u < U; u++)
      if (used_sc(w)) begin
        if (PSK8) begin
          int k;
          k = $urandom_range(0, 7);
          x_re[t][w][u] = $cos(2.0 * PI * k / 8.0); x_im[t][w][u] = $sin(2.0 * PI * k / 8.0);
        end else begin
          x_re[t][w][u] = qam($urandom_range(0, 3)); x_im[t][w][u] = qam($urandom_range(0, 3));
        end
      end else begin x_re[t][w][u] = 0.0; x_im[t][w][u] = 0.0; end
    // noise: rho = W_used U Es Eh / (W N0)
    n0 = real'(W - WG) * U / (real'(W) * $pow(10.0, snr_db / 10.0));
    sd = $sqrt(n0 / 2.0);
    sig_code[t] = int'($sqrt(n0) * 128.0);
    if (sig_code[t] > 255) sig_code[t] = 255;
    for (int b = 0; b < B; b++) begin
      for (int w = 0; w < W; w++) begin
        zr[w] = 0.0; zi[w] = 0.0;
        for (int u = 0; u < U; u++) begin
          hr = 0.0; hi = 0.0;
          for (int l = 0; l < L_TAPS; l++) begin
            hr += tr[l][b][u] * cs[(l * w) % W] + ti[l][b][u] * sn[(l * w) % W];
            hi += ti[l][b][u] * cs[(l * w) % W] - tr[l][b][u] * sn[(l * w) % W];
          end
          hq_re[t][b][w][u] = int'(onebox_pkg::sat(longint'($rtoi(hr * 16.0 + (hr >= 0 ? 0.5 : -0.5))), 8));
          hq_im[t][b][w][u] = int'(onebox_pkg::sat(longint'($rtoi(hi * 16.0 + (hi >= 0 ? 0.5 : -0.5))), 8));
          zr[w] += hr * x_re[t][w][u] - hi * x_im[t][w][u];
          zi[w] += hr * x_im[t][w][u] + hi * x_re[t][w][u];
        end
      end
      for (int n = 0; n < W; n++) begin
        yr = 0.0; yi = 0.0;
        for (int w = 0; w < W; w++) begin
          yr += zr[w] * cs[(w * n) % W] - zi[w] * sn[(w * n) % W];
          yi += zr[w] * sn[(w * n) % W] + zi[w] * cs[(w * n) % W];
        end
        yr = yr / $sqrt(real'(W)) + sd * gauss();
        yi = yi / $sqrt(real'(W)) + sd * gauss();
        rr_re[t][b][n] = (yr <= 0.0); rr_im[t][b][n] = (yi <= 0.0);
      end
    end
  endtask

  // standard normal CDF via the Abramowitz-Stegun 7.1.26 erfc approximation
  function automatic real phi(input real x);
    real z, tt, e;
    z = (x < 0 ? -x : x) / $sqrt(2.0);
    tt = 1.0 / (1.0 + 0.3275911 * z);
    e = tt * (0.254829592 + tt * (-0.284496736 + tt * (1.421413741 + tt * (-1.453152027 + tt * 1.061405429)))) * $exp(-z * z);
    return (x >= 0) ? 1.0 - 0.5 * e : 0.5 * e;
  endfunction

  function automatic real omega_t(input real x);
    if (x >= 4.0) return 0.0;
    if (x <= -4.0) return -x;
    return $exp(-x * x / 2.0) / ($sqrt(2.0 * PI) * phi(x));
  endfunction

  // floating-point 1BOX with the hardware's scalings; returns S in sr/si
  task automatic ref_model(input int t, output real sr [W][U], output real si [W][U]);
    real isg, ar [W], ai [W], zr [W], zi [W], fr [W], fi [W], vr [B][W], vi [B][W], gr, gi;
    int m;
    m = (sig_code[t] > SIGMA_MIN) ? sig_code[t] : SIGMA_MIN;
    isg = real'((8192 + m / 2) / m) / 64.0;
    for (int w = 0; w < W; w++) for (int u = 0; u < U; u++) begin sr[w][u] = 0.0; si[w][u] = 0.0; end
    for (int k = 0; k < K; k++) begin
      for (int b = 0; b < B; b++) begin
        for (int w = 0; w < W; w++) begin
          zr[w] = 0.0; zi[w] = 0.0;
          for (int u = 0; u < U; u++) begin
            zr[w] += (hq_re[t][b][w][u] * sr[w][u] - hq_im[t][b][w][u] * si[w][u]) / 16.0;
            zi[w] += (hq_re[t][b][w][u] * si[w][u] + hq_im[t][b][w][u] * sr[w][u]) / 16.0;
          end
        end
        for (int n = 0; n < W; n++) begin
          real xr, xi;
          xr = 0.0; xi = 0.0;
          for (int w = 0; w < W; w++) begin
            xr += zr[w] * cs[(w * n) % W] - zi[w] * sn[(w * n) % W];
            xi += zr[w] * sn[(w * n) % W] + zi[w] * cs[(w * n) % W];
          end
          xr = xr * $sqrt(2.0 / real'(W)) * isg; xi = xi * $sqrt(2.0 / real'(W)) * isg;
          if (rr_re[t][b][n]) xr = -xr;
          if (rr_im[t][b][n]) xi = -xi;
          fr[n] = rr_re[t][b][n] ? -omega_t(xr) : omega_t(xr);
          fi[n] = rr_im[t][b][n] ? -omega_t(xi) : omega_t(xi);
        end
        for (int w = 0; w < W; w++) begin
          vr[b][w] = 0.0; vi[b][w] = 0.0;
          for (int n = 0; n < W; n++) begin
            vr[b][w] += fr[n] * cs[(w * n) % W] + fi[n] * sn[(w * n) % W];
            vi[b][w] += fi[n] * cs[(w * n) % W] - fr[n] * sn[(w * n) % W];
          end
          vr[b][w] = vr[b][w] / $sqrt(2.0 * real'(W)); vi[b][w] = vi[b][w] / $sqrt(2.0 * real'(W));
        end
      end
      for (int w = 0; w < W; w++) for (int u = 0; u < U; u++) begin
        gr = 0.0; gi = 0.0;
        for (int b = 0; b < B; b++) begin
          gr += (hq_re[t][b][w][u] * vr[b][w] + hq_im[t][b][w][u] * vi[b][w]) / 16.0;
          gi += (hq_re[t][b][w][u] * vi[b][w] - hq_im[t][b][w][u] * vr[b][w]) / 16.0;
        end
        sr[w][u] = sr[w][u] + gr / 32.0; si[w][u] = si[w][u] + gi / 32.0;
        if (sr[w][u] > S_MAX / 128.0) sr[w][u] = S_MAX / 128.0;
        if (sr[w][u] < -S_MAX / 128.0) sr[w][u] = -S_MAX / 128.0;
        if (si[w][u] > S_MAX / 128.0) si[w][u] = S_MAX / 128.0;
        if (si[w][u] < -S_MAX / 128.0) si[w][u] = -S_MAX / 128.0;
      end
    end
  endtask

  task automatic write_word(input int t, input int a);
    int b, w;
    b = a / W; w = a % W;
    h_wr_en <= 1; h_wr_addr <= AW'(a);
    for (int u = 0; u < U; u++) begin
      h_wr_data[u].re <= 8'(hq_re[t][b][w][u]); h_wr_data[u].im <= 8'(hq_im[t][b][w][u]);
    end
    r_wr_en <= 1; r_wr_addr <= AW'(a);
    r_wr_data.re <= rr_re[t][b][w]; r_wr_data.im <= rr_im[t][b][w];
  endtask

  // ---- result capture and mechanism counters -----------------------------------------------
  int cur_task = 0;
  int n_orst = 0, n_accrst = 0, n_bypass = 0, n_late_wr = 0, n_om_lo = 0, n_om_mid = 0, n_om_hi = 0;
  int n_sig_lo = 0, n_sig_hi = 0;
  always @(posedge clk) if (rst_n) begin
    if (s_valid) begin
      for (int u = 0; u < U; u++) begin
        s_hw_re[cur_task][s_w][u] = real'(s_out[u].re) / 128.0;
        s_hw_im[cur_task][s_w][u] = real'(s_out[u].im) / 128.0;
      end
      ncol[cur_task]++;
    end
    if (dut.u_ctrl.orst) n_orst++;
    if (dut.u_ctrl.acc_rst) n_accrst++;
    if (dut.u_ctrl.mux_sel && dut.u_ctrl.pos_valid) n_bypass++;
    if (busy && h_wr_en && load_ready) n_late_wr++;
    if (dut.u_ftf.alpha_v) begin
      if (dut.u_ftf.alpha_q.re <= -64 || dut.u_ftf.alpha_q.im <= -64) n_om_lo++;
      if (dut.u_ftf.alpha_q.re >= 64 || dut.u_ftf.alpha_q.im >= 64) n_om_hi++;
      if (dut.u_ftf.alpha_q.re > -64 && dut.u_ftf.alpha_q.re < 64) n_om_mid++;
    end
  end

  task automatic check_task(input int t);
    real sr [W][U], si [W][U], num, den, agree, tot, serr, rerr;
    ref_model(t, sr, si);
    num = 0; den = 0; agree = 0; tot = 0; serr = 0; rerr = 0;
    begin
      real nhw, nref, a, bb, dhr, dhi, drr, dri;
      nhw = 0; nref = 0;
      for (int w = 0; w < W; w++) for (int u = 0; u < U; u++) if (used_sc(w)) begin
        nhw += s_hw_re[t][w][u] ** 2 + s_hw_im[t][w][u] ** 2;
        nref += sr[w][u] ** 2 + si[w][u] ** 2;
      end
      // normalisation of the published algorithm: Es sqrt(U W_used) / ||S||_F
      a = $sqrt(real'(U * (W - WG))) / $sqrt(nhw);
      bb = $sqrt(real'(U * (W - WG))) / $sqrt(nref);
      for (int w = 0; w < W; w++) for (int u = 0; u < U; u++) if (used_sc(w)) begin
        num += (s_hw_re[t][w][u] - sr[w][u]) ** 2 + (s_hw_im[t][w][u] - si[w][u]) ** 2;
        den += sr[w][u] ** 2 + si[w][u] ** 2;
        tot += 2;
        decide(a * s_hw_re[t][w][u], a * s_hw_im[t][w][u], dhr, dhi);
        decide(bb * sr[w][u], bb * si[w][u], drr, dri);
        if (dhr == drr) agree++;
        if (dhi == dri) agree++;
        if (dhr != x_re[t][w][u] || dhi != x_im[t][w][u]) serr++;
        if (drr != x_re[t][w][u] || dri != x_im[t][w][u]) rerr++;
      end
    end
    $display("task %0d: sigma code %0d, rel. error %f, slicer agreement %f, SER %f (model %f)",
             t, sig_code[t], $sqrt(num / den), agree / tot, serr / (tot / 2), rerr / (tot / 2));
    checks++; if ($sqrt(num / den) > 0.08) begin failures++; $display("FAIL: hardware result far from the model"); end
    checks++; if (agree / tot < 0.97) begin failures++; $display("FAIL: slicer decisions differ from the model"); end
    checks++; if (serr > rerr + 0.03 * (tot / 2)) begin failures++; $display("FAIL: symbol error rate above the model's"); end
    checks++; if (ncol[t] != W) begin failures++; $display("FAIL: %0d result columns", ncol[t]); end
  endtask

  // the whole scenario; the including module calls it, then prints the result line
  task automatic run_all();
    longint t0, t1;
    for (int i = 0; i < W; i++) begin cs[i] = $cos(2.0 * PI * i / W); sn[i] = $sin(2.0 * PI * i / W); end
    make_task(0, SNR_DB1);
    make_task(1, SNR_DB2);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int a = 0; a < B * W; a++) begin write_word(0, a); @(posedge clk); end
    h_wr_en <= 0; r_wr_en <= 0;
    sigma <= 8'(sig_code[0]);
    if (sig_code[0] < SIGMA_MIN) n_sig_lo++; else n_sig_hi++;
    @(posedge clk);
    start <= 1; t0 = cyc; @(posedge clk); start <= 0;
    // load task 2 during the last iteration, behind the reads
    fork
      begin
        wait (dut.u_ctrl.iter == ($clog2(K + 1))'(K));
        repeat (L_MVM1 + L_FTF + L_MVM2 + 8) @(posedge clk);
        for (int a = 0; a < B * W; a++) begin write_word(1, a); @(posedge clk); end
        h_wr_en <= 0; r_wr_en <= 0;
      end
      begin
        @(posedge clk iff done);
        t1 = cyc;
      end
    join
    checks++;
    if (t1 - t0 != TASK_CYCLES) begin failures++; $display("FAIL: task took %0d cycles, want %0d", t1 - t0, TASK_CYCLES); end
    $display("task 1 took %0d cycles", t1 - t0);
    check_task(0);
    cur_task = 1;
    sigma <= 8'(sig_code[1]);
    if (sig_code[1] < SIGMA_MIN) n_sig_lo++; else n_sig_hi++;
    @(posedge clk);
    start <= 1; @(posedge clk); start <= 0;
    @(posedge clk iff done);
    repeat (2) @(posedge clk);
    check_task(1);
    $display("mechanisms: orst %0d acc_rst %0d bypass %0d late-load %0d omega lo/mid/hi %0d/%0d/%0d sigma lo/hi %0d/%0d",
             n_orst, n_accrst, n_bypass, n_late_wr, n_om_lo, n_om_mid, n_om_hi, n_sig_lo, n_sig_hi);
    checks++; if (n_orst != 2 * B * W) begin failures++; $display("FAIL: output reset count"); end
    checks++; if (n_accrst != 2 * W) begin failures++; $display("FAIL: accumulator reset count"); end
    checks++; if (n_bypass != 2 * (K - 1) * W) begin failures++; $display("FAIL: bypass count"); end
    checks++; if (n_late_wr == 0) begin failures++; $display("FAIL: no load during the last iteration"); end
    checks++; if (n_om_mid == 0 || n_om_hi == 0) begin failures++; $display("FAIL: omega region unused"); end
    checks++; if (n_sig_lo == 0 || n_sig_hi == 0) begin failures++; $display("FAIL: sigma threshold case unused"); end
  endtask

  initial begin
    repeat (3 * B * W + 3 * TASK_CYCLES + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
