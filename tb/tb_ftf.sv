// tb_ftf: self-checking test of the FTF datapath at B = 3 antennas, W = 128 subcarriers.
// Two tasks, one with sigma below the threshold sigma' and one above, each preceded by a
// clear pulse and by loading random received bits into r-RAM. Random z samples are streamed
// antenna by antenna (the second task with idle clocks between antennas). For every antenna
// the expected row of V is computed here in real arithmetic:
//   alpha_n = r_n * sqrt(2/W) / sigma~ * sum_w z_w exp(+j 2 pi w n / W),
//   f_n = r_n * omega~(alpha_n),   V_w = (2W)^-1/2 * sum_n f_n exp(-j 2 pi w n / W),
// with 1/sigma~ taken as the table value and omega~ evaluated exactly (Gaussian ratio by
// numerical integration, thresholds +-4). Each antenna's output must agree within 6 %
// (relative error of the row) and 4 LSB per value. Also checks the latency of
// 2 * (W + log2 W) + 4 clocks from the first z to the first V, W outputs per antenna, the
// natural output order, and that alpha fell into all three omega~ regions.
module tb_ftf;
  import onebox_pkg::*;
  localparam int B = 3, W = 128, LOG2W = 7, AW = $clog2(B * W), NT = 2;
  localparam int LAT = 2 * (W + LOG2W) + 4;
  localparam int SIGMA_MIN = 65;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0, clear = 0, z_valid = 0, we_grant = 1, r_wr_en = 0, v_valid;
  logic [SIG_W-1:0] sigma = '0;
  z_t z = '0;
  logic [AW-1:0] r_wr_addr = '0;
  r_t r_wr_data = '0;
  v_t v;
  int zr [B][W], zi [B][W];
  bit rr [B][W], ri [B][W];
  real vr_e [B][W], vi_e [B][W];
  real cs [W], sn [W];
  int checks = 0, failures = 0, cyc = 0, nv = 0, first_z = -1, first_v = -1;
  int n_lo = 0, n_mid = 0, n_hi = 0;
  real err2, ref2, maxe;

  ftf #(.B(B), .W(W)) dut (.*);
  always #5 clk = ~clk;
  always @(negedge clk) cyc <= cyc + 1;   // read at rising edges without a race

  function automatic real pdf(input real x);
    return $exp(-x * x / 2.0) / $sqrt(2.0 * PI);
  endfunction
  function automatic real cdf(input real x);
    real h, acc;
    h = x / 400.0;
    acc = pdf(0.0) + pdf(x);
    for (int i = 1; i < 400; i++) acc += ((i % 2 == 1) ? 4.0 : 2.0) * pdf(i * h);
    return 0.5 + acc * h / 3.0;
  endfunction
  function automatic real om(input real x);
    if (x >= 4.0) begin n_hi++; return 0.0; end
    if (x <= -4.0) begin n_lo++; return (-x > 127.0 / 16.0) ? 127.0 / 16.0 : -x; end
    n_mid++;
    return pdf(x) / cdf(x);
  endfunction

  task automatic make_ref(input int sig);
    real isg, fr [W], fi [W];
    int m;
    m = (sig > SIGMA_MIN) ? sig : SIGMA_MIN;
    isg = real'((8192 + m / 2) / m) / 64.0;
    for (int b = 0; b < B; b++) begin
      for (int n = 0; n < W; n++) begin
        real xr, xi;
        xr = 0.0; xi = 0.0;
        for (int w = 0; w < W; w++) begin
          xr += (zr[b][w] * cs[(w * n) % W] - zi[b][w] * sn[(w * n) % W]) / 32.0;
          xi += (zr[b][w] * sn[(w * n) % W] + zi[b][w] * cs[(w * n) % W]) / 32.0;
        end
        xr = xr * $sqrt(2.0 / W) * isg; xi = xi * $sqrt(2.0 / W) * isg;
        if (rr[b][n]) xr = -xr;
        if (ri[b][n]) xi = -xi;
        fr[n] = rr[b][n] ? -om(xr) : om(xr);
        fi[n] = ri[b][n] ? -om(xi) : om(xi);
      end
      for (int w = 0; w < W; w++) begin
        vr_e[b][w] = 0.0; vi_e[b][w] = 0.0;
        for (int n = 0; n < W; n++) begin
          vr_e[b][w] += fr[n] * cs[(w * n) % W] + fi[n] * sn[(w * n) % W];
          vi_e[b][w] += fi[n] * cs[(w * n) % W] - fr[n] * sn[(w * n) % W];
        end
        vr_e[b][w] = vr_e[b][w] / $sqrt(2.0 * W); vi_e[b][w] = vi_e[b][w] / $sqrt(2.0 * W);
      end
    end
  endtask

  // output checker: V arrives antenna by antenna in natural order
  always @(posedge clk) if (rst_n && v_valid) begin
    int b, w;
    real er, ei;
    b = (nv / W) % B; w = nv % W;
    if (first_v < 0) first_v = cyc;
    if (w == 0) begin err2 = 0.0; ref2 = 0.0; maxe = 0.0; end
    er = v.re / 16.0 - vr_e[b][w]; ei = v.im / 16.0 - vi_e[b][w];
    err2 += er * er + ei * ei;
    ref2 += vr_e[b][w] * vr_e[b][w] + vi_e[b][w] * vi_e[b][w];
    if (er > maxe) maxe = er; if (-er > maxe) maxe = -er;
    if (ei > maxe) maxe = ei; if (-ei > maxe) maxe = -ei;
    if (w == W - 1) begin
      checks += 2;
      if ($sqrt(err2 / ref2) > 0.06) begin failures++; $display("FAIL: antenna %0d relative error %f", b, $sqrt(err2 / ref2)); end
      if (maxe > 4.0 / 16.0) begin failures++; $display("FAIL: antenna %0d max error %f", b, maxe); end
      $display("task %0d antenna %0d: relative error %f, max error %f", nv / (B * W), b, $sqrt(err2 / ref2), maxe);
    end
    nv++;
  end

  initial begin
    for (int i = 0; i < W; i++) begin cs[i] = $cos(2.0 * PI * i / W); sn[i] = $sin(2.0 * PI * i / W); end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < NT; t++) begin
      int sig;
      sig = (t == 0) ? 30 : 150;
      // wait for the previous task's output, then load r-RAM while idle
      wait (nv == t * B * W);
      for (int b = 0; b < B; b++)
        for (int w = 0; w < W; w++) begin
          zr[b][w] = $urandom_range(0, 160) - 80; zi[b][w] = $urandom_range(0, 160) - 80;
          rr[b][w] = $urandom_range(0, 1); ri[b][w] = $urandom_range(0, 1);
        end
      make_ref(sig);
      @(posedge clk);
      sigma <= SIG_W'(sig);
      for (int a = 0; a < B * W; a++) begin
        r_wr_en <= 1; r_wr_addr <= AW'(a); r_wr_data <= '{re: rr[a / W][a % W], im: ri[a / W][a % W]};
        @(posedge clk);
      end
      r_wr_en <= 0;
      clear <= 1; @(posedge clk); clear <= 0;
      for (int b = 0; b < B; b++) begin
        if (t == 1) begin z_valid <= 0; repeat (5) @(posedge clk); end
        for (int w = 0; w < W; w++) begin
          z_valid <= 1; z <= '{re: Z_W'(zr[b][w]), im: Z_W'(zi[b][w])};
          if (t == 0 && b == 0 && w == 0) first_z = cyc;
          @(posedge clk);
        end
      end
      z_valid <= 0;
    end
    wait (nv == NT * B * W);
    repeat (5) @(posedge clk);
    checks++;
    // first_z is taken one half-period before the edge that samples the input
    if (first_v - first_z - 1 != LAT) begin failures++; $display("FAIL: latency %0d, want %0d", first_v - first_z - 1, LAT); end
    checks++; if (n_lo == 0 || n_mid == 0 || n_hi == 0) begin failures++; $display("FAIL: omega region unused %0d %0d %0d", n_lo, n_mid, n_hi); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NT * (3 * B * W + LAT) + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired (%0d outputs)", nv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
