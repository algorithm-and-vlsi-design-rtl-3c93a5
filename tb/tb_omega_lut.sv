// tb_omega_lut: self-checking test of omega_lut.
// Applies every 9-bit alpha value ([5.4]) to the real part and a shuffled one to the imaginary
// part, and compares the registered outputs with omega~ computed here in real arithmetic:
// 0 for alpha >= 4, -alpha (saturated to [4.4]) for alpha <= -4, and in between
// round(16 * phi(x) / Phi(x)) capped at 127, where Phi is integrated numerically (Simpson's
// rule on the Gaussian density), independently of the table. One LSB of difference is
// allowed inside the table region. Checks that the output only changes at the clock edge (one-clock latency) and that all three regions
// are hit.
module tb_omega_lut;
  import onebox_pkg::*;
  localparam real PI = 3.14159265358979;
  logic clk = 0;
  logic signed [A_W-1:0] a_re = '0, a_im = '0;
  logic signed [OM_W-1:0] om_re, om_im;
  int checks = 0, failures = 0, n_lo = 0, n_mid = 0, n_hi = 0, ref_re_prev = 0, ref_im_prev = 0;

  omega_lut dut (.*);
  always #5 clk = ~clk;

  function automatic real pdf(input real x);
    return $exp(-x * x / 2.0) / $sqrt(2.0 * PI);
  endfunction
  // Phi(x) = 1/2 + integral_0^x pdf, by Simpson's rule
  function automatic real cdf(input real x);
    real h, acc;
    int n;
    n = 400;
    h = x / n;
    acc = pdf(0.0) + pdf(x);
    for (int i = 1; i < n; i++) acc += ((i % 2 == 1) ? 4.0 : 2.0) * pdf(i * h);
    return 0.5 + acc * h / 3.0;
  endfunction
  function automatic int ref_om(input int a, output bit in_table);
    real x, v;
    x = a / 16.0;
    in_table = 0;
    if (a >= 64) return 0;
    if (a <= -64) return (-a > 127) ? 127 : -a;
    in_table = 1;
    v = 16.0 * pdf(x) / cdf(x);
    return ($rtoi(v + 0.5) > 127) ? 127 : $rtoi(v + 0.5);
  endfunction

  task automatic check(input int got, input int a);
    int e, d;
    bit tab;
    e = ref_om(a, tab);
    d = got - e;
    checks++;
    if ((tab && (d > 1 || d < -1)) || (!tab && d != 0)) begin
      failures++;
      if (failures < 10) $display("FAIL: alpha %0d omega %0d want %0d", a, got, e);
    end
    if (a <= -64) n_lo++; else if (a >= 64) n_hi++; else n_mid++;
  endtask

  initial begin
    int cur_re, cur_im;
    @(posedge clk);
    for (int i = 0; i <= 512; i++) begin
      a_re <= A_W'(i - 256);
      a_im <= A_W'((i * 167 + 31) % 512 - 256);
      #3;
      cur_re = int'(a_re); cur_im = int'(a_im);
      // registered read: the output must not change before the clock edge
      checks++;
      if (i > 0 && (om_re != OM_W'(ref_re_prev) || om_im != OM_W'(ref_im_prev))) begin
        failures++; $display("FAIL: output changed before the clock");
      end
      @(posedge clk); #1;
      check(int'(om_re), cur_re); check(int'(om_im), cur_im);
      ref_re_prev = om_re; ref_im_prev = om_im;
    end
    checks++; if (n_lo == 0 || n_mid == 0 || n_hi == 0) begin failures++; $display("FAIL: region unused"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
