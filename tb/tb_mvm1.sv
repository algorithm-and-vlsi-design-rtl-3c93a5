// tb_mvm1: self-checking test of mvm1 at U = 8.
// Streams random H rows ([4.4]) and S columns ([2.7]), including full-scale values that make
// z saturate, with gaps in in_valid. Each output is compared with the exact complex dot
// product computed here, shifted right by 6 (floor) and saturated to [5.5]. Also checks that
// the latency from in_valid to z_valid is 5 clocks (2 + log2 U, as published for U = 8) and
// that exactly one output comes per input.
module tb_mvm1;
  import onebox_pkg::*;
  localparam int U = 8, LAT = 5, N = 400;
  logic clk = 0, rst_n = 0, in_valid = 0, z_valid;
  h_t [U-1:0] h;
  s_t [U-1:0] s;
  z_t z;
  int checks = 0, failures = 0, cyc = 0, nin = 0, nout = 0, nsat = 0;
  longint exp_re [$], exp_im [$];
  int in_cyc [$];

  mvm1 #(.U(U)) dut (.*);

  always #5 clk = ~clk;
  always @(negedge clk) cyc <= cyc + 1;   // read at rising edges without a race

  always @(posedge clk) if (rst_n) begin
    if (z_valid) begin
      longint er, ei; int c0;
      er = exp_re.pop_front(); ei = exp_im.pop_front(); c0 = in_cyc.pop_front();
      checks++;
      if (z.re != er || z.im != ei) begin
        failures++;
        if (failures < 10) $display("FAIL: z %0d %0d want %0d %0d", z.re, z.im, er, ei);
      end
      checks++;
      // c0 is taken one half-period before the edge that samples the input
      if (cyc - c0 - 1 != LAT) begin failures++; $display("FAIL: latency %0d", cyc - c0 - 1); end
      nout++;
    end
  end

  initial begin
    h = '0; s = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    while (nin < N) begin
      @(posedge clk);
      if ($urandom_range(0, 4) == 0) begin in_valid <= 0; continue; end
      begin
        longint ar, ai;
        bit big;
        ar = 0; ai = 0;
        big = ($urandom_range(0, 9) == 0);
        for (int u = 0; u < U; u++) begin
          h[u].re <= big ? 8'sd127 : H_W'($urandom);
          h[u].im <= big ? 8'sd0   : H_W'($urandom);
          s[u].re <= big ? 9'sd255 : S_W'($urandom);
          s[u].im <= big ? 9'sd0   : S_W'($urandom);
        end
        #1;
        for (int u = 0; u < U; u++) begin
          ar += longint'(h[u].re) * s[u].re - longint'(h[u].im) * s[u].im;
          ai += longint'(h[u].re) * s[u].im + longint'(h[u].im) * s[u].re;
        end
        ar = ar >>> 6; ai = ai >>> 6;
        if (ar > 511 || ar < -512 || ai > 511 || ai < -512) nsat++;
        ar = (ar > 511) ? 511 : (ar < -512) ? -512 : ar;
        ai = (ai > 511) ? 511 : (ai < -512) ? -512 : ai;
        exp_re.push_back(ar); exp_im.push_back(ai); in_cyc.push_back(cyc);
        in_valid <= 1;
        nin++;
      end
    end
    @(posedge clk); in_valid <= 0;
    repeat (10) @(posedge clk);
    checks++; if (nout != N) begin failures++; $display("FAIL: %0d outputs for %0d inputs", nout, N); end
    checks++; if (nsat == 0) begin failures++; $display("FAIL: saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * N) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
