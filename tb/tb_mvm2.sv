// tb_mvm2: self-checking test of mvm2 at B = 4, W = 8, U = 2.
// A model of H-MEM (one-clock read at h_addr) holds random coefficients. Two frames of random
// V values are streamed in (antenna-major, with gaps in v_valid), the first after a clear
// pulse. For every subcarrier w the expected kappa*G is computed here from the exact integer
// sum over b of conj(H)*V, scaled by 2^-6 with round-half-up and saturated to [1.7]. Checks
// every output value, the output order w = 0..W-1, one output column per subcarrier per
// frame, and the latency of 4 clocks from the last V of a column to its kappa*G.
module tb_mvm2;
  import onebox_pkg::*;
  localparam int B = 4, W = 8, U = 2, AW = $clog2(B * W), LAT = 4, NF = 2;
  logic clk = 0, rst_n = 0, clear = 0, v_valid = 0, g_valid;
  v_t v = '0;
  logic [AW-1:0] h_addr;
  h_t [U-1:0] h;
  logic [$clog2(W)-1:0] g_w;
  g_t [U-1:0] g;
  h_t [U-1:0] hm [B * W];
  v_t vf [B][W];
  longint er [NF][W][U], ei [NF][W][U];
  int last_cyc [NF][W];
  int checks = 0, failures = 0, cyc = 0, nout = 0, nsat = 0;

  mvm2 #(.B(B), .W(W), .U(U)) dut (.*);

  always #5 clk = ~clk;
  always @(negedge clk) cyc <= cyc + 1;   // read at rising edges without a race
  always @(posedge clk) h <= hm[h_addr];

  always @(posedge clk) if (rst_n && g_valid) begin
    int f, w;
    f = nout / W; w = nout % W;
    checks++;
    if (int'(g_w) != w) begin failures++; $display("FAIL: column %0d, want %0d", g_w, w); end
    for (int u = 0; u < U; u++) begin
      checks++;
      if (longint'(g[u].re) != er[f][w][u] || longint'(g[u].im) != ei[f][w][u]) begin
        failures++;
        if (failures < 10) $display("FAIL: f%0d w%0d u%0d g %0d %0d want %0d %0d", f, w, u, int'(g[u].re), int'(g[u].im), er[f][w][u], ei[f][w][u]);
      end
    end
    checks++;
    // last_cyc is taken one half-period before the edge that samples the input
    if (cyc - last_cyc[f][w] - 1 != LAT) begin failures++; $display("FAIL: latency %0d", cyc - last_cyc[f][w] - 1); end
    nout++;
  end

  function automatic longint satg(input longint x);
    return (x > 127) ? 127 : (x < -128) ? -128 : x;
  endfunction

  initial begin
    longint sr [W][U], si [W][U];
    for (int a = 0; a < B * W; a++)
      for (int u = 0; u < U; u++) begin
        hm[a][u].re = H_W'($urandom); hm[a][u].im = H_W'($urandom);
      end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < NF; f++) begin
      @(posedge clk); clear <= 1; @(posedge clk); clear <= 0;
      for (int w = 0; w < W; w++) for (int u = 0; u < U; u++) begin sr[w][u] = 0; si[w][u] = 0; end
      // draw the frame and work out the expected outputs before streaming it
      for (int b = 0; b < B; b++)
        for (int w = 0; w < W; w++) begin
          // mostly small values, some full scale so that the output saturates
          vf[b][w].re = (f == 1 && w == 0) ? 8'sd127 : V_W'($urandom_range(0, 63) - 32);
          vf[b][w].im = (f == 1 && w == 0) ? 8'sd0   : V_W'($urandom_range(0, 63) - 32);
          for (int u = 0; u < U; u++) begin
            h_t hh;
            hh = hm[b * W + w][u];
            // conj(h) * v
            sr[w][u] += longint'(hh.re) * vf[b][w].re + longint'(hh.im) * vf[b][w].im;
            si[w][u] += longint'(hh.re) * vf[b][w].im - longint'(hh.im) * vf[b][w].re;
          end
        end
      for (int w = 0; w < W; w++) for (int u = 0; u < U; u++) begin
        if (((sr[w][u] + 32) >>> 6) != satg((sr[w][u] + 32) >>> 6)) nsat++;
        er[f][w][u] = satg((sr[w][u] + 32) >>> 6);
        ei[f][w][u] = satg((si[w][u] + 32) >>> 6);
      end
      for (int b = 0; b < B; b++)
        for (int w = 0; w < W; w++) begin
          while ($urandom_range(0, 3) == 0) begin v_valid <= 0; @(posedge clk); end
          v_valid <= 1; v <= vf[b][w];
          if (b == B - 1) last_cyc[f][w] = cyc;
          @(posedge clk);
        end
      v_valid <= 0;
      repeat (10) @(posedge clk);
    end
    checks++; if (nout != NF * W) begin failures++; $display("FAIL: %0d output columns", nout); end
    checks++; if (nsat == 0) begin failures++; $display("FAIL: saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NF * 3 * B * W + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
