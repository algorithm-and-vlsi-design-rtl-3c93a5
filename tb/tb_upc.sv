// tb_upc: self-checking test of upc at W = 8, U = 2.
// Drives the update protocol the controller uses: kappa*G column w with acc_rst in one clock,
// mux_sel the next. Round 0 uses acc_rst (S = proj(kappa*G), the first iteration), later
// rounds add to the stored S. Between rounds every column is read back through rd_w (one
// clock, output register) and one read is made with orst, which must give zero. A model array
// here holds the expected S; the box bound alternates between 121 and 128, and large kappa*G
// values make the projection clip. Checks every s_out/s_out_w against the model and that the
// projection, the accumulator reset and the output reset all occurred.
module tb_upc;
  import onebox_pkg::*;
  localparam int W = 8, U = 2, LOG2W = 3, ROUNDS = 6;
  logic clk = 0, rst_n = 0, acc_rst = 0, mux_sel = 0, orst = 0;
  logic [S_W-1:0] s_max = 9'd121;
  logic [LOG2W-1:0] g_w = '0, rd_w = '0, s_out_w;
  g_t [U-1:0] g = '0;
  s_t [U-1:0] s_out;
  longint mr [W][U], mi [W][U];
  int checks = 0, failures = 0, n_clip = 0, n_accrst = 0, n_orst = 0;

  upc #(.W(W), .U(U)) dut (.*);
  always #5 clk = ~clk;

  function automatic longint pj(input longint x, input longint m);
    if (x > m) begin n_clip++; return m; end
    if (x < -m) begin n_clip++; return -m; end
    return x;
  endfunction

  task automatic check_col(input int w, input string what);
    checks++;
    if (int'(s_out_w) != w) begin failures++; $display("FAIL: %s column %0d want %0d", what, s_out_w, w); end
    for (int u = 0; u < U; u++) begin
      checks++;
      if (longint'(s_out[u].re) != mr[w][u] || longint'(s_out[u].im) != mi[w][u]) begin
        failures++;
        if (failures < 10) $display("FAIL: %s w%0d u%0d s %0d %0d want %0d %0d", what, w, u,
                                    int'(s_out[u].re), int'(s_out[u].im), mr[w][u], mi[w][u]);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int r = 0; r < ROUNDS; r++) begin
      s_max <= (r % 2 == 0) ? 9'd121 : 9'd128;
      @(posedge clk);
      // update every column: g at clock t, mux_sel at t + 1 (pipelined, back to back)
      for (int w = 0; w <= W; w++) begin
        if (w < W) begin
          g_t [U-1:0] gg;
          for (int u = 0; u < U; u++) begin
            gg[u].re = (w == 3) ? 8'sd127 : (w == 4) ? -8'sd128 : G_W'($urandom);
            gg[u].im = G_W'($urandom);
          end
          g <= gg; g_w <= LOG2W'(w); acc_rst <= (r == 0);
          if (r == 0) n_accrst++;
          for (int u = 0; u < U; u++) begin
            mr[w][u] = pj(((r == 0) ? 0 : mr[w][u]) + gg[u].re, longint'(s_max));
            mi[w][u] = pj(((r == 0) ? 0 : mi[w][u]) + gg[u].im, longint'(s_max));
          end
        end else acc_rst <= 0;
        mux_sel <= (w > 0);
        @(posedge clk); #1;
        if (w > 0) check_col(w - 1, "update");
      end
      mux_sel <= 0;
      // read back every column, then one output reset
      for (int w = 0; w < W; w++) begin
        rd_w <= LOG2W'(W - 1 - w);
        @(posedge clk); #1;
        check_col(W - 1 - w, "read");
      end
      orst <= 1; rd_w <= 3'd5;
      @(posedge clk); #1;
      orst <= 0; n_orst++;
      checks++;
      if (s_out != '0 || s_out_w != 3'd5) begin failures++; $display("FAIL: output reset"); end
    end
    checks++; if (n_clip == 0 || n_accrst == 0 || n_orst == 0) begin failures++; $display("FAIL: mechanism unused"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (ROUNDS * (2 * W + 10) + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
