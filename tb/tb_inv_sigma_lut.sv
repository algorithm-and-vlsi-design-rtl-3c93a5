// tb_inv_sigma_lut: self-checking test of inv_sigma_lut.
// Applies all 256 sigma codes ([1.7]) and compares the registered output with
// round(1 / max(sigma, sigma')) in [2.6], capped at 127, computed here in real arithmetic
// (sigma' = 65/128). Also checks the one-clock latency and that codes on both sides of the
// threshold occurred.
module tb_inv_sigma_lut;
  import onebox_pkg::*;
  localparam int SIGMA_MIN = 65;
  logic clk = 0;
  logic [SIG_W-1:0] sigma = '0;
  logic [IS_W-1:0] inv_sigma;
  int checks = 0, failures = 0, n_lo = 0, n_hi = 0;

  inv_sigma_lut dut (.*);
  always #5 clk = ~clk;

  initial begin
    @(posedge clk);
    for (int c = 0; c < 256; c++) begin
      real s;
      int e;
      sigma <= SIG_W'(c);
      @(posedge clk); #1;
      // the output must not follow the input before the clock edge
      s = ((c < SIGMA_MIN) ? SIGMA_MIN : c) / 128.0;
      e = $rtoi(64.0 / s + 0.5);
      if (e > 127) e = 127;
      checks++;
      if (inv_sigma != IS_W'(e)) begin
        failures++;
        if (failures < 10) $display("FAIL: sigma %0d -> %0d want %0d", c, inv_sigma, e);
      end
      if (c < SIGMA_MIN) n_lo++; else n_hi++;
    end
    // latency: change the input and look before and after the next edge
    sigma <= 8'd200;
    @(posedge clk); #1;
    sigma <= 8'd100;
    #3;
    checks++; if (inv_sigma != IS_W'($rtoi(64.0 * 128.0 / 200.0 + 0.5))) begin failures++; $display("FAIL: output changed before the clock"); end
    @(posedge clk); #1;
    checks++; if (inv_sigma != IS_W'($rtoi(64.0 * 128.0 / 100.0 + 0.5))) begin failures++; $display("FAIL: output not updated after one clock"); end
    checks++; if (n_lo == 0 || n_hi == 0) begin failures++; $display("FAIL: threshold side unused"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
