// tb_ifft_sdf: self-checking test of the streaming ifft_sdf at W = 128.
// Sends frames of random samples (two back to back, a gap, one more) and compares every output
// with a direct DFT evaluated in real arithmetic, allowing 2 LSB of fixed-point error. It also
// checks the output order, that exactly one output frame comes out per input frame, and the
// latency W - 1 + log2(W) + 1 from first input to first output.
module tb_ifft_sdf;
  import onebox_pkg::*;
  localparam int W = 128, LOG2W = 7, IW = 10, OW = 10, SH = 3, NF = 3;
  localparam bit INV = 1;
  localparam int LAT = W - 1 + LOG2W + 1;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [IW-1:0] in_re = '0, in_im = '0;
  logic signed [OW-1:0] out_re, out_im;
  int checks = 0, failures = 0;
  int xr [NF][W], xi [NF][W];
  int first_in_cyc = -1, first_out_cyc = -1, cyc = 0, nout = 0;

  ifft_sdf #(.W(W)) dut (.clk, .rst_n, .clear(1'b0), .in_valid, .in_re, .in_im,
                       .out_valid, .out_re, .out_im);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // reference value of output sample p of frame f
  function automatic void ref_out(input int f, input int p, output real rr, output real ri);
    real sgn, th;
    int k;
    sgn = INV ? 1.0 : -1.0;
    k = INV ? bitrev(p, LOG2W) : p;           // ifft: bit-reversed output order
    rr = 0.0; ri = 0.0;
    for (int n = 0; n < W; n++) begin
      int m;
      m = INV ? n : bitrev(n, LOG2W);          // fft: input sample n holds x[bitrev(n)]
      th = sgn * 2.0 * 3.14159265358979 * real'(k) * real'(m) / real'(W);
      rr += real'(xr[f][n]) * $cos(th) - real'(xi[f][n]) * $sin(th);
      ri += real'(xr[f][n]) * $sin(th) + real'(xi[f][n]) * $cos(th);
    end
    rr = rr / real'(1 << SH); ri = ri / real'(1 << SH);
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    real rr, ri, er, ei, lim;
    int f, p;
    f = nout / W; p = nout % W;
    if (first_out_cyc < 0) first_out_cyc = cyc;
    if (f < NF) begin
      ref_out(f, p, rr, ri);
      lim = real'((1 << (OW - 1)) - 1);
      if (rr > lim) rr = lim;  if (rr < -lim - 1) rr = -lim - 1;
      if (ri > lim) ri = lim;  if (ri < -lim - 1) ri = -lim - 1;
      er = real'(out_re) - rr; ei = real'(out_im) - ri;
      checks++;
      if (er > 2.0 || er < -2.0 || ei > 2.0 || ei < -2.0) begin
        failures++;
        if (failures < 10) $display("mismatch f%0d p%0d got %0d,%0d want %f,%f", f, p, out_re, out_im, rr, ri);
      end
    end
    nout++;
  end

  initial begin
    for (int f = 0; f < NF; f++)
      for (int n = 0; n < W; n++) begin
        // moderate amplitude so the scaled transform stays mostly in range
        xr[f][n] = $signed($urandom_range(0, 2 ** (IW - 2))) - 2 ** (IW - 3);
        xi[f][n] = $signed($urandom_range(0, 2 ** (IW - 2))) - 2 ** (IW - 3);
      end
    xr[0][5] = 2 ** (IW - 1) - 1;   // a full-scale sample
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int f = 0; f < NF; f++) begin
      if (f == 2) begin in_valid <= 0; repeat (37) @(posedge clk); end  // gap
      for (int n = 0; n < W; n++) begin
        in_valid <= 1; in_re <= IW'(xr[f][n]); in_im <= IW'(xi[f][n]);
        if (f == 0 && n == 0) first_in_cyc = cyc;
        @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (3 * W) @(posedge clk);
    checks++;
    if (nout != NF * W) begin failures++; $display("got %0d outputs, want %0d", nout, NF * W); end
    checks++;
    if (first_out_cyc - first_in_cyc != LAT + 1) begin
      failures++; $display("latency %0d, want %0d", first_out_cyc - first_in_cyc - 1, LAT);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
