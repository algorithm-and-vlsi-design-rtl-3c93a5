// fft_sdf: W-point streaming forward DFT, one complex sample per clock.
//
// Computes X[k] = 2^-SHIFT * sum_n x[n] exp(-i 2 pi k n / W), taking x in bit-reversed order
// (input sample p holds x[bitrev(p)], as the ifft_sdf delivers it) and giving X in natural
// order. With W = 128 and SHIFT = 4 the factor 2^-4 is the unitary 1/sqrt(W) divided by
// sqrt(2); together with the step size kappa = 1/32 applied later this reproduces the
// floating-point step sqrt(2)/64, which is how the published design absorbs sqrt(2) into the
// FFT scaling. The halvings are taken in the first SHIFT stages.
// Architecture: log2(W) radix-2 decimation-in-time SDF stages (sdf_stage) with half block
// sizes 1, 2, 4, ..., W/2. The internal word carries 4 extra fractional bits and log2(W)+1
// guard bits; the output is rounded and saturated to OUT_W bits.
// Interface: in_valid/in_re/in_im, blocks of W contiguous samples; out_valid/out_re/out_im.
// Latency: W - 1 + log2(W) + 1 cycles from a frame's first input to its first output.
// The vendor FFT core of the published design is replaced by this own SDF pipeline.
module fft_sdf #(
  parameter int unsigned W      = 128,
  parameter int unsigned SHIFT  = 4,
  parameter int unsigned IN_W   = 8,
  parameter int unsigned OUT_W  = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_re,
  input  logic signed [IN_W-1:0]  in_im,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_re,
  output logic signed [OUT_W-1:0] out_im
);
  import onebox_pkg::*;

  localparam int LOG2W = $clog2(W);
  localparam int EXT   = 4;
  localparam int DW    = IN_W + EXT + LOG2W + 1;

  logic                 v   [LOG2W+1];
  logic signed [DW-1:0] dre [LOG2W+1];
  logic signed [DW-1:0] dim [LOG2W+1];

  assign v[0]   = in_valid;
  assign dre[0] = DW'(in_re) <<< EXT;
  assign dim[0] = DW'(in_im) <<< EXT;

  for (genvar s = 0; s < LOG2W; s++) begin : g_st
    sdf_stage #(.N(W), .H(1 << s), .DW(DW), .DIT(1'b1), .INVERSE(1'b0),
                .SHIFT(s < SHIFT)) u_st (
      .clk, .rst_n, .clear,
      .in_valid(v[s]), .in_re(dre[s]), .in_im(dim[s]),
      .out_valid(v[s+1]), .out_re(dre[s+1]), .out_im(dim[s+1]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      out_valid <= v[LOG2W];
      out_re    <= OUT_W'(sat((longint'(dre[LOG2W]) + (1 <<< (EXT - 1))) >>> EXT, OUT_W));
      out_im    <= OUT_W'(sat((longint'(dim[LOG2W]) + (1 <<< (EXT - 1))) >>> EXT, OUT_W));
    end
  end
endmodule
