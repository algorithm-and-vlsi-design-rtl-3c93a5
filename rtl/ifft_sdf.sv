// ifft_sdf: W-point streaming inverse DFT, one complex sample per clock.
//
// Computes x[n] = 2^-SHIFT * sum_k X[k] exp(+i 2 pi k n / W). With W = 128 and SHIFT = 3 the
// factor 2^-3 equals sqrt(2)/sqrt(W): the unitary inverse DFT times the sqrt(2) of the 1BOX
// gradient, which is how the published design folds that constant into the IFFT scaling. The
// halvings are taken in the first SHIFT stages.
// Architecture: log2(W) radix-2 decimation-in-frequency SDF stages (sdf_stage), natural-order
// input, bit-reversed output order (output sample p holds x[bitrev(p)]). The internal word
// carries 4 extra fractional bits and log2(W)+1 guard bits; the output is rounded and
// saturated to OUT_W bits with the input's fractional position.
// Interface: in_valid/in_re/in_im, blocks of W contiguous samples; out_valid/out_re/out_im.
// Latency: W - 1 + log2(W) + 1 cycles from a frame's first input to its first output.
// The vendor FFT core of the published design is replaced by this own SDF pipeline.
module ifft_sdf #(
  parameter int unsigned W      = 128,
  parameter int unsigned SHIFT  = 3,
  parameter int unsigned IN_W   = 10,
  parameter int unsigned OUT_W  = 10
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
    sdf_stage #(.N(W), .H(W >> (s + 1)), .DW(DW), .DIT(1'b0), .INVERSE(1'b1),
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
