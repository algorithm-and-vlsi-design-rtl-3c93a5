// sdf_stage: one radix-2 single-path delay-feedback (SDF) butterfly stage of a streaming FFT.
//
// The stage works on blocks of 2*H consecutive samples. The first H samples of a block go into
// an H-deep delay line. While the second H samples arrive, each is paired with the sample that
// left the delay line (H positions earlier): the sum is output at once and the difference is
// pushed into the delay line, to be output during the next H cycles. DIT = 0 gives the
// decimation-in-frequency butterfly (twiddle applied to the difference), DIT = 1 the
// decimation-in-time butterfly (twiddle applied to the second input before the butterfly).
// Twiddle j of the stage is exp(-+ i*2*pi*j/(2H)); INVERSE = 1 selects the + sign.
// SHIFT = 1 halves both butterfly outputs (truncating arithmetic shift).
//
// Every delay-line entry carries a tag (empty, first-half sample, pending difference), so the
// stage runs freely: it needs no enable and drains itself when the input stops, as long as the
// input arrives in contiguous blocks of 2H valid samples. A block counter counts valid inputs;
// `clear` returns it to the start of a block.
// Timing: the output stream equals the input stream delayed by H + 1 cycles.
// The SDF organisation is this implementation's choice; the published design used a vendor
// radix-2 pipelined streaming FFT core.
module sdf_stage #(
  parameter int unsigned N       = 128,  // transform size
  parameter int unsigned H       = 64,   // half block size of this stage (power of two)
  parameter int unsigned DW      = 24,   // data width per part
  parameter bit          DIT     = 1'b0,
  parameter bit          INVERSE = 1'b0,
  parameter bit          SHIFT   = 1'b0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_re,
  input  logic signed [DW-1:0] in_im,
  output logic                 out_valid,
  output logic signed [DW-1:0] out_re,
  output logic signed [DW-1:0] out_im
);
  import onebox_pkg::*;

  localparam int CW = (H > 1) ? $clog2(H) : 1;
  typedef enum logic [1:0] { T_EMPTY, T_FIRST, T_PEND } tag_e;

  // twiddle table of this stage, computed at elaboration
  logic signed [15:0] tw_c [H];
  logic signed [15:0] tw_s [H];
  for (genvar j = 0; j < H; j++) begin : g_tw
    localparam int C = trig_q14(longint'(j) * (longint'(N) / longint'(2 * H)), longint'(N), 1'b0);
    localparam int S = trig_q14(longint'(j) * (longint'(N) / longint'(2 * H)), longint'(N), 1'b1);
    assign tw_c[j] = 16'(C);
    // forward: exp(-i th) = cos - i sin; inverse: cos + i sin
    assign tw_s[j] = INVERSE ? 16'(S) : 16'(-S);
  end

  logic signed [DW-1:0] dl_re [H];
  logic signed [DW-1:0] dl_im [H];
  tag_e                 dl_tag [H];
  logic                 half;             // 1: input is in the second half of its block
  logic [CW-1:0]        pos;              // position within the half block

  // complex multiply by twiddle j, rounding back to DW bits
  function automatic void twmul(input logic signed [DW-1:0] a_re, input logic signed [DW-1:0] a_im,
                                input logic signed [15:0] c, input logic signed [15:0] s,
                                output logic signed [DW-1:0] p_re, output logic signed [DW-1:0] p_im);
    longint pr, pi;
    pr = longint'(a_re) * c - longint'(a_im) * s;
    pi = longint'(a_re) * s + longint'(a_im) * c;
    p_re = DW'((pr + (longint'(1) <<< (TW_F - 1))) >>> TW_F);
    p_im = DW'((pi + (longint'(1) <<< (TW_F - 1))) >>> TW_F);
  endfunction

  logic signed [DW-1:0] x_re, x_im, d_re, d_im, sum_re, sum_im, dif_re, dif_im;
  logic signed [DW-1:0] push_re, push_im, o_re, o_im;
  tag_e                 push_tag;
  logic                 o_valid;
  logic [CW-1:0]        tw_idx;

  assign tw_idx = (H > 1) ? pos : '0;

  always_comb begin
    x_re = in_re; x_im = in_im;
    if (DIT) twmul(in_re, in_im, tw_c[tw_idx], tw_s[tw_idx], x_re, x_im);
    sum_re = dl_re[H-1] + x_re;
    sum_im = dl_im[H-1] + x_im;
    d_re   = dl_re[H-1] - x_re;
    d_im   = dl_im[H-1] - x_im;
    if (SHIFT) begin
      sum_re = sum_re >>> 1; sum_im = sum_im >>> 1;
      d_re   = d_re >>> 1;   d_im   = d_im >>> 1;
    end
    dif_re = d_re; dif_im = d_im;
    if (!DIT) twmul(d_re, d_im, tw_c[tw_idx], tw_s[tw_idx], dif_re, dif_im);

    if (in_valid && half) begin
      // butterfly: sum leaves now, difference waits H cycles
      o_valid  = 1'b1;         o_re = sum_re;   o_im = sum_im;
      push_tag = T_PEND;       push_re = dif_re; push_im = dif_im;
    end else begin
      o_valid  = (dl_tag[H-1] == T_PEND);
      o_re     = dl_re[H-1];   o_im = dl_im[H-1];
      push_tag = in_valid ? T_FIRST : T_EMPTY;
      push_re  = in_re;        push_im = in_im;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < H; i++) dl_tag[i] <= T_EMPTY;
      half      <= 1'b0;
      pos       <= '0;
      out_valid <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      dl_tag[0] <= push_tag;
      for (int i = 1; i < H; i++) dl_tag[i] <= dl_tag[i-1];
      if (clear) begin
        half <= 1'b0;
        pos  <= '0;
      end else if (in_valid) begin
        if (H == 1 || pos == CW'(H - 1)) begin
          pos  <= '0;
          half <= ~half;
        end else begin
          pos <= pos + 1'b1;
        end
      end
      out_valid <= o_valid;
      out_re    <= o_re;
      out_im    <= o_im;
    end
  end

  // delay line data needs no reset: its tag says whether it holds anything
  always_ff @(posedge clk) begin
    dl_re[0] <= push_re;
    dl_im[0] <= push_im;
    for (int i = 1; i < H; i++) begin
      dl_re[i] <= dl_re[i-1];
      dl_im[i] <= dl_im[i-1];
    end
  end

  // a second-half sample must always meet its first-half partner
  assert property (@(posedge clk) disable iff (!rst_n || clear)
                   (in_valid && half) |-> (dl_tag[H-1] == T_FIRST))
    else $error("sdf_stage: block of 2H samples was not contiguous");

endmodule
