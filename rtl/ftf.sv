// ftf: the frequency-time-frequency datapath, lines 6-7 of the 1BOX iteration for one antenna.
//
// Input: the stream of [z_b]_w, antenna by antenna, w in natural order, W contiguous samples
// per antenna. For each antenna it computes
//   alpha_b = (sqrt(2)/sigma~) r_b (.) F^H z_b     and     row b of V = F (r_b (.) omega~(alpha_b)),
// where (.) multiplies real parts with real parts and imaginary with imaginary, so with 1-bit
// r_b it is a conditional negation ("sign refinement", SR).
// Chain, as in the published FTF: IFFT (ifft_sdf) -> multiply by 1/sigma~ (inv_sigma_lut) ->
// SR with r_b -> omega~ (omega_lut) -> SR with r_b -> FFT (fft_sdf). The IFFT emits time
// samples in bit-reversed order and the FFT accepts them in that order, so the address
// generator reads r_b at the bit-reversed time index; the second SR reads the same address two
// clocks later through the second r-RAM port. No reorder buffer is needed.
// Formats: IFFT out [5.5], product truncated and saturated to alpha [5.4], omega~ [4.4], V [4.4].
// Interface: z_valid/z in, v_valid/v out in natural subcarrier order, antenna by antenna.
// `clear` resets the antenna and sample counters at the start of a task. r_wr_* load r-RAM
// while we_grant is high.
// Latency: 2 * (W + log2(W)) + 4 clocks from a sample in to the corresponding frame out
// (274 for W = 128), this implementation's own figure (the vendor cores in the published
// design gave 702).
module ftf #(
  parameter int unsigned B = 128,
  parameter int unsigned W = 128,
  localparam int unsigned AW = $clog2(B * W)
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             clear,
  input  logic [onebox_pkg::SIG_W-1:0]     sigma,
  input  logic                             z_valid,
  input  onebox_pkg::z_t                   z,
  input  logic                             we_grant,
  input  logic                             r_wr_en,
  input  logic [AW-1:0]                    r_wr_addr,
  input  onebox_pkg::r_t                   r_wr_data,
  output logic                             v_valid,
  output onebox_pkg::v_t                   v
);
  import onebox_pkg::*;

  localparam int LOG2W = $clog2(W);
  localparam int LOG2B = (B > 1) ? $clog2(B) : 1;
  localparam int IFFT_SHIFT = (LOG2W - 1) / 2;     // sqrt(2)/sqrt(W) for odd log2(W)
  localparam int FFT_SHIFT  = (LOG2W + 1) / 2;     // 1/(sqrt(2) sqrt(W)) for odd log2(W)

  // ---- IFFT --------------------------------------------------------------------------------
  logic                    x_valid;
  logic signed [Z_W-1:0]   x_re, x_im;
  ifft_sdf #(.W(W), .SHIFT(IFFT_SHIFT), .IN_W(Z_W), .OUT_W(Z_W)) u_ifft (
    .clk, .rst_n, .clear, .in_valid(z_valid), .in_re(z.re), .in_im(z.im),
    .out_valid(x_valid), .out_re(x_re), .out_im(x_im));

  // ---- address generator: antenna b, bit-reversed time index --------------------------------
  logic [LOG2W-1:0] p_cnt;
  logic [LOG2B-1:0] b_cnt;
  logic [AW-1:0]    rd1_addr, rd2_addr, addr_d1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_cnt <= '0; b_cnt <= '0;
    end else if (clear) begin
      p_cnt <= '0; b_cnt <= '0;
    end else if (x_valid) begin
      p_cnt <= p_cnt + 1'b1;
      if (p_cnt == LOG2W'(W - 1)) b_cnt <= (b_cnt == LOG2B'(B - 1)) ? '0 : b_cnt + 1'b1;
    end
  end
  assign rd1_addr = AW'(b_cnt) * AW'(W) + AW'(bitrev(int'(p_cnt), LOG2W));
  always_ff @(posedge clk) begin
    addr_d1  <= rd1_addr;
    rd2_addr <= addr_d1;
  end

  onebox_pkg::r_t r1, r2;
  r_ram #(.B(B), .W(W)) u_rram (
    .clk, .we_grant, .wr_en(r_wr_en), .wr_addr(r_wr_addr), .wr_data(r_wr_data),
    .rd1_addr, .rd1_data(r1), .rd2_addr, .rd2_data(r2));

  // ---- scale by 1/sigma~ ---------------------------------------------------------------------
  logic [IS_W-1:0] inv_sigma;
  inv_sigma_lut u_isig (.clk, .sigma, .inv_sigma);

  localparam int MSH = Z_F + IS_F - A_F;           // 5 + 6 - 4 = 7
  a_t   m_q, alpha_q;
  logic m_v, alpha_v, om_v, fi_v;
  always_ff @(posedge clk) begin
    m_q.re <= A_W'(sat((longint'(x_re) * longint'({1'b0, inv_sigma})) >>> MSH, A_W));
    m_q.im <= A_W'(sat((longint'(x_im) * longint'({1'b0, inv_sigma})) >>> MSH, A_W));
    // first sign refinement: alpha_b
    alpha_q.re <= A_W'(sref(longint'(m_q.re), r1.re, A_W));
    alpha_q.im <= A_W'(sref(longint'(m_q.im), r1.im, A_W));
  end

  // ---- omega~ and second sign refinement ----------------------------------------------------
  om_t om, fi_q;
  omega_lut u_om (.clk, .a_re(alpha_q.re), .a_im(alpha_q.im), .om_re(om.re), .om_im(om.im));
  always_ff @(posedge clk) begin
    fi_q.re <= OM_W'(sref(longint'(om.re), r2.re, OM_W));
    fi_q.im <= OM_W'(sref(longint'(om.im), r2.im, OM_W));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_v <= 1'b0; alpha_v <= 1'b0; om_v <= 1'b0; fi_v <= 1'b0;
    end else begin
      m_v <= x_valid; alpha_v <= m_v; om_v <= alpha_v; fi_v <= om_v;
    end
  end

  // ---- FFT ----------------------------------------------------------------------------------
  fft_sdf #(.W(W), .SHIFT(FFT_SHIFT), .IN_W(OM_W), .OUT_W(V_W)) u_fft (
    .clk, .rst_n, .clear, .in_valid(fi_v), .in_re(fi_q.re), .in_im(fi_q.im),
    .out_valid(v_valid), .out_re(v.re), .out_im(v.im));
endmodule
