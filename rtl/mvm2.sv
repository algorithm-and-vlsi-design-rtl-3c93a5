// mvm2: matrix-vector unit 2, kappa*G with [G^T]_w = H_w^H [V]_w, accumulated antenna by antenna.
//
// V arrives row by row (antenna b, then subcarrier w), so instead of one matrix-vector product
// per subcarrier, each arriving V_{b,w} is multiplied by the conjugates of the U coefficients
// [H_w]_{b,u} (read from H-MEM port RD2), shifted right by log2(1/kappa) = 5 and added into
// column w of G-MEM. U processing elements (conjugate, multiply, shift, add) work in parallel,
// as in the published MVM2. For b = 1 the accumulator starts from zero; for b = B the sum is
// also sent out as kappa*[G^T]_w, so the outputs come during the last W cycles of the stream.
// The shift by 5 is done by moving the binary point: G-MEM words keep all 8 + 5 = 13
// fractional bits of kappa * conj(H) * V plus log2(B) guard bits, so no product is truncated
// (dropping 5 bits per product, B times, was found to bias the sum noticeably). The output is
// rounded and saturated to [1.7]. Both are this implementation's choices.
// Pipeline: V and H aligned (1), products (2), shift and accumulate (3), output (4):
// L_MVM2 = 4 clocks, as published. `clear` resets the (b, w) counters at the start of a task.
module mvm2 #(
  parameter int unsigned B = 128,
  parameter int unsigned W = 128,
  parameter int unsigned U = 8,
  localparam int unsigned AW = $clog2(B * W)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   v_valid,
  input  onebox_pkg::v_t         v,
  output logic [AW-1:0]          h_addr,
  input  onebox_pkg::h_t [U-1:0] h,
  output logic                   g_valid,
  output logic [$clog2(W)-1:0]   g_w,
  output onebox_pkg::g_t [U-1:0] g
);
  import onebox_pkg::*;

  localparam int LOG2W = $clog2(W);
  localparam int LOG2B = (B > 1) ? $clog2(B) : 1;
  localparam int PF    = H_F + V_F;                   // product fractional bits (8)
  localparam int PW    = H_W + V_W + 1;               // product part width
  localparam int GA_W  = PW + LOG2B;                  // accumulator width
  localparam int AF    = PF + KAPPA_SHIFT;            // accumulator fractional bits (13)
  localparam int OSH   = AF - G_F;                    // output shift (6)
  localparam longint RND = longint'(1) <<< (OSH - 1); // round half up

  logic [LOG2W-1:0] w_cnt;
  logic [LOG2B-1:0] b_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_cnt <= '0; b_cnt <= '0;
    end else if (clear) begin
      w_cnt <= '0; b_cnt <= '0;
    end else if (v_valid) begin
      w_cnt <= w_cnt + 1'b1;
      if (w_cnt == LOG2W'(W - 1)) b_cnt <= (b_cnt == LOG2B'(B - 1)) ? '0 : b_cnt + 1'b1;
    end
  end
  assign h_addr = AW'(b_cnt) * AW'(W) + AW'(w_cnt);

  // stage 1: V registered while H is read
  v_t               v1;
  logic             s1_v, s2_v, s3_v;
  logic [LOG2W-1:0] w1, w2, w3;
  logic             first1, last1, first2, last2;
  always_ff @(posedge clk) begin
    v1 <= v; w1 <= w_cnt;
    first1 <= (b_cnt == '0); last1 <= (b_cnt == LOG2B'(B - 1));
  end

  // stage 2: conj(H) * V per PE
  logic signed [PW-1:0] p_re [U], p_im [U];
  always_ff @(posedge clk) begin
    for (int u = 0; u < U; u++) begin
      p_re[u] <= PW'(h[u].re * v1.re + h[u].im * v1.im);
      p_im[u] <= PW'(h[u].re * v1.im - h[u].im * v1.re);
    end
    w2 <= w1; first2 <= first1; last2 <= last1;
  end

  // stage 3: shift by log2(1/kappa) and accumulate into G-MEM column w
  logic signed [GA_W-1:0] gmem_re [W][U];
  logic signed [GA_W-1:0] gmem_im [W][U];
  logic signed [GA_W-1:0] acc_re [U], acc_im [U];
  always_ff @(posedge clk) begin
    for (int u = 0; u < U; u++) begin
      logic signed [GA_W-1:0] nr, ni;
      // kappa * p: the binary point moves left by KAPPA_SHIFT, no bits are dropped
      nr = (first2 ? GA_W'(0) : gmem_re[w2][u]) + GA_W'(p_re[u]);
      ni = (first2 ? GA_W'(0) : gmem_im[w2][u]) + GA_W'(p_im[u]);
      if (s2_v) begin
        gmem_re[w2][u] <= nr;
        gmem_im[w2][u] <= ni;
      end
      acc_re[u] <= nr;
      acc_im[u] <= ni;
    end
    w3 <= w2;
  end

  // stage 4: output kappa*[G^T]_w after the last antenna
  always_ff @(posedge clk) begin
    for (int u = 0; u < U; u++) begin
      g[u].re <= G_W'(sat((longint'(acc_re[u]) + RND) >>> OSH, G_W));
      g[u].im <= G_W'(sat((longint'(acc_im[u]) + RND) >>> OSH, G_W));
    end
    g_w <= w3;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s2_v <= 1'b0; s3_v <= 1'b0; g_valid <= 1'b0;
    end else begin
      s1_v <= v_valid; s2_v <= s1_v; s3_v <= s2_v && last2; g_valid <= s3_v;
    end
  end
endmodule
