// mvm1: matrix-vector unit 1, one entry of z_b = H_b (extended dot product) S per clock.
//
// For each streamed position (b, w) it takes row w of H_b and column w of S (U complex values
// each) and outputs [z_b]_w = sum_u [H_w]_{b,u} S_{w,u}. U complex multipliers (four real
// products each) feed a balanced adder tree, as in the published MVM1.
// Pipeline (this implementation's): one register after the multipliers, one per tree level,
// one at the output, so the latency is 2 + log2(U) clocks: 4 for U = 4 and 5 for U = 8, the
// values the published design reports. U must be a power of two.
// Formats: H [4.4] times S [2.7] gives 11 fractional bits; the sum is truncated to 5 and
// saturated to z in [5.5] (10 bits).
module mvm1 #(
  parameter int unsigned U = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  onebox_pkg::h_t [U-1:0] h,
  input  onebox_pkg::s_t [U-1:0] s,
  output logic                   z_valid,
  output onebox_pkg::z_t         z
);
  import onebox_pkg::*;

  localparam int LOG2U = $clog2(U);
  localparam int PW    = H_W + S_W + 1;         // one complex product part
  localparam int AW    = PW + LOG2U;            // tree word
  localparam int LAT   = 2 + LOG2U;

  logic signed [AW-1:0] t_re [LOG2U+1][U];
  logic signed [AW-1:0] t_im [LOG2U+1][U];
  logic [LAT-1:0]       vpipe;

  always_ff @(posedge clk) begin
    for (int u = 0; u < U; u++) begin
      t_re[0][u] <= AW'(h[u].re * s[u].re - h[u].im * s[u].im);
      t_im[0][u] <= AW'(h[u].re * s[u].im + h[u].im * s[u].re);
    end
    for (int l = 1; l <= LOG2U; l++)
      for (int i = 0; i < (U >> l); i++) begin
        t_re[l][i] <= t_re[l-1][2*i] + t_re[l-1][2*i+1];
        t_im[l][i] <= t_im[l-1][2*i] + t_im[l-1][2*i+1];
      end
    z.re <= Z_W'(sat(longint'(t_re[LOG2U][0]) >>> (H_F + S_F - Z_F), Z_W));
    z.im <= Z_W'(sat(longint'(t_im[LOG2U][0]) >>> (H_F + S_F - Z_F), Z_W));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT-2:0], in_valid};
  end
  assign z_valid = vpipe[LAT-1];
endmodule
