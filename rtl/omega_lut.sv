// omega_lut: the approximated inverse Mills ratio omega~(x) of the 1BOX gradient, per part.
//
// omega(x) = exp(-x^2/2) / (sqrt(2 pi) Phi(x)) is unstable for large negative x, so the
// detector uses omega~(x) = 0 for x >= 4, -x for x <= -4, and a 128-entry table for
// -4 < x < 4 (thresholds t_n = -4, t_p = 4 and the table size follow the published design).
// The input alpha is in [5.4], so the table step is 1/16 and the table index is alpha + 64
// directly. Entry i holds round(16 * omega(-4 + i/16)) as a 7-bit unsigned number ([3.4]
// without sign bit, since omega is never negative; entry 0 is never read because x = -4
// takes the -x branch). The entries are read from rtl/omega_lut.hex.
// The output is [4.4] (8 bits); -x above 7.9375 saturates.
// Interface: a_re/a_im in, om_re/om_im out one clock later (registered read).
module omega_lut (
  input  logic                             clk,
  input  logic signed [onebox_pkg::A_W-1:0]  a_re,
  input  logic signed [onebox_pkg::A_W-1:0]  a_im,
  output logic signed [onebox_pkg::OM_W-1:0] om_re,
  output logic signed [onebox_pkg::OM_W-1:0] om_im
);
  import onebox_pkg::*;

  logic [6:0] rom [128];
  initial $readmemh("rtl/omega_lut.hex", rom);

  function automatic logic signed [OM_W-1:0] omega_t(input logic signed [A_W-1:0] x);
    logic [6:0] idx;
    if (x >= A_W'(64))       return '0;                           // x >= t_p
    else if (x <= -A_W'(64)) return OM_W'(sat(-longint'(x), OM_W)); // x <= t_n
    else begin
      idx = 7'(x + A_W'(64));
      return OM_W'({1'b0, rom[idx]});
    end
  endfunction

  always_ff @(posedge clk) begin
    om_re <= omega_t(a_re);
    om_im <= omega_t(a_im);
  end
endmodule
