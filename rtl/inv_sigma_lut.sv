// inv_sigma_lut: look-up table from the noise standard deviation sigma to 1/sigma~.
//
// sigma~ = max(sigma, sigma'): thresholding sigma from below limits the dynamic range of
// alpha at high SNR, so a fixed shift-only step size converges (published design: 256
// entries, output [2.6]). sigma enters as an 8-bit unsigned code in [1.7] (sigma = code/128)
// and sigma' = SIGMA_MIN/128; both are this implementation's choices, as the paper gives
// neither. Entry c = round(8192 / max(c, SIGMA_MIN)) (= 64 * 128 / c, i.e. 1/sigma~ in [2.6]),
// limited to 127; the table is computed at elaboration. SIGMA_MIN = 65 is the smallest code
// whose inverse fits [2.6].
// Interface: sigma in, inv_sigma out one clock later (registered read).
module inv_sigma_lut #(
  parameter int unsigned SIGMA_MIN = 65
) (
  input  logic                            clk,
  input  logic [onebox_pkg::SIG_W-1:0]    sigma,
  output logic [onebox_pkg::IS_W-1:0]     inv_sigma
);
  import onebox_pkg::*;

  function automatic int entry(input int c);
    int m, val;
    m = (c > int'(SIGMA_MIN)) ? c : int'(SIGMA_MIN);
    val = (8192 + m / 2) / m;
    return (val > 127) ? 127 : val;
  endfunction

  logic [IS_W-1:0] rom [256];
  for (genvar c = 0; c < 256; c++) begin : g_rom
    localparam int E = entry(c);
    assign rom[c] = IS_W'(E);
  end

  always_ff @(posedge clk) inv_sigma <= rom[sigma];
endmodule
