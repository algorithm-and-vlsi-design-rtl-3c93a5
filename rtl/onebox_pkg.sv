// onebox_pkg: word formats, complex sample types and shared arithmetic helpers of the
// 1-bit MIMO-OFDM box-constrained (1BOX) detector.
//
// Fixed-point formats are written [x.y]: two's complement, x integer bits including the sign,
// y fractional bits, per real and per imaginary part. The formats of H, z, V, G, S, alpha and
// the two look-up tables are those of the published design; the twiddle format and the helper
// arithmetic (truncating shifts, saturation) are this implementation's own choices.
package onebox_pkg;

  localparam int H_W  = 8;  localparam int H_F  = 4;   // channel [H_w]_b      [4.4]
  localparam int S_W  = 9;  localparam int S_F  = 7;   // estimate S           [2.7]
  localparam int Z_W  = 10; localparam int Z_F  = 5;   // z_b and IFFT output  [5.5]
  localparam int A_W  = 9;  localparam int A_F  = 4;   // alpha_b             [5.4]
  localparam int OM_W = 8;  localparam int OM_F = 4;   // omega~ output        [4.4]
  localparam int V_W  = 8;  localparam int V_F  = 4;   // V                   [4.4]
  localparam int G_W  = 8;  localparam int G_F  = 7;   // kappa*G             [1.7]
  localparam int IS_W = 8;  localparam int IS_F = 6;   // 1/sigma~            [2.6]
  localparam int SIG_W = 8;                            // sigma code          [1.7] unsigned
  localparam int KAPPA_SHIFT = 5;                      // kappa = 2^-5 = 1/32
  localparam int TW_F = 14;                            // twiddles            [2.14]

  typedef struct packed { logic signed [H_W-1:0]  re, im; } h_t;
  typedef struct packed { logic signed [S_W-1:0]  re, im; } s_t;
  typedef struct packed { logic signed [Z_W-1:0]  re, im; } z_t;
  typedef struct packed { logic signed [A_W-1:0]  re, im; } a_t;
  typedef struct packed { logic signed [OM_W-1:0] re, im; } om_t;
  typedef struct packed { logic signed [V_W-1:0]  re, im; } v_t;
  typedef struct packed { logic signed [G_W-1:0]  re, im; } g_t;
  // One 1-bit received sample: each bit is the sign of its part, 1 meaning -1 and 0 meaning +1.
  typedef struct packed { logic re, im; } r_t;

  // Clip x to the range of a w-bit two's complement number.
  function automatic longint sat(input longint x, input int w);
    longint hi, lo;
    hi = (longint'(1) <<< (w - 1)) - 1;
    lo = -(longint'(1) <<< (w - 1));
    return (x > hi) ? hi : ((x < lo) ? lo : x);
  endfunction

  // Sign refinement of one part: negate when the received bit says -1, saturating to w bits.
  function automatic longint sref(input longint x, input logic neg, input int w);
    return neg ? sat(-x, w) : x;
  endfunction

  // Projection onto the box [-m, m] (m >= 0).
  function automatic longint proj(input longint x, input longint m);
    return (x > m) ? m : ((x < -m) ? -m : x);
  endfunction

  // Bit reversal of the low n bits of x.
  function automatic int bitrev(input int x, input int n);
    int r;
    r = 0;
    for (int i = 0; i < n; i++) r = r | (((x >> i) & 1) << (n - 1 - i));
    return r;
  endfunction

  // round(2^14 * cos(2*pi*k/n)) (want_sin = 0) or round(2^14 * sin(2*pi*k/n)) (want_sin = 1),
  // evaluated with integers only: the angle is folded into [0, pi/2] and the Taylor series is
  // summed in Q30 arithmetic. Used at elaboration to fill twiddle tables.
  function automatic int trig_q14(input longint k, input longint n, input bit want_sin);
    localparam longint PI_Q30 = 64'd3373259426;   // pi * 2^30
    longint x, t, t2, term, sum;
    bit neg_s, neg_c;
    x = (2 * PI_Q30 * (k % n)) / n;                // [0, 2 pi)
    neg_s = 1'b0; neg_c = 1'b0;
    if (x > PI_Q30) begin x = 2 * PI_Q30 - x; neg_s = 1'b1; end       // sin odd, cos even
    if (x > PI_Q30 / 2) begin x = PI_Q30 - x; neg_c = 1'b1; end       // cos(pi-x) = -cos x
    t  = x;
    t2 = (t * t) >>> 30;
    if (want_sin) begin term = t; sum = t; end
    else          begin term = longint'(1) <<< 30; sum = term; end
    for (int i = 1; i <= 12; i++) begin
      if (want_sin) term = -(((term * t2) >>> 30) / ((2 * i) * (2 * i + 1)));
      else          term = -(((term * t2) >>> 30) / ((2 * i - 1) * (2 * i)));
      sum = sum + term;
    end
    if (want_sin && neg_s) sum = -sum;
    if (!want_sin && neg_c) sum = -sum;
    return int'((sum + (longint'(1) <<< 15)) >>> 16);
  endfunction

endpackage
