// onebox_top: 1BOX data detector for 1-bit massive MU-MIMO-OFDM, B antennas, U users,
// W subcarriers, K iterations.
//
// Given the channel estimates (H-MEM), the 1-bit received time-domain samples of one OFDM
// symbol at all antennas (r-RAM) and the noise standard deviation sigma, it runs K iterations
// of projected gradient descent on the box-relaxed maximum-likelihood problem and outputs the
// W x U estimate S column by column. Blocks and wiring follow the published architecture:
// UPC (with CTRL) -> MVM1 -> FTF -> MVM2 -> UPC, with H-MEM feeding MVM1 (port RD1) and
// MVM2 (port RD2). All modules stream one sample per clock.
// Interface:
//  * load: h_wr_* and r_wr_* write H-MEM and r-RAM; writes take effect while load_ready is
//    high (idle, and during the last iteration, when the writer must stay behind the
//    detector's reads, which run in address order).
//  * task: pulse start while busy is low; sigma ([1.7] code) and s_max (box bound, [2.7]) must
//    be stable until done.
//  * result: s_valid marks W consecutive clocks carrying column s_w of S (U entries, [2.7]);
//    done pulses one clock after the last one.
// Timing: an iteration lasts (B-1)*W + 1 + L_MVM1 + L_FTF + L_MVM2 + 1 clocks from the start
// of its stream to the start of the next (the S update of one iteration overlaps the first
// antenna of the next), with L_MVM1 = 2 + log2(U), L_FTF = 2*(W + log2(W)) + 4 and L_MVM2 = 4.
// Subcarrier w = 1..W is DFT bin w-1; a centred numbering is a permutation of the load
// addresses. Output normalisation and the slicer to the constellation are left to the user.
module onebox_top #(
  parameter int unsigned B = 128,
  parameter int unsigned U = 8,
  parameter int unsigned W = 128,
  parameter int unsigned K = 3,
  localparam int unsigned AW = $clog2(B * W),
  localparam int unsigned LOG2W = $clog2(W)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [onebox_pkg::SIG_W-1:0]  sigma,
  input  logic [onebox_pkg::S_W-1:0]    s_max,
  output logic                          busy,
  output logic                          done,
  output logic                          load_ready,
  input  logic                          h_wr_en,
  input  logic [AW-1:0]                 h_wr_addr,
  input  onebox_pkg::h_t [U-1:0]        h_wr_data,
  input  logic                          r_wr_en,
  input  logic [AW-1:0]                 r_wr_addr,
  input  onebox_pkg::r_t                r_wr_data,
  output logic                          s_valid,
  output logic [LOG2W-1:0]              s_w,
  output onebox_pkg::s_t [U-1:0]        s_out
);
  import onebox_pkg::*;

  localparam int LOG2B = (B > 1) ? $clog2(B) : 1;

  // ---- CTRL ---------------------------------------------------------------------------------
  logic             g_valid, pos_valid, orst, acc_rst, mux_sel, we_grant, clear;
  logic [LOG2B-1:0] pos_b;
  logic [LOG2W-1:0] pos_w, g_w;
  g_t [U-1:0]       g;

  upc_ctrl #(.B(B), .W(W), .K(K)) u_ctrl (
    .clk, .rst_n, .start, .g_valid, .busy, .pos_valid, .pos_b, .pos_w, .orst, .acc_rst,
    .mux_sel, .we_grant, .res_valid(s_valid), .done, .iter(), .clear);
  assign load_ready = we_grant;

  // ---- UPC ----------------------------------------------------------------------------------
  s_t [U-1:0] s_col;
  upc #(.W(W), .U(U)) u_upc (
    .clk, .rst_n, .s_max, .g_w, .g, .acc_rst, .mux_sel, .orst, .rd_w(pos_w),
    .s_out(s_col), .s_out_w(s_w));
  assign s_out = s_col;

  // ---- H-MEM --------------------------------------------------------------------------------
  h_t [U-1:0]  h1, h2;
  logic [AW-1:0] h2_addr;
  hmem #(.B(B), .W(W), .U(U)) u_hmem (
    .clk, .we_grant, .wr_en(h_wr_en), .wr_addr(h_wr_addr), .wr_data(h_wr_data),
    .rd1_addr(AW'(pos_b) * AW'(W) + AW'(pos_w)), .rd1_data(h1),
    .rd2_addr(h2_addr), .rd2_data(h2));

  // ---- MVM1 ---------------------------------------------------------------------------------
  logic mvm1_in_valid, z_valid;
  z_t   z;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mvm1_in_valid <= 1'b0;
    else        mvm1_in_valid <= pos_valid;
  end
  mvm1 #(.U(U)) u_mvm1 (.clk, .rst_n, .in_valid(mvm1_in_valid), .h(h1), .s(s_col),
                        .z_valid, .z);

  // ---- FTF ----------------------------------------------------------------------------------
  logic v_valid;
  v_t   v;
  ftf #(.B(B), .W(W)) u_ftf (
    .clk, .rst_n, .clear, .sigma, .z_valid, .z, .we_grant,
    .r_wr_en, .r_wr_addr, .r_wr_data, .v_valid, .v);

  // ---- MVM2 ---------------------------------------------------------------------------------
  mvm2 #(.B(B), .W(W), .U(U)) u_mvm2 (
    .clk, .rst_n, .clear, .v_valid, .v, .h_addr(h2_addr), .h(h2),
    .g_valid, .g_w, .g);
endmodule
