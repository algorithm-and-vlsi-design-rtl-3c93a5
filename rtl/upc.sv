// upc: update, project and control. Holds the estimate S and performs line 10 of the 1BOX
// iteration, S <- proj(S + kappa*G), on one column w per clock.
//
// S-MEM is a U x W LUT memory (asynchronous read) of [2.7] words. When MVM2 delivers column w
// of kappa*G, the old column S-MEM[w] is captured in the accumulator register (reset
// to zero by acc_rst after iteration 1) together with kappa*G; the next clock their sum is
// clipped to the box [-s_max, s_max] in each part, written back to S-MEM[w] and, with mux_sel
// high, loaded into the output register. Otherwise the output register loads S-MEM[rd_w], the
// column MVM1 needs next; orst forces it to zero (S^(0) = 0). s_out is therefore the column of
// S one clock after the controller issued its position, in step with H-MEM port RD1.
// The elements (S-MEM, CTRL, MUX, reset registers, adder, Proj) follow the published UPC;
// the box bound as an input (s_max in [2.7], e.g. 121 for 16-QAM with unit symbol energy,
// 128 for 8-PSK) is this implementation's choice. The controller is the upc_ctrl module.
module upc #(
  parameter int unsigned W = 128,
  parameter int unsigned U = 8,
  localparam int unsigned LOG2W = $clog2(W)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic [onebox_pkg::S_W-1:0]      s_max,
  input  logic [LOG2W-1:0]                g_w,
  input  onebox_pkg::g_t [U-1:0]          g,
  input  logic                            acc_rst,
  input  logic                            mux_sel,
  input  logic                            orst,
  input  logic [LOG2W-1:0]                rd_w,
  output onebox_pkg::s_t [U-1:0]          s_out,
  output logic [LOG2W-1:0]                s_out_w
);
  import onebox_pkg::*;

  s_t [U-1:0]       smem [W];
  s_t [U-1:0]       acc_q, s_new;
  g_t [U-1:0]       g_q;
  logic [LOG2W-1:0] upd_w;

  // accumulator register and G register
  always_ff @(posedge clk) begin
    acc_q <= acc_rst ? '0 : smem[g_w];
    g_q   <= g;
    upd_w <= g_w;
  end

  // adder and projection
  always_comb begin
    for (int u = 0; u < U; u++) begin
      s_new[u].re = S_W'(proj(longint'(acc_q[u].re) + longint'(g_q[u].re), longint'(s_max)));
      s_new[u].im = S_W'(proj(longint'(acc_q[u].im) + longint'(g_q[u].im), longint'(s_max)));
    end
  end

  always_ff @(posedge clk) begin
    if (mux_sel) smem[upd_w] <= s_new;
  end

  // output MUX and resettable output register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_out <= '0; s_out_w <= '0;
    end else if (orst) begin
      s_out <= '0; s_out_w <= rd_w;
    end else if (mux_sel) begin
      s_out <= s_new; s_out_w <= upd_w;
    end else begin
      s_out <= smem[rd_w]; s_out_w <= rd_w;
    end
  end
endmodule
