// upc_ctrl: the control unit (CTRL) of the 1BOX detector, located in the UPC.
//
// One detection task is K iterations. In each iteration the controller streams the B*W
// positions (b, w), antenna-major, one per clock: they address H-MEM port RD1 and S-MEM and
// mark the valid cycles of MVM1. The stream of iteration k+1 starts the clock after the first
// kappa*G value of iteration k arrives from MVM2, so during the first W positions (antenna 1)
// the UPC updates S column by column and passes each new column straight to MVM1 through its
// output MUX, while S-MEM is being rewritten; antennas 2..B then read S-MEM. After iteration K
// the update runs alone and its output is the detector result.
// Control outputs, all following the published UPC description:
//  * orst     resets the UPC output register: S^(0) = 0 is fed to MVM1 during the first
//             iteration (held for all B*W positions, see below),
//  * acc_rst  resets the register in front of the UPC adder while iteration 1's result is
//             written, so the previous task's S-MEM content is not accumulated,
//  * mux_sel  selects the projection output (update cycles) instead of S-MEM,
//  * we_grant write permission for H-MEM and r-RAM: while idle and during the last iteration,
//  * res_valid marks the final S columns, done pulses once after the last one.
// The published text asks for the output-register reset only during the first W cycles; it
// is held for the whole first iteration here, because antennas 2..B of that iteration would
// otherwise read the previous task's S-MEM content. Start/done handshake: start is a one-clock
// pulse accepted while busy is low.
module upc_ctrl #(
  parameter int unsigned B = 128,
  parameter int unsigned W = 128,
  parameter int unsigned K = 3,
  localparam int unsigned LOG2W = $clog2(W),
  localparam int unsigned LOG2B = (B > 1) ? $clog2(B) : 1,
  localparam int unsigned KW = $clog2(K + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             g_valid,     // kappa*G from MVM2
  output logic             busy,
  output logic             pos_valid,   // MVM1 stream position valid (issue cycle)
  output logic [LOG2B-1:0] pos_b,
  output logic [LOG2W-1:0] pos_w,
  output logic             orst,
  output logic             acc_rst,
  output logic             mux_sel,
  output logic             we_grant,
  output logic             res_valid,
  output logic             done,
  output logic [KW-1:0]    iter,        // iteration of the running stream (1..K)
  output logic             clear        // one-clock pulse at task start
);
  logic       g_valid_q, g_first, final_upd;

  assign g_first = g_valid && !g_valid_q;
  assign clear   = start && !busy;

  // G arriving belongs to the iteration `iter` until the first G cycle launches the next one
  logic       g_iter1;          // the G window in progress belongs to iteration 1
  assign acc_rst = g_valid && (g_first ? (iter == KW'(1)) : g_iter1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; pos_valid <= 1'b0; pos_b <= '0; pos_w <= '0; iter <= '0;
      g_valid_q <= 1'b0; g_iter1 <= 1'b0; mux_sel <= 1'b0; final_upd <= 1'b0;
      res_valid <= 1'b0; done <= 1'b0;
    end else begin
      g_valid_q <= g_valid;
      mux_sel   <= g_valid;          // update result is ready the clock after G arrives
      done      <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; iter <= KW'(1);
        pos_valid <= 1'b1; pos_b <= '0; pos_w <= '0;
      end else if (pos_valid) begin
        pos_w <= pos_w + 1'b1;
        if (pos_w == LOG2W'(W - 1)) begin
          pos_w <= '0;
          if (pos_b == LOG2B'(B - 1)) begin
            pos_b <= '0; pos_valid <= 1'b0;
          end else pos_b <= pos_b + 1'b1;
        end
      end
      if (g_first) begin
        g_iter1 <= (iter == KW'(1));
        if (iter < KW'(K)) begin
          iter <= iter + 1'b1;
          pos_valid <= 1'b1; pos_b <= '0; pos_w <= '0;
        end else final_upd <= 1'b1;
      end
      // the final S columns leave the UPC output register one clock after mux_sel
      res_valid <= mux_sel && final_upd;
      if (final_upd && mux_sel && !g_valid) final_upd <= 1'b0;
      if (res_valid && !(mux_sel && final_upd)) begin
        done <= 1'b1; busy <= 1'b0; iter <= '0;
      end
    end
  end

  assign orst      = pos_valid && (iter == KW'(1));
  assign we_grant  = !busy || (iter == KW'(K));

  // a new iteration's stream must not start while the previous one is still running
  assert property (@(posedge clk) disable iff (!rst_n) g_first |-> !pos_valid)
    else $error("upc_ctrl: kappa*G arrived before the stream of the iteration ended");
endmodule
