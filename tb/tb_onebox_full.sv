// tb_onebox_full: end-to-end test of the 1BOX detector at the paper's size, with the top-level
// parameter defaults (B = 128 antennas, U = 8 users, W = 128 subcarriers, K = 3 iterations).
// Two tasks, one at high SNR (sigma below the threshold sigma') and one at low SNR, the second
// loaded while the first one's last iteration runs; see onebox_tb_body.svh for the scenario and
// for the checks (accuracy against a floating-point model, symbol errors, cycle count per task
// = K*PERIOD + W + 3, and coverage of every mechanism).
module tb_onebox_full;
  localparam int B = 128, U = 8, W = 128, K = 3, LOG2W = 7, WG = 28;
  localparam real SNR_DB1 = 20.0, SNR_DB2 = 5.0;
  localparam bit PSK8 = 1'b0;
  `include "onebox_tb_body.svh"
  onebox_top dut (.*);
  initial begin
    run_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
