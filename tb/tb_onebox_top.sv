// tb_onebox_top: end-to-end test of the 1BOX detector at reduced size (B = 32 antennas,
// U = 2 users, W = 32 subcarriers, K = 6 iterations). Two tasks, one at high SNR (sigma below
// the threshold sigma') and one at low SNR; see onebox_tb_body.svh for the checks.
module tb_onebox_top;
  localparam int B = 32, U = 2, W = 32, K = 6, LOG2W = 5, WG = 7;
  localparam real SNR_DB1 = 20.0, SNR_DB2 = 5.0;
  localparam bit PSK8 = 1'b0;
  `include "onebox_tb_body.svh"
  onebox_top #(.B(B), .U(U), .W(W), .K(K)) dut (.*);
  initial begin
    run_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
