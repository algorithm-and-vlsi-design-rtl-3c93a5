// tb_onebox_64x4: end-to-end test of the 1BOX detector in the smaller system evaluated for the
// published design: B = 64 antennas, U = 4 users, W = 128 subcarriers, K = 3 iterations, 16-QAM.
// The detector is built with B = 64 and U = 4 (an instance sized for this system); the scenario
// and checks are those of onebox_tb_body.svh: two tasks (sigma below and above sigma', the second
// loaded during the first one's last iteration), accuracy against a floating-point model,
// symbol errors, the exact task length K*PERIOD + W + 3 (25,175 clocks here) and mechanism
// coverage.
module tb_onebox_64x4;
  localparam int B = 64, U = 4, W = 128, K = 3, LOG2W = 7, WG = 28;
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
