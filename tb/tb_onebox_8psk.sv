// tb_onebox_8psk: end-to-end test of the 1BOX detector at its default size (B = 128, U = 8,
// W = 128, K = 3) with 8-PSK symbols, the second modulation evaluated for the algorithm. The
// only difference from 16-QAM in the hardware is the box bound input s_max = 128 (1.0 in
// [2.7]); the testbench slices by angle. Scenario and checks are those of onebox_tb_body.svh.
module tb_onebox_8psk;
  localparam int B = 128, U = 8, W = 128, K = 3, LOG2W = 7, WG = 28;
  localparam real SNR_DB1 = 20.0, SNR_DB2 = 5.0;
  localparam bit PSK8 = 1'b1;
  `include "onebox_tb_body.svh"
  onebox_top dut (.*);
  initial begin
    run_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
