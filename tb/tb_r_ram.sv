// tb_r_ram: self-checking test of r_ram at B = 4, W = 8.
// Writes random sign bits to random addresses with we_grant toggling, keeps a model array of
// what must be stored (writes without grant are dropped), and reads both ports at random
// addresses every clock, checking the one-clock read latency against the model. Also counts
// granted and refused writes.
module tb_r_ram;
  import onebox_pkg::*;
  localparam int B = 4, W = 8, AW = $clog2(B * W), N = 2000;
  logic clk = 0, we_grant = 0, wr_en = 0;
  logic [AW-1:0] wr_addr = '0, rd1_addr = '0, rd2_addr = '0;
  r_t wr_data = '0, rd1_data, rd2_data;
  r_t model [B * W];
  int checks = 0, failures = 0, n_wr = 0, n_refused = 0;

  r_ram #(.B(B), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    // initialise through the write port
    we_grant <= 1; wr_en <= 1;
    for (int a = 0; a < B * W; a++) begin
      wr_addr <= AW'(a); wr_data <= '0; model[a] = '0;
      @(posedge clk);
    end
    for (int i = 0; i < N; i++) begin
      r_t d;
      int wa;
      bit g, e;
      d = r_t'($urandom); wa = $urandom_range(0, B * W - 1);
      g = $urandom_range(0, 1); e = $urandom_range(0, 1);
      we_grant <= g; wr_en <= e; wr_addr <= AW'(wa); wr_data <= d;
      rd1_addr <= AW'($urandom_range(0, B * W - 1));
      rd2_addr <= AW'(wa);                       // read-during-write: old value expected
      @(posedge clk); #1;
      checks += 2;
      if (rd1_data != model[rd1_addr]) begin failures++; $display("FAIL: port 1 addr %0d", rd1_addr); end
      if (rd2_data != model[rd2_addr]) begin failures++; $display("FAIL: port 2 addr %0d", rd2_addr); end
      if (e && g) begin model[wa] = d; n_wr++; end
      else if (e) n_refused++;
    end
    checks++; if (n_wr == 0 || n_refused == 0) begin failures++; $display("FAIL: write grant case unused"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3 * N) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
