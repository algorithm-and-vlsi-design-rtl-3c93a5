// tb_upc_ctrl: self-checking test of the controller upc_ctrl at B = 4, W = 8, K = 3.
// The datapath between the stream positions and kappa*G (H-MEM, MVM1, FTF, MVM2) is modelled
// here as a delay of D clocks from each position of the last antenna to the kappa*G of its
// subcarrier. Two tasks are run; a second start pulse during the first task must be ignored.
// Checks, per clock: each iteration streams exactly B*W positions in antenna-major order
// without gaps; iteration k+1 starts the clock after the first kappa*G of iteration k;
// orst is high exactly for the first iteration's positions; acc_rst exactly while the
// first iteration's kappa*G arrives; mux_sel is kappa*G valid delayed by one clock; res_valid
// follows the last iteration's updates (W columns); done pulses once after the last
// res_valid; memory writes are granted only while idle or in the last iteration; and each
// task takes K*((B-1)*W + D + 1) + W + 2 clocks from the sampled start to the sampled done.
module tb_upc_ctrl;
  localparam int B = 4, W = 8, K = 3, D = 10, LOG2W = 3, LOG2B = 2, KW = 2;
  localparam int P = (B - 1) * W + D + 1;
  logic clk = 0, rst_n = 0, start = 0, g_valid;
  logic busy, pos_valid, orst, acc_rst, mux_sel, we_grant, res_valid, done, clear;
  logic [LOG2B-1:0] pos_b;
  logic [LOG2W-1:0] pos_w;
  logic [KW-1:0] iter;
  logic [D-1:0] dl = '0;
  int checks = 0, failures = 0, cyc = 0;

  upc_ctrl #(.B(B), .W(W), .K(K)) dut (.*);

  always #5 clk = ~clk;
  always @(negedge clk) cyc <= cyc + 1;   // read at rising edges without a race
  // datapath model: kappa*G of column w D clocks after position (B-1, w)
  always @(posedge clk) dl <= {dl[D-2:0], pos_valid && pos_b == LOG2B'(B - 1)};
  assign g_valid = dl[D-1];

  int n_pos = 0, n_orst = 0, n_acc = 0, n_res = 0, n_done = 0, exp_w = 0, exp_b = 0;
  int start_cyc = -1, first_g_cyc = -1, n_gfirst = 0, n_iter_pos = 0, n_refused = 0;
  logic g_valid_q = 0, pos_valid_q = 0, mux_exp = 0, final_iter = 0, started = 0;

  task automatic fail(input string m);
    failures++;
    if (failures < 12) $display("FAIL at %0d: %s", cyc, m);
  endtask

  always @(posedge clk) if (rst_n) begin
    // position stream
    if (pos_valid) begin
      checks++;
      if (int'(pos_b) != exp_b || int'(pos_w) != exp_w) fail("position order");
      if (!pos_valid_q) begin
        n_iter_pos = 0;
        checks++;
        if (iter != KW'(1) && cyc != first_g_cyc + 1) fail("iteration did not start after the first kappa*G");
      end
      n_iter_pos++;
      exp_w = (exp_w + 1) % W;
      if (exp_w == 0) exp_b = (exp_b + 1) % B;
      n_pos++;
    end else if (pos_valid_q) begin
      checks++;
      if (n_iter_pos != B * W) fail("iteration length");
    end
    // output reset only for iteration 1 positions
    checks++;
    if (orst != (pos_valid && iter == KW'(1))) fail("orst");
    if (orst) n_orst++;
    if (g_valid && !g_valid_q) begin first_g_cyc = cyc; n_gfirst++; end
    // accumulator reset: during the kappa*G of iteration 1 (the first W of each task)
    checks++;
    if (acc_rst != (g_valid && (n_gfirst % K == 1))) fail("acc_rst");
    if (acc_rst) n_acc++;
    checks++;
    if (mux_sel != g_valid_q) fail("mux_sel");
    checks++;
    if (we_grant != (!busy || iter == KW'(K))) fail("we_grant");
    if (res_valid) n_res++;
    if (done) begin
      n_done++;
      checks++;
      if (cyc - start_cyc != K * P + W + 2) fail($sformatf("task took %0d clocks, want %0d", cyc - start_cyc, K * P + W + 2));
      checks++;
      if (n_res != n_done * W) fail("result column count");
    end
    if (start && !busy) start_cyc = cyc;
    if (start && busy) n_refused++;
    g_valid_q = g_valid; pos_valid_q = pos_valid;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    for (int t = 0; t < 2; t++) begin
      start <= 1; @(posedge clk); start <= 0;
      if (t == 0) begin
        repeat (50) @(posedge clk);
        start <= 1; @(posedge clk); start <= 0;   // must be ignored
      end
      @(posedge clk iff done);
      repeat (3) @(posedge clk);
      checks++; if (busy) fail("busy after done");
    end
    checks++; if (n_done != 2) fail("done count");
    checks++; if (n_pos != 2 * K * B * W) fail("position count");
    checks++; if (n_orst != 2 * B * W) fail("orst count");
    checks++; if (n_acc != 2 * W) fail("acc_rst count");
    checks++; if (n_refused == 0) fail("start during busy not exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2 * (K * P + W + 100)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
