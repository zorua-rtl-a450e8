// tb_oversub_threshold -- checks the epoch-based threshold adaptation.
// The register-resource instance (TOTAL = 256: default 25, step 10) runs at
// the full 2048-cycle epoch. Each epoch the testbench drives a chosen number
// of core-idle and memory-idle cycles and predicts o_thresh with its own
// copy of the rule: raise by the step when the idle delta exceeds the memory
// delta by more than 16, lower when the reverse holds, clamp to [0, 256].
// It also checks that the update happens exactly at the epoch boundary.
module tb_oversub_threshold;
  localparam int TOTAL = 256, EPOCH = 2048;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic idle_cyc, mem_cyc, epoch_end, inc_evt, dec_evt;
  logic [8:0] o_thresh;
  oversub_threshold #(.TOTAL(TOTAL)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int exp_th, prev_i, prev_m;
  int n_inc = 0, n_dec = 0;

  task automatic epoch(input int ni, input int nm);
    int di, dm;
    for (int c = 0; c < EPOCH; c++) begin
      idle_cyc = (c < ni); mem_cyc = (c < nm);
      if (c == EPOCH - 1) chk(o_thresh == 9'(exp_th), "o_thresh changed before the epoch end");
      @(negedge clk);
    end
    di = ni - prev_i; dm = nm - prev_m;
    if (di - dm > 16) begin exp_th += 10; n_inc++; end
    else if (dm - di > 16) begin exp_th -= 10; n_dec++; end
    if (exp_th > TOTAL) exp_th = TOTAL;
    if (exp_th < 0) exp_th = 0;
    prev_i = ni; prev_m = nm;
    chk(epoch_end, "epoch_end pulse");
    chk(o_thresh == 9'(exp_th), $sformatf("o_thresh %0d exp %0d (idle %0d mem %0d)", o_thresh, exp_th, ni, nm));
  endtask

  initial begin
    idle_cyc = 0; mem_cyc = 0; exp_th = 25; prev_i = 0; prev_m = 0;
    @(negedge clk); rst_n = 1;
    chk(o_thresh == 25, "default is 10% of 256");
    epoch(100, 50);    // +50 idle vs +50 mem: no change (equal deltas)
    epoch(200, 50);    // idle delta 100, mem 0 -> up
    epoch(200, 66);    // idle 0, mem 16 -> not more than 16 -> no change
    epoch(200, 83);    // mem delta 17 -> down
    epoch(216, 83);    // idle delta exactly 16 -> no change
    epoch(600, 0);     // up
    for (int k = 0; k < 30; k++) epoch(((k % 2) == 0) ? 2000 : 0, 0); // saturate at TOTAL
    for (int k = 0; k < 40; k++) epoch(0, ((k % 2) == 0) ? 1500 : 0); // down to 0
    for (int k = 0; k < 10; k++) epoch($urandom_range(0, 2048), $urandom_range(0, 2048));
    chk(n_inc > 0 && n_dec > 0, "both directions exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100 * EPOCH) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
