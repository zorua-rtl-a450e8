// tb_coordinator -- directed scenarios for the coordinator, connected to three
// full-size mapping tables (48 warp slots, 48 scratchpad sets, 256 register
// sets) and fixed thresholds equal to the defaults (4, 4 and 25 sets).
// Expected outcomes are worked out by hand from the queue rules:
//   1. a small block becomes fully schedulable with exact resource counts;
//   2. a register-hungry block fills the register file; a second block gets
//      one warp through by oversubscribing 16 register sets (within 25) while
//      the rest wait in the register queue;
//   3. when the first block's warps shrink their registers in a new phase,
//      the waiting warps are admitted;
//   4. a barrier keeps a block unschedulable until its last warp arrives;
//      with most warps parked at the barrier, schedulable warps fall below
//      the 20% guard and the guard admits a warp beyond the threshold;
//   5. warp slots: more logical warps than physical slots, four slots in
//      swap space, and a swapped warp moves on chip when a slot frees;
//   6. block end releases the scratchpad and the block ID.
// After every event the testbench checks that the table counters agree with
// the per-warp holdings and that every schedulable warp holds what it needs.
module tb_coordinator;
  import zorua_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic blk_req, blk_valid, blk_ready, ph_valid, ph_ready, ph_barrier, end_valid, end_ready, busy;
  logic [6:0] blk_nwarps, n_schedulable;
  logic [4:0] blk_reg_sets, ph_reg_sets;
  logic [5:0] blk_scr_sets, ph_scr_sets, ph_warp, end_warp;
  logic [3:0] blk_id;
  logic [11:0] th_thread, th_scr, th_reg, free_thread, free_scr, free_reg, ovs_thread, ovs_scr, ovs_reg;
  logic [2:0] mt_valid, mt_ready, mt_done;
  mt_op_e mt_kind;
  logic [5:0] mt_id, mt_count;
  logic [63:0] schedulable, warp_active;
  logic [3:0] warp_block [64];
  logic [31:0] cnt_ovs_thread, cnt_ovs_scr, cnt_ovs_reg, cnt_wait, cnt_forced, cnt_barrier,
               cnt_swapin, cnt_reg_release;

  coordinator dut (.*);

  // mapping tables
  logic [5:0] t_free, s_free; logic [6:0] t_ovs; logic [9:0] s_ovs;
  logic [8:0] r_free; logic [10:0] r_ovs;
  logic [5:0] qw; logic [3:0] qb;
  logic t_q; logic [5:0] s_q; logic [4:0] r_q;
  mapping_table #(.N_ID(64), .SETS_PER_ID(1), .N_PHYS(48), .SPILL_LFU(1'b0)) u_t (.clk, .rst_n,
    .op_valid(mt_valid[0]), .op_ready(mt_ready[0]), .op_kind(mt_kind), .op_id(mt_id),
    .op_count(mt_count[0]), .op_done(mt_done[0]), .free_cnt(t_free), .oversub_cnt(t_ovs),
    .lk_valid(1'b0), .lk_id(6'd0), .lk_set(1'b0), .rsp_valid(), .rsp_phys_valid(), .rsp_phys(),
    .rsp_lin(), .rsp_fault(), .spill_valid(), .spill_phys(), .spill_lin(), .q_id(qw), .q_cnt(t_q));
  mapping_table #(.N_ID(16), .SETS_PER_ID(48), .N_PHYS(48)) u_s (.clk, .rst_n,
    .op_valid(mt_valid[1]), .op_ready(mt_ready[1]), .op_kind(mt_kind), .op_id(mt_id[3:0]),
    .op_count(mt_count), .op_done(mt_done[1]), .free_cnt(s_free), .oversub_cnt(s_ovs),
    .lk_valid(1'b0), .lk_id(4'd0), .lk_set(6'd0), .rsp_valid(), .rsp_phys_valid(), .rsp_phys(),
    .rsp_lin(), .rsp_fault(), .spill_valid(), .spill_phys(), .spill_lin(), .q_id(qb), .q_cnt(s_q));
  mapping_table #(.N_ID(64), .SETS_PER_ID(16), .N_PHYS(256)) u_r (.clk, .rst_n,
    .op_valid(mt_valid[2]), .op_ready(mt_ready[2]), .op_kind(mt_kind), .op_id(mt_id),
    .op_count(mt_count[4:0]), .op_done(mt_done[2]), .free_cnt(r_free), .oversub_cnt(r_ovs),
    .lk_valid(1'b0), .lk_id(6'd0), .lk_set(4'd0), .rsp_valid(), .rsp_phys_valid(), .rsp_phys(),
    .rsp_lin(), .rsp_fault(), .spill_valid(), .spill_phys(), .spill_lin(), .q_id(qw), .q_cnt(r_q));
  assign free_thread = 12'(t_free); assign ovs_thread = 12'(t_ovs);
  assign free_scr = 12'(s_free);    assign ovs_scr = 12'(s_ovs);
  assign free_reg = 12'(r_free);    assign ovs_reg = 12'(r_ovs);

  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  int need_r [64];     // register sets each warp needs in its current phase
  int need_s [16];     // scratchpad sets each block needs

  task automatic wait_idle();
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  // table counters agree with holdings; schedulable warps hold their needs
  task automatic invariants();
    automatic int sum_r = 0, sum_t = 0, sum_s = 0;
    for (int w = 0; w < 64; w++) begin
      qw = 6'(w); #1;
      sum_r += r_q; sum_t += t_q;
      if (schedulable[w]) begin
        chk(t_q == 1'b1, $sformatf("schedulable warp %0d without a slot", w));
        chk(int'(r_q) >= need_r[w], $sformatf("schedulable warp %0d lacks registers", w));
        qb = warp_block[w]; #1;
        chk(int'(s_q) >= need_s[warp_block[w]], $sformatf("warp %0d lacks scratchpad", w));
      end
      if (!warp_active[w]) chk(r_q == 0 && t_q == 0, $sformatf("idle warp %0d holds resources", w));
    end
    for (int b = 0; b < 16; b++) begin qb = 4'(b); #1; sum_s += s_q; end
    chk(sum_r == 256 - int'(r_free) + int'(r_ovs), "register counters");
    chk(sum_t == 48 - int'(t_free) + int'(t_ovs), "warp slot counters");
    chk(sum_s == 48 - int'(s_free) + int'(s_ovs), "scratchpad counters");
    chk(int'(r_ovs) <= 25 || cnt_forced != 0, "register swap within threshold");
  endtask

  task automatic block(input int nw, input int rs, input int ss, output int bid);
    @(negedge clk);
    blk_valid = 1; blk_nwarps = 7'(nw); blk_reg_sets = 5'(rs); blk_scr_sets = 6'(ss);
    #1;
    while (!blk_ready) begin @(negedge clk); #1; end
    bid = int'(blk_id);
    @(posedge clk); #1 blk_valid = 0;
    need_s[bid] = ss;
    wait_idle();
    for (int w = 0; w < 64; w++) if (warp_active[w] && warp_block[w] == 4'(bid) && need_r[w] < 0) need_r[w] = rs;
    invariants();
  endtask

  task automatic phase(input int w, input bit bar, input int rs, input int ss);
    @(negedge clk);
    ph_valid = 1; ph_warp = 6'(w); ph_barrier = bar; ph_reg_sets = 5'(rs); ph_scr_sets = 6'(ss);
    #1;
    while (!ph_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 ph_valid = 0;
    if (!bar) begin
      need_r[w] = rs;
      if (ss > need_s[warp_block[w]]) need_s[warp_block[w]] = ss;
    end
    wait_idle();
    invariants();
  endtask

  task automatic wend(input int w);
    @(negedge clk);
    end_valid = 1; end_warp = 6'(w);
    #1;
    while (!end_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 end_valid = 0;
    need_r[w] = -1;
    wait_idle();
    invariants();
  endtask

  function automatic int count_sched(input int bid);
    automatic int n = 0;
    for (int w = 0; w < 64; w++) if (schedulable[w] && warp_block[w] == 4'(bid)) n++;
    return n;
  endfunction

  int a, b, c, d, e, f, last_a, last_b, last_c, last_f;
  initial begin
    blk_valid = 0; ph_valid = 0; end_valid = 0; blk_nwarps = 0; blk_reg_sets = 0; blk_scr_sets = 0;
    ph_warp = 0; ph_barrier = 0; ph_reg_sets = 0; ph_scr_sets = 0; end_warp = 0; qw = 0; qb = 0;
    th_thread = 12'd4; th_scr = 12'd4; th_reg = 12'd25;
    for (int w = 0; w < 64; w++) need_r[w] = -1;
    for (int k = 0; k < 16; k++) need_s[k] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    chk(blk_req, "asks for a block when empty");

    // 1. small block
    block(8, 4, 5, a);
    chk(n_schedulable == 8 && count_sched(a) == 8, "scenario 1: 8 warps schedulable");
    chk(free_thread == 40 && free_reg == 256 - 32 && free_scr == 43, "scenario 1: resources");

    // 2. register-hungry block: 14 warps x 16 sets = 224 of the 224 left
    block(14, 16, 0, b);
    chk(count_sched(b) == 14 && free_reg == 0 && ovs_reg == 0, "scenario 2: register file full");
    block(3, 16, 0, c);
    chk(count_sched(c) == 1 && ovs_reg == 16, "scenario 2: one warp oversubscribed");
    chk(cnt_ovs_reg == 1 && cnt_wait >= 2, "scenario 2: others wait");

    // 3. block b's warps move to a 4-set phase, freeing 12 sets each
    for (int w = 0; w < 64; w++)
      if (warp_active[w] && warp_block[w] == 4'(b) && w < 64) begin
        phase(w, 1'b0, 4, 0);
      end
    chk(count_sched(c) == 3, "scenario 3: waiting warps admitted after release");
    chk(cnt_reg_release == 14, "scenario 3: 14 register releases");

    // 4. barrier in block b: all but the last warp arrive
    d = 0;
    for (int w = 0; w < 64; w++)
      if (warp_active[w] && warp_block[w] == 4'(b)) begin
        d++;
        if (d < 14) begin
          phase(w, 1'b1, 0, 0);
          chk(!schedulable[w], "warp at barrier not schedulable");
        end else e = w;
      end
    chk(count_sched(b) == 1, "scenario 4: one warp still running");
    phase(e, 1'b1, 0, 0);
    chk(count_sched(b) == 14 && cnt_barrier == 1, "scenario 4: barrier released");

    // 4b. deadlock guard: with the register threshold at 0, a 10-warp block
    // of 16-set warps finds 144 free sets: 9 warps fit, the 10th waits. Then
    // most warps park at barriers; once fewer than 10 warps are schedulable
    // the guard admits the waiting warp beyond the threshold.
    th_reg = 12'd0;
    block(10, 16, 0, f);
    chk(count_sched(f) == 9 && free_reg == 0 && ovs_reg == 24, "scenario 4b: 10th warp waits");
    chk(cnt_forced == 0, "scenario 4b: no forced grant yet");
    last_a = -1; last_b = -1; last_c = -1; last_f = -1;
    for (int w = 0; w < 64; w++) if (warp_active[w]) begin
      if (warp_block[w] == 4'(a)) last_a = w;
      if (warp_block[w] == 4'(b)) last_b = w;
      if (warp_block[w] == 4'(c)) last_c = w;
      if (warp_block[w] == 4'(f)) last_f = w;
    end
    for (int w = 0; w < 64; w++)
      if (warp_active[w] && schedulable[w] && w != last_a && w != last_b && w != last_c &&
          (warp_block[w] != 4'(f) || w != last_f))
        phase(w, 1'b1, 0, 0);
    chk(cnt_forced >= 1 && schedulable[last_f], "scenario 4b: guard admitted the waiting warp");
    chk(n_schedulable == 4, "scenario 4b: four warps running");
    phase(last_f, 1'b1, 0, 0);
    chk(count_sched(f) == 10, "scenario 4b: barrier of the new block completed");
    phase(last_a, 1'b1, 0, 0);
    phase(last_b, 1'b1, 0, 0);
    phase(last_c, 1'b1, 0, 0);
    chk(count_sched(a) == 8 && count_sched(b) == 14 && count_sched(c) == 3, "scenario 4b: barriers completed");
    chk(cnt_barrier == 5, "scenario 4b: five barriers released");
    for (int w = 0; w < 64; w++) if (warp_active[w] && warp_block[w] == 4'(f)) wend(w);
    th_reg = 12'd25;

    // 5. warp slots: 8 + 14 + 3 = 25 warps; a 27-warp block needs 27 slots,
    // 23 physical are free, 4 more may go to swap space.
    block(27, 0, 0, d);
    chk(free_thread == 0 && ovs_thread == 4, "scenario 5: 4 slots in swap space");
    chk(count_sched(d) == 23, "scenario 5: swapped warps not schedulable");
    chk(cnt_ovs_thread == 4, "scenario 5: 4 slot oversubscriptions");
    // a warp of block a ends: its slot goes to a swapped warp
    for (int w = 63; w >= 0; w--) if (warp_active[w] && warp_block[w] == 4'(a)) e = w;
    wend(e);
    chk(cnt_swapin == 1 && count_sched(d) == 24, "scenario 5: swap-in after warp end");

    // 6. block end: the remaining 7 warps of block a end
    for (int w = 0; w < 64; w++) if (warp_active[w] && warp_block[w] == 4'(a)) wend(w);
    chk(cnt_swapin == 4 && count_sched(d) == 27, "scenario 6: all swapped warps on chip");
    qb = 4'(a); #1;
    chk(s_q == 0 && free_scr == 48, "scenario 6: scratchpad released at block end");
    for (int w = 0; w < 64; w++) if (warp_active[w]) wend(w);
    chk(free_reg == 256 && free_thread == 48 && ovs_reg == 0 && ovs_thread == 0, "all released");
    chk(n_schedulable == 0 && blk_req, "empty again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule


