// tb_zorua_sm -- end-to-end run of the virtualized SM at its default
// (full Fermi) size.
//
// The testbench plays the parts of the GPU around the block: a thread block
// scheduler that answers blk_req, and a warp model in which every
// schedulable warp "executes" for a random 8..40 cycles and then reaches its
// next program step: a phase specifier, a barrier or its end. Warps that are
// not schedulable make no progress. Schedulable warps also issue register
// and scratchpad translations, which must never fault, and the share of
// them served on chip is reported as the resource hit rate.
//
// Three kernels run back to back, shaped after kernels of the evaluation
// (sizes within the ranges the evaluation lists; phase shapes after its
// examples; the exact numbers are this testbench's choice):
//   DCT-like : 6 blocks x 8 warps, registers 20 -> 40 -> 40 -> 20 per thread,
//              2 KB scratchpad throughout, barriers between phases
//   NQU-like : 16 blocks x 4 warps, scratchpad 0 -> 4224 B -> 384 B
//   BH-like  : 2 blocks x 32 warps (1024 threads), 44 registers, a barrier;
//              needs more registers and warp slots than the SM has, so only
//              oversubscription and the deadlock guard let it finish
// core_idle / mem_idle are driven so that o_thresh first rises, then falls.
// The run fails if a kernel does not finish, if resources are left allocated
// at the end, or if any mechanism (each oversubscription, waiting in a queue,
// register release at a phase change, barrier, swap-in, the deadlock guard,
// threshold up and down, swap-space translation, spilling a least frequently
// accessed register or scratchpad set) never happened.
module tb_zorua_sm;
  import zorua_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // DUT ports
  logic blk_req, blk_valid, blk_ready, ph_valid, ph_ready, ph_barrier, end_valid, end_ready;
  logic [6:0] blk_nwarps, n_schedulable;
  logic [PS_W-1:0] blk_spec, ph_instr;
  logic [3:0] blk_id;
  logic [5:0] ph_warp, end_warp;
  logic [63:0] schedulable, warp_active;
  logic [3:0] warp_block [64];
  logic coord_busy, core_idle, mem_idle;
  logic [39:0] reg_swap_base, scr_swap_base, thr_swap_base;
  logic reg_lk_valid, reg_rsp_valid, reg_rsp_onchip, reg_rsp_fault;
  logic [5:0] reg_lk_warp, reg_lk_reg;
  logic [9:0] reg_rsp_row;
  logic [39:0] reg_rsp_swap_addr, scr_rsp_swap_addr, thr_rsp_swap_addr;
  logic scr_lk_valid, scr_rsp_valid, scr_rsp_onchip, scr_rsp_fault;
  logic [3:0] scr_lk_block;
  logic [15:0] scr_lk_addr, scr_rsp_addr;
  logic thr_lk_valid, thr_rsp_valid, thr_rsp_onchip, thr_rsp_fault;
  logic [5:0] thr_lk_warp, thr_rsp_slot;
  logic reg_spill_valid, scr_spill_valid;
  logic [9:0] reg_spill_row;
  logic [15:0] scr_spill_addr;
  logic [39:0] reg_spill_swap_addr, scr_spill_swap_addr;
  logic [11:0] free_thread, free_scr, free_reg, ovs_thread, ovs_scr, ovs_reg, th_thread, th_scr, th_reg;
  logic [31:0] cnt_ovs_thread, cnt_ovs_scr, cnt_ovs_reg, cnt_wait, cnt_forced, cnt_barrier,
               cnt_swapin, cnt_reg_release, cnt_thresh_up, cnt_thresh_down;

  zorua_sm dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // ---------------- kernel programs ----------------
  typedef enum int {OP_PHASE, OP_BAR, OP_END} op_e;
  typedef struct { op_e op; int regs; int scr_units; } step_t;
  step_t prog [8];
  int    prog_len, k_blocks, k_warps;

  function automatic logic [PS_W-1:0] spec(input int regs, input int units);
    return {PS_OPCODE, 6'(regs), 10'(units)};
  endfunction

  task automatic load_kernel(input int k);
    if (k == 0) begin          // DCT-like
      k_blocks = 6; k_warps = 8;
      prog[0] = '{OP_PHASE, 20, 32};
      prog[1] = '{OP_BAR, 0, 0};
      prog[2] = '{OP_PHASE, 40, 32};
      prog[3] = '{OP_BAR, 0, 0};
      prog[4] = '{OP_PHASE, 40, 32};
      prog[5] = '{OP_PHASE, 20, 32};
      prog[6] = '{OP_END, 0, 0};
      prog_len = 7;
    end else if (k == 1) begin // NQU-like
      k_blocks = 16; k_warps = 4;
      prog[0] = '{OP_PHASE, 12, 0};
      prog[1] = '{OP_PHASE, 16, 4224 / 64};
      prog[2] = '{OP_BAR, 0, 0};
      prog[3] = '{OP_PHASE, 8, 384 / 64};
      prog[4] = '{OP_END, 0, 0};
      prog_len = 5;
    end else begin             // BH-like
      k_blocks = 2; k_warps = 32;
      prog[0] = '{OP_PHASE, 44, 0};
      prog[1] = '{OP_BAR, 0, 0};
      prog[2] = '{OP_PHASE, 28, 0};
      prog[3] = '{OP_END, 0, 0};
      prog_len = 4;
    end
  endtask

  // ---------------- warp model ----------------
  int  pc    [64];     // next program step
  int  timer [64];
  int  cur_regs [64];
  int  cur_scr  [64];  // scratchpad units of the warp's current phase
  bit  was_active [64];
  int  blocks_sent, blocks_done_warps, warps_ended;
  int  lk_total, lk_onchip, slk_total, slk_onchip;

  int kernel;
  bit running;

  // one cycle of the environment, driven at the negative edge
  task automatic env_cycle();
    int cand, rr;
    bit blk_fire, ph_fire, end_fire;
    @(negedge clk);
    // new warps: start at step 1 (step 0 came with the block)
    for (int w = 0; w < 64; w++) begin
      if (warp_active[w] && !was_active[w]) begin
        pc[w] = 1; timer[w] = $urandom_range(8, 40); cur_regs[w] = prog[0].regs;
        cur_scr[w] = prog[0].scr_units;
      end
      was_active[w] = warp_active[w];
    end
    // schedulable warps execute
    for (int w = 0; w < 64; w++) if (schedulable[w] && timer[w] > 0) timer[w]--;
    // block dispatch
    blk_valid = running && (blocks_sent < k_blocks) && blk_req;
    blk_nwarps = 7'(k_warps);
    blk_spec = spec(prog[0].regs, prog[0].scr_units);
    // one event per cycle: first warp whose timer expired
    ph_valid = 0; end_valid = 0;
    cand = -1;
    rr = $urandom_range(0, 63);
    for (int k = 63; k >= 0; k--) if (schedulable[(rr + k) % 64] && timer[(rr + k) % 64] == 0) cand = (rr + k) % 64;
    if (cand >= 0 && !coord_busy && !blk_valid) begin
      step_t s = prog[pc[cand]];
      if (s.op == OP_END) begin
        end_valid = 1; end_warp = 6'(cand);
      end else begin
        ph_valid = 1; ph_warp = 6'(cand); ph_barrier = (s.op == OP_BAR);
        ph_instr = spec(s.regs, s.scr_units);
      end
    end
    // translations from a random schedulable warp
    reg_lk_valid = 0; scr_lk_valid = 0;
    cand = $urandom_range(0, 63);
    if (schedulable[cand] && timer[cand] > 0 && cur_regs[cand] > 0) begin
      reg_lk_valid = 1; reg_lk_warp = 6'(cand); reg_lk_reg = 6'($urandom_range(0, cur_regs[cand] - 1));
      if (cur_scr[cand] > 0) begin
        scr_lk_valid = 1; scr_lk_block = warp_block[cand];
        scr_lk_addr = 16'($urandom_range(0, cur_scr[cand] * 64 - 1));
      end
    end
    #1;
    blk_fire = blk_valid && blk_ready;
    ph_fire  = ph_valid && ph_ready;
    end_fire = end_valid && end_ready;
    @(posedge clk); #1;
    if (blk_fire) blocks_sent++;
    if (end_fire) begin
      warps_ended++; pc[end_warp] = 0;
    end
    if (ph_fire) begin
      if (!ph_barrier) cur_regs[ph_warp] = int'(ph_instr[15:10]);
      if (!ph_barrier) cur_scr[ph_warp] = int'(ph_instr[9:0]);
      pc[ph_warp]++; timer[ph_warp] = $urandom_range(8, 40);
    end
  endtask

  // translation responses (two cycles after the request)
  always @(posedge clk) if (rst_n) begin
    if (reg_rsp_valid) begin
      lk_total++;
      if (reg_rsp_onchip) lk_onchip++;
      chk(!reg_rsp_fault, "register translation of a live register faulted");
      if (!reg_rsp_onchip) chk(reg_rsp_swap_addr >= reg_swap_base, "register swap address");
    end
    if (scr_rsp_valid) begin
      slk_total++;
      if (scr_rsp_onchip) slk_onchip++;
      chk(!scr_rsp_fault, "scratchpad translation of live scratchpad faulted");
    end
  end

  // spills of resident sets (least frequently accessed) to swap space
  int n_reg_spill = 0, n_scr_spill = 0;
  always @(posedge clk) if (rst_n) begin
    if (reg_spill_valid) begin
      n_reg_spill++;
      chk(reg_spill_row[1:0] == 2'b00, "spilled register set starts at a set boundary");
      chk(reg_spill_swap_addr >= reg_swap_base && reg_spill_swap_addr[8:0] == '0, "register spill address");
    end
    if (scr_spill_valid) begin
      n_scr_spill++;
      chk(scr_spill_addr[9:0] == '0 && scr_spill_swap_addr >= scr_swap_base, "scratchpad spill address");
    end
  end

  // core/memory idle statistics: idle-heavy first, memory-heavy later
  int cyc = 0;
  always @(negedge clk) begin
    cyc++;
    core_idle = (cyc < 8 * 2048) ? ($urandom_range(0, 3) == 0) : 1'b0;
    mem_idle  = (cyc >= 8 * 2048 && cyc < 16 * 2048) ? ($urandom_range(0, 2) == 0) : 1'b0;
  end

  int t0, tk;
  initial begin
    blk_valid = 0; ph_valid = 0; end_valid = 0; ph_barrier = 0; blk_nwarps = 0; blk_spec = '0;
    ph_instr = '0; ph_warp = 0; end_warp = 0; reg_lk_valid = 0; scr_lk_valid = 0; thr_lk_valid = 0;
    reg_lk_warp = 0; reg_lk_reg = 0; scr_lk_block = 0; scr_lk_addr = 0; thr_lk_warp = 0;
    reg_swap_base = 40'h10_0000_0000; scr_swap_base = 40'h20_0000_0000; thr_swap_base = 40'h30_0000_0000;
    lk_total = 0; lk_onchip = 0; slk_total = 0; slk_onchip = 0; warps_ended = 0; running = 0;
    for (int w = 0; w < 64; w++) begin pc[w] = 0; timer[w] = 0; was_active[w] = 0; cur_regs[w] = 0; cur_scr[w] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    chk(th_reg == 25 && th_scr == 4 && th_thread == 4, "default thresholds are 10% of each resource");
    for (kernel = 0; kernel < 3; kernel++) begin
      load_kernel(kernel);
      blocks_sent = 0; warps_ended = 0; running = 1; t0 = cyc;
      while (warps_ended < k_blocks * k_warps && cyc - t0 < 400000) env_cycle();
      running = 0;
      tk = cyc - t0;
      $display("kernel %0d: %0d blocks x %0d warps in %0d cycles", kernel, k_blocks, k_warps, tk);
      chk(warps_ended == k_blocks * k_warps, $sformatf("kernel %0d finished", kernel));
      repeat (300) env_cycle();
      chk(warp_active == '0, "no warp left active");
      chk(free_reg == 256 && free_scr == 48 && free_thread == 48, "all physical resources free");
      chk(ovs_reg == 0 && ovs_scr == 0 && ovs_thread == 0, "no swap space left in use");
    end
    while (cyc < 17 * 2048) @(negedge clk);
    $display("register hit rate %0d/%0d, scratchpad hit rate %0d/%0d", lk_onchip, lk_total, slk_onchip, slk_total);
    $display("events: ovs thread %0d scr %0d reg %0d, wait %0d, forced %0d, barrier %0d, swapin %0d, reg release %0d, thresh up %0d down %0d",
             cnt_ovs_thread, cnt_ovs_scr, cnt_ovs_reg, cnt_wait, cnt_forced, cnt_barrier, cnt_swapin,
             cnt_reg_release, cnt_thresh_up, cnt_thresh_down);
    $display("spills: register %0d, scratchpad %0d", n_reg_spill, n_scr_spill);
    chk(n_reg_spill > 0, "register sets were spilled");
    chk(n_scr_spill > 0, "scratchpad sets were spilled");
    chk(cnt_ovs_thread > 0, "warp slots were oversubscribed");
    chk(cnt_ovs_scr > 0, "scratchpad was oversubscribed");
    chk(cnt_ovs_reg > 0, "registers were oversubscribed");
    chk(cnt_wait > 0, "warps waited in the queues");
    chk(cnt_forced > 0, "the deadlock guard acted");
    chk(cnt_barrier > 0, "barriers were released");
    chk(cnt_swapin > 0, "swapped warps moved on chip");
    chk(cnt_reg_release > 0, "registers were released at phase changes");
    chk(cnt_thresh_up > 0 && cnt_thresh_down > 0, "o_thresh moved both ways");
    chk(lk_total > 0 && lk_onchip < lk_total, "register accesses reached swap space");
    chk(slk_total > 0 && slk_onchip < slk_total, "scratchpad accesses reached swap space");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
