// tb_workloads -- runs the resource shapes of the eight evaluated
// applications through the virtualized SM at its default (Fermi) size.
//
// Each application is taken at the largest point of its published
// specification range: registers per thread x threads per block
// (BH 44x1024, DCT 40x512, MST 44x1024, RD 24x1024, SLA 36x1024,
// SSSP 36x1024) or scratchpad bytes per block x threads per block
// (NQU 47232 B x 288, SP 8192 B x 512). The instruction streams of the
// applications are not modelled: every warp runs a short synthetic program
// (full need, a barrier, the low end of the range, end) with random
// execution times, like the end-to-end testbench, whose warp and block
// scheduler model this file shares. Four blocks are launched per
// application; register counts for the two scratchpad workloads (16 per
// thread) and the block count are this testbench's choice.
//
// Per application it checks that every warp finishes, that every register
// and scratchpad translation of a running warp hits an allocated set, and
// that all physical and swap resources are returned at the end; it prints
// the cycle count and the share of translations served on chip.
module tb_workloads;
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

  localparam int N_KERNELS = 8;
  string k_name;

  // name, registers per thread (high, low), scratchpad bytes (high, low),
  // threads per block
  task automatic load_kernel(input int k);
    int rh, rl, sh, sl, thr;
    case (k)
      0: begin k_name = "BH";   rh = 44; rl = 28; sh = 0;     sl = 0;     thr = 1024; end
      1: begin k_name = "DCT";  rh = 40; rl = 20; sh = 0;     sl = 0;     thr = 512;  end
      2: begin k_name = "MST";  rh = 44; rl = 28; sh = 0;     sl = 0;     thr = 1024; end
      3: begin k_name = "RD";   rh = 24; rl = 16; sh = 0;     sl = 0;     thr = 1024; end
      4: begin k_name = "NQU";  rh = 16; rl = 16; sh = 47232; sl = 10496; thr = 288;  end
      5: begin k_name = "SLA";  rh = 36; rl = 24; sh = 0;     sl = 0;     thr = 1024; end
      6: begin k_name = "SP";   rh = 16; rl = 16; sh = 8192;  sl = 2048;  thr = 512;  end
      default: begin k_name = "SSSP"; rh = 36; rl = 16; sh = 0; sl = 0;  thr = 1024; end
    endcase
    k_blocks = 4; k_warps = (thr + WARP_SIZE - 1) / WARP_SIZE;
    prog[0] = '{OP_PHASE, rh, (sh + 63) / 64};
    prog[1] = '{OP_BAR, 0, 0};
    prog[2] = '{OP_PHASE, rl, (sl + 63) / 64};
    prog[3] = '{OP_END, 0, 0};
    prog_len = 4;
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
    if (cand >= 0 && !coord_busy) begin
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

  // core/memory idle statistics: idle-heavy first, memory-heavy later
  int cyc = 0;
  always @(negedge clk) begin
    cyc++;
    core_idle = ($urandom_range(0, 3) == 0);
    mem_idle  = ($urandom_range(0, 3) == 0);
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
    for (kernel = 0; kernel < N_KERNELS; kernel++) begin
      load_kernel(kernel);
      blocks_sent = 0; warps_ended = 0; running = 1; t0 = cyc;
      lk_total = 0; lk_onchip = 0; slk_total = 0; slk_onchip = 0;
      while (warps_ended < k_blocks * k_warps && cyc - t0 < 400000) env_cycle();
      running = 0;
      tk = cyc - t0;
      $display("%-4s: %0d blocks x %0d warps in %0d cycles, register hits %0d/%0d, scratchpad hits %0d/%0d",
               k_name, k_blocks, k_warps, tk, lk_onchip, lk_total, slk_onchip, slk_total);
      chk(warps_ended == k_blocks * k_warps, $sformatf("%s finished", k_name));
      chk(lk_total > 0, $sformatf("%s issued register translations", k_name));
      repeat (300) env_cycle();
      chk(warp_active == '0, "no warp left active");
      chk(free_reg == 256 && free_scr == 48 && free_thread == 48, "all physical resources free");
      chk(ovs_reg == 0 && ovs_scr == 0 && ovs_thread == 0, "no swap space left in use");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3500000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
