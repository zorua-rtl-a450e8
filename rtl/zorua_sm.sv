// zorua_sm -- resource-virtualization hardware added to one GPU SM.
//
// The SM's warp slots, registers and scratchpad are decoupled from what a
// kernel asks for: a kernel may run more warps than fit physically, and the
// resources they hold follow the per-phase needs that the compiler writes into
// phase specifier instructions. This block holds
//   * phase_spec_decoder   -- turns a phase specifier into register/scratchpad sets
//   * coordinator          -- pending-warp queues and allocation decisions
//   * thread/scratch/reg mapping tables -- virtual-to-physical/swap maps with
//     their free and oversubscribed counters
//   * three oversub_threshold units -- one o_thresh per resource, adapted
//     every 2048-cycle epoch from core-idle and memory-idle cycle counts.
// The thread block scheduler, warp scheduler, pipelines, register file,
// scratchpad and the memory that holds the swap space belong to the
// surrounding GPU; their connections are ports of this block:
//   blk_*  : block requests and dispatch (first phase needs given as a raw
//            phase specifier, blk_spec)
//   ph_*   : phase change from the decode stage (raw instruction; barriers
//            and fences with ph_barrier = 1)
//   end_*  : a warp has finished
//   schedulable : the "schedulable" bit of every logical warp for the warp
//            scheduler
//   reg_/scr_/thr_lk_* : address translation for the operand collector,
//            load/store unit and warp scheduler, two-cycle latency; accesses
//            to swap space come out as global-memory addresses.
//   reg_/scr_spill_* : a resident register or scratchpad set was chosen as
//            the least frequently accessed one and moved to swap space; the
//            SM stores its data from the given physical location to the
//            given global-memory address.
//   core_idle / mem_idle : one-cycle statistics events from the pipeline.
// Default sizes are those of the evaluated Fermi-class SM (see zorua_pkg).
module zorua_sm
  import zorua_pkg::*;
#(
  parameter int unsigned ADDR_W = 40,
  parameter int unsigned EPOCH  = 2048,
  localparam int unsigned WID_W = $clog2(N_LWARPS),
  localparam int unsigned BID_W = $clog2(N_LBLOCKS),
  localparam int unsigned NWC_W = $clog2(N_LWARPS + 1),
  localparam int unsigned LREG_W = $clog2(MAX_REG_SETS_WARP * REGS_PER_SET_THR),
  localparam int unsigned ROW_W  = $clog2(N_PREG_SETS * REGS_PER_SET_THR),
  localparam int unsigned SLA_W  = $clog2(MAX_SCR_SETS_BLOCK) + $clog2(SCR_SET_BYTES),
  localparam int unsigned SPA_W  = $clog2(N_PSCR_SETS) + $clog2(SCR_SET_BYTES),
  localparam int unsigned SLOT_W = $clog2(N_PWARP_SLOTS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // thread block scheduler
  output logic              blk_req,
  input  logic              blk_valid,
  output logic              blk_ready,
  input  logic [NWC_W-1:0]  blk_nwarps,
  input  logic [PS_W-1:0]   blk_spec,
  output logic [BID_W-1:0]  blk_id,
  // phase changes
  input  logic              ph_valid,
  output logic              ph_ready,
  input  logic [WID_W-1:0]  ph_warp,
  input  logic              ph_barrier,
  input  logic [PS_W-1:0]   ph_instr,
  // warp completion
  input  logic              end_valid,
  output logic              end_ready,
  input  logic [WID_W-1:0]  end_warp,
  // warp scheduler
  output logic [N_LWARPS-1:0] schedulable,
  output logic [NWC_W-1:0]  n_schedulable,
  output logic [N_LWARPS-1:0] warp_active,
  output logic [BID_W-1:0]  warp_block [N_LWARPS],
  output logic              coord_busy,
  // pipeline statistics
  input  logic              core_idle,
  input  logic              mem_idle,
  // swap-space base registers
  input  logic [ADDR_W-1:0] reg_swap_base,
  input  logic [ADDR_W-1:0] scr_swap_base,
  input  logic [ADDR_W-1:0] thr_swap_base,
  // register translation
  input  logic              reg_lk_valid,
  input  logic [WID_W-1:0]  reg_lk_warp,
  input  logic [LREG_W-1:0] reg_lk_reg,
  output logic              reg_rsp_valid,
  output logic              reg_rsp_onchip,
  output logic [ROW_W-1:0]  reg_rsp_row,
  output logic [ADDR_W-1:0] reg_rsp_swap_addr,
  output logic              reg_rsp_fault,
  // register set spilled to swap space (store 4 rows from reg_spill_row on)
  output logic              reg_spill_valid,
  output logic [ROW_W-1:0]  reg_spill_row,
  output logic [ADDR_W-1:0] reg_spill_swap_addr,
  // scratchpad translation
  input  logic              scr_lk_valid,
  input  logic [BID_W-1:0]  scr_lk_block,
  input  logic [SLA_W-1:0]  scr_lk_addr,
  output logic              scr_rsp_valid,
  output logic              scr_rsp_onchip,
  output logic [SPA_W-1:0]  scr_rsp_addr,
  output logic [ADDR_W-1:0] scr_rsp_swap_addr,
  output logic              scr_rsp_fault,
  // scratchpad set spilled to swap space (store 1 KB from scr_spill_addr on)
  output logic              scr_spill_valid,
  output logic [SPA_W-1:0]  scr_spill_addr,
  output logic [ADDR_W-1:0] scr_spill_swap_addr,
  // warp-slot translation
  input  logic              thr_lk_valid,
  input  logic [WID_W-1:0]  thr_lk_warp,
  output logic              thr_rsp_valid,
  output logic              thr_rsp_onchip,
  output logic [SLOT_W-1:0] thr_rsp_slot,
  output logic [ADDR_W-1:0] thr_rsp_swap_addr,
  output logic              thr_rsp_fault,
  // status and mechanism counters
  output logic [11:0]       free_thread, free_scr, free_reg,
  output logic [11:0]       ovs_thread, ovs_scr, ovs_reg,
  output logic [11:0]       th_thread, th_scr, th_reg,
  output logic [31:0]       cnt_ovs_thread, cnt_ovs_scr, cnt_ovs_reg,
  output logic [31:0]       cnt_wait, cnt_forced, cnt_barrier, cnt_swapin, cnt_reg_release,
  output logic [31:0]       cnt_thresh_up, cnt_thresh_down
);
  localparam int unsigned CW = 12;

  // ---------------- phase specifier decoding ----------------
  logic              ph_dec_v, blk_dec_v;
  phase_spec_t       ph_fields, blk_fields;
  logic [RSET_W-1:0] ph_rs, blk_rs;
  logic [SSET_W-1:0] ph_ss, blk_ss;

  phase_spec_decoder u_ph_dec (.in_valid(ph_valid && !ph_barrier), .instr(ph_instr),
    .out_valid(ph_dec_v), .spec(ph_fields), .reg_sets(ph_rs), .scr_sets(ph_ss));
  phase_spec_decoder u_blk_dec (.in_valid(blk_valid), .instr(blk_spec),
    .out_valid(blk_dec_v), .spec(blk_fields), .reg_sets(blk_rs), .scr_sets(blk_ss));

  // A phase change is either a barrier/fence or a decoded phase specifier;
  // a block carries the specifier of its first phase.
  logic ph_v_c, blk_v_c;
  assign ph_v_c  = ph_valid && (ph_barrier || ph_dec_v);
  assign blk_v_c = blk_valid && blk_dec_v;

  // ---------------- coordinator ----------------
  logic [2:0]        mt_valid, mt_ready, mt_done;
  mt_op_e            mt_kind;
  logic [WID_W-1:0]  mt_id;
  logic [SSET_W-1:0] mt_count;

  coordinator u_coord (
    .clk, .rst_n,
    .blk_req, .blk_valid(blk_v_c), .blk_ready, .blk_nwarps,
    .blk_reg_sets(blk_rs), .blk_scr_sets(blk_ss), .blk_id,
    .ph_valid(ph_v_c), .ph_ready, .ph_warp, .ph_barrier,
    .ph_reg_sets(ph_rs), .ph_scr_sets(ph_ss),
    .end_valid, .end_ready, .end_warp,
    .th_thread, .th_scr, .th_reg,
    .mt_valid, .mt_ready, .mt_kind, .mt_id, .mt_count, .mt_done,
    .free_thread, .free_scr, .free_reg, .ovs_thread, .ovs_scr, .ovs_reg,
    .schedulable, .n_schedulable, .warp_active, .warp_block, .busy(coord_busy),
    .cnt_ovs_thread, .cnt_ovs_scr, .cnt_ovs_reg, .cnt_wait, .cnt_forced,
    .cnt_barrier, .cnt_swapin, .cnt_reg_release);

  // ---------------- mapping tables ----------------
  localparam int unsigned T_PC = $clog2(N_PWARP_SLOTS + 1);
  localparam int unsigned T_OV = $clog2(N_LWARPS + 1);
  localparam int unsigned S_PC = $clog2(N_PSCR_SETS + 1);
  localparam int unsigned S_OV = $clog2(N_LBLOCKS * MAX_SCR_SETS_BLOCK + 1);
  localparam int unsigned R_PC = $clog2(N_PREG_SETS + 1);
  localparam int unsigned R_OV = $clog2(N_LWARPS * MAX_REG_SETS_WARP + 1);

  logic [T_PC-1:0] t_free;  logic [T_OV-1:0] t_ovs;
  logic [S_PC-1:0] s_free;  logic [S_OV-1:0] s_ovs;
  logic [R_PC-1:0] r_free;  logic [R_OV-1:0] r_ovs;
  logic            t_qcnt;
  logic [SSET_W-1:0] s_qcnt;
  logic [RSET_W-1:0] r_qcnt;

  thread_mapping_table #(.ADDR_W(ADDR_W)) u_thr_mt (
    .clk, .rst_n,
    .op_valid(mt_valid[RES_THREAD]), .op_ready(mt_ready[RES_THREAD]), .op_kind(mt_kind),
    .op_id(mt_id), .op_count(mt_count[0]), .op_done(mt_done[RES_THREAD]),
    .free_cnt(t_free), .oversub_cnt(t_ovs), .q_id(thr_lk_warp), .q_cnt(t_qcnt),
    .swap_base(thr_swap_base), .lk_valid(thr_lk_valid), .lk_warp(thr_lk_warp),
    .rsp_valid(thr_rsp_valid), .rsp_onchip(thr_rsp_onchip), .rsp_slot(thr_rsp_slot),
    .rsp_swap_addr(thr_rsp_swap_addr), .rsp_fault(thr_rsp_fault));

  scratch_mapping_table #(.ADDR_W(ADDR_W)) u_scr_mt (
    .clk, .rst_n,
    .op_valid(mt_valid[RES_SCRATCH]), .op_ready(mt_ready[RES_SCRATCH]), .op_kind(mt_kind),
    .op_id(mt_id[BID_W-1:0]), .op_count(mt_count), .op_done(mt_done[RES_SCRATCH]),
    .free_cnt(s_free), .oversub_cnt(s_ovs), .q_id(scr_lk_block), .q_cnt(s_qcnt),
    .swap_base(scr_swap_base), .lk_valid(scr_lk_valid), .lk_block(scr_lk_block),
    .lk_addr(scr_lk_addr),
    .rsp_valid(scr_rsp_valid), .rsp_onchip(scr_rsp_onchip), .rsp_addr(scr_rsp_addr),
    .rsp_swap_addr(scr_rsp_swap_addr), .rsp_fault(scr_rsp_fault),
    .spill_valid(scr_spill_valid), .spill_addr(scr_spill_addr),
    .spill_swap_addr(scr_spill_swap_addr));

  reg_mapping_table #(.ADDR_W(ADDR_W)) u_reg_mt (
    .clk, .rst_n,
    .op_valid(mt_valid[RES_REG]), .op_ready(mt_ready[RES_REG]), .op_kind(mt_kind),
    .op_id(mt_id), .op_count(RSET_W'(mt_count)), .op_done(mt_done[RES_REG]),
    .free_cnt(r_free), .oversub_cnt(r_ovs), .q_id(reg_lk_warp), .q_cnt(r_qcnt),
    .swap_base(reg_swap_base), .lk_valid(reg_lk_valid), .lk_warp(reg_lk_warp),
    .lk_reg(reg_lk_reg),
    .rsp_valid(reg_rsp_valid), .rsp_onchip(reg_rsp_onchip), .rsp_row(reg_rsp_row),
    .rsp_swap_addr(reg_rsp_swap_addr), .rsp_fault(reg_rsp_fault),
    .spill_valid(reg_spill_valid), .spill_row(reg_spill_row),
    .spill_swap_addr(reg_spill_swap_addr));

  assign free_thread = CW'(t_free);
  assign free_scr    = CW'(s_free);
  assign free_reg    = CW'(r_free);
  assign ovs_thread  = CW'(t_ovs);
  assign ovs_scr     = CW'(s_ovs);
  assign ovs_reg     = CW'(r_ovs);

  // ---------------- oversubscription thresholds ----------------
  localparam int unsigned T_TW = $clog2(N_PWARP_SLOTS + 1);
  localparam int unsigned S_TW = $clog2(N_PSCR_SETS + 1);
  localparam int unsigned R_TW = $clog2(N_PREG_SETS + 1);
  logic [T_TW-1:0] t_th;
  logic [S_TW-1:0] s_th;
  logic [R_TW-1:0] r_th;
  logic [2:0]      ep_end, th_up, th_dn;

  oversub_threshold #(.TOTAL(N_PWARP_SLOTS), .EPOCH(EPOCH)) u_th_thr (
    .clk, .rst_n, .idle_cyc(core_idle), .mem_cyc(mem_idle), .o_thresh(t_th),
    .epoch_end(ep_end[0]), .inc_evt(th_up[0]), .dec_evt(th_dn[0]));
  oversub_threshold #(.TOTAL(N_PSCR_SETS), .EPOCH(EPOCH)) u_th_scr (
    .clk, .rst_n, .idle_cyc(core_idle), .mem_cyc(mem_idle), .o_thresh(s_th),
    .epoch_end(ep_end[1]), .inc_evt(th_up[1]), .dec_evt(th_dn[1]));
  oversub_threshold #(.TOTAL(N_PREG_SETS), .EPOCH(EPOCH)) u_th_reg (
    .clk, .rst_n, .idle_cyc(core_idle), .mem_cyc(mem_idle), .o_thresh(r_th),
    .epoch_end(ep_end[2]), .inc_evt(th_up[2]), .dec_evt(th_dn[2]));

  assign th_thread = CW'(t_th);
  assign th_scr    = CW'(s_th);
  assign th_reg    = CW'(r_th);

  // count threshold moves (the three units move together; count the register one)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_thresh_up   <= '0;
      cnt_thresh_down <= '0;
    end else begin
      if (th_up[RES_REG]) cnt_thresh_up   <= cnt_thresh_up + 32'd1;
      if (th_dn[RES_REG]) cnt_thresh_down <= cnt_thresh_down + 32'd1;
    end
  end
endmodule
