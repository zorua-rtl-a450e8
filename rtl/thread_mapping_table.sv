// thread_mapping_table -- warp-slot (thread slot) mapping table of one SM.
//
// Indexed by the logical warp ID (64 logical warps), each entry records
// whether the warp occupies one of the 48 physical warp slots, and which one,
// or whether its architectural state (PC and SIMT stack) is held in swap
// space: 64 entries of 7 bits, as in the published design.
//
// A lookup gives a logical warp ID. Two cycles later it returns the physical
// slot or the global-memory address of the warp's saved state,
// base + warp * STATE_BYTES. STATE_BYTES = 512 is this implementation's choice
// of how much room the saved PC and SIMT stack get. Each warp owns at most one
// slot (SETS_PER_ID = 1); allocate/release operations are those of
// mapping_table with count 1 or 0.
// Warp slots are not spilled by access frequency: a warp granted beyond the
// physical slots gets a slot in swap space itself and waits, unschedulable,
// until the coordinator moves it into a freed physical slot. Evicting the slot
// of a running warp would need the pipeline to save that warp's state at
// once, which the published design leaves open; so the spill ports of the
// generic table are left unconnected here.
module thread_mapping_table #(
  parameter int unsigned N_WARPS     = zorua_pkg::N_LWARPS,
  parameter int unsigned N_SLOTS     = zorua_pkg::N_PWARP_SLOTS,
  parameter int unsigned ADDR_W      = 40,
  parameter int unsigned STATE_BYTES = 512,
  localparam int unsigned ID_W       = $clog2(N_WARPS),
  localparam int unsigned PH_W       = $clog2(N_SLOTS),
  localparam int unsigned PC_W       = $clog2(N_SLOTS + 1),
  localparam int unsigned OV_W       = $clog2(N_WARPS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              op_valid,
  output logic              op_ready,
  input  zorua_pkg::mt_op_e op_kind,
  input  logic [ID_W-1:0]   op_id,
  input  logic              op_count,
  output logic              op_done,
  output logic [PC_W-1:0]   free_cnt,
  output logic [OV_W-1:0]   oversub_cnt,
  input  logic [ID_W-1:0]   q_id,
  output logic              q_cnt,
  // slot lookup
  input  logic [ADDR_W-1:0] swap_base,
  input  logic              lk_valid,
  input  logic [ID_W-1:0]   lk_warp,
  output logic              rsp_valid,
  output logic              rsp_onchip,
  output logic [PH_W-1:0]   rsp_slot,
  output logic [ADDR_W-1:0] rsp_swap_addr,
  output logic              rsp_fault
);
  logic [ID_W-1:0] t_lin;

  mapping_table #(.N_ID(N_WARPS), .SETS_PER_ID(1), .N_PHYS(N_SLOTS), .SPILL_LFU(1'b0)) u_tab (
    .clk, .rst_n, .op_valid, .op_ready, .op_kind, .op_id, .op_count, .op_done,
    .free_cnt, .oversub_cnt,
    .lk_valid, .lk_id(lk_warp), .lk_set(1'b0),
    .rsp_valid, .rsp_phys_valid(rsp_onchip), .rsp_phys(rsp_slot), .rsp_lin(t_lin), .rsp_fault,
    .spill_valid(), .spill_phys(), .spill_lin(),
    .q_id, .q_cnt);

  assign rsp_swap_addr = swap_base + ADDR_W'(t_lin) * ADDR_W'(STATE_BYTES);
endmodule
