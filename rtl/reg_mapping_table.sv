// reg_mapping_table -- register mapping table of one SM.
//
// Registers are virtualized in sets of 4*warp_size registers, i.e. four
// registers of every thread of a warp. The table is indexed by the warp ID and
// the logical register set (logical register number / 4) and holds a valid bit
// and an 8-bit physical register-set number (256 sets of 128 registers =
// 32768 registers), 64 x 16 entries of 9 bits, as in the published design.
//
// A lookup from the operand collector gives a warp and a per-thread logical
// register number. Two cycles later (the mapping-table access penalty) it
// returns either the physical register-file row (row = set*4 + reg%4, one row
// holds one register of all 32 threads) or, for a set mapped to swap space, the
// global-memory address base + ((warp*16 + set)*4 + reg%4) * 128 B, formed from
// the warp ID, the logical register and a swap base register. The 128-byte row
// layout of the swap space is this implementation's choice.
// Allocate/release operations are those of mapping_table. When the physical
// register sets run out, the least frequently accessed set is spilled: for one
// cycle spill_valid gives its first register-file row (spill_row, 4 rows) and
// the swap-space address of its first row (spill_swap_addr, 4 x 128 B) so that
// the SM can store the data.
module reg_mapping_table #(
  parameter int unsigned N_WARPS    = zorua_pkg::N_LWARPS,
  parameter int unsigned SETS_WARP  = zorua_pkg::MAX_REG_SETS_WARP,
  parameter int unsigned N_PSETS    = zorua_pkg::N_PREG_SETS,
  parameter int unsigned ADDR_W     = 40,
  localparam int unsigned REGS_SET  = zorua_pkg::REGS_PER_SET_THR,
  localparam int unsigned ROW_BYTES = zorua_pkg::WARP_SIZE * 4,
  localparam int unsigned ID_W      = $clog2(N_WARPS),
  localparam int unsigned SET_W     = $clog2(SETS_WARP),
  localparam int unsigned CNT_W     = $clog2(SETS_WARP + 1),
  localparam int unsigned PH_W      = $clog2(N_PSETS),
  localparam int unsigned PC_W      = $clog2(N_PSETS + 1),
  localparam int unsigned OV_W      = $clog2(N_WARPS * SETS_WARP + 1),
  localparam int unsigned LREG_W    = $clog2(SETS_WARP * REGS_SET),
  localparam int unsigned ROW_W     = $clog2(N_PSETS * REGS_SET)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              op_valid,
  output logic              op_ready,
  input  zorua_pkg::mt_op_e op_kind,
  input  logic [ID_W-1:0]   op_id,
  input  logic [CNT_W-1:0]  op_count,
  output logic              op_done,
  output logic [PC_W-1:0]   free_cnt,
  output logic [OV_W-1:0]   oversub_cnt,
  input  logic [ID_W-1:0]   q_id,
  output logic [CNT_W-1:0]  q_cnt,
  // register lookup
  input  logic [ADDR_W-1:0] swap_base,
  input  logic              lk_valid,
  input  logic [ID_W-1:0]   lk_warp,
  input  logic [LREG_W-1:0] lk_reg,
  output logic              rsp_valid,
  output logic              rsp_onchip,
  output logic [ROW_W-1:0]  rsp_row,
  output logic [ADDR_W-1:0] rsp_swap_addr,
  output logic              rsp_fault,
  // spill of a resident register set
  output logic              spill_valid,
  output logic [ROW_W-1:0]  spill_row,
  output logic [ADDR_W-1:0] spill_swap_addr
);
  localparam int unsigned LIN_W = $clog2(N_WARPS * SETS_WARP);
  localparam int unsigned OFF_W = $clog2(REGS_SET);

  logic [PH_W-1:0]  t_phys;
  logic [LIN_W-1:0] t_lin, s_lin;
  logic [PH_W-1:0]  s_phys;
  logic [OFF_W-1:0] off_d1, off_d2;

  mapping_table #(.N_ID(N_WARPS), .SETS_PER_ID(SETS_WARP), .N_PHYS(N_PSETS)) u_tab (
    .clk, .rst_n, .op_valid, .op_ready, .op_kind, .op_id, .op_count, .op_done,
    .free_cnt, .oversub_cnt,
    .lk_valid, .lk_id(lk_warp), .lk_set(lk_reg[LREG_W-1:OFF_W]),
    .rsp_valid, .rsp_phys_valid(rsp_onchip), .rsp_phys(t_phys), .rsp_lin(t_lin), .rsp_fault,
    .spill_valid, .spill_phys(s_phys), .spill_lin(s_lin),
    .q_id, .q_cnt);

  // carry the register offset within the set alongside the table pipeline
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      off_d1 <= '0;
      off_d2 <= '0;
    end else begin
      off_d1 <= lk_reg[OFF_W-1:0];
      off_d2 <= off_d1;
    end
  end

  assign rsp_row       = {t_phys, off_d2};
  assign rsp_swap_addr = swap_base + ADDR_W'({t_lin, off_d2}) * ADDR_W'(ROW_BYTES);
  assign spill_row       = {s_phys, OFF_W'(0)};
  assign spill_swap_addr = swap_base + ADDR_W'({s_lin, OFF_W'(0)}) * ADDR_W'(ROW_BYTES);
endmodule
