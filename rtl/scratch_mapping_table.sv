// scratch_mapping_table -- scratchpad mapping table of one SM.
//
// Scratchpad is virtualized in 1 KB sets. The table is indexed by the thread
// block ID and the logical scratchpad set (logical byte address / 1024) and
// holds a valid bit and a 6-bit physical set number (48 sets = 48 KB): 16 x 48
// entries of 7 bits, as in the published design.
//
// A lookup gives a block ID and a logical scratchpad byte address. Two cycles
// later it returns the physical scratchpad byte address (set*1024 + offset)
// or, for a set mapped to swap space, the global-memory address
// base + (block*48 + set)*1024 + offset. Allocate/release operations are those
// of mapping_table; scratchpad is allocated per block. When the physical sets
// run out, the least frequently accessed set is spilled: for one cycle
// spill_valid gives its physical byte address (spill_addr) and swap-space
// address (spill_swap_addr), 1 KB each, so that the SM can store the data.
module scratch_mapping_table #(
  parameter int unsigned N_BLOCKS   = zorua_pkg::N_LBLOCKS,
  parameter int unsigned SETS_BLOCK = zorua_pkg::MAX_SCR_SETS_BLOCK,
  parameter int unsigned N_PSETS    = zorua_pkg::N_PSCR_SETS,
  parameter int unsigned ADDR_W     = 40,
  localparam int unsigned SET_BYTES = zorua_pkg::SCR_SET_BYTES,
  localparam int unsigned OFF_W     = $clog2(SET_BYTES),
  localparam int unsigned ID_W      = $clog2(N_BLOCKS),
  localparam int unsigned SET_W     = $clog2(SETS_BLOCK),
  localparam int unsigned CNT_W     = $clog2(SETS_BLOCK + 1),
  localparam int unsigned PH_W      = $clog2(N_PSETS),
  localparam int unsigned PC_W      = $clog2(N_PSETS + 1),
  localparam int unsigned OV_W      = $clog2(N_BLOCKS * SETS_BLOCK + 1),
  localparam int unsigned LA_W      = SET_W + OFF_W,
  localparam int unsigned PA_W      = PH_W + OFF_W
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
  // scratchpad lookup
  input  logic [ADDR_W-1:0] swap_base,
  input  logic              lk_valid,
  input  logic [ID_W-1:0]   lk_block,
  input  logic [LA_W-1:0]   lk_addr,
  output logic              rsp_valid,
  output logic              rsp_onchip,
  output logic [PA_W-1:0]   rsp_addr,
  output logic [ADDR_W-1:0] rsp_swap_addr,
  // spill of a resident scratchpad set (1 KB from spill_addr to spill_swap_addr)
  output logic              spill_valid,
  output logic [PA_W-1:0]   spill_addr,
  output logic [ADDR_W-1:0] spill_swap_addr,
  output logic              rsp_fault
);
  localparam int unsigned LIN_W = $clog2(N_BLOCKS * SETS_BLOCK);

  logic [PH_W-1:0]  t_phys;
  logic [LIN_W-1:0] t_lin, s_lin;
  logic [PH_W-1:0]  s_phys;
  logic [OFF_W-1:0] off_d1, off_d2;

  mapping_table #(.N_ID(N_BLOCKS), .SETS_PER_ID(SETS_BLOCK), .N_PHYS(N_PSETS)) u_tab (
    .clk, .rst_n, .op_valid, .op_ready, .op_kind, .op_id, .op_count, .op_done,
    .free_cnt, .oversub_cnt,
    .lk_valid, .lk_id(lk_block), .lk_set(lk_addr[LA_W-1:OFF_W]),
    .rsp_valid, .rsp_phys_valid(rsp_onchip), .rsp_phys(t_phys), .rsp_lin(t_lin), .rsp_fault,
    .spill_valid, .spill_phys(s_phys), .spill_lin(s_lin),
    .q_id, .q_cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      off_d1 <= '0;
      off_d2 <= '0;
    end else begin
      off_d1 <= lk_addr[OFF_W-1:0];
      off_d2 <= off_d1;
    end
  end

  assign rsp_addr      = {t_phys, off_d2};
  assign rsp_swap_addr = swap_base + ADDR_W'({t_lin, off_d2});
  assign spill_addr      = {s_phys, OFF_W'(0)};
  assign spill_swap_addr = swap_base + ADDR_W'({s_lin, OFF_W'(0)});
endmodule
