// zorua_pkg -- shared sizes, types and helper functions of the per-SM
// resource-virtualization hardware (coordinator, mapping tables, threshold
// units).
//
// The default sizes describe one SM of the Fermi-class GPU the design was
// evaluated on: 48 physical warp slots, 32768 registers, 48 KB of scratchpad,
// 64 logical (virtual) warps and 16 logical thread blocks. Registers are
// managed in sets of 4*warp_size registers (4 registers per thread of one
// warp), scratchpad in sets of 1 KB. These numbers, the 9/7/7-bit mapping
// table entries they imply, the 10/6/10-bit phase specifier layout and the
// threshold-algorithm constants (epoch 2048, delta threshold 16, default 10%,
// step 4%) follow the published design. The 64-byte unit of the scratchpad
// field of the phase specifier and the per-warp architectural state size used
// for thread-slot swap addresses are this implementation's choices.
package zorua_pkg;

  // ---------------- machine sizes (Fermi configuration) ----------------
  localparam int unsigned WARP_SIZE          = 32;
  localparam int unsigned N_LWARPS           = 64;    // logical warps per SM
  localparam int unsigned N_LBLOCKS          = 16;    // logical thread blocks per SM
  localparam int unsigned N_PWARP_SLOTS      = 48;    // physical warp slots per SM
  localparam int unsigned N_REGS             = 32768; // physical registers per SM
  localparam int unsigned REGS_PER_SET_THR   = 4;     // registers per thread in one set
  localparam int unsigned REG_SET_SIZE       = REGS_PER_SET_THR * WARP_SIZE; // 128
  localparam int unsigned N_PREG_SETS        = N_REGS / REG_SET_SIZE;         // 256
  localparam int unsigned MAX_REG_SETS_WARP  = 16;    // logical register sets per warp
  localparam int unsigned SCRATCH_BYTES      = 48 * 1024;
  localparam int unsigned SCR_SET_BYTES      = 1024;
  localparam int unsigned N_PSCR_SETS        = SCRATCH_BYTES / SCR_SET_BYTES; // 48
  localparam int unsigned MAX_SCR_SETS_BLOCK = 48;    // logical scratchpad sets per block

  // ---------------- phase specifier instruction ----------------
  localparam int unsigned PS_OPC_W  = 10;
  localparam int unsigned PS_REGS_W = 6;
  localparam int unsigned PS_SCR_W  = 10;
  localparam int unsigned PS_W      = PS_OPC_W + PS_REGS_W + PS_SCR_W; // 26
  localparam int unsigned PS_SCR_UNIT_BYTES = 64;     // unit of the scratchpad field
  localparam logic [PS_OPC_W-1:0] PS_OPCODE = 10'h3A5; // opcode value of a phase specifier

  // ---------------- widths ----------------
  localparam int unsigned LW_W  = $clog2(N_LWARPS);          // 6
  localparam int unsigned LB_W  = $clog2(N_LBLOCKS);         // 4
  localparam int unsigned RSET_W = $clog2(MAX_REG_SETS_WARP + 1); // 5: 0..16
  localparam int unsigned SSET_W = $clog2(MAX_SCR_SETS_BLOCK + 1); // 6: 0..48
  localparam int unsigned NW_W  = $clog2(N_LWARPS + 1);      // 7: warps in a block, 0..64

  // Resource indices used by the coordinator and its statistics.
  typedef enum logic [1:0] {RES_THREAD = 2'd0, RES_SCRATCH = 2'd1, RES_REG = 2'd2} res_e;

  // Mapping-table operations. ALLOC appends `count` sets to an ID;
  // RELEASE frees sets from the top until `count` remain.
  typedef enum logic {MT_ALLOC = 1'b0, MT_RELEASE = 1'b1} mt_op_e;

  // Decoded phase specifier.
  typedef struct packed {
    logic [PS_REGS_W-1:0] live_regs;   // live registers per thread in the next phase
    logic [PS_SCR_W-1:0]  live_scr;    // live scratchpad, in PS_SCR_UNIT_BYTES units
  } phase_spec_t;

  // Register sets needed for n live registers per thread: ceil(n/4).
  function automatic logic [RSET_W-1:0] reg_sets_needed(input logic [PS_REGS_W-1:0] n);
    logic [PS_REGS_W:0] t;
    t = {1'b0, n} + (PS_REGS_W+1)'(REGS_PER_SET_THR - 1);
    return RSET_W'(t / (PS_REGS_W+1)'(REGS_PER_SET_THR));
  endfunction

  // Scratchpad sets needed for u units of 64 B: ceil(u*64/1024) = ceil(u/16),
  // saturated to the per-block maximum.
  function automatic logic [SSET_W-1:0] scr_sets_needed(input logic [PS_SCR_W-1:0] u);
    localparam int unsigned UNITS_PER_SET = SCR_SET_BYTES / PS_SCR_UNIT_BYTES; // 16
    logic [PS_SCR_W:0] t;
    t = {1'b0, u} + (PS_SCR_W+1)'(UNITS_PER_SET - 1);
    t = t / (PS_SCR_W+1)'(UNITS_PER_SET);
    if (t > (PS_SCR_W+1)'(MAX_SCR_SETS_BLOCK)) t = (PS_SCR_W+1)'(MAX_SCR_SETS_BLOCK);
    return SSET_W'(t);
  endfunction

endpackage
