// phase_spec_decoder -- recognises a phase specifier instruction and turns it
// into the resource requirements the coordinator works with.
//
// A phase specifier marks the start of a program phase and carries the
// resource needs of that phase (layout, MSB first):
//   [25:16] opcode  (10 bits)  [15:10] live registers per thread (6 bits)
//   [9:0]   live scratchpad    (10 bits)
// The field widths follow the published design. The opcode value and the
// 64-byte unit of the scratchpad field are this implementation's choices: the
// design states the amount is given in bytes, but 10 bits of bytes could not
// express the 4 KB phases of the evaluated kernels, so the field counts 64 B
// units (up to 65472 B, more than the 48 KB scratchpad).
// The decoder is purely combinational: in_valid with a matching opcode gives
// out_valid in the same cycle, with the number of register sets
// (ceil(regs/4)) and scratchpad sets (ceil(bytes/1 KB)) the next phase needs.
module phase_spec_decoder
  import zorua_pkg::*;
(
  input  logic                in_valid,
  input  logic [PS_W-1:0]     instr,
  output logic                out_valid,  // a phase specifier was decoded
  output phase_spec_t         spec,       // raw fields
  output logic [RSET_W-1:0]   reg_sets,   // register sets for the next phase
  output logic [SSET_W-1:0]   scr_sets    // scratchpad sets for the next phase
);
  logic [PS_OPC_W-1:0] opc;
  assign opc            = instr[PS_W-1 -: PS_OPC_W];
  assign spec.live_regs = instr[PS_REGS_W+PS_SCR_W-1 -: PS_REGS_W];
  assign spec.live_scr  = instr[PS_SCR_W-1:0];
  assign out_valid      = in_valid && (opc == PS_OPCODE);
  assign reg_sets       = reg_sets_needed(spec.live_regs);
  assign scr_sets       = scr_sets_needed(spec.live_scr);
endmodule
