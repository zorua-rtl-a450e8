// tb_phase_spec_decoder -- exhaustive check of the phase specifier decoder.
// Every register-field and scratchpad-field value is decoded with the right
// opcode and with a wrong one; the expected set counts are computed here with
// integer arithmetic (ceil(regs/4), min(48, ceil(units*64/1024))).
module tb_phase_spec_decoder;
  import zorua_pkg::*;
  logic in_valid, out_valid;
  logic [PS_W-1:0] instr;
  phase_spec_t spec;
  logic [RSET_W-1:0] reg_sets;
  logic [SSET_W-1:0] scr_sets;
  phase_spec_decoder dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int r = 0; r < 64; r++) begin
      for (int s = 0; s < 1024; s += 7) begin
        automatic int er = (r + 3) / 4;
        automatic int es = (s * 64 + 1023) / 1024;
        if (es > 48) es = 48;
        in_valid = 1; instr = {PS_OPCODE, 6'(r), 10'(s)}; #1;
        chk(out_valid, "phase specifier not recognised");
        chk(spec.live_regs == 6'(r) && spec.live_scr == 10'(s), "fields");
        chk(reg_sets == RSET_W'(er), $sformatf("reg_sets r=%0d got %0d", r, reg_sets));
        chk(scr_sets == SSET_W'(es), $sformatf("scr_sets s=%0d got %0d", s, scr_sets));
        instr = {PS_OPCODE ^ 10'(1 << (r % 10)), 6'(r), 10'(s)}; #1;
        chk(!out_valid, "other opcode accepted");
        in_valid = 0; instr = {PS_OPCODE, 6'(r), 10'(s)}; #1;
        chk(!out_valid, "valid without in_valid");
      end
    end
    // the NQU phases of the evaluation: 4224 B -> 5 sets, 384 B -> 1 set
    in_valid = 1; instr = {PS_OPCODE, 6'd20, 10'(4224 / 64)}; #1;
    chk(scr_sets == 5 && reg_sets == 5, "4224 B phase");
    instr = {PS_OPCODE, 6'd8, 10'(384 / 64)}; #1;
    chk(scr_sets == 1 && reg_sets == 2, "384 B phase");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
