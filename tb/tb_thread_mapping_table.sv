// tb_thread_mapping_table -- warp-slot translation at the full size
// (64 logical warps, 48 physical slots). All 64 warps get a slot: warps 0..47
// get physical slots 0..47, warps 48..63 go to swap space. Lookups must return
// the slot, or base + warp*512 for the saved state. A freed slot is then
// reused by a swapped warp that is released and allocated again.
module tb_thread_mapping_table;
  import zorua_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic op_valid, op_ready, op_done, op_count, q_cnt;
  mt_op_e op_kind;
  logic [5:0] op_id, q_id, lk_warp, rsp_slot, free_cnt;
  logic [6:0] oversub_cnt;
  logic [39:0] swap_base, rsp_swap_addr;
  logic lk_valid, rsp_valid, rsp_onchip, rsp_fault;
  thread_mapping_table dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic op(input mt_op_e k, input int w, input bit n);
    @(negedge clk); op_valid = 1; op_kind = k; op_id = 6'(w); op_count = n;
    @(negedge clk); op_valid = 0;
    while (!op_done) @(negedge clk);
  endtask

  task automatic look(input int w, input int slot);   // slot -1: swap
    @(negedge clk); lk_valid = 1; lk_warp = 6'(w);
    @(negedge clk); lk_valid = 0;
    @(negedge clk);
    chk(rsp_valid && !rsp_fault, "response");
    chk(rsp_onchip == (slot >= 0), $sformatf("onchip warp %0d", w));
    if (slot >= 0) chk(rsp_slot == 6'(slot), $sformatf("slot of warp %0d", w));
    else chk(rsp_swap_addr == swap_base + 40'(w * 512), "state address");
  endtask

  initial begin
    op_valid = 0; op_kind = MT_ALLOC; op_id = 0; op_count = 0; q_id = 0;
    lk_valid = 0; lk_warp = 0; swap_base = 40'h40_0000_0000;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int w = 0; w < 64; w++) op(MT_ALLOC, w, 1'b1);
    chk(free_cnt == 0 && oversub_cnt == 16, "48 physical, 16 swapped warps");
    for (int w = 0; w < 64; w++) look(w, (w < 48) ? w : -1);
    op(MT_RELEASE, 10, 1'b0);                  // warp 10 ends, slot 10 free
    chk(free_cnt == 1, "slot freed");
    op(MT_RELEASE, 60, 1'b0); op(MT_ALLOC, 60, 1'b1);   // warp 60 moves on chip
    look(60, 10);
    chk(oversub_cnt == 15, "one fewer swapped warp");
    @(negedge clk); lk_valid = 1; lk_warp = 10; @(negedge clk); lk_valid = 0; @(negedge clk);
    chk(rsp_fault && !rsp_onchip, "released warp has no slot");
    q_id = 60; #1; chk(q_cnt, "warp 60 holds a slot");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
