// tb_scratch_mapping_table -- scratchpad translation at the full size
// (16 blocks x 48 sets of 1 KB, 48 physical sets = 48 KB).
// Block 2 takes 30 sets and is accessed at random; block 5 then takes 25
// sets: 18 free ones and 7 won by spilling the least frequently accessed
// resident sets. A model of allocation and access counts predicts every
// spill (physical and swap address of the victim); byte addresses are
// translated and compared with set*1024 + offset on chip and
// base + (block*48 + set)*1024 + offset in swap.
module tb_scratch_mapping_table;
  import zorua_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic op_valid, op_ready, op_done;
  mt_op_e op_kind;
  logic [3:0] op_id, q_id, lk_block;
  logic [5:0] op_count, q_cnt, free_cnt;
  logic [9:0] oversub_cnt;
  logic [39:0] swap_base, rsp_swap_addr;
  logic lk_valid, rsp_valid, rsp_onchip, rsp_fault;
  logic [15:0] lk_addr, rsp_addr, spill_addr;
  logic spill_valid;
  logic [39:0] spill_swap_addr;
  scratch_mapping_table dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int m_cnt [16];
  int m_phys [16][48];
  int next_free;
  int m_acc [48], m_own [48];
  int exp_a [$], act_a [$];
  longint exp_s [$], act_s [$];
  always @(posedge clk) if (rst_n && spill_valid) begin
    act_a.push_back(int'(spill_addr)); act_s.push_back(longint'(spill_swap_addr));
  end
  task automatic chk_spills();
    chk(act_a.size() == exp_a.size(), $sformatf("%0d spills, expected %0d", act_a.size(), exp_a.size()));
    while (act_a.size() > 0 && exp_a.size() > 0) begin
      int e = exp_a.pop_front(), a = act_a.pop_front();
      longint es = exp_s.pop_front(), as = act_s.pop_front();
      chk(a == e && as == es, $sformatf("spill %0d %h, expected %0d %h", a, as, e, es));
    end
  endtask
  task automatic model_alloc(input int b, input int s);
    if (next_free < 48) begin
      m_phys[b][s] = next_free; next_free++;
    end else begin
      int v = 0;
      for (int i = 1; i < 48; i++) if (m_acc[i] < m_acc[v]) v = i;
      m_phys[m_own[v] / 48][m_own[v] % 48] = -1;
      exp_a.push_back(v * 1024);
      exp_s.push_back(longint'(swap_base) + longint'(m_own[v]) * 1024);
      m_phys[b][s] = v;
    end
    m_acc[m_phys[b][s]] = 1; m_own[m_phys[b][s]] = b * 48 + s;
  endtask

  task automatic op(input mt_op_e k, input int b, input int n);
    @(negedge clk); op_valid = 1; op_kind = k; op_id = 4'(b); op_count = 6'(n);
    @(negedge clk); op_valid = 0;
    while (!op_done) @(negedge clk);
  endtask

  task automatic translate(input int b, input int a);
    automatic int s = a / 1024;
    @(negedge clk); lk_valid = 1; lk_block = 4'(b); lk_addr = 16'(a);
    @(negedge clk); lk_valid = 0; lk_addr = 16'($urandom);
    @(negedge clk); lk_addr = 16'($urandom);
    chk(rsp_valid, "two-cycle response");
    chk(rsp_fault == (s >= m_cnt[b]), "fault");
    if (s < m_cnt[b]) begin
      chk(rsp_onchip == (m_phys[b][s] >= 0), "onchip");
      if (m_phys[b][s] >= 0) begin
        chk(rsp_addr == 16'(m_phys[b][s] * 1024 + a % 1024), "physical address");
        if (m_acc[m_phys[b][s]] < 15) m_acc[m_phys[b][s]]++;
      end else chk(rsp_swap_addr == swap_base + 40'((b * 48 + s) * 1024 + a % 1024), "swap address");
    end
  endtask

  initial begin
    op_valid = 0; op_kind = MT_ALLOC; op_id = 0; op_count = 0; q_id = 0;
    lk_valid = 0; lk_block = 0; lk_addr = 0; swap_base = 40'h80_0000_0000;
    next_free = 0;
    for (int b = 0; b < 16; b++) m_cnt[b] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    chk(free_cnt == 48, "48 free scratchpad sets after reset");
    op(MT_ALLOC, 2, 30); m_cnt[2] = 30;
    for (int s = 0; s < 30; s++) model_alloc(2, s);
    for (int k = 0; k < 100; k++) translate(2, $urandom_range(0, 30 * 1024 - 1));
    op(MT_ALLOC, 5, 25); m_cnt[5] = 25;
    for (int s = 0; s < 25; s++) model_alloc(5, s);
    chk(free_cnt == 0 && oversub_cnt == 7, "7 sets in swap space");
    chk(exp_a.size() == 7, "model predicts 7 spills");
    chk_spills();
    for (int k = 0; k < 400; k++) translate(($urandom_range(0, 1) != 0) ? 2 : 5, $urandom_range(0, 49151));
    translate(7, 100);
    begin
      int on = 0;
      for (int s = 0; s < 30; s++) if (m_phys[2][s] >= 0) on++;
      op(MT_RELEASE, 2, 0); m_cnt[2] = 0;
      chk(free_cnt == 6'(on), "block 2's on-chip scratchpad released");
    end
    translate(2, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
