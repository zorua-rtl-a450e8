// tb_reg_mapping_table -- register translation at the full Fermi size
// (64 warps x 16 sets, 256 physical sets of 128 registers).
// Warps are given register sets until the 256 physical sets run out; random
// translations then build up access counts, and further sets spill the least
// frequently accessed resident sets. The testbench keeps its own allocation
// and access-count model, predicts every physical row (set*4 + reg%4), swap
// address base + ((warp*16 + reg/4)*4 + reg%4)*128 and spill (row and swap
// address of the victim), and checks the two-cycle latency.
module tb_reg_mapping_table;
  import zorua_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic op_valid, op_ready, op_done;
  mt_op_e op_kind;
  logic [5:0] op_id, q_id, lk_warp;
  logic [4:0] op_count, q_cnt;
  logic [8:0] free_cnt;
  logic [10:0] oversub_cnt;
  logic [39:0] swap_base, rsp_swap_addr;
  logic lk_valid, rsp_valid, rsp_onchip, rsp_fault;
  logic [5:0] lk_reg;
  logic [9:0] rsp_row, spill_row;
  logic spill_valid;
  logic [39:0] spill_swap_addr;
  reg_mapping_table dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int m_cnt [64];
  int m_phys [64][16];   // -1: swap
  int next_free;
  int m_acc [256], m_own [256];
  int exp_row [$];
  longint exp_addr [$];
  int n_spills = 0;

  int act_row [$];
  longint act_addr [$];
  always @(posedge clk) if (rst_n && spill_valid) begin
    n_spills++;
    act_row.push_back(int'(spill_row)); act_addr.push_back(longint'(spill_swap_addr));
  end

  // spills seen so far against the model's, in order
  task automatic chk_spills();
    chk(act_row.size() == exp_row.size(), $sformatf("%0d spills, expected %0d", act_row.size(), exp_row.size()));
    while (act_row.size() > 0 && exp_row.size() > 0) begin
      int r = exp_row.pop_front(), ar = act_row.pop_front();
      longint e = exp_addr.pop_front(), aa = act_addr.pop_front();
      chk(ar == r && aa == e, $sformatf("spill row %0d addr %h, expected %0d %h", ar, aa, r, e));
    end
  endtask

  // model of one allocated set: lowest free physical set, else the least
  // frequently accessed one (lowest number among equals) is spilled
  task automatic model_alloc(input int w, input int s);
    if (next_free < 256) begin
      m_phys[w][s] = next_free; next_free++;
    end else begin
      int v = 0;
      for (int i = 1; i < 256; i++) if (m_acc[i] < m_acc[v]) v = i;
      m_phys[m_own[v] / 16][m_own[v] % 16] = -1;
      exp_row.push_back(v * 4);
      exp_addr.push_back(longint'(swap_base) + longint'(m_own[v]) * 4 * 128);
      m_phys[w][s] = v;
    end
    m_acc[m_phys[w][s]] = 1; m_own[m_phys[w][s]] = w * 16 + s;
  endtask

  task automatic op(input mt_op_e k, input int w, input int n);
    @(negedge clk); op_valid = 1; op_kind = k; op_id = 6'(w); op_count = 5'(n);
    @(negedge clk); op_valid = 0;
    while (!op_done) @(negedge clk);
  endtask

  task automatic translate(input int w, input int r);
    automatic int s = r / 4;
    @(negedge clk); lk_valid = 1; lk_warp = 6'(w); lk_reg = 6'(r);
    @(negedge clk); lk_valid = 0; lk_reg = 6'($urandom);
    @(negedge clk); lk_reg = 6'($urandom);
    chk(rsp_valid, "two-cycle response");
    chk(rsp_fault == (s >= m_cnt[w]), "fault");
    if (s < m_cnt[w]) begin
      chk(rsp_onchip == (m_phys[w][s] >= 0), $sformatf("onchip w%0d r%0d", w, r));
      if (m_phys[w][s] >= 0) begin
        chk(rsp_row == 10'(m_phys[w][s] * 4 + r % 4), $sformatf("row w%0d r%0d", w, r));
        if (m_acc[m_phys[w][s]] < 15) m_acc[m_phys[w][s]]++;
      end else
        chk(rsp_swap_addr == swap_base + 40'(((w * 16 + s) * 4 + r % 4) * 128),
            $sformatf("swap addr w%0d r%0d", w, r));
    end
  endtask

  initial begin
    op_valid = 0; op_kind = MT_ALLOC; op_id = 0; op_count = 0; q_id = 0;
    lk_valid = 0; lk_warp = 0; lk_reg = 0; swap_base = 40'h12_3400_0000;
    next_free = 0;
    for (int w = 0; w < 64; w++) m_cnt[w] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    chk(free_cnt == 256, "256 free register sets after reset");
    // 20 warps x 14 sets = 280 sets: 24 sets spill to swap space
    for (int w = 0; w < 18; w++) begin
      op(MT_ALLOC, w, 14);
      for (int s = 0; s < 14; s++) model_alloc(w, s);
      m_cnt[w] = 14;
    end
    chk_spills();
    for (int k = 0; k < 600; k++) translate($urandom_range(0, 17), $urandom_range(0, 55));
    for (int w = 18; w < 20; w++) begin
      op(MT_ALLOC, w, 14);
      for (int s = 0; s < 14; s++) model_alloc(w, s);
      m_cnt[w] = 14;
    end
    repeat (2) @(negedge clk);
    chk_spills();
    chk(n_spills == 24, $sformatf("24 spills (%0d)", n_spills));
    chk(free_cnt == 0, "physical register sets exhausted");
    chk(oversub_cnt == 24, "24 register sets in swap space");
    q_id = 19; #1; chk(q_cnt == 14, "warp 19 owns 14 sets");
    for (int k = 0; k < 300; k++) translate($urandom_range(0, 21), $urandom_range(0, 63));
    for (int r = 0; r < 64; r++) translate(19, r);
    // release: warp 3 keeps 2 sets; warp 19 frees everything
    begin
      int on = 0, sw = 0;
      for (int s = 2; s < 14; s++) if (m_phys[3][s] >= 0) on++; else sw++;
      op(MT_RELEASE, 3, 2); m_cnt[3] = 2;
      chk(free_cnt == 9'(on), "warp 3's on-chip sets back in the free pool");
      chk(oversub_cnt == 11'(24 - sw), "swap count after release");
    end
    op(MT_RELEASE, 19, 0); m_cnt[19] = 0;
    for (int r = 0; r < 64; r++) translate(3, r);
    for (int r = 0; r < 8; r++) translate(19, r);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
