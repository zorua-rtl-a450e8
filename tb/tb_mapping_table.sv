// tb_mapping_table -- self-checking test of the generic mapping table.
// Uses a small table (4 IDs x 4 sets, 6 physical sets) so that the physical
// pool runs out. A reference model in the testbench (per-ID lists of
// valid/physical entries plus a free list) predicts every allocation, the
// free and oversubscribed counters, and every lookup response including the
// two-cycle latency and the fault flag. The model also keeps the access
// count of every physical set (lookups served on chip, 4-bit saturating,
// 1 after allocation) and predicts which set is spilled when the pool is
// empty; every spill_valid pulse is compared with the predicted victim and
// its owner, in order.
module tb_mapping_table;
  import zorua_pkg::*;
  localparam int NID = 4, SPI = 4, NP = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic op_valid, op_ready, op_done;
  mt_op_e op_kind;
  logic [1:0] op_id, lk_id, q_id;
  logic [2:0] op_count, q_cnt;
  logic [2:0] free_cnt;
  logic [4:0] oversub_cnt;
  logic lk_valid, rsp_valid, rsp_phys_valid, rsp_fault;
  logic [1:0] lk_set;
  logic [2:0] rsp_phys;
  logic [3:0] rsp_lin;
  logic spill_valid;
  logic [2:0] spill_phys;
  logic [3:0] spill_lin;

  mapping_table #(.N_ID(NID), .SETS_PER_ID(SPI), .N_PHYS(NP)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // reference model
  int m_cnt [NID];
  bit m_val [NID][SPI];
  int m_phy [NID][SPI];
  bit m_free [NP];
  int m_ovs;
  int m_acc [NP];
  int m_own [NP];          // linear index id*SPI+set of the holder
  int exp_phys [$], exp_lin [$];
  int n_spills = 0;

  int act_phys [$], act_lin [$];
  always @(posedge clk) if (rst_n && spill_valid) begin
    n_spills++;
    act_phys.push_back(int'(spill_phys)); act_lin.push_back(int'(spill_lin));
  end

  // compare the spills seen during an operation with the model's
  task automatic chk_spills();
    chk(act_phys.size() == exp_phys.size(),
        $sformatf("%0d spills, expected %0d", act_phys.size(), exp_phys.size()));
    while (act_phys.size() > 0 && exp_phys.size() > 0) begin
      int p = exp_phys.pop_front(), l = exp_lin.pop_front();
      int ap = act_phys.pop_front(), al = act_lin.pop_front();
      chk(ap == p && al == l, $sformatf("spill phys %0d lin %0d exp %0d %0d", ap, al, p, l));
    end
    act_phys.delete(); act_lin.delete(); exp_phys.delete(); exp_lin.delete();
  endtask

  function automatic int m_free_cnt();
    int n = 0;
    for (int i = 0; i < NP; i++) n += m_free[i];
    return n;
  endfunction

  task automatic do_op(input mt_op_e k, input int id, input int n);
    int cyc = 0;
    @(negedge clk);
    op_valid = 1; op_kind = k; op_id = 2'(id); op_count = 3'(n);
    @(negedge clk);
    op_valid = 0;
    while (!op_done) begin @(negedge clk); cyc++; end
    // model
    if (k == MT_ALLOC) begin
      int tgt = (m_cnt[id] + n > SPI) ? SPI : m_cnt[id] + n;
      while (m_cnt[id] < tgt) begin
        int f = -1;
        for (int i = NP - 1; i >= 0; i--) if (m_free[i]) f = i;
        if (f < 0) begin
          // least frequently accessed set, lowest number among equals
          int v = 0;
          for (int i = 1; i < NP; i++) if (m_acc[i] < m_acc[v]) v = i;
          m_val[m_own[v] / SPI][m_own[v] % SPI] = 0;
          exp_phys.push_back(v); exp_lin.push_back(m_own[v]);
          m_ovs++;
          f = v;
        end else m_free[f] = 0;
        m_val[id][m_cnt[id]] = 1; m_phy[id][m_cnt[id]] = f;
        m_acc[f] = 1; m_own[f] = id * SPI + m_cnt[id];
        m_cnt[id]++;
      end
    end else begin
      while (m_cnt[id] > n) begin
        m_cnt[id]--;
        if (m_val[id][m_cnt[id]]) m_free[m_phy[id][m_cnt[id]]] = 1; else m_ovs--;
        m_val[id][m_cnt[id]] = 0;
      end
    end
    chk_spills();
    chk(free_cnt == 3'(m_free_cnt()), $sformatf("free_cnt %0d exp %0d", free_cnt, m_free_cnt()));
    chk(oversub_cnt == 5'(m_ovs), $sformatf("oversub_cnt %0d exp %0d", oversub_cnt, m_ovs));
    q_id = 2'(id); #1;
    chk(q_cnt == 3'(m_cnt[id]), "q_cnt");
  endtask

  task automatic lookup_all();
    for (int id = 0; id < NID; id++)
      for (int s = 0; s < SPI; s++) begin
        @(negedge clk); lk_valid = 1; lk_id = 2'(id); lk_set = 2'(s);
        @(negedge clk); lk_valid = 0;
        chk(!rsp_valid, "response earlier than two cycles");
        @(negedge clk);
        chk(rsp_valid, "response after two cycles");
        chk(rsp_lin == 4'(id * SPI + s), "rsp_lin");
        chk(rsp_fault == (s >= m_cnt[id]), $sformatf("fault id%0d s%0d", id, s));
        if (s < m_cnt[id]) begin
          chk(rsp_phys_valid == m_val[id][s], $sformatf("valid id%0d s%0d", id, s));
          if (m_val[id][s]) begin
            chk(rsp_phys == 3'(m_phy[id][s]), $sformatf("phys id%0d s%0d", id, s));
            if (m_acc[m_phy[id][s]] < 15) m_acc[m_phy[id][s]]++;
          end
        end else chk(!rsp_phys_valid, "unallocated set reported on chip");
      end
  endtask

  initial begin
    op_valid = 0; op_kind = MT_ALLOC; op_id = 0; op_count = 0; lk_valid = 0; lk_id = 0;
    lk_set = 0; q_id = 0;
    for (int i = 0; i < NID; i++) begin
      m_cnt[i] = 0;
      for (int j = 0; j < SPI; j++) begin m_val[i][j] = 0; m_phy[i][j] = 0; end
    end
    for (int i = 0; i < NP; i++) m_free[i] = 1;
    m_ovs = 0;
    for (int i = 0; i < NP; i++) begin m_acc[i] = 0; m_own[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    chk(free_cnt == 3'(NP) && oversub_cnt == 0, "reset counters");
    do_op(MT_ALLOC, 0, 3);          // physical 0..2
    do_op(MT_ALLOC, 1, 2);          // physical 3,4
    do_op(MT_ALLOC, 2, 4);          // physical 5, then three spills
    lookup_all();
    do_op(MT_RELEASE, 0, 1);        // frees physical 1,2
    do_op(MT_ALLOC, 3, 4);          // gets 1,2 then spills
    do_op(MT_ALLOC, 1, 7);          // saturates at 4 sets
    lookup_all();
    do_op(MT_RELEASE, 2, 0);        // frees physical 5 and three swap entries
    do_op(MT_RELEASE, 3, 2);
    lookup_all();
    // random operations against the model
    for (int r = 0; r < 60; r++) begin
      int id = $urandom_range(0, NID - 1);
      if ($urandom_range(0, 1)) do_op(MT_ALLOC, id, $urandom_range(0, SPI));
      else                      do_op(MT_RELEASE, id, $urandom_range(0, SPI));
    end
    lookup_all();
    repeat (2) @(negedge clk);
    chk(n_spills > 0, "spills were exercised");
    $display("spills: %0d", n_spills);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
