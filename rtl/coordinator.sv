// coordinator -- per-SM hardware runtime that decides which warps get which
// resources, and when, in the virtualized SM.
//
// Every warp needs three resources before the warp scheduler may see it: a
// warp (thread) slot, its register sets and its block's scratchpad sets. The
// pending warps sit in three queues, visited in the order
// thread/barrier -> scratchpad -> register, which is also the priority order
// of the resources. A warp passes a queue when the resource is free in the
// physical space, or when mapping the missing part to swap space keeps the
// swap usage of that resource within its oversubscription threshold
// (o_thresh). A warp that has passed all three queues gets all its resources
// at once through the mapping tables and becomes schedulable. If fewer than
// MIN_SCHED warps are schedulable (20% of the 48 warp slots), a warp is let
// through regardless of the threshold so that allocation cannot deadlock.
//
// The coordinator acts only on three events, taken one at a time:
//   * block start  (blk_valid/blk_ready): a free logical block ID and
//     blk_nwarps free logical warps are taken; every warp enters the
//     thread/barrier queue with the needs of the block's first phase.
//   * phase change (ph_valid/ph_ready): the warp leaves the schedulable set.
//     For a phase specifier, register sets beyond the new need are released
//     at once and the block's scratchpad need is raised if asked for; the
//     warp, which keeps its slot, is queued at the first resource it lacks.
//     For a barrier (ph_barrier) the warp gives up its warp slot and waits in
//     the thread/barrier queue until every warp of its block has arrived.
//   * warp end     (end_valid/end_ready): registers and slot are released;
//     the block's scratchpad is released when its last warp ends.
// After each event the queues are scanned, register queue first, one warp
// per cycle, and warps holding a swapped-out warp slot are moved into a
// physical slot that has become free. blk_req asks the thread block
// scheduler for a new block while a block ID and a logical warp are free.
//
// Mapping-table operations use the valid/ready + done protocol of
// mapping_table; the coordinator waits for op_done before going on.
// Queue membership is kept as a per-warp state, and within a queue warps are
// served in warp-ID order; these, the single-event-at-a-time sequencing and
// the barrier handling details are this implementation's choices. The queue
// order, the threshold rule and the deadlock guard follow the published design.
module coordinator
  import zorua_pkg::*;
#(
  parameter int unsigned NW        = N_LWARPS,
  parameter int unsigned NB        = N_LBLOCKS,
  parameter int unsigned MIN_SCHED = (N_PWARP_SLOTS * 20 + 99) / 100, // 20% occupancy
  parameter int unsigned CW        = 12,    // width of counts and thresholds
  localparam int unsigned WID_W = $clog2(NW),
  localparam int unsigned BID_W = $clog2(NB),
  localparam int unsigned NWC_W = $clog2(NW + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // thread block scheduler
  output logic              blk_req,
  input  logic              blk_valid,
  output logic              blk_ready,
  input  logic [NWC_W-1:0]  blk_nwarps,
  input  logic [RSET_W-1:0] blk_reg_sets,
  input  logic [SSET_W-1:0] blk_scr_sets,
  output logic [BID_W-1:0]  blk_id,        // ID the next accepted block gets
  // phase change from the instruction decoder
  input  logic              ph_valid,
  output logic              ph_ready,
  input  logic [WID_W-1:0]  ph_warp,
  input  logic              ph_barrier,
  input  logic [RSET_W-1:0] ph_reg_sets,
  input  logic [SSET_W-1:0] ph_scr_sets,
  // warp end
  input  logic              end_valid,
  output logic              end_ready,
  input  logic [WID_W-1:0]  end_warp,
  // oversubscription thresholds (sets that may live in swap space)
  input  logic [CW-1:0]     th_thread,
  input  logic [CW-1:0]     th_scr,
  input  logic [CW-1:0]     th_reg,
  // mapping tables: index 0 thread, 1 scratchpad, 2 register (res_e)
  output logic [2:0]        mt_valid,
  input  logic [2:0]        mt_ready,
  output mt_op_e            mt_kind,
  output logic [WID_W-1:0]  mt_id,         // warp ID, or block ID for scratchpad
  output logic [SSET_W-1:0] mt_count,
  input  logic [2:0]        mt_done,
  input  logic [CW-1:0]     free_thread,
  input  logic [CW-1:0]     free_scr,
  input  logic [CW-1:0]     free_reg,
  input  logic [CW-1:0]     ovs_thread,
  input  logic [CW-1:0]     ovs_scr,
  input  logic [CW-1:0]     ovs_reg,
  // warp scheduler
  output logic [NW-1:0]     schedulable,
  output logic [NWC_W-1:0]  n_schedulable,
  output logic [NW-1:0]     warp_active,
  output logic [BID_W-1:0]  warp_block [NW],
  output logic              busy,
  // event counts of the mechanisms
  output logic [31:0]       cnt_ovs_thread,  // grants that mapped a warp slot to swap
  output logic [31:0]       cnt_ovs_scr,     // grants that mapped scratchpad to swap
  output logic [31:0]       cnt_ovs_reg,     // grants that mapped registers to swap
  output logic [31:0]       cnt_wait,        // queue checks that left a warp waiting
  output logic [31:0]       cnt_forced,      // grants made only by the deadlock guard
  output logic [31:0]       cnt_barrier,     // barriers released
  output logic [31:0]       cnt_swapin,      // swapped warp slots moved on chip
  output logic [31:0]       cnt_reg_release  // phase changes that released registers
);
  typedef enum logic [2:0] {W_FREE, W_TQ, W_SQ, W_RQ, W_SCHED, W_BAR} wstate_e;
  typedef enum logic [3:0] {
    S_IDLE, S_BLK, S_PH, S_END, S_BARREL, S_SCAN, S_GRANT, S_SWAPIN, S_OPI, S_OPW
  } state_e;

  // ---------------- per-warp and per-block state ----------------
  wstate_e           wst      [NW];
  logic [BID_W-1:0]  wblk     [NW];
  logic [RSET_W-1:0] need_r   [NW];
  logic [RSET_W-1:0] held_r   [NW];
  logic              has_slot [NW];
  logic              slot_ph  [NW];   // the slot is a physical one
  logic              bvalid   [NB];
  logic [SSET_W-1:0] scr_need [NB];
  logic [SSET_W-1:0] scr_held [NB];
  logic [NWC_W-1:0]  alive    [NB];
  logic [NWC_W-1:0]  bar_cnt  [NB];

  state_e            st, ret_st;
  logic [2:0]        step;
  logic [WID_W-1:0]  cw;           // warp being handled
  logic [BID_W-1:0]  cb;           // block being handled
  logic [WID_W-1:0]  it;           // scan iterator
  logic [1:0]        pass;         // 0: register queue, 1: scratchpad, 2: thread
  logic [NWC_W-1:0]  todo;         // warps still to set up for a new block
  logic              ph_bar_l;
  logic [RSET_W-1:0] ph_r_l;
  logic [SSET_W-1:0] ph_s_l;
  res_e              op_tab;
  // needs latched for a grant
  logic              g_t;
  logic [SSET_W-1:0] g_s;
  logic [RSET_W-1:0] g_r;

  // ---------------- combinational helpers ----------------
  logic [NWC_W-1:0] n_free_w;
  logic             any_free_b;
  logic [BID_W-1:0] first_free_b;
  always_comb begin
    n_free_w = '0;
    for (int w = 0; w < NW; w++) if (wst[w] == W_FREE) n_free_w = n_free_w + NWC_W'(1);
    any_free_b   = 1'b0;
    first_free_b = '0;
    for (int b = NB - 1; b >= 0; b--) if (!bvalid[b]) begin
      any_free_b   = 1'b1;
      first_free_b = BID_W'(b);
    end
  end

  always_comb begin
    n_schedulable = '0;
    for (int w = 0; w < NW; w++) begin
      schedulable[w] = (wst[w] == W_SCHED) && has_slot[w] && slot_ph[w];
      warp_active[w] = (wst[w] != W_FREE);
      warp_block[w]  = wblk[w];
      n_schedulable  = n_schedulable + NWC_W'(schedulable[w]);
    end
  end

  assign blk_id    = first_free_b;
  assign blk_req   = any_free_b && (n_free_w != '0);
  assign end_ready = (st == S_IDLE);
  assign ph_ready  = (st == S_IDLE) && !end_valid;
  assign blk_ready = (st == S_IDLE) && !end_valid && !ph_valid && any_free_b &&
                     (n_free_w >= blk_nwarps) && (blk_nwarps != '0);
  assign busy      = (st != S_IDLE);

  // Can `n` more sets be granted? Physically free, or within the threshold of
  // swap space, or forced by the deadlock guard.
  function automatic logic fits(input logic [CW-1:0] n, input logic [CW-1:0] fr,
                                input logic [CW-1:0] ov, input logic [CW-1:0] th);
    return (n <= fr) || ((ov + n - fr) <= th);
  endfunction

  logic             force_grant;
  assign force_grant = (n_schedulable < NWC_W'(MIN_SCHED));

  // needs of the warp under the scan iterator
  logic [BID_W-1:0]  ib;
  logic              n_t;
  logic [SSET_W-1:0] n_s;
  logic [RSET_W-1:0] n_r;
  logic              ok_t, ok_s, ok_r, okf_t, okf_s, okf_r;
  always_comb begin
    ib  = wblk[it];
    n_t = !has_slot[it];
    n_s = (scr_need[ib] > scr_held[ib]) ? scr_need[ib] - scr_held[ib] : '0;
    n_r = (need_r[it] > held_r[it]) ? need_r[it] - held_r[it] : '0;
    okf_t = fits(CW'(n_t), free_thread, ovs_thread, th_thread);
    okf_s = fits(CW'(n_s), free_scr,    ovs_scr,    th_scr);
    okf_r = fits(CW'(n_r), free_reg,    ovs_reg,    th_reg);
    ok_t  = okf_t || force_grant;
    ok_s  = okf_s || force_grant;
    ok_r  = okf_r || force_grant;
  end

  logic in_queue;
  always_comb begin
    unique case (pass)
      2'd0:    in_queue = (wst[it] == W_RQ);
      2'd1:    in_queue = (wst[it] == W_SQ);
      default: in_queue = (wst[it] == W_TQ);
    endcase
  end

  // mapping-table request
  always_comb begin
    mt_valid = '0;
    if (st == S_OPI) mt_valid[op_tab] = 1'b1;
  end

  // ---------------- sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ret_st <= S_IDLE; step <= '0;
      cw <= '0; cb <= '0; it <= '0; pass <= '0; todo <= '0;
      ph_bar_l <= 1'b0; ph_r_l <= '0; ph_s_l <= '0;
      op_tab <= RES_THREAD; mt_kind <= MT_ALLOC; mt_id <= '0; mt_count <= '0;
      g_t <= 1'b0; g_s <= '0; g_r <= '0;
      cnt_ovs_thread <= '0; cnt_ovs_scr <= '0; cnt_ovs_reg <= '0; cnt_wait <= '0;
      cnt_forced <= '0; cnt_barrier <= '0; cnt_swapin <= '0; cnt_reg_release <= '0;
      for (int w = 0; w < NW; w++) begin
        wst[w] <= W_FREE; wblk[w] <= '0; need_r[w] <= '0; held_r[w] <= '0;
        has_slot[w] <= 1'b0; slot_ph[w] <= 1'b0;
      end
      for (int b = 0; b < NB; b++) begin
        bvalid[b] <= 1'b0; scr_need[b] <= '0; scr_held[b] <= '0;
        alive[b] <= '0; bar_cnt[b] <= '0;
      end
    end else begin
      unique case (st)
        // ------------------------------------------------------------
        S_IDLE: begin
          step <= '0;
          if (end_valid) begin
            cw <= end_warp; cb <= wblk[end_warp]; st <= S_END;
          end else if (ph_valid) begin
            cw <= ph_warp; cb <= wblk[ph_warp];
            // the warp leaves the schedulable set at once
            wst[ph_warp] <= ph_barrier ? W_BAR : W_RQ;
            ph_bar_l <= ph_barrier; ph_r_l <= ph_reg_sets; ph_s_l <= ph_scr_sets;
            st <= S_PH;
          end else if (blk_ready && blk_valid) begin
            cb <= first_free_b;
            bvalid[first_free_b]   <= 1'b1;
            scr_need[first_free_b] <= blk_scr_sets;
            scr_held[first_free_b] <= '0;
            alive[first_free_b]    <= blk_nwarps;
            bar_cnt[first_free_b]  <= '0;
            todo   <= blk_nwarps;
            ph_r_l <= blk_reg_sets;
            it     <= '0;
            st     <= S_BLK;
          end
        end
        // ------------------------------------------------------------
        // assign free logical warps to the new block
        S_BLK: begin
          if (todo == '0) begin
            st <= S_SCAN; pass <= '0; it <= '0;
          end else begin
            if (wst[it] == W_FREE) begin
              wst[it] <= W_TQ; wblk[it] <= cb; need_r[it] <= ph_r_l; held_r[it] <= '0;
              has_slot[it] <= 1'b0; slot_ph[it] <= 1'b0;
              todo <= todo - NWC_W'(1);
            end
            it <= it + WID_W'(1);
          end
        end
        // ------------------------------------------------------------
        S_PH: begin
          unique case (step)
            3'd0: begin
              if (ph_bar_l) begin
                // barrier: the waiting warp gives up its warp slot
                wst[cw] <= W_BAR;
                if (has_slot[cw]) begin
                  op_tab <= RES_THREAD; mt_kind <= MT_RELEASE; mt_id <= cw; mt_count <= '0;
                  has_slot[cw] <= 1'b0; slot_ph[cw] <= 1'b0;
                  ret_st <= S_PH; st <= S_OPI;
                end
                step <= 3'd1;
              end else begin
                need_r[cw] <= ph_r_l;
                if (ph_s_l > scr_need[cb]) scr_need[cb] <= ph_s_l;
                if (ph_r_l < held_r[cw]) begin
                  op_tab <= RES_REG; mt_kind <= MT_RELEASE; mt_id <= cw;
                  mt_count <= SSET_W'(ph_r_l);
                  held_r[cw] <= ph_r_l;
                  cnt_reg_release <= cnt_reg_release + 32'd1;
                  ret_st <= S_PH; st <= S_OPI;
                end
                step <= 3'd2;
              end
            end
            3'd1: begin   // barrier arrival
              if (bar_cnt[cb] + NWC_W'(1) == alive[cb]) begin
                bar_cnt[cb] <= '0;
                it <= '0; st <= S_BARREL;
              end else begin
                bar_cnt[cb] <= bar_cnt[cb] + NWC_W'(1);
                st <= S_SCAN; pass <= '0; it <= '0;
              end
            end
            default: begin   // queue the warp at the first resource it lacks
              if (!has_slot[cw])                    wst[cw] <= W_TQ;
              else if (scr_held[cb] < scr_need[cb]) wst[cw] <= W_SQ;
              else if (held_r[cw] < need_r[cw])     wst[cw] <= W_RQ;
              else                                  wst[cw] <= W_SCHED;
              st <= S_SCAN; pass <= '0; it <= '0;
            end
          endcase
        end
        // ------------------------------------------------------------
        // all warps of block cb reached the barrier: requeue them
        S_BARREL: begin
          if (wst[it] == W_BAR && wblk[it] == cb) wst[it] <= W_TQ;
          if (it == WID_W'(NW - 1)) begin
            cnt_barrier <= cnt_barrier + 32'd1;
            st <= S_SCAN; pass <= '0; it <= '0;
          end else begin
            it <= it + WID_W'(1);
          end
        end
        // ------------------------------------------------------------
        S_END: begin
          unique case (step)
            3'd0: begin
              op_tab <= RES_REG; mt_kind <= MT_RELEASE; mt_id <= cw; mt_count <= '0;
              held_r[cw] <= '0;
              ret_st <= S_END; st <= S_OPI; step <= 3'd1;
            end
            3'd1: begin
              if (has_slot[cw]) begin
                op_tab <= RES_THREAD; mt_kind <= MT_RELEASE; mt_id <= cw; mt_count <= '0;
                has_slot[cw] <= 1'b0; slot_ph[cw] <= 1'b0;
                ret_st <= S_END; st <= S_OPI;
              end
              wst[cw] <= W_FREE;
              alive[cb] <= alive[cb] - NWC_W'(1);
              step <= 3'd2;
            end
            default: begin
              if (alive[cb] == '0) begin
                // last warp of the block: release its scratchpad and ID
                bvalid[cb] <= 1'b0; scr_held[cb] <= '0; scr_need[cb] <= '0;
                op_tab <= RES_SCRATCH; mt_kind <= MT_RELEASE; mt_id <= WID_W'(cb);
                mt_count <= '0;
                ret_st <= S_SCAN; st <= S_OPI; pass <= '0; it <= '0;
              end else if (bar_cnt[cb] != '0 && bar_cnt[cb] == alive[cb]) begin
                // the remaining warps were all waiting at a barrier
                bar_cnt[cb] <= '0; it <= '0; st <= S_BARREL;
              end else begin
                st <= S_SCAN; pass <= '0; it <= '0;
              end
            end
          endcase
        end
        // ------------------------------------------------------------
        // scan the queues: register, then scratchpad, then thread/barrier
        S_SCAN: begin
          step <= '0;
          if (in_queue) begin
            if (!ok_t) begin
              wst[it] <= W_TQ; cnt_wait <= cnt_wait + 32'd1;
            end else if (!ok_s) begin
              wst[it] <= W_SQ; cnt_wait <= cnt_wait + 32'd1;
            end else if (!ok_r) begin
              wst[it] <= W_RQ; cnt_wait <= cnt_wait + 32'd1;
            end else begin
              // passed every queue: acquire all resources
              cw <= it; cb <= ib; g_t <= n_t; g_s <= n_s; g_r <= n_r; step <= '0;
              if (n_t && CW'(1) > free_thread)        cnt_ovs_thread <= cnt_ovs_thread + 32'd1;
              if (CW'(n_s) > free_scr)                cnt_ovs_scr    <= cnt_ovs_scr + 32'd1;
              if (CW'(n_r) > free_reg)                cnt_ovs_reg    <= cnt_ovs_reg + 32'd1;
              if (!(okf_t && okf_s && okf_r))         cnt_forced     <= cnt_forced + 32'd1;
              st <= S_GRANT;
            end
          end
          if (!(in_queue && ok_t && ok_s && ok_r)) begin
            if (it == WID_W'(NW - 1)) begin
              it <= '0;
              if (pass == 2'd2) st <= S_SWAPIN;
              else              pass <= pass + 2'd1;
            end else begin
              it <= it + WID_W'(1);
            end
          end
        end
        // ------------------------------------------------------------
        S_GRANT: begin
          unique case (step)
            3'd0: begin
              step <= 3'd1;
              if (g_t) begin
                op_tab <= RES_THREAD; mt_kind <= MT_ALLOC; mt_id <= cw; mt_count <= SSET_W'(1);
                has_slot[cw] <= 1'b1; slot_ph[cw] <= (free_thread != '0);
                ret_st <= S_GRANT; st <= S_OPI;
              end
            end
            3'd1: begin
              step <= 3'd2;
              if (g_s != '0) begin
                op_tab <= RES_SCRATCH; mt_kind <= MT_ALLOC; mt_id <= WID_W'(cb); mt_count <= g_s;
                scr_held[cb] <= scr_held[cb] + g_s;
                ret_st <= S_GRANT; st <= S_OPI;
              end
            end
            3'd2: begin
              step <= 3'd3;
              if (g_r != '0) begin
                op_tab <= RES_REG; mt_kind <= MT_ALLOC; mt_id <= cw; mt_count <= SSET_W'(g_r);
                held_r[cw] <= held_r[cw] + g_r;
                ret_st <= S_GRANT; st <= S_OPI;
              end
            end
            default: begin
              wst[cw] <= W_SCHED;
              step <= '0;
              st <= S_SCAN;      // continue the scan after this warp
              if (it == WID_W'(NW - 1)) begin
                it <= '0;
                if (pass == 2'd2) st <= S_SWAPIN;
                else              pass <= pass + 2'd1;
              end else begin
                it <= it + WID_W'(1);
              end
            end
          endcase
        end
        // ------------------------------------------------------------
        // move warps whose slot is in swap space into freed physical slots
        S_SWAPIN: begin
          unique case (step)
            3'd0: begin
              if (wst[it] == W_SCHED && has_slot[it] && !slot_ph[it] && free_thread != '0) begin
                cw <= it;
                op_tab <= RES_THREAD; mt_kind <= MT_RELEASE; mt_id <= it; mt_count <= '0;
                ret_st <= S_SWAPIN; st <= S_OPI; step <= 3'd1;
              end else if (it == WID_W'(NW - 1)) begin
                st <= S_IDLE;
              end else begin
                it <= it + WID_W'(1);
              end
            end
            3'd1: begin
              op_tab <= RES_THREAD; mt_kind <= MT_ALLOC; mt_id <= cw; mt_count <= SSET_W'(1);
              slot_ph[cw] <= 1'b1;
              cnt_swapin <= cnt_swapin + 32'd1;
              ret_st <= S_SWAPIN; st <= S_OPI; step <= 3'd2;
            end
            default: begin
              step <= 3'd0;
              if (it == WID_W'(NW - 1)) st <= S_IDLE;
              else                      it <= it + WID_W'(1);
            end
          endcase
        end
        // ------------------------------------------------------------
        S_OPI: if (mt_ready[op_tab]) st <= S_OPW;
        S_OPW: if (mt_done[op_tab])  st <= ret_st;
        default: st <= S_IDLE;
      endcase
    end
  end

  // handshake rules
  a_one_op: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(mt_valid));
  a_blk_fit: assert property (@(posedge clk) disable iff (!rst_n)
               (blk_valid && blk_ready) |-> (n_free_w >= blk_nwarps));
endmodule
