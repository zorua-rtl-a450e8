// mapping_table -- generic virtual-to-physical mapping table for one
// virtualized on-chip resource (register sets, scratchpad sets or warp slots).
//
// Each logical ID (warp or block) owns up to SETS_PER_ID logical sets. Every
// entry holds a valid bit and a physical set number: valid=1 means the logical
// set lives in the physical resource at that number, valid=0 means it lives in
// the swap space in memory. Next to the table sit the two counters of the
// published design, the number of free physical sets and the number of sets
// mapped to swap space; the coordinator reads both to make oversubscription
// decisions.
//
// Allocation/release port (used by the coordinator), valid/ready handshake:
//   ALLOC   id,count : append `count` logical sets to `id`. Each new set takes
//                      the lowest-numbered free physical set. If none is free
//                      and SPILL_LFU=1, the least frequently accessed
//                      physical set is spilled: its owner's entry is turned
//                      into a swap entry, spill_valid reports the physical set
//                      and the owner's linear index for one cycle (the SM
//                      stores the data), and the new set takes the freed
//                      physical set. With SPILL_LFU=0 the new set itself is
//                      mapped to swap space. Either way the oversubscribed
//                      counter grows by one.
//   RELEASE id,count : free the highest logical sets of `id` until `count`
//                      remain; physical sets return to the free pool, swapped
//                      sets decrement the oversubscribed counter.
//   One set is handled per cycle, plus N_PHYS+1 cycles for a set that needs a
//   spill (a sequential search for the victim); op_done pulses for one cycle
//   at the end.
// Access frequency: every lookup that is served on chip increments a 4-bit
//   saturating counter of its physical set; a set's counter restarts at 1 when
//   it is allocated. The victim is the set with the smallest count, the lowest
//   number among equals. An increment that coincides with an allocation write
//   is dropped.
//   Allocation requests beyond SETS_PER_ID sets per ID are saturated.
// Lookup port (used by the compute units): lk_id/lk_set in, two cycles later
//   rsp_valid with rsp_phys_valid, rsp_phys, rsp_lin = id*SETS_PER_ID+set (the
//   linear logical index from which the swap-space address is formed) and
//   rsp_fault when the set was never allocated. The two-cycle latency is the
//   mapping-table access penalty the design was evaluated with.
//
// The table layout, counters, lookup latency and spilling the least
// frequently accessed set follow the published design; lowest-free-first
// allocation, one-set-per-cycle sequencing, the counter width, the sequential
// victim search and the SPILL_LFU=0 option are this implementation's choices.
// The spilled data is moved by the SM's load/store path, outside this block;
// a lookup already in flight when its set is spilled returns the old mapping.
module mapping_table #(
  parameter int unsigned N_ID        = 64,
  parameter int unsigned SETS_PER_ID = 16,
  parameter int unsigned N_PHYS      = 256,
  parameter bit          SPILL_LFU   = 1'b1,
  localparam int unsigned ID_W   = (N_ID > 1) ? $clog2(N_ID) : 1,
  localparam int unsigned SET_W  = (SETS_PER_ID > 1) ? $clog2(SETS_PER_ID) : 1,
  localparam int unsigned CNT_W  = $clog2(SETS_PER_ID + 1),
  localparam int unsigned PH_W   = (N_PHYS > 1) ? $clog2(N_PHYS) : 1,
  localparam int unsigned PC_W   = $clog2(N_PHYS + 1),
  localparam int unsigned OV_W   = $clog2(N_ID * SETS_PER_ID + 1),
  localparam int unsigned LIN_W  = $clog2(N_ID * SETS_PER_ID)
) (
  input  logic              clk,
  input  logic              rst_n,
  // allocate / release
  input  logic              op_valid,
  output logic              op_ready,
  input  zorua_pkg::mt_op_e op_kind,
  input  logic [ID_W-1:0]   op_id,
  input  logic [CNT_W-1:0]  op_count,
  output logic              op_done,
  // status
  output logic [PC_W-1:0]   free_cnt,     // free physical sets
  output logic [OV_W-1:0]   oversub_cnt,  // logical sets mapped to swap space
  // lookup
  input  logic              lk_valid,
  input  logic [ID_W-1:0]   lk_id,
  input  logic [SET_W-1:0]  lk_set,
  output logic              rsp_valid,
  output logic              rsp_phys_valid,
  output logic [PH_W-1:0]   rsp_phys,
  output logic [LIN_W-1:0]  rsp_lin,
  output logic              rsp_fault,
  // spill of a resident set to swap space (one-cycle pulse)
  output logic              spill_valid,
  output logic [PH_W-1:0]   spill_phys,
  output logic [LIN_W-1:0]  spill_lin,
  // sets currently owned by an ID (for the coordinator / observation)
  input  logic [ID_W-1:0]   q_id,
  output logic [CNT_W-1:0]  q_cnt
);
  import zorua_pkg::*;

  localparam int unsigned N_ENT = N_ID * SETS_PER_ID;

  logic              ent_valid [N_ENT];
  logic [PH_W-1:0]   ent_phys  [N_ENT];
  logic [CNT_W-1:0]  id_cnt    [N_ID];
  logic [N_PHYS-1:0] free_map;

  localparam int unsigned AC_W = 4;
  logic [AC_W-1:0]   acc   [N_PHYS];   // access frequency per physical set
  logic [LIN_W-1:0]  owner [N_PHYS];   // entry holding each physical set

  typedef enum logic [2:0] {S_IDLE, S_ALLOC, S_REL, S_DONE, S_SCAN, S_EVICT} state_e;
  state_e           st;
  logic [ID_W-1:0]  cur_id;
  logic [CNT_W-1:0] target;
  logic [PH_W-1:0]  scan_i, victim;
  logic [AC_W-1:0]  victim_acc;
  logic             have_victim;    // the next allocated set takes `victim`

  // lowest free physical set
  logic            any_free;
  logic [PH_W-1:0] first_free;
  always_comb begin
    any_free   = 1'b0;
    first_free = '0;
    for (int i = N_PHYS - 1; i >= 0; i--) begin
      if (free_map[i]) begin
        any_free   = 1'b1;
        first_free = PH_W'(i);
      end
    end
  end

  function automatic logic [LIN_W-1:0] lin(input logic [ID_W-1:0] id, input logic [CNT_W-1:0] s);
    return LIN_W'(id) * LIN_W'(SETS_PER_ID) + LIN_W'(s);
  endfunction

  assign op_ready = (st == S_IDLE);
  assign q_cnt    = id_cnt[q_id];

  logic [CNT_W-1:0] cur_cnt;
  logic [LIN_W-1:0] top_lin;   // entry just below the current top (release)
  logic [LIN_W-1:0] new_lin;   // entry at the current top (allocate)
  assign cur_cnt = id_cnt[cur_id];
  assign new_lin = lin(cur_id, cur_cnt);
  assign top_lin = lin(cur_id, cur_cnt - CNT_W'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= S_IDLE;
      cur_id      <= '0;
      target      <= '0;
      op_done     <= 1'b0;
      scan_i      <= '0;
      victim      <= '0;
      victim_acc  <= '0;
      have_victim <= 1'b0;
      spill_valid <= 1'b0;
      spill_phys  <= '0;
      spill_lin   <= '0;
      free_map    <= '1;
      free_cnt    <= PC_W'(N_PHYS);
      oversub_cnt <= '0;
      for (int i = 0; i < N_ID; i++) id_cnt[i] <= '0;
    end else begin
      op_done     <= 1'b0;
      spill_valid <= 1'b0;
      unique case (st)
        S_IDLE: if (op_valid) begin
          cur_id <= op_id;
          if (op_kind == MT_ALLOC) begin
            // saturate the request at the per-ID capacity
            if ({1'b0, id_cnt[op_id]} + {1'b0, op_count} > (CNT_W+1)'(SETS_PER_ID))
              target <= CNT_W'(SETS_PER_ID);
            else
              target <= id_cnt[op_id] + op_count;
            st <= S_ALLOC;
          end else begin
            target <= (op_count < id_cnt[op_id]) ? op_count : id_cnt[op_id];
            st     <= S_REL;
          end
        end
        S_ALLOC: begin
          if (cur_cnt == target) begin
            st <= S_DONE;
          end else if (have_victim) begin
            // the spilled physical set goes to the new logical set
            have_victim    <= 1'b0;
            id_cnt[cur_id] <= cur_cnt + CNT_W'(1);
          end else if (any_free) begin
            free_map[first_free] <= 1'b0;
            free_cnt             <= free_cnt - PC_W'(1);
            id_cnt[cur_id]       <= cur_cnt + CNT_W'(1);
          end else if (SPILL_LFU) begin
            scan_i     <= '0;
            victim     <= '0;
            victim_acc <= '1;
            st         <= S_SCAN;
          end else begin
            oversub_cnt    <= oversub_cnt + OV_W'(1);
            id_cnt[cur_id] <= cur_cnt + CNT_W'(1);
          end
        end
        // search all physical sets (all are in use) for the lowest count
        S_SCAN: begin
          if (acc[scan_i] < victim_acc) begin
            victim     <= scan_i;
            victim_acc <= acc[scan_i];
          end
          if (scan_i == PH_W'(N_PHYS - 1)) st <= S_EVICT;
          else                             scan_i <= scan_i + PH_W'(1);
        end
        // the owner of the victim now lives in swap space
        S_EVICT: begin
          spill_valid <= 1'b1;
          spill_phys  <= victim;
          spill_lin   <= owner[victim];
          oversub_cnt <= oversub_cnt + OV_W'(1);
          have_victim <= 1'b1;
          st          <= S_ALLOC;
        end
        S_REL: begin
          if (cur_cnt == target) begin
            st <= S_DONE;
          end else begin
            if (ent_valid[top_lin]) begin
              free_map[ent_phys[top_lin]] <= 1'b1;
              free_cnt                    <= free_cnt + PC_W'(1);
            end else begin
              oversub_cnt <= oversub_cnt - OV_W'(1);
            end
            id_cnt[cur_id]     <= cur_cnt - CNT_W'(1);
          end
        end
        S_DONE: begin
          op_done <= 1'b1;
          st      <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // ---------------- entry storage ----------------
  // One write port: an allocated entry takes the lowest free physical set
  // (or is marked swapped), a released entry is marked invalid. Entries are
  // not reset: an entry is always written when its set is allocated, and a
  // set at or above the ID's count is reported as a fault, never as data.
  logic             we;
  logic [LIN_W-1:0] wa;
  logic             wd_valid;
  logic [PH_W-1:0]  wd_phys;
  always_comb begin
    we       = 1'b0;
    wa       = new_lin;
    wd_valid = any_free || have_victim;
    wd_phys  = have_victim ? victim : (any_free ? first_free : '0);
    if (st == S_ALLOC && cur_cnt != target && (any_free || have_victim || !SPILL_LFU)) begin
      we = 1'b1;
    end else if (st == S_EVICT) begin
      we       = 1'b1;
      wa       = owner[victim];
      wd_valid = 1'b0;
      wd_phys  = victim;
    end else if (st == S_REL && cur_cnt != target) begin
      we       = 1'b1;
      wa       = top_lin;
      wd_valid = 1'b0;
      wd_phys  = '0;
    end
  end
  always_ff @(posedge clk) begin
    if (we) begin
      ent_valid[wa] <= wd_valid;
      ent_phys[wa]  <= wd_phys;
    end
  end

  // ---------------- owner and access-frequency storage ----------------
  // An allocation writes the owner and restarts the count at 1; otherwise an
  // on-chip lookup response increments its set's count (saturating).
  logic              acc_we;
  logic [PH_W-1:0]   acc_wa;
  logic [AC_W-1:0]   acc_wd;
  always_comb begin
    acc_we = 1'b0;
    acc_wa = rsp_phys;
    acc_wd = (acc[rsp_phys] == '1) ? acc[rsp_phys] : acc[rsp_phys] + AC_W'(1);
    if (we && wd_valid) begin
      acc_we = 1'b1;
      acc_wa = wd_phys;
      acc_wd = AC_W'(1);
    end else if (rsp_valid && rsp_phys_valid) begin
      acc_we = 1'b1;
    end
  end
  always_ff @(posedge clk) begin
    if (acc_we) acc[acc_wa] <= acc_wd;
    if (we && wd_valid) owner[wd_phys] <= wa;
  end

  // ---------------- two-cycle lookup pipeline ----------------
  logic              p1_v, p1_fault;
  logic [LIN_W-1:0]  p1_lin;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p1_v           <= 1'b0;
      p1_fault       <= 1'b0;
      p1_lin         <= '0;
      rsp_valid      <= 1'b0;
      rsp_phys_valid <= 1'b0;
      rsp_phys       <= '0;
      rsp_lin        <= '0;
      rsp_fault      <= 1'b0;
    end else begin
      // stage 1: index computation and bounds check
      p1_v     <= lk_valid;
      p1_lin   <= lin(lk_id, CNT_W'(lk_set));
      p1_fault <= (CNT_W'(lk_set) >= id_cnt[lk_id]);
      // stage 2: table read
      rsp_valid      <= p1_v;
      rsp_lin        <= p1_lin;
      rsp_fault      <= p1_fault;
      rsp_phys_valid <= ent_valid[p1_lin] && !p1_fault;
      rsp_phys       <= ent_phys[p1_lin];
    end
  end

  // counters stay within range; no ID holds more sets than it can
  a_free_range: assert property (@(posedge clk) disable iff (!rst_n) free_cnt <= PC_W'(N_PHYS));
  a_cnt_range:  assert property (@(posedge clk) disable iff (!rst_n)
                  {1'b0, cur_cnt} <= (CNT_W+1)'(SETS_PER_ID));
endmodule
