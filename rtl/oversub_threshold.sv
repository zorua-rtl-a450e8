// oversub_threshold -- adaptive oversubscription threshold (o_thresh) of one
// virtualized resource.
//
// o_thresh is the number of sets of the resource that may be mapped to swap
// space; it sets the size of the virtual space. It starts at O_DEFAULT (10% of
// the physical resource). Every EPOCH cycles the unit compares how the core
// idle cycles (c_idle: no warp issued although the pipeline is not stalled)
// and the memory idle cycles (c_mem: all warps wait on memory or the memory
// pipeline) changed against the previous epoch:
//   (d_idle - d_mem) > C_DELTA_THRESH  ->  o_thresh += O_STEP
//   (d_mem - d_idle) > C_DELTA_THRESH  ->  o_thresh -= O_STEP
// with d_x = c_x(this epoch) - c_x(previous epoch). The algorithm and the
// constants (epoch 2048 cycles, delta threshold 16, default 10%, step 4%)
// follow the published design; rounding the percentages down (at least 1)
// and clamping o_thresh to [0, TOTAL] are this implementation's choices.
// Interface: idle_cyc / mem_cyc are one-cycle event inputs; o_thresh is a
// register, updated on the cycle an epoch ends (epoch_end pulses then).
module oversub_threshold #(
  parameter int unsigned TOTAL          = 256,   // physical sets of the resource
  parameter int unsigned EPOCH          = 2048,
  parameter int unsigned C_DELTA_THRESH = 16,
  parameter int unsigned O_DEFAULT      = (TOTAL * 10 / 100 > 0) ? TOTAL * 10 / 100 : 1,
  parameter int unsigned O_STEP         = (TOTAL * 4 / 100 > 0) ? TOTAL * 4 / 100 : 1,
  localparam int unsigned TH_W = $clog2(TOTAL + 1),
  localparam int unsigned C_W  = $clog2(EPOCH + 1),
  localparam int unsigned E_W  = $clog2(EPOCH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            idle_cyc,
  input  logic            mem_cyc,
  output logic [TH_W-1:0] o_thresh,
  output logic            epoch_end,
  output logic            inc_evt,     // o_thresh was raised this epoch
  output logic            dec_evt      // o_thresh was lowered this epoch
);
  logic [E_W-1:0] ecnt;
  logic [C_W-1:0] c_idle, c_mem, c_idle_prev, c_mem_prev;
  logic [C_W-1:0] c_idle_now, c_mem_now;
  logic signed [C_W+1:0] d_idle, d_mem, diff;

  // counts including the current (last) cycle of the epoch
  assign c_idle_now = c_idle + C_W'(idle_cyc);
  assign c_mem_now  = c_mem  + C_W'(mem_cyc);
  assign d_idle = $signed({2'b00, c_idle_now}) - $signed({2'b00, c_idle_prev});
  assign d_mem  = $signed({2'b00, c_mem_now})  - $signed({2'b00, c_mem_prev});
  assign diff   = d_idle - d_mem;

  logic last;
  assign last = (ecnt == E_W'(EPOCH - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ecnt        <= '0;
      c_idle      <= '0;
      c_mem       <= '0;
      c_idle_prev <= '0;
      c_mem_prev  <= '0;
      o_thresh    <= TH_W'(O_DEFAULT);
      epoch_end   <= 1'b0;
      inc_evt     <= 1'b0;
      dec_evt     <= 1'b0;
    end else begin
      epoch_end <= last;
      inc_evt   <= 1'b0;
      dec_evt   <= 1'b0;
      if (last) begin
        ecnt        <= '0;
        c_idle      <= '0;
        c_mem       <= '0;
        c_idle_prev <= c_idle_now;
        c_mem_prev  <= c_mem_now;
        if (diff > $signed((C_W+2)'(C_DELTA_THRESH))) begin
          inc_evt  <= 1'b1;
          o_thresh <= ({1'b0, o_thresh} + (TH_W+1)'(O_STEP) > (TH_W+1)'(TOTAL))
                      ? TH_W'(TOTAL) : o_thresh + TH_W'(O_STEP);
        end else if (-diff > $signed((C_W+2)'(C_DELTA_THRESH))) begin
          dec_evt  <= 1'b1;
          o_thresh <= (o_thresh < TH_W'(O_STEP)) ? '0 : o_thresh - TH_W'(O_STEP);
        end
      end else begin
        ecnt   <= ecnt + E_W'(1);
        c_idle <= c_idle_now;
        c_mem  <= c_mem_now;
      end
    end
  end
endmodule
