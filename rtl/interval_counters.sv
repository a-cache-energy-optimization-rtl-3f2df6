// interval_counters: the per-interval event counters that drive the
// energy-saving algorithm, including the memory-stall component of the CPI
// stack.
//
// The counters run over an interval of INTERVAL_INSTR retired instructions
// (15 million by default). They count cycles, retired instructions, cycles
// the core reports as stalled on memory, and the real L2's reads, writes,
// misses and load misses. In the last cycle of an interval (the cycle whose
// retirements reach INTERVAL_INSTR) `snap` is high combinationally, so that
// the profiling units can close their interval on the same clock edge; on
// that edge the counts, including that cycle's events, are copied to `stats`
// and `interval_end` pulses in the next cycle. Instructions retired beyond
// the boundary carry over into the next interval.
// The interval length follows the evaluation set-up; the core's retirement
// and stall signals are this design's interface to the core.
module interval_counters
  import smart_pkg::*;
#(
  parameter int unsigned INTERVAL = smart_pkg::INTERVAL_INSTR,
  parameter int unsigned RET_W    = 3
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [RET_W-1:0] instr_ret,    // instructions retired this cycle
  input  logic             mem_stall,    // core stalled on memory this cycle
  input  logic             l2_read,
  input  logic             l2_write,
  input  logic             l2_miss,
  input  logic             l2_load_miss,
  output logic             snap,
  output logic             interval_end,
  output interval_stats_t  stats
);

  interval_stats_t cnt_q, cnt_next;

  always_comb begin
    cnt_next             = cnt_q;
    cnt_next.cycles      = cnt_q.cycles + 1'b1;
    cnt_next.instr       = cnt_q.instr + CNT_W'(instr_ret);
    cnt_next.stall       = cnt_q.stall + CNT_W'(mem_stall);
    cnt_next.reads       = cnt_q.reads + CNT_W'(l2_read);
    cnt_next.writes      = cnt_q.writes + CNT_W'(l2_write);
    cnt_next.misses      = cnt_q.misses + CNT_W'(l2_miss);
    cnt_next.load_misses = cnt_q.load_misses + CNT_W'(l2_load_miss);
    snap                 = cnt_next.instr >= CNT_W'(INTERVAL);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q        <= '0;
      stats        <= '0;
      interval_end <= 1'b0;
    end else begin
      interval_end <= snap;
      if (snap) begin
        stats       <= cnt_next;
        cnt_q       <= '0;
        cnt_q.instr <= cnt_next.instr - CNT_W'(INTERVAL);
      end else begin
        cnt_q <= cnt_next;
      end
    end
  end

endmodule
