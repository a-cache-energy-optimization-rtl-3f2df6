// tb_interval_counters: drives random retirements, stalls and L2 events into
// the interval counters with a 1000-instruction interval and compares every
// snapshot with counts kept by the testbench, including the instructions
// that spill over an interval boundary. It also checks that snap is high in
// exactly the cycle the boundary is crossed and interval_end one cycle later.
module tb_interval_counters;
  import smart_pkg::*;
  localparam int unsigned INTERVAL = 1000, RET_W = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [RET_W-1:0] instr_ret;
  logic mem_stall, l2_read, l2_write, l2_miss, l2_load_miss, snap, interval_end;
  interval_stats_t stats;
  int checks = 0, failures = 0;
  longint r_cyc, r_ins, r_st, r_rd, r_wr, r_ms, r_lm;
  int n_intervals = 0;

  interval_counters #(.INTERVAL(INTERVAL), .RET_W(RET_W)) dut (
    .clk, .rst_n, .instr_ret, .mem_stall, .l2_read, .l2_write, .l2_miss, .l2_load_miss,
    .snap, .interval_end, .stats);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic exp_snap, exp_end;
    interval_stats_t exp_stats;
    instr_ret = 0; mem_stall = 0; l2_read = 0; l2_write = 0; l2_miss = 0; l2_load_miss = 0;
    r_cyc = 0; r_ins = 0; r_st = 0; r_rd = 0; r_wr = 0; r_ms = 0; r_lm = 0;
    exp_end = 0; exp_stats = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    while (n_intervals < 30) begin
      instr_ret    = RET_W'($urandom_range(0, 7));
      mem_stall    = ($urandom_range(0, 3) == 0);
      l2_read      = $urandom_range(0, 1) == 1;
      l2_write     = $urandom_range(0, 4) == 0;
      l2_miss      = $urandom_range(0, 5) == 0;
      l2_load_miss = l2_miss && $urandom_range(0, 1) == 1;
      r_cyc++; r_ins += instr_ret; r_st += mem_stall; r_rd += l2_read; r_wr += l2_write;
      r_ms += l2_miss; r_lm += l2_load_miss;
      exp_snap = r_ins >= INTERVAL;
      #1;
      checks++;
      if (snap !== exp_snap) begin failures++; $display("snap %0b expected %0b", snap, exp_snap); end
      @(negedge clk);
      checks++;
      if (interval_end !== exp_snap) begin failures++; $display("interval_end mismatch"); end
      if (exp_snap) begin
        n_intervals++;
        checks += 7;
        if (stats.cycles !== CNT_W'(r_cyc))      begin failures++; $display("cycles %0d/%0d", stats.cycles, r_cyc); end
        if (stats.instr !== CNT_W'(r_ins))       begin failures++; $display("instr %0d/%0d", stats.instr, r_ins); end
        if (stats.stall !== CNT_W'(r_st))        begin failures++; $display("stall"); end
        if (stats.reads !== CNT_W'(r_rd))        begin failures++; $display("reads"); end
        if (stats.writes !== CNT_W'(r_wr))       begin failures++; $display("writes"); end
        if (stats.misses !== CNT_W'(r_ms))       begin failures++; $display("misses"); end
        if (stats.load_misses !== CNT_W'(r_lm))  begin failures++; $display("load misses"); end
        r_ins -= INTERVAL;
        r_cyc = 0; r_st = 0; r_rd = 0; r_wr = 0; r_ms = 0; r_lm = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
