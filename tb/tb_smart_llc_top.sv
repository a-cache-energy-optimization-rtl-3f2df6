// tb_smart_llc_top: end-to-end run of the self-resizing L2 at a reduced size
// (32 colours of 64 sets, 8 ways: 1 MB; interval of 20000 instructions; 40
// cycle memory). A simple core model issues one L2 access per retired
// instruction, stalls on loads until the data returns, and checks every
// loaded block against the latest data written to it. The program runs in
// phases:
//   A  small working set (8 pages): the cache should shrink down to its
//      floor of N/16 = 2 colours,
//   B  large working set (160 pages, fits only the full cache): smaller
//      sizes are too slow, so the cache must grow back,
//   A  again: it shrinks again, flushing dirty data from the colours it
//      switches off.
// Counted and required at least once: shrink, grow, the floor, a candidate
// rejected by lambda, a line flushed by the scan, a dirty line written back
// by the scan, a request held off during reconfiguration, hits and misses.
// After every reconfiguration the power mask must match the active count.
module tb_smart_llc_top;
  import smart_pkg::*;
  localparam int NC = 32, SETS = 2048, INTERVAL = 20000, MEM_LAT = 40;
  localparam int DW = 512, AW = 48, CW1 = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid, req_ready, resp_valid, resp_hit;
  logic [AW-1:0] req_addr;
  req_kind_e req_kind;
  logic [DW-1:0] req_wdata, resp_rdata;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid;
  logic [AW-1:0] mem_req_addr;
  logic [DW-1:0] mem_req_wdata, mem_resp_rdata;
  logic [2:0] instr_ret;
  logic mem_stall;
  logic [NC-1:0] power_on;
  logic [CW1-1:0] active_colors, decision_colors;
  logic interval_end, decision_valid, reconfig_done, ev_writeback, ev_flush;
  logic [E_W-1:0] decision_energy;
  logic [7:0] decision_evaluated, decision_rejected;
  int checks = 0, failures = 0;

  smart_llc_top #(.NUM_COLORS(NC), .SETS(SETS), .INTERVAL(INTERVAL)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_addr, .req_kind, .req_wdata,
    .resp_valid, .resp_hit, .resp_rdata,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_resp_valid, .mem_resp_rdata, .instr_ret, .mem_stall,
    .power_on, .active_colors, .interval_end, .decision_valid, .decision_colors,
    .decision_energy, .decision_evaluated, .decision_rejected, .reconfig_done,
    .ev_writeback, .ev_flush);

  always #5 clk = ~clk;

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- memory model --------------------------------------------------------
  logic [DW-1:0] mem [longint];
  function automatic logic [DW-1:0] init_line(input longint blk);
    logic [DW-1:0] v;
    for (int i = 0; i < DW / 64; i++) v[i*64 +: 64] = 64'(blk * 64'h9E3779B97F4A7C15 + 64'(i));
    return v;
  endfunction
  initial begin
    mem_req_ready = 0; mem_resp_valid = 0; mem_resp_rdata = '0;
    forever begin
      @(negedge clk);
      mem_req_ready = 1;
      @(posedge clk);
      if (mem_req_valid) begin
        longint blk;
        blk = longint'(mem_req_addr >> 6);
        if (mem_req_we) mem[blk] = mem_req_wdata;
        else begin
          @(negedge clk); mem_req_ready = 0;
          repeat (MEM_LAT) @(negedge clk);
          mem_resp_valid = 1;
          mem_resp_rdata = mem.exists(blk) ? mem[blk] : init_line(blk);
          @(negedge clk); mem_resp_valid = 0;
        end
      end
    end
  end

  // ---- event counters ------------------------------------------------------
  int n_shrink = 0, n_grow = 0, n_floor = 0, n_reject = 0, n_flush = 0, n_scan_wb = 0;
  int n_held = 0, n_hits = 0, n_misses = 0, n_decisions = 0, n_intervals = 0;
  logic [CW1-1:0] prev_active;
  always @(posedge clk) if (rst_n) begin
    if (interval_end) n_intervals++;
    if (decision_valid) begin
      n_decisions++;
      if (decision_rejected != 0) n_reject++;
      $display("interval %0d: %0d colours -> %0d (evaluated %0d, rejected %0d)",
               n_intervals, active_colors, decision_colors, decision_evaluated, decision_rejected);
    end
    if (ev_flush) n_flush++;
    if (ev_writeback && dut.hold) n_scan_wb++;
    if (req_valid && !req_ready && dut.hold) n_held++;
    if (reconfig_done) begin
      if (decision_colors < prev_active) n_shrink++;
      if (decision_colors > prev_active) n_grow++;
      if (int'(decision_colors) == NC / 16) n_floor++;
    end
    prev_active <= active_colors;
  end
  // power mask check once a reconfiguration has finished
  always @(posedge clk) if (rst_n && !dut.hold) begin
    checks++;
    if ($countones(power_on) !== int'(active_colors)) begin
      failures++; $display("power mask %b for %0d colours", power_on, active_colors);
    end
  end

  // ---- core model ------------------------------------------------------------
  logic [DW-1:0] gold [longint];
  task automatic access(input longint blk, input logic wr);
    logic [DW-1:0] d;
    for (int i = 0; i < DW / 32; i++) d[i*32 +: 32] = $urandom;
    @(negedge clk);
    req_valid = 1; req_addr = AW'(blk) << 6; req_kind = wr ? REQ_WB : REQ_LOAD; req_wdata = d;
    instr_ret = 0;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 0;
    mem_stall = !wr;
    while (!resp_valid) @(negedge clk);
    mem_stall = 0;
    if (resp_hit) n_hits++; else n_misses++;
    if (wr) gold[blk] = d;
    else begin
      checks++;
      if (resp_rdata !== (gold.exists(blk) ? gold[blk] : init_line(blk))) begin
        failures++; $display("block %h: wrong data", blk);
      end
    end
    instr_ret = 1;
    @(negedge clk);
    instr_ret = 0;
  endtask

  task automatic phase(input int pages, input int n_int);
    int target;
    longint b;
    target = n_intervals + n_int;
    b = 0;
    while (n_intervals < target) begin
      access((longint'(b) & 63) | ((longint'(b) >> 6) % longint'(pages)) << 6, $urandom_range(0, 4) == 0);
      b++;
    end
  endtask

  initial begin
    req_valid = 0; req_addr = '0; req_kind = REQ_LOAD; req_wdata = '0; instr_ret = 0; mem_stall = 0;
    prev_active = CW1'(NC);
    repeat (3) @(posedge clk);
    rst_n = 1;
    phase(8, 4);
    checks++;
    if (int'(active_colors) !== NC / 16) begin failures++; $display("did not reach the floor: %0d", active_colors); end
    phase(160, 5);
    phase(8, 3);
    $display("intervals %0d decisions %0d shrink %0d grow %0d floor %0d reject %0d flush %0d scan-writeback %0d held %0d hits %0d misses %0d",
             n_intervals, n_decisions, n_shrink, n_grow, n_floor, n_reject, n_flush, n_scan_wb, n_held, n_hits, n_misses);
    checks += 9;
    if (n_shrink == 0)  begin failures++; $display("no shrink"); end
    if (n_grow == 0)    begin failures++; $display("no growth"); end
    if (n_floor == 0)   begin failures++; $display("floor never reached"); end
    if (n_reject == 0)  begin failures++; $display("no candidate rejected"); end
    if (n_flush == 0)   begin failures++; $display("no line flushed"); end
    if (n_scan_wb == 0) begin failures++; $display("no dirty line written back by a scan"); end
    if (n_held == 0)    begin failures++; $display("no request held"); end
    if (n_hits == 0)    begin failures++; $display("no hit"); end
    if (n_misses == 0)  begin failures++; $display("no miss"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
