// tb_smart_llc_top_full: one complete operation of the L2 at its full size
// (4 MB, 128 colours, 15-million-instruction interval, 160-cycle memory).
// The core model retires 7 instructions per cycle and every 64 cycles makes
// an L2 access (loads and write-backs) to a 16-page working set whose pages
// lie in regions 104 .. 119. At the end of the interval the algorithm must
// shrink the cache by the maximum step (128 -> 112 colours), the power mask
// must follow, the lines of regions 112 .. 119 must be flushed from the
// colours being switched off, and afterwards every block of the working set
// must read back with its latest data.
module tb_smart_llc_top_full;
  import smart_pkg::*;
  localparam int NC = 128, DW = 512, AW = 48, CW1 = 8, MEM_LAT = 160;
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

  smart_llc_top dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_addr, .req_kind, .req_wdata,
    .resp_valid, .resp_hit, .resp_rdata,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_resp_valid, .mem_resp_rdata, .instr_ret, .mem_stall,
    .power_on, .active_colors, .interval_end, .decision_valid, .decision_colors,
    .decision_energy, .decision_evaluated, .decision_rejected, .reconfig_done,
    .ev_writeback, .ev_flush);

  always #5 clk = ~clk;

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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
        blk = longint'(mem_req_addr) >> 6;
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

  int n_flush = 0, n_intervals = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev_flush) n_flush++;
    if (interval_end) n_intervals++;
  end

  logic [DW-1:0] gold [longint];
  logic run_core = 1'b1;
  task automatic access(input longint blk, input logic wr);
    logic [DW-1:0] d;
    for (int i = 0; i < DW / 32; i++) d[i*32 +: 32] = $urandom;
    @(negedge clk);
    req_valid = 1; req_addr = AW'(blk) << 6; req_kind = wr ? REQ_WB : REQ_LOAD; req_wdata = d;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 0;
    mem_stall = !wr && run_core;
    while (!resp_valid) @(negedge clk);
    mem_stall = 0;
    if (wr) gold[blk] = d;
    else begin
      checks++;
      if (resp_rdata !== (gold.exists(blk) ? gold[blk] : init_line(blk))) begin
        failures++; $display("block %h: wrong data", blk);
      end
    end
  endtask

  function automatic longint ws_blk(input int i);
    return (longint'(104 + ((i >> 6) % 16)) << 6) | longint'(i % 64);
  endfunction

  initial begin
    int i, cyc;
    logic [NC-1:0] exp_mask;
    req_valid = 0; req_addr = '0; req_kind = REQ_LOAD; req_wdata = '0; instr_ret = 0; mem_stall = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (dut.u_llc.idle);
    i = 0;
    // run the interval: 7 instructions per cycle, an access every 64 cycles
    while (n_intervals == 0) begin
      instr_ret = 3'd7;
      repeat (63) @(negedge clk);
      instr_ret = 3'd0;
      if (n_intervals == 0) access(ws_blk(i), (i % 3) == 0);
      i++;
    end
    instr_ret = 3'd0;
    run_core = 1'b0;
    cyc = 0;
    while (!reconfig_done && cyc < 500_000) begin @(negedge clk); cyc++; end
    @(negedge clk);
    $display("interval after %0d accesses: %0d colours chosen (evaluated %0d, rejected %0d), %0d lines flushed, reconfiguration %0d cycles",
             i, decision_colors, decision_evaluated, decision_rejected, n_flush, cyc);
    for (int c = 0; c < NC; c++) exp_mask[c] = (c < 112);
    checks += 4;
    if (int'(active_colors) !== 112) begin failures++; $display("active colours %0d, expected 112", active_colors); end
    if (power_on !== exp_mask) begin failures++; $display("power mask wrong"); end
    if (n_flush == 0) begin failures++; $display("nothing flushed"); end
    if (int'(decision_evaluated) !== 9) begin failures++; $display("evaluated %0d, expected 9", decision_evaluated); end
    // every block of the working set reads back its latest data
    for (int k = 0; k < 16 * 64; k++) access(ws_blk(k), 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
