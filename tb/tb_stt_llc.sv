// tb_stt_llc: checks the colour-indexed L2 at a small size (4 colours of 64
// sets, 8 ways) against a memory model and a reference LRU cache model.
// Every read must return the latest data written to its block, hits and
// misses must agree with the reference, hit latencies must be
// 2 + STT-RAM read (2) and 2 + STT-RAM write (12) cycles, and dirty victims
// must reach memory. Then the region-to-colour map is changed (4 colours to
// 2) and a flush scan is run: every line left in a colour its region no
// longer maps to must be written back (if dirty) and invalidated, with the
// flush count equal to the reference's. Traffic then continues under the new
// map and the data must still be right.
module tb_stt_llc;
  import smart_pkg::*;
  localparam int SETS = 256, NC = 4, WAYS = 8, DW = 512, AW = 48;
  localparam int RC = 2, WC = 12, MEM_LAT = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid, req_ready, resp_valid, resp_hit, hold, idle;
  logic [AW-1:0] req_addr;
  req_kind_e req_kind;
  logic [DW-1:0] req_wdata, resp_rdata;
  logic [1:0] req_color, scan_region, scan_region_color;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid;
  logic [AW-1:0] mem_req_addr;
  logic [DW-1:0] mem_req_wdata, mem_resp_rdata;
  logic scan_start, scan_done;
  logic [2:0] scan_colors;
  logic ev_read, ev_write, ev_miss, ev_load_miss, ev_writeback, ev_flush;
  int checks = 0, failures = 0;
  int map_div = 4;  // region r -> colour r mod map_div

  stt_llc #(.SETS(SETS), .WAYS(WAYS), .NUM_COLORS(NC), .READ_CYC(RC), .WRITE_CYC(WC)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_addr, .req_kind, .req_wdata, .req_color,
    .resp_valid, .resp_hit, .resp_rdata, .hold, .idle,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_resp_valid, .mem_resp_rdata,
    .scan_start, .scan_colors, .scan_done, .scan_region, .scan_region_color,
    .ev_read, .ev_write, .ev_miss, .ev_load_miss, .ev_writeback, .ev_flush);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  assign req_color         = 2'(int'(req_addr[13:12]) % map_div);
  assign scan_region_color = 2'(int'(scan_region) % map_div);

  // ---- memory model ------------------------------------------------------
  logic [DW-1:0] mem [longint];
  int n_mem_writes = 0;
  function automatic logic [DW-1:0] init_line(input longint blk);
    logic [DW-1:0] v;
    for (int i = 0; i < DW / 64; i++) v[i*64 +: 64] = 64'(blk * 64'h9E3779B97F4A7C15 + 64'(i));
    return v;
  endfunction
  function automatic logic [DW-1:0] mem_rd(input longint blk);
    return mem.exists(blk) ? mem[blk] : init_line(blk);
  endfunction

  initial begin
    mem_req_ready = 0; mem_resp_valid = 0; mem_resp_rdata = '0;
    forever begin
      @(negedge clk);
      mem_req_ready = ($urandom_range(0, 2) != 0);
      @(posedge clk);
      if (mem_req_valid && mem_req_ready) begin
        longint blk;
        blk = longint'(mem_req_addr >> 6);
        if (mem_req_we) begin mem[blk] = mem_req_wdata; n_mem_writes++; end
        else begin
          @(negedge clk); mem_req_ready = 0;
          repeat (MEM_LAT) @(negedge clk);
          mem_resp_valid = 1; mem_resp_rdata = mem_rd(blk);
          @(negedge clk); mem_resp_valid = 0;
        end
      end
    end
  end

  // ---- reference cache (tags per set, MRU first) --------------------------
  longint ref_set [SETS][$];
  logic [DW-1:0] gold [longint];   // latest data of every block ever written

  function automatic int set_of(input longint blk);
    int region;
    region = int'(blk >> 6) & 3;
    return ((region % map_div) << 6) | int'(blk & 63);
  endfunction

  function automatic logic ref_access(input longint blk);
    int s, f;
    s = set_of(blk); f = -1;
    foreach (ref_set[s][i]) if (ref_set[s][i] == blk) f = i;
    if (f >= 0) ref_set[s].delete(f);
    else if (ref_set[s].size() == WAYS) ref_set[s].delete(WAYS - 1);
    ref_set[s].push_front(blk);
    return f >= 0;
  endfunction

  int n_hits = 0, n_misses = 0, n_wb_events = 0, n_flush = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev_writeback) n_wb_events++;
    if (ev_flush) n_flush++;
  end

  task automatic request(input req_kind_e k, input longint blk);
    int lat;
    logic exp_hit;
    logic [DW-1:0] d;
    for (int i = 0; i < DW / 32; i++) d[i*32 +: 32] = $urandom;
    @(negedge clk);
    req_valid = 1; req_kind = k; req_addr = AW'(blk) << 6; req_wdata = d;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    exp_hit = ref_access(blk);
    @(negedge clk);
    req_valid = 0;
    lat = 1;
    while (!resp_valid && lat < 500) begin @(negedge clk); lat++; end
    checks += 2;
    if (resp_hit !== exp_hit) begin failures++; $display("block %h: hit %0b expected %0b", blk, resp_hit, exp_hit); end
    if (exp_hit) begin
      n_hits++;
      if (lat !== ((k == REQ_WB) ? 2 + WC : 2 + RC)) begin failures++; $display("hit latency %0d", lat); end
    end else n_misses++;
    if (k == REQ_WB) gold[blk] = d;
    else begin
      checks++;
      if (resp_rdata !== (gold.exists(blk) ? gold[blk] : init_line(blk))) begin
        failures++; $display("block %h: wrong data", blk);
      end
    end
  endtask

  function automatic longint rnd_blk();
    // 3 page tags x 4 regions x 4 blocks per page -> 48 blocks, 16 per set group
    return (longint'($urandom_range(0, 2)) << 8) | (longint'($urandom_range(0, 3)) << 6)
         | longint'($urandom_range(0, 3));
  endfunction

  function automatic longint rnd_blk_wide();
    return (longint'($urandom_range(0, 11)) << 8) | (longint'($urandom_range(0, 3)) << 6)
         | longint'($urandom_range(0, 3));
  endfunction

  initial begin
    int exp_flush;
    req_valid = 0; req_addr = '0; req_kind = REQ_LOAD; req_wdata = '0; hold = 0;
    scan_start = 0; scan_colors = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (idle);
    // directed: miss, hit, write hit, read back
    request(REQ_LOAD, 64'h40);
    request(REQ_LOAD, 64'h40);
    request(REQ_WB, 64'h40);
    request(REQ_IFETCH, 64'h40);
    // hold blocks requests
    hold = 1;
    @(negedge clk); req_valid = 1; req_addr = 48'h1000;
    repeat (5) begin
      @(posedge clk); checks++;
      if (req_ready) begin failures++; $display("request accepted during hold"); end
    end
    @(negedge clk); req_valid = 0; hold = 0;
    // random traffic with evictions of dirty lines
    for (int i = 0; i < 1500; i++) begin
      int r;
      r = $urandom_range(0, 9);
      request(r < 4 ? REQ_WB : (r < 8 ? REQ_LOAD : REQ_IFETCH), rnd_blk_wide());
    end
    checks++;
    if (n_mem_writes == 0) begin failures++; $display("no dirty victim written back"); end
    // remap: 4 colours -> 2; lines in colours 2 and 3 must leave
    exp_flush = 0;
    for (int s = 128; s < 256; s++) exp_flush += ref_set[s].size();
    map_div = 2;
    for (int s = 128; s < 256; s++) begin
      ref_set[s].delete();
    end
    begin
      int wb_before, fl_before;
      wb_before = n_wb_events; fl_before = n_flush;
      @(negedge clk); scan_start = 1; scan_colors = 3'd4;
      @(negedge clk); scan_start = 0;
      wait (scan_done);
      @(negedge clk);
      checks += 2;
      if (n_flush - fl_before !== exp_flush) begin failures++; $display("flushed %0d expected %0d", n_flush - fl_before, exp_flush); end
      if (exp_flush > 0 && n_wb_events == wb_before) begin failures++; $display("scan wrote nothing back"); end
      $display("scan flushed %0d lines, %0d written back", n_flush - fl_before, n_wb_events - wb_before);
    end
    // traffic after the remap; data written before must still be found
    for (int i = 0; i < 1500; i++) begin
      int r;
      r = $urandom_range(0, 9);
      request(r < 4 ? REQ_WB : REQ_LOAD, rnd_blk_wide());
    end
    $display("hits %0d misses %0d memory writes %0d", n_hits, n_misses, n_mem_writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
