// tb_profiling_unit: checks a profiling unit emulating 1/16 of the cache
// (8 sampled sets of 8 ways). A reference LRU model, kept as per-set lists
// in most-recently-used order, sees the same accesses; miss and load-miss
// counts must match at every interval snapshot. A directed part checks that
// unsampled addresses are ignored and that the LRU line is the one evicted.
module tb_profiling_unit;
  localparam int unsigned DIV = 16, FULL = 8192, WAYS = 8, PSETS = FULL / DIV / 64;
  localparam int unsigned PA_W = 48, CNT_W = 48;
  logic clk = 1'b0, rst_n = 1'b0;
  logic acc_valid, acc_load, snap;
  logic [PA_W-1:0] acc_addr;
  logic [CNT_W-1:0] misses, load_misses;
  int checks = 0, failures = 0;

  // reference: per set, tags in MRU-first order
  longint ref_tags [PSETS][$];
  longint ref_miss = 0, ref_lmiss = 0;

  profiling_unit #(.DIV(DIV), .FULL_SETS(FULL)) dut (
    .clk, .rst_n, .acc_valid, .acc_addr, .acc_load, .snap, .misses, .load_misses);

  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void ref_access(input logic [PA_W-1:0] a, input logic ld);
    int s, found;
    longint t;
    if (a[11:6] != 6'd0) return;                // not a sampled address
    s = int'(a[12 +: $clog2(PSETS)]);
    t = longint'(a >> (12 + $clog2(PSETS)));
    found = -1;
    foreach (ref_tags[s][i]) if (ref_tags[s][i] == t) found = i;
    if (found >= 0) ref_tags[s].delete(found);
    else begin
      ref_miss++;
      if (ld) ref_lmiss++;
      if (ref_tags[s].size() == WAYS) ref_tags[s].delete(WAYS - 1);
    end
    ref_tags[s].push_front(t);
  endfunction

  task automatic access(input logic [PA_W-1:0] a, input logic ld);
    @(negedge clk);
    acc_valid = 1; acc_addr = a; acc_load = ld;
    ref_access(a, ld);
    @(negedge clk);
    acc_valid = 0;
  endtask

  task automatic close_interval();
    @(negedge clk);
    snap = 1;
    @(negedge clk);
    snap = 0;
    checks += 2;
    if (misses !== CNT_W'(ref_miss)) begin failures++; $display("misses %0d expected %0d", misses, ref_miss); end
    if (load_misses !== CNT_W'(ref_lmiss)) begin failures++; $display("load misses %0d expected %0d", load_misses, ref_lmiss); end
    ref_miss = 0; ref_lmiss = 0;
  endtask

  function automatic logic [PA_W-1:0] mk(input int tagv, input int set, input int blk);
    return (PA_W'(tagv) << 15) | (PA_W'(set) << 12) | (PA_W'(blk) << 6);
  endfunction

  initial begin
    acc_valid = 0; acc_addr = '0; acc_load = 0; snap = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // directed: 8 lines fill set 3, the 9th evicts the first, which then misses
    for (int i = 0; i < 9; i++) access(mk(i + 1, 3, 0), 1'b1);
    access(mk(2, 3, 0), 1'b1);       // hit
    access(mk(1, 3, 0), 1'b0);       // miss: evicted LRU
    access(mk(50, 3, 5), 1'b1);      // unsampled block: ignored
    close_interval();
    checks++;
    if (misses !== 48'd10) begin failures++; $display("directed misses %0d expected 10", misses); end
    // random traffic over a small pool, several intervals
    for (int iv = 0; iv < 20; iv++) begin
      for (int i = 0; i < 400; i++)
        access(mk($urandom_range(0, 11), $urandom_range(0, 7), ($urandom_range(0, 3) == 0) ? 1 : 0),
               $urandom_range(0, 1) == 1);
      close_interval();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
