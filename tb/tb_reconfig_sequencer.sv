// tb_reconfig_sequencer: applies a series of colour counts (16 colours) and
// checks each step of the sequence: the mapping-table writes (every region r
// written once with r mod target), the power-on mask before the scan when
// growing and after it when shrinking, the scan width max(old, new), hold
// for the whole operation, waiting for an idle cache, and active_colors.
// The cache side is a small model that answers a scan after a random delay.
module tb_reconfig_sequencer;
  localparam int N = 16, CW = 4, CW1 = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  logic apply, hold, done, map_wr_en, scan_start, llc_idle;
  logic scan_done = 1'b0;
  logic [CW1-1:0] new_colors, active_colors, scan_colors;
  logic [N-1:0] power_on;
  logic [CW-1:0] map_wr_region, map_wr_color;
  int checks = 0, failures = 0;
  logic [CW-1:0] map_model [N];
  int writes_seen [N];
  int scans, scan_delay;
  logic [N-1:0] power_at_scan;

  reconfig_sequencer #(.NUM_COLORS(N)) dut (
    .clk, .rst_n, .apply, .new_colors, .active_colors, .power_on, .hold, .done,
    .map_wr_en, .map_wr_region, .map_wr_color, .scan_start, .scan_colors, .scan_done, .llc_idle);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cache model: records table writes, answers the scan
  always @(posedge clk) if (rst_n) begin
    scan_done <= 1'b0;
    if (map_wr_en) begin
      map_model[map_wr_region] <= map_wr_color;
      writes_seen[map_wr_region]++;
      if (llc_idle !== 1'b1) begin failures++; $display("table written while cache busy"); end
    end
    if (scan_start) begin
      scans++;
      power_at_scan <= power_on;
      scan_delay = $urandom_range(1, 40);
      fork begin
        repeat (scan_delay) @(posedge clk);
        scan_done <= 1'b1;
      end join_none
    end
  end

  task automatic step(input int target);
    int old, cyc, busy_cyc;
    logic [N-1:0] exp_mask;
    old = int'(active_colors);
    for (int r = 0; r < N; r++) writes_seen[r] = 0;
    scans = 0;
    // the cache is busy for a few cycles when the request arrives
    llc_idle = 1'b0;
    @(negedge clk);
    apply = 1; new_colors = CW1'(target);
    @(negedge clk);
    apply = 0;
    cyc = 0; busy_cyc = 0;
    repeat (5) begin
      @(negedge clk);
      checks++;
      if (map_wr_en) begin failures++; $display("remap started while cache busy"); end
    end
    llc_idle = 1'b1;
    while (!done && cyc < 1000) begin
      if (hold) busy_cyc++;
      @(negedge clk); cyc++;
    end
    @(negedge clk);
    exp_mask = '0;
    for (int c = 0; c < N; c++) exp_mask[c] = (c < target);
    checks += 3;
    if (int'(active_colors) !== target) begin failures++; $display("active %0d expected %0d", active_colors, target); end
    if (power_on !== exp_mask) begin failures++; $display("power mask %b expected %b", power_on, exp_mask); end
    if (hold) begin failures++; $display("hold still high"); end
    if (target != old) begin
      checks += 4;
      if (scans !== 1) begin failures++; $display("%0d scans", scans); end
      if (int'(scan_colors) !== ((target > old) ? target : old)) begin failures++; $display("scan width %0d", scan_colors); end
      if (busy_cyc < N) begin failures++; $display("hold only %0d cycles", busy_cyc); end
      // power during the scan: union of old and new active colours
      for (int c = 0; c < N; c++) exp_mask[c] = (c < target) || (c < old);
      if (power_at_scan !== exp_mask) begin failures++; $display("power during scan %b expected %b", power_at_scan, exp_mask); end
      for (int r = 0; r < N; r++) begin
        checks += 2;
        if (writes_seen[r] !== 1) begin failures++; $display("region %0d written %0d times", r, writes_seen[r]); end
        if (int'(map_model[r]) !== r % target) begin failures++; $display("region %0d -> %0d expected %0d", r, map_model[r], r % target); end
      end
    end else begin
      checks++;
      if (scans !== 0) begin failures++; $display("scan for unchanged size"); end
    end
  endtask

  initial begin
    apply = 0; new_colors = '0; llc_idle = 1;
    for (int r = 0; r < N; r++) map_model[r] = CW'(r);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks += 2;
    if (int'(active_colors) !== N || power_on !== '1) begin failures++; $display("reset state wrong"); end
    if (hold) failures++;
    step(12); step(6); step(6); step(2); step(10); step(16); step(4);
    for (int i = 0; i < 20; i++) step(2 * $urandom_range(1, 8));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
