// tb_color_mapping_table: checks the region-to-colour table. After reset
// every region must map to its own colour; then random writes are mirrored
// in a reference array and both read ports are compared with it.
module tb_color_mapping_table;
  localparam int unsigned N  = 128;
  localparam int unsigned CW = $clog2(N);
  logic clk = 1'b0, rst_n = 1'b0;
  logic [CW-1:0] ra, ca, rb, cb, wr, wc;
  logic we;
  int checks = 0, failures = 0;
  logic [CW-1:0] ref_map [N];

  color_mapping_table #(.NUM_COLORS(N)) dut (
    .clk, .rst_n, .rd_region_a(ra), .rd_color_a(ca), .rd_region_b(rb), .rd_color_b(cb),
    .wr_en(we), .wr_region(wr), .wr_color(wc));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int r = 0; r < N; r++) begin
      ra = CW'(r); rb = CW'(N - 1 - r);
      #1;
      checks += 2;
      if (ca !== ref_map[r])       begin failures++; $display("port a region %0d: %0d /= %0d", r, ca, ref_map[r]); end
      if (cb !== ref_map[N-1-r])   begin failures++; $display("port b region %0d: %0d /= %0d", N-1-r, cb, ref_map[N-1-r]); end
    end
  endtask

  initial begin
    we = 0; wr = '0; wc = '0; ra = '0; rb = '0;
    for (int r = 0; r < N; r++) ref_map[r] = CW'(r);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check_all();
    // shrink-style remap: region r -> r mod 24
    for (int r = 0; r < N; r++) begin
      @(negedge clk);
      we = 1; wr = CW'(r); wc = CW'(r % 24); ref_map[r] = CW'(r % 24);
    end
    @(negedge clk); we = 0;
    check_all();
    // random writes
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      we = ($urandom_range(0, 1) == 1);
      wr = CW'($urandom); wc = CW'($urandom);
      @(posedge clk); #1;
      if (we) ref_map[wr] = wc;
    end
    @(negedge clk); we = 0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
