// tb_stt_ram_array: checks the STT-RAM data array's contents and its
// asymmetric timing: done must come exactly 2 cycles after a read starts and
// 12 cycles after a write starts, and busy must cover the whole operation.
module tb_stt_ram_array;
  localparam int unsigned ENT = 64, DW = 512, RC = 2, WC = 12;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start, we, busy, done;
  logic [5:0] addr;
  logic [DW-1:0] wdata, rdata;
  logic [DW-1:0] ref_mem [ENT];
  logic          ref_ok  [ENT];
  int checks = 0, failures = 0;

  stt_ram_array #(.ENTRIES(ENT), .DATA_W(DW), .READ_CYC(RC), .WRITE_CYC(WC)) dut (
    .clk, .rst_n, .start, .we, .addr, .wdata, .busy, .done, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [DW-1:0] rnd_line();
    logic [DW-1:0] v;
    for (int i = 0; i < DW / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic op(input logic w, input logic [5:0] a, input logic [DW-1:0] d);
    int n;
    @(negedge clk);
    start = 1; we = w; addr = a; wdata = d;
    @(negedge clk);
    start = 0;
    n = 1;
    checks++;
    if (!busy) begin failures++; $display("busy low after start"); end
    while (!done) begin @(negedge clk); n++; if (n > 100) break; end
    checks++;
    if (n !== (w ? WC : RC)) begin failures++; $display("%s latency %0d", w ? "write" : "read", n); end
    if (!w && ref_ok[a]) begin
      checks++;
      if (rdata !== ref_mem[a]) begin failures++; $display("read data mismatch at %0d", a); end
    end
    if (w) begin ref_mem[a] = d; ref_ok[a] = 1'b1; end
  endtask

  initial begin
    start = 0; we = 0; addr = '0; wdata = '0;
    for (int i = 0; i < ENT; i++) ref_ok[i] = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < ENT; i++) op(1'b1, 6'(i), rnd_line());
    for (int i = 0; i < 400; i++) op($urandom_range(0, 2) == 0, 6'($urandom), rnd_line());
    for (int i = 0; i < ENT; i++) op(1'b0, 6'(i), '0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
