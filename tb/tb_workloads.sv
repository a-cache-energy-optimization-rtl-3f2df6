// tb_workloads: three synthetic programs that stand for the behaviour
// classes of the benchmark suite the scheme was evaluated on, each run from
// reset on the reduced-size L2 (32 colours, 1 MB, 20 000-instruction
// intervals, 40-cycle memory):
//   streaming   every access touches a new block (a streaming program such
//               as libquantum, nearly 100 % misses at any size): the cache
//               must end at its floor of N/16 colours, since a larger cache
//               would not save a single miss;
//   small       8 pages reused over and over (programs with a tiny working
//               set such as povray or gamess): the cache must end at the floor;
//   large       160 pages swept cyclically, which fit only the full cache
//               (cache-sensitive programs such as omnetpp or soplex): the
//               cache must end at full size.
// For each it prints the average active ratio and the miss ratio, and it
// checks all loaded data.
module tb_workloads;
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
    repeat (40_000_000) @(posedge clk);
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

  int n_intervals = 0, sum_active = 0, n_hits = 0, n_acc = 0;
  always @(posedge clk) if (rst_n && interval_end) begin
    n_intervals++;
    sum_active += int'(active_colors);
  end

  logic [DW-1:0] gold [longint];
  task automatic access(input longint blk, input logic wr);
    logic [DW-1:0] d;
    for (int i = 0; i < DW / 32; i++) d[i*32 +: 32] = $urandom;
    @(negedge clk);
    req_valid = 1; req_addr = AW'(blk) << 6; req_kind = wr ? REQ_WB : REQ_LOAD; req_wdata = d;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 0;
    mem_stall = !wr;
    while (!resp_valid) @(negedge clk);
    mem_stall = 0;
    n_acc++;
    if (resp_hit) n_hits++;
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

  // kind 0: streaming, 1: small (8 pages), 2: large (160 pages)
  task automatic run(input string name, input int kind, input int intervals, input longint base,
                     input int expect_colors);
    longint b;
    @(negedge clk); rst_n = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    wait (dut.u_llc.idle);
    n_intervals = 0; sum_active = 0; n_hits = 0; n_acc = 0;
    b = 0;
    while (n_intervals < intervals) begin
      longint blk;
      case (kind)
        0:       blk = b;
        1:       blk = (b & 63) | (((b >> 6) % 8) << 6);
        default: blk = (b & 63) | (((b >> 6) % 160) << 6);
      endcase
      access(base + blk, $urandom_range(0, 4) == 0);
      b++;
    end
    while (dut.hold) @(negedge clk);
    $display("%s: final %0d colours, active ratio %0d%%, hit ratio %0d%%", name, active_colors,
             100 * sum_active / (intervals * NC), 100 * n_hits / n_acc);
    checks++;
    if (int'(active_colors) !== expect_colors) begin
      failures++; $display("%s: ended at %0d colours, expected %0d", name, active_colors, expect_colors);
    end
  endtask

  initial begin
    req_valid = 0; req_addr = '0; req_kind = REQ_LOAD; req_wdata = '0; instr_ret = 0; mem_stall = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run("streaming", 0, 4, 64'h1_0000_0000, NC / 16);
    run("small",     1, 4, 64'h2_0000_0000, NC / 16);
    run("large",     2, 7, 64'h3_0000_0000, NC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
