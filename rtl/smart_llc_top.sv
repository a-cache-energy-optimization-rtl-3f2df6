// smart_llc_top: an STT-RAM last-level cache that resizes itself by cache
// colouring to save leakage energy (the SMART scheme).
//
// The L2 (stt_llc, 4 MB, 8 ways, 128 colours) is indexed through the
// region-to-colour mapping table. While the program runs, five set-sampled
// profiling units estimate the misses the program would see with 128, 64,
// 32, 16 and 8 colours, and the interval counters collect cycles, retired
// instructions, memory stall cycles and L2 traffic. Every INTERVAL retired
// instructions (15 million) the energy-saving algorithm estimates execution
// time and memory-subsystem energy for the current colour count +/- 16 in
// steps of 2 (never below N/16), drops any that is more than 2.5 % slower
// than the full cache, and picks the cheapest. The reconfiguration sequencer
// then powers colours up, remaps the regions, has the cache flush lines that
// no longer belong where they are, and power-gates the colours left unused.
//
// Interface: L1-side requests (valid/ready, one outstanding) and responses;
// a main-memory port (valid/ready requests, read data returned later with
// mem_resp_valid); the core's retired-instruction count and memory-stall
// flag per cycle; power_on, one enable per colour for the power-gating
// switches, and status outputs. Requests are held off while a
// reconfiguration is applied.
// An interval that ends while the previous decision is still being applied
// is not evaluated (this design's choice; at full size the decision takes
// a few tens of thousands of cycles against millions per interval).
module smart_llc_top
  import smart_pkg::*;
#(
  parameter int unsigned NUM_COLORS = smart_pkg::NUM_COLORS,
  parameter int unsigned SETS       = smart_pkg::L2_SETS,
  parameter int unsigned INTERVAL   = smart_pkg::INTERVAL_INSTR,
  parameter int unsigned CLOW       = NUM_COLORS / 16,
  parameter int unsigned Q          = smart_pkg::Q_MAX,
  parameter int unsigned RET_W      = 3,
  localparam int unsigned CW  = $clog2(NUM_COLORS),
  localparam int unsigned CW1 = CW + 1,
  localparam int unsigned DW  = smart_pkg::BLOCK_BITS,
  localparam int unsigned AW  = smart_pkg::PA_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // L1 side
  input  logic                  req_valid,
  output logic                  req_ready,
  input  logic [AW-1:0]         req_addr,
  input  req_kind_e             req_kind,
  input  logic [DW-1:0]         req_wdata,
  output logic                  resp_valid,
  output logic                  resp_hit,
  output logic [DW-1:0]         resp_rdata,
  // main memory
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output logic                  mem_req_we,
  output logic [AW-1:0]         mem_req_addr,
  output logic [DW-1:0]         mem_req_wdata,
  input  logic                  mem_resp_valid,
  input  logic [DW-1:0]         mem_resp_rdata,
  // core
  input  logic [RET_W-1:0]      instr_ret,
  input  logic                  mem_stall,
  // power-gating switches and status
  output logic [NUM_COLORS-1:0] power_on,
  output logic [CW1-1:0]        active_colors,
  output logic                  interval_end,
  output logic                  decision_valid,
  output logic [CW1-1:0]        decision_colors,
  output logic [E_W-1:0]        decision_energy,
  output logic [7:0]            decision_evaluated,
  output logic [7:0]            decision_rejected,
  output logic                  reconfig_done,
  output logic                  ev_writeback,
  output logic                  ev_flush
);

  // ---- mapping table --------------------------------------------------
  logic [CW-1:0] req_color, scan_region, scan_region_color;
  logic          map_wr_en;
  logic [CW-1:0] map_wr_region, map_wr_color;

  color_mapping_table #(.NUM_COLORS(NUM_COLORS)) u_map (
    .clk, .rst_n,
    .rd_region_a(req_addr[PAGE_W +: CW]), .rd_color_a(req_color),
    .rd_region_b(scan_region),            .rd_color_b(scan_region_color),
    .wr_en(map_wr_en), .wr_region(map_wr_region), .wr_color(map_wr_color)
  );

  // ---- the cache --------------------------------------------------------
  logic hold, llc_idle, scan_start, scan_done;
  logic [CW1-1:0] scan_colors;
  logic ev_read, ev_write, ev_miss, ev_load_miss;

  stt_llc #(.SETS(SETS), .NUM_COLORS(NUM_COLORS)) u_llc (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_addr, .req_kind, .req_wdata, .req_color,
    .resp_valid, .resp_hit, .resp_rdata, .hold, .idle(llc_idle),
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_resp_valid, .mem_resp_rdata,
    .scan_start, .scan_colors, .scan_done, .scan_region, .scan_region_color,
    .ev_read, .ev_write, .ev_miss, .ev_load_miss, .ev_writeback, .ev_flush
  );

  // ---- interval counters ----------------------------------------------
  logic            snap;
  interval_stats_t stats;

  interval_counters #(.INTERVAL(INTERVAL), .RET_W(RET_W)) u_cnt (
    .clk, .rst_n, .instr_ret, .mem_stall,
    .l2_read(ev_read), .l2_write(ev_write), .l2_miss(ev_miss), .l2_load_miss(ev_load_miss),
    .snap, .interval_end, .stats
  );

  // ---- profiling units X, X/2, X/4, X/8, X/16 ---------------------------
  logic             acc;
  logic [CNT_W-1:0] prof_misses      [NUM_PROF];
  logic [CNT_W-1:0] prof_load_misses [NUM_PROF];

  assign acc = req_valid && req_ready;

  for (genvar k = 0; k < NUM_PROF; k++) begin : g_prof
    profiling_unit #(.DIV(1 << k), .FULL_SETS(SETS)) u_prof (
      .clk, .rst_n,
      .acc_valid(acc), .acc_addr(req_addr), .acc_load(req_kind == REQ_LOAD),
      .snap, .misses(prof_misses[k]), .load_misses(prof_load_misses[k])
    );
  end

  // ---- energy-saving algorithm and reconfiguration -------------------------
  logic alg_busy, reconfig_busy;

  energy_saving_algorithm #(.N(NUM_COLORS), .CLOW(CLOW), .Q(Q),
                            .BLOCKS_PER_COLOR(SETS / NUM_COLORS * L2_WAYS)) u_alg (
    .clk, .rst_n,
    .start(interval_end && !reconfig_busy && !alg_busy), .stats,
    .prof_misses, .prof_load_misses,
    .cur_colors(active_colors),
    .busy(alg_busy), .done(decision_valid), .new_colors(decision_colors),
    .best_energy(decision_energy), .n_evaluated(decision_evaluated),
    .n_rejected(decision_rejected)
  );

  assign reconfig_busy = hold;

  reconfig_sequencer #(.NUM_COLORS(NUM_COLORS)) u_seq (
    .clk, .rst_n,
    .apply(decision_valid), .new_colors(decision_colors),
    .active_colors, .power_on, .hold, .done(reconfig_done),
    .map_wr_en, .map_wr_region, .map_wr_color,
    .scan_start, .scan_colors, .scan_done, .llc_idle
  );

  // an accepted request always lands in a powered colour
  a_powered: assert property (@(posedge clk) disable iff (!rst_n)
                              acc |-> power_on[req_color]);

endmodule
