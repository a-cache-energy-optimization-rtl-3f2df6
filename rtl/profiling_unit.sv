// profiling_unit: a set-sampled auxiliary tag directory that emulates an L2
// of 1/DIV of the real cache size and counts its misses.
//
// Five of these (DIV = 1, 2, 4, 8, 16) estimate at run time how many misses
// the program would incur with 128, 64, 32, 16 and 8 colours. A unit holds
// tags only, no data. It applies set sampling with ratio 1/64: only addresses
// whose block-in-page bits [11:6] equal SAMPLE_SEL are looked up, so a unit
// emulating S sets keeps S/64 sets. With that choice the sampled set of an
// address is the next bits above the page offset (addr[12 +: log2(S/64)]),
// and every unit samples the same addresses. Each set is WAYS-way
// associative with true LRU kept as per-way ages.
//
// Interface: one access per cycle (acc_valid, acc_addr, acc_load). The
// lookup and the tag/LRU update happen in the same cycle. Counts restart at
// snap, and the finished interval's counts appear on misses / load_misses in
// the next cycle (an access in the snap cycle is counted in the new interval).
// Sizes and the sampling ratio follow the scheme; the choice of sampled sets,
// the LRU encoding and the counter widths are this design's.
module profiling_unit #(
  parameter int unsigned DIV        = 1,
  parameter int unsigned FULL_SETS  = smart_pkg::L2_SETS,
  parameter int unsigned WAYS       = smart_pkg::L2_WAYS,
  parameter int unsigned SAMPLE_SHIFT = smart_pkg::SAMPLE_SHIFT,
  parameter int unsigned SAMPLE_SEL = 0,
  parameter int unsigned PA_W       = smart_pkg::PA_W,
  parameter int unsigned CNT_W      = smart_pkg::CNT_W,
  localparam int unsigned PSETS     = FULL_SETS / DIV / (1 << SAMPLE_SHIFT),
  localparam int unsigned SW        = (PSETS > 1) ? $clog2(PSETS) : 1,
  localparam int unsigned SET_LO    = smart_pkg::PAGE_W,
  localparam int unsigned TAG_LO    = SET_LO + ((PSETS > 1) ? $clog2(PSETS) : 0),
  localparam int unsigned TAG_W     = PA_W - TAG_LO,
  localparam int unsigned AGE_W     = $clog2(WAYS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             acc_valid,
  input  logic [PA_W-1:0]  acc_addr,
  input  logic             acc_load,
  input  logic             snap,
  output logic [CNT_W-1:0] misses,
  output logic [CNT_W-1:0] load_misses
);

  logic [TAG_W-1:0] tag_q   [PSETS][WAYS];
  logic             valid_q [PSETS][WAYS];
  logic [AGE_W-1:0] age_q   [PSETS][WAYS];
  logic [CNT_W-1:0] miss_cnt_q, lmiss_cnt_q;

  logic             sampled;
  logic [SW-1:0]    set_idx;
  logic [TAG_W-1:0] tag;
  logic             hit;
  logic [AGE_W-1:0] way_sel, inv_way, old_age;
  logic             have_inv;

  assign sampled = acc_addr[smart_pkg::OFFSET_W +: SAMPLE_SHIFT] == SAMPLE_SHIFT'(SAMPLE_SEL);
  assign tag     = acc_addr[PA_W-1:TAG_LO];
  if (PSETS > 1) begin : g_idx
    assign set_idx = acc_addr[SET_LO +: SW];
  end else begin : g_noidx
    assign set_idx = '0;
  end

  always_comb begin
    hit      = 1'b0;
    way_sel  = '0;
    have_inv = 1'b0;
    inv_way  = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (!valid_q[set_idx][w]) begin
        have_inv = 1'b1;
        inv_way  = AGE_W'(w);
      end
    end
    // victim: lowest invalid way, else the least recently used
    if (have_inv) way_sel = inv_way;
    else begin
      for (int w = 0; w < WAYS; w++)
        if (age_q[set_idx][w] == AGE_W'(WAYS - 1)) way_sel = AGE_W'(w);
    end
    for (int w = 0; w < WAYS; w++) begin
      if (valid_q[set_idx][w] && tag_q[set_idx][w] == tag) begin
        hit     = 1'b1;
        way_sel = AGE_W'(w);
      end
    end
    old_age = age_q[set_idx][way_sel];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < PSETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          valid_q[s][w] <= 1'b0;
          age_q[s][w]   <= AGE_W'(w);
          tag_q[s][w]   <= '0;
        end
      miss_cnt_q  <= '0;
      lmiss_cnt_q <= '0;
      misses      <= '0;
      load_misses <= '0;
    end else begin
      logic miss_ev, lmiss_ev;
      miss_ev  = acc_valid && sampled && !hit;
      lmiss_ev = miss_ev && acc_load;
      if (acc_valid && sampled) begin
        for (int w = 0; w < WAYS; w++)
          if (age_q[set_idx][w] < old_age) age_q[set_idx][w] <= age_q[set_idx][w] + 1'b1;
        age_q[set_idx][way_sel] <= '0;
        if (!hit) begin
          valid_q[set_idx][way_sel] <= 1'b1;
          tag_q[set_idx][way_sel]   <= tag;
        end
      end
      if (snap) begin
        misses      <= miss_cnt_q;
        load_misses <= lmiss_cnt_q;
        miss_cnt_q  <= CNT_W'(miss_ev);
        lmiss_cnt_q <= CNT_W'(lmiss_ev);
      end else begin
        miss_cnt_q  <= miss_cnt_q + CNT_W'(miss_ev);
        lmiss_cnt_q <= lmiss_cnt_q + CNT_W'(lmiss_ev);
      end
    end
  end

endmodule
