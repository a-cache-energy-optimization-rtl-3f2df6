// stt_llc: the colour-indexed, write-back STT-RAM last-level (L2) cache.
//
// Organisation (defaults): 4 MB, 8 ways, 64-byte blocks, LRU replacement,
// 8192 sets grouped into 128 colours of 64 sets. The set of an address is
// {colour, block-in-page}, where the colour comes from the region-to-colour
// mapping table (req_color, looked up outside from address bits [18:12]).
// Because several regions can share a colour, the stored tag is the whole
// physical page number, whose low bits are the region.
//
// Requests (one at a time, valid/ready): REQ_LOAD and REQ_IFETCH read a
// block, REQ_WB writes a whole block back from L1. A read hit answers after
// the 1-cycle tag lookup and the 2-cycle STT-RAM read. A write hit takes the
// 12-cycle STT-RAM write. A miss picks an invalid way or the LRU way, writes
// the victim back if dirty, and for a read fetches the block from memory,
// answers as soon as it arrives and then writes it into the array; a
// write-back miss allocates the block without fetching it. resp_valid pulses
// once per request (for REQ_WB it is the acknowledgement).
//
// Flush scan (scan_start, scan_colors): for every way of every set in colours
// 0 .. scan_colors-1 the cache asks the mapping table (scan_region ->
// scan_region_color) where the line's region now lives; a line found in any
// other colour is written back if dirty and invalidated. This is how data in
// colours being switched off is flushed, and how blocks of regions moved to
// new colours leave their old place. scan_done pulses at the end. Requests
// are not accepted while hold is high or a scan runs.
//
// After reset the tag array is cleared by a sweep of one set per cycle
// (idle goes high when it ends), as a RAM-based tag array would need.
// Size, associativity, LRU, the latencies and colour indexing follow the
// scheme; the blocking single-request controller, write-allocate without
// fetch for write-backs and the scan order are this design's choices.
module stt_llc
  import smart_pkg::*;
#(
  parameter int unsigned SETS       = smart_pkg::L2_SETS,
  parameter int unsigned WAYS       = smart_pkg::L2_WAYS,
  parameter int unsigned NUM_COLORS = smart_pkg::NUM_COLORS,
  parameter int unsigned PA_W       = smart_pkg::PA_W,
  parameter int unsigned DATA_W     = smart_pkg::BLOCK_BITS,
  parameter int unsigned READ_CYC   = smart_pkg::STT_READ_CYC,
  parameter int unsigned WRITE_CYC  = smart_pkg::STT_WRITE_CYC,
  localparam int unsigned CW     = $clog2(NUM_COLORS),
  localparam int unsigned CW1    = CW + 1,
  localparam int unsigned SET_W  = $clog2(SETS),
  localparam int unsigned SPC_W  = SET_W - CW,            // sets per colour, log2
  localparam int unsigned WAY_W  = $clog2(WAYS),
  localparam int unsigned TAG_LO = OFFSET_W + SPC_W,
  localparam int unsigned TAG_W  = PA_W - TAG_LO
) (
  input  logic              clk,
  input  logic              rst_n,
  // requests from the L1 side
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [PA_W-1:0]   req_addr,
  input  req_kind_e         req_kind,
  input  logic [DATA_W-1:0] req_wdata,
  input  logic [CW-1:0]     req_color,
  output logic              resp_valid,
  output logic              resp_hit,
  output logic [DATA_W-1:0] resp_rdata,
  input  logic              hold,
  output logic              idle,
  // main memory
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [PA_W-1:0]   mem_req_addr,
  output logic [DATA_W-1:0] mem_req_wdata,
  input  logic              mem_resp_valid,
  input  logic [DATA_W-1:0] mem_resp_rdata,
  // flush scan
  input  logic              scan_start,
  input  logic [CW1-1:0]    scan_colors,
  output logic              scan_done,
  output logic [CW-1:0]     scan_region,
  input  logic [CW-1:0]     scan_region_color,
  // events for the interval counters
  output logic              ev_read,
  output logic              ev_write,
  output logic              ev_miss,
  output logic              ev_load_miss,
  output logic              ev_writeback,
  output logic              ev_flush
);

  typedef struct packed {
    logic [WAYS-1:0]             valid;
    logic [WAYS-1:0]             dirty;
    logic [WAYS-1:0][WAY_W-1:0]  age;   // 0 = most recently used
    logic [WAYS-1:0][TAG_W-1:0]  tag;
  } set_t;

  typedef enum logic [3:0] {
    L_INIT, L_IDLE, L_LOOKUP, L_RD_WAIT, L_WR_WAIT, L_VICT_RD, L_VICT_WB,
    L_MEM_RD, L_MEM_WAIT, L_FILL_WAIT, L_SCAN, L_SCAN_RD, L_SCAN_WB, L_SCAN_DONE
  } lstate_e;

  set_t sets_q [SETS];

  lstate_e            state_q;
  logic [SET_W-1:0]   set_q;
  logic [WAY_W-1:0]   way_q;
  logic [TAG_W-1:0]   tag_q;
  req_kind_e          kind_q;
  logic [DATA_W-1:0]  data_q;
  logic [TAG_W-1:0]   vtag_q;
  logic [SET_W:0]     scan_end_q;
  logic               fill_resp_q;

  // ---- data array --------------------------------------------------------
  logic              arr_start, arr_we, arr_busy, arr_done;
  logic [SET_W+WAY_W-1:0] arr_addr;
  logic [DATA_W-1:0] arr_wdata, arr_rdata;

  stt_ram_array #(
    .ENTRIES(SETS * WAYS), .DATA_W(DATA_W), .READ_CYC(READ_CYC), .WRITE_CYC(WRITE_CYC)
  ) u_data (
    .clk, .rst_n, .start(arr_start), .we(arr_we), .addr(arr_addr), .wdata(arr_wdata),
    .busy(arr_busy), .done(arr_done), .rdata(arr_rdata)
  );

  // ---- lookup of the current set -----------------------------------------
  set_t             cur_set;
  logic             hit, have_inv;
  logic [WAY_W-1:0] hit_way, victim_way;

  assign cur_set = sets_q[set_q];

  always_comb begin
    hit        = 1'b0;
    hit_way    = '0;
    have_inv   = 1'b0;
    victim_way = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (!cur_set.valid[w]) begin have_inv = 1'b1; victim_way = WAY_W'(w); end
    if (!have_inv)
      for (int w = 0; w < WAYS; w++)
        if (cur_set.age[w] == WAY_W'(WAYS - 1)) victim_way = WAY_W'(w);
    for (int w = 0; w < WAYS; w++)
      if (cur_set.valid[w] && cur_set.tag[w] == tag_q) begin hit = 1'b1; hit_way = WAY_W'(w); end
  end

  function automatic set_t touch(input set_t s, input logic [WAY_W-1:0] way);
    set_t r;
    r = s;
    for (int w = 0; w < WAYS; w++)
      if (s.age[w] < s.age[way]) r.age[w] = s.age[w] + 1'b1;
    r.age[way] = '0;
    return r;
  endfunction

  // scan: the line under inspection and where its region maps now
  logic [CW-1:0] set_color;
  logic          scan_move;
  assign set_color   = set_q[SET_W-1:SPC_W];
  assign scan_region = cur_set.tag[way_q][CW-1:0];
  assign scan_move   = cur_set.valid[way_q] && (scan_region_color != set_color);

  // ---- tag-array write port -----------------------------------------------
  logic             tw_en;
  set_t             tw_data;

  always_comb begin
    tw_en   = 1'b0;
    tw_data = cur_set;
    unique case (state_q)
      L_INIT: begin
        tw_en         = 1'b1;
        tw_data.valid = '0;
        tw_data.dirty = '0;
        for (int w = 0; w < WAYS; w++) tw_data.age[w] = WAY_W'(w);
        tw_data.tag   = '0;
      end
      L_LOOKUP: begin
        tw_en = 1'b1;
        if (hit) begin
          tw_data = touch(cur_set, hit_way);
          if (kind_q == REQ_WB) tw_data.dirty[hit_way] = 1'b1;
        end else begin
          tw_data = touch(cur_set, victim_way);
          tw_data.valid[victim_way] = 1'b1;
          tw_data.dirty[victim_way] = (kind_q == REQ_WB);
          tw_data.tag[victim_way]   = tag_q;
        end
      end
      L_SCAN: if (scan_move && !cur_set.dirty[way_q]) begin
        tw_en = 1'b1;
        tw_data.valid[way_q] = 1'b0;
      end
      L_SCAN_WB: if (mem_req_ready) begin
        tw_en = 1'b1;
        tw_data.valid[way_q] = 1'b0;
        tw_data.dirty[way_q] = 1'b0;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (tw_en) sets_q[set_q] <= tw_data;
  end

  // ---- data-array and memory requests -------------------------------------
  always_comb begin
    arr_start = 1'b0;
    arr_we    = 1'b0;
    arr_addr  = {set_q, way_q};
    arr_wdata = data_q;
    unique case (state_q)
      L_LOOKUP: begin
        arr_start = hit || (cur_set.valid[victim_way] && cur_set.dirty[victim_way])
                  || kind_q == REQ_WB;
        arr_addr  = {set_q, hit ? hit_way : victim_way};
        // a hit write, or a write-back miss with a clean victim, writes now
        arr_we    = (kind_q == REQ_WB) &&
                    (hit || !(cur_set.valid[victim_way] && cur_set.dirty[victim_way]));
      end
      L_VICT_WB:  begin  // write-back miss: store the block once the victim left
        arr_start = mem_req_ready && kind_q == REQ_WB;
        arr_we    = 1'b1;
      end
      L_MEM_WAIT: begin
        arr_start = mem_resp_valid;
        arr_we    = 1'b1;
        arr_wdata = mem_resp_rdata;
      end
      L_SCAN:     arr_start = scan_move && cur_set.dirty[way_q];
      default: ;
    endcase
  end

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = {tag_q, set_q[SPC_W-1:0], OFFSET_W'(0)};
    mem_req_wdata = arr_rdata;
    unique case (state_q)
      L_VICT_WB, L_SCAN_WB: begin
        mem_req_valid = 1'b1;
        mem_req_we    = 1'b1;
        mem_req_addr  = {vtag_q, set_q[SPC_W-1:0], OFFSET_W'(0)};
      end
      L_MEM_RD: mem_req_valid = 1'b1;
      default: ;
    endcase
  end

  assign req_ready = state_q == L_IDLE && !hold && !scan_start;
  assign idle      = state_q == L_IDLE;

  // ---- control ----------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= L_INIT;
      set_q        <= '0;
      way_q        <= '0;
      tag_q        <= '0;
      kind_q       <= REQ_LOAD;
      data_q       <= '0;
      vtag_q       <= '0;
      scan_end_q   <= '0;
      fill_resp_q  <= 1'b0;
      resp_valid   <= 1'b0;
      resp_hit     <= 1'b0;
      resp_rdata   <= '0;
      scan_done    <= 1'b0;
      ev_read      <= 1'b0;
      ev_write     <= 1'b0;
      ev_miss      <= 1'b0;
      ev_load_miss <= 1'b0;
      ev_writeback <= 1'b0;
      ev_flush     <= 1'b0;
    end else begin
      resp_valid   <= 1'b0;
      scan_done    <= 1'b0;
      ev_read      <= 1'b0;
      ev_write     <= 1'b0;
      ev_miss      <= 1'b0;
      ev_load_miss <= 1'b0;
      ev_writeback <= 1'b0;
      ev_flush     <= 1'b0;
      unique case (state_q)
        L_INIT: begin
          set_q <= set_q + 1'b1;
          if (set_q == SET_W'(SETS - 1)) state_q <= L_IDLE;
        end
        L_IDLE: begin
          if (scan_start) begin
            set_q      <= '0;
            way_q      <= '0;
            scan_end_q <= (SET_W+1)'(scan_colors) << SPC_W;
            state_q    <= (scan_colors == '0) ? L_SCAN_DONE : L_SCAN;
          end else if (req_valid && !hold) begin
            set_q   <= {req_color, req_addr[OFFSET_W +: SPC_W]};
            tag_q   <= req_addr[PA_W-1:TAG_LO];
            kind_q  <= req_kind;
            data_q  <= req_wdata;
            state_q <= L_LOOKUP;
          end
        end
        L_LOOKUP: begin
          ev_read  <= kind_q != REQ_WB;
          ev_write <= kind_q == REQ_WB;
          if (hit) begin
            way_q   <= hit_way;
            state_q <= (kind_q == REQ_WB) ? L_WR_WAIT : L_RD_WAIT;
          end else begin
            ev_miss      <= 1'b1;
            ev_load_miss <= kind_q == REQ_LOAD;
            way_q        <= victim_way;
            vtag_q       <= cur_set.tag[victim_way];
            fill_resp_q  <= kind_q == REQ_WB;
            if (cur_set.valid[victim_way] && cur_set.dirty[victim_way]) state_q <= L_VICT_RD;
            else if (kind_q == REQ_WB) state_q <= L_FILL_WAIT;
            else state_q <= L_MEM_RD;
          end
        end
        L_RD_WAIT: if (arr_done) begin
          resp_valid <= 1'b1;
          resp_hit   <= 1'b1;
          resp_rdata <= arr_rdata;
          state_q    <= L_IDLE;
        end
        L_WR_WAIT: if (arr_done) begin
          resp_valid <= 1'b1;
          resp_hit   <= 1'b1;
          state_q    <= L_IDLE;
        end
        L_VICT_RD: if (arr_done) state_q <= L_VICT_WB;
        L_VICT_WB: if (mem_req_ready) begin
          ev_writeback <= 1'b1;
          state_q      <= (kind_q == REQ_WB) ? L_FILL_WAIT : L_MEM_RD;
        end
        L_MEM_RD:   if (mem_req_ready) state_q <= L_MEM_WAIT;
        L_MEM_WAIT: if (mem_resp_valid) begin
          resp_valid <= 1'b1;
          resp_hit   <= 1'b0;
          resp_rdata <= mem_resp_rdata;
          state_q    <= L_FILL_WAIT;
        end
        L_FILL_WAIT: if (arr_done) begin
          if (fill_resp_q) begin
            resp_valid <= 1'b1;
            resp_hit   <= 1'b0;
          end
          state_q <= L_IDLE;
        end
        L_SCAN: begin
          if (scan_move) ev_flush <= 1'b1;
          if (scan_move && cur_set.dirty[way_q]) begin
            vtag_q  <= cur_set.tag[way_q];
            state_q <= L_SCAN_RD;
          end else begin
            way_q <= way_q + 1'b1;
            if (way_q == WAY_W'(WAYS - 1)) begin
              set_q <= set_q + 1'b1;
              if ((SET_W+1)'(set_q) + 1'b1 == scan_end_q) state_q <= L_SCAN_DONE;
            end
          end
        end
        L_SCAN_RD: if (arr_done) state_q <= L_SCAN_WB;
        L_SCAN_WB: if (mem_req_ready) begin
          ev_writeback <= 1'b1;
          way_q <= way_q + 1'b1;
          if (way_q == WAY_W'(WAYS - 1)) begin
            set_q <= set_q + 1'b1;
            state_q <= ((SET_W+1)'(set_q) + 1'b1 == scan_end_q) ? L_SCAN_DONE : L_SCAN;
          end else state_q <= L_SCAN;
        end
        L_SCAN_DONE: begin
          scan_done <= 1'b1;
          set_q     <= '0;
          state_q   <= L_IDLE;
        end
        default: state_q <= L_IDLE;
      endcase
    end
  end

  // a request is never accepted while the data array is still busy
  a_arr_free: assert property (@(posedge clk) disable iff (!rst_n) arr_start |-> !arr_busy);
  // the memory request stays asserted until accepted
  a_mem_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               mem_req_valid && !mem_req_ready |=> mem_req_valid);

endmodule
