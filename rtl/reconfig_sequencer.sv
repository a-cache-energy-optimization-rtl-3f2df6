// reconfig_sequencer: applies a new number of active colours to the cache.
//
// Colours 0 .. active-1 are powered; the rest are power-gated. When the
// energy-saving algorithm asks for a different count, the sequencer
//  1. holds new L2 requests (hold stays high until it finishes),
//  2. when growing, switches on the power of the added colours,
//  3. rewrites the whole mapping table, one region per cycle, so that region
//     r maps to colour r mod active (a region whose home colour r is active
//     stays at home; regions are spread evenly over the active colours),
//  4. starts the L2 flush scan over the colours that were or will be active
//     (scan_colors = max(old, new)): the cache writes back and invalidates
//     every line whose region no longer maps to the colour it sits in,
//  5. when shrinking, switches off the power of the removed colours, which by
//     then hold no valid line.
// Timing: NUM_COLORS cycles for the table plus the scan; done pulses at the
// end and active_colors takes the new value. A request equal to the current
// count finishes in two cycles without touching the cache.
// Flushing removed colours and remapping their regions follows the scheme;
// the r mod active placement, the hold of requests and the order of the
// steps are this design's choices.
module reconfig_sequencer #(
  parameter int unsigned NUM_COLORS = smart_pkg::NUM_COLORS,
  localparam int unsigned CW  = $clog2(NUM_COLORS),
  localparam int unsigned CW1 = CW + 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  apply,
  input  logic [CW1-1:0]        new_colors,
  output logic [CW1-1:0]        active_colors,
  output logic [NUM_COLORS-1:0] power_on,
  output logic                  hold,
  output logic                  done,
  // mapping table write port
  output logic                  map_wr_en,
  output logic [CW-1:0]         map_wr_region,
  output logic [CW-1:0]         map_wr_color,
  // L2 flush scan
  output logic                  scan_start,
  output logic [CW1-1:0]        scan_colors,
  input  logic                  scan_done,
  input  logic                  llc_idle
);

  typedef enum logic [2:0] {R_IDLE, R_WAIT_IDLE, R_REMAP, R_SCAN, R_SCAN_WAIT, R_POWER_DOWN, R_DONE} rstate_e;
  rstate_e state_q;

  logic [CW1-1:0] target_q;
  logic [CW-1:0]  region_q;
  logic [CW1-1:0] color_q;

  assign map_wr_en     = state_q == R_REMAP;
  assign map_wr_region = region_q;
  assign map_wr_color  = CW'(color_q);
  assign hold          = state_q != R_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q       <= R_IDLE;
      target_q      <= CW1'(NUM_COLORS);
      active_colors <= CW1'(NUM_COLORS);
      power_on      <= '1;
      region_q      <= '0;
      color_q       <= '0;
      scan_start    <= 1'b0;
      scan_colors   <= '0;
      done          <= 1'b0;
    end else begin
      scan_start <= 1'b0;
      done       <= 1'b0;
      unique case (state_q)
        R_IDLE: if (apply) begin
          target_q <= new_colors;
          state_q  <= (new_colors == active_colors) ? R_DONE : R_WAIT_IDLE;
        end
        R_WAIT_IDLE: if (llc_idle) begin
          // power up added colours before anything can map to them
          for (int c = 0; c < NUM_COLORS; c++)
            if (CW1'(c) < target_q) power_on[c] <= 1'b1;
          region_q <= '0;
          color_q  <= '0;
          state_q  <= R_REMAP;
        end
        R_REMAP: begin
          region_q <= region_q + 1'b1;
          color_q  <= (color_q + 1'b1 == target_q) ? '0 : color_q + 1'b1;
          if (region_q == CW'(NUM_COLORS - 1)) state_q <= R_SCAN;
        end
        R_SCAN: begin
          scan_start  <= 1'b1;
          scan_colors <= (target_q > active_colors) ? target_q : active_colors;
          state_q     <= R_SCAN_WAIT;
        end
        R_SCAN_WAIT: if (scan_done) state_q <= R_POWER_DOWN;
        R_POWER_DOWN: begin
          for (int c = 0; c < NUM_COLORS; c++)
            if (CW1'(c) >= target_q) power_on[c] <= 1'b0;
          state_q <= R_DONE;
        end
        R_DONE: begin
          active_colors <= target_q;
          done          <= 1'b1;
          state_q       <= R_IDLE;
        end
        default: state_q <= R_IDLE;
      endcase
    end
  end

endmodule
