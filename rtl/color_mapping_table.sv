// color_mapping_table: the region-to-colour mapping table of the
// colour-reconfigurable L2.
//
// Physical pages fall into NUM_COLORS memory regions by the low bits of their
// page number. Each region owns one table entry naming the cache colour its
// blocks are placed in; the cache set index is {colour, block-in-page}.
// Shrinking the cache maps all regions onto the colours that stay powered;
// growing it moves some regions to the new colours. The table is only
// rewritten between intervals, one entry per cycle, by the reconfiguration
// sequencer.
//
// Interface: two combinational read ports (rd_region_a for demand accesses,
// rd_region_b for the flush scan) and one synchronous write port.
// Reset gives the identity map, which is the full-size cache.
// Following the scheme: a small table indexed by region. Own choices: the
// reset value and the two read ports.
module color_mapping_table #(
  parameter int unsigned NUM_COLORS = smart_pkg::NUM_COLORS,
  localparam int unsigned CW = $clog2(NUM_COLORS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [CW-1:0] rd_region_a,
  output logic [CW-1:0] rd_color_a,
  input  logic [CW-1:0] rd_region_b,
  output logic [CW-1:0] rd_color_b,
  input  logic          wr_en,
  input  logic [CW-1:0] wr_region,
  input  logic [CW-1:0] wr_color
);

  logic [CW-1:0] table_q [NUM_COLORS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned r = 0; r < NUM_COLORS; r++) table_q[r] <= CW'(r);
    end else if (wr_en) begin
      table_q[wr_region] <= wr_color;
    end
  end

  assign rd_color_a = table_q[rd_region_a];
  assign rd_color_b = table_q[rd_region_b];

endmodule
