// stt_ram_array: the STT-RAM data array of the L2, one 64-byte block per
// entry (sets x ways entries, 4 MB at the default size).
//
// The array models the asymmetric STT-RAM timing of a 4 MB cache with a
// 1-second retention time at 2 GHz: a read takes READ_CYC = 2 cycles
// (0.973 ns) and a write WRITE_CYC = 12 cycles (5.571 ns). One operation is
// in flight at a time: start is accepted when busy is low (cycle 0), and done
// pulses in cycle READ_CYC or WRITE_CYC; for a read, rdata is valid in that
// cycle and held until the next read completes. Both latencies must be at
// least 2 cycles. The storage itself is a
// plain array; the MTJ cell and its sense circuits are not modelled.
module stt_ram_array #(
  parameter int unsigned ENTRIES   = smart_pkg::L2_SETS * smart_pkg::L2_WAYS,
  parameter int unsigned DATA_W    = smart_pkg::BLOCK_BITS,
  parameter int unsigned READ_CYC  = smart_pkg::STT_READ_CYC,
  parameter int unsigned WRITE_CYC = smart_pkg::STT_WRITE_CYC,
  localparam int unsigned AW = $clog2(ENTRIES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              we,
  input  logic [AW-1:0]     addr,
  input  logic [DATA_W-1:0] wdata,
  output logic              busy,
  output logic              done,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [ENTRIES];

  if (READ_CYC < 2 || WRITE_CYC < 2) begin : g_bad_latency
    $error("stt_ram_array: latencies below 2 cycles are not supported");
  end

  logic          active_q, we_q;
  logic [AW-1:0] addr_q;
  logic [DATA_W-1:0] wdata_q;
  logic [7:0]    left_q;

  assign busy = active_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q <= 1'b0;
      we_q     <= 1'b0;
      addr_q   <= '0;
      wdata_q  <= '0;
      left_q   <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!active_q) begin
        if (start) begin
          active_q <= 1'b1;
          we_q     <= we;
          addr_q   <= addr;
          wdata_q  <= wdata;
          left_q   <= 8'(we ? WRITE_CYC - 2 : READ_CYC - 2);
        end
      end else if (left_q == 8'd0) begin
        active_q <= 1'b0;
        done     <= 1'b1;
      end else begin
        left_q <= left_q - 8'd1;
      end
    end
  end

  // storage: written at the end of a write, read at the end of a read
  always_ff @(posedge clk) begin
    if (active_q && left_q == 8'd0) begin
      if (we_q) mem[addr_q] <= wdata_q;
      else      rdata       <= mem[addr_q];
    end
  end

endmodule
