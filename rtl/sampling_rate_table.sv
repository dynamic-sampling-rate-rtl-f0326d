// sampling_rate_table: the Sampling Rate Table (SRT), one 3-bit sampling-rate
// state per screen tile (8100 tiles for a 1080x1920 frame of 16x16 tiles).
//
// Port A is read by the tile scheduler when a tile starts, to tell the
// rasterizer at which rate to sample it. Port B belongs to the Frequency
// Analysis Unit, which reads the state a tile was rendered with and writes the
// state decided for the next frame. Both reads are synchronous (data valid the
// cycle after the request). A port-A read of the entry port B writes in the
// same cycle returns the old value.
//
// After reset every entry is set to 1x, one entry per cycle (NUM_TILES
// cycles), with init_busy high; requests made meanwhile are ignored. The table
// and its entry width follow the paper; the two ports and the reset sweep are
// this design's choices.
module sampling_rate_table
  import dsr_pkg::*;
#(
  parameter int unsigned NUM_TILES = 8100,
  localparam int unsigned AW       = $clog2(NUM_TILES)
) (
  input  logic      clk,
  input  logic      rst_n,
  output logic      init_busy,
  // port A: read
  input  logic      a_rd_en,
  input  logic [AW-1:0] a_addr,
  output sr_level_e a_rd_data,
  // port B: read / write
  input  logic      b_rd_en,
  input  logic      b_wr_en,
  input  logic [AW-1:0] b_addr,
  input  sr_level_e b_wr_data,
  output sr_level_e b_rd_data
);

  sr_level_e     mem [NUM_TILES];
  logic [AW-1:0] init_ptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_ptr  <= '0;
    end else if (init_busy) begin
      init_ptr <= init_ptr + 1'b1;
      if (init_ptr == AW'(NUM_TILES - 1)) init_busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (init_busy) begin
      mem[init_ptr] <= SR_1X;
    end else begin
      if (b_wr_en) mem[b_addr] <= b_wr_data;
      if (a_rd_en) a_rd_data <= mem[a_addr];
      if (b_rd_en) b_rd_data <= mem[b_addr];
    end
  end

  // The tile index must address an existing entry.
  a_addr_in_range: assert property (@(posedge clk) disable iff (!rst_n)
                                    a_rd_en && !init_busy |-> a_addr < AW'(NUM_TILES));
  b_addr_in_range: assert property (@(posedge clk) disable iff (!rst_n)
                                    (b_rd_en || b_wr_en) && !init_busy |-> b_addr < AW'(NUM_TILES));

endmodule
