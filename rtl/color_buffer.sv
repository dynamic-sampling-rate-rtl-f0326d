// color_buffer: on-chip tile Color Buffer extended for superfragments.
//
// 16 lines of 16 RGBA8 pixels (1 KB, one 64-byte line per tile row). When a
// tile is rendered at a reduced sampling rate (level L, one superfragment per
// 2^L x 2^L pixels) blending performs a single read and a single write per
// superfragment, addressed by its superfragment coordinates (sx, sy); the
// colour is kept at the superfragment's top-left pixel (sx<<L, sy<<L) and the
// other pixels stay unwritten. When the tile is complete `up_start` launches
// the upsampling pass, which copies every superfragment's colour into all of
// its pixels: one line per cycle, line y is rebuilt from line (y & ~(2^L-1)),
// taking for pixel x the pixel (x & ~(2^L-1)). Lines are processed in order, and
// an anchor pixel maps onto itself, so a line read after an earlier line was
// rewritten still holds the right anchors. At level 0 the pass changes
// nothing. `up_done` pulses after the 16th line (16 cycles after up_start).
//
// Two row read ports (registered, data the cycle after the request) serve the
// flush to memory (port A) and the Frequency Analysis Unit (port B). The
// blending read port is registered too. Single access per superfragment and
// upsampling by replication are the paper's; the anchor position and the
// one-line-per-cycle schedule are this design's choices.
module color_buffer
  import dsr_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  // blending (superfragment) access, level shared with the whole tile
  input  sr_level_e        level,
  input  logic             px_rd_en,
  input  logic [IDX_W-1:0] px_rd_sx,
  input  logic [IDX_W-1:0] px_rd_sy,
  output rgba_t            px_rd_data,
  input  logic             px_wr_en,
  input  logic [IDX_W-1:0] px_wr_sx,
  input  logic [IDX_W-1:0] px_wr_sy,
  input  rgba_t            px_wr_data,
  // upsampling pass
  input  logic             up_start,
  output logic             up_busy,
  output logic             up_done,
  // row read ports
  input  logic             rd_a_en,
  input  logic [IDX_W-1:0] rd_a_addr,
  output color_row_t       rd_a_row,
  input  logic             rd_b_en,
  input  logic [IDX_W-1:0] rd_b_addr,
  output color_row_t       rd_b_row
);

  localparam int unsigned N = TILE_DIM;

  color_row_t       mem [N];
  logic [IDX_W-1:0] up_y;
  logic [IDX_W-1:0] mask;        // low bits cleared to reach the anchor
  color_row_t       up_line;

  always_comb begin
    unique case (level)
      SR_1X:    mask = 4'b1111;
      SR_1_4X:  mask = 4'b1110;
      SR_1_16X: mask = 4'b1100;
      SR_1_64X: mask = 4'b1000;
      default:  mask = 4'b0000;
    endcase
  end

  function automatic logic [IDX_W-1:0] anchor(input logic [IDX_W-1:0] s, input sr_level_e l);
    return IDX_W'(s << l);
  endfunction

  always_comb begin
    for (int x = 0; x < N; x++) up_line[x] = mem[up_y & mask][IDX_W'(x) & mask];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      up_busy <= 1'b0;
      up_done <= 1'b0;
      up_y    <= '0;
    end else begin
      up_done <= 1'b0;
      if (up_start && !up_busy) begin
        up_busy <= 1'b1;
        up_y    <= '0;
      end else if (up_busy) begin
        up_y <= up_y + 1'b1;
        if (up_y == IDX_W'(N - 1)) begin
          up_busy <= 1'b0;
          up_done <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (up_busy)
      mem[up_y] <= up_line;
    else if (px_wr_en)
      mem[anchor(px_wr_sy, level)][anchor(px_wr_sx, level)] <= px_wr_data;
    if (px_rd_en) px_rd_data <= mem[anchor(px_rd_sy, level)][anchor(px_rd_sx, level)];
    if (rd_a_en)  rd_a_row   <= mem[rd_a_addr];
    if (rd_b_en)  rd_b_row   <= mem[rd_b_addr];
  end

  // Blending must not write while the buffer is being upsampled, and a
  // superfragment coordinate must lie inside the tile at the current level.
  no_write_during_upsample: assert property (@(posedge clk) disable iff (!rst_n)
                                             up_busy |-> !px_wr_en);
  sf_in_tile: assert property (@(posedge clk) disable iff (!rst_n)
                               px_wr_en |-> (8'(px_wr_sx) << level) < 8'(N) &&
                                           (8'(px_wr_sy) << level) < 8'(N));

endmodule
