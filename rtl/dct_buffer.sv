// dct_buffer: the DCT Buffer of the Frequency Analysis Unit, an N x N array
// of coefficients shared by the two passes of the 2D DCT.
//
// Writes: every cycle the LANES compute units produce the same coefficient
// index `wr_idx` for LANES consecutive input rows (group `wr_grp`). The slice
// is written either
//   * as part of LANES columns   (wr_cols = 1): buf[wr_idx][wr_grp*LANES + i]
//     - used by the row pass, which stores each unit's result as a column;
//   * as part of LANES rows      (wr_cols = 0): buf[wr_grp*LANES + i][wr_idx]
//     - used by the column pass.
// Reads: one whole row per cycle, registered (rd_row valid the cycle after
// rd_en).
//
// The paper writes the buffer by columns and reads it by rows so that the two
// transpositions of DCT = (K (K X)^T)^T come for free. Writing the second pass
// by columns in place would overwrite elements of rows not yet read, so here
// the second pass writes rows: the buffer then ends up holding DCT^T, which is
// harmless because MaxC depends only on |c| and on p+q. That second write
// orientation is this design's change.
module dct_buffer
  import dsr_pkg::*;
#(
  parameter int unsigned N     = TILE_DIM,
  parameter int unsigned LANES = NUM_UNITS,
  parameter int unsigned W     = COEF_W
) (
  input  logic                              clk,
  input  logic                              wr_en,
  input  logic                              wr_cols,
  input  logic [$clog2(N)-1:0]              wr_idx,
  input  logic [$clog2(N/LANES)-1:0]        wr_grp,
  input  logic signed [LANES-1:0][W-1:0]    wr_data,
  input  logic                              rd_en,
  input  logic [$clog2(N)-1:0]              rd_addr,
  output logic signed [N-1:0][W-1:0]        rd_row
);

  logic signed [N-1:0][W-1:0] mem [N];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int i = 0; i < LANES; i++) begin
        if (wr_cols) mem[wr_idx][wr_grp * LANES + i]   <= wr_data[i];
        else         mem[wr_grp * LANES + i][wr_idx]   <= wr_data[i];
      end
    end
    if (rd_en) rd_row <= mem[rd_addr];
  end

endmodule
