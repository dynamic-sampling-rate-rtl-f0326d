// superquad_gen: sample-grid generator of the rasterizer for Dynamic
// Sampling Rate.
//
// At sampling level L a 16x16 tile is covered by (16>>L) x (16>>L)
// superfragments of 2^L x 2^L pixels, and each superfragment is sampled once,
// at the centre of its pixel block. As in the baseline, fragments travel in
// groups of 2x2 (here superquads). For every primitive of a tile (`start`)
// this block walks the tile's superquads in raster order and, for each, gives
// the superfragment coordinates of its top-left lane and the four screen
// sample positions. Positions are in half-pixel units, so the centre of a
// block of s pixels starting at pixel x is exactly 2x + s. At 1/256x the tile
// holds one superfragment: it is sent as a superquad with only lane 0 valid.
// Lane i sits at (i & 1, i >> 1) inside the superquad.
// Lane 0 always has even superfragment coordinates, so sq_sx[0] and
// sq_sy[0] are always 0; they are kept so that sq_sx/sq_sy are plain
// superfragment indices for the Color Buffer.
//
// The walk is busy while sq_valid is high; `start` is ignored meanwhile.
// Superquads per primitive: 64, 16, 4, 1, 1 for levels 0..4. One superquad is
// offered per cycle on a valid/ready port; `last` marks the final one.
// Coverage tests against the primitive's edges and attribute interpolation are
// the job of the baseline rasterizer, which consumes these positions.
// Sampling at superfragment centres is the paper's; the walk order and the
// handling of the lone 1/256x superfragment are this design's choices.
module superquad_gen
  import dsr_pkg::*;
#(
  parameter int unsigned TILE_X_W = 7,     // 120 tiles across 1920 pixels
  parameter int unsigned TILE_Y_W = 7,     // 68 tile rows for 1080 pixels
  localparam int unsigned XW      = TILE_X_W + IDX_W + 1,  // half-pixel units
  localparam int unsigned YW      = TILE_Y_W + IDX_W + 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  sr_level_e              level,
  input  logic [TILE_X_W-1:0]    tile_x,
  input  logic [TILE_Y_W-1:0]    tile_y,
  output logic                   sq_valid,
  input  logic                   sq_ready,
  output logic                   sq_last,
  output logic [IDX_W-1:0]       sq_sx,     // superfragment coords of lane 0
  output logic [IDX_W-1:0]       sq_sy,
  output logic [3:0]             sq_mask,   // lanes inside the tile
  output logic [3:0][XW-1:0]     sq_x2,     // sample x, half-pixel units
  output logic [3:0][YW-1:0]     sq_y2
);

  logic [IDX_W-1:0] qx, qy;     // superquad coordinates
  logic [IDX_W:0]   nsf;        // superfragments per tile side: 16 >> L
  logic [IDX_W-1:0] nq_m1;      // superquads per side, minus one
  logic [IDX_W:0]   s;          // superfragment size in pixels: 1 << L

  assign nsf   = (IDX_W+1)'(TILE_DIM >> level);
  assign s     = (IDX_W+1)'(1 << level);
  assign nq_m1 = (level == SR_1_256X) ? '0 : IDX_W'(nsf[IDX_W:1] - 1'b1);

  assign sq_sx    = IDX_W'({qx, 1'b0});
  assign sq_sy    = IDX_W'({qy, 1'b0});
  assign sq_last  = (qx == nq_m1) && (qy == nq_m1);

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      logic [IDX_W+1:0] sfx, sfy;
      logic [XW-1:0]    px;
      logic [YW-1:0]    py;
      sfx = (IDX_W+2)'({qx, 1'b0}) + (IDX_W+2)'(i & 1);
      sfy = (IDX_W+2)'({qy, 1'b0}) + (IDX_W+2)'(i >> 1);
      sq_mask[i] = (sfx < (IDX_W+2)'(nsf)) && (sfy < (IDX_W+2)'(nsf));
      px = XW'({tile_x, {IDX_W{1'b0}}}) + XW'(sfx << level);
      py = YW'({tile_y, {IDX_W{1'b0}}}) + YW'(sfy << level);
      sq_x2[i] = XW'(px << 1) + XW'(s);
      sq_y2[i] = YW'(py << 1) + YW'(s);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sq_valid <= 1'b0;
      qx       <= '0;
      qy       <= '0;
    end else if (!sq_valid) begin
      if (start) begin
        sq_valid <= 1'b1;
        qx       <= '0;
        qy       <= '0;
      end
    end else if (sq_ready) begin
      if (sq_last) begin
        sq_valid <= 1'b0;
      end else if (qx == nq_m1) begin
        qx <= '0;
        qy <= qy + 1'b1;
      end else begin
        qx <= qx + 1'b1;
      end
    end
  end

  // The level must not change while a primitive is being walked.
  level_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 sq_valid && !(sq_ready && sq_last) |=> $stable(level));

endmodule
