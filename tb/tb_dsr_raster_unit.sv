// tb_dsr_raster_unit: end-to-end test of the DSR raster unit at its default
// size (8100-tile Sampling Rate Table, 1080x1920 screen).
//
// The testbench plays the baseline parts around the unit: a tile scheduler,
// a primitive fetcher issuing two full-tile primitives per tile, a rasterizer
// and fragment shader that colour every valid superquad lane from a
// procedural image, a blending stage that writes the first primitive's
// colour and, for the second, reads it back (checked) and overwrites it, and a
// memory that accepts flushed rows with random backpressure.
// Four tiles are rendered over several frames:
//   tile A flat                          -> Reduce down to 1/256x, then Always
//   tile B pixel checkerboard            -> Maintain at 1x
//   tile C flat, then a sharp edge       -> Reduce, then Increase, Maintain
//   tile D 8x8 blocks
// and then tile A alone for a few frames, which makes a new tile wait for
// its own analysis. Checked: the state looked up for each tile equals the
// state the testbench's FSM model predicts; every flushed row equals the
// upsampled image (each pixel the colour of the superfragment covering it);
// every analysis result (both MaxC values, decision, new state) equals a
// bit-exact model computed from the flushed tile. Each mechanism (the four
// FSM transitions, all five rates, both stalls, flush and superquad
// backpressure, blending reads) must occur at least once.
module tb_dsr_raster_unit;
  import dsr_pkg::*;
  import dsr_ref_pkg::*;

  localparam int AW = 13;
  logic clk = 0, rst_n = 0;
  dsr_params_t params;
  logic init_busy;
  logic tile_valid = 0, tile_ready;
  logic [AW-1:0] tile_id = 0;
  logic [6:0] tile_x = 0, tile_y = 0;
  logic tile_active;
  sr_level_e tile_level;
  logic prim_valid = 0, prim_ready;
  logic sq_valid, sq_ready = 0, sq_last;
  logic [3:0] sq_sx, sq_sy, sq_mask;
  logic [3:0][11:0] sq_x2, sq_y2;
  logic bl_rd_en = 0, bl_wr_en = 0;
  logic [3:0] bl_rd_sx = 0, bl_rd_sy = 0, bl_wr_sx = 0, bl_wr_sy = 0;
  rgba_t bl_rd_data, bl_wr_data;
  logic tile_end = 0;
  logic fl_valid, fl_ready = 0, fl_tile_done;
  logic [AW-1:0] fl_tile;
  logic [3:0] fl_row_idx;
  color_row_t fl_row;
  logic fau_busy, fau_done;
  logic [AW-1:0] fau_tile;
  sr_level_e fau_old_level, fau_new_level;
  sr_decision_e fau_decision;
  mag_t fau_maxc_reduce, fau_maxc_increase;
  logic stall_fau_busy, stall_same_tile;

  dsr_raster_unit dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int srt_model [int];          // tile id -> state
  int rendered_level [int];     // tile id -> state it was last rendered with
  int pending [int];            // tile id -> renders not yet analysed
  rgba_t expect_img [int][16][16];
  imat_t flushed_lum [int];
  int cur_kind, cur_frame;
  int n_dec [4];
  int n_level [5];
  int n_stall_fau = 0, n_stall_same = 0, n_fl_bp = 0, n_sq_bp = 0, n_bl_rd = 0;
  int n_fau = 0;
  int tiles_ids [4];
  int tiles_x [4];
  int tiles_y [4];

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("[%0t] %s: got %0d expected %0d", $time, what, got, exp);
    end
  endtask

  function automatic rgba_t grey(int v, int a);
    rgba_t c;
    c.r = 8'(v); c.g = 8'((v * 3) / 4); c.b = 8'(255 - v); c.a = 8'(a);
    return c;
  endfunction

  // procedural image: kind, frame, pixel inside the tile that holds the sample
  function automatic rgba_t shade(int kind, int frame, int lx, int ly, int a);
    case (kind)
      0: return grey(90, a);
      1: return grey(((lx ^ ly) & 1) ? 250 : 10, a);
      2: return (frame < 6) ? grey(128, a) : grey(lx < 8 ? 20 : 230, a);
      default: return grey((((lx >> 3) ^ (ly >> 3)) & 1) ? 180 : 60, a);
    endcase
  endfunction

  initial begin
    #200ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism monitors and flush consumer
  always @(posedge clk) if (rst_n) begin
    if (stall_fau_busy) n_stall_fau++;
    if (stall_same_tile) n_stall_same++;
    if (fl_valid && !fl_ready) n_fl_bp++;
    if (sq_valid && !sq_ready) n_sq_bp++;
  end

  always @(negedge clk) fl_ready <= ($urandom_range(3) != 0);

  always @(posedge clk) begin
    if (fl_valid && fl_ready && rst_n) begin
      for (int x = 0; x < 16; x++) begin
        rgba_t e;
        e = expect_img[int'(fl_tile)][fl_row_idx][x];
        checks++;
        if (fl_row[x] != e) begin
          failures++;
          $display("[%0t] tile %0d pixel (%0d,%0d) = %h expected %h", $time, fl_tile, x, fl_row_idx, fl_row[x], e);
        end
        flushed_lum[int'(fl_tile)][fl_row_idx][x] = luma_ref(fl_row[x].r, fl_row[x].g, fl_row[x].b);
      end
    end
  end

  // analysis results against the model
  always @(posedge clk) begin
    if (fau_done && rst_n) begin
      imat_t c;
      int t, lvl, mr, mi, en, ed;
      t = int'(fau_tile);
      lvl = srt_model[t];
      c = dct2_fixed(flushed_lum[t]);
      mr = maxc_int(c, d_reduce_of(lvl, params));
      mi = maxc_int(c, d_increase_of(lvl, params));
      fsm_ref(lvl, mr, mi, params, en, ed);
      expect_eq("FAU old level", int'(fau_old_level), lvl);
      expect_eq("analysed with rendered level", int'(fau_old_level), rendered_level[t]);
      pending[t]--;
      expect_eq("FAU maxc reduce", int'(fau_maxc_reduce), mr);
      expect_eq("FAU maxc increase", int'(fau_maxc_increase), mi);
      expect_eq("FAU decision", int'(fau_decision), ed);
      expect_eq("FAU new level", int'(fau_new_level), en);
      srt_model[t] = en;
      n_dec[ed]++;
      n_fau++;
    end
  end

  task automatic render_tile(int idx, int frame);
    int tid, lvl, s, a;
    tid = tiles_ids[idx];
    tile_valid = 1; tile_id = AW'(tid); tile_x = 7'(tiles_x[idx]); tile_y = 7'(tiles_y[idx]);
    begin
      bit acc;
      do begin #1; acc = tile_ready; @(negedge clk); end while (!acc);
    end
    tile_valid = 0;
    while (!tile_active) @(negedge clk);
    if (!srt_model.exists(tid)) begin srt_model[tid] = 0; pending[tid] = 0; end
    expect_eq("previous analysis of the tile finished", pending[tid], 0);
    expect_eq("looked-up level", int'(tile_level), srt_model[tid]);
    lvl = int'(tile_level);
    rendered_level[tid] = lvl;
    pending[tid]++;
    n_level[lvl]++;
    s = 1 << lvl;
    for (int prim = 0; prim < 2; prim++) begin
      prim_valid = 1;
      begin
        bit acc;
        do begin #1; acc = prim_ready; @(negedge clk); end while (!acc);
      end
      prim_valid = 0;
      forever begin
        bit last;
        logic [3:0] sx, sy, m;
        logic [3:0][11:0] x2, y2;
        sq_ready = ($urandom_range(2) != 0);
        #1;
        if (!(sq_valid && sq_ready)) begin
          @(negedge clk);
          continue;
        end
        last = sq_last; sx = sq_sx; sy = sq_sy; m = sq_mask; x2 = sq_x2; y2 = sq_y2;
        @(negedge clk);
        sq_ready = 0;
        for (int i = 0; i < 4; i++) if (m[i]) begin
          int lx, ly, fx, fy;
          rgba_t col;
          lx = int'(x2[i]) / 2 - tiles_x[idx] * 16;
          ly = int'(y2[i]) / 2 - tiles_y[idx] * 16;
          fx = int'(sx) + (i & 1); fy = int'(sy) + (i >> 1);
          a = (prim == 0) ? 8'h11 : 8'hff;
          col = shade(idx, frame, lx, ly, a);
          if (prim == 1) begin
            bl_rd_en = 1; bl_rd_sx = 4'(fx); bl_rd_sy = 4'(fy);
            @(negedge clk);
            bl_rd_en = 0;
            expect_eq("blend read", int'(bl_rd_data), int'(shade(idx, frame, lx, ly, 8'h11)));
            n_bl_rd++;
          end
          bl_wr_en = 1; bl_wr_sx = 4'(fx); bl_wr_sy = 4'(fy); bl_wr_data = col;
          @(negedge clk);
          bl_wr_en = 0;
          for (int py = fy * s; py < (fy + 1) * s; py++)
            for (int px = fx * s; px < (fx + 1) * s; px++)
              expect_img[tid][py][px] = col;
        end
        if (last) break;
      end
    end
    tile_end = 1;
    @(negedge clk);
    tile_end = 0;
  endtask

  initial begin
    int frames;
    tiles_x = '{10, 11, 10, 11};
    tiles_y = '{5, 5, 6, 6};
    for (int i = 0; i < 4; i++) tiles_ids[i] = tiles_y[i] * 120 + tiles_x[i];
    params.t_reduce   = {4{15'd8}};      // 2.0
    params.d_reduce   = {4{5'd1}};
    params.t_increase = {15'd40, 15'h7fff, 15'h7fff};  // 10.0 from 1/64x only
    params.d_increase = {3{5'd1}};
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (init_busy) @(negedge clk);
    frames = 10;
    for (int f = 0; f < frames; f++)
      for (int i = 0; i < 4; i++) render_tile(i, f);
    // tile A alone: the next lookup of A must wait for A's analysis
    for (int f = frames; f < frames + 3; f++) render_tile(0, f);
    while (fau_busy || n_fau < 4 * frames + 3) @(negedge clk);
    repeat (5) @(negedge clk);
    expect_eq("analyses", n_fau, 4 * frames + 3);
    for (int d = 0; d < 4; d++) begin
      checks++;
      if (n_dec[d] == 0) begin failures++; $display("decision %0d never happened", d); end
    end
    for (int l = 0; l < 5; l++) begin
      checks++;
      if (n_level[l] == 0) begin failures++; $display("rate level %0d never used", l); end
    end
    checks += 5;
    if (n_stall_fau == 0)  begin failures++; $display("no FAU-busy stall"); end
    if (n_stall_same == 0) begin failures++; $display("no same-tile stall"); end
    if (n_fl_bp == 0)      begin failures++; $display("no flush backpressure"); end
    if (n_sq_bp == 0)      begin failures++; $display("no superquad backpressure"); end
    if (n_bl_rd == 0)      begin failures++; $display("no blending reads"); end
    $display("decisions maintain=%0d reduce=%0d increase=%0d always=%0d", n_dec[0], n_dec[1], n_dec[2], n_dec[3]);
    $display("tiles per level 1x=%0d 1/4x=%0d 1/16x=%0d 1/64x=%0d 1/256x=%0d",
             n_level[0], n_level[1], n_level[2], n_level[3], n_level[4]);
    $display("stall cycles: fau busy=%0d same tile=%0d", n_stall_fau, n_stall_same);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
