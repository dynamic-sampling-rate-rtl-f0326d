// tb_dsr_frame_row: workload test of the DSR raster unit at its default size
// (8100-tile Sampling Rate Table): one full row of 120 tiles of a 1080x1920
// frame, rendered for 14 consecutive frames of a slowly scrolling scene, with
// a scene change at frame 8.
//
// The row holds three kinds of content, 40 tiles each: a smooth sky gradient,
// a brick facade with 8-pixel stripes and a noise panel; the scene scrolls by
// 3 pixels per frame. From frame 8 on the sky region shows the brick pattern
// too (a scene change, as when a menu opens). Each tile is one full-tile primitive; the testbench
// plays rasterizer, shader, blending and memory (with random backpressure).
// Checked for every tile and frame: the looked-up state equals the state the
// reference FSM chose from the previous frame's flushed image, every flushed
// row equals the upsampled image, and every analysis result (MaxC values,
// decision, new state) is bit-exact. At the end the frame-to-frame evolution
// is checked: frame 0 runs entirely at 1x, the sky settles at the two lowest
// rates before the change, the noise panel never leaves 1x, the average
// sample rate (ASR, samples per pixel) drops well below 1, and after the
// change the former sky tiles climb back to 1x through Increase decisions. Per-frame level counts
// and ASR are printed.
module tb_dsr_frame_row;
  import dsr_pkg::*;
  import dsr_ref_pkg::*;

  localparam int AW     = 13;
  localparam int NX     = 120;
  localparam int ROW    = 30;
  localparam int FRAMES = 14;
  localparam int CHANGE = 8;
  localparam int SCROLL = 3;

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
  int srt_model [int];
  rgba_t expect_img [int][16][16];
  imat_t flushed_lum [int];
  int level_of [FRAMES][NX];
  int n_dec [4];
  int n_fau = 0;

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("[%0t] %s: got %0d expected %0d", $time, what, got, exp);
    end
  endtask

  function automatic rgba_t grey(int v);
    rgba_t c;
    c.r = 8'(v); c.g = 8'(v); c.b = 8'(v); c.a = 8'hff;
    return c;
  endfunction

  // scene: gx is the screen column of the sampled pixel, gy its row
  function automatic rgba_t scene(int frame, int gx, int gy);
    int sx, h;
    sx = gx + SCROLL * frame;
    if (gx < 640 && frame < CHANGE) return grey(110 + sx / 64);     // sky
    if (gx < 1280) return grey((((sx >> 3) ^ (gy >> 3)) & 1) ? 170 : 70); // bricks
    h = (sx * 73856093) ^ (gy * 19349663);
    return grey(40 + ((h >> 7) & 255) % 180);                        // noise
  endfunction

  initial begin
    #30ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) fl_ready <= ($urandom_range(3) != 0);

  always @(posedge clk) begin
    if (fl_valid && fl_ready && rst_n) begin
      for (int x = 0; x < 16; x++) begin
        checks++;
        if (fl_row[x] != expect_img[int'(fl_tile)][fl_row_idx][x]) begin
          failures++;
          $display("[%0t] tile %0d pixel (%0d,%0d) = %h expected %h", $time, fl_tile, x,
                   fl_row_idx, fl_row[x], expect_img[int'(fl_tile)][fl_row_idx][x]);
        end
        flushed_lum[int'(fl_tile)][fl_row_idx][x] = luma_ref(fl_row[x].r, fl_row[x].g, fl_row[x].b);
      end
    end
  end

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
      expect_eq("FAU maxc reduce", int'(fau_maxc_reduce), mr);
      expect_eq("FAU maxc increase", int'(fau_maxc_increase), mi);
      expect_eq("FAU decision", int'(fau_decision), ed);
      expect_eq("FAU new level", int'(fau_new_level), en);
      srt_model[t] = en;
      n_dec[ed]++;
      n_fau++;
    end
  end

  task automatic render_tile(int tx, int frame);
    int tid, lvl, s;
    bit acc;
    tid = ROW * NX + tx;
    tile_valid = 1; tile_id = AW'(tid); tile_x = 7'(tx); tile_y = 7'(ROW);
    do begin #1; acc = tile_ready; @(negedge clk); end while (!acc);
    tile_valid = 0;
    while (!tile_active) @(negedge clk);
    if (!srt_model.exists(tid)) srt_model[tid] = 0;
    expect_eq("looked-up level", int'(tile_level), srt_model[tid]);
    lvl = int'(tile_level);
    level_of[frame][tx] = lvl;
    s = 1 << lvl;
    prim_valid = 1;
    do begin #1; acc = prim_ready; @(negedge clk); end while (!acc);
    prim_valid = 0;
    forever begin
      bit last;
      logic [3:0] sx, sy, m;
      logic [3:0][11:0] x2, y2;
      sq_ready = ($urandom_range(3) != 0);
      #1;
      if (!(sq_valid && sq_ready)) begin
        @(negedge clk);
        continue;
      end
      last = sq_last; sx = sq_sx; sy = sq_sy; m = sq_mask; x2 = sq_x2; y2 = sq_y2;
      @(negedge clk);
      sq_ready = 0;
      for (int i = 0; i < 4; i++) if (m[i]) begin
        int fx, fy;
        rgba_t col;
        fx = int'(sx) + (i & 1); fy = int'(sy) + (i >> 1);
        col = scene(frame, int'(x2[i]) / 2, int'(y2[i]) / 2);
        bl_wr_en = 1; bl_wr_sx = 4'(fx); bl_wr_sy = 4'(fy); bl_wr_data = col;
        @(negedge clk);
        bl_wr_en = 0;
        for (int py = fy * s; py < (fy + 1) * s; py++)
          for (int px = fx * s; px < (fx + 1) * s; px++)
            expect_img[tid][py][px] = col;
      end
      if (last) break;
    end
    tile_end = 1;
    @(negedge clk);
    tile_end = 0;
  endtask

  initial begin
    real asr [FRAMES];
    int cnt [5];
    params.t_reduce   = {4{15'd8}};     // 2.0
    params.d_reduce   = {4{5'd1}};
    params.t_increase = {3{15'd40}};    // 10.0
    params.d_increase = {3{5'd1}};
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (init_busy) @(negedge clk);
    for (int f = 0; f < FRAMES; f++)
      for (int tx = 0; tx < NX; tx++) render_tile(tx, f);
    while (fau_busy || n_fau < FRAMES * NX) @(negedge clk);
    repeat (5) @(negedge clk);
    expect_eq("analyses", n_fau, FRAMES * NX);
    for (int f = 0; f < FRAMES; f++) begin
      cnt = '{default: 0};
      asr[f] = 0.0;
      for (int tx = 0; tx < NX; tx++) begin
        cnt[level_of[f][tx]]++;
        asr[f] += 1.0 / real'(1 << (2 * level_of[f][tx]));
      end
      asr[f] /= real'(NX);
      $display("frame %0d: 1x=%0d 1/4x=%0d 1/16x=%0d 1/64x=%0d 1/256x=%0d ASR=%0.3f",
               f, cnt[0], cnt[1], cnt[2], cnt[3], cnt[4], asr[f]);
    end
    expect_eq("frame 0 entirely at 1x", int'(asr[0] * 1000.0), 1000);
    for (int tx = 0; tx < 40; tx++)
      expect_eq("sky settled at 1/64x or 1/256x", int'(level_of[CHANGE-1][tx] >= 3), 1);
    for (int tx = 0; tx < 40; tx++)
      expect_eq("former sky back at 1x after the change", level_of[FRAMES-1][tx], 0);
    checks++;
    if (n_dec[2] == 0) begin failures++; $display("no Increase decision"); end
    for (int f = 0; f < FRAMES; f++)
      for (int tx = 80; tx < NX; tx++)
        expect_eq("noise stays at 1x", level_of[f][tx], 0);
    expect_eq("ASR before the change below 0.7", int'(asr[CHANGE-1] < 0.7), 1);
    $display("decisions maintain=%0d reduce=%0d increase=%0d always=%0d",
             n_dec[0], n_dec[1], n_dec[2], n_dec[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
