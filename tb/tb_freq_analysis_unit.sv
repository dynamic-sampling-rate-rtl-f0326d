// tb_freq_analysis_unit: drives the Frequency Analysis Unit with tiles of
// several kinds (flat, ramps, edges, checkerboards, stripes, noise) held in a
// model Color Buffer, with a model Sampling Rate Table holding random states.
// For each tile it checks
//   * both MaxC values against a bit-exact fixed-point 2D DCT model and,
//     within a rounding tolerance, against a real-valued DCT;
//   * the FSM decision and new state, and the SRT write (tile and value);
//   * the latency: `done` 169 cycles after the start cycle, `cb_done` before
//     it, and no Color Buffer read after `cb_done`.
module tb_freq_analysis_unit;
  import dsr_pkg::*;
  import dsr_ref_pkg::*;

  localparam int NT = 64;
  logic clk = 0, rst_n = 0;
  dsr_params_t params;
  logic start = 0;
  logic [5:0] tile_id = 0;
  logic busy, cb_done, done, cb_rd_en, srt_rd_en, srt_wr_en;
  logic [3:0] cb_rd_addr;
  color_row_t cb_rd_row;
  logic [5:0] srt_addr;
  sr_level_e srt_wr_data, srt_rd_data;
  logic [5:0] res_tile;
  sr_level_e res_old_level, res_new_level;
  sr_decision_e res_decision;
  mag_t res_maxc_reduce, res_maxc_increase;
  int checks = 0, failures = 0;

  rgba_t img [16][16];
  int    srt [NT];
  int    n_writes;
  int    last_wr_tile, last_wr_val;
  bit    cb_closed;
  int    dec_seen [4];

  freq_analysis_unit #(.NUM_TILES(NT)) dut (.*);

  always #5 clk = ~clk;

  // model Color Buffer and SRT port, registered reads
  always @(posedge clk) begin
    if (cb_rd_en) begin
      if (cb_closed) begin failures++; $display("Color Buffer read after cb_done"); end
      for (int x = 0; x < 16; x++) cb_rd_row[x] <= img[cb_rd_addr][x];
    end
    if (srt_rd_en) srt_rd_data <= sr_level_e'(srt[srt_addr]);
    if (srt_wr_en) begin
      srt[srt_addr] = int'(srt_wr_data);
      n_writes++;
      last_wr_tile = int'(srt_addr);
      last_wr_val = int'(srt_wr_data);
    end
  end

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic rgba_t grey(int v);
    rgba_t c;
    c.r = 8'(v); c.g = 8'(v); c.b = 8'(v); c.a = 8'hff;
    return c;
  endfunction

  task automatic make_tile(int kind);
    for (int y = 0; y < 16; y++)
      for (int x = 0; x < 16; x++) begin
        rgba_t c;
        case (kind)
          0: c = grey(90);                                   // flat
          1: c = grey(x * 16);                               // horizontal ramp
          2: c = grey(y * 15 + x);                           // diagonal ramp
          3: c = grey(x < 8 ? 20 : 230);                     // vertical edge
          4: c = grey(((x ^ y) & 1) ? 255 : 0);              // pixel checkerboard
          5: c = grey(((x >> 2) & 1) ? 200 : 40);            // stripes of 4
          6: c = grey((((x >> 3) ^ (y >> 3)) & 1) ? 180 : 60); // 8x8 blocks
          default: begin c = rgba_t'($urandom); end          // noise
        endcase
        img[y][x] = c;
      end
  endtask

  initial begin
    int nt;
    for (int i = 0; i < NT; i++) srt[i] = int'($urandom_range(4));
    n_writes = 0;
    params = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    nt = 0;
    for (int t = 0; t < 40; t++) begin
      imat_t lum, cfix;
      rmat_t creal;
      int lvl, dr, di, mr, mi, en, ed, cyc, cbd_cyc, wr0, tid;
      real rr, ri, tol;
      make_tile(t % 8);
      for (int y = 0; y < 16; y++)
        for (int x = 0; x < 16; x++) lum[y][x] = luma_ref(img[y][x].r, img[y][x].g, img[y][x].b);
      cfix  = dct2_fixed(lum);
      creal = dct2_real(lum);
      tid = int'($urandom_range(NT - 1));
      lvl = srt[tid];
      // random tuples; thresholds near the tile's MaxC so all outcomes occur
      for (int i = 0; i < 4; i++) params.d_reduce[i] = diag_t'($urandom_range(8));
      for (int i = 0; i < 3; i++) params.d_increase[i] = diag_t'($urandom_range(8));
      dr = d_reduce_of(lvl, params); di = d_increase_of(lvl, params);
      mr = maxc_int(cfix, dr); mi = maxc_int(cfix, di);
      for (int i = 0; i < 4; i++) params.t_reduce[i] = mag_t'(mr + int'($urandom_range(40)) - 20 + 1);
      for (int i = 0; i < 3; i++) params.t_increase[i] = mag_t'(mi + int'($urandom_range(40)) - 20 + 1);
      if (params.t_reduce[0] > 15'h7000) params.t_reduce = '0;
      fsm_ref(lvl, mr, mi, params, en, ed);

      cb_closed = 0;
      wr0 = n_writes;
      start = 1; tile_id = 6'(tid);
      @(negedge clk);
      start = 0;
      cyc = 0; cbd_cyc = -1;   // cycles after the edge that accepted start
      while (!done && cyc < 1000) begin
        if (cb_done) begin cbd_cyc = cyc; cb_closed = 1; end
        @(negedge clk);
        cyc++;
      end
      expect_eq("latency", cyc, 169);
      checks++;
      if (cbd_cyc < 0 || cbd_cyc >= cyc) begin failures++; $display("cb_done at %0d", cbd_cyc); end
      expect_eq("maxc_reduce exact", int'(res_maxc_reduce), mr);
      expect_eq("maxc_increase exact", int'(res_maxc_increase), mi);
      rr = maxc_real(creal, dr) * 4.0; ri = maxc_real(creal, di) * 4.0;
      tol = 6.0 + rr * 0.004;
      checks++;
      if (real'(res_maxc_reduce) > rr + tol || real'(res_maxc_reduce) < rr - tol) begin
        failures++; $display("tile kind %0d: maxc %0d vs real %f", t % 8, res_maxc_reduce, rr);
      end
      checks++;
      if (real'(res_maxc_increase) > ri + 6.0 + ri * 0.004 || real'(res_maxc_increase) < ri - 6.0 - ri * 0.004) begin
        failures++; $display("tile kind %0d: maxc_i %0d vs real %f", t % 8, res_maxc_increase, ri);
      end
      expect_eq("old level", int'(res_old_level), lvl);
      expect_eq("new level", int'(res_new_level), en);
      expect_eq("decision", int'(res_decision), ed);
      expect_eq("res tile", int'(res_tile), tid);
      expect_eq("one SRT write", n_writes - wr0, 1);
      expect_eq("SRT write tile", last_wr_tile, tid);
      expect_eq("SRT write value", last_wr_val, en);
      dec_seen[ed]++;
      repeat (int'($urandom_range(3))) @(negedge clk);
    end
    for (int d = 0; d < 4; d++) begin
      checks++;
      if (dec_seen[d] == 0) begin failures++; $display("decision %0d never seen", d); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
