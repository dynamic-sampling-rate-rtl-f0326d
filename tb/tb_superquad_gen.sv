// tb_superquad_gen: for every level and random tile positions, collects the
// superquads of one primitive under random backpressure and checks their
// number (64, 16, 4, 1, 1), the lane masks, the `last` flag and that the
// valid lanes sample exactly once the centre of every superfragment of the
// tile, given in half-pixel units. Also checks one superquad per cycle
// without backpressure.
module tb_superquad_gen;
  import dsr_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, sq_ready = 0;
  sr_level_e level;
  logic [6:0] tile_x, tile_y;
  logic sq_valid, sq_last;
  logic [3:0] sq_sx, sq_sy, sq_mask;
  logic [3:0][11:0] sq_x2, sq_y2;
  int checks = 0, failures = 0;

  superquad_gen dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
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

  initial begin
    level = SR_1X; tile_x = 0; tile_y = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 6; rep++)
    for (int l = 0; l < 5; l++) begin
      int nq, cycles, s, n, hits;
      bit covered [16][16];
      bit backp;
      backp = (rep % 2 == 1);
      level = sr_level_e'(l);
      tile_x = 7'($urandom_range(119)); tile_y = 7'($urandom_range(67));
      s = 1 << l; n = 16 >> l;
      for (int y = 0; y < 16; y++) for (int x = 0; x < 16; x++) covered[y][x] = 0;
      start = 1; @(negedge clk); start = 0;
      nq = 0; cycles = 0; hits = 0;
      forever begin
        sq_ready = backp ? 1'($urandom_range(1)) : 1'b1;
        #1;
        cycles++;
        if (sq_valid && sq_ready) begin
          nq++;
          for (int i = 0; i < 4; i++) begin
            int sfx, sfy;
            sfx = int'(sq_sx) + (i & 1); sfy = int'(sq_sy) + (i >> 1);
            expect_eq("mask", int'(sq_mask[i]), (sfx < n && sfy < n) ? 1 : 0);
            if (sq_mask[i]) begin
              expect_eq("x2", int'(sq_x2[i]), 2 * (int'(tile_x) * 16 + sfx * s) + s);
              expect_eq("y2", int'(sq_y2[i]), 2 * (int'(tile_y) * 16 + sfy * s) + s);
              if (covered[sfy][sfx]) begin failures++; $display("duplicate sf %0d,%0d", sfx, sfy); end
              covered[sfy][sfx] = 1;
              hits++;
            end
          end
          if (sq_last) begin @(negedge clk); break; end
        end
        @(negedge clk);
        if (cycles > 1000) break;
      end
      sq_ready = 0;
      expect_eq("superquads", nq, (l == 4) ? 1 : (n / 2) * (n / 2));
      expect_eq("superfragments", hits, n * n);
      if (!backp) expect_eq("cycles", cycles, nq);
      expect_eq("idle after last", int'(sq_valid), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
