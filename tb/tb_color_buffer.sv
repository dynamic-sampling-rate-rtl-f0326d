// tb_color_buffer: for each sampling level, writes one random colour per
// superfragment through the blending port, reads a few back through the
// blending read port, runs the upsampling pass (checking that it ends 16
// cycles after up_start) and reads every row through both row ports. Every
// pixel must hold the colour of the superfragment that covers it.
module tb_color_buffer;
  import dsr_pkg::*;

  logic clk = 0, rst_n = 0;
  sr_level_e level;
  logic px_rd_en = 0, px_wr_en = 0, up_start = 0, rd_a_en = 0, rd_b_en = 0;
  logic [3:0] px_rd_sx, px_rd_sy, px_wr_sx, px_wr_sy, rd_a_addr, rd_b_addr;
  rgba_t px_rd_data, px_wr_data;
  logic up_busy, up_done;
  color_row_t rd_a_row, rd_b_row;
  int checks = 0, failures = 0;
  rgba_t sf [16][16];

  color_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    level = SR_1X;
    px_rd_sx = 0; px_rd_sy = 0; px_wr_sx = 0; px_wr_sy = 0; rd_a_addr = 0; rd_b_addr = 0;
    px_wr_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 2; rep++)
    for (int l = 0; l < 5; l++) begin
      int n, cyc;
      level = sr_level_e'(l);
      n = 16 >> l;
      for (int y = 0; y < n; y++)
        for (int x = 0; x < n; x++) begin
          sf[y][x] = rgba_t'($urandom);
          px_wr_en = 1; px_wr_sx = 4'(x); px_wr_sy = 4'(y); px_wr_data = sf[y][x];
          @(negedge clk);
        end
      px_wr_en = 0;
      for (int t = 0; t < 8; t++) begin
        int x, y;
        x = int'($urandom_range(n - 1)); y = int'($urandom_range(n - 1));
        px_rd_en = 1; px_rd_sx = 4'(x); px_rd_sy = 4'(y);
        @(negedge clk);
        px_rd_en = 0;
        checks++;
        if (px_rd_data != sf[y][x]) begin failures++; $display("blend read L%0d (%0d,%0d)", l, x, y); end
      end
      up_start = 1;
      @(negedge clk);
      up_start = 0;
      cyc = 1;
      while (!up_done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 17) begin failures++; $display("upsample took %0d cycles", cyc); end
      for (int r = 0; r < 16; r++) begin
        rd_a_en = 1; rd_a_addr = 4'(r);
        rd_b_en = 1; rd_b_addr = 4'(15 - r);
        @(negedge clk);
        rd_a_en = 0; rd_b_en = 0;
        for (int x = 0; x < 16; x++) begin
          checks += 2;
          if (rd_a_row[x] != sf[r >> l][x >> l]) begin
            failures++; $display("L%0d pixel (%0d,%0d) = %h expected %h", l, x, r, rd_a_row[x], sf[r >> l][x >> l]);
          end
          if (rd_b_row[x] != sf[(15 - r) >> l][x >> l]) begin
            failures++; $display("L%0d port B pixel (%0d,%0d)", l, x, 15 - r);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
