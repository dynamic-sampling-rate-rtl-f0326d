// tb_dct_buffer: writes random 4-element slices in both orientations
// (as columns and as rows), mirrored in a model array, and reads every row
// back, checking the one-cycle read latency.
module tb_dct_buffer;
  import dsr_pkg::*;

  logic clk = 0;
  logic wr_en = 0, wr_cols = 0, rd_en = 0;
  logic [3:0] wr_idx = 0, rd_addr = 0;
  logic [1:0] wr_grp = 0;
  coef_t [3:0] wr_data;
  coef_t [15:0] rd_row;
  int checks = 0, failures = 0;
  int model [16][16];

  dct_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_slice(bit cols, int idx, int grp);
    @(negedge clk);
    wr_en = 1; wr_cols = cols; wr_idx = 4'(idx); wr_grp = 2'(grp);
    for (int i = 0; i < 4; i++) begin
      wr_data[i] = coef_t'($urandom);
      if (cols) model[idx][grp*4+i] = int'(wr_data[i]);
      else      model[grp*4+i][idx] = int'(wr_data[i]);
    end
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic check_all();
    for (int r = 0; r < 16; r++) begin
      @(negedge clk);
      rd_en = 1; rd_addr = 4'(r);
      @(negedge clk);
      rd_en = 0;
      for (int c = 0; c < 16; c++) begin
        checks++;
        if (int'(rd_row[c]) != model[r][c]) begin
          failures++;
          $display("buf[%0d][%0d]=%0d expected %0d", r, c, rd_row[c], model[r][c]);
        end
      end
    end
  endtask

  initial begin
    // fill everything by columns (first-pass style)
    for (int g = 0; g < 4; g++) for (int k = 0; k < 16; k++) write_slice(1, k, g);
    check_all();
    // overwrite everything by rows (second-pass style)
    for (int g = 0; g < 4; g++) for (int k = 0; k < 16; k++) write_slice(0, k, g);
    check_all();
    // random mixture
    for (int t = 0; t < 200; t++) write_slice(1'($urandom), int'($urandom_range(15)), int'($urandom_range(3)));
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
