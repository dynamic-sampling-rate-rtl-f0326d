// tb_dct_kernel_rom: checks every entry of the 16x16 DCT kernel ROM against
// sqrt(2/16) cos((2q+1) pi p / 32) (1/4 for p = 0) scaled by 2^11 and
// rounded, and checks that the quantised rows are orthonormal to within the
// rounding error.
module tb_dct_kernel_rom;
  import dsr_pkg::*;
  import dsr_ref_pkg::*;

  logic [3:0]      row;
  kern_t [15:0]    k_row;
  int checks = 0, failures = 0;
  kern_t           km [16][16];

  dct_kernel_rom dut (.row(row), .k_row(k_row));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < 16; p++) begin
      row = 4'(p);
      #1;
      for (int q = 0; q < 16; q++) begin
        km[p][q] = k_row[q];
        checks++;
        if (int'(k_row[q]) != kernel_int(p, q)) begin
          failures++;
          $display("K[%0d][%0d] = %0d, expected %0d", p, q, k_row[q], kernel_int(p, q));
        end
      end
    end
    // orthonormality: sum_q K[p][q] K[r][q] ~ 2^22 * (p == r)
    for (int p = 0; p < 16; p++)
      for (int r = 0; r < 16; r++) begin
        longint s;
        longint target;
        s = 0;
        for (int q = 0; q < 16; q++) s += longint'(km[p][q]) * longint'(km[r][q]);
        target = (p == r) ? (longint'(1) << 22) : 0;
        checks++;
        if (s - target > 20000 || target - s > 20000) begin
          failures++;
          $display("rows %0d,%0d dot = %0d", p, r, s);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
