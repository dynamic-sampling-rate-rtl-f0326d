// tb_maxc_unit: the worked example of a 5x5 coefficient matrix with
// diagonals 0..3 ignored (MaxC = 3), then random coefficient streams with
// random D values compared with a software maximum, and the clear input.
module tb_maxc_unit;
  import dsr_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  coef_t [3:0] coef;
  diag_t [3:0] diag;
  diag_t d_reduce, d_increase;
  mag_t  maxc_reduce, maxc_increase;
  int checks = 0, failures = 0;

  maxc_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // 5x5 example matrix, values times 4 (two fraction bits).
  int ex [5][5] = '{'{40, -28, 20, -16, 4},
                    '{32, 24, 16, 8, -4},
                    '{-16, 20, -12, -4, 4},
                    '{12, -10, 8, 4, 2},
                    '{8, -4, 4, 2, 2}};

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    coef = '0; diag = '0; d_reduce = '0; d_increase = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // example: D = 4 for "reduce", D = 0 for "increase" (all coefficients)
    d_reduce = 5'd4; d_increase = 5'd0;
    clear = 1; @(negedge clk); clear = 0;
    for (int p = 0; p < 5; p++) begin
      for (int q = 0; q < 5; q++) begin
        coef[0] = coef_t'(ex[p][q]); diag[0] = diag_t'(p + q);
        coef[3:1] = '0; diag[3:1] = '0;
        in_valid = 1; @(negedge clk);
      end
    end
    in_valid = 0;
    expect_eq("example MaxC (D=4)", int'(maxc_reduce), 12);
    expect_eq("example all (D=0)", int'(maxc_increase), 40);

    for (int t = 0; t < 200; t++) begin
      int mr, mi, n;
      d_reduce   = diag_t'($urandom_range(30));
      d_increase = diag_t'($urandom_range(30));
      clear = 1; @(negedge clk); clear = 0;
      mr = 0; mi = 0;
      n = int'($urandom_range(1, 64));
      for (int s = 0; s < n; s++) begin
        for (int l = 0; l < 4; l++) begin
          int a;
          coef[l] = coef_t'($urandom);
          if (s == 3 && l == 0 && t % 7 == 0) coef[l] = 16'sh8000;
          diag[l] = diag_t'($urandom_range(30));
          a = (coef[l] < 0) ? -int'(coef[l]) : int'(coef[l]);
          if (a > 32767) a = 32767;
          if (diag[l] >= d_reduce   && a > mr) mr = a;
          if (diag[l] >= d_increase && a > mi) mi = a;
        end
        in_valid = ($urandom_range(3) != 0);
        if (!in_valid) begin
          // a skipped beat contributes nothing
          @(negedge clk);
          in_valid = 1;
        end
        @(negedge clk);
      end
      in_valid = 0;
      @(negedge clk);
      expect_eq("random reduce", int'(maxc_reduce), mr);
      expect_eq("random increase", int'(maxc_increase), mi);
    end
    clear = 1; @(negedge clk); clear = 0;
    expect_eq("cleared", int'(maxc_reduce) + int'(maxc_increase), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
