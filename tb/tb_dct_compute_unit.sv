// tb_dct_compute_unit: random input rows and kernel rows; the expected output
// is floor(sum(K*x) / 2^11 + 1/2) computed in 64-bit integers, saturated to
// 16 bits. Includes rows that force positive and negative saturation and the
// DC term of a constant row and of an alternating row.
module tb_dct_compute_unit;
  import dsr_pkg::*;
  import dsr_ref_pkg::*;

  coef_t [15:0] x;
  kern_t [15:0] k;
  coef_t        y;
  int checks = 0, failures = 0;

  dct_compute_unit dut (.x(x), .k_row(k), .y(y));

  function automatic int expect_y();
    longint acc;
    int     r;
    acc = 0;
    for (int n = 0; n < 16; n++) acc += longint'(x[n]) * longint'(k[n]);
    r = round_shift(acc);
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return r;
  endfunction

  task automatic check(string what);
    int e;
    #1;
    e = expect_y();
    checks++;
    if (int'(y) != e) begin
      failures++;
      $display("%s: y=%0d expected %0d", what, y, e);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int n = 0; n < 16; n++) begin
        x[n] = coef_t'($urandom);
        k[n] = kern_t'($urandom);
        if (t < 1000) x[n] = coef_t'($signed(x[n]) >>> 2);
      end
      check("random");
    end
    // saturation both ways
    for (int n = 0; n < 16; n++) begin x[n] = 16'sh7fff; k[n] = 12'sh7ff; end
    check("sat+");
    for (int n = 0; n < 16; n++) begin x[n] = 16'sh7fff; k[n] = -12'sh7ff; end
    check("sat-");
    // DC of a constant row of 100.0 (Q.2: 400) through kernel row 0 is 400.0
    for (int n = 0; n < 16; n++) begin x[n] = 16'sd400; k[n] = kern_t'(kernel_int(0, n)); end
    #1; checks++;
    if (y != 16'sd1600) begin failures++; $display("DC y=%0d expected 1600", y); end
    // alternating +-100 has no DC component
    for (int n = 0; n < 16; n++) begin x[n] = (n % 2) ? -16'sd400 : 16'sd400; k[n] = kern_t'(kernel_int(0, n)); end
    #1; checks++;
    if (y != 16'sd0) begin failures++; $display("alt DC y=%0d expected 0", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
