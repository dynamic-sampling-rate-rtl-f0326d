// maxc_unit: MaxC accumulator of the Sampling Rate Determination logic.
//
// MaxC is the largest |coefficient| among the DCT coefficients whose diagonal
// index p+q is at least D, i.e. the first D diagonals (the low frequencies)
// are ignored. The FSM needs MaxC for two different D values at once, the one
// of the current state's Reduce tuple (d_reduce) and the one of its Increase
// tuple (d_increase), so two maxima are kept.
//
// Interface: `clear` zeroes both maxima (it has priority over `in_valid`).
// With `in_valid`, LANES coefficients and their diagonal indices are folded
// in; results are visible the next cycle. The definition of MaxC is the
// paper's; folding coefficients in while the DCT is being produced (instead of
// reading the finished buffer again) is this design's choice.
module maxc_unit
  import dsr_pkg::*;
#(
  parameter int unsigned LANES = NUM_UNITS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   in_valid,
  input  coef_t [LANES-1:0]      coef,
  input  diag_t [LANES-1:0]      diag,
  input  diag_t                  d_reduce,
  input  diag_t                  d_increase,
  output mag_t                   maxc_reduce,
  output mag_t                   maxc_increase
);

  function automatic mag_t abs_mag(input coef_t c);
    logic [COEF_W-1:0] a;
    a = c[COEF_W-1] ? COEF_W'(-c) : COEF_W'(c);
    // -2^(W-1) has no positive twin; clamp it to the largest magnitude.
    return a[COEF_W-1] ? '1 : a[COEF_W-2:0];
  endfunction

  mag_t nxt_r, nxt_i;

  always_comb begin
    nxt_r = maxc_reduce;
    nxt_i = maxc_increase;
    for (int l = 0; l < LANES; l++) begin
      if (diag[l] >= d_reduce   && abs_mag(coef[l]) > nxt_r) nxt_r = abs_mag(coef[l]);
      if (diag[l] >= d_increase && abs_mag(coef[l]) > nxt_i) nxt_i = abs_mag(coef[l]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      maxc_reduce   <= '0;
      maxc_increase <= '0;
    end else if (clear) begin
      maxc_reduce   <= '0;
      maxc_increase <= '0;
    end else if (in_valid) begin
      maxc_reduce   <= nxt_r;
      maxc_increase <= nxt_i;
    end
  end

endmodule
