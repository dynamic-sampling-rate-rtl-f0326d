// dct_compute_unit: one 1D DCT compute unit of the Frequency Analysis Unit.
//
// The unit holds nothing itself: given a 16-element input row x and one row
// k_row = K[p][*] of the DCT kernel, it returns
//     y = round( sum_n K[p][n] * x[n] / 2^KERNEL_FRAC )
// saturated to OUT_W bits. Stepping p over 0..N-1 on successive cycles yields
// the 1D DCT of the row, one coefficient per cycle (N multipliers and an adder
// tree). The same unit serves both passes of the 2D DCT because x and y use
// the same fixed-point format (COEF_FRAC fraction bits).
//
// The paper replicates this unit four times and calls it combinational logic;
// the throughput of one coefficient per cycle, the rounding (half-LSB, then
// arithmetic shift) and the saturation are this design's choices.
module dct_compute_unit
  import dsr_pkg::*;
#(
  parameter int unsigned N     = TILE_DIM,
  parameter int unsigned IN_W  = COEF_W,
  parameter int unsigned OUT_W = COEF_W
) (
  input  logic signed [N-1:0][IN_W-1:0] x,
  input  kern_t       [N-1:0]           k_row,
  output logic signed [OUT_W-1:0]       y
);

  localparam int unsigned PROD_W = IN_W + KERNEL_W;
  localparam int unsigned ACC_W  = PROD_W + $clog2(N) + 1;

  logic signed [ACC_W-1:0] acc;
  logic signed [ACC_W-1:0] shifted;

  always_comb begin
    acc = '0;
    for (int n = 0; n < N; n++) begin
      acc += ACC_W'($signed(x[n]) * $signed(k_row[n]));
    end
    shifted = (acc + ACC_W'(1 << (KERNEL_FRAC - 1))) >>> KERNEL_FRAC;
    if (shifted > ACC_W'((1 << (OUT_W - 1)) - 1))
      y = {1'b0, {(OUT_W-1){1'b1}}};
    else if (shifted < -ACC_W'(1 << (OUT_W - 1)))
      y = {1'b1, {(OUT_W-1){1'b0}}};
    else
      y = shifted[OUT_W-1:0];
  end

endmodule
