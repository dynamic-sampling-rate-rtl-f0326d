// dct_kernel_rom: the DCT Kernel Matrix K of an N-point orthonormal DCT.
//
// K[p][q] = 1/sqrt(N)                           for p = 0
//         = sqrt(2/N) * cos((2q+1) * pi * p / 2N) otherwise
// Each entry is rounded to a KERNEL_W-bit signed value with KERNEL_FRAC
// fraction bits. The table is computed at elaboration from that formula, so
// no data file is needed; in hardware it is a small constant ROM.
//
// Interface: `row` selects p; `k_row[q]` returns K[p][q] for all q in the same
// cycle (combinational read). All compute units share the row being read, as
// every unit computes the same output coefficient index in a given cycle.
// The formula is the paper's; the word width and single-row read port are this
// design's choices.
module dct_kernel_rom
  import dsr_pkg::*;
#(
  parameter int unsigned N = TILE_DIM
) (
  input  logic [$clog2(N)-1:0] row,
  output kern_t [N-1:0]        k_row
);

  localparam real PI = 3.14159265358979323846;

  typedef kern_t [N-1:0][N-1:0] kmat_t;

  function automatic kmat_t build_kernel();
    kmat_t m;
    real   v;
    for (int p = 0; p < N; p++) begin
      for (int q = 0; q < N; q++) begin
        if (p == 0) v = 1.0 / $sqrt(real'(N));
        else        v = $sqrt(2.0 / real'(N)) * $cos(real'((2*q+1)*p) * PI / real'(2*N));
        m[p][q] = kern_t'($rtoi(v * real'(1 << KERNEL_FRAC) + (v >= 0.0 ? 0.5 : -0.5)));
      end
    end
    return m;
  endfunction

  localparam kmat_t KMAT = build_kernel();

  assign k_row = KMAT[row];

endmodule
