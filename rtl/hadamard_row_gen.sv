// hadamard_row_gen: bitline sign pattern of one Hadamard verify read.
//
// For row index `row` (0 .. N-1) it returns the N entries of row `row` of the
// Sylvester-ordered Hadamard matrix H_N, bit c being 1 for a +1 entry (BL
// driven to VDD) and 0 for a -1 entry (BL driven to GND). Row 0 is all +1;
// every other row is balanced (N/2 entries of each sign), which is what makes
// common-mode offsets cancel for N-1 decoded cells.
//
// Timing: purely combinational.
// The paper only requires some Hadamard matrix; the Sylvester ordering used
// here is the one printed in its 4x4 example (rows 1111, 1-11-1, 11-1-1,
// 1-1-11). N must be a power of two.
// Bit 0 of `pos` is constant 1: column 0 of every Sylvester row is +1.
module hadamard_row_gen #(
  parameter int unsigned N = 32
) (
  input  logic [$clog2(N)-1:0] row,
  output logic [N-1:0]         pos   // 1: +1 (VDD), 0: -1 (GND)
);
  import harp_pkg::*;

  always_comb begin
    for (int unsigned c = 0; c < N; c++) pos[c] = hadamard_pos(int'(row), c);
  end

  initial begin
    assert ((N & (N - 1)) == 0 && N >= 2)
      else $error("hadamard_row_gen: N must be a power of two");
  end
endmodule
