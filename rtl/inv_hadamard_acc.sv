// inv_hadamard_acc: streaming inverse Hadamard transform.
//
// N parallel signed accumulators. Each time a Hadamard measurement y_i of
// row i arrives (`valid`), accumulator c adds +y_i or -y_i according to the
// entry H[i][c]. After the N rows of a sweep, acc[c] = (H^T y)[c] = N times
// the decoded value of cell c; the division by N is left to the consumer
// (it is a fixed shift for a power-of-two N), so no precision is lost.
// The same adders serve HD-PV (y_i is a signed multi-bit ADC result) and HARP
// (y_i is a ternary sign in {-1, 0, +1}).
//
// Timing: one measurement per clock at most; `acc` is updated at the clock
// edge that takes the measurement. `clear` zeroes all accumulators and wins
// over `valid`.
// The paper says the decoding reuses the shift-and-add adders of the macro
// and streams the measurements into them; the accumulator form is this
// design's reading of that.
module inv_hadamard_acc
  import harp_pkg::*;
#(
  parameter int unsigned N     = 32,
  parameter int unsigned YBITS = 10,
  localparam int unsigned ABITS = YBITS + $clog2(N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    valid,
  input  logic [$clog2(N)-1:0]    row,
  input  logic signed [YBITS-1:0] y,
  output logic signed [ABITS-1:0] acc [N]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned c = 0; c < N; c++) acc[c] <= '0;
    end else if (clear) begin
      for (int unsigned c = 0; c < N; c++) acc[c] <= '0;
    end else if (valid) begin
      for (int unsigned c = 0; c < N; c++) begin
        if (hadamard_pos(int'(row), c)) acc[c] <= acc[c] + ABITS'(y);
        else                            acc[c] <= acc[c] - ABITS'(y);
      end
    end
  end
endmodule
