// shift_add: inference shift-and-add of one signed, bit-sliced weight column.
//
// A weight of B bits is stored as K_SLICES slices of BC bits, each in its own
// positive/negative column pair, and the input vector is applied one bit per
// read (bit-serial). For every read the ADC codes of the K_SLICES pairs are
// combined as sum_l code_l << (l*BC) (code[0] is the MSB slice) and added to
// the accumulator shifted by the input bit position `bit_idx`, with a minus
// sign when the negative columns were read (`neg`). After all input bits of
// both polarities, acc = sum_l 2^(l*BC) (i+ - i-)^(l) in ADC LSBs.
//
// Timing: one read per clock at most, accumulated at the clock edge; `clear`
// zeroes the accumulator and wins over `valid`.
// The slice weighting is the paper's; unsigned inputs and reading the
// positive and negative columns in separate passes are this design's choice.
module shift_add #(
  parameter int unsigned NBITS    = 9,
  parameter int unsigned IN_BITS  = 8,
  parameter int unsigned BC       = 3,
  parameter int unsigned K_SLICES = 2,
  localparam int unsigned OBITS   = NBITS + IN_BITS + BC * (K_SLICES - 1) + $clog2(K_SLICES) + 2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       valid,
  input  logic                       neg,
  input  logic [$clog2(IN_BITS)-1:0] bit_idx,
  input  logic [NBITS-1:0]           code [K_SLICES],
  output logic signed [OBITS-1:0]    acc
);
  logic signed [OBITS-1:0] term;

  always_comb begin
    term = '0;
    for (int unsigned l = 0; l < K_SLICES; l++)
      term = term + (OBITS'(code[l]) << ((K_SLICES - 1 - l) * BC));
    term = term <<< bit_idx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      acc <= '0;
    else if (clear)  acc <= '0;
    else if (valid)  acc <= neg ? acc - term : acc + term;
  end
endmodule
