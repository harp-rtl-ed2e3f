// hadamard_target_enc: Hadamard-domain target of one verify read (HARP).
//
// For Hadamard row `row` it forms y* = H_row . w*, the value the column would
// read if every cell held its target level, and turns it into the ADC code
// the one-shot comparison must use. Cell targets are cell levels in ADC LSBs
// (0 .. 2^WBITS-1). Row 0 (all +1) is read with the sampling reference at GND
// and needs no offset; balanced rows are read with the reference at Vcm/2, so
// their zero sits at mid-scale and the code is y* + 2^(NBITS-1). `vsam` gives
// the matching reference selection.
//
// Timing: combinational (an N-input signed adder tree).
// That one ADC LSB equals one cell level, and that the code grows with y,
// are this design's conventions; the paper gives the two reference levels and
// input ranges but not the code mapping.
module hadamard_target_enc
  import harp_pkg::*;
#(
  parameter int unsigned N     = 32,
  parameter int unsigned WBITS = 3,
  parameter int unsigned NBITS = 9,
  localparam int unsigned YBITS = $clog2(N) + WBITS + 1
) (
  input  logic [$clog2(N)-1:0]    row,
  input  logic [WBITS-1:0]        w_mag [N],
  output logic signed [YBITS-1:0] y_tgt,
  output logic [NBITS-1:0]        tgt_code,
  output vsam_e                   vsam
);
  logic signed [YBITS+1:0] sum;
  logic signed [YBITS+1:0] code_full;

  always_comb begin
    sum = '0;
    for (int unsigned c = 0; c < N; c++) begin
      if (hadamard_pos(int'(row), c)) sum = sum + (YBITS+2)'(w_mag[c]);
      else                            sum = sum - (YBITS+2)'(w_mag[c]);
    end
    y_tgt = sum[YBITS-1:0];
    if (row == '0) begin
      vsam      = VSAM_GND;
      code_full = sum;
    end else begin
      vsam      = VSAM_HALFVCM;
      code_full = sum + (YBITS+2)'(2 ** (NBITS - 1));
    end
    if (code_full < 0)                                    tgt_code = '0;
    else if (code_full > (YBITS+2)'(2 ** NBITS - 1))      tgt_code = '1;
    else                                                  tgt_code = code_full[NBITS-1:0];
  end

  initial begin
    // Full-scale column sum must fit the ADC range.
    assert (N * (2 ** WBITS - 1) <= 2 ** NBITS - 1)
      else $error("hadamard_target_enc: N*(2^WBITS-1) exceeds the ADC range");
  end
endmodule
