// sar_logic: successive-approximation control of an n-bit SAR ADC.
//
// After `start`, the logic performs the MSB-first binary search of Fig. 7(b):
// it sets the trial bit of the capacitor-DAC code, reads the comparator
// (`cmp` = 1 when Vin lies above the level of the current code), keeps or
// clears the bit and moves to the next one. One comparison is made per clock,
// so a conversion takes exactly NBITS cycles; `done` pulses in the cycle after
// the last comparison and `dout` holds the result until the next start.
//
// Interface: `dac_code` drives the CDAC switches (SW_n .. SW_1 of Fig. 7(a));
// `cmp` comes from the analog comparator and must settle combinationally
// within the cycle. The sampling phase is not modelled separately: the
// analog front end is taken to have sampled Vin when `start` is asserted.
// The one-comparison-per-cycle timing is this design's choice.
module sar_logic #(
  parameter int unsigned NBITS = 9
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             cmp,
  output logic [NBITS-1:0] dac_code,
  output logic             busy,
  output logic             done,
  output logic [NBITS-1:0] dout
);
  logic [NBITS-1:0]         code_q;
  logic [$clog2(NBITS)-1:0] bit_q;

  assign dac_code = code_q;

  // Code with the current trial bit resolved, and the code of the next trial.
  logic [NBITS-1:0] nxt, trial;
  always_comb begin
    nxt = code_q;
    if (!cmp) nxt[bit_q] = 1'b0;
    trial = nxt;
    if (bit_q != 0) trial[bit_q - 1] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code_q <= '0;
      bit_q  <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
      dout   <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        code_q <= NBITS'(1) << (NBITS - 1);
        bit_q  <= ($clog2(NBITS))'(NBITS - 1);
        busy   <= 1'b1;
      end else if (busy) begin
        code_q <= trial;
        if (bit_q == 0) begin
          busy <= 1'b0;
          done <= 1'b1;
          dout <= nxt;
        end else begin
          bit_q <= bit_q - 1'b1;
        end
      end
    end
  end

  initial begin
    assert (NBITS >= 2) else $error("sar_logic: NBITS must be at least 2");
  end
endmodule
