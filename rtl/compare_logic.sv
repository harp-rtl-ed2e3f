// compare_logic: one-shot target comparison mode of the SAR ADC (HARP).
//
// Instead of a binary search, all CDAC switches are set to the target code in
// one step and a single comparison asks whether Vin lies above the target
// level. If it does not, the result is Low after one comparison. If it does,
// a second comparison against target+1 separates High from Equal (Fig. 7(c)).
// With the CDAC level of code c placed half an LSB below c, Equal means the
// measurement is within half an LSB of the target, the ternary rule of the
// paper's eq. (10).
//
// Timing: one comparison per clock after `start`; `done` pulses one cycle
// after the deciding comparison, so a Low result takes 1 cycle and High or
// Equal take 2. `ncmp` reports how many comparisons were used.
// A target of the largest code has no target+1 level; a Vin above it is
// reported as Equal (this design's choice).
module compare_logic
  import harp_pkg::*;
#(
  parameter int unsigned NBITS = 9
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [NBITS-1:0] target,
  input  logic             cmp,
  output logic [NBITS-1:0] dac_code,
  output logic             busy,
  output logic             done,
  output cmp_res_e         result,
  output logic [1:0]       ncmp
);
  typedef enum logic [1:0] {S_IDLE, S_CMP_T, S_CMP_T1} state_e;
  state_e           state_q;
  logic [NBITS-1:0] tgt_q;

  always_comb begin
    unique case (state_q)
      S_CMP_T:  dac_code = tgt_q;
      S_CMP_T1: dac_code = tgt_q + 1'b1;
      default:  dac_code = tgt_q;
    endcase
  end
  assign busy = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      tgt_q   <= '0;
      done    <= 1'b0;
      result  <= CMP_EQUAL;
      ncmp    <= '0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          tgt_q   <= target;
          state_q <= S_CMP_T;
        end
        S_CMP_T: begin
          if (!cmp) begin
            result  <= CMP_LOW;
            ncmp    <= 2'd1;
            done    <= 1'b1;
            state_q <= S_IDLE;
          end else if (tgt_q == '1) begin
            result  <= CMP_EQUAL;
            ncmp    <= 2'd1;
            done    <= 1'b1;
            state_q <= S_IDLE;
          end else begin
            state_q <= S_CMP_T1;
          end
        end
        S_CMP_T1: begin
          result  <= cmp ? CMP_HIGH : CMP_EQUAL;
          ncmp    <= 2'd2;
          done    <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end
endmodule
