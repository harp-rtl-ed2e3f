// streak_freeze: streak counters that freeze converged cells.
//
// One counter STR per cell. On `update`, an unfrozen cell whose decision is
// STOP increments its counter and is frozen when the counter reaches K; a SET
// or RESET decision clears the counter. Frozen cells ignore further decisions
// until `clear` starts a new programming run. `all_frozen` is the AND of the
// freeze flags and ends the write-and-verify loop.
//
// Timing: counters and flags update at the clock edge that samples `update`.
// The paper says both that a cell is frozen "after K consecutive
// within-threshold reads" and that it is frozen "once its streak counter
// exceeds K"; the flow chart tests STR = K. This block follows K consecutive
// STOP decisions (STR = K).
module streak_freeze
  import harp_pkg::*;
#(
  parameter int unsigned N = 32,
  parameter int unsigned K = 2,
  localparam int unsigned SBITS = $clog2(K + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             update,
  input  wv_dec_e          dec    [N],
  output logic [SBITS-1:0] streak [N],
  output logic [N-1:0]     frozen,
  output logic             all_frozen
);
  assign all_frozen = &frozen;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frozen <= '0;
      for (int unsigned c = 0; c < N; c++) streak[c] <= '0;
    end else if (clear) begin
      frozen <= '0;
      for (int unsigned c = 0; c < N; c++) streak[c] <= '0;
    end else if (update) begin
      for (int unsigned c = 0; c < N; c++) begin
        if (!frozen[c]) begin
          if (dec[c] == D_STOP) begin
            streak[c] <= streak[c] + 1'b1;
            if (streak[c] + 1'b1 == SBITS'(K)) frozen[c] <= 1'b1;
          end else begin
            streak[c] <= '0;
          end
        end
      end
    end
  end

  initial begin
    assert (K >= 1) else $error("streak_freeze: K must be at least 1");
  end
endmodule
