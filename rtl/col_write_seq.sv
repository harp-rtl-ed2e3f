// col_write_seq: column-wise write sequencer for one signed column pair.
//
// Every weight of the column is stored by a positive and a negative cell on
// the same bitline; the cell of the other sign stays in HRS (zero). The
// sequencer updates many cells at once by selecting one column of the pair
// (its WL) and pulsing the bitlines of all cells that need the same update.
//
//  * Coarse initial write (`start_coarse`): from HRS, each cell receives
//    cnt = min(MAX_COARSE, floor(w* * STEPS_PER_LSB / COARSE_STEPS)) coarse
//    SET pulses, so that the coarse step never overshoots its target. The
//    positive column is written first, then the negative one. In pulse round
//    r the mask holds every cell of that column with cnt > r, so the length
//    of a phase is set by its most demanding cell.
//  * Fine write (`start_fine`): four phases, SET positive, RESET positive,
//    SET negative, RESET negative. A phase pulses, once, every unfrozen cell
//    of that column whose decision matches the phase.
//
// Interface: during a pulse cycle `pulse` is 1, `op` is OP_COARSE, OP_SET or
// OP_RESET, `wl_pos`/`wl_neg` select the column and `bl_mask` the cells.
// `npulses` counts pulse cycles since the last start.
// Timing: one cycle per pulse; a coarse phase takes max(cnt)+1 cycles, a fine
// phase one cycle (with or without a pulse). `done` pulses at the end.
// Pulse widths (100 ns in the paper) are left to the drivers: `pulse` is a
// one-cycle strobe. One fine pulse per cell per WV iteration and the
// floor rule for coarse counts are this design's choices.
module col_write_seq
  import harp_pkg::*;
#(
  parameter int unsigned N             = 32,
  parameter int unsigned WBITS         = 3,
  parameter int unsigned STEPS_PER_LSB = 4,
  parameter int unsigned COARSE_STEPS  = 5,
  parameter int unsigned MAX_COARSE    = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start_coarse,
  input  logic             start_fine,
  input  logic [WBITS-1:0] w_mag  [N],
  input  logic [N-1:0]     w_neg,
  input  wv_dec_e          dec    [N],
  input  logic [N-1:0]     frozen,
  output op_e              op,
  output logic             pulse,
  output logic             wl_pos,
  output logic             wl_neg,
  output logic [N-1:0]     bl_mask,
  output logic             busy,
  output logic             done,
  output logic [15:0]      npulses
);
  localparam int unsigned CBITS = $clog2(MAX_COARSE + 1);

  typedef enum logic [1:0] {S_IDLE, S_COARSE, S_FINE} state_e;
  state_e           state_q;
  logic [1:0]       phase_q;     // coarse: 0 pos, 1 neg; fine: 0..3
  logic [CBITS-1:0] round_q;
  logic [CBITS-1:0] cnt_q  [N];
  wv_dec_e          dec_q  [N];
  logic [N-1:0]     neg_q;
  logic [N-1:0]     frz_q;
  logic [N-1:0]     mask;

  function automatic logic [CBITS-1:0] coarse_cnt(input logic [WBITS-1:0] w);
    int unsigned n;
    n = (int'(w) * STEPS_PER_LSB) / COARSE_STEPS;
    if (n > MAX_COARSE) n = MAX_COARSE;
    return CBITS'(n);
  endfunction

  // Cells pulsed in the current cycle.
  always_comb begin
    mask = '0;
    for (int unsigned c = 0; c < N; c++) begin
      if (state_q == S_COARSE)
        mask[c] = (neg_q[c] == phase_q[0]) && (cnt_q[c] > round_q);
      else if (state_q == S_FINE)
        mask[c] = !frz_q[c] && (neg_q[c] == phase_q[1]) &&
                  (dec_q[c] == (phase_q[0] ? D_RESET : D_SET));
    end
  end

  assign busy    = (state_q != S_IDLE);
  assign pulse   = busy && (mask != '0);
  assign bl_mask = mask;
  assign wl_pos  = pulse && ((state_q == S_COARSE) ? !phase_q[0] : !phase_q[1]);
  assign wl_neg  = pulse && ((state_q == S_COARSE) ?  phase_q[0] :  phase_q[1]);

  always_comb begin
    if (!pulse)                   op = OP_IDLE;
    else if (state_q == S_COARSE) op = OP_COARSE;
    else if (phase_q[0])          op = OP_RESET;
    else                          op = OP_SET;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      phase_q <= '0;
      round_q <= '0;
      neg_q   <= '0;
      frz_q   <= '0;
      done    <= 1'b0;
      npulses <= '0;
      for (int unsigned c = 0; c < N; c++) begin
        cnt_q[c] <= '0;
        dec_q[c] <= D_STOP;
      end
    end else begin
      done <= 1'b0;
      if (pulse) npulses <= npulses + 1'b1;
      unique case (state_q)
        S_IDLE: begin
          if (start_coarse) begin
            state_q <= S_COARSE;
            phase_q <= '0;
            round_q <= '0;
            npulses <= '0;
            neg_q   <= w_neg;
            for (int unsigned c = 0; c < N; c++) cnt_q[c] <= coarse_cnt(w_mag[c]);
          end else if (start_fine) begin
            state_q <= S_FINE;
            phase_q <= '0;
            npulses <= '0;
            neg_q   <= w_neg;
            frz_q   <= frozen;
            for (int unsigned c = 0; c < N; c++) dec_q[c] <= dec[c];
          end
        end
        S_COARSE: begin
          if (mask != '0) begin
            round_q <= round_q + 1'b1;
          end else if (phase_q == 2'd0) begin
            phase_q <= 2'd1;
            round_q <= '0;
          end else begin
            state_q <= S_IDLE;
            done    <= 1'b1;
          end
        end
        S_FINE: begin
          if (phase_q == 2'd3) begin
            state_q <= S_IDLE;
            done    <= 1'b1;
          end
          phase_q <= phase_q + 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end
endmodule
