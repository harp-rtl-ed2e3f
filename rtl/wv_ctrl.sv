// wv_ctrl: Hadamard-domain write-and-verify engine for one column pair.
//
// Runs the loop of the HD-PV / HARP flow chart:
//   1. Column-wise coarse initial write of the target vector from HRS.
//   2. Verify sweep: N reads, read i driving the bitlines with Hadamard row i.
//      HD-PV converts each read with the SAR logic (NBITS comparisons) and
//      streams the signed result into the inverse-Hadamard adders. HARP
//      compares each read against its Hadamard-domain target code (one or two
//      comparisons) and streams the ternary sign instead.
//   3. Per-cell SET/RESET/STOP decision on the decoded values, streak-counter
//      update and freezing.
//   4. If every cell is frozen the run ends (converged); otherwise a
//      four-phase column-wise fine write is applied and, unless MAX_ITER
//      sweeps have been made, the next sweep starts.
//
// Analog interface: `op`, `row`/`had_pos` and `vsam` say how the array and the
// ADC are to be set up; `dac_code` drives the column's capacitor DAC and
// `cmp` is its comparator output (1 when Vin is above the DAC level),
// expected to settle within the cycle. Write pulses come out on `pulse`,
// `wl_pos`, `wl_neg` and `bl_mask`.
// Timing: a sweep takes N*(NBITS+1) cycles in HD-PV and N*(ncmp+1) cycles in
// HARP (ncmp = 1 or 2), plus two cycles to decide and 4 to write.
// The loop structure, the thresholds and the modes follow the paper; cycle
// counts, the code offsets and the handshakes are this design's.
// had_pos[0] is constant 1 (column 0 of every Hadamard row is +1). rst_n is
// used both as the asynchronous reset and to disable the assertions.
// The sub-blocks' y_tgt, streak and npulses outputs are not needed here and
// are left open.
module wv_ctrl
  import harp_pkg::*;
#(
  parameter int unsigned N             = 32,
  parameter int unsigned WBITS         = 3,
  parameter int unsigned NBITS         = 9,
  parameter int unsigned K             = 2,
  parameter int unsigned TAU_W         = 4,
  parameter int unsigned MAX_ITER      = 50,
  parameter int unsigned STEPS_PER_LSB = 4,
  parameter int unsigned COARSE_STEPS  = 5,
  parameter int unsigned MAX_COARSE    = 10
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // command
  input  logic                 start,
  input  wv_mode_e             mode,
  input  logic [WBITS-1:0]     w_mag [N],   // target cell level |w*|
  input  logic [N-1:0]         w_neg,       // 1: weight stored in negative column
  // array / ADC
  output op_e                  op,
  output logic [$clog2(N)-1:0] row,
  output logic [N-1:0]         had_pos,
  output vsam_e                vsam,
  output logic [NBITS-1:0]     dac_code,
  input  logic                 cmp,
  output logic                 pulse,
  output logic                 wl_pos,
  output logic                 wl_neg,
  output logic [N-1:0]         bl_mask,
  // status
  output logic                 busy,
  output logic                 done,
  output logic                 converged,
  output logic [N-1:0]         frozen,
  output logic [15:0]          iter,
  output logic [31:0]          n_reads,
  output logic [31:0]          n_cmps,
  output logic [31:0]          n_pulses
);
  localparam int unsigned YBITS = NBITS + 1;
  localparam int unsigned ABITS = YBITS + $clog2(N);
  localparam int unsigned RBITS = $clog2(N);

  typedef enum logic [3:0] {
    S_IDLE, S_COARSE_GO, S_COARSE, S_READ_GO, S_READ_WAIT, S_DECIDE, S_CHECK, S_WRITE
  } state_e;
  state_e state_q;

  logic [WBITS-1:0] tgt_mag [N];
  logic [N-1:0]     tgt_neg;
  wv_mode_e         mode_q;
  logic [RBITS-1:0] row_q;

  // ---- sub-blocks --------------------------------------------------------
  logic             sar_start, sar_busy, sar_done;
  logic [NBITS-1:0] sar_dac, sar_dout;
  logic             cl_start, cl_busy, cl_done;
  logic [NBITS-1:0] cl_dac;
  cmp_res_e         cl_res;
  logic [1:0]       cl_ncmp;
  logic [NBITS-1:0] tgt_code;
  vsam_e            tgt_vsam;
  logic             acc_clear, acc_valid;
  logic signed [YBITS-1:0] acc_y;
  logic signed [ABITS-1:0] acc [N];
  wv_dec_e          dec [N];
  logic             sf_clear, sf_update, all_frozen;
  logic             cw_start_coarse, cw_start_fine, cw_busy, cw_done;
  op_e              cw_op;

  hadamard_row_gen #(.N(N)) u_row (.row(row_q), .pos(had_pos));

  hadamard_target_enc #(.N(N), .WBITS(WBITS), .NBITS(NBITS)) u_tgt (
    .row(row_q), .w_mag(tgt_mag), .y_tgt(), .tgt_code(tgt_code), .vsam(tgt_vsam));

  sar_logic #(.NBITS(NBITS)) u_sar (
    .clk, .rst_n, .start(sar_start), .cmp, .dac_code(sar_dac),
    .busy(sar_busy), .done(sar_done), .dout(sar_dout));

  compare_logic #(.NBITS(NBITS)) u_cmp (
    .clk, .rst_n, .start(cl_start), .target(tgt_code), .cmp, .dac_code(cl_dac),
    .busy(cl_busy), .done(cl_done), .result(cl_res), .ncmp(cl_ncmp));

  inv_hadamard_acc #(.N(N), .YBITS(YBITS)) u_acc (
    .clk, .rst_n, .clear(acc_clear), .valid(acc_valid), .row(row_q), .y(acc_y), .acc(acc));

  wv_decision #(.N(N), .WBITS(WBITS), .ABITS(ABITS), .TAU_W(TAU_W)) u_dec (
    .mode(mode_q), .acc(acc), .w_mag(tgt_mag), .dec(dec));

  streak_freeze #(.N(N), .K(K)) u_sf (
    .clk, .rst_n, .clear(sf_clear), .update(sf_update), .dec(dec),
    .streak(), .frozen(frozen), .all_frozen(all_frozen));

  col_write_seq #(.N(N), .WBITS(WBITS), .STEPS_PER_LSB(STEPS_PER_LSB),
                  .COARSE_STEPS(COARSE_STEPS), .MAX_COARSE(MAX_COARSE)) u_cw (
    .clk, .rst_n, .start_coarse(cw_start_coarse), .start_fine(cw_start_fine),
    .w_mag(tgt_mag), .w_neg(tgt_neg), .dec(dec), .frozen(frozen),
    .op(cw_op), .pulse(pulse), .wl_pos(wl_pos), .wl_neg(wl_neg), .bl_mask(bl_mask),
    .busy(cw_busy), .done(cw_done), .npulses());

  // ---- control -----------------------------------------------------------
  logic verifying;
  assign verifying = (state_q == S_READ_GO) || (state_q == S_READ_WAIT);
  assign row       = row_q;
  assign busy      = (state_q != S_IDLE);
  assign vsam      = verifying ? tgt_vsam : VSAM_GND;
  assign dac_code  = (mode_q == MODE_HARP) ? cl_dac : sar_dac;
  assign op        = verifying ? OP_VERIFY : cw_op;

  assign sar_start       = (state_q == S_READ_GO) && (mode_q == MODE_HDPV);
  assign cl_start        = (state_q == S_READ_GO) && (mode_q == MODE_HARP);
  assign acc_clear       = (state_q == S_READ_GO) && (row_q == '0);
  assign acc_valid       = (state_q == S_READ_WAIT) && (sar_done || cl_done);
  assign sf_clear        = (state_q == S_IDLE) && start;
  assign sf_update       = (state_q == S_DECIDE);
  assign cw_start_coarse = (state_q == S_COARSE_GO);
  assign cw_start_fine   = (state_q == S_CHECK) && !all_frozen;

  // Value streamed into the inverse-Hadamard adders.
  always_comb begin
    if (mode_q == MODE_HDPV) begin
      if (row_q == '0) acc_y = $signed({1'b0, sar_dout});
      else             acc_y = $signed({1'b0, sar_dout}) - YBITS'(2 ** (NBITS - 1));
    end else begin
      unique case (cl_res)
        CMP_HIGH: acc_y = YBITS'(1);
        CMP_LOW:  acc_y = -YBITS'(1);
        default:  acc_y = '0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      mode_q    <= MODE_HDPV;
      row_q     <= '0;
      tgt_neg   <= '0;
      done      <= 1'b0;
      converged <= 1'b0;
      iter      <= '0;
      n_reads   <= '0;
      n_cmps    <= '0;
      n_pulses  <= '0;
      for (int unsigned c = 0; c < N; c++) tgt_mag[c] <= '0;
    end else begin
      done <= 1'b0;
      if (pulse) n_pulses <= n_pulses + 1;
      unique case (state_q)
        S_IDLE: if (start) begin
          mode_q    <= mode;
          tgt_neg   <= w_neg;
          for (int unsigned c = 0; c < N; c++) tgt_mag[c] <= w_mag[c];
          converged <= 1'b0;
          iter      <= '0;
          n_reads   <= '0;
          n_cmps    <= '0;
          n_pulses  <= '0;
          state_q   <= S_COARSE_GO;
        end
        S_COARSE_GO: state_q <= S_COARSE;
        S_COARSE: if (cw_done) begin
          row_q   <= '0;
          state_q <= S_READ_GO;
        end
        S_READ_GO: state_q <= S_READ_WAIT;
        S_READ_WAIT: if (acc_valid) begin
          n_reads <= n_reads + 1;
          n_cmps  <= n_cmps + ((mode_q == MODE_HDPV) ? NBITS : 32'(cl_ncmp));
          if (row_q == RBITS'(N - 1)) begin
            state_q <= S_DECIDE;
          end else begin
            row_q   <= row_q + 1'b1;
            state_q <= S_READ_GO;
          end
        end
        S_DECIDE: state_q <= S_CHECK;
        S_CHECK: begin
          if (all_frozen) begin
            converged <= 1'b1;
            done      <= 1'b1;
            iter      <= iter + 1'b1;
            state_q   <= S_IDLE;
          end else begin
            state_q <= S_WRITE;
          end
        end
        S_WRITE: if (cw_done) begin
          iter <= iter + 1'b1;
          if (32'(iter) + 1 >= MAX_ITER) begin
            done    <= 1'b1;
            state_q <= S_IDLE;
          end else begin
            row_q   <= '0;
            state_q <= S_READ_GO;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // A conversion result only arrives while a verify read is outstanding.
  a_done_in_read: assert property (@(posedge clk) disable iff (!rst_n)
    (sar_done || cl_done) |-> state_q == S_READ_WAIT);
  // The SAR and compare logic are never active together.
  a_one_adc_mode: assert property (@(posedge clk) disable iff (!rst_n)
    !(sar_busy && cl_busy));
  // The writer and the ADC never drive the array at the same time.
  a_write_or_read: assert property (@(posedge clk) disable iff (!rst_n)
    !(cw_busy && (sar_busy || cl_busy)));
endmodule
