// cba_afe_model: behavioural model (not synthesizable) of the analog part of
// an RRAM crossbar macro, for simulation only: the 1T-1R array, the
// per-pair TIA, and the SAR capacitor DAC and comparator.
//
// Conductances are kept in fine programming steps of 1/STEPS_PER_LSB ADC LSB
// (one LSB = one cell level) and clipped to [0, GMAX_STEPS]. At a clock edge
// with a write pulse on a pair (SL grounded for SET, SL at V_reset for RESET),
// every selected cell on a pulsed bitline moves by one fine step (SET/RESET)
// or COARSE_STEPS steps (coarse SET), with an optional random extra step of
// +-1 with probability PROG_NOISE_PCT percent (cycle-to-cycle variation).
//
// Read: with the SL on the TIA, the value seen by the ADC is
//   v = sum_r s_r * (g_pos[r]*wl_pos + g_neg[r]*wl_neg) + n_uc + mu_cm
// in units of 1/16 LSB, where s_r = +1 for BL at VDD, -1 for GND, 0 for Vcm.
// n_uc is an approximately Gaussian sample with standard deviation
// SIGMA_UC16/16 LSB, drawn anew whenever the bitline pattern changes; mu_cm is
// drawn (sigma SIGMA_CM16/16 LSB) per pair at the start of each sweep (all-VDD pattern).
// The noise settings are variables initialised from the parameters, so a
// bench can change them between operations.
// The comparator output is 1 when v + offset > (dac_code - 1/2) LSB, where
// the offset is mid-scale for the V_sam = Vcm/2 reference. A full SAR search
// therefore returns round(v) and the one-shot compare reports Equal when v is
// within half an LSB of the target.
module cba_afe_model
  import harp_pkg::*;
#(
  parameter int unsigned N              = 32,
  parameter int unsigned NPAIR          = 1,
  parameter int unsigned NBITS          = 9,
  parameter int unsigned STEPS_PER_LSB  = 4,
  parameter int unsigned COARSE_STEPS   = 5,
  parameter int          GMAX_STEPS     = 32,
  parameter int          SIGMA_UC16     = 0,
  parameter int          SIGMA_CM16     = 0,
  parameter int          PROG_NOISE_PCT = 0
) (
  input  logic             clk,
  input  bl_lvl_e          bl       [N],
  input  sl_lvl_e          sl       [NPAIR],
  input  logic [NPAIR-1:0] wl_pos,
  input  logic [NPAIR-1:0] wl_neg,
  input  vsam_e            vsam     [NPAIR],
  input  logic [NBITS-1:0] dac_code [NPAIR],
  output logic [NPAIR-1:0] cmp
);
  // g[p][0][r]: positive column, g[p][1][r]: negative column
  int g [NPAIR][2][N];
  int n_uc [NPAIR];
  int mu_cm [NPAIR];
  bl_lvl_e bl_prev [N];
  int n_pulsed_cells;
  // Noise settings; a bench may change them between operations.
  int sigma_uc16 = SIGMA_UC16;
  int sigma_cm16 = SIGMA_CM16;
  int prog_pct   = PROG_NOISE_PCT;

  function automatic int gauss16(input int sigma16);
    int s;
    s = 0;
    for (int k = 0; k < 12; k++) s += int'($urandom % 1024);
    return ((s - 6144) * sigma16) / 1024;
  endfunction

  function automatic int prog_jitter();
    if (prog_pct == 0) return 0;
    if (int'($urandom % 100) >= prog_pct) return 0;
    return ($urandom % 2 == 1) ? 1 : -1;
  endfunction

  function automatic int clip(input int v);
    if (v < 0) return 0;
    if (v > GMAX_STEPS) return GMAX_STEPS;
    return v;
  endfunction

  // Change the noise settings and drop the samples currently applied.
  task automatic set_noise(input int uc16, input int cm16, input int pct);
    sigma_uc16 = uc16;
    sigma_cm16 = cm16;
    prog_pct   = pct;
    for (int p = 0; p < int'(NPAIR); p++) begin
      n_uc[p]  = 0;
      mu_cm[p] = 0;
    end
  endtask

  // Return every cell to HRS (zero conductance).
  task automatic erase();
    for (int p = 0; p < int'(NPAIR); p++)
      for (int s = 0; s < 2; s++)
        for (int r = 0; r < int'(N); r++) g[p][s][r] = 0;
  endtask

  initial begin
    n_pulsed_cells = 0;
    for (int p = 0; p < int'(NPAIR); p++) begin
      n_uc[p] = 0;
      mu_cm[p] = 0;
      for (int s = 0; s < 2; s++)
        for (int r = 0; r < int'(N); r++) g[p][s][r] = 0;
    end
    for (int r = 0; r < int'(N); r++) bl_prev[r] = BL_VCM;
  end

  // Programming and noise resampling.
  always @(posedge clk) begin
    logic changed, all_vdd;
    changed = 1'b0;
    all_vdd = 1'b1;
    for (int r = 0; r < int'(N); r++) begin
      if (bl[r] != bl_prev[r]) changed = 1'b1;
      if (bl[r] != BL_VDD) all_vdd = 1'b0;
    end
    for (int p = 0; p < int'(NPAIR); p++) begin
      for (int s = 0; s < 2; s++) begin
        if ((s == 0 && wl_pos[p]) || (s == 1 && wl_neg[p])) begin
          for (int r = 0; r < int'(N); r++) begin
            if (sl[p] == SL_GND && bl[r] == BL_VSET) begin
              g[p][s][r] = clip(g[p][s][r] + 1 + prog_jitter());
              n_pulsed_cells++;
            end else if (sl[p] == SL_GND && bl[r] == BL_VSET_C) begin
              g[p][s][r] = clip(g[p][s][r] + int'(COARSE_STEPS) + prog_jitter());
              n_pulsed_cells++;
            end else if (sl[p] == SL_VRESET && bl[r] == BL_GND) begin
              g[p][s][r] = clip(g[p][s][r] - 1 + prog_jitter());
              n_pulsed_cells++;
            end
          end
        end
      end
      if (changed) begin
        n_uc[p] = gauss16(sigma_uc16);
        if (all_vdd) mu_cm[p] = gauss16(sigma_cm16);
      end
    end
    for (int r = 0; r < int'(N); r++) bl_prev[r] = bl[r];
  end

  // Read path and comparator.
  always_comb begin
    for (int p = 0; p < int'(NPAIR); p++) begin
      int v, off;
      v = 0;
      for (int r = 0; r < int'(N); r++) begin
        int gc;
        gc = (wl_pos[p] ? g[p][0][r] : 0) + (wl_neg[p] ? g[p][1][r] : 0);
        if (bl[r] == BL_VDD)      v += gc * (16 / int'(STEPS_PER_LSB));
        else if (bl[r] == BL_GND) v -= gc * (16 / int'(STEPS_PER_LSB));
      end
      v += n_uc[p] + mu_cm[p];
      off = (vsam[p] == VSAM_HALFVCM) ? 16 * (2 ** (NBITS - 1)) : 0;
      cmp[p] = (sl[p] == SL_TIA) && (v + off > 16 * int'(dac_code[p]) - 8);
    end
  end
endmodule
