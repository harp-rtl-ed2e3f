// tb_harp_macro: end-to-end test of the macro at its default size (32 rows,
// 16 column pairs, 9-bit ADC, K = 2, tau_w = 4, 50 iterations) against the
// behavioural array/ADC model.
//  1. Two signed 6-bit weight columns (each split into an MSB and an LSB
//     3-bit slice on two column pairs) are programmed, alternating HD-PV and
//     HARP, with 0.7 LSB read noise, a common-mode part and programming
//     noise. HD-PV runs must converge; every run must leave an RMS cell
//     error below one LSB, the unused column of each pair at zero and the
//     other pairs untouched.
//  2. An HD-PV run under very large read noise must stop at the iteration
//     limit without converging.
//  3. A noise-free bit-serial inference over the programmed columns must
//     return exactly the shift-and-add of the quantised column reads,
//     computed in the bench from the model's conductances.
// Every mechanism (coarse write, fine SET/RESET, negative-column write, SAR
// and one-shot conversion with one- and two-comparison outcomes, the Vcm/2 sampling
// reference, freezing, convergence, iteration limit, inference) is counted
// and must occur at least once.
module tb_harp_macro;
  import harp_pkg::*;
  localparam int N = 32, NPAIR = 16, NB = 9, IB = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic wv_start = 0, inf_start = 0;
  wv_mode_e wv_mode = MODE_HDPV;
  logic [3:0] wv_pair = 0;
  logic [2:0] w_mag [N];
  logic [N-1:0] w_neg;
  logic wv_busy, wv_done, wv_converged, inf_busy, inf_done, wr_pulse;
  logic [N-1:0] wv_frozen;
  logic [15:0] wv_iter;
  logic [31:0] wv_reads, wv_cmps, wv_pulses;
  logic [IB-1:0] x [N];
  logic signed [NB+IB+3+1+2-1:0] y_out [NPAIR/2];
  bl_lvl_e bl [N];
  sl_lvl_e sl [NPAIR];
  logic [NPAIR-1:0] wl_pos, wl_neg, cmp;
  vsam_e vsam [NPAIR];
  logic [NB-1:0] dac_code [NPAIR];

  harp_macro dut (.clk, .rst_n, .wv_start, .wv_mode, .wv_pair, .w_mag, .w_neg,
    .wv_busy, .wv_done, .wv_converged, .wv_frozen, .wv_iter, .wv_reads, .wv_cmps, .wv_pulses,
    .inf_start, .x, .inf_busy, .inf_done, .y_out,
    .bl, .sl, .wl_pos, .wl_neg, .vsam, .dac_code, .wr_pulse, .cmp);

  cba_afe_model #(.N(N), .NPAIR(NPAIR), .NBITS(NB)) u_model (
    .clk, .bl, .sl, .wl_pos, .wl_neg, .vsam, .dac_code, .cmp);

  always #5 clk = ~clk;

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- mechanism counters (observed at the macro's ports) -----------------
  int n_coarse = 0, n_set = 0, n_reset = 0, n_negwr = 0, n_sar_reads = 0;
  int n_low = 0, n_two_cmp = 0, n_halfvcm = 0, n_freeze = 0;
  int n_conv = 0, n_limit = 0, n_infer = 0, n_hdpv = 0, n_harp = 0;
  logic [N-1:0] frozen_prev = '0;

  always @(negedge clk) if (rst_n) begin
    if (wr_pulse) begin
      logic has_c, has_s;
      has_c = 1'b0; has_s = 1'b0;
      for (int r = 0; r < N; r++) begin
        if (bl[r] == BL_VSET_C) has_c = 1'b1;
        if (bl[r] == BL_VSET)   has_s = 1'b1;
      end
      if (has_c) n_coarse++;
      if (has_s) n_set++;
      if (sl[wv_pair] == SL_VRESET) n_reset++;
      if (|wl_neg) n_negwr++;
    end
    if (wv_busy && (&wl_pos[wv_pair]) && (&wl_neg[wv_pair]) && vsam[wv_pair] == VSAM_HALFVCM) n_halfvcm++;
    n_freeze += $countones(wv_frozen & ~frozen_prev);
    frozen_prev = wv_frozen;
    if (wv_done) begin
      if (wv_converged) n_conv++; else n_limit++;
    end
    if (inf_done) n_infer++;
  end

  // ---- helpers -------------------------------------------------------------
  int wt [2][N];   // signed 6-bit weights of the two weight columns

  task automatic program_pair(input int p, input wv_mode_e m, input logic [2:0] mag [N],
                              input logic [N-1:0] neg, input bit must_converge);
    int acc_e, wrong, untouched;
    real sq;
    w_mag = mag; w_neg = neg; wv_mode = m; wv_pair = 4'(p);
    if (m == MODE_HDPV) n_hdpv++; else n_harp++;
    @(negedge clk) wv_start = 1;
    @(negedge clk) wv_start = 0;
    while (!wv_done) @(negedge clk);
    sq = 0; wrong = 0; untouched = 0;
    for (int c = 0; c < N; c++) begin
      int g, o;
      g = neg[c] ? u_model.g[p][1][c] : u_model.g[p][0][c];
      o = neg[c] ? u_model.g[p][0][c] : u_model.g[p][1][c];
      acc_e = g - 4 * int'(mag[c]);
      sq += (real'(acc_e) / 4.0) ** 2;
      if (o != 0) wrong++;
    end
    for (int q = 0; q < NPAIR; q++)
      if (q > p) for (int c = 0; c < N; c++)
        if (u_model.g[q][0][c] != 0 || u_model.g[q][1][c] != 0) untouched++;
    $display("pair %0d %s: converged=%0d sweeps=%0d reads=%0d comparisons=%0d pulses=%0d rms=%0d mLSB",
             p, m.name(), wv_converged, wv_iter, wv_reads, wv_cmps, wv_pulses, int'(1000.0 * $sqrt(sq / N)));
    if (m == MODE_HDPV) begin
      n_sar_reads += wv_reads;
      checks++;
      if (wv_cmps != 9 * wv_reads) begin failures++; $display("HD-PV: not 9 comparisons per read"); end
    end else begin
      // a Low outcome takes one comparison, Equal and High take two
      n_low     += 2 * wv_reads - wv_cmps;
      n_two_cmp += wv_cmps - wv_reads;
      checks++;
      if (wv_cmps < wv_reads || wv_cmps > 2 * wv_reads) begin failures++; $display("HARP: comparison count"); end
    end
    checks += 5;
    if (must_converge && !wv_converged) begin failures++; $display("pair %0d did not converge", p); end
    if (must_converge && $sqrt(sq / N) > 1.0) begin failures++; $display("pair %0d RMS error above 1 LSB", p); end
    if (wrong != 0) begin failures++; $display("pair %0d: %0d cells in the wrong column", p, wrong); end
    if (untouched != 0) begin failures++; $display("pair %0d: other pairs disturbed", p); end
    if (wv_reads != 32'(N) * 32'(wv_iter)) begin failures++; $display("pair %0d: read count", p); end
  endtask

  initial begin
    logic [2:0] msb [N], lsb [N];
    logic [N-1:0] neg;
    for (int c = 0; c < N; c++) begin w_mag[c] = 0; x[c] = 0; end
    w_neg = '0;
    u_model.set_noise(11, 4, 20);   // 0.7 LSB uncorrelated read noise
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- 1. program two signed weight columns
    for (int wc = 0; wc < 2; wc++) begin
      for (int c = 0; c < N; c++) begin
        wt[wc][c] = int'($urandom % 127) - 63;
        msb[c] = 3'(((wt[wc][c] < 0) ? -wt[wc][c] : wt[wc][c]) >> 3);
        lsb[c] = 3'(((wt[wc][c] < 0) ? -wt[wc][c] : wt[wc][c]) & 7);
        neg[c] = wt[wc][c] < 0;
      end
      program_pair(2 * wc,     (wc == 0) ? MODE_HDPV : MODE_HARP, msb, neg, 1'b1);
      program_pair(2 * wc + 1, (wc == 0) ? MODE_HARP : MODE_HDPV, lsb, neg, 1'b1);
    end
    // ---- 2. iteration limit under very large read noise
    u_model.set_noise(160, 4, 20);
    for (int c = 0; c < N; c++) msb[c] = 3'($urandom);
    program_pair(4, MODE_HDPV, msb, '0, 1'b0);
    checks += 2;
    if (wv_converged) begin failures++; $display("noisy run converged unexpectedly"); end
    if (wv_iter != 50) begin failures++; $display("noisy run stopped after %0d sweeps", wv_iter); end
    // ---- 3. inference, noise-free reads
    u_model.set_noise(0, 0, 0);
    for (int t = 0; t < 3; t++) begin
      longint expv [2];
      for (int r = 0; r < N; r++) x[r] = IB'($urandom);
      expv = '{0, 0};
      for (int b = 0; b < IB; b++)
        for (int s = 0; s < 2; s++)
          for (int wc = 0; wc < 2; wc++) begin
            longint term;
            term = 0;
            for (int l = 0; l < 2; l++) begin
              int v16, code;
              v16 = 0;
              for (int r = 0; r < N; r++) if (x[r][b]) v16 += 4 * u_model.g[2 * wc + l][s][r];
              code = (v16 + 8 <= 0) ? 0 : (v16 + 8 + 15) / 16 - 1;
              if (code > 511) code = 511;
              term += longint'(code) << ((1 - l) * 3);
            end
            term = term << b;
            expv[wc] += s ? -term : term;
          end
      @(negedge clk) inf_start = 1;
      @(negedge clk) inf_start = 0;
      while (!inf_done) @(negedge clk);
      @(negedge clk);
      for (int wc = 0; wc < 2; wc++) begin
        longint ideal;
        ideal = 0;
        for (int r = 0; r < N; r++) ideal += longint'(x[r]) * wt[wc][r];
        $display("inference column %0d: y=%0d expected=%0d (ideal weights: %0d)", wc, y_out[wc], expv[wc], ideal);
        checks++;
        if (longint'(y_out[wc]) != expv[wc]) begin failures++; $display("inference mismatch"); end
      end
    end
    // ---- mechanism coverage
    $display("coarse=%0d set=%0d reset=%0d negwrite=%0d sar_reads=%0d low=%0d equal_or_high=%0d halfvcm=%0d",
             n_coarse, n_set, n_reset, n_negwr, n_sar_reads, n_low, n_two_cmp, n_halfvcm);
    $display("freeze=%0d converged=%0d limit=%0d inferences=%0d hdpv_runs=%0d harp_runs=%0d",
             n_freeze, n_conv, n_limit, n_infer, n_hdpv, n_harp);
    checks += 14;
    if (n_coarse == 0) failures++;
    if (n_set == 0) failures++;
    if (n_reset == 0) failures++;
    if (n_negwr == 0) failures++;
    if (n_sar_reads == 0) failures++;
    if (n_low == 0) failures++;
    if (n_two_cmp == 0) failures++;
    if (n_halfvcm == 0) failures++;
    if (n_freeze == 0) failures++;
    if (n_conv == 0) failures++;
    if (n_limit == 0) failures++;
    if (n_infer != 3) failures++;
    if (n_hdpv == 0) failures++;
    if (n_harp == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
