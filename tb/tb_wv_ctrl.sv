// tb_wv_ctrl: closed-loop write-and-verify of one 32-cell column pair.
//  A: noise-free array, HD-PV and HARP on random signed targets: the run must
//     converge (HD-PV), every cell must end within half an LSB (HD-PV) or one
//     LSB (HARP) of its target in the right column with the other column still at zero, a sweep must make N
//     reads, and HD-PV must spend NBITS comparisons per read while HARP
//     spends one or two.
//  B: MAX_ITER = 2 with targets the coarse step undershoots: the run must
//     stop after two sweeps without converging.
//  C: read noise of 0.7 LSB plus a common-mode part and programming
//     noise: HD-PV must converge, and both modes must end with an RMS error
//     below one LSB.
module tb_wv_ctrl;
  import harp_pkg::*;
  localparam int N = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic sa = 0, sb = 0, sc = 0;
  wv_mode_e mode = MODE_HDPV;
  logic [2:0] w [N];
  logic [N-1:0] wn;
  logic busy_a, done_a, conv_a, busy_b, done_b, conv_b, busy_c, done_c, conv_c;
  logic [15:0] it_a, it_b, it_c;
  logic [31:0] rd_a, cm_a, pu_a, rd_b, cm_b, pu_b, rd_c, cm_c, pu_c;

  tb_wv_harness #(.N(N)) ha (.clk, .rst_n, .start(sa), .mode, .w_mag(w), .w_neg(wn),
    .busy(busy_a), .done(done_a), .converged(conv_a), .iter(it_a), .n_reads(rd_a), .n_cmps(cm_a), .n_pulses(pu_a));
  tb_wv_harness #(.N(N), .MAX_ITER(2)) hb (.clk, .rst_n, .start(sb), .mode, .w_mag(w), .w_neg(wn),
    .busy(busy_b), .done(done_b), .converged(conv_b), .iter(it_b), .n_reads(rd_b), .n_cmps(cm_b), .n_pulses(pu_b));
  tb_wv_harness #(.N(N), .SIGMA_UC16(11), .SIGMA_CM16(4), .PROG_PCT(20)) hc (.clk, .rst_n, .start(sc), .mode, .w_mag(w), .w_neg(wn),
    .busy(busy_c), .done(done_c), .converged(conv_c), .iter(it_c), .n_reads(rd_c), .n_cmps(cm_c), .n_pulses(pu_c));

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rand_targets();
    for (int c = 0; c < N; c++) w[c] = 3'($urandom);
    wn = {$urandom};
    for (int c = 0; c < N; c++) if (w[c] == 0) wn[c] = 1'b0;
  endtask

  // Largest |g - 4 w*| in steps and RMS error in LSB (x1000) of a model.
  function automatic void col_error(input int gp [N], input int gn [N], output int maxerr,
                                    output int rms_milli, output int wrong_col);
    real acc;
    acc = 0; maxerr = 0; wrong_col = 0;
    for (int c = 0; c < N; c++) begin
      int g, o, e;
      g = wn[c] ? gn[c] : gp[c];
      o = wn[c] ? gp[c] : gn[c];
      e = g - 4 * int'(w[c]);
      if (e < 0) e = -e;
      if (e > maxerr) maxerr = e;
      if (o != 0) wrong_col++;
      acc += (real'(e) / 4.0) ** 2;
    end
    rms_milli = int'(1000.0 * $sqrt(acc / N));
  endfunction

  initial begin
    int gp [N], gn [N];
    int maxerr, rms, wrong;
    for (int c = 0; c < N; c++) w[c] = 0;
    wn = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- A: noise-free, both modes
    for (int t = 0; t < 4; t++) begin
      mode = (t % 2) ? MODE_HARP : MODE_HDPV;
      rand_targets();
      ha.u_model.erase();
      @(negedge clk) sa = 1;
      @(negedge clk) sa = 0;
      while (!done_a) @(negedge clk);
      for (int c = 0; c < N; c++) begin gp[c] = ha.u_model.g[0][0][c]; gn[c] = ha.u_model.g[0][1][c]; end
      col_error(gp, gn, maxerr, rms, wrong);
      $display("A %s: converged=%0d iter=%0d reads=%0d cmps=%0d pulses=%0d maxerr=%0d steps rms=%0d mLSB",
               mode.name(), conv_a, it_a, rd_a, cm_a, pu_a, maxerr, rms);
      checks += 5;
      // HD-PV must converge to within half an LSB. HARP stops a cell on the
      // decoded sign sum, so a residual below one LSB may remain and a
      // noise-free run may end at the iteration limit.
      if (mode == MODE_HDPV && !conv_a) begin failures++; $display("A: not converged"); end
      if (maxerr > ((mode == MODE_HDPV) ? 2 : 4)) begin failures++; $display("A: cell error too large"); end
      if (wrong != 0) begin failures++; $display("A: %0d cells written in the wrong column", wrong); end
      if (rd_a != 32'(N) * 32'(it_a)) begin failures++; $display("A: reads %0d != N*iter", rd_a); end
      if (mode == MODE_HDPV ? (cm_a != 9 * rd_a) : (cm_a < rd_a || cm_a > 2 * rd_a)) begin
        failures++; $display("A: comparison count %0d for %0d reads", cm_a, rd_a);
      end
    end
    // ---- B: iteration limit
    mode = MODE_HDPV;
    for (int c = 0; c < N; c++) w[c] = 3'd7;
    wn = '0;
    hb.u_model.erase();
    @(negedge clk) sb = 1;
    @(negedge clk) sb = 0;
    while (!done_b) @(negedge clk);
    checks += 2;
    if (conv_b) begin failures++; $display("B: converged unexpectedly"); end
    if (it_b != 2) begin failures++; $display("B: stopped after %0d sweeps", it_b); end
    // ---- C: noisy
    for (int t = 0; t < 2; t++) begin
      mode = t ? MODE_HARP : MODE_HDPV;
      rand_targets();
      hc.u_model.erase();
      @(negedge clk) sc = 1;
      @(negedge clk) sc = 0;
      while (!done_c) @(negedge clk);
      for (int c = 0; c < N; c++) begin gp[c] = hc.u_model.g[0][0][c]; gn[c] = hc.u_model.g[0][1][c]; end
      col_error(gp, gn, maxerr, rms, wrong);
      $display("C %s: converged=%0d iter=%0d cmps=%0d pulses=%0d maxerr=%0d steps rms=%0d mLSB",
               mode.name(), conv_c, it_c, cm_c, pu_c, maxerr, rms);
      checks += 2;
      if (mode == MODE_HDPV && !conv_c) begin failures++; $display("C: not converged"); end
      if (rms > 1000) begin failures++; $display("C: RMS error above 1 LSB"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
