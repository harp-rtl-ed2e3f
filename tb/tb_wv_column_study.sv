// tb_wv_column_study: repeated write-and-verify of random signed columns at
// one array size, HD-PV against HARP on the same targets, for use by a
// workload bench.
//
// Each of RUNS rounds draws a random 32- or 64-cell target column (3-bit
// magnitudes, random signs) and programs it twice from an erased array: once
// with HD-PV, once with HARP. The array model has about 0.7 LSB of read noise
// (0.69 LSB uncorrelated plus 0.25 LSB common-mode) and a 20 % chance of an
// extra +-1 fine step per pulse. Per run it checks that
//   * HD-PV converges,
//   * the RMS cell error is below one LSB and the unused column stays at zero,
//   * a sweep makes N reads,
//   * HD-PV spends NBITS comparator decisions per read and HARP one or two.
// At the end it checks that HARP needed fewer comparator decisions in total
// than HD-PV. It also prints the mean sweeps, comparisons, pulses, latency
// in cycles and RMS error of each mode.
// Interface: `finished` rises when all runs are done; `checks` and
// `failures` are then final.
module tb_wv_column_study
  import harp_pkg::*;
#(
  parameter int N     = 32,
  parameter int NBITS = 9,
  parameter int RUNS  = 4
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures
);
  logic start = 0;
  wv_mode_e mode = MODE_HDPV;
  logic [2:0] w [N];
  logic [N-1:0] wn;
  logic busy, done, conv;
  logic [15:0] it;
  logic [31:0] rd, cm, pu;

  tb_wv_harness #(.N(N), .NBITS(NBITS), .SIGMA_UC16(11), .SIGMA_CM16(4), .PROG_PCT(20)) h (
    .clk, .rst_n, .start, .mode, .w_mag(w), .w_neg(wn),
    .busy, .done, .converged(conv), .iter(it), .n_reads(rd), .n_cmps(cm), .n_pulses(pu));

  initial begin
    longint sum_it [2], sum_cm [2], sum_pu [2], sum_cyc [2], sum_rms [2];
    longint R;
    R = longint'(RUNS);
    finished = 0; checks = 0; failures = 0;
    for (int m = 0; m < 2; m++) begin
      sum_it[m] = 0; sum_cm[m] = 0; sum_pu[m] = 0; sum_cyc[m] = 0; sum_rms[m] = 0;
    end
    for (int c = 0; c < N; c++) w[c] = 0;
    wn = '0;
    @(posedge rst_n);
    for (int r = 0; r < RUNS; r++) begin
      for (int c = 0; c < N; c++) w[c] = 3'($urandom);
      for (int c = 0; c < N; c++) wn[c] = (w[c] != 0) && ($urandom_range(1) == 1);
      for (int m = 0; m < 2; m++) begin
        int cyc, wrong;
        real acc;
        mode = (m == 1) ? MODE_HARP : MODE_HDPV;
        h.u_model.erase();
        @(negedge clk) start = 1;
        @(negedge clk) start = 0;
        cyc = 1;
        while (!done) begin @(negedge clk); cyc++; end
        acc = 0; wrong = 0;
        for (int c = 0; c < N; c++) begin
          int g, o;
          g = wn[c] ? h.u_model.g[0][1][c] : h.u_model.g[0][0][c];
          o = wn[c] ? h.u_model.g[0][0][c] : h.u_model.g[0][1][c];
          if (o != 0) wrong++;
          acc += ((real'(g) - 4.0 * real'(w[c])) / 4.0) ** 2;
        end
        sum_it[m] += longint'(it); sum_cm[m] += longint'(cm); sum_pu[m] += longint'(pu); sum_cyc[m] += longint'(cyc);
        sum_rms[m] += longint'(1000.0 * $sqrt(acc / N));
        checks += 5;
        if (m == 0 && !conv) begin failures++; $display("N=%0d HD-PV run %0d did not converge", N, r); end
        if (1000.0 * $sqrt(acc / N) > 1000.0) begin failures++; $display("N=%0d %s run %0d: RMS above 1 LSB", N, mode.name(), r); end
        if (wrong != 0) begin failures++; $display("N=%0d %s run %0d: unused column written", N, mode.name(), r); end
        if (rd != 32'(N) * 32'(it)) begin failures++; $display("N=%0d: reads %0d for %0d sweeps", N, rd, it); end
        if (m == 0 ? (cm != 32'(NBITS) * rd) : (cm < rd || cm > 2 * rd)) begin
          failures++; $display("N=%0d %s: %0d comparisons for %0d reads", N, mode.name(), cm, rd);
        end
      end
    end
    for (int m = 0; m < 2; m++)
      $display("N=%0d NBITS=%0d %s over %0d columns: sweeps %0d.%02d, comparisons %0d, pulses %0d, cycles %0d, RMS %0d mLSB",
               N, NBITS, (m == 1) ? "HARP " : "HD-PV", RUNS, sum_it[m] / R, (sum_it[m] * 100 / R) % 100,
               sum_cm[m] / R, sum_pu[m] / R, sum_cyc[m] / R, sum_rms[m] / R);
    $display("N=%0d HARP / HD-PV: comparisons %0d %%, cycles %0d %%", N,
             sum_cm[1] * 100 / sum_cm[0], sum_cyc[1] * 100 / sum_cyc[0]);
    checks++;
    if (sum_cm[1] >= sum_cm[0]) begin failures++; $display("N=%0d: HARP used no fewer comparisons than HD-PV", N); end
    finished = 1;
  end
endmodule
