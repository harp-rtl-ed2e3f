// tb_inv_hadamard_acc: (1) the 4-cell example: cells 3,1,2,4 read through the
// four Hadamard rows with noise +0.5,+0.2,-0.4,-0.3 give 10.5, 0.2, -2.4, 3.7
// and must decode to 3.0, 1.05, 2.35, 4.1 (all values scaled by 20 to stay
// integer); (2) random N = 32 columns, noise-free: acc must be N times the
// cell values; (3) a constant offset added to every read must appear only in
// cell 0; (4) clear must zero the accumulators.
module tb_inv_hadamard_acc;
  localparam int N = 32, YB = 12;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, valid = 0;
  logic [4:0] row;
  logic signed [YB-1:0] y;
  logic signed [YB+4:0] acc [N];
  logic [1:0] row4;
  logic signed [YB-1:0] y4;
  logic valid4 = 0, clear4 = 0;
  logic signed [YB+1:0] acc4 [4];
  int H [N][N];

  inv_hadamard_acc #(.N(N), .YBITS(YB)) dut (.clk, .rst_n, .clear, .valid, .row, .y, .acc);
  inv_hadamard_acc #(.N(4), .YBITS(YB)) dut4 (.clk, .rst_n, .clear(clear4), .valid(valid4),
                                              .row(row4), .y(y4), .acc(acc4));
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sweep(input int w [N], input int offset);
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    for (int r = 0; r < N; r++) begin
      int s;
      s = offset;
      for (int c = 0; c < N; c++) s += H[r][c] * w[c];
      row = 5'(r); y = YB'(s); valid = 1;
      @(negedge clk);
    end
    valid = 0;
  endtask

  initial begin
    int meas4 [4];
    int exp4 [4];
    int w [N];
    H[0][0] = 1;
    for (int n = 1; n < N; n *= 2)
      for (int r = 0; r < n; r++)
        for (int c = 0; c < n; c++) begin
          H[r][c+n] = H[r][c]; H[r+n][c] = H[r][c]; H[r+n][c+n] = -H[r][c];
        end
    row = 0; y = 0; row4 = 0; y4 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // (1) example, x20
    meas4 = '{210, 4, -48, 74};
    exp4  = '{60, 21, 47, 82};
    for (int r = 0; r < 4; r++) begin
      row4 = 2'(r); y4 = YB'(meas4[r]); valid4 = 1;
      @(negedge clk);
    end
    valid4 = 0;
    for (int c = 0; c < 4; c++) begin
      checks++;
      if (int'(acc4[c]) != 4 * exp4[c]) begin
        failures++; $display("example cell %0d: %0d exp %0d", c, acc4[c], 4 * exp4[c]);
      end
    end
    // (2) random columns
    for (int t = 0; t < 10; t++) begin
      for (int c = 0; c < N; c++) w[c] = int'($urandom % 8);
      sweep(w, 0);
      for (int c = 0; c < N; c++) begin
        checks++;
        if (int'(acc[c]) != N * w[c]) begin failures++; $display("cell %0d acc %0d exp %0d", c, acc[c], N * w[c]); end
      end
      // (3) common-mode offset
      sweep(w, 5);
      for (int c = 0; c < N; c++) begin
        checks++;
        if (int'(acc[c]) != N * w[c] + ((c == 0) ? N * 5 : 0)) begin
          failures++; $display("cm cell %0d acc %0d", c, acc[c]);
        end
      end
    end
    // (4) clear
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    for (int c = 0; c < N; c++) begin checks++; if (acc[c] != 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
