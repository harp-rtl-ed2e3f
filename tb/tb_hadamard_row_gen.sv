// tb_hadamard_row_gen: checks every row of the generated Hadamard matrix for
// N = 32 against a matrix built independently by the Sylvester recursion
// H_2n = [[H_n, H_n], [H_n, -H_n]], checks H H^T = N I, and checks the 4x4
// example rows 1111, 1-11-1, 11-1-1, 1-1-11 with a second instance.
module tb_hadamard_row_gen;
  localparam int N = 32;
  int checks = 0, failures = 0;
  logic [4:0]  row;
  logic [N-1:0] pos;
  logic [1:0]  row4;
  logic [3:0]  pos4;
  int H [N][N];

  hadamard_row_gen #(.N(N)) dut (.row(row), .pos(pos));
  hadamard_row_gen #(.N(4))  dut4 (.row(row4), .pos(pos4));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rows [N][N];
    logic [3:0] exp4 [4];
    H[0][0] = 1;
    for (int n = 1; n < N; n *= 2)
      for (int r = 0; r < n; r++)
        for (int c = 0; c < n; c++) begin
          H[r][c+n]   = H[r][c];
          H[r+n][c]   = H[r][c];
          H[r+n][c+n] = -H[r][c];
        end
    for (int r = 0; r < N; r++) begin
      row = 5'(r);
      #1;
      for (int c = 0; c < N; c++) begin
        rows[r][c] = pos[c] ? 1 : -1;
        checks++;
        if (rows[r][c] != H[r][c]) begin
          failures++;
          $display("row %0d col %0d: got %0d exp %0d", r, c, rows[r][c], H[r][c]);
        end
      end
    end
    for (int a = 0; a < N; a++)
      for (int b = 0; b < N; b++) begin
        int d;
        d = 0;
        for (int c = 0; c < N; c++) d += rows[a][c] * rows[b][c];
        checks++;
        if (d != ((a == b) ? N : 0)) failures++;
      end
    // bit c of each word = column c; 1 = +1
    exp4[0] = 4'b1111; exp4[1] = 4'b1010; exp4[2] = 4'b1100; exp4[3] = 4'b1001;
    for (int r = 0; r < 4; r++) begin
      row4 = 2'(r);
      #1;
      checks++;
      if (pos4 != {exp4[r][0], exp4[r][1], exp4[r][2], exp4[r][3]}) begin
        failures++;
        $display("4x4 row %0d: got %b", r, pos4);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
