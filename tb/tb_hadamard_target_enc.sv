// tb_hadamard_target_enc: random target vectors; for every row the target sum
// must equal H_row . w* (H built by the Sylvester recursion in the bench),
// the code must carry the mid-scale offset on balanced rows only, and the
// sampling reference must be GND on row 0 and Vcm/2 elsewhere.
module tb_hadamard_target_enc;
  import harp_pkg::*;
  localparam int N = 32, WB = 3, NB = 9;
  int checks = 0, failures = 0;
  logic [4:0] row;
  logic [WB-1:0] w [N];
  logic signed [$clog2(N)+WB:0] y;
  logic [NB-1:0] code;
  vsam_e vsam;
  int H [N][N];

  hadamard_target_enc #(.N(N), .WBITS(WB), .NBITS(NB)) dut (
    .row, .w_mag(w), .y_tgt(y), .tgt_code(code), .vsam);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    H[0][0] = 1;
    for (int n = 1; n < N; n *= 2)
      for (int r = 0; r < n; r++)
        for (int c = 0; c < n; c++) begin
          H[r][c+n] = H[r][c]; H[r+n][c] = H[r][c]; H[r+n][c+n] = -H[r][c];
        end
    for (int t = 0; t < 20; t++) begin
      for (int c = 0; c < N; c++) w[c] = (t == 0) ? 3'd7 : WB'($urandom);
      for (int r = 0; r < N; r++) begin
        int s, ec;
        row = 5'(r);
        #1;
        s = 0;
        for (int c = 0; c < N; c++) s += H[r][c] * int'(w[c]);
        ec = (r == 0) ? s : s + 256;
        checks += 3;
        if (int'(y) != s)        begin failures++; $display("row %0d y=%0d exp %0d", r, y, s); end
        if (int'(code) != ec)    begin failures++; $display("row %0d code=%0d exp %0d", r, code, ec); end
        if (vsam != ((r == 0) ? VSAM_GND : VSAM_HALFVCM)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
