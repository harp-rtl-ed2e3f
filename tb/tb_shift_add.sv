// tb_shift_add: random codes over all input bits and both polarities; the
// accumulator must equal sum over reads of (+-1) * 2^bit * sum_l code_l *
// 2^(BC*(K-1-l)), computed in the bench.
module tb_shift_add;
  localparam int NB = 9, IB = 8, BC = 3, KS = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, valid = 0, neg = 0;
  logic [2:0] bit_idx;
  logic [NB-1:0] code [KS];
  logic signed [NB+IB+BC+1+2-1:0] acc;

  shift_add #(.NBITS(NB), .IN_BITS(IB), .BC(BC), .K_SLICES(KS)) dut (
    .clk, .rst_n, .clear, .valid, .neg, .bit_idx, .code, .acc);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint expv;
    bit_idx = 0; code[0] = 0; code[1] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      expv = 0;
      for (int b = 0; b < IB; b++)
        for (int s = 0; s < 2; s++) begin
          longint term;
          code[0] = NB'($urandom % 225); code[1] = NB'($urandom % 225);
          bit_idx = 3'(b); neg = s[0]; valid = 1;
          term = (longint'(code[0]) * (1 << BC) + longint'(code[1])) * (longint'(1) << b);
          expv += s ? -term : term;
          @(negedge clk);
        end
      valid = 0;
      checks++;
      if (longint'(acc) != expv) begin failures++; $display("acc %0d exp %0d", acc, expv); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
