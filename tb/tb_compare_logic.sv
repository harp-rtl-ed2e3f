// tb_compare_logic: checks the one-shot comparison. With an ideal comparator
// (level of code c at c - 1/2 LSB) the result must be Low when Vin is more
// than half an LSB below the target, High when more than half an LSB above,
// Equal otherwise; Low must take one comparison and the others two.
module tb_compare_logic;
  import harp_pkg::*;
  localparam int NB = 9;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, cmp;
  logic [NB-1:0] target, dac;
  logic busy, done;
  cmp_res_e res;
  logic [1:0] ncmp;
  int vin16;

  compare_logic #(.NBITS(NB)) dut (.clk, .rst_n, .start, .target, .cmp, .dac_code(dac),
                                   .busy, .done, .result(res), .ncmp);
  always #5 clk = ~clk;
  assign cmp = vin16 > 16 * int'(dac) - 8;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int t, input int v16);
    int cyc;
    cmp_res_e e;
    vin16 = v16;
    target = NB'(t);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    if (v16 <= 16 * t - 8)      e = CMP_LOW;
    else if (v16 > 16 * t + 8 && t != 2 ** NB - 1) e = CMP_HIGH;
    else                        e = CMP_EQUAL;
    checks++;
    if (res != e) begin
      failures++;
      $display("t=%0d vin16=%0d got %s exp %s", t, v16, res.name(), e.name());
    end
    checks++;
    if (int'(ncmp) != ((e == CMP_LOW || t == 2 ** NB - 1) ? 1 : 2) || cyc != int'(ncmp)) begin
      failures++;
      $display("t=%0d: ncmp=%0d cycles=%0d", t, ncmp, cyc);
    end
  endtask

  initial begin
    vin16 = 0; target = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(100, 1600);       // equal
    check(100, 1600 + 20);  // high
    check(100, 1600 - 20);  // low
    check(100, 1600 + 8);   // boundary: equal
    check(100, 1600 - 8);   // boundary: low
    check(511, 16 * 520);   // top code
    for (int k = 0; k < 300; k++) begin
      int t;
      t = int'($urandom % 510) + 1;
      check(t, 16 * t + int'($urandom % 64) - 32);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
