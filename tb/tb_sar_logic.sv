// tb_sar_logic: drives the SAR logic with an ideal comparator (Vin above the
// level of code c, placed at c - 1/2 LSB) and checks that the result is the
// nearest code, that it takes exactly NBITS comparison cycles, and that the
// DAC code walks MSB first.
module tb_sar_logic;
  localparam int NB = 9;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, cmp;
  logic [NB-1:0] dac, dout;
  logic busy, done;
  int vin16;   // input in 1/16 LSB

  sar_logic #(.NBITS(NB)) dut (.clk, .rst_n, .start, .cmp, .dac_code(dac),
                               .busy, .done, .dout);
  always #5 clk = ~clk;
  assign cmp = vin16 > 16 * int'(dac) - 8;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic convert(input int v16);
    int cyc, expv;
    vin16 = v16;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    checks++;
    if (dac != NB'(1 << (NB - 1))) begin failures++; $display("first trial code %0d", dac); end
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    // largest code c with v16 > 16c - 8
    expv = (v16 + 8 <= 0) ? 0 : (v16 + 8 + 15) / 16 - 1;
    if (expv > 2 ** NB - 1) expv = 2 ** NB - 1;
    checks++;
    if (int'(dout) != expv) begin
      failures++;
      $display("vin16=%0d dout=%0d exp=%0d", v16, dout, expv);
    end
    checks++;
    if (cyc != NB) begin failures++; $display("conversion took %0d cycles", cyc); end
  endtask

  initial begin
    vin16 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    convert(0);
    convert(16 * 511);
    convert(16 * 256);
    convert(16 * 100 + 7);
    convert(16 * 100 + 9);
    for (int k = 0; k < 200; k++) convert(int'($urandom % (16 * 512)) - 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
