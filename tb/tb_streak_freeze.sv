// tb_streak_freeze: random decision streams against a reference model of the
// streak rule (STOP counts up, SET/RESET clears, freeze at K consecutive
// STOPs, frozen cells hold), plus the all-frozen flag and clear.
module tb_streak_freeze;
  import harp_pkg::*;
  localparam int N = 32, K = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, update = 0;
  wv_dec_e dec [N];
  logic [1:0] streak [N];
  logic [N-1:0] frozen;
  logic all_frozen;
  int ref_s [N];
  logic [N-1:0] ref_f;
  int saw_all = 0;

  streak_freeze #(.N(N), .K(K)) dut (.clk, .rst_n, .clear, .update, .dec, .streak, .frozen, .all_frozen);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < N; c++) begin dec[c] = D_STOP; ref_s[c] = 0; end
    ref_f = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      for (int c = 0; c < N; c++) ref_s[c] = 0;
      ref_f = '0;
      for (int it = 0; it < 40; it++) begin
        for (int c = 0; c < N; c++) begin
          int r;
          r = int'($urandom % 10);
          dec[c] = (r < 6) ? D_STOP : (r < 8) ? D_SET : D_RESET;
          if (!ref_f[c]) begin
            if (dec[c] == D_STOP) begin ref_s[c]++; if (ref_s[c] == K) ref_f[c] = 1'b1; end
            else ref_s[c] = 0;
          end
        end
        update = 1;
        @(negedge clk);
        update = 0;
        for (int c = 0; c < N; c++) begin
          checks += 2;
          if (frozen[c] != ref_f[c]) begin failures++; $display("cell %0d frozen %b exp %b", c, frozen[c], ref_f[c]); end
          if (int'(streak[c]) != ref_s[c]) begin failures++; $display("cell %0d streak %0d exp %0d", c, streak[c], ref_s[c]); end
        end
        checks++;
        if (all_frozen != (&ref_f)) failures++;
        if (all_frozen) saw_all++;
        @(negedge clk);
      end
    end
    checks++;
    if (saw_all == 0) begin failures++; $display("all_frozen never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
