// tb_wv_decision: random decoded sums and targets in both modes, compared
// with the decision rules computed in the bench: HD-PV RESET when
// acc/N - w* > 1/2, SET when < -1/2; HARP RESET when acc > tau_w, SET when
// acc < -tau_w; STOP otherwise. Boundary values are included.
module tb_wv_decision;
  import harp_pkg::*;
  localparam int N = 32, WB = 3, AB = 15, TAU = 4;
  int checks = 0, failures = 0;
  wv_mode_e mode;
  logic signed [AB-1:0] acc [N];
  logic [WB-1:0] w [N];
  wv_dec_e dec [N];

  wv_decision #(.N(N), .WBITS(WB), .ABITS(AB), .TAU_W(TAU)) dut (.mode, .acc, .w_mag(w), .dec);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 60; t++) begin
      mode = (t % 2) ? MODE_HARP : MODE_HDPV;
      for (int c = 0; c < N; c++) begin
        w[c] = WB'($urandom);
        if (mode == MODE_HDPV) acc[c] = AB'(N * int'(w[c]) + int'($urandom % 97) - 48);
        else                   acc[c] = AB'(int'($urandom % 65) - 32);
      end
      if (t < 2) begin
        acc[0] = AB'((mode == MODE_HDPV) ? N * int'(w[0]) + 16 : 4);
        acc[1] = AB'((mode == MODE_HDPV) ? N * int'(w[1]) + 17 : 5);
        acc[2] = AB'((mode == MODE_HDPV) ? N * int'(w[2]) - 16 : -4);
        acc[3] = AB'((mode == MODE_HDPV) ? N * int'(w[3]) - 17 : -5);
      end
      #1;
      for (int c = 0; c < N; c++) begin
        int d2;   // 2N * (w_hat - w*) or 2 * acc
        wv_dec_e e;
        if (mode == MODE_HDPV) begin
          d2 = 2 * (int'(acc[c]) - N * int'(w[c]));
          e = (d2 > N) ? D_RESET : (d2 < -N) ? D_SET : D_STOP;
        end else begin
          e = (int'(acc[c]) > TAU) ? D_RESET : (int'(acc[c]) < -TAU) ? D_SET : D_STOP;
        end
        checks++;
        if (dec[c] != e) begin
          failures++;
          $display("mode %s cell %0d acc %0d w %0d: %s exp %s", mode.name(), c, acc[c], w[c],
                   dec[c].name(), e.name());
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
