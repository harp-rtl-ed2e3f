// wv_decision: per-cell SET / RESET / STOP decision after a verify sweep.
//
// Input acc[c] is the un-normalised inverse-Hadamard output (N times the
// decoded value).
//  * HD-PV: acc[c] = N * w_hat[c]. The cell is RESET if w_hat - w* > 0.5 LSB,
//    SET if w_hat - w* < -0.5 LSB and STOP otherwise. The test is done as
//    acc - N*w* against +-N/2, which needs no division.
//  * HARP: acc[c] = N * s_w[c], the decoded ternary sign vector. The cell is
//    RESET if the sum exceeds TAU_W, SET if it is below -TAU_W, else STOP.
//
// Timing: combinational.
// The paper writes s_w = (1/N) H^T s_y, whose entries lie in [-1, 1], but
// uses tau_w = 4; this design applies tau_w to the un-normalised sum H^T s_y
// (entries in [-N, N]), the only reading under which tau_w = 4 is usable.
module wv_decision
  import harp_pkg::*;
#(
  parameter int unsigned N     = 32,
  parameter int unsigned WBITS = 3,
  parameter int unsigned ABITS = 15,
  parameter int unsigned TAU_W = 4
) (
  input  wv_mode_e                mode,
  input  logic signed [ABITS-1:0] acc   [N],
  input  logic [WBITS-1:0]        w_mag [N],
  output wv_dec_e                 dec   [N]
);
  always_comb begin
    for (int unsigned c = 0; c < N; c++) begin
      int diff;
      if (mode == MODE_HDPV) begin
        diff = int'(acc[c]) - int'(N) * int'(w_mag[c]);
        if (diff > int'(N) / 2)        dec[c] = D_RESET;
        else if (diff < -int'(N) / 2)  dec[c] = D_SET;
        else                           dec[c] = D_STOP;
      end else begin
        diff = int'(acc[c]);
        if (diff > int'(TAU_W))        dec[c] = D_RESET;
        else if (diff < -int'(TAU_W))  dec[c] = D_SET;
        else                           dec[c] = D_STOP;
      end
    end
  end
endmodule
