// tb_wv_harness: simulation harness that closes the write-and-verify loop of
// one wv_ctrl engine through the bitline drive encoder and a single-pair
// behavioural array/ADC model (cba_afe_model). Array size, ADC resolution,
// noise and MAX_ITER are parameters so a bench can instantiate several
// harnesses.
module tb_wv_harness
  import harp_pkg::*;
#(
  parameter int N          = 32,
  parameter int NBITS      = 9,
  parameter int MAX_ITER   = 50,
  parameter int SIGMA_UC16 = 0,
  parameter int SIGMA_CM16 = 0,
  parameter int PROG_PCT   = 0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  wv_mode_e         mode,
  input  logic [2:0]       w_mag [N],
  input  logic [N-1:0]     w_neg,
  output logic             busy,
  output logic             done,
  output logic             converged,
  output logic [15:0]      iter,
  output logic [31:0]      n_reads,
  output logic [31:0]      n_cmps,
  output logic [31:0]      n_pulses
);
  op_e op;
  logic [$clog2(N)-1:0] row;
  logic [N-1:0] had_pos, bl_mask, frozen;
  vsam_e vsam, vsam_e_arr [1];
  logic [NBITS-1:0] dac_code, dac_arr [1];
  logic [0:0] cmp;
  logic pulse, wl_pos, wl_neg;
  bl_lvl_e bl [N];
  sl_lvl_e sl, sl_arr [1];
  vsam_e enc_vsam;

  wv_ctrl #(.N(N), .NBITS(NBITS), .MAX_ITER(MAX_ITER)) u_wv (
    .clk, .rst_n, .start, .mode, .w_mag, .w_neg, .op, .row, .had_pos, .vsam,
    .dac_code, .cmp(cmp[0]), .pulse, .wl_pos, .wl_neg, .bl_mask, .busy, .done, .converged,
    .frozen, .iter, .n_reads, .n_cmps, .n_pulses);

  bl_drive_enc #(.N(N)) u_enc (.op, .first_row(row == '0), .had_pos, .in_bits('0),
                               .mask(bl_mask), .bl, .sl, .vsam(enc_vsam));

  assign sl_arr[0] = sl;
  assign vsam_e_arr[0] = vsam;
  assign dac_arr[0] = dac_code;

  cba_afe_model #(.N(N), .NPAIR(1), .NBITS(NBITS), .SIGMA_UC16(SIGMA_UC16),
                  .SIGMA_CM16(SIGMA_CM16), .PROG_NOISE_PCT(PROG_PCT)) u_model (
    .clk, .bl, .sl(sl_arr), .wl_pos(wl_pos || op == OP_VERIFY), .wl_neg(wl_neg || op == OP_VERIFY),
    .vsam(vsam_e_arr), .dac_code(dac_arr), .cmp);
endmodule
