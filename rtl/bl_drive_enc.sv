// bl_drive_enc: drive levels of the bitlines, the source line and the ADC
// sampling reference for each array operation.
//
//  OP_VERIFY  Hadamard read: +1 entries drive VDD, -1 entries GND; the SL is on
//             the TIA (Vcm). V_sam is GND for the all-ones first row and Vcm/2
//             for the balanced rows.
//  OP_INFER   Bit-serial inference: input bit 1 drives VDD, 0 drives Vcm; the
//             SL is on the TIA; V_sam is GND.
//  OP_SET     Masked BLs get the SET pulse, the others GND; the SL is grounded.
//  OP_COARSE  As OP_SET with the higher coarse SET voltage.
//  OP_RESET   Masked BLs are pulled to GND while the SL is at V_reset; the
//             others are held at V_reset so their cells see no bias.
//  OP_IDLE    All BLs at Vcm, SL on the TIA.
//
// Timing: combinational. The levels themselves come from the paper; the
// RESET inhibit level of unmasked bitlines and the idle levels are this
// design's choice (the paper does not describe unselected-cell biasing).
module bl_drive_enc
  import harp_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  op_e          op,
  input  logic         first_row,
  input  logic [N-1:0] had_pos,
  input  logic [N-1:0] in_bits,
  input  logic [N-1:0] mask,
  output bl_lvl_e      bl  [N],
  output sl_lvl_e      sl,
  output vsam_e        vsam
);
  always_comb begin
    sl   = SL_TIA;
    vsam = VSAM_GND;
    for (int unsigned r = 0; r < N; r++) bl[r] = BL_VCM;
    unique case (op)
      OP_VERIFY: begin
        vsam = first_row ? VSAM_GND : VSAM_HALFVCM;
        for (int unsigned r = 0; r < N; r++) bl[r] = had_pos[r] ? BL_VDD : BL_GND;
      end
      OP_INFER: begin
        for (int unsigned r = 0; r < N; r++) bl[r] = in_bits[r] ? BL_VDD : BL_VCM;
      end
      OP_SET: begin
        sl = SL_GND;
        for (int unsigned r = 0; r < N; r++) bl[r] = mask[r] ? BL_VSET : BL_GND;
      end
      OP_COARSE: begin
        sl = SL_GND;
        for (int unsigned r = 0; r < N; r++) bl[r] = mask[r] ? BL_VSET_C : BL_GND;
      end
      OP_RESET: begin
        sl = SL_VRESET;
        for (int unsigned r = 0; r < N; r++) bl[r] = mask[r] ? BL_GND : BL_VRESET;
      end
      default: ;
    endcase
  end
endmodule
