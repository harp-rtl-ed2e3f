// tb_bl_drive_enc: every operation with random patterns; the BL, SL and V_sam
// levels must follow the drive table (verify: +1 VDD / -1 GND; inference:
// 1 VDD / 0 Vcm; SET: pulse Vset, SL GND; coarse: Vset_c; RESET: pulse GND,
// SL V_reset, others V_reset; idle: Vcm).
module tb_bl_drive_enc;
  import harp_pkg::*;
  localparam int N = 32;
  int checks = 0, failures = 0;
  op_e op;
  logic first_row;
  logic [N-1:0] had, inb, mask;
  bl_lvl_e bl [N];
  sl_lvl_e sl;
  vsam_e vsam;

  bl_drive_enc #(.N(N)) dut (.op, .first_row, .had_pos(had), .in_bits(inb), .mask, .bl, .sl, .vsam);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op_e ops [6] = '{OP_IDLE, OP_VERIFY, OP_INFER, OP_SET, OP_RESET, OP_COARSE};
    for (int t = 0; t < 60; t++) begin
      sl_lvl_e esl;
      vsam_e ev;
      op = ops[t % 6];
      first_row = $urandom % 2;
      had = {$urandom}; inb = {$urandom}; mask = {$urandom};
      #1;
      esl = (op == OP_SET || op == OP_COARSE) ? SL_GND : (op == OP_RESET) ? SL_VRESET : SL_TIA;
      ev  = (op == OP_VERIFY && !first_row) ? VSAM_HALFVCM : VSAM_GND;
      checks += 2;
      if (sl != esl) begin failures++; $display("%s: sl %s", op.name(), sl.name()); end
      if (vsam != ev) begin failures++; $display("%s: vsam %s", op.name(), vsam.name()); end
      for (int r = 0; r < N; r++) begin
        bl_lvl_e e;
        case (op)
          OP_VERIFY: e = had[r] ? BL_VDD : BL_GND;
          OP_INFER:  e = inb[r] ? BL_VDD : BL_VCM;
          OP_SET:    e = mask[r] ? BL_VSET : BL_GND;
          OP_COARSE: e = mask[r] ? BL_VSET_C : BL_GND;
          OP_RESET:  e = mask[r] ? BL_GND : BL_VRESET;
          default:   e = BL_VCM;
        endcase
        checks++;
        if (bl[r] != e) begin failures++; $display("%s row %0d: %s exp %s", op.name(), r, bl[r].name(), e.name()); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
