// harp_pkg: types and helpers shared by the Hadamard-domain write-and-verify
// (WV) periphery of an RRAM crossbar (CBA) macro.
//
// The WV loop classifies every cell of a column as SET, RESET or STOP after
// each verify sweep. Two verify modes are supported: HD-PV (every Hadamard
// read is fully converted by the SAR ADC and decoded to a cell estimate) and
// HARP (every Hadamard read is only compared against its Hadamard-domain
// target, giving a ternary sign that is decoded instead). The drive-level
// enums name the voltages the paper puts on bitlines (BL), source lines (SL)
// and the ADC sampling node; their binary encodings are this design's own.
package harp_pkg;

  // Per-cell update decision (paper: D_i in {SET, RESET, STOP}).
  typedef enum logic [1:0] {
    D_STOP  = 2'd0,
    D_SET   = 2'd1,
    D_RESET = 2'd2
  } wv_dec_e;

  // Outcome of a one-shot target comparison (Low / Equal / High).
  typedef enum logic [1:0] {
    CMP_LOW   = 2'd0,
    CMP_EQUAL = 2'd1,
    CMP_HIGH  = 2'd2
  } cmp_res_e;

  // Verify mode of the WV engine.
  typedef enum logic {
    MODE_HDPV = 1'b0,
    MODE_HARP = 1'b1
  } wv_mode_e;

  // Operation the array periphery performs in a cycle.
  typedef enum logic [2:0] {
    OP_IDLE   = 3'd0,
    OP_VERIFY = 3'd1,  // Hadamard-encoded verify read
    OP_INFER  = 3'd2,  // bit-serial inference read
    OP_SET    = 3'd3,  // fine SET pulse
    OP_RESET  = 3'd4,  // fine RESET pulse
    OP_COARSE = 3'd5   // coarse (higher-voltage) initial SET pulse
  } op_e;

  // Level driven onto one bitline.
  typedef enum logic [2:0] {
    BL_VCM    = 3'd0,  // common-mode level, input '0' in inference, idle
    BL_GND    = 3'd1,  // -1 Hadamard entry, RESET pulse, SET inhibit
    BL_VDD    = 3'd2,  // +1 Hadamard entry, input '1' in inference
    BL_VSET   = 3'd3,  // fine SET pulse
    BL_VSET_C = 3'd4,  // coarse SET pulse
    BL_VRESET = 3'd5   // RESET inhibit (matches the SL bias)
  } bl_lvl_e;

  // Connection of the column-pair source line.
  typedef enum logic [1:0] {
    SL_TIA    = 2'd0,  // to the TIA input, held at Vcm
    SL_GND    = 2'd1,  // during SET
    SL_VRESET = 2'd2   // during RESET
  } sl_lvl_e;

  // ADC sampling reference V_sam.
  typedef enum logic {
    VSAM_GND     = 1'b0,  // first Hadamard row and inference: Vin in [0, Vcm]
    VSAM_HALFVCM = 1'b1   // balanced rows: Vin in [Vcm/2, 3Vcm/2]
  } vsam_e;

  // Entry (row, col) of the Sylvester Hadamard matrix: 1 for +1, 0 for -1.
  // H[r][c] = (-1)^popcount(r & c).
  function automatic logic hadamard_pos(input int unsigned row, input int unsigned col);
    return ~(^(row & col));
  endfunction

endpackage
