// harp_macro: digital periphery of an RRAM crossbar (CBA) macro with
// Hadamard-domain write-and-verify.
//
// The array has N bitlines (rows) and NPAIR signed column pairs, each pair
// with its own TIA and SAR ADC. Two operations share that periphery:
//
//  * Write-and-verify (`wv_start`): the column pair `wv_pair` is programmed to
//    the target vector (w_mag, w_neg) by the wv_ctrl engine in HD-PV or HARP
//    mode. During verify reads both columns of the pair are selected, the
//    bitlines carry Hadamard rows and the pair's ADC is run by the engine's
//    SAR or compare logic; during write pulses one column of the pair is
//    selected.
//  * Inference (`inf_start`): the unsigned input vector x is applied bit-serially
//    (LSB first); for every input bit the positive columns and then the
//    negative columns of all pairs are read and converted in parallel by the
//    per-pair SAR logic, and one shift_add per weight column combines the
//    K_SLICES slice pairs (MSB slice in the lowest pair index of the group).
//
// Analog ports: `bl`, `sl`, `wl_pos`, `wl_neg`, `vsam` and `dac_code` set up the
// array, TIAs and capacitor DACs; `cmp` returns the comparator decisions, one
// per pair, settled within the cycle. The array, TIAs, capacitor DACs,
// comparators and voltage drivers are analog and lie outside this module;
// `wr_pulse` marks the cycles in which a write pulse is applied.
// Timing: an inference read takes NBITS+1 cycles; see wv_ctrl for WV timing.
// A start is ignored while either operation is busy.
// The inference sequence (LSB-first bits, separate positive and negative
// passes) and the pair count NPAIR are this design's choices.
// rst_n is used both as the asynchronous reset and to disable the assertions.
module harp_macro
  import harp_pkg::*;
#(
  parameter int unsigned N        = 32,
  parameter int unsigned NPAIR    = 16,
  parameter int unsigned NBITS    = 9,
  parameter int unsigned WBITS    = 3,
  parameter int unsigned K        = 2,
  parameter int unsigned TAU_W    = 4,
  parameter int unsigned MAX_ITER = 50,
  parameter int unsigned IN_BITS  = 8,
  parameter int unsigned K_SLICES = 2,
  localparam int unsigned NWCOL   = NPAIR / K_SLICES,
  localparam int unsigned OBITS   = NBITS + IN_BITS + WBITS * (K_SLICES - 1) + $clog2(K_SLICES) + 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // write-and-verify command and status
  input  logic                     wv_start,
  input  wv_mode_e                 wv_mode,
  input  logic [$clog2(NPAIR)-1:0] wv_pair,
  input  logic [WBITS-1:0]         w_mag [N],
  input  logic [N-1:0]             w_neg,
  output logic                     wv_busy,
  output logic                     wv_done,
  output logic                     wv_converged,
  output logic [N-1:0]             wv_frozen,
  output logic [15:0]              wv_iter,
  output logic [31:0]              wv_reads,
  output logic [31:0]              wv_cmps,
  output logic [31:0]              wv_pulses,
  // inference command and result
  input  logic                     inf_start,
  input  logic [IN_BITS-1:0]       x [N],
  output logic                     inf_busy,
  output logic                     inf_done,
  output logic signed [OBITS-1:0]  y_out [NWCOL],
  // analog array and ADC interface
  output bl_lvl_e                  bl      [N],
  output sl_lvl_e                  sl      [NPAIR],
  output logic [NPAIR-1:0]         wl_pos,
  output logic [NPAIR-1:0]         wl_neg,
  output vsam_e                    vsam    [NPAIR],
  output logic [NBITS-1:0]         dac_code [NPAIR],
  output logic                     wr_pulse,
  input  logic [NPAIR-1:0]         cmp
);
  localparam int unsigned PBITS = $clog2(NPAIR);
  localparam int unsigned IBITS = (IN_BITS > 1) ? $clog2(IN_BITS) : 1;

  // ---- write-and-verify engine ------------------------------------------
  op_e              wv_op;
  logic [$clog2(N)-1:0] wv_row;
  logic [N-1:0]     wv_had_pos, wv_mask;
  vsam_e            wv_vsam;
  logic [NBITS-1:0] wv_dac;
  logic             wv_pulse, wv_wlp, wv_wln;
  logic [PBITS-1:0] pair_q;

  wv_ctrl #(.N(N), .WBITS(WBITS), .NBITS(NBITS), .K(K), .TAU_W(TAU_W),
            .MAX_ITER(MAX_ITER)) u_wv (
    .clk, .rst_n, .start(wv_start && !inf_busy && !wv_busy), .mode(wv_mode),
    .w_mag, .w_neg,
    .op(wv_op), .row(wv_row), .had_pos(wv_had_pos), .vsam(wv_vsam),
    .dac_code(wv_dac), .cmp(cmp[pair_q]),
    .pulse(wv_pulse), .wl_pos(wv_wlp), .wl_neg(wv_wln), .bl_mask(wv_mask),
    .busy(wv_busy), .done(wv_done), .converged(wv_converged), .frozen(wv_frozen),
    .iter(wv_iter), .n_reads(wv_reads), .n_cmps(wv_cmps), .n_pulses(wv_pulses));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                              pair_q <= '0;
    else if (wv_start && !wv_busy && !inf_busy) pair_q <= wv_pair;
  end

  // ---- inference sequencer ----------------------------------------------
  typedef enum logic [1:0] {I_IDLE, I_GO, I_WAIT} istate_e;
  istate_e          ist_q;
  logic [IBITS-1:0] ibit_q;
  logic             ineg_q;
  logic [IN_BITS-1:0] x_q [N];
  logic [N-1:0]     in_bits;
  logic [NPAIR-1:0] sar_busy, sar_done;
  logic [NBITS-1:0] sar_dac  [NPAIR];
  logic [NBITS-1:0] sar_dout [NPAIR];
  logic             inf_sar_start, inf_acc_valid;

  assign inf_busy      = (ist_q != I_IDLE);
  assign inf_sar_start = (ist_q == I_GO);
  assign inf_acc_valid = (ist_q == I_WAIT) && sar_done[0];

  always_comb begin
    for (int unsigned r = 0; r < N; r++) in_bits[r] = x_q[r][ibit_q];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ist_q    <= I_IDLE;
      ibit_q   <= '0;
      ineg_q   <= 1'b0;
      inf_done <= 1'b0;
      for (int unsigned r = 0; r < N; r++) x_q[r] <= '0;
    end else begin
      inf_done <= 1'b0;
      unique case (ist_q)
        I_IDLE: if (inf_start && !wv_busy) begin
          for (int unsigned r = 0; r < N; r++) x_q[r] <= x[r];
          ibit_q <= '0;
          ineg_q <= 1'b0;
          ist_q  <= I_GO;
        end
        I_GO: ist_q <= I_WAIT;
        I_WAIT: if (sar_done[0]) begin
          if (!ineg_q) begin
            ineg_q <= 1'b1;
            ist_q  <= I_GO;
          end else if (ibit_q == IBITS'(IN_BITS - 1)) begin
            ist_q    <= I_IDLE;
            inf_done <= 1'b1;
          end else begin
            ineg_q <= 1'b0;
            ibit_q <= ibit_q + 1'b1;
            ist_q  <= I_GO;
          end
        end
        default: ist_q <= I_IDLE;
      endcase
    end
  end

  // Per-pair SAR logic used by inference.
  for (genvar p = 0; p < NPAIR; p++) begin : g_adc
    sar_logic #(.NBITS(NBITS)) u_sar (
      .clk, .rst_n, .start(inf_sar_start), .cmp(cmp[p]), .dac_code(sar_dac[p]),
      .busy(sar_busy[p]), .done(sar_done[p]), .dout(sar_dout[p]));
  end

  // One shift-and-add per signed, bit-sliced weight column.
  for (genvar w = 0; w < NWCOL; w++) begin : g_sa
    logic [NBITS-1:0] codes [K_SLICES];
    for (genvar l = 0; l < K_SLICES; l++) begin : g_l
      assign codes[l] = sar_dout[w * K_SLICES + l];
    end
    shift_add #(.NBITS(NBITS), .IN_BITS(IN_BITS), .BC(WBITS), .K_SLICES(K_SLICES)) u_sa (
      .clk, .rst_n, .clear(inf_start && !inf_busy && !wv_busy), .valid(inf_acc_valid),
      .neg(ineg_q), .bit_idx(ibit_q[$clog2(IN_BITS)-1:0]), .code(codes), .acc(y_out[w]));
  end

  // ---- array drive -------------------------------------------------------
  op_e     arr_op;
  sl_lvl_e arr_sl;
  vsam_e   arr_vsam;

  assign arr_op = wv_busy ? wv_op : (ist_q == I_GO || ist_q == I_WAIT) ? OP_INFER : OP_IDLE;

  bl_drive_enc #(.N(N)) u_bl (
    .op(arr_op), .first_row(wv_row == '0), .had_pos(wv_had_pos), .in_bits(in_bits),
    .mask(wv_mask), .bl(bl), .sl(arr_sl), .vsam(arr_vsam));

  always_comb begin
    for (int unsigned p = 0; p < NPAIR; p++) begin
      if (wv_busy && PBITS'(p) == pair_q) begin
        sl[p]       = arr_sl;
        vsam[p]     = arr_vsam;
        dac_code[p] = wv_dac;
        wl_pos[p]   = (wv_op == OP_VERIFY) || wv_wlp;
        wl_neg[p]   = (wv_op == OP_VERIFY) || wv_wln;
      end else begin
        sl[p]       = SL_TIA;
        vsam[p]     = VSAM_GND;
        dac_code[p] = sar_dac[p];
        wl_pos[p]   = inf_busy && !ineg_q;
        wl_neg[p]   = inf_busy &&  ineg_q;
      end
    end
  end

  assign wr_pulse = wv_pulse;

  // The engine's reference choice and the drive encoder's must agree.
  // All per-pair SAR engines start together and run in lock step.
  a_adc_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (sar_done == '0 || sar_done == '1) && (sar_busy == '0 || sar_busy == '1));

  a_vsam: assert property (@(posedge clk) disable iff (!rst_n)
    (wv_busy && wv_op == OP_VERIFY) |-> wv_vsam == arr_vsam);

  initial begin
    assert (NPAIR % K_SLICES == 0) else $error("harp_macro: NPAIR must be a multiple of K_SLICES");
    assert (IN_BITS >= 2) else $error("harp_macro: IN_BITS must be at least 2");
  end
endmodule
