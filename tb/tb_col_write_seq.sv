// tb_col_write_seq: (1) coarse initial write: every cell must receive
// min(10, floor(4*w*/5)) coarse pulses, all in its own column (positive phase
// before negative), and each phase must last max(count)+1 cycles; (2) fine
// write: random decisions and freeze flags, every unfrozen SET/RESET cell
// must get exactly one pulse of the right kind in its column, in the order
// pos SET, pos RESET, neg SET, neg RESET, and the write must take 4 cycles
// (plus the cycle that signals done).
module tb_col_write_seq;
  import harp_pkg::*;
  localparam int N = 32, WB = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start_coarse = 0, start_fine = 0;
  logic [WB-1:0] w [N];
  logic [N-1:0] w_neg, frozen, mask;
  wv_dec_e dec [N];
  op_e op;
  logic pulse, wl_pos, wl_neg, busy, done;
  logic [15:0] npulses;

  col_write_seq #(.N(N), .WBITS(WB)) dut (.clk, .rst_n, .start_coarse, .start_fine,
    .w_mag(w), .w_neg, .dec, .frozen, .op, .pulse, .wl_pos, .wl_neg, .bl_mask(mask),
    .busy, .done, .npulses);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int got [N];
    int seen_order [$];
    for (int c = 0; c < N; c++) begin w[c] = 0; dec[c] = D_STOP; end
    w_neg = '0; frozen = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 8; t++) begin
      int maxp, maxn, cyc, expc;
      for (int c = 0; c < N; c++) begin w[c] = WB'($urandom); got[c] = 0; end
      w_neg = {$urandom};
      maxp = 0; maxn = 0;
      for (int c = 0; c < N; c++) begin
        expc = (4 * int'(w[c])) / 5;
        if (w_neg[c]) maxn = (expc > maxn) ? expc : maxn;
        else          maxp = (expc > maxp) ? expc : maxp;
      end
      @(negedge clk) start_coarse = 1;
      @(negedge clk) start_coarse = 0;
      cyc = 1;
      while (!done) begin
        if (pulse) begin
          checks++;
          if (op != OP_COARSE || (wl_pos == wl_neg)) failures++;
          for (int c = 0; c < N; c++) if (mask[c]) begin
            got[c]++;
            checks++;
            if (w_neg[c] != wl_neg) begin failures++; $display("cell %0d pulsed in wrong column", c); end
          end
        end
        @(negedge clk); cyc++;
      end
      for (int c = 0; c < N; c++) begin
        checks++;
        if (got[c] != (4 * int'(w[c])) / 5) begin failures++; $display("cell %0d w=%0d pulses %0d", c, w[c], got[c]); end
      end
      checks++;
      // max(count)+1 cycles per phase, plus the cycle that signals done
      if (cyc != maxp + 1 + maxn + 1 + 1) begin failures++; $display("coarse took %0d cycles exp %0d", cyc, maxp + maxn + 3); end
    end
    for (int t = 0; t < 20; t++) begin
      int cyc;
      for (int c = 0; c < N; c++) begin
        int r;
        r = int'($urandom % 3);
        dec[c] = (r == 0) ? D_STOP : (r == 1) ? D_SET : D_RESET;
        got[c] = 0;
      end
      w_neg = {$urandom}; frozen = {$urandom} & {$urandom};
      seen_order = {};
      @(negedge clk) start_fine = 1;
      @(negedge clk) start_fine = 0;
      cyc = 1;
      while (!done) begin
        if (pulse) begin
          seen_order.push_back({wl_neg, op == OP_RESET});
          for (int c = 0; c < N; c++) if (mask[c]) begin
            got[c]++;
            checks++;
            if (frozen[c] || w_neg[c] != wl_neg || wl_pos == wl_neg ||
                (dec[c] == D_SET && op != OP_SET) || (dec[c] == D_RESET && op != OP_RESET) ||
                dec[c] == D_STOP) begin
              failures++; $display("fine: bad pulse on cell %0d", c);
            end
          end
        end
        @(negedge clk); cyc++;
      end
      for (int c = 0; c < N; c++) begin
        checks++;
        if (got[c] != ((!frozen[c] && dec[c] != D_STOP) ? 1 : 0)) begin failures++; $display("fine cell %0d pulses %0d", c, got[c]); end
      end
      for (int k = 1; k < seen_order.size(); k++) begin
        checks++;
        if (seen_order[k] <= seen_order[k-1]) failures++;
      end
      checks++;
      if (cyc != 5) begin failures++; $display("fine write took %0d cycles", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
