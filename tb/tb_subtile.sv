// tb_subtile: checks one sub-tile (8 rows x 8 token columns here).
//
// The testbench plays the sequencer itself: it writes keys and values
// column by column (5-cycle discharge, 10-cycle write, commit), leaving some
// columns unwritten, then runs the compute schedule: integrator reset, 15
// cycles of query pulses it generates itself, ReLU discharge into the V
// array while the signed converters integrate, and 15 counting cycles. It
// checks the width of every masked ReLU pulse and every signed row count
// against values computed here from the stored levels, and that `clear`
// empties the valid flags.
module tb_subtile;
  timeunit 1ns; timeprecision 100ps;
  import gca_pkg::*;
  localparam int D = 8, COLS = 8, RD = 16, SD = 16;

  logic clk = 0, rst_n = 0, clear = 0;
  c2p_ctrl_t relu_ctrl = '0, sgn_ctrl = '0;
  logic cnt_clr = 0, cnt_en = 0;
  cell_wr_t k_wr = '0, v_wr = '0;
  logic k_hit = 0, v_hit = 0, k_commit = 0;
  logic [2:0] k_col = '0, v_col = '0;
  logic [D-1:0][2:0] k_code = '0, v_code = '0;
  logic [D-1:0] q_pulse = '0;
  logic [COLS-1:0] phi_pulse, col_valid;
  logic [D-1:0] sgn_pulse, sgn_sign;
  logic [D-1:0][4:0] value;

  subtile #(.D(D), .COLS(COLS), .RELU_DSTEP(RD), .SIGNED_DSTEP(SD)) dut (.*);

  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  int kk[COLS][D], vv[COLS][D];
  bit valid[COLS];
  int n_masked = 0, n_neg = 0, n_sat = 0;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 15) $display("FAIL: %s", msg); end
  endtask

  function automatic int wgt(int l); return 2 * l - 7; endfunction
  function automatic int cdiv(int a, int b); return (a + b - 1) / b; endfunction

  task automatic write_col(bit is_k, int col, int lv[D]);
    if (is_k) begin k_hit = 1; k_col = 3'(col); end
    else      begin v_hit = 1; v_col = 3'(col); end
    for (int r = 0; r < D; r++) if (is_k) k_code[r] = 3'(lv[r]); else v_code[r] = 3'(lv[r]);
    if (is_k) k_wr.dis = 1; else v_wr.dis = 1;
    repeat (5) @(negedge clk);
    k_wr.dis = 0; v_wr.dis = 0;
    if (is_k) k_wr.we = 1; else v_wr.we = 1;
    repeat (9) @(negedge clk);
    if (is_k) k_commit = 1;
    @(negedge clk);
    k_wr.we = 0; v_wr.we = 0; k_commit = 0; k_hit = 0; v_hit = 0;
    if (is_k) valid[col] = 1;
  endtask

  task automatic compute(int q[D]);
    int phi[COLS], width[COLS], expv;
    // expected
    for (int j = 0; j < COLS; j++) begin
      int s;
      s = 0;
      for (int r = 0; r < D; r++) s += q[r] * wgt(kk[j][r]);
      phi[j] = (!valid[j] || s <= 0) ? 0 : (cdiv(s, RD) > 15 ? 15 : cdiv(s, RD));
      if (!valid[j]) n_masked++;
      width[j] = 0;
    end
    relu_ctrl.rst = 1; repeat (5) @(negedge clk); relu_ctrl.rst = 0;
    relu_ctrl.samp = 1;
    for (int t = 0; t < 15; t++) begin
      for (int r = 0; r < D; r++) q_pulse[r] = (t < q[r]);
      @(negedge clk);
    end
    q_pulse = '0; relu_ctrl.samp = 0;
    sgn_ctrl.rst = 1; cnt_clr = 1; repeat (5) @(negedge clk); sgn_ctrl.rst = 0; cnt_clr = 0;
    relu_ctrl.dch = 1; sgn_ctrl.samp = 1;
    for (int t = 0; t < 15; t++) begin
      #0.1;
      for (int j = 0; j < COLS; j++) width[j] += phi_pulse[j];
      @(negedge clk);
    end
    relu_ctrl.dch = 0; sgn_ctrl.samp = 0;
    for (int j = 0; j < COLS; j++)
      check(width[j] == phi[j], $sformatf("phi col %0d got %0d exp %0d", j, width[j], phi[j]));
    sgn_ctrl.dch = 1; cnt_en = 1;
    repeat (15) @(negedge clk);
    sgn_ctrl.dch = 0; cnt_en = 0;
    #0.1;
    for (int r = 0; r < D; r++) begin
      int c, wdt;
      c = 0;
      for (int j = 0; j < COLS; j++) c += phi[j] * wgt(vv[j][r]);
      wdt = cdiv(c < 0 ? -c : c, SD);
      if (wdt > 15) begin wdt = 15; n_sat++; end
      expv = (c < 0) ? -wdt : wdt;
      if (expv < 0) n_neg++;
      check($signed(value[r]) == expv, $sformatf("row %0d got %0d exp %0d", r, $signed(value[r]), expv));
    end
  endtask

  initial begin
    int lv[D], q[D];
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(col_valid == '0, "no valid columns after reset");
    for (int round = 0; round < 12; round++) begin
      // write a few columns (both arrays), leaving others untouched
      for (int n = 0; n < 3; n++) begin
        int col;
        col = $urandom_range(COLS - 1, 0);
        for (int r = 0; r < D; r++) begin lv[r] = $urandom_range(7, 0); vv[col][r] = lv[r]; end
        write_col(0, col, lv);
        for (int r = 0; r < D; r++) begin lv[r] = (round % 4 == 1) ? 7 : $urandom_range(7, 0); kk[col][r] = lv[r]; end
        write_col(1, col, lv);
      end
      for (int j = 0; j < COLS; j++) check(col_valid[j] == valid[j], "col_valid");
      for (int r = 0; r < D; r++) q[r] = (round % 3 == 2) ? 15 : $urandom_range(15, 0);
      compute(q);
      if (round == 7) begin
        clear = 1; @(negedge clk); clear = 0;
        foreach (valid[j]) valid[j] = 0;
        #0.1;
        check(col_valid == '0, "clear empties the valid flags");
      end
    end
    $display("cases: masked=%0d negative=%0d saturated=%0d", n_masked, n_neg, n_sat);
    check(n_masked > 0 && n_neg > 0, "masking and negative rows must occur");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
