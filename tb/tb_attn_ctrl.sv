// tb_attn_ctrl: checks the 65-cycle phase schedule of the sequencer.
//
// Two OP_STEP requests are sent back to back, then an OP_LOAD_K, then a
// final step after an idle gap. For every cycle of a step the control outputs
// are compared with the schedule written out here in plain numbers
// (RSTK 0-4, MAC QK 5-19, V write 5-14, RSTV 15-19, MAC SV 20-34,
// K discharge 20-24, K write 25-34, COUNT 35-49, out_load at 64); a load-K
// request must discharge for 5 and write for 10 cycles. req_ready must be
// low while busy except in the last cycle, so steps are taken every 65
// cycles.
module tb_attn_ctrl;
  timeunit 1ns; timeprecision 100ps;
  import gca_pkg::*;

  logic clk = 0, rst_n = 0, req_valid = 0;
  op_e req_op = OP_STEP;
  logic req_ready, accept, pwm_en, cnt_clr, cnt_en, adv_k, adv_v, out_load, busy;
  c2p_ctrl_t relu_ctrl, sgn_ctrl;
  cell_wr_t k_wr, v_wr;

  attn_ctrl dut (.*);

  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 15) $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  function automatic bit w(int t, int lo, int hi);  // lo <= t <= hi
    return t >= lo && t <= hi;
  endfunction

  // check one cycle t of a step (called mid-cycle)
  task automatic check_step(int t);
    logic [15:0] got, exp;
    got = {relu_ctrl.rst, relu_ctrl.samp, relu_ctrl.dch, pwm_en,
           sgn_ctrl.rst, sgn_ctrl.samp, sgn_ctrl.dch, cnt_clr, cnt_en,
           v_wr.dis, v_wr.we, adv_v, k_wr.dis, k_wr.we, adv_k, out_load};
    exp = {w(t, 0, 4), w(t, 5, 19), w(t, 20, 34), w(t, 5, 19),
           w(t, 15, 19), w(t, 20, 34), w(t, 35, 49), w(t, 15, 19), w(t, 35, 49),
           w(t, 0, 4), w(t, 5, 14), t == 14, w(t, 20, 24), w(t, 25, 34), t == 34, t == 64};
    check(got == exp, $sformatf("step t=%0d got %b exp %b", t, got, exp));
    check(busy, "busy during step");
    check(req_ready == (t == 64), $sformatf("req_ready at t=%0d", t));
  endtask

  task automatic check_loadk(int t);
    logic [15:0] got, exp;
    got = {relu_ctrl.rst, relu_ctrl.samp, relu_ctrl.dch, pwm_en,
           sgn_ctrl.rst, sgn_ctrl.samp, sgn_ctrl.dch, cnt_clr, cnt_en,
           v_wr.dis, v_wr.we, adv_v, k_wr.dis, k_wr.we, adv_k, out_load};
    exp = {13'b0, w(t, 0, 4), w(t, 5, 14), t == 14};
    exp = exp << 1;
    check(got == exp, $sformatf("load_k t=%0d got %b exp %b", t, got, exp));
    check(req_ready == (t == 14), "req_ready during load_k");
  endtask

  initial begin
    int acc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(req_ready && !busy, "idle after reset");
    // two back-to-back steps
    req_valid = 1; req_op = OP_STEP;
    @(negedge clk);                   // first step taken at the edge before
    for (int n = 0; n < 2; n++) begin
      if (n == 1) req_valid = 0;      // second step was taken at t = 64
      for (int t = 0; t < 65; t++) begin
        #0.1;
        check_step(t);
        if (t == 64 && n == 1) check(!accept, "no request pending");
        @(negedge clk);
      end
    end
    #0.1;
    check(!busy && req_ready, "idle after the steps");
    // load K
    req_valid = 1; req_op = OP_LOAD_K;
    @(negedge clk);
    req_valid = 0;
    for (int t = 0; t < 15; t++) begin
      #0.1;
      check_loadk(t);
      @(negedge clk);
    end
    #0.1;
    check(!busy, "idle after load_k");
    repeat (3) @(negedge clk);
    // a last step after an idle gap
    req_valid = 1; req_op = OP_STEP;
    @(negedge clk);
    req_valid = 0;
    for (int t = 0; t < 65; t++) begin
      #0.1;
      check_step(t);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
