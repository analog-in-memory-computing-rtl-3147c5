// tb_signed_c2p: checks the signed charge-to-pulse model.
//
// Each trial resets the converter, integrates 15 cycles of random currents
// with a per-trial bias (negative, near zero, positive, saturating), then
// opens a 15-cycle discharge window. `sign` must be 1 for a charge >= 0 and
// 0 otherwise, must not change during the window, and the pulse must be one
// contiguous run from the first window cycle of width
// min(15, ceil(|S| / DSTEP)).
module tb_signed_c2p;
  timeunit 1ns; timeprecision 100ps;
  import gca_pkg::*;
  localparam int DSTEP = 16;

  logic clk = 0, rst_n = 0;
  c2p_ctrl_t ctrl = '0;
  logic signed [11:0] i_in = '0;
  logic pulse, sign;

  signed_c2p #(.IW(12), .CW(18), .DSTEP(DSTEP)) dut (.*);

  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  int n_neg = 0, n_pos = 0, n_sat = 0;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 300; trial++) begin
      int s, mag, expw, width, first, bias;
      bit contiguous, sign_stable;
      bias = $urandom_range(4, 0) * 10 - 20;   // -20 .. 20 per cycle
      ctrl = '0; ctrl.rst = 1;
      repeat (5) @(negedge clk);
      ctrl.rst = 0; ctrl.samp = 1;
      s = 0;
      for (int t = 0; t < 15; t++) begin
        int c;
        c = bias + $signed($urandom_range(30, 0)) - 15;
        i_in = 12'(c); s += c;
        @(negedge clk);
      end
      ctrl.samp = 0; i_in = '0; ctrl.dch = 1;
      #0.1;
      checks++;
      if (sign != (s >= 0)) begin
        failures++;
        if (failures < 10) $display("FAIL sign S=%0d sign=%0b", s, sign);
      end
      width = 0; first = -1; contiguous = 1; sign_stable = 1;
      for (int t = 0; t < 15; t++) begin
        #0.1;
        if (sign != (s >= 0)) sign_stable = 0;
        if (pulse) begin
          if (first < 0) first = t;
          else if (t != first + width) contiguous = 0;
          width++;
        end
        @(negedge clk);
      end
      ctrl.dch = 0;
      mag  = s < 0 ? -s : s;
      expw = (mag + DSTEP - 1) / DSTEP;
      if (expw > 15) expw = 15;
      if (expw == 15) n_sat++;
      if (s < 0 && expw > 0) n_neg++;
      if (s > 0) n_pos++;
      checks++;
      if (width != expw || !contiguous || !sign_stable || (expw > 0 && first != 0)) begin
        failures++;
        if (failures < 10) $display("FAIL S=%0d width=%0d exp=%0d first=%0d", s, width, expw, first);
      end
    end
    $display("cases: negative=%0d positive=%0d saturated=%0d", n_neg, n_pos, n_sat);
    checks++;
    if (n_neg == 0 || n_pos == 0 || n_sat == 0) failures++;
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
