// tb_relu_c2p: checks the ReLU charge-to-pulse model.
//
// Each trial resets the converter, integrates 15 cycles of random signed
// currents (biased per trial so that negative, small and saturating charges
// all occur), then opens a 15-cycle discharge window. The pulse must be one
// contiguous run starting at the first window cycle, of width 0 for S <= 0
// and min(15, ceil(S / DSTEP)) otherwise; pulse_n must be its complement.
module tb_relu_c2p;
  timeunit 1ns; timeprecision 100ps;
  import gca_pkg::*;
  localparam int DSTEP = 64;

  logic clk = 0, rst_n = 0;
  c2p_ctrl_t ctrl = '0;
  logic signed [11:0] i_in = '0;
  logic pulse, pulse_n;

  relu_c2p #(.IW(12), .CW(18), .DSTEP(DSTEP)) dut (.*);

  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  int n_zero = 0, n_lin = 0, n_sat = 0;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 300; trial++) begin
      int s, expw, width, first, bias;
      bit contiguous;
      bias = $urandom_range(4, 0) * 40 - 60;    // -60 .. 100 per cycle
      ctrl = '0; ctrl.rst = 1;
      repeat (5) @(negedge clk);
      ctrl.rst = 0; ctrl.samp = 1;
      s = 0;
      for (int t = 0; t < 15; t++) begin
        int c;
        c = bias + $signed($urandom_range(80, 0)) - 40;
        i_in = 12'(c); s += c;
        @(negedge clk);
      end
      ctrl.samp = 0; i_in = '0; ctrl.dch = 1;
      width = 0; first = -1; contiguous = 1;
      for (int t = 0; t < 15; t++) begin
        #0.1;
        if (pulse) begin
          if (first < 0) first = t;
          else if (t != first + width) contiguous = 0;
          width++;
        end
        checks++;
        if (pulse_n != !pulse) failures++;
        @(negedge clk);
      end
      ctrl.dch = 0;
      #0.1;
      expw = (s <= 0) ? 0 : ((s + DSTEP - 1) / DSTEP > 15 ? 15 : (s + DSTEP - 1) / DSTEP);
      if (expw == 0) n_zero++; else if (expw == 15) n_sat++; else n_lin++;
      checks++;
      if (width != expw || !contiguous || (expw > 0 && first != 0)) begin
        failures++;
        if (failures < 10) $display("FAIL S=%0d width=%0d exp=%0d first=%0d", s, width, expw, first);
      end
      checks++;
      if (pulse) failures++;      // no pulse after the window
    end
    $display("cases: zero=%0d linear=%0d saturated=%0d", n_zero, n_lin, n_sat);
    checks++;
    if (n_zero == 0 || n_lin == 0 || n_sat == 0) failures++;
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
