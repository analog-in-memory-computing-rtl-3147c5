// tb_pulse_counter: checks the signed pulse counter.
//
// Random pulse widths 0..20 and counting windows of 12..20 cycles (beyond
// the 15-level range to test saturation) are presented, partly outside the
// counting window, with a random sign; count must equal the pulse cycles in
// the window capped at 15,
// and value must be +count / -count with the sign.
module tb_pulse_counter;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst_n = 0, clr = 0, en = 0, pulse = 0, sign = 0;
  logic [3:0] count;
  logic signed [4:0] value;

  pulse_counter #(.CNTW(4)) dut (.*);

  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 200; trial++) begin
      int width, win, n_in, expc, s;
      width = $urandom_range(20, 0);
      win   = $urandom_range(20, 12);
      s     = $urandom_range(1, 0);
      clr = 1; @(negedge clk); clr = 0;
      sign = s[0];
      // a few pulse cycles before the window must not count
      pulse = 1; en = 0; @(negedge clk);
      n_in = 0;
      en = 1;
      for (int t = 0; t < win + 3; t++) begin
        if (t == win) en = 0;
        pulse = (t < width);
        if (en && pulse) n_in++;
        @(negedge clk);
      end
      pulse = 0; en = 0;
      expc = (n_in > 15) ? 15 : n_in;
      checks++;
      if (count != 4'(expc) || value != (s ? expc : -expc)) begin
        failures++;
        if (failures < 10)
          $display("FAIL width=%0d sign=%0d count=%0d value=%0d exp=%0d", width, s, count, value, expc);
      end
    end
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
