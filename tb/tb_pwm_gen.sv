// tb_pwm_gen: checks the query pulse generators.
//
// For random 4-bit codes (and the extremes 0 and 15) it loads the codes,
// opens a 15-cycle window and checks cycle by cycle that lane i is high
// exactly during the first q[i] cycles of the window, and low outside it.
module tb_pwm_gen;
  timeunit 1ns; timeprecision 100ps;
  localparam int LANES = 8;
  localparam int QW    = 4;

  logic clk = 0, rst_n = 0, load = 0, en = 0;
  logic [LANES-1:0][QW-1:0] q = '0;
  logic [LANES-1:0] pulse;

  pwm_gen #(.LANES(LANES), .QW(QW)) dut (.*);

  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    int qv[LANES], width[LANES];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      for (int i = 0; i < LANES; i++) begin
        qv[i] = (trial == 0) ? 0 : (trial == 1) ? 15 : $urandom_range(15, 0);
        q[i]  = QW'(qv[i]);
        width[i] = 0;
      end
      load = 1;
      @(negedge clk);
      load = 0;
      q = '0;                 // codes must have been captured
      #0.1;
      check(pulse == '0, "pulse outside the window");
      en = 1;
      for (int t = 0; t < 15; t++) begin
        #0.1;
        for (int i = 0; i < LANES; i++) begin
          check(pulse[i] == (t < qv[i]),
                $sformatf("trial %0d lane %0d t=%0d q=%0d pulse=%0b", trial, i, t, qv[i], pulse[i]));
          width[i] += pulse[i];
        end
        @(negedge clk);
      end
      en = 0;
      for (int i = 0; i < LANES; i++) check(width[i] == qv[i], "pulse width");
      @(negedge clk);
      #0.1;
      check(pulse == '0, "pulse after the window");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
