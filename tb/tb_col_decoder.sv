// tb_col_decoder: exhaustive check of the write column decoder: one-hot
// select of the addressed line when enabled, nothing when disabled.
module tb_col_decoder;
  timeunit 1ns; timeprecision 100ps;
  localparam int LINES = 64;
  logic en;
  logic [5:0] addr;
  logic [LINES-1:0] sel;

  col_decoder #(.LINES(LINES)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    for (int e = 0; e < 2; e++) begin
      for (int a = 0; a < LINES; a++) begin
        logic [LINES-1:0] exp;
        en = e[0]; addr = 6'(a);
        #1;
        exp = '0;
        if (e == 1) exp[a] = 1'b1;
        checks++;
        if (sel !== exp) begin
          failures++;
          $display("FAIL en=%0d addr=%0d sel=%h", e, a, sel);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
