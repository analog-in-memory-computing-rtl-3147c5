// tb_tile_adder: checks the pipelined sub-tile adder.
//
// A new random set of 16 signed 5-bit values (-15..15, with all-min and
// all-max sets) enters every cycle; each sum must come out exactly 4 cycles
// later. A second instance with 5 inputs checks the padding of the tree.
module tb_tile_adder;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst_n = 0;
  logic [15:0][4:0] part16 = '0;
  logic [4:0][4:0]  part5  = '0;
  logic signed [8:0] sum16;
  logic signed [7:0] sum5;

  tile_adder #(.N_IN(16), .W_IN(5)) u16 (.clk, .rst_n, .part(part16), .sum(sum16));
  tile_adder #(.N_IN(5),  .W_IN(5)) u5  (.clk, .rst_n, .part(part5),  .sum(sum5));

  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  int e16[$], e5[$];

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int s16, s5;
      s16 = 0; s5 = 0;
      for (int i = 0; i < 16; i++) begin
        int v;
        v = (t == 5) ? -15 : (t == 6) ? 15 : $urandom_range(30, 0) - 15;
        part16[i] = 5'(v); s16 += v;
        if (i < 5) begin part5[i] = 5'(v); s5 += v; end
      end
      e16.push_back(s16); e5.push_back(s5);
      @(negedge clk);
      // after the k-th set entered (k = t), the result of set t-3 is at the
      // output: 4 edges for 16 inputs, 3 for 5 inputs
      if (t >= 3) begin
        int x;
        x = e16[t - 3];
        checks++;
        if (sum16 != 9'(x)) begin
          failures++;
          if (failures < 10) $display("FAIL16 t=%0d got %0d exp %0d", t, sum16, x);
        end
      end
      if (t >= 2) begin
        int x;
        x = e5[t - 2];
        checks++;
        if (sum5 != 8'(x)) begin
          failures++;
          if (failures < 10) $display("FAIL5 t=%0d got %0d exp %0d", t, sum5, x);
        end
      end
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
