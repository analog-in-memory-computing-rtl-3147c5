// tb_gain_cell_array: checks the gain-cell array model in both orientations.
//
// Instance K (token on bit lines, 8 word lines x 6 bit lines) and instance V
// (token on word lines, 6 x 8) are written line by line with random levels,
// some lines are discharged afterwards, and for random input pulse patterns
// every bit-line current is compared with the sum of 2*level-7 over the
// pulsed cells of a shadow copy. A write must only change the addressed line.
module tb_gain_cell_array;
  timeunit 1ns; timeprecision 100ps;
  import gca_pkg::*;
  localparam int NI = 8, NO = 6;

  logic clk = 0;
  cell_wr_t kwr = '0, vwr = '0;
  logic [NO-1:0] ksel = '0;      // K: lines are outputs
  logic [NI-1:0] kin = '0;
  logic [NI-1:0][2:0] kcode = '0;
  logic signed [NO-1:0][11:0] kout;
  logic [NO-1:0] vsel = '0;      // V: NO inputs (lines), NI outputs
  logic [NO-1:0] vin = '0;
  logic [NI-1:0][2:0] vcode = '0;
  logic signed [NI-1:0][11:0] vout;

  gain_cell_array #(.N_IN(NI), .N_OUT(NO), .TOKEN_ON_OUTPUT(1'b1), .IW(12)) u_k (
    .clk, .wr(kwr), .wr_sel(ksel), .wr_code(kcode), .in_pulse(kin), .i_out(kout));
  gain_cell_array #(.N_IN(NO), .N_OUT(NI), .TOKEN_ON_OUTPUT(1'b0), .IW(12)) u_v (
    .clk, .wr(vwr), .wr_sel(vsel), .wr_code(vcode), .in_pulse(vin), .i_out(vout));

  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  int kshadow[NI][NO];   // [word line][bit line]
  int vshadow[NO][NI];

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic compare(int trials);
    for (int t = 0; t < trials; t++) begin
      kin = NI'($urandom); vin = NO'($urandom);
      #0.1;
      for (int o = 0; o < NO; o++) begin
        int e;
        e = 0;
        for (int i = 0; i < NI; i++) if (kin[i]) e += 2 * kshadow[i][o] - 7;
        check($signed(kout[o]) == e, $sformatf("K out %0d got %0d exp %0d", o, $signed(kout[o]), e));
      end
      for (int o = 0; o < NI; o++) begin
        int e;
        e = 0;
        for (int i = 0; i < NO; i++) if (vin[i]) e += 2 * vshadow[i][o] - 7;
        check($signed(vout[o]) == e, $sformatf("V out %0d got %0d exp %0d", o, $signed(vout[o]), e));
      end
      @(negedge clk);
    end
  endtask

  initial begin
    @(negedge clk);
    // write every line of both arrays
    for (int l = 0; l < NO; l++) begin
      ksel = '0; ksel[l] = 1; vsel = '0; vsel[l] = 1;
      kwr.dis = 1; vwr.dis = 1; @(negedge clk); kwr.dis = 0; vwr.dis = 0;
      for (int e = 0; e < NI; e++) begin
        kcode[e] = 3'($urandom); vcode[e] = 3'($urandom);
        kshadow[e][l] = kcode[e]; vshadow[l][e] = vcode[e];
      end
      kwr.we = 1; vwr.we = 1; @(negedge clk); kwr.we = 0; vwr.we = 0;
    end
    ksel = '0; vsel = '0;
    compare(50);
    // rewrite two lines, discharge one: other lines must keep their levels
    for (int rep = 0; rep < 6; rep++) begin
      int l;
      l = $urandom_range(NO - 1, 0);
      ksel = '0; ksel[l] = 1; vsel = '0; vsel[l] = 1;
      if (rep % 3 == 2) begin
        kwr.dis = 1; vwr.dis = 1; @(negedge clk); kwr.dis = 0; vwr.dis = 0;
        for (int e = 0; e < NI; e++) begin kshadow[e][l] = 0; vshadow[l][e] = 0; end
      end else begin
        for (int e = 0; e < NI; e++) begin
          kcode[e] = 3'($urandom); vcode[e] = 3'($urandom);
          kshadow[e][l] = kcode[e]; vshadow[l][e] = vcode[e];
        end
        kwr.we = 1; vwr.we = 1; @(negedge clk); kwr.we = 0; vwr.we = 0;
      end
      ksel = '0; vsel = '0;
      compare(10);
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
