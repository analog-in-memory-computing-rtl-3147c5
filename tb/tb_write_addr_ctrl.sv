// tb_write_addr_ctrl: checks the circular write indices.
//
// With a 16-column window of 4-column sub-tiles, random advance pulses on
// the K and V indices are compared with a model over several wraps; the
// sub-tile/column split, the window-full flag and clear are checked.
module tb_write_addr_ctrl;
  timeunit 1ns; timeprecision 100ps;
  localparam int M = 16, C = 4;

  logic clk = 0, rst_n = 0, clear = 0, adv_k = 0, adv_v = 0;
  logic [3:0] k_idx, v_idx;
  logic [1:0] k_tile, v_tile, k_col, v_col;
  logic k_full;

  write_addr_ctrl #(.WINDOW_M(M), .TILE_COLS(C)) dut (.*);

  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  int ek = 0, ev = 0, nk = 0, wraps = 0;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      if (t == 250) begin
        clear = 1; ek = 0; ev = 0; nk = 0;
      end else begin
        clear = 0;
        adv_k = ($urandom_range(2, 0) != 0);
        adv_v = ($urandom_range(2, 0) != 0);
      end
      @(negedge clk);
      if (!clear) begin
        if (adv_k) begin ek = (ek + 1) % M; nk++; if (ek == 0) wraps++; end
        if (adv_v) ev = (ev + 1) % M;
      end
      clear = 0;
      check(k_idx == 4'(ek) && v_idx == 4'(ev), $sformatf("idx k=%0d/%0d v=%0d/%0d", k_idx, ek, v_idx, ev));
      check(k_tile == 2'(ek / C) && k_col == 2'(ek % C), "k split");
      check(v_tile == 2'(ev / C) && v_col == 2'(ev % C), "v split");
      check(k_full == (nk >= M), $sformatf("k_full=%0b nk=%0d", k_full, nk));
    end
    check(wraps > 2, "no wrap");
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
