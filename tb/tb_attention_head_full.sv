// tb_attention_head_full: end-to-end test of the attention head with every
// parameter at its default (d = 64, M = 1024, 16 sub-tiles of 64 x 64).
//
// Drives a token sequence through the request interface (one OP_LOAD_K for
// K_0, then OP_STEP requests back to back), with random 4-bit queries and
// 3-bit keys/values plus a few biased tokens, runs past the end of the window
// so that old columns are overwritten, clears the window mid-run and starts a
// second sequence. Every result is compared with attn_ref_pkg, the request to
// result latency must be 65 cycles and back-to-back steps must be accepted
// every 65 cycles. Each mechanism (ReLU cut-off, linear and saturated ReLU,
// masked columns, positive/negative/saturated outputs, window wrap, back-to-
// back acceptance, clear) must occur at least once.
module tb_attention_head_full;
  timeunit 1ns; timeprecision 100ps;
  import gca_pkg::*;
  import attn_ref_pkg::*;

  localparam int D      = D_HEAD;
  localparam int WINDOW = WINDOW_M;
  localparam int COLS   = TILE_COLS;
  localparam int RD     = 64;   // defaults of attention_head
  localparam int SD     = 32;
  localparam int NTOK1  = 1100; // first sequence, wraps the 1024-token window
  localparam int NTOK2  = 8;    // second sequence after clear
  localparam int AWO    = CNT_BITS + 1 + $clog2(WINDOW / COLS);
  localparam int WATCHDOG = 80000;

  logic clk = 0, rst_n = 0, clear = 0;
  logic req_valid = 0, req_ready;
  op_e  req_op = OP_STEP;
  logic [D-1:0][Q_BITS-1:0]  req_q = '0;
  logic [D-1:0][KV_BITS-1:0] req_k = '0, req_v = '0;
  logic out_valid, busy, k_full;
  logic [D-1:0][AWO-1:0] out_a;
  logic [$clog2(WINDOW)-1:0] k_idx, v_idx;

  attention_head dut (.*);

  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  attn_ref ref_m;
  int exp_q[$][];          // expected results, in order
  int acc_cyc_q[$];        // accept cycle of each step
  int last_step_acc = -1000;
  int n_b2b = 0, n_clear = 0, n_loadk = 0, n_steps = 0, n_results = 0;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, msg);
    end
  endtask

  // called at a negedge; returns at the negedge after the request was taken
  task automatic send(op_e op, int q[], int k[], int v[]);
    int a[];
    req_valid = 1'b1;
    req_op    = op;
    for (int r = 0; r < D; r++) begin
      req_q[r] = Q_BITS'(q[r]);
      req_k[r] = KV_BITS'(k[r]);
      req_v[r] = KV_BITS'(v[r]);
    end
    while (!req_ready) @(negedge clk);
    // taken at the coming posedge, cycle cyc+1
    if (op == OP_LOAD_K) begin
      ref_m.load_k(k);
      n_loadk++;
    end else begin
      ref_m.step(q, v, k, a);
      exp_q.push_back(a);
      acc_cyc_q.push_back(cyc + 1);
      if (cyc + 1 - last_step_acc == T_TOKEN) n_b2b++;
      last_step_acc = cyc + 1;
      n_steps++;
    end
    @(negedge clk);
    req_valid = 1'b0;
  endtask

  // result monitor
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      int a[];
      int acc;
      if (exp_q.size() == 0) begin
        check(0, "unexpected out_valid");
      end else begin
        a   = exp_q.pop_front();
        acc = acc_cyc_q.pop_front();
        check(cyc - acc == T_TOKEN,
              $sformatf("latency %0d, expected %0d", cyc - acc, T_TOKEN));
        for (int r = 0; r < D; r++)
          check($signed(out_a[r]) == a[r],
                $sformatf("token %0d row %0d: got %0d expected %0d",
                          n_results, r, $signed(out_a[r]), a[r]));
        n_results++;
      end
    end
  end

  function automatic void rand_vec(ref int x[], input int maxv);
    foreach (x[r]) x[r] = $urandom_range(maxv, 0);
  endfunction

  task automatic run_seq(int ntok);
    int q[], k[], v[];
    q = new[D]; k = new[D]; v = new[D];
    rand_vec(k, 7);
    send(OP_LOAD_K, q, k, v);
    for (int i = 0; i < ntok; i++) begin
      rand_vec(q, 15); rand_vec(k, 7); rand_vec(v, 7);
      case (i % 9)
        3: begin foreach (q[r]) q[r] = 15; foreach (k[r]) k[r] = 7; end // large scores
        5: foreach (k[r]) k[r] = 0;                                      // negative score
        7: foreach (v[r]) v[r] = (r % 2) ? 7 : 0;                        // signed values
        default: ;
      endcase
      send(OP_STEP, q, k, v);
    end
  endtask

  initial begin
    ref_m = new(D, WINDOW, COLS, RD, SD);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    run_seq(NTOK1);
    // let the pipeline drain, then start a new sequence
    while (busy || exp_q.size() != 0) @(negedge clk);
    check(k_full == 1'b1, "window should be full after the first sequence");
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    ref_m.clear();
    n_clear++;
    check(k_idx == 0 && v_idx == 0 && !k_full, "clear resets the write indices");
    run_seq(NTOK2);
    while (busy || exp_q.size() != 0) @(negedge clk);
    repeat (3) @(negedge clk);

    check(n_results == NTOK1 + NTOK2, $sformatf("results %0d", n_results));
    $display("mechanisms: relu_zero=%0d relu_linear=%0d relu_sat=%0d masked=%0d out_pos=%0d out_neg=%0d out_sat=%0d wraps=%0d back_to_back=%0d load_k=%0d clear=%0d",
             ref_m.n_relu_zero, ref_m.n_relu_lin, ref_m.n_relu_sat, ref_m.n_masked,
             ref_m.n_out_pos, ref_m.n_out_neg, ref_m.n_out_sat, ref_m.n_wraps,
             n_b2b, n_loadk, n_clear);
    check(ref_m.n_relu_zero > 0, "ReLU cut-off never happened");
    check(ref_m.n_relu_lin  > 0, "linear ReLU region never happened");
    check(ref_m.n_relu_sat  > 0, "ReLU saturation never happened");
    check(ref_m.n_masked    > 0, "masking of unwritten columns never happened");
    check(ref_m.n_out_pos   > 0, "positive output never happened");
    check(ref_m.n_out_neg   > 0, "negative output never happened");
    check(ref_m.n_out_sat   > 0, "output counter saturation never happened");
    check(ref_m.n_wraps     > 0, "window wrap-around never happened");
    check(n_b2b > 0,             "back-to-back steps never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
