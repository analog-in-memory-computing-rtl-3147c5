// attn_ctrl: phase sequencer of the attention head (digital periphery).
//
// One OP_STEP request runs the fixed 65-cycle schedule of gca_pkg for token
// i: reset of the ReLU integrators and discharge of the V column (RSTK),
// query pulses into the K arrays while V_i is written (MAC QK), reset of the
// signed integrators and of the counters (RSTV), ReLU pulses into the V arrays
// while the K column of token i+1 is discharged and written (MAC SV), pulse
// counting (COUNT) and the sub-tile sum (ADD). Writing the V array while the
// K array computes and the K array while the V array computes is the
// pipelining of the paper; it is why a step writes V_i but K_{i+1}. An
// OP_LOAD_K request only writes one key (15 cycles); it loads K_0 before the
// first step of a sequence.
//
// Handshake: a request is taken at a clock edge where req_valid and
// req_ready are both high; req_valid must then stay high until it is taken
// (checked by an assertion). req_ready is high when idle and in the last
// cycle of a request, so requests run back to back, one token per 65 cycles.
// `out_load` is high in the last cycle of a step; the head registers its
// result there, 65 cycles after the request was taken. All outputs are
// decoded from the cycle counter t (registered).
module attn_ctrl
  import gca_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  input  op_e           req_op,
  output logic          req_ready,
  output logic          accept,
  // control outputs
  output c2p_ctrl_t     relu_ctrl,
  output c2p_ctrl_t     sgn_ctrl,
  output logic          pwm_en,
  output logic          cnt_clr,
  output logic          cnt_en,
  output cell_wr_t      k_wr,
  output cell_wr_t      v_wr,
  output logic          adv_k,
  output logic          adv_v,
  output logic          out_load,
  output logic          busy
);

  localparam int unsigned T_LOADK = T_RST + T_WRITE;   // 15

  op_e        op_r;
  logic [6:0] t;
  logic       last;

  function automatic logic in_win(input logic [6:0] tt, input int unsigned lo,
                                  input int unsigned len);
    return (int'(tt) >= int'(lo)) && (int'(tt) < int'(lo + len));
  endfunction

  assign last      = busy && (int'(t) == ((op_r == OP_STEP) ? int'(T_TOKEN) : int'(T_LOADK)) - 1);
  assign req_ready = !busy || last;
  assign accept    = req_valid && req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      t    <= '0;
      op_r <= OP_STEP;
    end else if (accept) begin
      busy <= 1'b1;
      t    <= '0;
      op_r <= req_op;
    end else if (last) begin
      busy <= 1'b0;
      t    <= '0;
    end else if (busy) begin
      t    <= t + 1'b1;
    end
  end

  always_comb begin
    logic step, lk;
    step = busy && (op_r == OP_STEP);
    lk   = busy && (op_r == OP_LOAD_K);

    relu_ctrl.rst  = step && in_win(t, 0, T_RST);
    relu_ctrl.samp = step && in_win(t, P_MACQK, T_MAX);
    relu_ctrl.dch  = step && in_win(t, P_MACSV, T_MAX);
    pwm_en         = step && in_win(t, P_MACQK, T_MAX);

    sgn_ctrl.rst   = step && in_win(t, P_RSTV, T_RST);
    sgn_ctrl.samp  = step && in_win(t, P_MACSV, T_MAX);
    sgn_ctrl.dch   = step && in_win(t, P_COUNT, T_MAX);
    cnt_clr        = step && in_win(t, P_RSTV, T_RST);
    cnt_en         = step && in_win(t, P_COUNT, T_MAX);

    v_wr.dis = step && in_win(t, P_VDIS, T_RST);
    v_wr.we  = step && in_win(t, P_VWR, T_WRITE);
    adv_v    = step && (int'(t) == int'(P_VWR + T_WRITE) - 1);

    k_wr.dis = (step && in_win(t, P_KDIS, T_RST))   || (lk && in_win(t, 0, T_RST));
    k_wr.we  = (step && in_win(t, P_KWR, T_WRITE))  || (lk && in_win(t, T_RST, T_WRITE));
    adv_k    = (step && (int'(t) == int'(P_KWR + T_WRITE) - 1)) || (lk && last);

    out_load = step && last;
  end

  // a pending request must be held until it is taken
  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               req_valid && !req_ready |=> req_valid)
    else $error("attn_ctrl: req_valid dropped before it was taken");
  // the two integrator banks never sample at the same time
  a_samp_excl: assert property (@(posedge clk) disable iff (!rst_n)
                                !(relu_ctrl.samp && sgn_ctrl.samp));

endmodule
