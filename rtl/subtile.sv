// subtile: one 64-token slice of the attention head.
//
// A head with window M is split into M/64 sub-tiles so that no analog array
// is larger than 64 x 64 (IR drop). A sub-tile holds the keys and values of
// 64 window columns and computes, for those tokens only, the partial result
// sum_j phi(Q . K_j) V_j:
//
//   q_pulse (d word lines) -> K array -> 64 ReLU charge-to-pulse -> phi pulses
//   phi pulses (64 word lines) -> V array -> d signed charge-to-pulse
//   -> d pulse counters -> value[d] (5-bit signed each)
//
// The bit lines of the K array are wired to the word lines of the V array
// through the ReLU converters (done by diagonal wire taps in the layout).
// The two write decoders pick the column of K or V to be discharged and
// written; the DAC levels k_code / v_code go to all d rows of that column.
//
// Masking: a column that has not received a key since `clear` holds no token
// of the window. Its ReLU pulse is gated off by a per-column valid flag, so
// a partly filled window attends only the tokens written so far. The flag is
// set at the end of the key write (k_commit), after the MAC SV phase of the
// step that writes it, so the unwritten column cannot leak into that step. This flag
// is this design's choice; the paper only says that scores outside the window
// are masked.
//
// Timing: all control comes from attn_ctrl. value[] is valid after the COUNT
// phase and stays until the next counter clear.
module subtile #(
  parameter int unsigned D      = gca_pkg::D_HEAD,
  parameter int unsigned COLS   = gca_pkg::TILE_COLS,
  parameter int unsigned IW     = 12,
  parameter int unsigned CW     = 18,
  parameter int unsigned RELU_DSTEP   = 64,
  parameter int unsigned SIGNED_DSTEP = 32,
  localparam int unsigned KVW  = gca_pkg::KV_BITS,
  localparam int unsigned CNTW = gca_pkg::CNT_BITS,
  localparam int unsigned AW   = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,       // new sequence: no valid columns
  // charge-to-pulse and counter control
  input  gca_pkg::c2p_ctrl_t            relu_ctrl,
  input  gca_pkg::c2p_ctrl_t            sgn_ctrl,
  input  logic                          cnt_clr,
  input  logic                          cnt_en,
  // K write port
  input  gca_pkg::cell_wr_t             k_wr,
  input  logic                          k_hit,       // write address is in this sub-tile
  input  logic                          k_commit,    // last cycle of a key write
  input  logic [AW-1:0]                 k_col,
  input  logic [D-1:0][KVW-1:0]         k_code,
  // V write port
  input  gca_pkg::cell_wr_t             v_wr,
  input  logic                          v_hit,
  input  logic [AW-1:0]                 v_col,
  input  logic [D-1:0][KVW-1:0]         v_code,
  // query pulses, shared by all sub-tiles
  input  logic [D-1:0]                  q_pulse,
  // observation and results
  output logic [COLS-1:0]               phi_pulse,   // ReLU pulses after masking
  output logic [COLS-1:0]               col_valid,
  output logic [D-1:0]                  sgn_pulse,
  output logic [D-1:0]                  sgn_sign,
  output logic [D-1:0][CNTW:0]          value        // signed count per row
);

  logic [COLS-1:0] k_sel, v_sel, relu_pulse;
  logic signed [COLS-1:0][IW-1:0] s_cur;   // K-array bit-line currents
  logic signed [D-1:0][IW-1:0]    a_cur;   // V-array bit-line currents

  col_decoder #(.LINES(COLS)) u_kdec (.en(k_hit), .addr(k_col), .sel(k_sel));
  col_decoder #(.LINES(COLS)) u_vdec (.en(v_hit), .addr(v_col), .sel(v_sel));

  // K array: query on the d word lines, one token per bit line
  gain_cell_array #(
    .N_IN(D), .N_OUT(COLS), .TOKEN_ON_OUTPUT(1'b1), .KVW(KVW), .IW(IW)
  ) u_karr (
    .clk, .wr(k_wr), .wr_sel(k_sel), .wr_code(k_code),
    .in_pulse(q_pulse), .i_out(s_cur)
  );

  for (genvar j = 0; j < int'(COLS); j++) begin : g_relu
    relu_c2p #(.IW(IW), .CW(CW), .DSTEP(RELU_DSTEP)) u_relu (
      .clk, .rst_n, .ctrl(relu_ctrl), .i_in(s_cur[j]),
      .pulse(relu_pulse[j]), .pulse_n()
    );
  end

  // per-column valid flags: set when a key is written
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     col_valid <= '0;
    else if (clear) col_valid <= '0;
    else if (k_commit) col_valid <= col_valid | k_sel;
  end

  assign phi_pulse = relu_pulse & col_valid;

  // V array: one token per word line, d bit lines
  gain_cell_array #(
    .N_IN(COLS), .N_OUT(D), .TOKEN_ON_OUTPUT(1'b0), .KVW(KVW), .IW(IW)
  ) u_varr (
    .clk, .wr(v_wr), .wr_sel(v_sel), .wr_code(v_code),
    .in_pulse(phi_pulse), .i_out(a_cur)
  );

  for (genvar r = 0; r < int'(D); r++) begin : g_row
    signed_c2p #(.IW(IW), .CW(CW), .DSTEP(SIGNED_DSTEP)) u_sc (
      .clk, .rst_n, .ctrl(sgn_ctrl), .i_in(a_cur[r]),
      .pulse(sgn_pulse[r]), .sign(sgn_sign[r])
    );
    pulse_counter #(.CNTW(CNTW)) u_cnt (
      .clk, .rst_n, .clr(cnt_clr), .en(cnt_en),
      .pulse(sgn_pulse[r]), .sign(sgn_sign[r]),
      .count(), .value(value[r])
    );
  end

endmodule
