// attention_head: one gain-cell sliding-window attention head (top level).
//
// For every new token i the head receives the 4-bit query Q_i, the 3-bit
// value V_i and the 3-bit key K_{i+1} of the next token, keeps the last
// WINDOW_M keys and values in analog gain-cell arrays and returns
//   A_i[r] = sum over sub-tiles of  sign * min(15, ceil(|c_r| / SIGNED_DSTEP)),
//   c_r    = sum_j phi_j * w(V_j[r]),   phi_j = min(15, ceil(S_j / RELU_DSTEP)) if S_j > 0
//   S_j    = sum_r Q_i[r] * w(K_j[r]),  w(level) = 2*level - 7,
// where j runs over the window columns of the sub-tile that hold a token.
// The query is turned into pulse widths (pwm_gen), the products and sums are
// done by cell currents on shared bit lines (gain_cell_array), the ReLU and the
// signed read-out by charge-to-pulse converters, and only the last step, the
// sum of 16 five-bit counts per output row, is digital (tile_adder).
//
// Structure (M = 1024, d = 64): 16 sub-tiles of two 64 x 64 arrays, all fed
// with the same query pulses; a write address controller that places token
// j in column j mod M; a sequencer that runs the 65-cycle schedule; 64 output
// adders with 16 inputs. Sizes, bit widths and the schedule follow the paper;
// the request/response handshake, the per-column valid mask, the discharge
// currents RELU_DSTEP / SIGNED_DSTEP and the K-write slot are this design's.
//
// Interface: request with req_valid/req_ready (see attn_ctrl). OP_LOAD_K
// writes req_k as the key of the next token (K_0 of a sequence); OP_STEP
// writes req_v as V_i, computes A_i from req_q and then writes req_k as
// K_{i+1}. `clear` (when idle) empties the window. out_valid pulses for one
// cycle with out_a, 65 cycles after an OP_STEP request was taken; one token
// can be taken every 65 cycles (65 ns at 1 GHz).
//
// The sub-tile observation outputs (phi_pulse, col_valid, sgn_pulse,
// sgn_sign) are left open here on purpose; they exist for testing a single
// sub-tile. rst_n is used asynchronously by the flip-flops and synchronously
// only in the disable condition of the attn_ctrl assertions.
module attention_head
  import gca_pkg::*;
#(
  parameter int unsigned D            = gca_pkg::D_HEAD,
  parameter int unsigned WINDOW       = gca_pkg::WINDOW_M,
  parameter int unsigned COLS         = gca_pkg::TILE_COLS,
  parameter int unsigned RELU_DSTEP   = 64,
  parameter int unsigned SIGNED_DSTEP = 32,
  localparam int unsigned NTILES = WINDOW / COLS,
  localparam int unsigned LEVELS = (NTILES > 1) ? $clog2(NTILES) : 1,
  localparam int unsigned AW_OUT = CNT_BITS + 1 + LEVELS,
  localparam int unsigned IDXW   = $clog2(WINDOW),
  localparam int unsigned COLW   = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned TW     = (NTILES > 1) ? $clog2(NTILES) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  // request
  input  logic                        req_valid,
  input  op_e                         req_op,
  input  logic [D-1:0][Q_BITS-1:0]    req_q,
  input  logic [D-1:0][KV_BITS-1:0]   req_k,
  input  logic [D-1:0][KV_BITS-1:0]   req_v,
  output logic                        req_ready,
  // result
  output logic                        out_valid,
  output logic [D-1:0][AW_OUT-1:0]    out_a,      // signed per row
  // status
  output logic                        busy,
  output logic [IDXW-1:0]             k_idx,
  output logic [IDXW-1:0]             v_idx,
  output logic                        k_full
);

  // ---- sequencer --------------------------------------------------------
  c2p_ctrl_t relu_ctrl, sgn_ctrl;
  cell_wr_t  k_wr, v_wr;
  logic accept, pwm_en, cnt_clr, cnt_en, adv_k, adv_v, out_load;

  attn_ctrl u_ctrl (
    .clk, .rst_n, .req_valid, .req_op, .req_ready, .accept,
    .relu_ctrl, .sgn_ctrl, .pwm_en, .cnt_clr, .cnt_en,
    .k_wr, .v_wr, .adv_k, .adv_v, .out_load, .busy
  );

  // ---- write data registers (inputs of the shared DACs) ----------------
  logic [D-1:0][KV_BITS-1:0] k_code, v_code;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_code <= '0;
      v_code <= '0;
    end else if (accept) begin
      k_code <= req_k;
      v_code <= req_v;
    end
  end

  // ---- write address controller ----------------------------------------
  logic [TW-1:0]   k_tile, v_tile;
  logic [COLW-1:0] k_col, v_col;

  write_addr_ctrl #(.WINDOW_M(WINDOW), .TILE_COLS(COLS)) u_waddr (
    .clk, .rst_n, .clear, .adv_k, .adv_v,
    .k_idx, .v_idx, .k_tile, .k_col, .v_tile, .v_col, .k_full
  );

  // ---- query pulse generators ------------------------------------------
  logic [D-1:0] q_pulse;
  pwm_gen #(.LANES(D), .QW(Q_BITS)) u_pwm (
    .clk, .rst_n, .load(accept), .q(req_q), .en(pwm_en), .pulse(q_pulse)
  );

  // ---- sub-tiles --------------------------------------------------------
  logic [NTILES-1:0][D-1:0][CNT_BITS:0] tile_val;

  for (genvar g = 0; g < int'(NTILES); g++) begin : g_tile
    subtile #(
      .D(D), .COLS(COLS), .RELU_DSTEP(RELU_DSTEP), .SIGNED_DSTEP(SIGNED_DSTEP)
    ) u_tile (
      .clk, .rst_n, .clear,
      .relu_ctrl, .sgn_ctrl, .cnt_clr, .cnt_en,
      .k_wr, .k_hit(int'(k_tile) == g), .k_commit(adv_k), .k_col, .k_code,
      .v_wr, .v_hit(int'(v_tile) == g), .v_col, .v_code,
      .q_pulse,
      .phi_pulse(), .col_valid(), .sgn_pulse(), .sgn_sign(),
      .value(tile_val[g])
    );
  end

  // ---- output adders: one per row, one input per sub-tile ---------------
  logic [D-1:0][AW_OUT-1:0] sum;
  for (genvar r = 0; r < int'(D); r++) begin : g_add
    logic [NTILES-1:0][CNT_BITS:0] part;
    for (genvar g = 0; g < int'(NTILES); g++) begin : g_in
      assign part[g] = tile_val[g][r];
    end
    tile_adder #(.N_IN(NTILES), .W_IN(CNT_BITS + 1)) u_add (
      .clk, .rst_n, .part, .sum(sum[r])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_a     <= '0;
    end else begin
      out_valid <= out_load;
      if (out_load) out_a <= sum;
    end
  end

endmodule
