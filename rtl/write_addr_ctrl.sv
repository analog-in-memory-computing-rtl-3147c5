// write_addr_ctrl: write address controller of the sliding-window KV store.
//
// Token j is stored in window column j mod M, in both the K and the V arrays,
// so that once M tokens have been written each new token overwrites the
// oldest one and the arrays always hold the last M keys and values. Because
// K_{i+1} is written during step i (one step ahead of V_i), the controller
// keeps two circular indices, one per array. Each index is split into the
// sub-tile number (upper bits) and the column inside the sub-tile (lower
// bits). `adv_k` / `adv_v` move an index on by one after its write; `clear`
// restarts both at column 0 for a new sequence. `k_full` tells that every
// column has received a key at least once since the last clear. The
// circular column order follows the paper; the two-index split and the
// clear input are this design's choices. All outputs are registers.
module write_addr_ctrl #(
  parameter int unsigned WINDOW_M  = gca_pkg::WINDOW_M,
  parameter int unsigned TILE_COLS = gca_pkg::TILE_COLS,
  localparam int unsigned NTILES = WINDOW_M / TILE_COLS,
  localparam int unsigned IW  = $clog2(WINDOW_M),
  localparam int unsigned CW  = $clog2(TILE_COLS),
  localparam int unsigned TW  = (NTILES > 1) ? $clog2(NTILES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          adv_k,
  input  logic          adv_v,
  output logic [IW-1:0] k_idx,
  output logic [IW-1:0] v_idx,
  output logic [TW-1:0] k_tile,
  output logic [CW-1:0] k_col,
  output logic [TW-1:0] v_tile,
  output logic [CW-1:0] v_col,
  output logic          k_full
);

  function automatic logic [IW-1:0] next_idx(input logic [IW-1:0] i);
    return (int'(i) == int'(WINDOW_M) - 1) ? '0 : i + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_idx  <= '0;
      v_idx  <= '0;
      k_full <= 1'b0;
    end else if (clear) begin
      k_idx  <= '0;
      v_idx  <= '0;
      k_full <= 1'b0;
    end else begin
      if (adv_k) begin
        k_idx <= next_idx(k_idx);
        if (int'(k_idx) == int'(WINDOW_M) - 1) k_full <= 1'b1;
      end
      if (adv_v) v_idx <= next_idx(v_idx);
    end
  end

  assign k_col  = k_idx[CW-1:0];
  assign v_col  = v_idx[CW-1:0];
  assign k_tile = TW'(k_idx / TILE_COLS);
  assign v_tile = TW'(v_idx / TILE_COLS);

endmodule
