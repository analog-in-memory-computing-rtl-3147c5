// gca_pkg: constants and types shared by the gain-cell attention head.
//
// The head computes A_i = phi(Q_i . K^T) . V over a sliding window of the last
// WINDOW_M tokens. Keys and values live in gain-cell arrays as 3-bit levels,
// queries arrive as 4-bit pulse widths, and the result leaves as 5-bit signed
// pulse counts summed over the sub-tiles. Sizes below are the ones of the
// GPT-2 head (d = 64, M = 1024, 64x64 sub-tiles, 16 sub-tiles).
//
// Timing unit: one clock cycle is 1 ns (1 GHz pulse-generator clock). One
// token takes T_TOKEN = 65 cycles:
//   [ 0, 5)  RSTK   reset of the ReLU charge-to-pulse integrators,
//                   discharge of the V cells about to be written
//   [ 5,20)  MAC QK query pulses drive the K arrays (T_MAX = 15 cycles),
//                   V_i written during [5,15)
//   [15,20)  RSTV   reset of the signed charge-to-pulse integrators
//   [20,35)  MAC SV ReLU pulses drive the V arrays; the K cells about to be
//                   written are discharged in [20,25) and K_{i+1} is
//                   written in [25,35), once the K arrays are no longer read
//   [35,50)  COUNT  signed pulses are counted
//   [50,65)  ADD    counts are summed over the sub-tiles
// The durations 5/10/15/65 ns and the order of the phases are the published
// ones. The published timing chart draws the K_{i+1} write from 20 ns; here
// its 5 ns discharge is put first, so the write ends at 35 ns, because a
// discharge in [15,20) would disturb the K array while it is still being read.
// The ADD phase is what remains of the 65 ns.
package gca_pkg;

  // Head geometry (GPT-2 head, 16 sub-tiles of 64 x 64 cells)
  localparam int unsigned D_HEAD    = 64;    // embedding rows per head
  localparam int unsigned WINDOW_M  = 1024;  // sliding-window length
  localparam int unsigned TILE_COLS = 64;    // token columns per sub-tile

  // Quantisation
  localparam int unsigned Q_BITS   = 4;      // query pulse width code, 16 levels
  localparam int unsigned KV_BITS  = 3;      // stored K/V level, 8 levels
  localparam int unsigned CNT_BITS = 4;      // output counter, 16 levels (+ sign)

  // Phase durations in clock cycles (1 cycle = 1 ns)
  localparam int unsigned T_MAX   = 15;      // longest input pulse, MAC window
  localparam int unsigned T_RST   = 5;       // integrator reset / cell discharge
  localparam int unsigned T_WRITE = 10;      // DAC write pulse
  localparam int unsigned T_ADD   = 15;      // digital add phase
  localparam int unsigned T_TOKEN = T_RST + 3 * T_MAX + T_ADD;  // 65

  // Phase start cycles, relative to the first cycle after a request is taken
  localparam int unsigned P_MACQK = T_RST;                 // 5
  localparam int unsigned P_RSTV  = P_MACQK + T_MAX - T_RST; // 15
  localparam int unsigned P_MACSV = P_MACQK + T_MAX;       // 20
  localparam int unsigned P_COUNT = P_MACSV + T_MAX;       // 35
  localparam int unsigned P_ADD   = P_COUNT + T_MAX;       // 50
  localparam int unsigned P_VDIS  = 0;                     // V line discharge
  localparam int unsigned P_VWR   = P_VDIS + T_RST;        // 5,  V_i write
  localparam int unsigned P_KDIS  = P_MACSV;               // 20, K line discharge
  localparam int unsigned P_KWR   = P_KDIS + T_RST;        // 25, K_{i+1} write

  // Control of one bank of charge-to-pulse circuits (names after the
  // schematic pins REST, SAMP and DCH)
  typedef struct packed {
    logic rst;   // reset integrator to the bit-line rest voltage
    logic samp;  // integrate the bit-line current
    logic dch;   // constant-current discharge, pulse out while charge remains
  } c2p_ctrl_t;

  // Control of the write port of one gain-cell array
  typedef struct packed {
    logic dis;   // discharge the addressed token line (before writing)
    logic we;    // write enable: DAC level onto the addressed token line
  } cell_wr_t;

  // Request kinds
  typedef enum logic [0:0] {
    OP_STEP   = 1'b0,  // full inference step: write V_i, attend Q_i, write K_{i+1}
    OP_LOAD_K = 1'b1   // write one key only (K_0 before the first step)
  } op_e;

  // Signed weight of a stored level. The stored voltage is read relative to
  // V_DD/2 (0.45 V), where the cell current crosses zero, so level c of
  // 2^KV_BITS levels contributes 2c - (2^KV_BITS - 1): -7, -5, ..., +7.
  function automatic int cell_weight(input logic [KV_BITS-1:0] code);
    return 2 * int'(code) - ((1 << KV_BITS) - 1);
  endfunction

endpackage
