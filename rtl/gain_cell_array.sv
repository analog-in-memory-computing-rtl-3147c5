// gain_cell_array: behavioural model of one 64 x 64 gain-cell array.
//
// BEHAVIOURAL MODEL. The real array is analog: each cell holds a voltage on a
// capacitor and a push-pull read stage sources or sinks a current set by that
// voltage while its input pulse is high; the currents of a bit line add up by
// Kirchhoff's law. This model keeps the same ports and timing with integers:
// a cell holds the 3-bit level written by the DAC, its current is the signed
// weight 2c-7 (gca_pkg::cell_weight, zero current at V_DD/2), and i_out[o] is,
// every clock cycle, the sum of the weights of the cells of bit line o whose
// input pulse is high. The charge integrated downstream is therefore the
// dot product of pulse widths and weights (the linear cell of the paper's
// intermediate model). The cubic I-V curve and the capacitor leakage
// (tau = 5 ms) are not modelled: their fit constants are not published.
//
// One array stores one vector per token. In the K array the token is a bit
// line (output) and the query drives the word lines; in the V array the token
// is a word line (input) and the outputs are the d rows. TOKEN_ON_OUTPUT
// selects which. Writing is column-wise: wr_sel picks one token line
// (one-hot), wr.dis clears its cells to level 0 (the 5 ns discharge) and
// wr.we loads wr_code into them (the 10 ns DAC pulse). A write takes effect at
// the clock edge; i_out is combinational in in_pulse and the stored levels.
module gain_cell_array #(
  parameter int unsigned N_IN            = 64,
  parameter int unsigned N_OUT           = 64,
  parameter bit          TOKEN_ON_OUTPUT = 1'b1,
  parameter int unsigned KVW             = gca_pkg::KV_BITS,
  parameter int unsigned IW              = 12,
  localparam int unsigned N_LINES = TOKEN_ON_OUTPUT ? N_OUT : N_IN,
  localparam int unsigned N_DATA  = TOKEN_ON_OUTPUT ? N_IN : N_OUT
) (
  input  logic                            clk,
  input  gca_pkg::cell_wr_t               wr,
  input  logic [N_LINES-1:0]              wr_sel,
  input  logic [N_DATA-1:0][KVW-1:0]      wr_code,
  input  logic [N_IN-1:0]                 in_pulse,
  output logic signed [N_OUT-1:0][IW-1:0] i_out
);

  // store[i][o]: level of the cell on word line i and bit line o
  logic [N_IN-1:0][N_OUT-1:0][KVW-1:0] store;

  for (genvar i = 0; i < int'(N_IN); i++) begin : g_wl
    for (genvar o = 0; o < int'(N_OUT); o++) begin : g_bl
      localparam int unsigned L = TOKEN_ON_OUTPUT ? o : i;   // token line
      localparam int unsigned E = TOKEN_ON_OUTPUT ? i : o;   // element
      always_ff @(posedge clk) begin
        if (wr_sel[L] && wr.we)       store[i][o] <= wr_code[E];
        else if (wr_sel[L] && wr.dis) store[i][o] <= '0;
      end
    end
  end

  for (genvar o = 0; o < int'(N_OUT); o++) begin : g_sum
    always_comb begin
      logic signed [IW-1:0] acc;
      acc = '0;
      for (int i = 0; i < int'(N_IN); i++)
        if (in_pulse[i])
          acc += IW'(2 * int'(store[i][o]) - ((1 << KVW) - 1));
      i_out[o] = acc;
    end
  end

endmodule
