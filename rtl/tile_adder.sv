// tile_adder: one of the d output adders that merge the sub-tiles.
//
// Every sub-tile produces a partial attention output for its own 64 tokens;
// the head output A[r] is the sum of the signed counter values of row r over
// all sub-tiles (16 inputs for M = 1024). The sum is formed by a pipelined
// binary tree: inputs are added pairwise and registered at each level, so the
// result appears LEVELS = ceil(log2(N_IN)) clock edges after the inputs and a
// new set can enter every cycle. That latency (4 cycles for 16 inputs) fits
// in the 15-cycle ADD phase. The adder count and fan-in follow the paper; the
// tree structure and output width are this design's choices.
module tile_adder #(
  parameter int unsigned N_IN = gca_pkg::WINDOW_M / gca_pkg::TILE_COLS,
  parameter int unsigned W_IN = gca_pkg::CNT_BITS + 1,
  localparam int unsigned LEVELS = (N_IN > 1) ? $clog2(N_IN) : 1,
  localparam int unsigned W_OUT  = W_IN + LEVELS
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic        [N_IN-1:0][W_IN-1:0] part,   // signed counter values
  output logic signed [W_OUT-1:0]        sum
);

  localparam int unsigned NP = 1 << LEVELS;   // inputs padded to a power of 2

  // Heap-ordered tree: node[1] is the root, node[n] adds children 2n, 2n+1;
  // children at index NP and above are the (padded) inputs.
  logic signed [W_OUT-1:0] leaf [NP];
  logic signed [W_OUT-1:0] node [NP];

  always_comb begin
    for (int i = 0; i < int'(NP); i++)
      leaf[i] = (i < int'(N_IN)) ? W_OUT'($signed(part[i])) : '0;
  end

  function automatic logic signed [W_OUT-1:0] child(input int k);
    return (k >= int'(NP)) ? leaf[k - int'(NP)] : node[k];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < int'(NP); n++) node[n] <= '0;
    end else begin
      node[0] <= '0;
      for (int n = 1; n < int'(NP); n++) node[n] <= child(2 * n) + child(2 * n + 1);
    end
  end

  assign sum = node[1];

endmodule
