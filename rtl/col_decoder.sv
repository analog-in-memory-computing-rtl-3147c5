// col_decoder: write address decoder of one gain-cell array in a sub-tile.
//
// Each sub-tile has two of these, one per array. The decoder turns the
// column (token line) index of the write address into a one-hot line select
// that gates the DAC levels onto that line's cells; `en` is high only when
// the write address falls into this sub-tile. Output is combinational. The
// paper names the decoders; the binary-to-one-hot form is this design's
// choice.
module col_decoder #(
  parameter int unsigned LINES = gca_pkg::TILE_COLS,
  localparam int unsigned AW = (LINES > 1) ? $clog2(LINES) : 1
) (
  input  logic             en,
  input  logic [AW-1:0]    addr,
  output logic [LINES-1:0] sel
);

  always_comb begin
    sel = '0;
    if (en && (int'(addr) < int'(LINES))) sel[addr] = 1'b1;
  end

endmodule
