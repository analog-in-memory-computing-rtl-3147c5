// pulse_counter: digital read-out of one signed charge-to-pulse output.
//
// A 16-level counter measures the width of the incoming pulse in clock
// cycles and the result is multiplied by the sign bit kept by the converter,
// giving a 32-level signed result (-15..+15 in 5 bits), as the paper states.
// `clr` empties the counter, `en` opens the counting window (the COUNT phase),
// and every cycle with `en && pulse` adds one, saturating at 15. `value` is
// +count when sign is high and -count otherwise; it is combinational from the
// count register and the sign input. Saturation and the clear input are this
// design's choices.
module pulse_counter #(
  parameter int unsigned CNTW = gca_pkg::CNT_BITS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clr,
  input  logic                   en,
  input  logic                   pulse,
  input  logic                   sign,     // 1 = positive
  output logic [CNTW-1:0]        count,
  output logic signed [CNTW:0]   value
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                  count <= '0;
    else if (clr)                                count <= '0;
    else if (en && pulse && count != {CNTW{1'b1}}) count <= count + 1'b1;
  end

  assign value = sign ? $signed({1'b0, count}) : -$signed({1'b0, count});

endmodule
