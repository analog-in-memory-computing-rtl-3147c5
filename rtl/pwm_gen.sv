// pwm_gen: query pulse-width generators, one per word line of the K arrays.
//
// Each lane turns a Q_BITS code q into one high pulse of q clock cycles
// (0..15 ns at 1 GHz). The codes are captured on `load`; while `en` is high a
// shared phase counter runs from 0 and lane i is high while the counter is
// below q[i], so all pulses start together at the first `en` cycle. The same
// pulses go to every sub-tile. The 4-bit, 16-level, 1 GHz, 0..15 ns figures
// follow the paper; the counter-and-compare structure is this design's choice.
//
// Timing: `pulse` is combinational from registers; with `en` high for T_MAX
// cycles lane i is high during the first q[i] of them.
module pwm_gen #(
  parameter int unsigned LANES = gca_pkg::D_HEAD,
  parameter int unsigned QW    = gca_pkg::Q_BITS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      load,          // capture q
  input  logic [LANES-1:0][QW-1:0]  q,
  input  logic                      en,            // MAC window
  output logic [LANES-1:0]          pulse
);

  logic [LANES-1:0][QW-1:0] q_r;
  logic [QW-1:0]            phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_r   <= '0;
      phase <= '0;
    end else begin
      if (load) q_r <= q;
      if (!en)                       phase <= '0;
      else if (phase != {QW{1'b1}})  phase <= phase + 1'b1;
    end
  end

  always_comb begin
    for (int i = 0; i < int'(LANES); i++)
      pulse[i] = en && (phase < q_r[i]);
  end

endmodule
