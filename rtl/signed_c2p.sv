// signed_c2p: behavioural model of the signed charge-to-pulse converter.
//
// BEHAVIOURAL MODEL of an analog circuit. It extends the ReLU converter with
// a charge-up path and a D flip-flop. During sampling (SAMP) the V-array
// bit-line current is integrated; the flip-flop holds the polarity of the
// integrated voltage, and after sampling that stored sign selects whether
// the constant-current path discharges (positive) or charges up (negative)
// the capacitor back towards the rest voltage. The output pulse is high
// while the capacitor has not yet crossed the rest voltage, so its width
// measures |charge|, and the sign is a separate output (high = positive).
//
// Here the capacitor is the signed integer v_int. ctrl.rst clears it; during
// ctrl.samp it adds i_in each cycle and `sign` follows the polarity of the
// running sum, so it is frozen at the end of sampling (the waveform of the
// circuit shows the sign settling during the MAC phase). During ctrl.dch the
// pulse is high while v_int is on the stored side of zero, and v_int moves by
// DSTEP per cycle towards zero. Width = min(T_MAX, ceil(|charge| / DSTEP))
// with the window set by the sequencer. A zero charge gives sign = 1 and no
// pulse. DSTEP (the charge/discharge current) is this design's choice.
//
// Timing: pulse is combinational from v_int, sign and ctrl.dch; sign is a
// register.
module signed_c2p #(
  parameter int unsigned IW    = 12,
  parameter int unsigned CW    = 18,
  parameter int unsigned DSTEP = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  gca_pkg::c2p_ctrl_t    ctrl,
  input  logic signed [IW-1:0]  i_in,
  output logic                  pulse,     // PULSE_Y_OUT
  output logic                  sign       // SIGN_Y_OUT, 1 = positive
);

  localparam logic signed [CW-1:0] STEP = CW'(DSTEP);

  logic signed [CW-1:0] v_int, v_next;
  logic                 remaining;

  assign v_next    = v_int + CW'(i_in);
  assign remaining = sign ? (v_int > 0) : (v_int < 0);
  assign pulse     = ctrl.dch && remaining;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_int <= '0;
      sign  <= 1'b1;
    end else if (ctrl.rst) begin
      v_int <= '0;
      sign  <= 1'b1;
    end else if (ctrl.samp) begin
      v_int <= v_next;
      sign  <= (v_next >= 0);
    end else if (pulse) begin
      if (sign) v_int <= (v_int >  STEP) ? v_int - STEP : '0;
      else      v_int <= (v_int < -STEP) ? v_int + STEP : '0;
    end
  end

endmodule
