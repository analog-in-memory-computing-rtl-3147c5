// relu_c2p: behavioural model of the ReLU charge-to-pulse converter.
//
// BEHAVIOURAL MODEL of an analog circuit. The circuit has three phases:
// reset (REST) brings the integrating capacitor back to the bit-line rest
// voltage, sampling (SAMP) integrates the bit-line current of the K array on
// that capacitor, and discharge (DCH) removes charge with a constant current
// set by a bias voltage while an inverter acting as comparator holds the
// output pulse high. Discharge only happens for a positive charge, so a
// negative score gives no pulse (the ReLU), and the pulse cannot be longer
// than the discharge window, which saturates it at T_MAX = 15 cycles.
//
// Here the capacitor is the signed integer v_int (in units of one cell
// weight for one cycle). During ctrl.samp it adds i_in each cycle; during
// ctrl.dch `pulse` is high while v_int > 0 and v_int falls by DSTEP per cycle.
// The pulse width is thus min(T_MAX, ceil(S / DSTEP)) for S > 0 and 0
// otherwise: the paper's phi(S) with S_sat = T_MAX * DSTEP. DSTEP (the
// discharge current) is not given in numbers and is this design's choice.
//
// Timing: pulse and pulse_n are combinational from v_int and ctrl.dch; they
// feed the V-array word lines in the same cycle.
module relu_c2p #(
  parameter int unsigned IW    = 12,   // input current width
  parameter int unsigned CW    = 18,   // integrator width
  parameter int unsigned DSTEP = 64    // charge removed per discharge cycle
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  gca_pkg::c2p_ctrl_t    ctrl,
  input  logic signed [IW-1:0]  i_in,
  output logic                  pulse,     // PULSE_Y_OUT
  output logic                  pulse_n    // NOT_PULSE_Y_OUT
);

  localparam logic signed [CW-1:0] STEP = CW'(DSTEP);

  logic signed [CW-1:0] v_int;
  logic                 positive;

  assign positive = (v_int > 0);
  assign pulse    = ctrl.dch && positive;
  assign pulse_n  = !pulse;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          v_int <= '0;
    else if (ctrl.rst)   v_int <= '0;
    else if (ctrl.samp)  v_int <= v_int + CW'(i_in);  // sign-extended
    else if (pulse)      v_int <= (v_int > STEP) ? v_int - STEP : '0;
  end

endmodule
