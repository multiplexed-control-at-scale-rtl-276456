// hold_channel_model: behavioural model of one electrode channel, i.e. the
// high-speed switch, the hold capacitor and the output OP-amp (not
// synthesizable: real-valued signals and simulation time).
//
// While `sw` is high the capacitor charges towards the DAC voltage `vin`
// through the switch resistance (time constant TAU_C = C * R_SW); while it is
// low the capacitor discharges into the amplifier input resistance (time
// constant TAU_D = C * R_AMP). The electrode voltage is vout = GAIN * v_cap.
// The model is event driven: on every change of `sw` or `vin` it advances
// the capacitor voltage exactly over the interval since the previous event
// (the input is taken as constant between events), so vout is exact at each
// event and otherwise holds the value of the last one.
// Paper: C = 150 pF, R_SW = 10 ohm (TAU_C = 1.5 ns), R_AMP = 10 Mohm
// (TAU_D = 1.5 ms), exponential decay model. Own choices: GAIN = 50 (the
// prototype's +-50 V range from a +-1 V DAC), ideal switch edges.
module hold_channel_model #(
  parameter real C_PF      = 150.0,
  parameter real R_SW_OHM  = 10.0,
  parameter real R_AMP_OHM = 10.0e6,
  parameter real GAIN      = 50.0
) (
  input  logic sw,
  input  real  vin,
  output real  vout
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam real TAU_C_NS = C_PF * 1.0e-3 * R_SW_OHM;   // pF*ohm = 1e-3 ns
  localparam real TAU_D_NS = C_PF * 1.0e-3 * R_AMP_OHM;

  real  v_cap;
  real  t_last;
  real  vin_seen;
  logic sw_seen;

  initial begin
    v_cap = 0.0;
    t_last = 0.0;
    vin_seen = 0.0;
    sw_seen = 1'b0;
  end

  assign vout = GAIN * v_cap;

  always @(sw or vin) begin
    automatic real dt = $realtime - t_last;
    if (sw_seen) v_cap = vin_seen + (v_cap - vin_seen) * $exp(-dt / TAU_C_NS);
    else         v_cap = v_cap * $exp(-dt / TAU_D_NS);
    t_last   = $realtime;
    sw_seen  = sw;
    vin_seen = vin;
  end

endmodule
