// hs_dac_model: behavioural model of the high-speed DAC and its output
// amplifier (not synthesizable: real-valued output and delays).
//
// The FPGA drives DAC_BITS offset-binary data lines and a clock. On each
// rising clock edge the model takes the code and moves its output to
//   v_target = (code - 2^(DAC_BITS-1)) / 2^(DAC_BITS-1) * VFS   (volts)
// The move is not instant: for SETTLE_NS after the edge the output sits
// half way between the old and the new value, and only then reaches
// v_target. A hold capacitor switched onto the output before the settling
// time has passed therefore charges to a wrong voltage, which is the
// failure the paper's settle-then-charge slot timing avoids.
// Paper: 10 ns settling assumed in the scaling study (the prototype measured
// about 20 ns with its amplifier); the DAC runs from the FPGA-provided clock.
// Own choices: the +-1 V full scale and the two-step settling shape.
// The edge process uses blocking assignments on purpose: it is a timed
// model of an analog output, not a flip-flop.
module hs_dac_model #(
  parameter int unsigned DAC_BITS  = 16,
  parameter real         VFS       = 1.0,
  parameter real         SETTLE_NS = 10.0
) (
  input  logic [DAC_BITS-1:0] data,
  input  logic                clk,
  output real                 vout
);
  timeunit 1ns;
  timeprecision 1ps;

  real v_now;
  real v_goal;
  int unsigned seq;

  initial begin
    v_now = 0.0;
    v_goal = 0.0;
    seq = 0;
  end

  assign vout = v_now;

  // Each edge starts its own settling timer; a later edge cancels the
  // pending final step of an earlier one.
  always @(posedge clk) begin
    v_goal = (real'(data) - real'(2.0 ** (DAC_BITS - 1))) /
             real'(2.0 ** (DAC_BITS - 1)) * VFS;
    v_now  = 0.5 * (v_now + v_goal);
    seq    = seq + 1;
    fork
      begin
        automatic int unsigned my_seq = seq;
        #(SETTLE_NS);
        if (seq == my_seq) v_now = v_goal;
      end
    join_none
  end

endmodule
