// hold_channel_model_tb: checks the channel model against the numbers of
// the paper's estimate, worked out here in closed form:
//   - a 7.5 ns charge (5 RC constants of 150 pF x 10 ohm) from 0 V reaches
//     1 - e^-5 = 99.33 % of the DAC voltage (times the gain of 50);
//   - over the 2 us until the next charge (100 channels at 50 Msps) the held
//     voltage drops by 1 - e^(-2us/1.5ms) = 0.133 %;
//   - repeated charges converge to the target;
//   - the DAC voltage changing while the switch is open leaves the held value
//     alone (no crosstalk in the ideal model);
//   - with the prototype's values (30 pF, a discharge constant of 282.6 us,
//     so R = 282.6 us / 30 pF = 9.42 Mohm) the drop over the five-channel
//     recharge cycle of 166.6 ns is 1 - e^(-166.6/282600) = 0.059 % (~0.06 %).
module hold_channel_model_tb;
  timeunit 1ns;
  timeprecision 1ps;

  logic sw = 1'b0;
  real vin = 0.0;
  real vout;
  int checks = 0, failures = 0;

  hold_channel_model dut (.sw(sw), .vin(vin), .vout(vout));

  // prototype channel
  logic sw_p = 1'b0;
  real vout_p;
  hold_channel_model #(.C_PF(30.0), .R_AMP_OHM(282.6e-6 / 30.0e-12)) dut_poc (
    .sw(sw_p), .vin(vin), .vout(vout_p));

  task automatic check_close(input real got, input real want, input real tol, input string what);
    checks++;
    if (got - want > tol || want - got > tol) begin
      failures++;
      $display("FAIL %s: %f expected %f", what, got, want);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real v_held;
    #10;
    vin = 0.8;
    #10 sw = 1'b1;
    #7.5 sw = 1'b0;
    #0.001;
    check_close(vout, 50.0 * 0.8 * (1.0 - $exp(-5.0)), 1e-6, "charge 5 tau");
    v_held = vout;
    // DAC moves on to other channels while this switch is open
    for (int k = 0; k < 99; k++) begin
      #20 vin = real'($urandom_range(2000)) / 1000.0 - 1.0;
    end
    #(2000.0 - 99 * 20 - 0.001);
    vin = 0.8;
    #0.001;
    check_close(vout, v_held * $exp(-2000.0 / 1.5e6), 1e-6, "droop after 2 us");
    check_close((v_held - vout) / v_held, 1.0 - $exp(-2000.0 / 1.5e6), 1e-6, "0.13 % drop");
    for (int n = 0; n < 5; n++) begin
      #1 sw = 1'b1;
      #7.5 sw = 1'b0;
      #1990;
    end
    check_close(vout, 40.0, 0.06, "converged to target after recharges");
    // prototype: charge fully, then 166.6 ns open
    #1 sw_p = 1'b1;
    #20 sw_p = 1'b0;
    #0.001;
    v_held = vout_p;
    check_close(v_held, 40.0, 0.01, "prototype channel charged");
    #166.599 vin = 0.5;
    #0.001;
    check_close((v_held - vout_p) / v_held, 1.0 - $exp(-166.6 / 282600.0), 1e-7,
                "prototype drop over 166.6 ns");
    check_close((v_held - vout_p) / v_held, 0.0006, 0.00005, "about 0.06 %");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
