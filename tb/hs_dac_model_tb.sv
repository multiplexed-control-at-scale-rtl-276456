// hs_dac_model_tb: checks the DAC model's transfer function and settling.
// Codes are clocked in every 20 ns (50 Msps). 5 ns after an edge the output
// must be half way between the old and new values (not settled); 12 ns after
// the edge it must equal (code - 32768) / 32768 * 1 V.
module hs_dac_model_tb;
  timeunit 1ns;
  timeprecision 1ps;

  logic [15:0] data = 16'h8000;
  logic clk = 1'b0;
  real vout;
  int checks = 0, failures = 0;

  hs_dac_model dut (.data(data), .clk(clk), .vout(vout));

  function automatic real volts(input logic [15:0] c);
    return (real'(c) - 32768.0) / 32768.0;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real v_prev = 0.0, v_new;
    #20;
    for (int n = 0; n < 200; n++) begin
      case (n)
        0: data = 16'hffff;
        1: data = 16'h0000;
        2: data = 16'h8000;
        default: data = 16'($urandom);
      endcase
      v_new = volts(data);
      #2 clk = 1'b1;
      #5;
      check((vout - 0.5 * (v_prev + v_new)) < 1e-9 && (vout - 0.5 * (v_prev + v_new)) > -1e-9,
            "half way while settling");
      #7;
      check((vout - v_new) < 1e-9 && (vout - v_new) > -1e-9,
            $sformatf("settled %f expected %f", vout, v_new));
      #2 clk = 1'b0;
      #4;
      v_prev = v_new;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
