// switch_decoder_tb: exhaustive test of the select-line decoder at the
// default size (100 channels, 7 select lines). Every one of the 128 codes is
// applied; codes 0..99 must close exactly switch `code`, codes 100..127
// (including the all-ones idle code) must close none.
module switch_decoder_tb;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned N = 100;
  localparam int unsigned W = 7;

  logic [W-1:0] sel;
  logic [N-1:0] sw_en;
  int checks = 0, failures = 0;

  switch_decoder #(.N_CH(N), .SEL_W(W)) dut (.sel(sel), .sw_en(sw_en));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int code = 0; code < (1 << W); code++) begin
      logic [N-1:0] exp_en;
      sel = W'(code);
      #1;
      exp_en = '0;
      if (code < N) exp_en[code] = 1'b1;
      checks++;
      if (sw_en !== exp_en) begin
        failures++;
        $display("sel=%0d sw_en=%h expected %h", code, sw_en, exp_en);
      end
      checks++;
      if ($countones(sw_en) > 1) begin
        failures++;
        $display("sel=%0d closes several switches", code);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
