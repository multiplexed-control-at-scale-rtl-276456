// dac_if_tb: checks the DAC interface's number format and clock phase for a
// 16-bit bus (default) and a 14-bit bus (the prototype's width).
// Expected codes are computed here from the signed sample: offset binary,
// (sample + 2^15) >> (16 - bits). The clock must go low with each launch,
// high with each edge request, and the data must only change on a launch.
module dac_if_tb;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 1'b0, rst_n = 1'b0;
  logic launch = 1'b0, edge_i = 1'b0;
  logic [15:0] sample = '0;
  logic [15:0] data16;
  logic [13:0] data14;
  logic clk16, clk14;
  int checks = 0, failures = 0;

  always #1.25 clk = ~clk;

  dac_if #(.SAMPLE_W(16), .DAC_BITS(16)) dut16 (
    .clk(clk), .rst_n(rst_n), .launch(launch), .sample(sample),
    .edge_i(edge_i), .dac_data(data16), .dac_clk(clk16));
  dac_if #(.SAMPLE_W(16), .DAC_BITS(14)) dut14 (
    .clk(clk), .rst_n(rst_n), .launch(launch), .sample(sample),
    .edge_i(edge_i), .dac_data(data14), .dac_clk(clk14));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] prev16;
    int unsigned off;
    repeat (3) @(posedge clk);
    check(data16 == 16'h8000 && data14 == 14'h2000 && !clk16, "reset mid scale");
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      case (n)
        0: sample = 16'h7fff;   // +full scale
        1: sample = 16'h8000;   // -full scale
        2: sample = 16'h0000;   // zero
        3: sample = 16'hffff;   // -1 LSB
        default: sample = 16'($urandom);
      endcase
      off = (32'(sample) + 32'h8000) & 32'hffff;
      prev16 = data16;
      // edge request alone: clock rises, data unchanged
      @(negedge clk); edge_i = 1'b1;
      @(negedge clk); edge_i = 1'b0;
      check(clk16 && clk14, "clock high after edge");
      check(data16 == prev16, "data stable on edge");
      // launch: data updated, clock low
      @(negedge clk); launch = 1'b1;
      @(negedge clk); launch = 1'b0;
      check(!clk16 && !clk14, "clock low after launch");
      check(data16 == 16'(off), $sformatf("16-bit code %h for %h", data16, sample));
      check(data14 == 14'(off >> 2), $sformatf("14-bit code %h for %h", data14, sample));
      sample = 16'($urandom);
      @(negedge clk);
      check(data16 == 16'(off), "data held without launch");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
