// dac_if: parallel data and clock outputs to the high-speed DAC.
//
// The bus is DAC_BITS data lines plus one clock line driven by the FPGA
// (the paper counts 16 + 1 = 17 I/O for this interface; its prototype used a
// 14-bit bus). Samples arrive as SAMPLE_W-bit two's complement values; the
// interface keeps the DAC_BITS most significant bits and flips the sign bit,
// giving the offset-binary code a current-output DAC takes (code 0 = most
// negative output, 2^(DAC_BITS-1) = mid scale).
//
// Timing: on `launch` the converted code is registered onto the data lines
// and the DAC clock is driven low; on `edge_i` the DAC clock is driven high.
// The DAC takes the code on the rising clock edge. The sequencer issues
// launch half a slot before edge_i, so data lines are stable for half a slot
// on each side of the rising edge. Both outputs change one cycle after the
// request, from output registers (meant for the I/O flip-flops).
// Paper: line count and bus width. Own choices: number format, clock phase.
module dac_if #(
  parameter int unsigned SAMPLE_W = 16,
  parameter int unsigned DAC_BITS = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                launch,
  input  logic [SAMPLE_W-1:0] sample,
  input  logic                edge_i,
  output logic [DAC_BITS-1:0] dac_data,
  output logic                dac_clk
);

  timeunit 1ns;
  timeprecision 1ps;

  logic [DAC_BITS-1:0] code;
  always_comb begin
    code = sample[SAMPLE_W-1 -: DAC_BITS];
    code[DAC_BITS-1] = ~code[DAC_BITS-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dac_data <= {1'b1, {(DAC_BITS-1){1'b0}}};  // mid scale
      dac_clk  <= 1'b0;
    end else begin
      if (launch) dac_data <= code;
      if (edge_i)      dac_clk <= 1'b1;
      else if (launch) dac_clk <= 1'b0;
    end
  end

  initial assert (DAC_BITS <= SAMPLE_W)
    else $error("DAC_BITS must not exceed SAMPLE_W");

endmodule
