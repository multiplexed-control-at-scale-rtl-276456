// waveform_mem: sample store of one control unit.
//
// Holds FRAMES x 2^SEL_W signed samples, addressed {frame, channel}: row
// `frame` holds the value every channel takes in that frame. The sequencer
// reads one sample per DAC slot; the host writes samples through the second
// port at any time (a write lands in whatever frame the sequencer reaches
// next, there is no double buffering). One frame row with a constant per
// channel gives the static trapping voltages; several rows give the
// time-varying (e.g. sinusoidal) electrode waveforms, updated once per frame.
//
// Simple dual-port RAM: synchronous write, synchronous read with one cycle
// of latency (rd_data valid the cycle after rd_en). Written as an array so it
// maps onto FPGA block RAM. Contents are cleared only by writes; the
// testbenches write every location they read.
// Paper: the FPGA generates the complete time-multiplexed waveform. Own
// choices: the memory organisation, its depth and the write port.
module waveform_mem #(
  parameter int unsigned DATA_W  = 16,
  parameter int unsigned SEL_W   = 7,
  parameter int unsigned FRAME_W = 8
) (
  input  logic               clk,
  // host write port
  input  logic               wr_en,
  input  logic [FRAME_W-1:0] wr_frame,
  input  logic [SEL_W-1:0]   wr_ch,
  input  logic [DATA_W-1:0]  wr_data,
  // sequencer read port
  input  logic               rd_en,
  input  logic [FRAME_W-1:0] rd_frame,
  input  logic [SEL_W-1:0]   rd_ch,
  output logic [DATA_W-1:0]  rd_data
);

  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned DEPTH = 1 << (FRAME_W + SEL_W);

  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[{wr_frame, wr_ch}] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[{rd_frame, rd_ch}];
  end

endmodule
