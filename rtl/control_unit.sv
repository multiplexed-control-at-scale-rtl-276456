// control_unit: one DAC-and-decoder module of the controller FPGA.
//
// The paper's unit of scaling: one high-speed DAC plus one decoder, driving
// N_CH electrodes. Inside the FPGA a unit is a waveform memory, a slot
// sequencer and the DAC interface:
//
//   host write --> waveform_mem --rd--> tdm_sequencer --> dac_if --> dac_data, dac_clk
//                                             |
//                                             +--------------------> sel (to decoder)
//
// Its FPGA pins are DAC_BITS data lines, one DAC clock and SEL_W decoder
// lines: 16 + 1 + 7 = 24 at the defaults, the paper's count per module.
// Timing is that of tdm_sequencer: a DAC slot of cfg.slot_cyc cycles per
// channel, the channel's switch selected after cfg.settle_cyc cycles for
// cfg.on_cyc cycles. All outputs are registered; the select lines pass one
// extra register so that they keep their timing relative to the DAC clock,
// which leaves the sequencer through the dac_if output register.
module control_unit
  import tdm_pkg::*;
#(
  parameter int unsigned DAC_BITS = DAC_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  tdm_cfg_t            cfg,
  input  logic                enable,
  input  logic                sync,
  input  wave_wr_t            wr,
  output logic [DAC_BITS-1:0] dac_data,
  output logic                dac_clk,
  output logic [SEL_W-1:0]    sel,
  output logic                running,
  output logic                frame_start,
  output logic [FRAME_W-1:0]  frame
);

  timeunit 1ns;
  timeprecision 1ps;

  logic               rd_en;
  logic [FRAME_W-1:0] rd_frame;
  logic [SEL_W-1:0]   rd_ch;
  logic [DAC_W-1:0]   rd_data;
  logic               dac_launch, dac_edge;
  logic [DAC_W-1:0]   dac_code;
  logic [SEL_W-1:0]   sel_seq;

  waveform_mem #(
    .DATA_W (DAC_W),
    .SEL_W  (SEL_W),
    .FRAME_W(FRAME_W)
  ) u_mem (
    .clk     (clk),
    .wr_en   (wr.en),
    .wr_frame(wr.frame),
    .wr_ch   (wr.ch),
    .wr_data (wr.sample),
    .rd_en   (rd_en),
    .rd_frame(rd_frame),
    .rd_ch   (rd_ch),
    .rd_data (rd_data)
  );

  tdm_sequencer u_seq (
    .clk        (clk),
    .rst_n      (rst_n),
    .cfg        (cfg),
    .enable     (enable),
    .sync       (sync),
    .rd_en      (rd_en),
    .rd_frame   (rd_frame),
    .rd_ch      (rd_ch),
    .rd_data    (rd_data),
    .dac_launch (dac_launch),
    .dac_code   (dac_code),
    .dac_edge   (dac_edge),
    .sel_o      (sel_seq),
    .running    (running),
    .frame_start(frame_start),
    .frame_o    (frame)
  );

  dac_if #(
    .SAMPLE_W(DAC_W),
    .DAC_BITS(DAC_BITS)
  ) u_dac_if (
    .clk     (clk),
    .rst_n   (rst_n),
    .launch  (dac_launch),
    .sample  (dac_code),
    .edge_i  (dac_edge),
    .dac_data(dac_data),
    .dac_clk (dac_clk)
  );

  // Output register on the select lines: dac_if registers the DAC clock and
  // data once more after the sequencer, so the select lines get the same
  // extra stage and the settle time seen at the pins stays cfg.settle_cyc.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sel <= '1;
    else        sel <= sel_seq;
  end

endmodule
