// electrode_ctrl_system: one controller FPGA with its DACs, decoders and
// electrode channels, i.e. UNITS x N_CH electrodes (8 x 100 = 800 at the
// defaults, one FPGA's share of a 10,000-electrode trap).
//
//   electrode_ctrl_fpga --dac_data/dac_clk--> hs_dac_model --v_dac--+
//          |                                                         |
//          +--sel (SEL_W lines)--> switch_decoder --sw_en[N_CH]--> hold_channel_model x N_CH
//                                                                    |
//                                                          electrode_v[unit][ch]
//
// Each unit's DAC output is wired to all N_CH channel switches of that
// unit; the decoder closes one switch per slot, after the DAC has settled,
// and the channel's capacitor then holds that voltage for the rest of the
// frame. The FPGA logic and the decoders are synthesizable; the DAC and the
// switch/capacitor/OP-amp channels are behavioural models with real-valued
// voltages, so this top is for simulation.
// The master FPGA that distributes the common clock and the start pulse is
// outside: clk, enable and sync_in are ports. Host writes into the waveform
// memories and the slot configuration are ports as well.
module electrode_ctrl_system
  import tdm_pkg::*;
#(
  parameter int unsigned UNITS  = N_UNITS,
  parameter int unsigned UNIT_W = (UNITS > 1) ? $clog2(UNITS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  tdm_cfg_t           cfg,
  input  logic               enable,
  input  logic               sync_in,
  input  logic [UNIT_W-1:0]  wr_unit,
  input  wave_wr_t           wr,
  output logic [DAC_W-1:0]   dac_data    [UNITS],
  output logic               dac_clk     [UNITS],
  output logic [N_CH-1:0]    sw_en       [UNITS],
  output real                dac_v       [UNITS],
  output real                electrode_v [UNITS][N_CH],
  output logic [UNITS-1:0]   running,
  output logic               frame_start,
  output logic [FRAME_W-1:0] frame
);

  timeunit 1ns;
  timeprecision 1ps;

  logic [SEL_W-1:0] sel [UNITS];

  electrode_ctrl_fpga #(
    .UNITS   (UNITS),
    .DAC_BITS(DAC_W),
    .UNIT_W  (UNIT_W)
  ) u_fpga (
    .clk        (clk),
    .rst_n      (rst_n),
    .cfg        (cfg),
    .enable     (enable),
    .sync_in    (sync_in),
    .wr_unit    (wr_unit),
    .wr         (wr),
    .dac_data   (dac_data),
    .dac_clk    (dac_clk),
    .sel        (sel),
    .running    (running),
    .frame_start(frame_start),
    .frame      (frame)
  );

  for (genvar u = 0; u < UNITS; u++) begin : g_unit
    hs_dac_model #(.DAC_BITS(DAC_W)) u_dac (
      .data(dac_data[u]),
      .clk (dac_clk[u]),
      .vout(dac_v[u])
    );

    switch_decoder #(.N_CH(N_CH), .SEL_W(SEL_W)) u_dec (
      .sel  (sel[u]),
      .sw_en(sw_en[u])
    );

    for (genvar c = 0; c < N_CH; c++) begin : g_ch
      hold_channel_model u_ch (
        .sw  (sw_en[u][c]),
        .vin (dac_v[u]),
        .vout(electrode_v[u][c])
      );
    end
  end

endmodule
