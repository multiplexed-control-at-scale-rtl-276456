// electrode_ctrl_fpga: the logic of one controller FPGA.
//
// Holds N_UNITS control units (8 at the default, the number a 200-I/O FPGA
// can serve at 24 pins per unit: 8 x 24 = 192 pins). All units share the
// fabric clock, the slot configuration and one start pulse, so every DAC
// clock edge and every switch window across the FPGA falls on the same
// cycle. In a multi-FPGA system the start pulse and the common clock come
// from a master over the FPGA's serial transceivers (not modelled here:
// `sync_in` and `enable` are plain inputs); `sync_in` is registered once so
// that all units see it in the same cycle.
//
// Host writes go to one unit's waveform memory, chosen by wr_unit.
// Outputs per unit: dac_data/dac_clk to its DAC and sel to its decoder.
// Own choices: the host write port and the single sync register.
module electrode_ctrl_fpga
  import tdm_pkg::*;
#(
  parameter int unsigned UNITS    = N_UNITS,
  parameter int unsigned DAC_BITS = DAC_W,
  parameter int unsigned UNIT_W   = (UNITS > 1) ? $clog2(UNITS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  tdm_cfg_t            cfg,
  input  logic                enable,
  input  logic                sync_in,
  input  logic [UNIT_W-1:0]   wr_unit,
  input  wave_wr_t            wr,
  output logic [DAC_BITS-1:0] dac_data [UNITS],
  output logic                dac_clk  [UNITS],
  output logic [SEL_W-1:0]    sel      [UNITS],
  output logic [UNITS-1:0]    running,
  output logic                frame_start,
  output logic [FRAME_W-1:0]  frame
);

  timeunit 1ns;
  timeprecision 1ps;

  logic sync_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sync_q <= 1'b0;
    else        sync_q <= sync_in;
  end

  logic [UNITS-1:0]   fs;
  logic [FRAME_W-1:0] fr [UNITS];

  for (genvar u = 0; u < UNITS; u++) begin : g_unit
    wave_wr_t wr_u;
    always_comb begin
      wr_u    = wr;
      wr_u.en = wr.en && (wr_unit == UNIT_W'(u));
    end

    control_unit #(.DAC_BITS(DAC_BITS)) u_unit (
      .clk        (clk),
      .rst_n      (rst_n),
      .cfg        (cfg),
      .enable     (enable),
      .sync       (sync_q),
      .wr         (wr_u),
      .dac_data   (dac_data[u]),
      .dac_clk    (dac_clk[u]),
      .sel        (sel[u]),
      .running    (running[u]),
      .frame_start(fs[u]),
      .frame      (fr[u])
    );
  end

  // All units run in lock step; unit 0 reports the frame position.
  assign frame_start = fs[0];
  assign frame       = fr[0];

  // Lock step: every unit starts its frames in the same cycle.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               (fs == '0) || (fs == '1));

endmodule
