// tdm_pkg: constants and types shared by the time-division-multiplexed
// electrode controller.
//
// One high-speed DAC is time-shared by N_CH electrode channels. Each DAC
// sample period (a "slot") belongs to one channel; inside the slot the DAC is
// first left to settle and then that channel's switch is closed for the
// charge window so that its hold capacitor takes the DAC voltage. A full
// round of N_CH slots is a "frame"; the per-channel update rate is the DAC
// rate divided by N_CH.
//
// Numbers that follow the paper's scaling study: 100 channels per DAC,
// a 16-bit parallel DAC bus, ceil(log2 100) = 7 decoder select lines,
// 8 DAC/decoder units per FPGA, a 50 Msps DAC rate with 10 ns settling and
// a 7.5 ns charge on-time (5 RC constants of 150 pF x 10 ohm).
// Choices of this design: the 400 MHz fabric clock (2.5 ns grid, so a 20 ns
// slot is 8 cycles), the idle select code, the runtime configuration record
// and the waveform-memory depth.
package tdm_pkg;
  timeunit 1ns;
  timeprecision 1ps;

  // Paper: multiplexing factor N = 50 Msps / 0.5 MHz = 100.
  parameter int unsigned N_CH       = 100;
  // Paper: ceil(log2 N) decoder lines.
  parameter int unsigned SEL_W      = $clog2(N_CH);
  // Paper: 16-bit parallel DAC interface.
  parameter int unsigned DAC_W      = 16;
  // Paper: about 8 modules per 200-I/O FPGA.
  parameter int unsigned N_UNITS    = 8;
  // Own choice: frames of samples held per channel in the waveform memory
  // (256 frames = 512 us of waveform at 0.5 MHz per channel; 512 kbit).
  parameter int unsigned FRAMES     = 256;
  parameter int unsigned FRAME_W    = $clog2(FRAMES);

  // Own choice: 400 MHz fabric clock. Slot = 8 cycles = 20 ns (50 Msps),
  // settle = 4 cycles = 10 ns, switch on = 3 cycles = 7.5 ns.
  parameter int unsigned SLOT_CYC    = 8;
  parameter int unsigned SETTLE_CYC  = 4;
  parameter int unsigned ON_CYC      = 3;
  parameter int unsigned CYC_W       = 8;

  // Runtime configuration, loaded by the host; defaults are the numbers above.
  typedef struct packed {
    logic [CYC_W-1:0]   slot_cyc;    // fabric cycles per DAC slot (>= 4)
    logic [CYC_W-1:0]   settle_cyc;  // cycles from slot start to switch on
    logic [CYC_W-1:0]   on_cyc;      // cycles the switch stays closed
    logic [SEL_W-1:0]   last_ch;     // index of the last active channel
    logic [FRAME_W-1:0] last_frame;  // index of the last frame of the loop
  } tdm_cfg_t;

  localparam tdm_cfg_t CFG_DEFAULT = '{
    slot_cyc:   CYC_W'(SLOT_CYC),
    settle_cyc: CYC_W'(SETTLE_CYC),
    on_cyc:     CYC_W'(ON_CYC),
    last_ch:    SEL_W'(N_CH - 1),
    last_frame: FRAME_W'(FRAMES - 1)
  };

  // Host write into a unit's waveform memory.
  typedef struct packed {
    logic               en;
    logic [FRAME_W-1:0] frame;
    logic [SEL_W-1:0]   ch;
    logic [DAC_W-1:0]   sample;  // signed two's complement, full scale +-2^(DAC_W-1)
  } wave_wr_t;

endpackage
