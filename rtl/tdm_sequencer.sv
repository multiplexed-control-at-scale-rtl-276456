// tdm_sequencer: slot and frame timing of one time-shared DAC.
//
// The sequencer walks the active channels 0..cfg.last_ch in a fixed round
// robin, one DAC slot of cfg.slot_cyc fabric cycles per channel. Within the
// slot of channel i (cycle counter c = 0..slot_cyc-1):
//   c = 0                    dac_edge: the DAC clock rises, the DAC output
//                            starts moving to channel i's voltage
//   settle_cyc <= c < settle_cyc+on_cyc
//                            sel_o = i: channel i's switch is closed and
//                            its hold capacitor charges
//   all other cycles         sel_o = IDLE_SEL (no switch closed)
// This is the paper's rule that the switch may close only after the DAC has
// settled (settle time + charge time < slot time). The sample for the next
// slot is read from the waveform memory at c = 0 (data back at c = 1) and
// launched onto the DAC bus at c = slot_cyc/2 (dac_launch), half a slot
// before the DAC clock edge that takes it, so the bus is stable at the edge.
//
// A frame is one pass over all active channels; the frame index selects the
// row of the waveform memory and wraps after cfg.last_frame, so a waveform of
// (last_frame+1) updates per channel loops (one frame = static voltages).
// Start: with enable high, a sync pulse (shared by all units of the system)
// starts a priming slot that fetches channel 0's first sample with no switch
// closed, then the first real slot. Dropping enable stops the sequence at
// the end of the current slot. sync pulses while running are ignored.
//
// Outputs are registered; dac_edge, dac_launch and sel_o share one cycle of
// latency, so their relative timing is exactly as listed above.
// Paper: slot structure, settle-then-charge order, round robin from
// channel N-1 back to channel 0. Own choices: the cycle grid, the idle select
// code (all ones, an unused code because N_CH < 2^SEL_W), the priming slot,
// the enable/sync start protocol.
module tdm_sequencer
  import tdm_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  tdm_cfg_t           cfg,
  input  logic               enable,
  input  logic               sync,
  // waveform memory read port (registered memory: data one cycle later)
  output logic               rd_en,
  output logic [FRAME_W-1:0] rd_frame,
  output logic [SEL_W-1:0]   rd_ch,
  input  logic [DAC_W-1:0]   rd_data,
  // DAC interface control
  output logic               dac_launch,
  output logic [DAC_W-1:0]   dac_code,
  output logic               dac_edge,
  // decoder select lines
  output logic [SEL_W-1:0]   sel_o,
  // status
  output logic               running,
  output logic               frame_start,
  output logic [FRAME_W-1:0] frame_o
);

  timeunit 1ns;
  timeprecision 1ps;

  localparam logic [SEL_W-1:0] IDLE_SEL = '1;

  typedef enum logic [1:0] {S_IDLE, S_PRIME, S_RUN} state_t;
  state_t state;

  logic [CYC_W-1:0]   cyc;
  logic [SEL_W-1:0]   cur_ch, nxt_ch;
  logic [FRAME_W-1:0] cur_frame, nxt_frame;
  logic [DAC_W-1:0]   code_q;
  logic               rd_pend;

  logic [CYC_W-1:0] half_cyc;
  logic             slot_end, active;
  assign half_cyc = cfg.slot_cyc >> 1;
  assign slot_end = (cyc == cfg.slot_cyc - 1'b1);
  assign active   = (state != S_IDLE);

  // next-next channel/frame after nxt_ch/nxt_frame
  logic [SEL_W-1:0]   adv_ch;
  logic [FRAME_W-1:0] adv_frame;
  always_comb begin
    if (nxt_ch >= cfg.last_ch) begin
      adv_ch    = '0;
      adv_frame = (nxt_frame >= cfg.last_frame) ? '0 : nxt_frame + 1'b1;
    end else begin
      adv_ch    = nxt_ch + 1'b1;
      adv_frame = nxt_frame;
    end
  end

  // memory read request at the first cycle of every slot
  assign rd_en    = active && (cyc == '0);
  assign rd_frame = nxt_frame;
  assign rd_ch    = nxt_ch;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cyc       <= '0;
      cur_ch    <= '0;
      nxt_ch    <= '0;
      cur_frame <= '0;
      nxt_frame <= '0;
      code_q    <= '0;
      rd_pend   <= 1'b0;
    end else begin
      rd_pend <= rd_en;
      if (rd_pend) code_q <= rd_data;
      unique case (state)
        S_IDLE: begin
          cyc <= '0;
          if (enable && sync) begin
            state     <= S_PRIME;
            nxt_ch    <= '0;
            nxt_frame <= '0;
          end
        end
        S_PRIME, S_RUN: begin
          if (slot_end) begin
            cyc       <= '0;
            cur_ch    <= nxt_ch;
            cur_frame <= nxt_frame;
            nxt_ch    <= adv_ch;
            nxt_frame <= adv_frame;
            state     <= enable ? S_RUN : S_IDLE;
          end else begin
            cyc <= cyc + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // registered outputs
  logic in_window;
  assign in_window = (state == S_RUN) && (cyc >= cfg.settle_cyc) &&
                     (cyc < cfg.settle_cyc + cfg.on_cyc);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_o       <= IDLE_SEL;
      dac_edge    <= 1'b0;
      dac_launch  <= 1'b0;
      dac_code    <= '0;
      running     <= 1'b0;
      frame_start <= 1'b0;
      frame_o     <= '0;
    end else begin
      sel_o       <= in_window ? cur_ch : IDLE_SEL;
      dac_edge    <= (state == S_RUN) && (cyc == '0);
      dac_launch  <= active && (cyc == half_cyc);
      if (active && (cyc == half_cyc)) dac_code <= code_q;
      running     <= (state == S_RUN);
      frame_start <= (state == S_RUN) && (cyc == '0) && (cur_ch == '0);
      frame_o     <= cur_frame;
    end
  end

  // The slot must hold the memory fetch before the launch and the whole
  // switch window; the idle code must not be a real channel.
  initial assert (N_CH < (1 << SEL_W))
    else $error("N_CH must leave the all-ones select code unused");
  property p_cfg_legal;
    @(posedge clk) disable iff (!rst_n)
      active |-> (cfg.slot_cyc >= 4) &&
                 (cfg.settle_cyc + cfg.on_cyc <= cfg.slot_cyc) &&
                 (cfg.settle_cyc >= 1) && (cfg.on_cyc >= 1);
  endproperty
  a_cfg_legal: assert property (p_cfg_legal);

endmodule
