// electrode_ctrl_system_tb: end-to-end run of one controller FPGA with its
// 8 DACs, 8 decoders and 800 electrode channels, every parameter at its
// default (100 channels per DAC, 50 Msps slots of 8 x 2.5 ns).
//
// Phases:
//   1. static trapping voltages: one frame row per unit, a random voltage per
//      electrode; after a few frames every electrode must hold 50 x its DAC
//      voltage (within the droop and charge error of the channel model);
//   2. enable is dropped and the units stop; restart by a new sync;
//   3. dynamic waveforms: 16-frame sinusoids of 1..5 periods per loop on every
//      channel, checked after every charge against the written sample;
//   4. the channel count is cut to 5 (the prototype's configuration) and the
//      slot to 13 cycles with an 8-cycle settle (30.8 Msps, 20 ns settling):
//      only channels 0..4 are charged and a frame lasts 5 slots;
//   5. settling violated on purpose: the switch closes 2.5 ns after the DAC
//      edge and opens at 7.5 ns, before the DAC's 10 ns settling; static
//      voltages must then come out wrong (counted, not failed), which shows
//      why the slot waits for the DAC before charging.
// At every switch opening the electrode voltage is compared with the value
// computed here from the written code: v = 50 * (code - 32768) / 32768.
// Mechanisms counted (each must happen): sync starts, stops, static frames,
// frame-loop wraps, droop between charges, short (5-channel) frames, wrong
// voltages under a violated settle time.
module electrode_ctrl_system_tb;
  import tdm_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int U = N_UNITS;
  localparam real GAIN = 50.0;

  logic clk = 1'b0, rst_n = 1'b0;
  tdm_cfg_t cfg;
  logic enable = 1'b0, sync_in = 1'b0;
  logic [$clog2(U)-1:0] wr_unit = '0;
  wave_wr_t wr;
  logic [DAC_W-1:0] dac_data [U];
  logic dac_clk [U];
  logic [N_CH-1:0] sw_en [U];
  real dac_v [U];
  real electrode_v [U][N_CH];
  logic [U-1:0] running;
  logic frame_start;
  logic [FRAME_W-1:0] frame;

  logic [DAC_W-1:0] ref_mem [U][FRAMES][N_CH];
  real held [U][N_CH];
  logic [N_CH-1:0] sw_q [U];
  int n_upd [U][N_CH];
  int checks = 0, failures = 0;
  int n_sync = 0, n_stop = 0, n_static_frames = 0, n_wraps = 0;
  int n_droop = 0, n_short_frames = 0, n_settle_err = 0;
  int phase = 0;
  real tol_abs = 0.1;
  real tol_rel = 0.0;

  always #1.25 clk = ~clk;

  electrode_ctrl_system dut (.*);

  function automatic real volts(input logic [DAC_W-1:0] s);
    return GAIN * real'($signed(s)) / 32768.0;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // electrode monitor: at every switch opening compare with the written sample
  always @(negedge clk) begin
    if (rst_n) begin
      for (int u = 0; u < U; u++) begin
        if (sw_en[u] != sw_q[u]) begin
          for (int c = 0; c < N_CH; c++) begin
            if (sw_en[u][c] && !sw_q[u][c]) begin
              // closing: held voltage has drooped since the last charge
              if (n_upd[u][c] > 2 && electrode_v[u][c] != 0.0) begin
                if ((held[u][c] > 0.0 && electrode_v[u][c] < held[u][c]) ||
                    (held[u][c] < 0.0 && electrode_v[u][c] > held[u][c]))
                  n_droop++;
              end
            end
            if (!sw_en[u][c] && sw_q[u][c]) begin
              automatic int fr = n_upd[u][c] % (int'(cfg.last_frame) + 1);
              automatic real want = volts(ref_mem[u][fr][c]);
              automatic real step = want - held[u][c];
              automatic real tol = tol_abs + tol_rel * (step < 0.0 ? -step : step);
              if (phase == 5) begin
                if (n_upd[u][c] >= 3 &&
                    (electrode_v[u][c] - want > tol || want - electrode_v[u][c] > tol))
                  n_settle_err++;
              end else if (n_upd[u][c] >= 3)
                check(electrode_v[u][c] - want < tol && want - electrode_v[u][c] < tol,
                      $sformatf("unit %0d ch %0d frame %0d: %f V expected %f V",
                                u, c, fr, electrode_v[u][c], want));
              check(c <= int'(cfg.last_ch), "only active channels charge");
              held[u][c] = electrode_v[u][c];
              n_upd[u][c]++;
            end
          end
          check($countones(sw_en[u]) <= 1, "one switch at a time");
        end
        sw_q[u] <= sw_en[u];
      end
    end
  end

  // frame bookkeeping
  logic [FRAME_W-1:0] frame_q = '0;
  longint cyc_n = 0, last_fs = -1;
  always @(posedge clk) begin
    cyc_n <= cyc_n + 1;
    if (rst_n && frame_start) begin
      if (cfg.last_frame == 0) n_static_frames++;
      if (frame == 0 && frame_q == cfg.last_frame && cfg.last_frame != 0) n_wraps++;
      if (last_fs >= 0 && cfg.last_ch != N_CH - 1) begin
        n_short_frames++;
        check(cyc_n - last_fs == longint'(cfg.slot_cyc) * (longint'(cfg.last_ch) + 1),
              "short frame period");
      end else if (last_fs >= 0) begin
        check(cyc_n - last_fs == 800, "frame = 100 slots x 8 cycles = 2 us");
      end
      last_fs = cyc_n;
      frame_q <= frame;
    end
  end

  task automatic write_sample(input int u, input int f, input int c, input logic [DAC_W-1:0] s);
    @(negedge clk);
    wr_unit = $bits(wr_unit)'(u);
    wr.en = 1'b1; wr.frame = FRAME_W'(f); wr.ch = SEL_W'(c); wr.sample = s;
    ref_mem[u][f][c] = s;
  endtask

  task automatic start();
    last_fs = -1;
    for (int u = 0; u < U; u++)
      for (int c = 0; c < N_CH; c++) n_upd[u][c] = 0;
    @(negedge clk); wr.en = 1'b0; enable = 1'b1; sync_in = 1'b1;
    @(negedge clk); sync_in = 1'b0;
    n_sync++;
  endtask

  task automatic stop();
    @(negedge clk); enable = 1'b0;
    repeat (3 * int'(cfg.slot_cyc)) @(negedge clk);
    check(running == '0, "all units stopped");
    n_stop++;
  endtask

  task automatic frames(input int n);
    repeat (n) begin
      @(posedge clk iff frame_start);
    end
  endtask

  initial begin
    wr = '0;
    for (int u = 0; u < U; u++) begin
      sw_q[u] = '0;
      for (int c = 0; c < N_CH; c++) begin
        held[u][c] = 0.0; n_upd[u][c] = 0;
        for (int f = 0; f < FRAMES; f++) ref_mem[u][f][c] = '0;
      end
    end
    cfg = CFG_DEFAULT;
    cfg.last_frame = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. static voltages, within +-45 V
    phase = 1;
    for (int u = 0; u < U; u++)
      for (int c = 0; c < N_CH; c++)
        write_sample(u, 0, c, DAC_W'($urandom_range(58982) - 29491));
    start();
    frames(6);
    @(negedge clk);
    for (int u = 0; u < U; u++)
      for (int c = 0; c < N_CH; c++) begin
        automatic real want = volts(ref_mem[u][0][c]);
        check(electrode_v[u][c] - want < 0.1 && want - electrode_v[u][c] < 0.1,
              $sformatf("static unit %0d ch %0d", u, c));
      end
    // 2. stop
    stop();

    // 3. sinusoids, 16 frames, 1..5 periods per loop, 40 V amplitude
    phase = 3;
    cfg.last_frame = FRAME_W'(15);
    for (int u = 0; u < U; u++)
      for (int f = 0; f < 16; f++)
        for (int c = 0; c < N_CH; c++) begin
          automatic real ph = 2.0 * 3.14159265358979 * real'((c % 5) + 1) * real'(f) / 16.0;
          write_sample(u, f, c, DAC_W'($rtoi(0.8 * 32767.0 * $sin(ph + 0.3 * real'(u)))));
        end
    tol_rel = 0.0075;   // e^-5 of the step is left after a 5-tau charge
    tol_abs = 0.1;
    start();
    frames(2 * 16 + 3);
    stop();

    // 4. prototype-like: 5 channels, 13-cycle slot, 8-cycle (20 ns) settle
    phase = 4;
    cfg.last_ch = 4; cfg.slot_cyc = 13; cfg.settle_cyc = 8; cfg.on_cyc = 3;
    start();
    frames(48);
    stop();

    // 5. settle violated: switch on at 2.5 ns for 5 ns, DAC needs 10 ns
    phase = 5;
    for (int u = 0; u < U; u++)
      for (int c = 0; c < N_CH; c++)
        write_sample(u, 0, c, DAC_W'($urandom_range(58982) - 29491));
    cfg = CFG_DEFAULT;
    cfg.last_frame = 0; cfg.settle_cyc = 1; cfg.on_cyc = 2;
    tol_rel = 0.0; tol_abs = 0.1;
    start();
    frames(5);
    stop();

    check(n_sync > 0, "sync start happened");
    check(n_stop > 0, "stop happened");
    check(n_static_frames > 0, "static frames happened");
    check(n_wraps > 0, "waveform loop wrapped");
    check(n_droop > 0, "droop between charges seen");
    check(n_short_frames > 0, "5-channel frames happened");
    check(n_settle_err > 100, "violated settling gives wrong voltages");
    $display("mechanisms: sync=%0d stop=%0d static_frames=%0d wraps=%0d droop=%0d short_frames=%0d settle_errors=%0d",
             n_sync, n_stop, n_static_frames, n_wraps, n_droop, n_short_frames, n_settle_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
