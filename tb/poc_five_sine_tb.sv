// poc_five_sine_tb: the five-channel sinusoid demonstration, run on the full
// default design by runtime configuration only (no parameter overrides).
// Configuration: 5 active channels, 13-cycle slots (32.5 ns, 30.8 Msps),
// 8-cycle (20 ns) settle, 3-cycle (7.5 ns) switch window, a 200-frame loop.
// Channel c of every unit plays a sinusoid of c+1 periods per loop,
// amplitude 40 V, so one loop lasts 200 x 5 x 32.5 ns = 32.5 us.
// Checked here, from values computed in this file:
//   - after every charge, the electrode voltage equals 50 x the written DAC
//     voltage within the charge residue e^-5 of the step plus 0.1 V;
//   - each active channel is recharged every 5 slots = 65 cycles = 162.5 ns
//     (the prototype's 166.6 ns at exactly 30 Msps);
//   - channels 5..99 are never charged and stay at 0 V;
//   - the loop wraps (frame index returns to 0 after 199).
module poc_five_sine_tb;
  import tdm_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int U = N_UNITS;
  localparam int NF = 200;
  localparam int NA = 5;

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

  logic [DAC_W-1:0] ref_mem [U][NF][NA];
  real held [U][NA];
  int n_upd [U][NA];
  longint last_close [U][NA];
  logic [N_CH-1:0] sw_q [U];
  longint cyc_n = 0;
  int checks = 0, failures = 0, n_wraps = 0;
  logic [FRAME_W-1:0] frame_q = '0;

  always #1.25 clk = ~clk;

  electrode_ctrl_system dut (.*);

  function automatic real volts(input logic [DAC_W-1:0] s);
    return 50.0 * real'($signed(s)) / 32768.0;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc_n <= cyc_n + 1;
    if (rst_n && frame_start) begin
      if (frame == 0 && frame_q == FRAME_W'(NF - 1)) n_wraps++;
      frame_q <= frame;
    end
  end

  always @(negedge clk) begin
    if (rst_n) begin
      for (int u = 0; u < U; u++) begin
        check(sw_en[u][N_CH-1:NA] == '0, "inactive channel switched");
        for (int c = 0; c < NA; c++) begin
          if (sw_en[u][c] && !sw_q[u][c]) begin
            if (last_close[u][c] >= 0)
              check(cyc_n - last_close[u][c] == 65, "recharge every 5 slots");
            last_close[u][c] = cyc_n;
          end
          if (!sw_en[u][c] && sw_q[u][c]) begin
            automatic real want = volts(ref_mem[u][n_upd[u][c] % NF][c]);
            automatic real step = want - held[u][c];
            automatic real tol = 0.1 + 0.0075 * (step < 0.0 ? -step : step);
            if (n_upd[u][c] >= 2)
              check(electrode_v[u][c] - want < tol && want - electrode_v[u][c] < tol,
                    $sformatf("unit %0d ch %0d: %f V expected %f V", u, c,
                              electrode_v[u][c], want));
            held[u][c] = electrode_v[u][c];
            n_upd[u][c]++;
          end
        end
        sw_q[u] <= sw_en[u];
      end
    end
  end

  initial begin
    wr = '0;
    for (int u = 0; u < U; u++) begin
      sw_q[u] = '0;
      for (int c = 0; c < NA; c++) begin
        held[u][c] = 0.0; n_upd[u][c] = 0; last_close[u][c] = -1;
      end
    end
    cfg = CFG_DEFAULT;
    cfg.last_ch = SEL_W'(NA - 1);
    cfg.last_frame = FRAME_W'(NF - 1);
    cfg.slot_cyc = 13; cfg.settle_cyc = 8; cfg.on_cyc = 3;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int u = 0; u < U; u++)
      for (int f = 0; f < NF; f++)
        for (int c = 0; c < NA; c++) begin
          automatic real ph = 2.0 * 3.14159265358979 * real'(c + 1) * real'(f) / real'(NF);
          @(negedge clk);
          wr_unit = $bits(wr_unit)'(u);
          wr.en = 1'b1; wr.frame = FRAME_W'(f); wr.ch = SEL_W'(c);
          wr.sample = DAC_W'($rtoi(0.8 * 32767.0 * $sin(ph)));
          ref_mem[u][f][c] = wr.sample;
        end
    @(negedge clk); wr.en = 1'b0; enable = 1'b1; sync_in = 1'b1;
    @(negedge clk); sync_in = 1'b0;
    while (n_upd[0][0] < NF + NF / 2) @(negedge clk);
    enable = 1'b0;
    repeat (40) @(negedge clk);
    check(n_wraps > 0, "loop wrapped");
    for (int u = 0; u < U; u++)
      for (int c = NA; c < N_CH; c++)
        check(electrode_v[u][c] == 0.0, "inactive channel stays at 0 V");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
