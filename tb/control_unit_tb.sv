// control_unit_tb: one control unit, programmed through its host write port
// and run end to end at the pins: DAC data, DAC clock, decoder select.
// For each switch window the testbench checks, from the pins alone, that
//   - the code the DAC took at its last rising clock edge is the offset-
//     binary form of the sample written for (frame, channel) of this slot,
//   - the window opens settle_cyc cycles after that edge and lasts on_cyc
//     cycles (settling before charging),
//   - windows visit channels 0..last_ch in order, frame after frame, with
//     the frame index wrapping after last_frame,
//   - DAC clock edges come every slot_cyc cycles.
// Sample values are written here and the expected codes computed here.
// Runs a reduced loop (10 channels, 4 frames) and the default 100 channels.
module control_unit_tb;
  import tdm_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 1'b0, rst_n = 1'b0;
  tdm_cfg_t cfg;
  logic enable = 1'b0, sync = 1'b0;
  wave_wr_t wr;
  logic [DAC_W-1:0] dac_data;
  logic dac_clk, running, frame_start;
  logic [SEL_W-1:0] sel;
  logic [FRAME_W-1:0] frame;

  logic [DAC_W-1:0] ref_mem [FRAMES][N_CH];
  int checks = 0, failures = 0;

  always #1.25 clk = ~clk;

  control_unit dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pin monitor
  longint cyc_n = 0, edge_cyc = -1, prev_edge = -1, win_start = -1;
  logic [DAC_W-1:0] latched;
  logic dac_clk_q = 1'b0;
  logic [SEL_W-1:0] sel_q = '1;
  int n_win = 0, n_edge = 0;

  always @(posedge clk) begin
    cyc_n <= cyc_n + 1;
    dac_clk_q <= dac_clk;
    sel_q <= sel;
    if (!rst_n) begin
      // nothing to check in reset
    end else begin
    if (dac_clk && !dac_clk_q) begin
      if (prev_edge >= 0 && running)
        check(cyc_n - prev_edge == longint'(cfg.slot_cyc), "DAC clock period");
      prev_edge = cyc_n;
      edge_cyc = cyc_n;
      latched = dac_data;   // what the DAC samples at this rising edge
      n_edge++;
    end
    if (sel != '1 && sel_q == '1) begin
      automatic int ch = n_win % (int'(cfg.last_ch) + 1);
      automatic int fr = (n_win / (int'(cfg.last_ch) + 1)) % (int'(cfg.last_frame) + 1);
      automatic logic [DAC_W-1:0] exp_code = ref_mem[fr][ch] ^ {1'b1, {(DAC_W-1){1'b0}}};
      check(sel == SEL_W'(ch), $sformatf("window channel %0d expected %0d", sel, ch));
      check(latched == exp_code,
            $sformatf("DAC code %h expected %h (ch %0d fr %0d)", latched, exp_code, ch, fr));
      check(cyc_n - edge_cyc == longint'(cfg.settle_cyc), "settle before switch");
      win_start = cyc_n;
      n_win++;
    end
    if (sel == '1 && sel_q != '1)
      check(cyc_n - win_start == longint'(cfg.on_cyc), "switch on time");
    end
  end

  task automatic write_all(input int frames, input int chans);
    for (int f = 0; f < frames; f++)
      for (int c = 0; c < chans; c++) begin
        @(negedge clk);
        wr.en = 1'b1; wr.frame = FRAME_W'(f); wr.ch = SEL_W'(c);
        wr.sample = DAC_W'($urandom);
        ref_mem[f][c] = wr.sample;
      end
    @(negedge clk); wr.en = 1'b0;
  endtask

  task automatic run(input int windows);
    n_win = 0; prev_edge = -1;
    @(negedge clk); enable = 1'b1; sync = 1'b1;
    @(negedge clk); sync = 1'b0;
    while (n_win < windows) @(negedge clk);
    enable = 1'b0;
    repeat (3 * int'(cfg.slot_cyc)) @(negedge clk);
    check(!running, "stopped");
  endtask

  initial begin
    wr = '0;
    cfg = CFG_DEFAULT;
    cfg.last_ch = 9; cfg.last_frame = 3;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    write_all(4, 10);
    run(10 * 9);            // 2.25 passes over the 4-frame loop
    cfg = CFG_DEFAULT;
    cfg.last_frame = 0;     // static voltages, all 100 channels
    write_all(1, N_CH);
    run(N_CH * 2);
    check(n_win == N_CH * 2, "window count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
