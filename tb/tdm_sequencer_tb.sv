// tdm_sequencer_tb: checks the slot timing of the sequencer against a
// reference worked out here from the configuration alone.
// A small memory model (one-cycle read latency, random contents) answers the
// sequencer's reads. For every cycle the testbench knows, from the last DAC
// clock edge request, which channel owns the slot and at which offset it is,
// and checks:
//   - DAC edges are exactly slot_cyc cycles apart (the DAC sample rate:
//     8 cycles of 2.5 ns = 20 ns = 50 Msps at the defaults);
//   - sel equals the slot's channel exactly for offsets
//     settle_cyc .. settle_cyc+on_cyc-1 and the idle code otherwise;
//   - channels follow 0,1,..,last_ch,0,.. and frames 0..last_frame,0,..;
//   - each launched DAC code is the memory sample of the next slot's
//     (frame, channel), launched slot_cyc - slot_cyc/2 cycles before its edge;
//   - one frame of 100 channels lasts 800 cycles = 2 us (0.5 MHz update);
//   - the start waits for sync, and dropping enable stops at the slot end.
// Runs: the default configuration (100 channels, 2 frames) and a reduced
// one (5 channels, 13-cycle slot, 8-cycle settle, 3 frames).
module tdm_sequencer_tb;
  import tdm_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 1'b0, rst_n = 1'b0;
  tdm_cfg_t cfg;
  logic enable = 1'b0, sync = 1'b0;
  logic rd_en;
  logic [FRAME_W-1:0] rd_frame;
  logic [SEL_W-1:0] rd_ch;
  logic [DAC_W-1:0] rd_data;
  logic dac_launch, dac_edge, running, frame_start;
  logic [DAC_W-1:0] dac_code;
  logic [SEL_W-1:0] sel_o;
  logic [FRAME_W-1:0] frame_o;

  logic [DAC_W-1:0] mem [1 << (FRAME_W + SEL_W)];
  int checks = 0, failures = 0;

  always #1.25 clk = ~clk;

  always_ff @(posedge clk) if (rd_en) rd_data <= mem[{rd_frame, rd_ch}];

  tdm_sequencer dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference state, driven from observed edges
  longint cyc_n = 0;
  longint last_edge = -1, last_launch = -1;
  int n_edges = 0, n_launch = 0;
  longint first_frame_edge = -1;

  function automatic int exp_ch(input int n);
    return n % (int'(cfg.last_ch) + 1);
  endfunction
  function automatic int exp_frame(input int n);
    return (n / (int'(cfg.last_ch) + 1)) % (int'(cfg.last_frame) + 1);
  endfunction

  always @(posedge clk) begin
    cyc_n <= cyc_n + 1;
    if (rst_n) begin
      automatic longint off;
      if (dac_edge) begin
        if (n_edges > 0)
          check(cyc_n - last_edge == longint'(cfg.slot_cyc), "edge spacing = slot_cyc");
        check(last_launch >= 0 &&
              cyc_n - last_launch == longint'(cfg.slot_cyc - (cfg.slot_cyc >> 1)),
              "launch half a slot before edge");
        if (exp_ch(n_edges) == 0) begin
          if (first_frame_edge >= 0 && exp_frame(n_edges) == 1)
            check(cyc_n - first_frame_edge ==
                  longint'(cfg.slot_cyc) * (longint'(cfg.last_ch) + 1),
                  "frame period");
          if (exp_frame(n_edges) == 0) first_frame_edge = cyc_n;
        end
        check(frame_start == (exp_ch(n_edges) == 0), "frame_start at channel 0");
        last_edge = cyc_n;
        n_edges++;
      end
      off = cyc_n - last_edge;
      if (last_edge >= 0 && running && off < longint'(cfg.slot_cyc)) begin
        automatic bit win = (off >= longint'(cfg.settle_cyc)) &&
                            (off < longint'(cfg.settle_cyc) + longint'(cfg.on_cyc));
        automatic int ch = exp_ch(n_edges - 1);
        check(sel_o == (win ? SEL_W'(ch) : '1),
              $sformatf("sel=%0d off=%0d ch=%0d", sel_o, off, ch));
      end else begin
        check(sel_o == '1, "idle select when not in a slot");
      end
      if (dac_launch) begin
        automatic int ch = exp_ch(n_launch), fr = exp_frame(n_launch);
        check(dac_code == mem[{FRAME_W'(fr), SEL_W'(ch)}],
              $sformatf("launch %0d code ch %0d frame %0d", n_launch, ch, fr));
        last_launch = cyc_n;
        n_launch++;
      end
    end
  end

  task automatic run(input tdm_cfg_t c, input int frames);
    int target;
    cfg = c;
    n_edges = 0; n_launch = 0; last_edge = -1; last_launch = -1;
    first_frame_edge = -1;
    @(negedge clk); enable = 1'b1;
    repeat (20) @(negedge clk);
    check(!running && sel_o == '1, "waits for sync");
    sync = 1'b1; @(negedge clk); sync = 1'b0;
    target = frames * (int'(c.last_ch) + 1);
    while (n_edges < target) @(negedge clk);
    enable = 1'b0;
    repeat (2 * int'(c.slot_cyc) + 2) @(negedge clk);
    check(!running, "stopped after enable drop");
    check(n_edges == target, $sformatf("no slot after stop (%0d edges)", n_edges));
  endtask

  initial begin
    tdm_cfg_t c;
    foreach (mem[i]) mem[i] = DAC_W'($urandom);
    cfg = CFG_DEFAULT;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    c = CFG_DEFAULT;
    c.last_frame = 1;
    run(c, 2);
    c.slot_cyc = 13; c.settle_cyc = 8; c.on_cyc = 3;
    c.last_ch = 4; c.last_frame = 2;
    run(c, 7);
    check(n_launch >= n_edges, "launches cover all slots");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
