// electrode_ctrl_fpga_tb: the 8-unit FPGA logic at its default size.
// Every unit gets its own random samples (written through the shared host
// port with wr_unit selecting the unit). After one sync pulse the testbench
// checks, per unit and from the pins alone:
//   - the code each DAC samples before a switch window is the offset-binary
//     form of the sample written for that unit, frame and channel, so writes
//     reach only the addressed unit;
//   - all 8 units clock their DACs and open their windows in the same
//     cycles (lock step after the shared sync);
//   - the pin count per unit is 16 data + 1 clock + 7 select = 24, and
//     8 units use 192 pins, within a 200-I/O FPGA.
module electrode_ctrl_fpga_tb;
  import tdm_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int U = N_UNITS;

  logic clk = 1'b0, rst_n = 1'b0;
  tdm_cfg_t cfg;
  logic enable = 1'b0, sync_in = 1'b0;
  logic [$clog2(U)-1:0] wr_unit = '0;
  wave_wr_t wr;
  logic [DAC_W-1:0] dac_data [U];
  logic dac_clk [U];
  logic [SEL_W-1:0] sel [U];
  logic [U-1:0] running;
  logic frame_start;
  logic [FRAME_W-1:0] frame;

  logic [DAC_W-1:0] ref_mem [U][2][N_CH];
  int checks = 0, failures = 0;

  always #1.25 clk = ~clk;

  electrode_ctrl_fpga dut (.*);

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

  logic [DAC_W-1:0] latched [U];
  logic dac_clk_q [U];
  logic [SEL_W-1:0] sel_q [U];
  int n_win [U];

  always @(posedge clk) begin
    if (rst_n) begin
      for (int u = 0; u < U; u++) begin
        if (dac_clk[u] && !dac_clk_q[u]) latched[u] = dac_data[u];
        if (sel[u] != '1 && sel_q[u] == '1) begin
          automatic int ch = n_win[u] % N_CH;
          automatic int fr = (n_win[u] / N_CH) % 2;
          check(sel[u] == SEL_W'(ch), $sformatf("unit %0d channel", u));
          check(latched[u] == (ref_mem[u][fr][ch] ^ 16'h8000),
                $sformatf("unit %0d ch %0d fr %0d code", u, ch, fr));
          n_win[u]++;
        end
        check(dac_clk[u] == dac_clk[0] && sel[u] == sel[0] && running[u] == running[0],
              $sformatf("unit %0d in lock step", u));
      end
    end
    for (int u = 0; u < U; u++) begin
      dac_clk_q[u] <= dac_clk[u];
      sel_q[u] <= sel[u];
    end
  end

  initial begin
    for (int u = 0; u < U; u++) begin
      n_win[u] = 0; dac_clk_q[u] = 1'b0; sel_q[u] = '1; latched[u] = '0;
    end
    wr = '0;
    cfg = CFG_DEFAULT;
    cfg.last_frame = 1;
    check($bits(dac_data[0]) + 1 + $bits(sel[0]) == 24, "24 pins per unit");
    check(U * 24 <= 200, "units fit 200 I/O");
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int u = 0; u < U; u++)
      for (int f = 0; f < 2; f++)
        for (int c = 0; c < N_CH; c++) begin
          @(negedge clk);
          wr_unit = $bits(wr_unit)'(u);
          wr.en = 1'b1; wr.frame = FRAME_W'(f); wr.ch = SEL_W'(c);
          wr.sample = DAC_W'($urandom);
          ref_mem[u][f][c] = wr.sample;
        end
    @(negedge clk); wr.en = 1'b0;
    enable = 1'b1; sync_in = 1'b1;
    @(negedge clk); sync_in = 1'b0;
    while (n_win[0] < 3 * N_CH) @(negedge clk);
    enable = 1'b0;
    repeat (30) @(negedge clk);
    for (int u = 0; u < U; u++) check(n_win[u] == 3 * N_CH, "window count per unit");
    check(running == '0, "all stopped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
