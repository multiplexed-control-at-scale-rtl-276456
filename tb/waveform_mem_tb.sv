// waveform_mem_tb: fills the sample memory of one unit (256 frames x 128
// channel addresses) with random values, then reads every location back in
// random order and compares with a copy kept here. Also checks the one-cycle
// read latency, that rd_data holds when rd_en is low, and that a write and a
// read in the same cycle to different addresses do not disturb each other.
module waveform_mem_tb;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned DW = 16, SW = 7, FW = 8;
  localparam int unsigned DEPTH = 1 << (SW + FW);

  logic clk = 1'b0;
  logic wr_en = 1'b0, rd_en = 1'b0;
  logic [FW-1:0] wr_frame = '0, rd_frame = '0;
  logic [SW-1:0] wr_ch = '0, rd_ch = '0;
  logic [DW-1:0] wr_data = '0, rd_data;
  logic [DW-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  always #1.25 clk = ~clk;

  waveform_mem #(.DATA_W(DW), .SEL_W(SW), .FRAME_W(FW)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1'b1;
      {wr_frame, wr_ch} = (SW + FW)'(a);
      wr_data = DW'($urandom);
      ref_mem[a] = wr_data;
    end
    @(negedge clk); wr_en = 1'b0;
    for (int n = 0; n < 6000; n++) begin
      int unsigned a = $urandom_range(DEPTH - 1);
      int unsigned b = $urandom_range(DEPTH - 1);
      @(negedge clk);
      rd_en = 1'b1;
      {rd_frame, rd_ch} = (SW + FW)'(a);
      // concurrent write elsewhere
      wr_en = (b != a);
      {wr_frame, wr_ch} = (SW + FW)'(b);
      wr_data = DW'($urandom);
      @(posedge clk);
      if (wr_en) ref_mem[b] = wr_data;
      #0.1;
      checks++;
      if (rd_data !== ref_mem[a]) begin
        failures++;
        $display("addr %0d read %h expected %h", a, rd_data, ref_mem[a]);
      end
      @(negedge clk);
      rd_en = 1'b0; wr_en = 1'b0;
      {rd_frame, rd_ch} = (SW + FW)'(b);
      @(posedge clk); #0.1;
      checks++;
      if (rd_data !== ref_mem[a]) begin
        failures++;
        $display("rd_data changed without rd_en");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
