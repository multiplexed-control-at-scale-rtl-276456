// switch_decoder: the digital decoder in front of the channel switches.
//
// Turns the SEL_W select lines coming from the FPGA into N_CH switch enables,
// at most one of them high: sw_en[i] = 1 exactly when sel == i. Select codes
// from N_CH up to 2^SEL_W - 1 close no switch; the sequencer uses the
// all-ones code as its "no channel" (idle) code, so no extra enable line is
// needed and the FPGA spends only ceil(log2 N_CH) pins on the decoder, as in
// the paper's I/O count (7 lines for 100 channels).
// Purely combinational; on the board this is the decoder logic next to the
// switches, outside the FPGA.
// Paper: a decoder driven by ceil(log2 N) lines selecting one switch. Own
// choice: using unused codes as the all-off state.
module switch_decoder #(
  parameter int unsigned N_CH  = 100,
  parameter int unsigned SEL_W = $clog2(N_CH)
) (
  input  logic [SEL_W-1:0] sel,
  output logic [N_CH-1:0]  sw_en
);

  timeunit 1ns;
  timeprecision 1ps;

  always_comb begin
    for (int unsigned i = 0; i < N_CH; i++) begin
      sw_en[i] = (sel == SEL_W'(i));
    end
  end

  initial assert (N_CH <= (1 << SEL_W))
    else $error("SEL_W too narrow for N_CH");

endmodule
