// clk_gate: glitch-free clock gate (latch plus AND), the usual integrated
// clock-gating cell.
//
// en_i is captured by a latch that is transparent while clk_i is low, so a
// change of en_i can only take effect at the next rising edge and never
// shortens a high phase. clk_o = clk_i & latched enable. The top level uses
// it to stop the PMCA's clock while trace buffers are drained, as the source
// describes; the cell itself is this design's choice (an FPGA build would
// use a BUFGCE clock buffer instead).
module clk_gate (
  input  logic clk_i,
  input  logic en_i,
  output logic clk_o
);
  logic en_l;
  always_latch begin
    if (!clk_i) en_l = en_i;
  end
  assign clk_o = clk_i & en_l;
endmodule
