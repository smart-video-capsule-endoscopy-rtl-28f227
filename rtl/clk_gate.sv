// clk_gate -- latch-based integrated clock gate.
//
// The SoC saves energy by stopping the clock of blocks that are idle; this
// cell stops the accelerator and its interim SRAM between inferences, and each
// L2 bank in every cycle in which it is not accessed. The
// enable is captured by a latch that is transparent while the clock is low,
// so clk_o can only start or stop on a falling edge and never glitches.
// test_en_i forces the clock on. In silicon this is the library's clock-gate
// cell; the latch below is deliberate and is its behaviour.
//
// Timing: if en_i is high before the rising edge of clk_i, that clock pulse
// appears on clk_o.
module clk_gate (
  input  logic clk_i,
  input  logic en_i,
  input  logic test_en_i,
  output logic clk_o
);

  logic en_latched;

  always_latch begin
    if (!clk_i) en_latched = en_i | test_en_i;
  end

  assign clk_o = clk_i & en_latched;

endmodule
