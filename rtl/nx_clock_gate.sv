// nx_clock_gate: clock gate unit of NX-CGRA (one per core and one per subsystem part).
//
// A standard integrated clock gate: the enable is captured by a latch that is transparent
// while the clock is low, and the clock is ANDed with the latched enable, so the gated clock
// never glitches and a change of enable takes effect at the next rising edge. test_en forces
// the clock on (scan). The published design names a clock gate unit in each PE, each MOB and
// next to the context memory and the execution controller, without giving its circuit; this
// latch-and-AND cell is the usual choice, and a technology ICG cell would replace it in a
// real flow. The latch is intended and is the only one in the design.
module nx_clock_gate (
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
