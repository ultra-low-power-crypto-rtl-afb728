`timescale 1ps/1ps
// Multi-bit pulsed latch: WIDTH storage elements behind one shared clock
// buffer.
//
// The cell is the sequencing element of the whole engine. The external pulsed
// clock passes through a two-inverter buffer (ext_clk -> clkb -> clk_int) that
// all storage elements share; sharing it is what saves clock energy against
// single-bit latches. Each storage element is a level-sensitive latch that is
// transparent while clk_int is high and holds while it is low. Driven by a
// narrow pulse instead of a 50% clock, the latch takes one new value per pulse
// and behaves like an edge-triggered register whose capture window is the
// pulse.
//
// Interface: ext_clk is the pulsed clock; d is captured while it is high; q is
// the stored value.
//
// Timing: q follows the stored value after TDQ picoseconds, the cell's D-to-Q
// delay. A pulse captures exactly one value only if it is shorter than the
// shortest path from q back to d (hold constraint of a pulsed latch). In this
// model the logic around the latches has zero delay, so the pulse must be
// shorter than TDQ; TDQ is chosen so that the 10-24% duty cycle reported for
// the engine at 443 MHz (pulse of 226-542 ps) satisfies it. Synthesis ignores
// the delay and keeps the latches.
//
// The eight-bit width, the shared clock buffer and the latch-type storage
// element follow the cell described with the engine; the delay value is this
// model's choice. The latch is intended: it is the element the design is built
// on, and every loop through it is broken by the pulsed clock.
module simon_mbpl #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned TDQ   = 600   // D-to-Q delay in ps (assumed)
) (
  input  logic             ext_clk,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  // Shared clock buffer: two inverters, as in the cell.
  logic clkb, clk_int;
  assign clkb    = ~ext_clk;
  assign clk_int = ~clkb;

  // Storage elements M0..M(WIDTH-1), transparent while clk_int is high.
  logic [WIDTH-1:0] store;
  always_latch begin
    if (clk_int) store <= d;
  end

  assign #TDQ q = store;

endmodule
