`timescale 1ps/1ps
// 16-bit state register with a Load/Run input multiplexer.
//
// This is the building block that every state word of the engine uses: the two
// datapath halves and the four key words. A two-way multiplexer selects the
// value to be captured, load_val while load is high, run_val (the next-round
// value) otherwise, and two 8-bit pulsed latch cells store it. There is no hold
// path and no enable: in Run mode the register takes a new value on every
// clock pulse, exactly as the multiplexer-and-register drawing of the engine
// shows; to freeze the state, stop the pulses.
//
// Interface: clk is the pulsed clock; load selects load_val; q is the stored
// word, valid TDQ ps after each pulse.
//
// The multiplexer and the 16-bit width follow the engine's organisation; the
// split into two cells follows from its 8-bit latch cell.
module simon_reg16
  import simon_pkg::*;
#(
  parameter int unsigned TDQ = 600   // cell D-to-Q delay in ps (assumed)
) (
  input  logic  clk,
  input  logic  load,
  input  word_t load_val,
  input  word_t run_val,
  output word_t q
);

  word_t d;
  assign d = load ? load_val : run_val;

  simon_mbpl #(.WIDTH(8), .TDQ(TDQ)) u_lo (.ext_clk(clk), .d(d[7:0]),  .q(q[7:0]));
  simon_mbpl #(.WIDTH(8), .TDQ(TDQ)) u_hi (.ext_clk(clk), .d(d[15:8]), .q(q[15:8]));

endmodule
