`timescale 1ps/1ps
// Simon 32/64 datapath: the two 16-bit state halves and one round of logic.
//
// Datapath Left holds x and Datapath Right holds y. Every pulse in Run mode
// performs one complete Feistel round,
//   x <= y ^ f(x) ^ k,   y <= x,   f(x) = (x <<< 1 & x <<< 8) ^ (x <<< 2),
// so a 32-round encryption takes 32 pulses after the load pulse. In Load mode
// the halves take the plaintext: data_in[31:16] into Left, data_in[15:0] into
// Right. The ciphertext is {Left, Right}.
//
// Interface: clk is the pulsed clock; load selects the plaintext; round_key is
// the key word of the current round, from the key expansion; data_out is the
// current state, valid TDQ ps after each pulse.
//
// The two registers, their Load/Run multiplexers, the wiring of Left into Right
// and of the round logic back into Left follow the engine's block diagram. How
// the 32-bit input is split over the two halves is this design's choice, made
// to match the Simon word order (x is the high word).
//
// Lint tools report a combinational loop from the register outputs through
// the round logic back to the latch inputs. The loop is real and intended: it
// is closed only while the pulsed latches are transparent, and a pulse shorter
// than the cell's D-to-Q delay lets exactly one value through (see simon_mbpl).
module simon_datapath
  import simon_pkg::*;
#(
  parameter int unsigned TDQ = 600   // cell D-to-Q delay in ps (assumed)
) (
  input  logic        clk,
  input  logic        load,
  input  logic [31:0] data_in,
  input  word_t       round_key,
  output logic [31:0] data_out
);

  word_t left_q, right_q, left_next;

  // Round logic.
  assign left_next = right_q ^ simon_f(left_q) ^ round_key;

  simon_reg16 #(.TDQ(TDQ)) u_left (
    .clk(clk), .load(load), .load_val(data_in[31:16]), .run_val(left_next), .q(left_q)
  );

  simon_reg16 #(.TDQ(TDQ)) u_right (
    .clk(clk), .load(load), .load_val(data_in[15:0]), .run_val(left_q), .q(right_q)
  );

  assign data_out = {left_q, right_q};

endmodule
