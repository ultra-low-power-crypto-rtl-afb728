`timescale 1ps/1ps
// Simon 32/64 encryption engine, bit-parallel, one round per clock pulse.
//
// The engine encrypts a 32-bit block under a 64-bit key with the Simon 32/64
// block cipher. All 32 state bits are processed in parallel, so each of the 32
// rounds takes one pulse; the key is expanded on the fly alongside, one key
// word per round. The whole state (2 x 16 data bits, 4 x 16 key bits and the
// 7-bit controller state) is held in 8-bit pulsed latch cells clocked by an
// externally generated narrow pulse.
//
// Interface:
//   clk_pulse  pulsed clock (high phase 10-24% of the period at 443 MHz)
//   rst_n      synchronous reset, active low
//   start      load plaintext and key on this pulse and begin encrypting
//   plaintext  {x, y}, x in [31:16]
//   key        {k3, k2, k1, k0}, k0 in [15:0]
//   ciphertext {x, y} after 32 rounds, valid while done is high
//   round      rounds completed since start, modulo 32
//   busy       rounds in progress
//   done       one-cycle flag: ciphertext holds the result
// Timing: start on pulse 0, rounds on pulses 1..32, done high from pulse 32 to
// pulse 33; a new start may coincide with pulse 33, so one block every 33
// pulses. Outputs settle TDQ ps after a pulse.
//
// The datapath, the key expansion with four key registers, the Load/Run
// multiplexers and the 8-bit pulsed latch cells follow the published engine.
// The controller and the handshake are this design's own.
module simon32_64_engine
  import simon_pkg::*;
#(
  parameter int unsigned TDQ = 600   // cell D-to-Q delay in ps (assumed)
) (
  input  logic        clk_pulse,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] plaintext,
  input  logic [63:0] key,
  output logic [31:0] ciphertext,
  output logic [4:0]  round,
  output logic        busy,
  output logic        done
);

  logic             load, z;
  word_t            round_key;

  simon_ctrl #(.TDQ(TDQ)) u_ctrl (
    .clk(clk_pulse), .rst_n(rst_n), .start(start),
    .load(load), .z(z), .round(round), .busy(busy), .done(done)
  );

  simon_keyexp #(.TDQ(TDQ)) u_keyexp (
    .clk(clk_pulse), .load(load), .key_in(key), .z(z), .round_key(round_key)
  );

  simon_datapath #(.TDQ(TDQ)) u_datapath (
    .clk(clk_pulse), .load(load), .data_in(plaintext), .round_key(round_key),
    .data_out(ciphertext)
  );

endmodule
