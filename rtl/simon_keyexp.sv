`timescale 1ps/1ps
// Simon 32/64 key expansion: four 16-bit key registers and the key logic.
//
// The registers form a shift chain Key Reg 1 -> 2 -> 3 -> 4. Before round i
// they hold k[i+3], k[i+2], k[i+1], k[i] (Reg 1 newest, Reg 4 oldest). Reg 4
// is the round key of round i. On each Run pulse the key logic computes
//   tmp = (k[i+3] >>> 3) ^ k[i+1];  tmp ^= tmp >>> 1;
//   k[i+4] = ~k[i] ^ tmp ^ z ^ 3
// into Reg 1 while the other words move one register along. The key is thus
// expanded on the fly, one word per round, with no key storage beyond the
// four registers; the original key is consumed and must be loaded again with
// every block.
//
// Interface: clk is the pulsed clock; load takes key_in, whose words
// key_in[63:48], [47:32], [31:16], [15:0] are k3, k2, k1, k0 and go to
// Reg 1..4; z is the round constant bit z0[i] of the current round;
// round_key is k[i].
//
// The four registers, their multiplexers and the chain between them follow the
// engine's block diagram. Which register feeds the datapath, the key word order
// and the direction of the shift are this design's reading of it; the key
// logic is the published Simon schedule.
//
// Lint tools report a combinational loop from the register outputs through
// the round logic back to the latch inputs. The loop is real and intended: it
// is closed only while the pulsed latches are transparent, and a pulse shorter
// than the cell's D-to-Q delay lets exactly one value through (see simon_mbpl).
module simon_keyexp
  import simon_pkg::*;
#(
  parameter int unsigned TDQ = 600   // cell D-to-Q delay in ps (assumed)
) (
  input  logic        clk,
  input  logic        load,
  input  logic [63:0] key_in,
  input  logic        z,
  output word_t       round_key
);

  word_t kr1, kr2, kr3, kr4, k_new;

  // Key logic: kr4 = k[i], kr3 = k[i+1], kr1 = k[i+3].
  assign k_new = key_next(kr4, kr3, kr1, z);

  simon_reg16 #(.TDQ(TDQ)) u_kr1 (
    .clk(clk), .load(load), .load_val(key_in[63:48]), .run_val(k_new), .q(kr1)
  );
  simon_reg16 #(.TDQ(TDQ)) u_kr2 (
    .clk(clk), .load(load), .load_val(key_in[47:32]), .run_val(kr1), .q(kr2)
  );
  simon_reg16 #(.TDQ(TDQ)) u_kr3 (
    .clk(clk), .load(load), .load_val(key_in[31:16]), .run_val(kr2), .q(kr3)
  );
  simon_reg16 #(.TDQ(TDQ)) u_kr4 (
    .clk(clk), .load(load), .load_val(key_in[15:0]), .run_val(kr3), .q(kr4)
  );

  assign round_key = kr4;

endmodule
