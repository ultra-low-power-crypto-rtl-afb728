`timescale 1ps/1ps
// Round controller of the Simon 32/64 engine.
//
// It drives the Load/Run select shared by all six state registers, counts the
// 32 rounds, supplies the round constant bit z0[i] to the key expansion and
// tells the host when the state registers hold the ciphertext.
//
// Behaviour per clock pulse (the state sits in one pulsed latch cell, so it
// changes once per pulse like the rest of the engine):
//   rst_n low          : idle, nothing valid (synchronous reset)
//   start high         : load = 1, the registers take plaintext and key;
//                        round counter cleared, busy set
//   busy, round < 31   : one round, counter + 1
//   busy, round = 31   : last round, busy cleared, done set
//   otherwise          : done cleared
// done is therefore high for exactly one cycle, the one between the 32nd round
// pulse and the next pulse, and start may be raised in that cycle to load the
// next block, giving one block every 33 pulses. load is start itself, passed
// straight through, so the Load pulse coincides with the start request. start while busy restarts the
// engine on the new inputs. The engine's state registers have no hold path, so
// after done they keep running rounds on stale data until the next start; the
// host either captures the ciphertext while done is high or stops the pulses.
//
// Only the Load/Run select itself appears in the engine's block diagram; the
// counter, the start/busy/done handshake and the reset are this design's own.
//
// Lint tools report a combinational loop from the register outputs through
// the round logic back to the latch inputs. The loop is real and intended: it
// is closed only while the pulsed latches are transparent, and a pulse shorter
// than the cell's D-to-Q delay lets exactly one value through (see simon_mbpl).
module simon_ctrl
  import simon_pkg::*;
#(
  parameter int unsigned TDQ = 600   // cell D-to-Q delay in ps (assumed)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             load,
  output logic             z,
  output logic [CNT_W-1:0] round,
  output logic             busy,
  output logic             done
);

  typedef struct packed {
    logic [CNT_W-1:0] round;
    logic             busy;
    logic             done;
  } state_t;

  state_t st_q, st_d;

  always_comb begin
    st_d = st_q;
    if (!rst_n) begin
      st_d = '0;
    end else if (start) begin
      st_d.round = '0;
      st_d.busy  = 1'b1;
      st_d.done  = 1'b0;
    end else if (st_q.busy) begin
      st_d.round = st_q.round + 1'b1;
      if (st_q.round == CNT_W'(ROUNDS - 1)) begin
        st_d.busy = 1'b0;
        st_d.done = 1'b1;
      end
    end else begin
      st_d.done = 1'b0;
    end
  end

  simon_mbpl #(.WIDTH($bits(state_t)), .TDQ(TDQ)) u_state (
    .ext_clk(clk), .d(st_d), .q(st_q)
  );

  assign load  = start;
  assign z     = Z0[6'(st_q.round)];
  assign round = st_q.round;
  assign busy  = st_q.busy;
  assign done  = st_q.done;

  // The engine is never busy and done at once.
  a_busy_done : assert property (@(posedge clk) disable iff (!rst_n) !(busy && done));

endmodule
