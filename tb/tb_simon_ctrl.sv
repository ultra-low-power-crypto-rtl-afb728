`timescale 1ps/1ps
// Test of the round controller.
//
// Checks reset, that start drives load combinationally, the round count and
// the z0 bit of every round, busy for exactly 32 pulses after start, done for
// exactly one pulse after that, back-to-back start in the done cycle, restart
// while busy and reset while busy.
module tb_simon_ctrl;
  import simon_pkg::*;
  import simon_ref_pkg::*;

  localparam int PERIOD = 2257;

  logic       clk = 1'b0, rst_n, start, load, z, busy, done;
  logic [4:0] round;
  int checks = 0, failures = 0;

  simon_ctrl dut (.clk(clk), .rst_n(rst_n), .start(start), .load(load), .z(z),
                  .round(round), .busy(busy), .done(done));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic pulse();
    #(PERIOD / 2);
    clk = 1'b1;
    #(PERIOD / 5);
    clk = 1'b0;
    #(PERIOD - PERIOD / 2 - PERIOD / 5);
  endtask

  // From a start pulse: 32 busy rounds with correct count and z, then done.
  task automatic rounds_then_done();
    for (int i = 0; i < 32; i++) begin
      check(busy && !done && round == 5'(i), $sformatf("round %0d: busy=%0b round=%0d", i, busy, round));
      check(z == z0_bit(i), $sformatf("z of round %0d", i));
      check(!load, "load low while running");
      pulse();
    end
    check(done && !busy, "done after 32 rounds");
  endtask

  initial begin
    rst_n = 1'b0;
    start = 1'b0;
    repeat (2) pulse();
    check(!busy && !done, "reset");
    rst_n = 1'b1;
    pulse();
    check(!busy && !done, "idle");

    start = 1'b1;
    #1;
    check(load, "load follows start");
    pulse();
    start = 1'b0;
    rounds_then_done();
    pulse();
    check(!done && !busy, "done for one pulse");
    repeat (5) begin
      pulse();
      check(!done && !busy, "stays idle");
    end

    // Back-to-back: start in the done cycle.
    start = 1'b1;
    pulse();
    start = 1'b0;
    rounds_then_done();
    start = 1'b1;
    pulse();
    start = 1'b0;
    rounds_then_done();
    pulse();

    // Restart while busy.
    start = 1'b1;
    pulse();
    start = 1'b0;
    repeat (7) pulse();
    check(busy && round == 5'd7, "seven rounds");
    start = 1'b1;
    pulse();
    start = 1'b0;
    rounds_then_done();

    // Reset while busy.
    start = 1'b1;
    pulse();
    start = 1'b0;
    repeat (3) pulse();
    rst_n = 1'b0;
    pulse();
    rst_n = 1'b1;
    check(!busy && !done, "reset while busy");
    repeat (40) begin
      pulse();
      check(!done, "no done after reset");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(PERIOD * 1000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
