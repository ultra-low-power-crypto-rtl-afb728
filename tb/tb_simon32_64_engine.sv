`timescale 1ps/1ps
// End-to-end test of the Simon 32/64 engine at its default parameters.
//
// The engine is clocked with a pulsed clock of period 2257 ps (443 MHz) whose
// high phase is set to 10%, 17% or 24% of the period. The test checks the
// published known-answer vector, then random plaintext/key pairs against the
// reference model, each block's latency (done exactly 32 pulses after start),
// the one-cycle width of done, back-to-back blocks started in the done cycle,
// a restart while busy, and reset. In back-to-back chains it also checks the
// block rate: one block every 33 pulses (load plus 32 rounds). Each of these mechanisms is counted and a
// mechanism that never occurred is a failure.
module tb_simon32_64_engine;
  import simon_ref_pkg::*;

  localparam int PERIOD = 2257;

  logic        clk = 1'b0;
  logic        rst_n, start;
  logic [31:0] pt, ct;
  logic [63:0] key;
  logic [4:0]  round;
  logic        busy, done;
  int          width = PERIOD * 17 / 100;

  int checks = 0, failures = 0;
  int n_kat = 0, n_random = 0, n_b2b = 0, n_restart = 0, n_reset = 0;
  int n_duty10 = 0, n_duty24 = 0, n_rounds = 0;
  int n_pulses = 0, last_done = -1, n_interval = 0;
  bit chained = 1'b0;

  simon32_64_engine dut (
    .clk_pulse(clk), .rst_n(rst_n), .start(start), .plaintext(pt), .key(key),
    .ciphertext(ct), .round(round), .busy(busy), .done(done)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // One clock pulse; returns half a period after the rising edge, when the
  // outputs have settled and the inputs may change.
  task automatic pulse();
    #(PERIOD / 2);
    clk = 1'b1;
    #(width);
    clk = 1'b0;
    #(PERIOD - PERIOD / 2 - width);
    n_pulses++;
    if (busy) n_rounds++;
  endtask

  // Load a block on the next pulse.
  task automatic start_block(logic [31:0] p, logic [63:0] k);
    pt    = p;
    key   = k;
    start = 1'b1;
    pulse();
    start = 1'b0;
    pt    = $urandom;   // inputs are only read on the start pulse
    key   = {$urandom, $urandom};
    check(busy && !done && round == 0, "busy after start");
  endtask

  // Wait for done after start_block; checks latency and result.
  task automatic wait_done(logic [31:0] exp);
    int cycles = 0;
    while (!done && cycles < 40) begin
      pulse();
      cycles++;
    end
    check(cycles == 32, $sformatf("latency %0d pulses, expected 32", cycles));
    check(ct == exp, $sformatf("ct %08h expected %08h", ct, exp));
    // In a back-to-back chain one block takes 33 pulses: load + 32 rounds.
    if (chained && last_done >= 0) begin
      check(n_pulses - last_done == 33, $sformatf("block interval %0d pulses, expected 33", n_pulses - last_done));
      n_interval++;
    end
    last_done = n_pulses;
    if (ct == exp && width == PERIOD * 10 / 100) n_duty10++;
    if (ct == exp && width == PERIOD * 24 / 100) n_duty24++;
  endtask

  // One block on its own: start, wait, then check that done lasts one cycle.
  task automatic run_block(logic [31:0] p, logic [63:0] k);
    start_block(p, k);
    wait_done(encrypt(p, k));
    pulse();
    check(!done, "done lasts one cycle");
  endtask

  initial begin
    logic [31:0] p;
    logic [63:0] k;

    rst_n = 1'b0;
    start = 1'b0;
    pt    = '0;
    key   = '0;
    repeat (2) pulse();
    check(!busy && !done, "idle after reset");
    n_reset++;
    rst_n = 1'b1;
    pulse();

    // Known-answer vector of Simon 32/64.
    check(encrypt(32'h65656877, 64'h1918111009080100) == 32'hc69be9bb, "reference model KAT");
    start_block(32'h65656877, 64'h1918111009080100);
    wait_done(32'hc69be9bb);
    n_kat++;
    pulse();

    // Random blocks at 10%, 24% and 17% duty cycle: one on its own, then a
    // chain of back-to-back blocks each started in the previous done cycle.
    for (int d = 0; d < 3; d++) begin
      width = PERIOD * (d == 0 ? 10 : d == 1 ? 24 : 17) / 100;
      run_block($urandom, {$urandom, $urandom});
      n_random++;
      pulse();
      p = $urandom;
      k = {$urandom, $urandom};
      start_block(p, k);
      chained   = 1'b1;
      last_done = -1;
      for (int i = 0; i < 5; i++) begin
        wait_done(encrypt(p, k));
        n_random++;
        p = $urandom;
        k = {$urandom, $urandom};
        start_block(p, k);
        n_b2b++;
      end
      wait_done(encrypt(p, k));
      n_random++;
      chained = 1'b0;
    end

    // Restart while busy: a new start after 10 rounds discards the old block.
    width = PERIOD * 17 / 100;
    start_block($urandom, {$urandom, $urandom});
    repeat (10) pulse();
    check(busy && round == 10, "ten rounds done");
    p = $urandom;
    k = {$urandom, $urandom};
    run_block(p, k);
    n_restart++;

    // Reset in the middle of a block.
    start_block($urandom, {$urandom, $urandom});
    repeat (5) pulse();
    rst_n = 1'b0;
    pulse();
    check(!busy && !done, "reset aborts block");
    rst_n = 1'b1;
    repeat (40) begin
      pulse();
      check(!done, "no done after aborted block");
    end
    n_reset++;

    check(n_kat > 0, "known-answer vector ran");
    check(n_random > 0, "random blocks ran");
    check(n_b2b > 0, "back-to-back blocks ran");
    check(n_restart > 0, "restart while busy ran");
    check(n_reset > 1, "reset ran");
    check(n_duty10 > 0, "10% duty cycle blocks ran");
    check(n_duty24 > 0, "24% duty cycle blocks ran");
    check(n_rounds > 0, "rounds counted");
    check(n_interval > 0, "back-to-back block interval measured");
    $display("mechanisms: kat=%0d random=%0d back_to_back=%0d restart=%0d reset=%0d duty10=%0d duty24=%0d round_pulses=%0d intervals=%0d",
             n_kat, n_random, n_b2b, n_restart, n_reset, n_duty10, n_duty24, n_rounds, n_interval);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(PERIOD * 2000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
