`timescale 1ps/1ps
// Test of the Simon 32/64 key expansion.
//
// Loads a key, then supplies z0[i] on pulse i; before each round i the round
// key output must equal the reference round key k[i], for i = 0..31. Run for
// the known-answer key and random keys.
module tb_simon_keyexp;
  import simon_pkg::*;
  import simon_ref_pkg::*;

  localparam int PERIOD = 2257;

  logic        clk = 1'b0, load, z;
  logic [63:0] key_in;
  word_t       rk;
  int checks = 0, failures = 0;

  simon_keyexp dut (.clk(clk), .load(load), .key_in(key_in), .z(z), .round_key(rk));

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
    #(PERIOD / 8);
    clk = 1'b0;
    #(PERIOD - PERIOD / 2 - PERIOD / 8);
  endtask

  task automatic run(logic [63:0] key);
    load   = 1'b1;
    key_in = key;
    z      = 1'($urandom);
    pulse();
    load   = 1'b0;
    key_in = {$urandom, $urandom};
    for (int i = 0; i < 32; i++) begin
      check(rk == simon_ref_pkg::round_key(key, i),
            $sformatf("round key %0d: %04h expected %04h", i, rk, simon_ref_pkg::round_key(key, i)));
      z = z0_bit(i);
      pulse();
    end
  endtask

  initial begin
    run(64'h1918111009080100);
    repeat (10) run({$urandom, $urandom});
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
