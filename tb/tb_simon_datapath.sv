`timescale 1ps/1ps
// Test of the Simon 32/64 datapath.
//
// Loads a plaintext, then feeds the round keys of the reference key schedule
// one per pulse; after every pulse the state must equal the reference state
// after that many rounds. Run for the known-answer vector and random blocks.
module tb_simon_datapath;
  import simon_pkg::*;
  import simon_ref_pkg::*;

  localparam int PERIOD = 2257;

  logic        clk = 1'b0, load;
  logic [31:0] data_in, data_out;
  word_t       round_key;
  int checks = 0, failures = 0;

  simon_datapath dut (.clk(clk), .load(load), .data_in(data_in), .round_key(round_key),
                      .data_out(data_out));

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
    #(PERIOD / 6);
    clk = 1'b0;
    #(PERIOD - PERIOD / 2 - PERIOD / 6);
  endtask

  task automatic run(logic [31:0] pt, logic [63:0] key);
    load      = 1'b1;
    data_in   = pt;
    round_key = 16'($urandom);
    pulse();
    check(data_out == pt, "plaintext loaded");
    load    = 1'b0;
    data_in = $urandom;
    for (int i = 0; i < 32; i++) begin
      round_key = round_key_of(key, i);
      pulse();
      check(data_out == encrypt_rounds(pt, key, i + 1),
            $sformatf("round %0d: %08h expected %08h", i, data_out, encrypt_rounds(pt, key, i + 1)));
    end
  endtask

  function automatic word_t round_key_of(logic [63:0] key, int i);
    return simon_ref_pkg::round_key(key, i);
  endfunction

  initial begin
    run(32'h65656877, 64'h1918111009080100);
    check(data_out == 32'hc69be9bb, "known-answer ciphertext");
    repeat (10) run($urandom, {$urandom, $urandom});
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
