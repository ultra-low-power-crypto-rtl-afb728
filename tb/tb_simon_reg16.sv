`timescale 1ps/1ps
// Test of the 16-bit Load/Run register.
//
// Random load, load_val and run_val on every pulse; after each pulse q must
// equal the value selected by load, and between pulses q must not change.
module tb_simon_reg16;
  import simon_pkg::*;

  localparam int PERIOD = 2257;

  logic  clk = 1'b0, load;
  word_t load_val, run_val, q;
  int checks = 0, failures = 0, n_load = 0, n_run = 0;

  simon_reg16 dut (.clk(clk), .load(load), .load_val(load_val), .run_val(run_val), .q(q));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    word_t exp;
    for (int i = 0; i < 200; i++) begin
      load     = 1'($urandom);
      load_val = 16'($urandom);
      run_val  = 16'($urandom);
      if (load_val == run_val) run_val = ~load_val;
      exp = load ? load_val : run_val;
      #(PERIOD / 2);
      clk = 1'b1;
      #(PERIOD / 5);
      clk = 1'b0;
      load_val = ~load_val;   // changes after the pulse must not reach q
      run_val  = ~run_val;
      #(PERIOD - PERIOD / 2 - PERIOD / 5);
      check(q == exp, $sformatf("pulse %0d load=%0b q=%04h expected %04h", i, load, q, exp));
      if (load) n_load++; else n_run++;
    end
    check(n_load > 0 && n_run > 0, "both Load and Run exercised");
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
