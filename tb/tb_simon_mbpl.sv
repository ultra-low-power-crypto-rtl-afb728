`timescale 1ps/1ps
// Test of the multi-bit pulsed latch cell.
//
// Checks that the cell holds while the clock is low, is transparent while it
// is high (a change of d during a long high phase reaches q), delays q by TDQ,
// and, in a loop q -> q + 1 -> d, advances exactly once per pulse for pulses
// of 10% and 24% of a 2257 ps period, while a pulse longer than TDQ lets the
// value race through more than once (the hold limit of a pulsed latch).
module tb_simon_mbpl;

  localparam int TDQ = 600;

  logic       clk = 1'b0;
  logic [7:0] d, q, d_loop, q_loop;
  logic       clk_loop = 1'b0;
  int checks = 0, failures = 0;

  simon_mbpl #(.WIDTH(8), .TDQ(TDQ)) dut (.ext_clk(clk), .d(d), .q(q));

  // Second instance in a counting loop.
  assign d_loop = q_loop + 8'd1;
  simon_mbpl #(.WIDTH(8), .TDQ(TDQ)) dut_loop (.ext_clk(clk_loop), .d(d_loop), .q(q_loop));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic loop_pulses(int n, int width, output logic [7:0] v0, output logic [7:0] v1);
    #1000;
    v0 = q_loop;
    repeat (n) begin
      clk_loop = 1'b1;
      #(width);
      clk_loop = 1'b0;
      #(2257 - width);
    end
    #1000;
    v1 = q_loop;
  endtask

  initial begin
    logic [7:0] v, b, a, prev;
    prev = '0;

    // Capture on a short pulse, q after TDQ.
    for (int i = 0; i < 20; i++) begin
      v = 8'($urandom);
      if (i > 0 && v == prev) v = ~v;
      d = v;
      #1000;
      clk = 1'b1;
      #300;
      clk = 1'b0;
      d = ~v;                        // change after the pulse: must be ignored
      #(TDQ - 300 - 10);
      if (i > 0) check(q == prev, "q keeps old value before TDQ");
      #20;
      check(q == v, $sformatf("capture %02h got %02h", v, q));
      #2000;
      check(q == v, "hold while clock low");
      prev = v;
    end

    // Exact D-to-Q delay: q still old 1 ps before TDQ, new 1 ps after.
    d = 8'h00;
    clk = 1'b1; #300; clk = 1'b0; #2000;
    d = 8'hA5;
    clk = 1'b1;
    #(TDQ - 1);
    check(q == 8'h00, "q unchanged before TDQ");
    #2;
    check(q == 8'hA5, "q changed after TDQ");
    // Transparent while high: a change of d inside the pulse passes through.
    d = 8'h3C;
    #(TDQ + 10);
    check(q == 8'h3C, "transparent while clock high");
    clk = 1'b0;
    d = 8'hFF;
    #2000;
    check(q == 8'h3C, "closed after clock falls");

    // Counting loop: one step per pulse at 10% and 24% duty.
    dut_loop.store = 8'd0;
    loop_pulses(16, 2257 * 10 / 100, b, a);
    check(8'(a - b) == 8'd16, $sformatf("10%% duty: %0d steps for 16 pulses", 8'(a - b)));
    loop_pulses(16, 2257 * 24 / 100, b, a);
    check(8'(a - b) == 8'd16, $sformatf("24%% duty: %0d steps for 16 pulses", 8'(a - b)));
    // Pulse longer than TDQ: races through.
    loop_pulses(4, 3 * TDQ / 2 + 100, b, a);
    check(8'(a - b) > 8'd4, $sformatf("wide pulse: %0d steps for 4 pulses", 8'(a - b)));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
