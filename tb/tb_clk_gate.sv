// tb_clk_gate: counts gated clock pulses while the enable is on and off,
// and checks that an enable change while the clock is high cannot cut or
// start a pulse (no glitch).
module tb_clk_gate;
  logic clk = 0, en = 0;
  always #5 clk = ~clk;
  logic clk_out;

  clk_gate dut (.clk_in(clk), .en, .clk_out);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int pulses = 0;
  always @(posedge clk_out) pulses++;

  initial begin
    @(negedge clk); en = 0;
    repeat (5) @(negedge clk);
    check(pulses == 0, "no pulses while disabled");
    en = 1;
    repeat (10) @(negedge clk);
    check(pulses == 10, $sformatf("10 pulses while enabled, got %0d", pulses));
    // drop the enable in the middle of a high phase: the pulse completes
    @(posedge clk); #2 en = 0;
    #1 check(clk_out == 1, "pulse not cut by enable falling");
    @(negedge clk); #1 check(clk_out == 0, "low after the pulse");
    pulses = 0;
    repeat (5) @(negedge clk);
    check(pulses == 0, "gated off");
    // raise the enable while high: no pulse until the next cycle
    @(posedge clk); #2 en = 1;
    #1 check(clk_out == 0, "no partial pulse on enable rising");
    @(posedge clk); #1 check(clk_out == 1, "running again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
