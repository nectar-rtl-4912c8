// tb_reset_sync: checks that the reset output rises at once, between clock
// edges, when the input reset rises, and falls on the third clock edge after
// the input falls.
module tb_reset_sync;
  logic clk = 0, rst_in = 0;
  always #5 clk = ~clk;
  logic rst_out;

  reset_sync #(.STAGES(3)) dut (.clk, .rst_in, .rst_out);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    #1 rst_in = 1;
    #1 check(rst_out == 1, "asynchronous assertion");
    repeat (3) @(negedge clk);
    rst_in = 0;
    for (int e = 1; e <= 4; e++) begin
      @(posedge clk); #1;
      check(rst_out == (e < 3), $sformatf("edge %0d after release: rst_out %0d", e, rst_out));
    end
    // a short pulse between edges still resets the domain
    #1 rst_in = 1; #1 rst_in = 0;
    #1 check(rst_out == 1, "short pulse asserts");
    repeat (3) @(posedge clk); #1;
    check(rst_out == 0, "released after the pulse");
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
