// tb_clk_divider: checks the divider's output period and high time for
// ratios 0..7 and the pass-through for ratios 0 and 1, counting input
// clock edges between output rising edges.
module tb_clk_divider;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [7:0] div = 0;
  logic clk_out;

  clk_divider #(.W(8)) dut (.clk_in(clk), .rst, .div, .clk_out);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // time of output edges
  realtime t_rise = 0, t_prev_rise = 0, t_fall = 0;
  always @(posedge clk_out) begin t_prev_rise = t_rise; t_rise = $realtime; end
  always @(negedge clk_out) t_fall = $realtime;

  initial begin
    repeat (2) @(negedge clk); rst = 0;
    for (int n = 0; n < 8; n++) begin
      int eff;
      eff = (n <= 1) ? 1 : n;
      @(negedge clk); div = 8'(n);
      repeat (3 * eff + 4) @(negedge clk);
      @(posedge clk_out); @(posedge clk_out);
      #1;
      check(t_rise - t_prev_rise == 10.0 * eff,
            $sformatf("div %0d period %0t", n, t_rise - t_prev_rise));
      @(negedge clk_out); #1;
      check(t_fall - t_rise == ((n <= 1) ? 5.0 : 10.0 * (n / 2)),
            $sformatf("div %0d high time %0t", n, t_fall - t_rise));
    end
    // reset holds the divided output low
    div = 8'd4; rst = 1;
    repeat (4) @(negedge clk);
    check(clk_out == 0, "output low in reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
