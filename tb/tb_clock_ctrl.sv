// tb_clock_ctrl: checks the clock tree control block.
//
// The four source clocks run at different periods (clkpll 4, clkpll0 6,
// clkpll1 8, CLK_IN_EXT 10 time units), so the period of each output tells
// which source and ratio reach it. The test checks the reset values (external
// clock selected), switching to the PLL, a core divider, a core clock gate,
// a tile reset setter, the uncore and front bus dividers, the debug selector
// and CLK_OUT divider and enable, the PLL registers and lock bit, and the
// release of the domain resets three edges after resetn rises.
module tb_clock_ctrl;
  import nectar_pkg::*;

  logic clkpll = 0, clkpll0 = 0, clkpll1 = 0, clk_ext = 0, resetn = 0, pll_lock = 0;
  always #2 clkpll  = ~clkpll;
  always #3 clkpll0 = ~clkpll0;
  always #4 clkpll1 = ~clkpll1;
  always #5 clk_ext = ~clk_ext;

  mmio_req_t mreq = '0;
  mmio_rsp_t mrsp;
  logic [31:0] pll_ctrl, pll_cfg;
  logic [3:0] tile_clk, tile_rst;
  logic uncore_clk, uncore_rst, fbus_clk, fbus_rst, clk_out, chip_rst;

  clock_ctrl dut (.resetn, .clkpll, .clkpll0, .clkpll1, .clk_in_ext(clk_ext), .pll_lock,
                  .pll_ctrl, .pll_cfg, .mmio_clk(clk_ext), .mmio_req(mreq), .mmio_rsp(mrsp),
                  .tile_clk, .tile_rst, .uncore_clk, .uncore_rst, .fbus_clk, .fbus_rst,
                  .clk_out, .chip_rst);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // rising edges of the 7 outputs: 0-3 cores, 4 uncore, 5 front bus, 6 CLK_OUT
  logic [6:0] outs;
  assign outs = {clk_out, fbus_clk, uncore_clk, tile_clk};
  realtime last [7], per [7];
  int      edges [7];
  for (genvar i = 0; i < 7; i++) begin : g_mon
    always @(posedge outs[i]) begin
      per[i] = $realtime - last[i];
      last[i] = $realtime;
      edges[i]++;
    end
  end
  initial for (int i = 0; i < 7; i++) begin last[i] = 0; per[i] = 0; edges[i] = 0; end

  task automatic wr(input logic [11:0] addr, input logic [63:0] data);
    @(negedge clk_ext); mreq = '{valid: 1, write: 1, addr: addr, wdata: data};
    @(negedge clk_ext); mreq = '0;
  endtask
  task automatic rdreg(input logic [11:0] addr, output logic [63:0] data);
    @(negedge clk_ext); mreq = '{valid: 1, write: 0, addr: addr, wdata: 0};
    @(negedge clk_ext); mreq = '0; data = mrsp.rdata;
  endtask

  task automatic settle(); #200; endtask

  logic [63:0] d;

  initial begin
    #23;
    check(chip_rst && tile_rst == 4'hf && uncore_rst && fbus_rst, "all domains in reset");
    resetn = 1;
    // three edges of the external clock (period 10) release the domains
    #21 check(uncore_rst == 1, "uncore still in reset after two edges");
    #20 check(tile_rst == 4'h0 && !uncore_rst && !fbus_rst, "domains released");
    settle();
    for (int i = 0; i < 6; i++) check(per[i] == 10.0, $sformatf("out %0d on CLK_IN_EXT: %0t", i, per[i]));
    check(edges[6] == 0, "CLK_OUT off at reset");

    wr(12'h000, 0);                    // select clkpll
    settle();
    for (int i = 0; i < 6; i++) check(per[i] == 4.0, $sformatf("out %0d on clkpll: %0t", i, per[i]));

    wr(12'h028, 3);                    // core 1 divide by 3
    wr(12'h080, 2);                    // uncore divide by 2
    wr(12'h088, 5);                    // front bus divide by 5
    wr(12'h050, 0);                    // gate core 2
    settle();
    check(per[1] == 12.0, $sformatf("core 1 /3: %0t", per[1]));
    check(per[4] == 8.0,  $sformatf("uncore /2: %0t", per[4]));
    check(per[5] == 20.0, $sformatf("front bus /5: %0t", per[5]));
    begin
      int e2;
      e2 = edges[2];
      settle();
      check(edges[2] == e2, "core 2 gated");
    end
    wr(12'h050, 1);
    settle();
    check(per[2] == 4.0, "core 2 running again");

    wr(12'h078, 1);                    // hold core 3 in reset
    #2 check(tile_rst[3] == 1 && tile_rst[2:0] == 3'b000, "tile reset setter holds core 3");
    wr(12'h078, 0);
    settle();
    check(tile_rst[3] == 0, "core 3 released");

    wr(12'h008, 2);                    // debug: clkpll1 (period 8)
    wr(12'h018, 2);                    // divide by 2
    wr(12'h010, 1);                    // enable CLK_OUT
    settle();
    check(per[6] == 16.0, $sformatf("CLK_OUT clkpll1/2: %0t", per[6]));
    wr(12'h008, 1);                    // clkpll0 (period 6)
    settle();
    check(per[6] == 12.0, $sformatf("CLK_OUT clkpll0/2: %0t", per[6]));
    wr(12'h010, 0);
    begin
      int e6;
      #20 e6 = edges[6];
      settle();
      check(edges[6] == e6, "CLK_OUT disabled");
    end

    wr(12'h100, 64'h1234_5678);
    wr(12'h108, 64'h0000_00a5);
    check(pll_ctrl == 32'h1234_5678 && pll_cfg == 32'ha5, "PLL words reach the PLL");
    pll_lock = 1;
    rdreg(12'h110, d);
    check(d == 64'd1, "PLL lock readable");
    rdreg(12'h028, d);
    check(d == 64'd3, "divider readback");

    resetn = 0;
    #1 check(tile_rst == 4'hf && uncore_rst && fbus_rst, "resetn resets at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
