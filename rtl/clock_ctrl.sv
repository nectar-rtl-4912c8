// clock_ctrl: clock and reset tree of the SoC with its control registers.
//
// The chip's reset pin resetn is inverted into one active-high reset. The
// main clock is selected by the `sel` register between the PLL output clkpll
// and the external clock CLK_IN_EXT. From it each of the four cores gets its
// own divider, then a clock gate, and a reset synchronizer on the gated clock
// whose input is the chip reset OR that core's tile reset setter bit. The
// uncore and the front bus each get a divider and a reset synchronizer. A
// second selector, `debug_sel`, picks one of clkpll, clkpll0, clkpll1 and
// CLK_IN_EXT, divides it and drives CLK_OUT when enabled. The PLL controller
// registers are passed to the PLL and its lock output can be read.
//
// Register map (byte offsets of 64-bit registers, reset value in brackets):
//   0x000 sel        0 = clkpll, 1 = CLK_IN_EXT                        [1]
//   0x008 debug_sel  0 clkpll, 1 clkpll0, 2 clkpll1, 3 CLK_IN_EXT       [0]
//   0x010 clk_out_en                                                   [0]
//   0x018 clk_out_div                                                  [1]
//   0x020 + 8i core i clock divider ratio                              [1]
//   0x040 + 8i core i clock gate enable                                [1]
//   0x060 + 8i core i tile reset setter (1 holds the core in reset)    [0]
//   0x080 uncore divider ratio                                         [1]
//   0x088 front bus divider ratio                                      [1]
//   0x100 PLL control word, 0x108 PLL configuration word               [0]
//   0x110 PLL lock (read only)
// A register write takes effect on the next mmio_clk edge; a read answers
// one cycle after the request.
//
// From the paper's clock figure: the inverted resetn, the PLL controller,
// the clkpll / clkpll0 / clkpll1 outputs, CLK_IN_EXT, the `sel` and
// `debug_sel` selectors set over MMIO, the per-core divider, clock gate,
// tile reset setter and reset synchronizer, the uncore and front bus
// dividers and synchronizers, and the CLK_OUT divider with its enable. This
// design's own choices: the register map and reset values, which clocks feed
// the main selector (the two whose lines the figure draws into it), plain
// combinational selectors (not glitch-free switches), the registers being
// clocked by mmio_clk, and the PLL words, whose fields the paper does not
// give, being passed through unchanged.
module clock_ctrl
  import nectar_pkg::*;
#(
  parameter int unsigned N_TILES = 4,
  parameter int unsigned DIV_W   = 8
) (
  input  logic               resetn,
  input  logic               clkpll,
  input  logic               clkpll0,
  input  logic               clkpll1,
  input  logic               clk_in_ext,
  input  logic               pll_lock,
  output logic [31:0]        pll_ctrl,
  output logic [31:0]        pll_cfg,
  // control registers
  input  logic               mmio_clk,
  input  mmio_req_t          mmio_req,
  output mmio_rsp_t          mmio_rsp,
  // clocks and resets of the domains
  output logic [N_TILES-1:0] tile_clk,
  output logic [N_TILES-1:0] tile_rst,
  output logic               uncore_clk,
  output logic               uncore_rst,
  output logic               fbus_clk,
  output logic               fbus_rst,
  output logic               clk_out,
  output logic               chip_rst
);

  logic                            sel;
  logic [1:0]                      debug_sel;
  logic                            clk_out_en;
  logic [DIV_W-1:0]                clk_out_div, uncore_div, fbus_div;
  logic [N_TILES-1:0][DIV_W-1:0]   tile_div;
  logic [N_TILES-1:0]              tile_en, tile_hold;

  assign chip_rst = !resetn;

  // ---------------- registers ----------------
  always_ff @(posedge mmio_clk or posedge chip_rst) begin
    if (chip_rst) begin
      sel         <= 1'b1;
      debug_sel   <= 2'd0;
      clk_out_en  <= 1'b0;
      clk_out_div <= DIV_W'(1);
      uncore_div  <= DIV_W'(1);
      fbus_div    <= DIV_W'(1);
      tile_div    <= {N_TILES{DIV_W'(1)}};
      tile_en     <= '1;
      tile_hold   <= '0;
      pll_ctrl    <= '0;
      pll_cfg     <= '0;
      mmio_rsp    <= '0;
    end else begin
      mmio_rsp.rvalid <= mmio_req.valid && !mmio_req.write;
      mmio_rsp.rdata  <= '0;
      if (mmio_req.valid && mmio_req.write) begin
        if (mmio_req.addr >= 12'h020 && mmio_req.addr < 12'h020 + 12'(8*N_TILES))
          tile_div[mmio_req.addr[4:3]] <= mmio_req.wdata[DIV_W-1:0];
        if (mmio_req.addr >= 12'h040 && mmio_req.addr < 12'h040 + 12'(8*N_TILES))
          tile_en[mmio_req.addr[4:3]] <= mmio_req.wdata[0];
        if (mmio_req.addr >= 12'h060 && mmio_req.addr < 12'h060 + 12'(8*N_TILES))
          tile_hold[mmio_req.addr[4:3]] <= mmio_req.wdata[0];
        unique case (mmio_req.addr)
          12'h000: sel         <= mmio_req.wdata[0];
          12'h008: debug_sel   <= mmio_req.wdata[1:0];
          12'h010: clk_out_en  <= mmio_req.wdata[0];
          12'h018: clk_out_div <= mmio_req.wdata[DIV_W-1:0];
          12'h080: uncore_div  <= mmio_req.wdata[DIV_W-1:0];
          12'h088: fbus_div    <= mmio_req.wdata[DIV_W-1:0];
          12'h100: pll_ctrl    <= mmio_req.wdata[31:0];
          12'h108: pll_cfg     <= mmio_req.wdata[31:0];
          default: ;
        endcase
      end else if (mmio_req.valid) begin
        if (mmio_req.addr >= 12'h020 && mmio_req.addr < 12'h020 + 12'(8*N_TILES))
          mmio_rsp.rdata <= 64'(tile_div[mmio_req.addr[4:3]]);
        else if (mmio_req.addr >= 12'h040 && mmio_req.addr < 12'h040 + 12'(8*N_TILES))
          mmio_rsp.rdata <= 64'(tile_en[mmio_req.addr[4:3]]);
        else if (mmio_req.addr >= 12'h060 && mmio_req.addr < 12'h060 + 12'(8*N_TILES))
          mmio_rsp.rdata <= 64'(tile_hold[mmio_req.addr[4:3]]);
        else
          unique case (mmio_req.addr)
            12'h000: mmio_rsp.rdata <= 64'(sel);
            12'h008: mmio_rsp.rdata <= 64'(debug_sel);
            12'h010: mmio_rsp.rdata <= 64'(clk_out_en);
            12'h018: mmio_rsp.rdata <= 64'(clk_out_div);
            12'h080: mmio_rsp.rdata <= 64'(uncore_div);
            12'h088: mmio_rsp.rdata <= 64'(fbus_div);
            12'h100: mmio_rsp.rdata <= 64'(pll_ctrl);
            12'h108: mmio_rsp.rdata <= 64'(pll_cfg);
            12'h110: mmio_rsp.rdata <= 64'(pll_lock);
            default: mmio_rsp.rdata <= '0;
          endcase
      end
    end
  end

  // ---------------- clock selection ----------------
  logic main_clk, debug_clk, clk_out_div_clk;

  always_comb begin
    main_clk = sel ? clk_in_ext : clkpll;
    unique case (debug_sel)
      2'd0: debug_clk = clkpll;
      2'd1: debug_clk = clkpll0;
      2'd2: debug_clk = clkpll1;
      default: debug_clk = clk_in_ext;
    endcase
  end

  clk_divider #(.W(DIV_W)) u_div_out (.clk_in(debug_clk), .rst(chip_rst),
                                       .div(clk_out_div), .clk_out(clk_out_div_clk));
  assign clk_out = clk_out_en & clk_out_div_clk;

  // ---------------- cores ----------------
  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    logic div_clk;
    clk_divider #(.W(DIV_W)) u_div (.clk_in(main_clk), .rst(chip_rst),
                                     .div(tile_div[t]), .clk_out(div_clk));
    clk_gate u_gate (.clk_in(div_clk), .en(tile_en[t]), .clk_out(tile_clk[t]));
    reset_sync u_rst (.clk(tile_clk[t]), .rst_in(chip_rst | tile_hold[t]),
                      .rst_out(tile_rst[t]));
  end

  // ---------------- uncore and front bus ----------------
  clk_divider #(.W(DIV_W)) u_div_uncore (.clk_in(main_clk), .rst(chip_rst),
                                          .div(uncore_div), .clk_out(uncore_clk));
  reset_sync u_rst_uncore (.clk(uncore_clk), .rst_in(chip_rst), .rst_out(uncore_rst));

  clk_divider #(.W(DIV_W)) u_div_fbus (.clk_in(main_clk), .rst(chip_rst),
                                        .div(fbus_div), .clk_out(fbus_clk));
  reset_sync u_rst_fbus (.clk(fbus_clk), .rst_in(chip_rst), .rst_out(fbus_rst));

endmodule
