// nectar_soc: the accelerator side of the NeCTAr SoC.
//
// This top level holds the blocks the chip adds around its four cores:
//  - the clock and reset tree (clock_ctrl), which makes a clock and reset
//    for each core, the uncore and the front bus;
//  - four near-memory compute engines (nmce), one beside each L2 bank, in
//    the uncore clock domain, each with a control-register port from the
//    peripheral bus and a read node and a write node towards its L2 bank;
//  - four sparse matrix accelerators (sparse_accel), one per core and in
//    that core's clock domain, with the core's RoCC port and a memory port
//    reached through a small TLB (sparse_tlb) that asks the core's page-table
//    walker for translations. The second variant also reads its sparse
//    elements through the core's L1 (sp_l1_* ports, virtual addresses, which
//    the L1's own TLB translates); for cores 0 and 1 those ports stay idle.
//    Cores 0 and 1 have the first variant (in-order, RS_DEPTH 1), cores 2 and
//    3 the second (reservation station of V2_RS_DEPTH entries);
//  - four best-offset L2 prefetchers (bop_prefetcher), one per core, which
//    watch that core's L2 traffic and issue prefetch requests;
//  - the 64 KB scratchpad on the memory bus, in the uncore domain.
// The cores, caches, L2 banks, the system NoC and the peripheral and memory
// crossbars, the peripherals, the serial TileLink port and the PLL are not
// part of this RTL; every signal that would meet one of them is a port of
// this module, in the clock domain named next to it.
module nectar_soc
  import nectar_pkg::*;
#(
  parameter int unsigned N_TILES     = 4,
  parameter int unsigned N_BANKS     = 4,
  parameter int unsigned V2_RS_DEPTH = 4,
  parameter int unsigned PF_LINE_W   = 26
) (
  // chip pins and PLL
  input  logic                     resetn,
  input  logic                     clk_in_ext,
  input  logic                     clkpll,
  input  logic                     clkpll0,
  input  logic                     clkpll1,
  input  logic                     pll_lock,
  output logic [31:0]              pll_ctrl,
  output logic [31:0]              pll_cfg,
  output logic                     clk_out,
  // clock tree registers (CLK_IN_EXT domain)
  input  mmio_req_t                clk_mmio_req,
  output mmio_rsp_t                clk_mmio_rsp,
  // domain clocks and resets
  output logic [N_TILES-1:0]       tile_clk,
  output logic [N_TILES-1:0]       tile_rst,
  output logic                     uncore_clk,
  output logic                     uncore_rst,
  output logic                     fbus_clk,
  output logic                     fbus_rst,
  // NMCE control registers and L2-bank nodes (uncore domain)
  input  mmio_req_t [N_BANKS-1:0]  nmce_mmio_req,
  output mmio_rsp_t [N_BANKS-1:0]  nmce_mmio_rsp,
  output logic [N_BANKS-1:0]       nmce_rd_a_valid,
  input  logic [N_BANKS-1:0]       nmce_rd_a_ready,
  output tl_a_t [N_BANKS-1:0]      nmce_rd_a,
  input  logic [N_BANKS-1:0]       nmce_rd_d_valid,
  output logic [N_BANKS-1:0]       nmce_rd_d_ready,
  input  tl_d_t [N_BANKS-1:0]      nmce_rd_d,
  output logic [N_BANKS-1:0]       nmce_wr_a_valid,
  input  logic [N_BANKS-1:0]       nmce_wr_a_ready,
  output tl_a_t [N_BANKS-1:0]      nmce_wr_a,
  input  logic [N_BANKS-1:0]       nmce_wr_d_valid,
  output logic [N_BANKS-1:0]       nmce_wr_d_ready,
  input  tl_d_t [N_BANKS-1:0]      nmce_wr_d,
  output logic [N_BANKS-1:0]       nmce_busy,
  // sparse accelerators: RoCC from the cores, memory port (core domains)
  input  logic [N_TILES-1:0]       sp_cmd_valid,
  output logic [N_TILES-1:0]       sp_cmd_ready,
  input  rocc_cmd_t [N_TILES-1:0]  sp_cmd,
  output logic [N_TILES-1:0]       sp_resp_valid,
  input  logic [N_TILES-1:0]       sp_resp_ready,
  output rocc_rsp_t [N_TILES-1:0]  sp_resp,
  output logic [N_TILES-1:0]       sp_busy,
  output logic [N_TILES-1:0]       sp_a_valid,
  input  logic [N_TILES-1:0]       sp_a_ready,
  output tl_a_t [N_TILES-1:0]      sp_a,
  input  logic [N_TILES-1:0]       sp_d_valid,
  output logic [N_TILES-1:0]       sp_d_ready,
  input  tl_d_t [N_TILES-1:0]      sp_d,
  // sparse accelerators: sparse-element port to the L1 (V2 cores only)
  output logic [N_TILES-1:0]       sp_l1_a_valid,
  input  logic [N_TILES-1:0]       sp_l1_a_ready,
  output tl_a_t [N_TILES-1:0]      sp_l1_a,
  input  logic [N_TILES-1:0]       sp_l1_d_valid,
  output logic [N_TILES-1:0]       sp_l1_d_ready,
  input  tl_d_t [N_TILES-1:0]      sp_l1_d,
  // sparse accelerators: address translation (core domains)
  input  logic [N_TILES-1:0]         sp_vm_en,
  input  logic [N_TILES-1:0]         sp_tlb_flush,
  output logic [N_TILES-1:0]         sp_ptw_req_valid,
  input  logic [N_TILES-1:0]         sp_ptw_req_ready,
  output logic [N_TILES-1:0][26:0]   sp_ptw_req_vpn,
  input  logic [N_TILES-1:0]         sp_ptw_resp_valid,
  input  logic [N_TILES-1:0][43:0]   sp_ptw_resp_ppn,
  // prefetchers: L2 access and fill events in, prefetches out (core domains)
  input  logic [N_TILES-1:0]                 pf_acc_valid,
  input  logic [N_TILES-1:0][PF_LINE_W-1:0]  pf_acc_line,
  input  logic [N_TILES-1:0]                 pf_fill_valid,
  input  logic [N_TILES-1:0][PF_LINE_W-1:0]  pf_fill_line,
  input  logic [N_TILES-1:0]                 pf_fill_pf,
  output logic [N_TILES-1:0]                 pf_valid,
  input  logic [N_TILES-1:0]                 pf_ready,
  output logic [N_TILES-1:0][PF_LINE_W-1:0]  pf_line,
  output logic [N_TILES-1:0][8:0]            pf_best_offset,
  output logic [N_TILES-1:0]                 pf_on,
  output logic [N_TILES-1:0]                 pf_phase_end,
  // scratchpad on the memory bus (uncore domain)
  input  logic                     spad_a_valid,
  output logic                     spad_a_ready,
  input  tl_a_t                    spad_a,
  output logic                     spad_d_valid,
  input  logic                     spad_d_ready,
  output tl_d_t                    spad_d,
  output logic                     chip_rst
);

  // ---------------- clock and reset tree ----------------
  clock_ctrl #(.N_TILES(N_TILES)) u_clock_ctrl (
    .resetn, .clkpll, .clkpll0, .clkpll1, .clk_in_ext, .pll_lock, .pll_ctrl, .pll_cfg,
    .mmio_clk(clk_in_ext), .mmio_req(clk_mmio_req), .mmio_rsp(clk_mmio_rsp),
    .tile_clk, .tile_rst, .uncore_clk, .uncore_rst, .fbus_clk, .fbus_rst, .clk_out, .chip_rst);

  // ---------------- near-memory compute engines ----------------
  for (genvar b = 0; b < N_BANKS; b++) begin : g_nmce
    nmce u_nmce (
      .clk(uncore_clk), .rst(uncore_rst),
      .mmio_req(nmce_mmio_req[b]), .mmio_rsp(nmce_mmio_rsp[b]),
      .rd_a_valid(nmce_rd_a_valid[b]), .rd_a_ready(nmce_rd_a_ready[b]), .rd_a(nmce_rd_a[b]),
      .rd_d_valid(nmce_rd_d_valid[b]), .rd_d_ready(nmce_rd_d_ready[b]), .rd_d(nmce_rd_d[b]),
      .wr_a_valid(nmce_wr_a_valid[b]), .wr_a_ready(nmce_wr_a_ready[b]), .wr_a(nmce_wr_a[b]),
      .wr_d_valid(nmce_wr_d_valid[b]), .wr_d_ready(nmce_wr_d_ready[b]), .wr_d(nmce_wr_d[b]),
      .busy(nmce_busy[b]));
  end

  // ---------------- per-core accelerators ----------------
  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    logic  va_valid, va_ready;
    tl_a_t va;

    sparse_accel #(.RS_DEPTH((t < 2) ? 1 : V2_RS_DEPTH), .SPLIT_PORTS(t >= 2)) u_sparse (
      .clk(tile_clk[t]), .rst(tile_rst[t]),
      .cmd_valid(sp_cmd_valid[t]), .cmd_ready(sp_cmd_ready[t]), .cmd(sp_cmd[t]),
      .resp_valid(sp_resp_valid[t]), .resp_ready(sp_resp_ready[t]), .resp(sp_resp[t]),
      .busy(sp_busy[t]),
      .a_valid(va_valid), .a_ready(va_ready), .a(va),
      .d_valid(sp_d_valid[t]), .d_ready(sp_d_ready[t]), .d(sp_d[t]),
      .l1_a_valid(sp_l1_a_valid[t]), .l1_a_ready(sp_l1_a_ready[t]), .l1_a(sp_l1_a[t]),
      .l1_d_valid(sp_l1_d_valid[t]), .l1_d_ready(sp_l1_d_ready[t]), .l1_d(sp_l1_d[t]));

    sparse_tlb u_tlb (
      .clk(tile_clk[t]), .rst(tile_rst[t]), .vm_en(sp_vm_en[t]), .flush(sp_tlb_flush[t]),
      .a_in_valid(va_valid), .a_in_ready(va_ready), .a_in(va),
      .a_out_valid(sp_a_valid[t]), .a_out_ready(sp_a_ready[t]), .a_out(sp_a[t]),
      .ptw_req_valid(sp_ptw_req_valid[t]), .ptw_req_ready(sp_ptw_req_ready[t]),
      .ptw_req_vpn(sp_ptw_req_vpn[t]),
      .ptw_resp_valid(sp_ptw_resp_valid[t]), .ptw_resp_ppn(sp_ptw_resp_ppn[t]));

    bop_prefetcher #(.LINE_W(PF_LINE_W)) u_prefetch (
      .clk(tile_clk[t]), .rst(tile_rst[t]),
      .acc_valid(pf_acc_valid[t]), .acc_line(pf_acc_line[t]),
      .fill_valid(pf_fill_valid[t]), .fill_line(pf_fill_line[t]), .fill_pf(pf_fill_pf[t]),
      .pf_valid(pf_valid[t]), .pf_ready(pf_ready[t]), .pf_line(pf_line[t]),
      .best_offset(pf_best_offset[t]), .pf_on(pf_on[t]), .phase_end(pf_phase_end[t]));
  end

  // ---------------- scratchpad ----------------
  scratchpad u_scratchpad (
    .clk(uncore_clk), .rst(uncore_rst),
    .a_valid(spad_a_valid), .a_ready(spad_a_ready), .a(spad_a),
    .d_valid(spad_d_valid), .d_ready(spad_d_ready), .d(spad_d));

endmodule
