// tb_nectar_soc: end-to-end test of the SoC top at its default parameters.
//
// Behavioural memories stand in for the L2 banks and the cores' memory
// ports. After reset the test moves the chip from the external clock to the
// PLL, runs core 3 at half speed and holds core 1 in reset for a while with
// its tile reset setter. Then, in parallel:
//  - every NMCE computes 4 strided dot products (one saturating) and checks
//    them against a reference; NMCE 0 then copies 2 lines;
//  - every sparse accelerator multiplies an 8-element sparse matrix by a
//    13 x 64 dense matrix; V2 instances run against an out-of-order memory;
//    V2 instances read their elements through their L1 port;
//    cores 1 and 3 run with paging on, their buffers at virtual addresses
//    that a page-table walker model maps 1 MB higher;
//  - prefetcher 0 learns a stride-3 stream and turns prefetching on,
//    prefetcher 2 learns a stride-5 stream and then, on random lines,
//    turns prefetching off;
//  - the scratchpad stores a line and returns it.
// Each mechanism is counted and one that never happened counts a failure.
module tb_nectar_soc;
  import nectar_pkg::*;

  logic clkpll = 0, clkpll0 = 0, clkpll1 = 0, clk_ext = 0, resetn = 0;
  always #2 clkpll  = ~clkpll;
  always #3 clkpll0 = ~clkpll0;
  always #4 clkpll1 = ~clkpll1;
  always #5 clk_ext = ~clk_ext;

  logic [31:0] pll_ctrl, pll_cfg;
  logic clk_out, chip_rst;
  mmio_req_t clk_req = '0;
  mmio_rsp_t clk_rsp;
  logic [3:0] tile_clk, tile_rst;
  logic uncore_clk, uncore_rst, fbus_clk, fbus_rst;

  mmio_req_t nreq_u [4];
  mmio_req_t [3:0] nreq;
  mmio_rsp_t [3:0] nrsp;
  logic [3:0] rd_a_valid, rd_a_ready, rd_d_valid, rd_d_ready, wr_a_valid, wr_a_ready, wr_d_valid, wr_d_ready, nbusy;
  tl_a_t [3:0] rd_a, wr_a;
  tl_d_t [3:0] rd_d, wr_d;

  logic cmd_valid_u [4];
  rocc_cmd_t cmd_u [4];
  logic [3:0] sp_cmd_valid, sp_cmd_ready, sp_resp_valid, sp_busy, sp_a_valid, sp_a_ready, sp_d_valid, sp_d_ready;
  rocc_cmd_t [3:0] sp_cmd;
  rocc_rsp_t [3:0] sp_resp;
  tl_a_t [3:0] sp_a;
  tl_d_t [3:0] sp_d;
  logic [3:0] sp_vm_en, sp_ptw_req_valid, sp_ptw_resp_valid;
  logic [3:0][26:0] sp_ptw_req_vpn;
  logic [3:0][43:0] sp_ptw_resp_ppn;
  assign sp_vm_en = 4'b1010;
  logic [3:0] sp_l1_a_valid, sp_l1_a_ready, sp_l1_d_valid, sp_l1_d_ready;
  tl_a_t [3:0] sp_l1_a;
  tl_d_t [3:0] sp_l1_d;       // cores 1 and 3 run with paging on

  logic acc_valid_u [4], fill_valid_u [4], fill_pf_u [4];
  logic [25:0] acc_line_u [4], fill_line_u [4];
  logic [3:0] pf_acc_valid, pf_fill_valid, pf_fill_pf, pf_valid, pf_on, pf_phase_end;
  logic [3:0][25:0] pf_acc_line, pf_fill_line, pf_line;
  logic [3:0][8:0] pf_best_offset;

  logic spad_a_valid = 0, spad_a_ready, spad_d_valid;
  tl_a_t spad_a = '0;
  tl_d_t spad_d;

  always_comb for (int i = 0; i < 4; i++) begin
    nreq[i] = nreq_u[i];
    sp_cmd_valid[i] = cmd_valid_u[i];
    sp_cmd[i] = cmd_u[i];
    pf_acc_valid[i] = acc_valid_u[i];
    pf_acc_line[i] = acc_line_u[i];
    pf_fill_valid[i] = fill_valid_u[i];
    pf_fill_line[i] = fill_line_u[i];
    pf_fill_pf[i] = fill_pf_u[i];
  end

  nectar_soc dut (
    .resetn, .clk_in_ext(clk_ext), .clkpll, .clkpll0, .clkpll1, .pll_lock(1'b1),
    .pll_ctrl, .pll_cfg, .clk_out, .clk_mmio_req(clk_req), .clk_mmio_rsp(clk_rsp),
    .tile_clk, .tile_rst, .uncore_clk, .uncore_rst, .fbus_clk, .fbus_rst,
    .nmce_mmio_req(nreq), .nmce_mmio_rsp(nrsp),
    .nmce_rd_a_valid(rd_a_valid), .nmce_rd_a_ready(rd_a_ready), .nmce_rd_a(rd_a),
    .nmce_rd_d_valid(rd_d_valid), .nmce_rd_d_ready(rd_d_ready), .nmce_rd_d(rd_d),
    .nmce_wr_a_valid(wr_a_valid), .nmce_wr_a_ready(wr_a_ready), .nmce_wr_a(wr_a),
    .nmce_wr_d_valid(wr_d_valid), .nmce_wr_d_ready(wr_d_ready), .nmce_wr_d(wr_d),
    .nmce_busy(nbusy),
    .sp_cmd_valid, .sp_cmd_ready, .sp_cmd, .sp_resp_valid, .sp_resp_ready(4'hf), .sp_resp,
    .sp_busy, .sp_a_valid, .sp_a_ready, .sp_a, .sp_d_valid, .sp_d_ready, .sp_d,
    .sp_l1_a_valid, .sp_l1_a_ready, .sp_l1_a, .sp_l1_d_valid, .sp_l1_d_ready, .sp_l1_d,
    .sp_vm_en, .sp_tlb_flush(4'h0), .sp_ptw_req_valid, .sp_ptw_req_ready(4'hf), .sp_ptw_req_vpn,
    .sp_ptw_resp_valid, .sp_ptw_resp_ppn,
    .pf_acc_valid, .pf_acc_line, .pf_fill_valid, .pf_fill_line, .pf_fill_pf,
    .pf_valid, .pf_ready(4'hf), .pf_line, .pf_best_offset, .pf_on, .pf_phase_end,
    .spad_a_valid, .spad_a_ready, .spad_a, .spad_d_valid, .spad_d_ready(1'b1), .spad_d,
    .chip_rst);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanisms
  int n_clk_switch = 0, n_tile_hold = 0, n_divided = 0;
  int n_mac = 0, n_sat = 0, n_memcpy = 0;
  int n_sp_v1 = 0, n_sp_v2 = 0, n_ooo = 0, n_walk = 0;
  int n_pf_on = 0, n_pf_off = 0, n_prefetch = 0;
  int n_spad = 0;
  int done = 0;
  event go;

  task automatic clk_wr(input logic [11:0] addr, input logic [63:0] data);
    @(negedge clk_ext); clk_req = '{valid: 1, write: 1, addr: addr, wdata: data};
    @(negedge clk_ext); clk_req = '0;
  endtask

  // ================= NMCE per bank =================
  for (genvar b = 0; b < 4; b++) begin : g_nmce
    tl_mem_model #(.OOO(0), .STALL(15)) mrd (.clk(uncore_clk), .rst(uncore_rst),
        .a_valid(rd_a_valid[b]), .a_ready(rd_a_ready[b]), .a(rd_a[b]),
        .d_valid(rd_d_valid[b]), .d_ready(rd_d_ready[b]), .d(rd_d[b]));
    tl_mem_model #(.OOO(0), .STALL(15)) mwr (.clk(uncore_clk), .rst(uncore_rst),
        .a_valid(wr_a_valid[b]), .a_ready(wr_a_ready[b]), .a(wr_a[b]),
        .d_valid(wr_d_valid[b]), .d_ready(wr_d_ready[b]), .d(wr_d[b]));

    task automatic wr(input logic [11:0] addr, input logic [63:0] data);
      @(negedge uncore_clk); nreq_u[b] = '{valid: 1, write: 1, addr: addr, wdata: data};
      @(negedge uncore_clk); nreq_u[b] = '0;
    endtask
    task automatic rdreg(input logic [11:0] addr, output logic [63:0] data);
      @(negedge uncore_clk); nreq_u[b] = '{valid: 1, write: 0, addr: addr, wdata: 0};
      @(negedge uncore_clk); nreq_u[b] = '0; data = nrsp[b].rdata;
    endtask
    task automatic wait_idle();
      int n = 0;
      repeat (2) @(negedge uncore_clk);
      while (nbusy[b] && n < 20000) begin @(negedge uncore_clk); n++; end
    endtask

    logic [7:0] v1 [64];
    initial begin
      logic [63:0] d;
      logic [15:0] exp [4];
      nreq_u[b] = '0;
      @(go);
      for (int k = 0; k < 64; k++) v1[k] = (k < 32) ? 8'sd127 : 8'($urandom);
      // line 0 saturates: 127 * 127 in the first half alone
      for (int i = 0; i < 8; i++) mrd.mem[64'h400 + 64'(i)] = (i < 4) ? {8{8'h7f}} : 64'h0;
      for (int i = 8; i < 32; i++) mrd.mem[64'h400 + 64'(i)] = {$urandom, $urandom} & {8{8'h0f}};
      for (int w = 0; w < 8; w++) begin
        logic [63:0] x;
        for (int k = 0; k < 8; k++) x[8*k +: 8] = v1[8*w + k];
        wr(12'(8*w), x);
      end
      for (int i = 0; i < 4; i++) begin
        int s;
        s = 0;
        for (int k = 0; k < 64; k++) begin
          logic [63:0] wd;
          wd = mrd.rd(64'h400 + 64'(8*i + k/8));
          s += int'($signed(v1[k])) * int'($signed(wd[8*(k%8) +: 8]));
        end
        exp[i] = sat16(s);
        if (s > 32767 || s < -32768) n_sat++;
      end
      wr(12'h040, 64'h2000); wr(12'h048, 64'd64); wr(12'h050, 64'd4); wr(12'h060, 64'd0);
      wait_idle();
      rdreg(12'h080, d);
      for (int i = 0; i < 4; i++)
        check(d[16*i +: 16] == exp[i], $sformatf("NMCE %0d result %0d got %h exp %h", b, i, d[16*i +: 16], exp[i]));
      n_mac++;
      if (b == 0) begin
        wr(12'h048, 64'd64); wr(12'h050, 64'd2); wr(12'h058, 64'h8000); wr(12'h060, 64'd1);
        wait_idle();
        for (int i = 0; i < 16; i++)
          check(mwr.rd(64'h1000 + 64'(i)) == mrd.rd(64'h400 + 64'(i)), "NMCE memcpy");
        n_memcpy++;
      end
      done++;
    end
  end

  // ================= sparse accelerators and prefetchers per core =================
  for (genvar t = 0; t < 4; t++) begin : g_tile
    tl_mem_model #(.OOO(t >= 2), .STALL(10)) ms (.clk(tile_clk[t]), .rst(tile_rst[t]),
        .a_valid(sp_a_valid[t]), .a_ready(sp_a_ready[t]), .a(sp_a[t]),
        .d_valid(sp_d_valid[t]), .d_ready(sp_d_ready[t]), .d(sp_d[t]));
    // the core's L1 as seen by a V2 sparse row loader (virtual addresses)
    tl_mem_model #(.OOO(0), .STALL(10)) ml1 (.clk(tile_clk[t]), .rst(tile_rst[t]),
        .a_valid(sp_l1_a_valid[t]), .a_ready(sp_l1_a_ready[t]), .a(sp_l1_a[t]),
        .d_valid(sp_l1_d_valid[t]), .d_ready(sp_l1_d_ready[t]), .d(sp_l1_d[t]));

    // out-of-order answers seen on this port
    logic [SRC_W-1:0] q [$];
    always @(posedge tile_clk[t]) if (!tile_rst[t]) begin
      if (sp_d_valid[t] && sp_d[t].opcode == TL_ACK_DATA && sp_d[t].source < 4) begin
        if (q.size() != 0 && q[0] != sp_d[t].source) n_ooo++;
        foreach (q[i]) if (q[i] == sp_d[t].source) begin q.delete(i); break; end
      end
      if (sp_a_valid[t] && sp_a_ready[t] && sp_a[t].opcode == TL_GET && sp_a[t].source < 4)
        q.push_back(sp_a[t].source);
    end

    always @(posedge tile_clk[t]) if (pf_valid[t]) n_prefetch++;

    // page-table walker of the core: virtual page v maps to physical page
    // v + 0x100 (1 MB higher), answered two cycles after the request
    initial begin
      sp_ptw_resp_valid[t] = 0; sp_ptw_resp_ppn[t] = '0;
      forever begin
        @(posedge tile_clk[t]);
        if (sp_ptw_req_valid[t]) begin
          logic [26:0] v;
          v = sp_ptw_req_vpn[t];
          n_walk++;
          @(negedge tile_clk[t]); @(negedge tile_clk[t]);
          sp_ptw_resp_valid[t] = 1; sp_ptw_resp_ppn[t] = 44'(v) + 44'h100;
          @(negedge tile_clk[t]); sp_ptw_resp_valid[t] = 0;
        end
      end
    end

    task automatic send(input logic [6:0] f, input logic [63:0] rs1, input logic [63:0] rs2);
      @(negedge tile_clk[t]);
      cmd_u[t] = '{funct: f, rd: 5'd3, xd: 1'b1, rs1: rs1, rs2: rs2};
      cmd_valid_u[t] = 1;
      @(posedge tile_clk[t]); while (!sp_cmd_ready[t]) @(posedge tile_clk[t]);
      @(negedge tile_clk[t]); cmd_valid_u[t] = 0;
    endtask

    task automatic pf_access(input logic [25:0] x);
      @(negedge tile_clk[t]); acc_valid_u[t] = 1; acc_line_u[t] = x;
      @(negedge tile_clk[t]); acc_valid_u[t] = 0;
      fill_valid_u[t] = 1; fill_pf_u[t] = 0; fill_line_u[t] = x;
      @(negedge tile_clk[t]); fill_valid_u[t] = 0;
    endtask

    initial begin
      int signed bm [13][64];
      longint signed c [4][64];
      logic [63:0] wofs;           // word offset of the physical copy
      wofs = sp_vm_en[t] ? 64'h2_0000 : 64'h0;
      cmd_valid_u[t] = 0; cmd_u[t] = '0;
      acc_valid_u[t] = 0; fill_valid_u[t] = 0; fill_pf_u[t] = 0; acc_line_u[t] = 0; fill_line_u[t] = 0;
      @(go);
      // ---- sparse x dense: 4 output rows of 2 elements, B 13 x 64 ----
      for (int r = 0; r < 13; r++)
        for (int j = 0; j < 64; j += 2) begin
          bm[r][j] = int'($urandom) >>> 10; bm[r][j+1] = int'($urandom) >>> 10;
          ms.mem[wofs + 64'h4000 + 64'((r * 64 + j) / 2)] = {32'(bm[r][j+1]), 32'(bm[r][j])};
        end
      for (int o = 0; o < 4; o++) begin
        for (int j = 0; j < 64; j++) c[o][j] = 0;
        for (int e = 0; e < 2; e++) begin
          int idx;
          logic signed [15:0] w;
          idx = int'($urandom % 13);
          w = 16'($urandom);
          for (int j = 0; j < 64; j++) c[o][j] += longint'(w) * longint'(bm[idx][j]);
          ms.mem[wofs + 64'h2000 + 64'(2 * o + e)] = {e == 1, e == 0, 14'b0, w, 32'(idx)};
          ml1.mem[64'h2000 + 64'(2 * o + e)] = {e == 1, e == 0, 14'b0, w, 32'(idx)};
        end
      end
      send(7'd0, 64'h1_0000, 64'd8);
      send(7'd1, 64'h2_0000, 64'd64);
      send(7'd2, 64'h4_0000, 64'd0);
      begin
        int n;
        n = 0;
        while (!sp_resp_valid[t] && n < 100000) begin @(negedge tile_clk[t]); n++; end
      end
      check(sp_resp_valid[t] && sp_resp[t].data == 64'd4, $sformatf("core %0d sparse response", t));
      repeat (3) @(negedge tile_clk[t]);
      for (int o = 0; o < 4; o++)
        for (int j = 0; j < 64; j += 2)
          check(ms.rd(wofs + 64'h8000 + 64'((o * 64 + j) / 2)) == {32'(c[o][j+1]), 32'(c[o][j])},
                $sformatf("core %0d C[%0d][%0d]", t, o, j));
      if (t < 2) n_sp_v1++;
      else begin
        check(ml1.gets == 8, $sformatf("core %0d read its 8 elements through the L1 port: %0d", t, ml1.gets));
        n_sp_v2++;
      end
      // ---- prefetchers ----
      if (t == 0) begin
        for (int i = 0; i < 1700 && !pf_on[t]; i++) pf_access(26'h10000 + 26'(3 * i));
        check(pf_on[t] && pf_best_offset[t] == 9'd3, "prefetcher 0 learned offset 3");
        pf_access(26'h20010);
        if (pf_on[t]) n_pf_on++;
      end
      if (t == 2) begin
        // learn a stride-5 stream, then random lines switch prefetching off
        for (int i = 0; i < 1700 && !pf_on[t]; i++) pf_access(26'h30000 + 26'(5 * i));
        check(pf_on[t] && pf_best_offset[t] == 9'd5, "prefetcher 2 learned offset 5");
        for (int i = 0; i < 5300 && pf_on[t]; i++) pf_access(26'($urandom));
        check(!pf_on[t], "prefetcher 2 turned off on random lines");
        if (!pf_on[t]) n_pf_off++;
      end
      done++;
    end
  end

  // ================= top-level sequence =================
  initial begin
    #33 resetn = 1;
    repeat (6) @(negedge clk_ext);
    check(!uncore_rst && tile_rst == 4'h0, "domains out of reset");
    // run from the PLL, core 3 at half speed
    clk_wr(12'h000, 0);
    clk_wr(12'h038, 2);
    n_clk_switch++;
    repeat (5) @(negedge clk_ext);
    begin
      realtime t0, t1;
      @(posedge tile_clk[3]); t0 = $realtime; @(posedge tile_clk[3]); t1 = $realtime;
      check(t1 - t0 == 8.0, $sformatf("core 3 clock period %0t", t1 - t0));
      if (t1 - t0 == 8.0) n_divided++;
      @(posedge uncore_clk); t0 = $realtime; @(posedge uncore_clk); t1 = $realtime;
      check(t1 - t0 == 4.0, "uncore on the PLL clock");
    end
    // tile reset setter on core 1
    clk_wr(12'h068, 1);
    #1 check(tile_rst[1], "core 1 held in reset");
    if (tile_rst[1]) n_tile_hold++;
    clk_wr(12'h068, 0);
    repeat (4) @(negedge clk_ext);
    check(!tile_rst[1], "core 1 released");

    -> go;
    // scratchpad: store a line and read it back
    begin
      logic [63:0] line [8];
      for (int i = 0; i < 8; i++) line[i] = {$urandom, $urandom};
      @(negedge uncore_clk);
      for (int i = 0; i < 8; i++) begin
        spad_a = '{opcode: TL_PUT_FULL, size: 3'd6, source: 4'd1, address: 64'h0100, data: line[i]};
        spad_a_valid = 1;
        @(posedge uncore_clk); while (!spad_a_ready) @(posedge uncore_clk);
        @(negedge uncore_clk);
      end
      spad_a_valid = 0;
      while (!spad_d_valid) @(negedge uncore_clk);
      @(negedge uncore_clk);
      spad_a = '{opcode: TL_GET, size: 3'd6, source: 4'd2, address: 64'h0100, data: 0};
      spad_a_valid = 1;
      @(posedge uncore_clk); while (!spad_a_ready) @(posedge uncore_clk);
      @(negedge uncore_clk); spad_a_valid = 0;
      for (int i = 0; i < 8; i++) begin
        while (!spad_d_valid) @(negedge uncore_clk);
        check(spad_d.data == line[i], $sformatf("scratchpad beat %0d", i));
        @(negedge uncore_clk);
      end
      n_spad++;
    end

    wait (done == 8);
    $display("mechanisms: clock switch %0d, core divider %0d, tile reset hold %0d, NMCE MAC %0d, saturation %0d, memcpy %0d",
             n_clk_switch, n_divided, n_tile_hold, n_mac, n_sat, n_memcpy);
    $display("            sparse V1 %0d, sparse V2 %0d, out-of-order answers %0d, prefetch on %0d, prefetch off %0d, prefetches %0d, scratchpad %0d",
             n_sp_v1, n_sp_v2, n_ooo, n_pf_on, n_pf_off, n_prefetch, n_spad);
    $display("            page walks %0d", n_walk);
    check(n_clk_switch > 0, "clock switch happened");
    check(n_divided > 0, "core divider used");
    check(n_tile_hold > 0, "tile reset setter used");
    check(n_mac == 4, "all NMCEs ran MAC");
    check(n_sat > 0, "saturation happened");
    check(n_memcpy > 0, "memcpy happened");
    check(n_sp_v1 == 2 && n_sp_v2 == 2, "all sparse accelerators ran");
    check(n_ooo > 0, "V2 took out-of-order answers");
    check(n_walk > 0, "address translation walked the page table");
    check(n_pf_on > 0, "a prefetcher turned on");
    check(n_pf_off > 0, "a prefetcher turned off");
    check(n_prefetch > 0, "prefetches issued");
    check(n_spad > 0, "scratchpad used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
