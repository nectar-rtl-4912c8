// tb_bop_prefetcher: self-checking testbench of the best-offset prefetcher.
//
// The testbench plays the L2: it sends trigger accesses and the matching
// fills. Expected results are worked out from the algorithm by hand:
//  1. A stream with a stride of 3 lines, prefetching off, demand fills. Every
//     multiple of 3 in the offset list scores once per round, and offset 3,
//     the third candidate, is the first to reach SCORE_MAX = 31: in round 30,
//     at access 52*30 + 2. Prefetching then turns on with D = 3 and access X
//     prefetches X + 3, except across a 4 KB page.
//  2. Random lines: nothing scores, the phase ends after ROUND_MAX = 100
//     rounds (5200 accesses) and prefetching turns off.
//  3. A stride-5 stream while off learns D = 5 at access 52*30 + 4.
//  4. The same stream with prefetching on: prefetched lines are filled and
//     the table learns from Y - D, so the next phase ends on a score and
//     picks a multiple of 5.
module tb_bop_prefetcher;
  localparam int LW = 26;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic acc_valid = 0, fill_valid = 0, fill_pf = 0, pf_ready = 1;
  logic [LW-1:0] acc_line = 0, fill_line = 0;
  logic pf_valid, pf_on, phase_end;
  logic [LW-1:0] pf_line;
  logic [8:0] best_offset;

  bop_prefetcher dut (.clk, .rst, .acc_valid, .acc_line, .fill_valid, .fill_line, .fill_pf,
                      .pf_valid, .pf_ready, .pf_line, .best_offset, .pf_on, .phase_end);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // number (0-based, counted from the previous phase end) of the access that
  // ended a phase; phase_end follows the ending access by one cycle
  int unsigned acc_cnt = 0, acc_base = 0, last_idx = 0, end_at = 0, n_ends = 0;
  always @(posedge clk) if (!rst) begin
    if (phase_end) begin end_at = last_idx; acc_base = acc_cnt; n_ends++; end
    if (acc_valid) begin last_idx = acc_cnt - acc_base; acc_cnt++; end
  end

  // one access and, two cycles later, its fill; returns the prefetch issued
  task automatic access(input logic [LW-1:0] x, input bit demand_fill,
                        output bit got_pf, output logic [LW-1:0] pfl);
    @(negedge clk); acc_valid = 1; acc_line = x;
    @(negedge clk); acc_valid = 0;
    got_pf = pf_valid; pfl = pf_line;
    fill_valid = 1;
    fill_pf    = !demand_fill;
    fill_line  = demand_fill ? x : pf_line;
    if (!demand_fill && !pf_valid) fill_valid = 0;
    @(negedge clk); fill_valid = 0;
  endtask

  bit p; logic [LW-1:0] pl;
  logic [LW-1:0] x;

  // run a stream until one more phase has ended
  task automatic run_until_end(input logic [LW-1:0] start, input int stride, input bit demand,
                               input bit rnd, input int limit);
    int unsigned e0 = n_ends;
    x = start;
    for (int i = 0; i < limit && n_ends == e0; i++) begin
      access(rnd ? LW'($urandom) : x, demand, p, pl);
      x = x + LW'(stride);
    end
    acc_base = acc_cnt;
  endtask

  initial begin
    repeat (3) @(negedge clk); rst = 0;
    check(!pf_on, "prefetching off after reset");

    // ---- 1: stride 3, demand fills ----
    run_until_end(LW'(26'h10000), 3, 1, 0, 3000);
    check(end_at == 52*30 + 2, $sformatf("phase 1 ended at access %0d", end_at));
    check(pf_on && best_offset == 3, $sformatf("phase 1 best %0d on %0d", best_offset, pf_on));
    access(LW'(26'h20010), 1, p, pl);
    check(p && pl == LW'(26'h20013), "prefetch X+3");
    access(LW'(26'h2003e), 1, p, pl);   // page offset 62: X+3 is in the next page
    check(!p, "no prefetch across a page");

    // ---- 2: random lines ----
    run_until_end('0, 0, 1, 1, 6000);
    check(end_at == 52*100 - 1, $sformatf("phase 2 ended at access %0d", end_at));
    check(!pf_on, "prefetching off after a phase without scores");
    access(LW'(26'h30000), 1, p, pl);
    check(!p, "no prefetch while off");

    // ---- 3: stride 5 while off ----
    run_until_end(LW'(26'h50000), 5, 1, 0, 3000);
    check(end_at == 52*30 + 4, $sformatf("phase 3 ended at access %0d", end_at));
    check(pf_on && best_offset == 5, $sformatf("phase 3 best %0d", best_offset));

    // ---- 4: stride 5 with prefetched fills ----
    run_until_end(x, 5, 0, 0, 3000);
    // prefetches that would cross a page are not issued, so their lines never
    // enter the table and offset 5 misses now and then: the phase still ends
    // on a score, before the round limit, with a multiple of the stride
    check(end_at < 52*100 - 1, $sformatf("phase 4 ended at access %0d", end_at));
    check(pf_on && best_offset % 5 == 0, $sformatf("phase 4 best %0d", best_offset));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
