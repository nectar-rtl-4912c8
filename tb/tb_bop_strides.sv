// tb_bop_strides: the best-offset prefetcher on the strided-access kernel of
// the chip's evaluation, for the strides of its table (0x0, 0x1, 0x10,
// 0x100, 0x1000 and 0x10000 bytes), at the prefetcher's default parameters.
//
// The testbench models an L2 that holds every line it has seen: an access to
// a line it lacks is a miss, which triggers the prefetcher and is followed
// by a demand fill; an access to a line brought in by a prefetch and not yet
// used is a prefetched hit, which also triggers it; any other access is a
// plain hit and is not shown to the prefetcher. Every prefetch request is
// filled at once. The prefetcher is reset before each stride and sees 12000
// accesses, or for strides below a line as many as touch 12000 lines; the
// testbench records the offset chosen by the first learning phase and the
// share of newly touched lines that a prefetch had brought in. Expected:
//   0x0               one line, hit after the first access: nothing to do
//   0x1, 0x10         a line stride of 1: prefetching turns on and at least
//                     10% of the lines are prefetched
//   0x100             (4 lines) the first phase picks a multiple of 4 and at
//                     least 10% of the lines are prefetched
//   0x1000            (64 lines) the offset is in the list but X + D is
//                     always in the next 4 KB page: no prefetch is issued
//   0x10000           (1024 lines) beyond the largest offset 256: no offset
//                     scores and prefetching stays off
// Because fills arrive at once, every multiple of the stride looks equally
// timely, and later phases may move to a larger multiple; once it reaches 64
// lines the page check stops all prefetches. The share of lines served is
// therefore printed rather than held to a high bound, in line with the small
// speedup this kernel shows on the chip.
module tb_bop_strides;
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

  // L2 contents: present lines, with 1 for a prefetched line not yet used
  bit cache [logic [LW-1:0]];
  int unsigned n_pf, n_ends;
  logic [8:0]  first_best;
  bit          first_on;
  always @(posedge clk)
    if (rst) n_ends <= 0;
    else if (phase_end) begin
      if (n_ends == 0) begin first_best <= best_offset; first_on <= pf_on; end
      n_ends <= n_ends + 1;
    end

  task automatic access(input logic [LW-1:0] x, output bit pf_hit);
    bit miss, trig, p;
    logic [LW-1:0] pl;
    miss   = !cache.exists(x);
    pf_hit = !miss && cache[x];
    trig   = miss || pf_hit;
    if (pf_hit) cache[x] = 0;
    @(negedge clk); acc_valid = trig; acc_line = x;
    @(negedge clk); acc_valid = 0;
    p = pf_valid; pl = pf_line;               // taken at the next edge (pf_ready = 1)
    if (p) n_pf++;
    if (miss) begin
      fill_valid = 1; fill_pf = 0; fill_line = x; cache[x] = 0;
      @(negedge clk);
    end
    if (p && !cache.exists(pl)) begin
      fill_valid = 1; fill_pf = 1; fill_line = pl; cache[pl] = 1;
      @(negedge clk);
    end
    fill_valid = 0;
  endtask

  task automatic run_stride(input int bytes, output real coverage, output int unsigned pfs);
    logic [63:0] addr;
    int lines, hits, n_acc;
    bit h, fresh;
    cache.delete();
    n_pf = 0;
    @(negedge clk); rst = 1;
    repeat (2) @(negedge clk); rst = 0;
    addr = 64'h100_0000;
    hits = 0;
    lines = 0;
    // 12000 accesses, or as many as it takes to touch 12000 lines
    n_acc = (bytes == 0) ? 12000 : (bytes >= 64 ? 12000 : 12000 * 64 / bytes);
    for (int i = 0; i < n_acc; i++) begin
      fresh = !cache.exists(LW'(addr >> 6)) || cache[LW'(addr >> 6)];
      access(LW'(addr >> 6), h);
      if (fresh) lines++;
      if (h) hits++;
      addr = addr + 64'(bytes);
    end
    coverage = real'(hits) / real'(lines);
    pfs = n_pf;
    $display("stride 0x%0h B: first offset %0d, last offset %0d (%s), %0d phases, %0d prefetches, %0.1f%% of lines prefetched",
             bytes, first_best, best_offset, pf_on ? "on" : "off", n_ends, pfs, 100.0 * coverage);
  endtask

  initial begin
    real c;
    int unsigned n;
    repeat (3) @(negedge clk);

    run_stride(0, c, n);
    check(n == 0 && c == 0.0, "stride 0: no prefetches");

    // below one line and 4 lines: the line stream has stride 1 or 4
    run_stride(32'h1, c, n);
    check(n_ends > 0 && first_on && c >= 0.1, $sformatf("stride 0x1: %0.1f%% prefetched", 100.0 * c));
    run_stride(32'h10, c, n);
    check(n_ends > 0 && first_on && c >= 0.1, $sformatf("stride 0x10: %0.1f%% prefetched", 100.0 * c));
    run_stride(32'h100, c, n);
    check(n_ends > 0 && first_on && first_best % 4 == 0,
          $sformatf("stride 0x100: first phase chose offset %0d", first_best));
    check(c >= 0.1, $sformatf("stride 0x100: %0.1f%% prefetched", 100.0 * c));

    run_stride(32'h1000, c, n);
    check(first_on && first_best % 64 == 0, $sformatf("stride 0x1000 first offset %0d", first_best));
    check(n == 0 && c == 0.0, "stride 0x1000: every prefetch would cross a page");

    run_stride(32'h10000, c, n);
    check(!pf_on && c == 0.0, "stride 0x10000: beyond the largest offset, prefetching off");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
