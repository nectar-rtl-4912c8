// tb_sparse_tlb: checks the accelerator's address translation.
//
// A page-table walker model answers each request after a random delay with
// ppn = vpn * 3 + 0x100 (any one-to-one map does). Requests from a pool of six
// virtual pages, more than the four entries, are sent with random downstream
// back-pressure; every request leaving the TLB must carry the translated
// page and the untouched page offset, opcode, source and data. The test also
// checks that a hit passes in the cycle it is presented, that a page already
// held does not walk again, that six pages round-robin through four entries
// cause repeated walks, that flush forces new walks, and that with vm_en low
// addresses pass unchanged without any walk.
module tb_sparse_tlb;
  import nectar_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic vm_en = 1, flush = 0;
  logic a_in_valid = 0, a_in_ready, a_out_valid, a_out_ready = 1;
  tl_a_t a_in = '0, a_out;
  logic ptw_req_valid, ptw_req_ready = 1, ptw_resp_valid = 0;
  logic [26:0] ptw_req_vpn;
  logic [43:0] ptw_resp_ppn = '0;

  sparse_tlb dut (.clk, .rst, .vm_en, .flush, .a_in_valid, .a_in_ready, .a_in,
                  .a_out_valid, .a_out_ready, .a_out, .ptw_req_valid, .ptw_req_ready,
                  .ptw_req_vpn, .ptw_resp_valid, .ptw_resp_ppn);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [43:0] pt(input logic [26:0] vpn);
    return 44'(vpn) * 44'd3 + 44'h100;
  endfunction

  // walker model
  int walks = 0;
  initial forever begin
    @(posedge clk);
    if (ptw_req_valid && ptw_req_ready) begin
      logic [26:0] v;
      v = ptw_req_vpn;
      walks++;
      repeat ($urandom % 6) @(posedge clk);
      @(negedge clk); ptw_resp_valid = 1; ptw_resp_ppn = pt(v);
      @(negedge clk); ptw_resp_valid = 0;
    end
  end

  bit bp = 0;
  always @(negedge clk) a_out_ready = bp ? ($urandom % 3 != 0) : 1'b1;

  // send one request, check what leaves; returns cycles from valid to accept
  task automatic send(input logic [26:0] vpn, input logic [11:0] off, output int cyc);
    logic [63:0] va, exp;
    va = {25'h0, vpn, off};
    exp = vm_en ? 64'({pt(vpn), off}) : va;
    @(negedge clk);
    a_in = '{opcode: TL_GET, size: 3'd3, source: 4'($urandom), address: va, data: {$urandom, $urandom}};
    a_in_valid = 1;
    cyc = 0;
    @(posedge clk);
    while (!(a_in_valid && a_in_ready)) begin cyc++; @(posedge clk); end
    check(a_out_valid && a_out.address == exp && a_out.opcode == a_in.opcode &&
          a_out.source == a_in.source && a_out.data == a_in.data,
          $sformatf("va %h -> %h, expected %h", va, a_out.address, exp));
    @(negedge clk); a_in_valid = 0;
  endtask

  initial begin
    int c, w0;
    logic [26:0] pages [6];
    for (int i = 0; i < 6; i++) pages[i] = 27'h1000 + 27'(i * 37);
    repeat (3) @(negedge clk); rst = 0;

    // first touch walks, second is a hit in the same cycle
    send(pages[0], 12'h123, c);
    check(walks == 1, "first access walks");
    send(pages[0], 12'hff8, c);
    check(walks == 1 && c == 0, $sformatf("hit passes at once (waited %0d)", c));

    // four pages fit
    for (int i = 1; i < 4; i++) send(pages[i], 12'(i * 8), c);
    w0 = walks;
    for (int r = 0; r < 3; r++) for (int i = 0; i < 4; i++) send(pages[i], 12'($urandom) & 12'hff8, c);
    check(walks == w0 && walks == 4, $sformatf("four pages held, walks %0d", walks));

    // six pages cycling through four entries keep walking
    bp = 1;
    w0 = walks;
    for (int r = 0; r < 4; r++) for (int i = 0; i < 6; i++) send(pages[i], 12'($urandom) & 12'hff8, c);
    // round 1: pages 0-3 hit, 4 and 5 replace pages 0 and 1; after that
    // every access misses (the page needed was replaced four misses ago)
    check(walks - w0 == 2 + 3 * 6, $sformatf("round-robin walks %0d", walks - w0));
    // random mix
    for (int i = 0; i < 200; i++) send(pages[$urandom % 6], 12'($urandom) & 12'hff8, c);

    // flush
    bp = 0;
    send(pages[0], 12'h0, c);
    send(pages[0], 12'h8, c);
    w0 = walks;
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    send(pages[0], 12'h10, c);
    check(walks == w0 + 1, "flush forces a new walk");

    // paging off
    vm_en = 0;
    w0 = walks;
    for (int i = 0; i < 10; i++) send(27'($urandom), 12'($urandom), c);
    check(walks == w0, "no walks with paging off");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
