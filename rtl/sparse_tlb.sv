// sparse_tlb: address translation for a sparse accelerator's memory port.
//
// The sparse accelerator works on virtual addresses handed to it by
// software. This block sits on its TileLink-style channel A and replaces the
// virtual page number of every request with the physical one before the
// request goes to the cache. It is a small fully associative TLB of ENTRIES
// entries with 4 KB pages. On a hit the request passes straight through in
// the same cycle (valid and ready are forwarded, only the address changes).
// On a miss the request is held (a_in_ready low) and the virtual page number
// is sent to the core's page-table walker over ptw_req; its answer
// (ptw_resp: physical page number) fills the next entry in round-robin
// order, and the held request then hits. Channel D does not pass through
// here: answers carry no address.
//
// With vm_en low (the core runs without paging) addresses pass unchanged.
// flush (from an SFENCE on the core) invalidates all entries. A page fault
// reported by the walker is not handled: the walker's answer is used as it
// is, so software must map the accelerator's buffers before starting it.
//
// From the paper: the accelerator translates virtual addresses. This
// design's own choices: a TLB in front of the accelerator rather than inside
// its pipeline, its size, full associativity, round-robin replacement, 4 KB
// pages only, and the walker interface (one request, one answer).
module sparse_tlb
  import nectar_pkg::*;
#(
  parameter int unsigned ENTRIES = 4,
  parameter int unsigned VPN_W   = 27,   // Sv39: 39-bit virtual addresses
  parameter int unsigned PPN_W   = 44
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              vm_en,
  input  logic              flush,
  // from the accelerator (virtual)
  input  logic              a_in_valid,
  output logic              a_in_ready,
  input  tl_a_t             a_in,
  // to the cache (physical)
  output logic              a_out_valid,
  input  logic              a_out_ready,
  output tl_a_t             a_out,
  // page-table walker of the core
  output logic              ptw_req_valid,
  input  logic              ptw_req_ready,
  output logic [VPN_W-1:0]  ptw_req_vpn,
  input  logic              ptw_resp_valid,
  input  logic [PPN_W-1:0]  ptw_resp_ppn
);
  localparam int unsigned IDX_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic [ENTRIES-1:0]  valid;
  logic [VPN_W-1:0]    vpn_q [ENTRIES];
  logic [PPN_W-1:0]    ppn_q [ENTRIES];
  logic [IDX_W-1:0]    repl;
  logic                walking;      // request sent, waiting for the answer

  logic [VPN_W-1:0]    vpn;
  logic                hit;
  logic [PPN_W-1:0]    hit_ppn;

  assign vpn = a_in.address[12 +: VPN_W];

  always_comb begin
    hit     = 1'b0;
    hit_ppn = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (valid[i] && vpn_q[i] == vpn) begin
        hit     = 1'b1;
        hit_ppn = ppn_q[i];
      end
  end

  logic pass;
  assign pass = !vm_en || hit;

  always_comb begin
    a_out = a_in;
    if (vm_en) a_out.address = ADDR_W'({hit_ppn, a_in.address[11:0]});
  end
  assign a_out_valid = a_in_valid && pass;
  assign a_in_ready  = a_out_ready && pass;

  assign ptw_req_valid = a_in_valid && !pass && !walking;
  assign ptw_req_vpn   = vpn;

  always_ff @(posedge clk) begin
    if (rst || flush) begin
      valid   <= '0;
      repl    <= '0;
      walking <= 1'b0;
    end else begin
      if (ptw_req_valid && ptw_req_ready) walking <= 1'b1;
      if (walking && ptw_resp_valid) begin
        walking      <= 1'b0;
        valid[repl]  <= 1'b1;
        vpn_q[repl]  <= vpn;
        ppn_q[repl]  <= ptw_resp_ppn;
        repl         <= (repl == IDX_W'(ENTRIES - 1)) ? '0 : repl + 1'b1;
      end
    end
  end

  // a held request must not change while its page is being walked
  assert property (@(posedge clk) disable iff (rst)
                   walking && !flush |-> a_in_valid && vpn == $past(vpn));
endmodule
