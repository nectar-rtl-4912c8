// tl_mem_model: behavioural memory for testbenches, standing in for an L2
// bank or the memory behind it. Not synthesizable.
//
// It accepts Get and PutFullData requests on channel A (size 3: one 64-bit
// beat, size 6: a 64-byte line of 8 beats) and answers on channel D with
// AccessAckData beats or one AccessAck. Contents live in an associative array
// of 64-bit words indexed by address/8, which the testbench reads and writes
// by hierarchical reference. With OOO = 1 the pending Gets are answered in a
// random order, which exercises a requester that matches responses by source.
// STALL sets the percentage of cycles in which a_ready is low and no D beat is
// sent. `gets` and `puts` count the requests served.
module tl_mem_model
  import nectar_pkg::*;
#(
  parameter bit          OOO   = 1'b0,
  parameter int unsigned STALL = 20
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  a_valid,
  output logic  a_ready,
  input  tl_a_t a,
  output logic  d_valid,
  input  logic  d_ready,
  output tl_d_t d
);

  logic [63:0] mem [logic [63:0]];

  typedef struct { logic [SRC_W-1:0] source; logic [63:0] addr; logic [2:0] size; bit put; } pend_t;
  pend_t pend [$];

  int unsigned gets = 0, puts = 0;
  int unsigned put_beat = 0;
  bit          sending = 0;
  pend_t       cur;
  int unsigned cur_beat = 0;

  function automatic logic [63:0] rd(logic [63:0] waddr);
    return mem.exists(waddr) ? mem[waddr] : 64'h0;
  endfunction

  always @(negedge clk) a_ready <= !rst && (($urandom % 100) >= STALL);
  initial begin a_ready = 0; d_valid = 0; d = '0; end

  always @(posedge clk) begin
    if (rst) begin
      pend.delete();
      sending  <= 0;
      d_valid  <= 0;
      put_beat = 0;
    end else begin
      // channel A
      if (a_valid && a_ready) begin
        if (a.opcode == TL_GET) begin
          pend.push_back('{a.source, a.address, a.size, 0});
          gets++;
        end else begin
          mem[(a.address >> 3) + ((a.size == 3'd6) ? 64'(put_beat) : 64'd0)] = a.data;
          if (a.size == 3'd6 && put_beat != LINE_BEATS - 1) put_beat++;
          else begin
            put_beat = 0;
            pend.push_back('{a.source, a.address, a.size, 1});
            puts++;
          end
        end
      end
      // channel D
      if (d_valid && d_ready) begin
        if (cur.put || cur.size != 3'd6 || cur_beat == LINE_BEATS - 1) sending = 0;
        else cur_beat++;
      end
      if (!sending && pend.size() != 0 && ($urandom % 100) >= STALL) begin
        int idx;
        idx = OOO ? int'($urandom % pend.size()) : 0;
        cur = pend[idx];
        pend.delete(idx);
        cur_beat = 0;
        sending = 1;
      end
      d_valid <= sending;
      if (sending) begin
        d.opcode <= cur.put ? TL_ACK : TL_ACK_DATA;
        d.size   <= cur.size;
        d.source <= cur.source;
        d.data   <= cur.put ? 64'h0 : rd((cur.addr >> 3) + 64'(cur_beat));
      end
    end
  end

endmodule
