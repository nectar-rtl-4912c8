// scratchpad: on-chip scratchpad SRAM on the memory bus.
//
// SIZE_BYTES of memory organised as 64-bit words, served over one
// TileLink-style port. It takes one request at a time: a Get of one beat
// (size 3) or one 64-byte line (size 6) is answered with AccessAckData
// beats, one per cycle while d_ready is high, the first one cycle after the
// request is accepted; a PutFullData of one or eight beats is written as its
// beats arrive and answered with one AccessAck. Addresses wrap inside the
// scratchpad (only the low log2(SIZE_BYTES) bits are used).
//
// The size follows the block diagram and the chip's SRAM total (64 KB, with
// 256 KB of L2 making the 320 KB of SRAM); the introduction's "16KB
// scratchpad" conflicts with both. The port protocol and the one-request-at-
// a-time behaviour are this design's own choices.
module scratchpad
  import nectar_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 65536
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

  localparam int unsigned WORDS = SIZE_BYTES / 8;
  localparam int unsigned IDX_W = $clog2(WORDS);

  typedef enum logic [1:0] { S_IDLE, S_READ, S_PUT, S_ACK } state_e;

  logic [63:0]      mem [WORDS];
  state_e           state;
  logic [IDX_W-1:0] idx;
  logic [2:0]       beat, last_beat;
  logic [SRC_W-1:0] source;
  logic [2:0]       size;
  logic [63:0]      rdata;

  assign a_ready = state == S_IDLE || state == S_PUT;

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      idx       <= '0;
      beat      <= '0;
      last_beat <= '0;
      source    <= '0;
      size      <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (a_valid) begin
          idx       <= a.address[IDX_W+2:3];
          source    <= a.source;
          size      <= a.size;
          last_beat <= (a.size == 3'd6) ? 3'(LINE_BEATS - 1) : 3'd0;
          beat      <= '0;
          if (a.opcode == TL_GET) state <= S_READ;
          else begin
            beat  <= 3'd1;
            idx   <= a.address[IDX_W+2:3] + 1'b1;
            state <= (a.size == 3'd6) ? S_PUT : S_ACK;
          end
        end
        S_READ: if (d_ready) begin
          beat <= beat + 1'b1;
          idx  <= idx + 1'b1;
          if (beat == last_beat) state <= S_IDLE;
        end
        S_PUT: if (a_valid) begin
          beat <= beat + 1'b1;
          idx  <= idx + 1'b1;
          if (beat == last_beat) state <= S_ACK;
        end
        S_ACK: if (d_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // memory array: one write and one read port
  logic             we;
  logic [IDX_W-1:0] widx, ridx;
  always_comb begin
    we   = a_valid && a_ready && a.opcode == TL_PUT_FULL;
    widx = (state == S_IDLE) ? a.address[IDX_W+2:3] : idx;
    // read the word of the beat sent next
    if (state == S_IDLE)                 ridx = a.address[IDX_W+2:3];
    else if (state == S_READ && d_ready) ridx = idx + 1'b1;
    else                                 ridx = idx;
  end

  always_ff @(posedge clk) begin
    if (we) mem[widx] <= a.data;
    rdata <= mem[ridx];
  end

  always_comb begin
    d_valid  = state == S_READ || state == S_ACK;
    d        = '0;
    d.opcode = (state == S_READ) ? TL_ACK_DATA : TL_ACK;
    d.size   = size;
    d.source = source;
    d.data   = (state == S_READ) ? rdata : '0;
  end

endmodule
