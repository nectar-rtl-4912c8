// nmce: near-memory compute engine, one per L2 bank.
//
// The engine is programmed through memory-mapped registers: a 64-byte
// operand register v1Reg, a 64-bit address v2addr, a byte stride and a count
// of operations (at most MAX_COUNT = 32). A MAC command computes `count` dot
// products: for i = 0..count-1 it fetches the 64-byte line at
// v2addr + stride*i through its read node, multiplies its 64 signed int8
// bytes with the 64 int8 bytes of v1Reg, adds the products, saturates the sum
// to int16 and writes it into 16-bit slot i of the 64-byte result register.
// The multiply-accumulate of a fetched line is done in one cycle: 64
// multipliers feed four 16-element adder trees whose sums are added. A
// memcpy command copies `count` lines from v2addr + stride*i to
// dst + stride*i, reading through the read node and writing through the
// write node. A status register shows whether the engine is busy, whether the
// last command finished (the "ready" of the paper's figure), and how many
// operations have completed.
//
// From the paper: the four registers, the count limit of 32, int8 operands,
// int16 saturation, the 64B result register of 32 int16 slots, the
// single-cycle 64B MAC after the line arrives, the 16-element adder tree, the
// separate read and write nodes on the 64-bit system bus, and the status
// register. This design's own choices: the register map below, the extra
// destination register and command register (the paper lists no register for
// the memcpy destination or for starting an operation), one line in flight at
// a time, the result register being cleared when a MAC command starts, and
// addresses being rounded down to a line boundary.
//
// Register map (byte offsets, 64-bit registers):
//   0x000-0x038 v1Reg words 0..7 (byte k of v1Reg is bits 8k+7:8k of the
//               little-endian 64 bytes)            read/write
//   0x040 v2addr   0x048 stride   0x050 count   0x058 dst (memcpy)
//   0x060 command: writing 0 starts MAC, 1 starts memcpy (ignored if busy)
//   0x068 status : bit 0 busy, bit 1 done, bits 13:8 operations completed
//   0x080-0x0B8 result words 0..7; result slot i is bits 16(i%4)+15:16(i%4)
//               of word i/4                         read only
//
// Timing: a MAC operation takes one cycle to issue the Get, the 8 response
// beats, and one MAC cycle that writes the result; memcpy adds 8 Put beats
// and the wait for the AccessAck. MMIO reads return data one cycle after the
// request.
module nmce
  import nectar_pkg::*;
#(
  parameter int unsigned MAX_COUNT = 32
) (
  input  logic      clk,
  input  logic      rst,
  // control registers, from the peripheral bus
  input  mmio_req_t mmio_req,
  output mmio_rsp_t mmio_rsp,
  // read node
  output logic      rd_a_valid,
  input  logic      rd_a_ready,
  output tl_a_t     rd_a,
  input  logic      rd_d_valid,
  output logic      rd_d_ready,
  input  tl_d_t     rd_d,
  // write node
  output logic      wr_a_valid,
  input  logic      wr_a_ready,
  output tl_a_t     wr_a,
  input  logic      wr_d_valid,
  output logic      wr_d_ready,
  input  tl_d_t     wr_d,
  output logic      busy
);

  localparam int unsigned CNT_W = $clog2(MAX_COUNT + 1);

  typedef enum logic [2:0] {
    S_IDLE, S_RD_REQ, S_RD_DATA, S_MAC, S_WR_DATA, S_WR_ACK
  } state_e;

  state_e            state;
  logic              op_memcpy;
  logic [7:0][63:0]  v1_reg;
  logic [63:0]       v2addr, stride, dst;
  logic [CNT_W-1:0]  count, done_cnt;
  logic              done_flag;
  logic [MAX_COUNT-1:0][15:0] result;
  logic [7:0][63:0]  line;
  logic [2:0]        beat;
  logic [63:0]       src_addr, dst_addr;

  // ---------------- single-cycle 64-byte MAC ----------------
  logic signed [15:0] prod [64];
  logic signed [19:0] tree_sum [4];
  logic signed [21:0] dot;

  always_comb begin
    for (int k = 0; k < 64; k++)
      prod[k] = $signed(v1_reg[k/8][8*(k%8) +: 8]) * $signed(line[k/8][8*(k%8) +: 8]);
    for (int t = 0; t < 4; t++) begin
      tree_sum[t] = '0;
      for (int k = 0; k < 16; k++)
        tree_sum[t] = tree_sum[t] + 20'(prod[16*t + k]);
    end
    dot = 22'(tree_sum[0]) + 22'(tree_sum[1]) + 22'(tree_sum[2]) + 22'(tree_sum[3]);
  end

  // ---------------- MMIO ----------------
  logic cmd_write;
  assign cmd_write = mmio_req.valid && mmio_req.write && mmio_req.addr == 12'h060;

  always_ff @(posedge clk) begin
    if (rst) begin
      mmio_rsp <= '0;
    end else begin
      mmio_rsp.rvalid <= mmio_req.valid && !mmio_req.write;
      mmio_rsp.rdata  <= '0;
      if (mmio_req.valid && !mmio_req.write) begin
        if (mmio_req.addr < 12'h040)
          mmio_rsp.rdata <= v1_reg[mmio_req.addr[5:3]];
        else if (mmio_req.addr >= 12'h080 && mmio_req.addr < 12'h080 + 12'(2*MAX_COUNT))
          mmio_rsp.rdata <= {result[4*mmio_req.addr[5:3]+3], result[4*mmio_req.addr[5:3]+2],
                             result[4*mmio_req.addr[5:3]+1], result[4*mmio_req.addr[5:3]]};
        else
          unique case (mmio_req.addr)
            12'h040: mmio_rsp.rdata <= v2addr;
            12'h048: mmio_rsp.rdata <= stride;
            12'h050: mmio_rsp.rdata <= 64'(count);
            12'h058: mmio_rsp.rdata <= dst;
            12'h068: mmio_rsp.rdata <= {50'b0, 6'(done_cnt), 6'b0, done_flag, busy};
            default: mmio_rsp.rdata <= '0;
          endcase
      end
    end
  end

  // ---------------- engine ----------------
  assign busy = state != S_IDLE;

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      op_memcpy <= 1'b0;
      v1_reg    <= '0;
      v2addr    <= '0;
      stride    <= '0;
      dst       <= '0;
      count     <= '0;
      done_cnt  <= '0;
      done_flag <= 1'b0;
      result    <= '0;
      line      <= '0;
      beat      <= '0;
      src_addr  <= '0;
      dst_addr  <= '0;
    end else begin
      // register writes (configuration is ignored while busy)
      if (mmio_req.valid && mmio_req.write && !busy) begin
        if (mmio_req.addr < 12'h040) v1_reg[mmio_req.addr[5:3]] <= mmio_req.wdata;
        unique case (mmio_req.addr)
          12'h040: v2addr <= mmio_req.wdata;
          12'h048: stride <= mmio_req.wdata;
          12'h050: count  <= (mmio_req.wdata > 64'(MAX_COUNT)) ? CNT_W'(MAX_COUNT)
                                                                : CNT_W'(mmio_req.wdata);
          12'h058: dst    <= mmio_req.wdata;
          default: ;
        endcase
      end

      unique case (state)
        S_IDLE: if (cmd_write) begin
          op_memcpy <= mmio_req.wdata[0];
          src_addr  <= v2addr;
          dst_addr  <= dst;
          done_cnt  <= '0;
          done_flag <= (count == 0);
          if (!mmio_req.wdata[0]) result <= '0;
          if (count != 0) state <= S_RD_REQ;
        end
        S_RD_REQ: if (rd_a_ready) begin
          state <= S_RD_DATA;
          beat  <= '0;
        end
        S_RD_DATA: if (rd_d_valid) begin
          line[beat] <= rd_d.data;
          beat       <= beat + 3'd1;
          if (beat == 3'(LINE_BEATS - 1)) begin
            beat  <= '0;
            state <= op_memcpy ? S_WR_DATA : S_MAC;
          end
        end
        S_MAC: begin
          result[done_cnt] <= sat16(32'(dot));
          src_addr <= src_addr + stride;
          done_cnt <= done_cnt + 1'b1;
          if (done_cnt + 1'b1 == count) begin
            state     <= S_IDLE;
            done_flag <= 1'b1;
          end else
            state <= S_RD_REQ;
        end
        S_WR_DATA: if (wr_a_ready) begin
          beat <= beat + 3'd1;
          if (beat == 3'(LINE_BEATS - 1)) state <= S_WR_ACK;
        end
        S_WR_ACK: if (wr_d_valid) begin
          src_addr <= src_addr + stride;
          dst_addr <= dst_addr + stride;
          done_cnt <= done_cnt + 1'b1;
          if (done_cnt + 1'b1 == count) begin
            state     <= S_IDLE;
            done_flag <= 1'b1;
          end else
            state <= S_RD_REQ;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- TileLink nodes ----------------
  always_comb begin
    rd_a_valid     = state == S_RD_REQ;
    rd_a           = '0;
    rd_a.opcode    = TL_GET;
    rd_a.size      = 3'd6;
    rd_a.address   = {src_addr[63:6], 6'b0};
    rd_d_ready     = state == S_RD_DATA;

    wr_a_valid     = state == S_WR_DATA;
    wr_a           = '0;
    wr_a.opcode    = TL_PUT_FULL;
    wr_a.size      = 3'd6;
    wr_a.address   = {dst_addr[63:6], 6'b0};
    wr_a.data      = line[beat];
    wr_d_ready     = state == S_WR_ACK;
  end

  // A request stays valid and unchanged until it is accepted.
  a_rd_hold: assert property (@(posedge clk) disable iff (rst)
    rd_a_valid && !rd_a_ready |=> rd_a_valid && $stable(rd_a));
  a_wr_hold: assert property (@(posedge clk) disable iff (rst)
    wr_a_valid && !wr_a_ready |=> wr_a_valid && $stable(wr_a));

endmodule
