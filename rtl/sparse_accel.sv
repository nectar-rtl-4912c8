// sparse_accel: core-coupled sparse x dense matrix multiply accelerator.
//
// The accelerator computes C = A * B for a sparse matrix A and a dense
// matrix B of signed 32-bit elements with `cols` columns (at most MAX_COLS).
// A is a list of nonzero elements, one 64-bit word each:
//   bit 63 last  : the element ends output row r of C (C row is written)
//   bit 62 start : the element begins a new output row (accumulators cleared)
//   bits 47:32   : weight, signed int16
//   bits 31:0    : index of the dense row of B the weight multiplies
// For every element the accelerator reads dense row `index` of B, two int32
// per 64-bit beat, multiplies each element by the weight and adds it into
// the row of accumulators. On a `last` element the accumulator row is
// written to dest + r * cols * 4 and r advances.
//
// The core drives it with RoCC commands:
//   funct 0: rs1 = address of A's element list, rs2 = number of elements
//   funct 1: rs1 = address of B, rs2 = cols (even)
//   funct 2: rs1 = address of C; starts the operation. If xd is set the
//            accelerator answers in rd with the number of C rows written.
// `busy` is high while an operation runs.
//
// Memory requests use a 64-bit TileLink-style port with single-beat Gets
// and Puts. With SPLIT_PORTS set (as in the second variant, whose sparse row
// loader reads through the core's L1 while dense reads and output writes go
// to the L2) the sparse-element reads leave on a second port, l1_*, one at a
// time; otherwise they share the main port and the l1 port stays idle. RS_DEPTH sets how many dense-row reads may be in flight. With
// RS_DEPTH = 1 (the first variant, V1) reads go out one at a time. With a
// larger RS_DEPTH (the second variant, V2) a reservation station of
// RS_DEPTH entries tags each read with its entry number as the TileLink
// source, so the L2 may answer in any order; each answer is matched to its
// entry, which holds the column pair it belongs to, and is accumulated there.
//
// From the paper: the sparse-dense product, signed integers, the command
// collector / dispatch fed by RoCC with sparse pointer and size, dense
// pointer and size and destination pointer, the element stream with weight,
// start and last, the accumulators and output-row writer, and a reservation
// station taking out-of-order L2 responses in two of the four instances. This
// design's own choices: the element and command encodings, int16 weights and
// int32 data, single-beat requests, RS_DEPTH = 4, and one sparse element
// being processed at a time (the next element is read only after the dense
// row of the current one has been accumulated). The figure's LUT and virtual weight counter are
// not modelled (the paper does not say what they hold). Addresses leave this
// module as the software gave them; at the top level each accelerator's port
// goes through sparse_tlb, which translates them.
module sparse_accel
  import nectar_pkg::*;
#(
  parameter int unsigned MAX_COLS = 128,
  parameter int unsigned RS_DEPTH = 4,
  parameter bit          SPLIT_PORTS = 1'b0
) (
  input  logic      clk,
  input  logic      rst,
  // RoCC
  input  logic      cmd_valid,
  output logic      cmd_ready,
  input  rocc_cmd_t cmd,
  output logic      resp_valid,
  input  logic      resp_ready,
  output rocc_rsp_t resp,
  output logic      busy,
  // memory port
  output logic      a_valid,
  input  logic      a_ready,
  output tl_a_t     a,
  input  logic      d_valid,
  output logic      d_ready,
  input  tl_d_t     d,
  // sparse-element read port (used when SPLIT_PORTS is set)
  output logic      l1_a_valid,
  input  logic      l1_a_ready,
  output tl_a_t     l1_a,
  input  logic      l1_d_valid,
  output logic      l1_d_ready,
  input  tl_d_t     l1_d
);

  localparam int unsigned BEATS_MAX = MAX_COLS / 2;
  localparam int unsigned BEAT_IW   = $clog2(BEATS_MAX);
  localparam int unsigned COL_W     = $clog2(MAX_COLS + 1);
  localparam int unsigned RS_IW     = (RS_DEPTH > 1) ? $clog2(RS_DEPTH) : 1;
  localparam logic [SRC_W-1:0] SRC_SPARSE = SRC_W'(2**SRC_W - 2);
  localparam logic [SRC_W-1:0] SRC_PUT    = SRC_W'(2**SRC_W - 1);

  typedef enum logic [2:0] {
    S_IDLE, S_FETCH_SP, S_WAIT_SP, S_DENSE, S_WRITE, S_WRITE_ACK, S_NEXT, S_RESP
  } state_e;

  typedef struct packed {
    logic             valid;
    logic [BEAT_IW-1:0] beat;
  } rs_entry_t;

  state_e            state;
  logic [63:0]       sp_ptr, sp_size, dn_ptr, dst_ptr;
  logic [COL_W-1:0]  cols;
  logic [4:0]        rd_reg;
  logic              xd_reg;
  logic [63:0]       k;            // current sparse element
  logic [63:0]       out_row;
  logic signed [15:0] weight;
  logic [31:0]       dn_idx;
  logic              elem_last;
  logic [BEAT_IW:0]  issued, returned;
  logic signed [31:0] acc [MAX_COLS];
  rs_entry_t         rs [RS_DEPTH];
  logic              rs_free_found;
  logic [RS_IW-1:0]  rs_free;

  logic [BEAT_IW:0]  n_beats;
  assign n_beats = (BEAT_IW+1)'(cols >> 1);

  logic [63:0] row_bytes;
  assign row_bytes = 64'(cols) << 2;

  // Entries are handed out in issue order (beat i takes entry i mod
  // RS_DEPTH) and freed in any order; a request waits until its entry is
  // free, so a pending request never changes.
  always_comb begin
    rs_free       = RS_IW'(32'(issued) % RS_DEPTH);
    rs_free_found = !rs[rs_free].valid;
  end

  assign busy      = state != S_IDLE;
  assign cmd_ready = state == S_IDLE;

  // ---------------- request channels ----------------
  // sparse-element reads go to the l1 port when SPLIT_PORTS is set
  tl_a_t sp_req;
  always_comb begin
    sp_req         = '0;
    sp_req.opcode  = TL_GET;
    sp_req.size    = 3'd3;
    sp_req.source  = SRC_SPARSE;
    sp_req.address = sp_ptr + (k << 3);
  end
  assign l1_a_valid = SPLIT_PORTS && state == S_FETCH_SP;
  assign l1_a       = SPLIT_PORTS ? sp_req : '0;
  assign l1_d_ready = 1'b1;

  logic        sp_accept, sp_ans;
  logic [63:0] sp_data;
  assign sp_accept = SPLIT_PORTS ? l1_a_ready : a_ready;
  assign sp_ans    = SPLIT_PORTS ? (l1_d_valid && l1_d.opcode == TL_ACK_DATA)
                                 : (d_valid && d.source == SRC_SPARSE);
  assign sp_data   = SPLIT_PORTS ? l1_d.data : d.data;

  always_comb begin
    a_valid   = 1'b0;
    a         = '0;
    a.size    = 3'd3;
    a.opcode  = TL_GET;
    unique case (state)
      S_FETCH_SP: if (!SPLIT_PORTS) begin
        a_valid = 1'b1;
        a       = sp_req;
      end
      S_DENSE: begin
        a_valid   = issued != n_beats && rs_free_found;
        a.source  = SRC_W'(rs_free);
        a.address = dn_ptr + 64'(dn_idx) * row_bytes + (64'(issued) << 3);
      end
      S_WRITE: begin
        a_valid   = 1'b1;
        a.opcode  = TL_PUT_FULL;
        a.source  = SRC_PUT;
        a.address = dst_ptr + out_row * row_bytes + (64'(issued) << 3);
        a.data    = {acc[2*issued[BEAT_IW-1:0] + 1], acc[2*issued[BEAT_IW-1:0]]};
      end
      default: ;
    endcase
  end

  assign d_ready = 1'b1;

  // ---------------- control ----------------
  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_IDLE;
      sp_ptr     <= '0;
      sp_size    <= '0;
      dn_ptr     <= '0;
      dst_ptr    <= '0;
      cols       <= '0;
      rd_reg     <= '0;
      xd_reg     <= 1'b0;
      k          <= '0;
      out_row    <= '0;
      weight     <= '0;
      dn_idx     <= '0;
      elem_last  <= 1'b0;
      issued     <= '0;
      returned   <= '0;
      resp_valid <= 1'b0;
      resp       <= '0;
      for (int i = 0; i < MAX_COLS; i++) acc[i] <= '0;
      for (int i = 0; i < RS_DEPTH; i++) rs[i] <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          unique case (cmd.funct)
            7'd0: begin sp_ptr <= cmd.rs1; sp_size <= cmd.rs2; end
            7'd1: begin
              dn_ptr <= cmd.rs1;
              cols   <= (cmd.rs2 > 64'(MAX_COLS)) ? COL_W'(MAX_COLS) : COL_W'(cmd.rs2);
            end
            7'd2: begin
              dst_ptr <= cmd.rs1;
              rd_reg  <= cmd.rd;
              xd_reg  <= cmd.xd;
              k       <= '0;
              out_row <= '0;
              for (int i = 0; i < MAX_COLS; i++) acc[i] <= '0;
              state   <= (sp_size == 0) ? S_RESP : S_FETCH_SP;
            end
            default: ;
          endcase
        end
        S_FETCH_SP: if (sp_accept) state <= S_WAIT_SP;
        S_WAIT_SP: if (sp_ans) begin
          elem_last <= sp_data[63];
          weight    <= sp_data[47:32];
          dn_idx    <= sp_data[31:0];
          if (sp_data[62]) for (int i = 0; i < MAX_COLS; i++) acc[i] <= '0;
          issued    <= '0;
          returned  <= '0;
          state     <= S_DENSE;
        end
        S_DENSE: begin
          if (a_valid && a_ready) begin
            rs[rs_free].valid <= 1'b1;
            rs[rs_free].beat  <= issued[BEAT_IW-1:0];
            issued <= issued + 1'b1;
          end
          if (d_valid && d.opcode == TL_ACK_DATA && d.source < SRC_W'(RS_DEPTH)) begin
            logic [BEAT_IW-1:0] b;
            b = rs[RS_IW'(d.source)].beat;
            acc[2*b]     <= acc[2*b]     + weight * $signed(d.data[31:0]);
            acc[2*b + 1] <= acc[2*b + 1] + weight * $signed(d.data[63:32]);
            rs[RS_IW'(d.source)].valid <= 1'b0;
            returned <= returned + 1'b1;
            if (returned + 1'b1 == n_beats) begin
              issued   <= '0;
              returned <= '0;
              state    <= elem_last ? S_WRITE : S_NEXT;
            end
          end
        end
        S_WRITE, S_WRITE_ACK: begin
          // Puts go out in S_WRITE; their acknowledgements are counted in
          // both states, since they may return before the last Put is sent
          if (state == S_WRITE && a_ready) begin
            issued <= issued + 1'b1;
            if (issued + 1'b1 == n_beats) state <= S_WRITE_ACK;
          end
          if (d_valid && d.opcode == TL_ACK) begin
            returned <= returned + 1'b1;
            if (returned + 1'b1 == n_beats) begin
              out_row <= out_row + 1'b1;
              for (int i = 0; i < MAX_COLS; i++) acc[i] <= '0;
              state   <= S_NEXT;
            end
          end
        end
        S_NEXT: begin
          k     <= k + 1'b1;
          state <= (k + 1'b1 == sp_size) ? S_RESP : S_FETCH_SP;
        end
        S_RESP: begin
          if (!xd_reg) state <= S_IDLE;
          else if (!resp_valid) begin
            resp_valid <= 1'b1;
            resp.rd    <= rd_reg;
            resp.data  <= out_row;
          end else if (resp_ready) begin
            resp_valid <= 1'b0;
            state      <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (rst)
    a_valid && !a_ready |=> a_valid && $stable(a));
  l1_hold: assert property (@(posedge clk) disable iff (rst)
    l1_a_valid && !l1_a_ready |=> l1_a_valid && $stable(l1_a));
  // a response always belongs to a reservation-station entry in use
  rs_match: assert property (@(posedge clk) disable iff (rst)
    state == S_DENSE && d_valid |-> rs[RS_IW'(d.source)].valid);

endmodule
