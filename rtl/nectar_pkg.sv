// Shared types and constants of the NeCTAr accelerator RTL.
//
// Memory traffic uses a reduced TileLink-UL style channel pair on a 64-bit
// bus: channel A carries requests (Get, PutFullData) and channel D carries
// responses (AccessAckData, AccessAck). A Get or Put of a whole 64-byte cache
// line takes LINE_BEATS = 8 beats of 64 bits; a word access takes one beat.
// The 64-bit width is the one printed for the system bus; the opcode values
// follow TileLink. Everything else here (source width, size encoding, the
// simple MMIO bus) is this design's own choice.
package nectar_pkg;

  localparam int unsigned ADDR_W     = 64;   // physical/virtual address width
  localparam int unsigned BEAT_W     = 64;   // 64-bit system bus
  localparam int unsigned LINE_BYTES = 64;   // cache line / operand register size
  localparam int unsigned LINE_BEATS = LINE_BYTES / (BEAT_W / 8);
  localparam int unsigned SRC_W      = 4;    // TileLink source (transaction tag)

  typedef enum logic [2:0] {
    TL_PUT_FULL = 3'd0,
    TL_GET      = 3'd4
  } tl_a_op_e;

  typedef enum logic [2:0] {
    TL_ACK      = 3'd0,
    TL_ACK_DATA = 3'd1
  } tl_d_op_e;

  // size: log2 of the bytes moved (3 = one beat, 6 = one cache line)
  typedef struct packed {
    tl_a_op_e            opcode;
    logic [2:0]          size;
    logic [SRC_W-1:0]    source;
    logic [ADDR_W-1:0]   address;
    logic [BEAT_W-1:0]   data;
  } tl_a_t;

  typedef struct packed {
    tl_d_op_e            opcode;
    logic [2:0]          size;
    logic [SRC_W-1:0]    source;
    logic [BEAT_W-1:0]   data;
  } tl_d_t;

  // Simple 64-bit register bus used for memory-mapped control registers.
  // A request is accepted in the cycle it is valid; a read returns rdata in
  // the next cycle with rvalid.
  typedef struct packed {
    logic        valid;
    logic        write;
    logic [11:0] addr;     // byte offset inside the device's register window
    logic [63:0] wdata;
  } mmio_req_t;

  typedef struct packed {
    logic        rvalid;
    logic [63:0] rdata;
  } mmio_rsp_t;

  // RoCC command and response (custom-instruction interface of a core)
  typedef struct packed {
    logic [6:0]  funct;
    logic [4:0]  rd;
    logic        xd;      // core expects a response in rd
    logic [63:0] rs1;
    logic [63:0] rs2;
  } rocc_cmd_t;

  typedef struct packed {
    logic [4:0]  rd;
    logic [63:0] data;
  } rocc_rsp_t;

  // Saturate a signed value to int16.
  function automatic logic signed [15:0] sat16(input logic signed [31:0] v);
    if (v > 32'sd32767)       return 16'sh7fff;
    else if (v < -32'sd32768) return 16'sh8000;
    else                      return v[15:0];
  endfunction

endpackage
