// tb_nmce_workloads: the near-memory compute engine on the kernels of the
// chip's evaluation, at the engine's default parameters.
//
//  - memcpy of 64 B, 128 KB and 1 MiB. One command moves at most 32 lines
//    (2 KB), so software issues 1, 64 and 512 commands; every copied word is
//    compared with its source afterwards.
//  - an 8-element int8 MAC: v1 holds 8 values, the rest of the operand is 0.
//  - an 8x8 int8 matrix product C = A * B: for each column j of B the operand
//    register holds that column and one command computes the 8 dot products
//    with the rows of A (one row per 64-byte line).
//  - a matrix-vector product with 256-byte rows: each row is split into four
//    64-byte pieces, one command per piece computes the partial sums of 32
//    rows (stride 256), and the testbench adds the four partials as the core
//    would. Values are kept small so that no partial sum saturates, and the
//    total is compared with the exact product.
// The cycles each kernel takes are printed. The memory answers without
// stalls so that the cycle counts are the engine's own.
module tb_nmce_workloads;
  import nectar_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  mmio_req_t mreq;
  mmio_rsp_t mrsp;
  logic rd_a_valid, rd_a_ready, rd_d_valid, rd_d_ready;
  logic wr_a_valid, wr_a_ready, wr_d_valid, wr_d_ready;
  tl_a_t rd_a, wr_a;
  tl_d_t rd_d, wr_d;
  logic busy;

  nmce dut (.clk, .rst, .mmio_req(mreq), .mmio_rsp(mrsp),
            .rd_a_valid, .rd_a_ready, .rd_a, .rd_d_valid, .rd_d_ready, .rd_d,
            .wr_a_valid, .wr_a_ready, .wr_a, .wr_d_valid, .wr_d_ready, .wr_d, .busy);

  tl_mem_model #(.OOO(0), .STALL(0)) mem_rd (.clk, .rst, .a_valid(rd_a_valid), .a_ready(rd_a_ready),
      .a(rd_a), .d_valid(rd_d_valid), .d_ready(rd_d_ready), .d(rd_d));
  tl_mem_model #(.OOO(0), .STALL(0)) mem_wr (.clk, .rst, .a_valid(wr_a_valid), .a_ready(wr_a_ready),
      .a(wr_a), .d_valid(wr_d_valid), .d_ready(wr_d_ready), .d(wr_d));

  int checks = 0, failures = 0;
  int unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [11:0] addr, input logic [63:0] data);
    @(negedge clk); mreq = '{valid: 1, write: 1, addr: addr, wdata: data};
    @(negedge clk); mreq = '0;
  endtask

  task automatic rdreg(input logic [11:0] addr, output logic [63:0] data);
    @(negedge clk); mreq = '{valid: 1, write: 0, addr: addr, wdata: 0};
    @(negedge clk); mreq = '0; data = mrsp.rdata;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  // ---------------- memcpy ----------------
  task automatic memcpy(input logic [63:0] src, input logic [63:0] dst, input int bytes);
    int lines, t0, errs;
    lines = bytes / 64;
    for (int w = 0; w < bytes / 8; w++) mem_rd.mem[(src >> 3) + 64'(w)] = {$urandom, $urandom};
    t0 = cycle;
    wr(12'h048, 64'd64);
    for (int l = 0; l < lines; l += 32) begin
      int n;
      n = (lines - l > 32) ? 32 : lines - l;
      wr(12'h040, src + 64'(64 * l));
      wr(12'h058, dst + 64'(64 * l));
      wr(12'h050, 64'(n));
      wr(12'h060, 64'd1);
      wait_idle();
    end
    errs = 0;
    for (int w = 0; w < bytes / 8; w++)
      if (mem_wr.rd((dst >> 3) + 64'(w)) != mem_rd.rd((src >> 3) + 64'(w))) errs++;
    check(errs == 0, $sformatf("memcpy %0d B: %0d words differ", bytes, errs));
    $display("memcpy %0d B: %0d commands, %0d cycles", bytes, (lines + 31) / 32, cycle - t0);
  endtask

  // ---------------- dot products ----------------
  logic [7:0] v1 [64];

  task automatic load_v1();
    for (int w = 0; w < 8; w++) begin
      logic [63:0] x;
      for (int b = 0; b < 8; b++) x[8*b +: 8] = v1[8*w + b];
      wr(12'(8*w), x);
    end
  endtask

  function automatic logic signed [7:0] mbyte(input logic [63:0] byte_addr);
    logic [63:0] w;
    w = mem_rd.rd(byte_addr >> 3);
    return w[8 * byte_addr[2:0] +: 8];
  endfunction

  task automatic set_byte(input logic [63:0] byte_addr, input logic [7:0] v);
    logic [63:0] w;
    w = mem_rd.rd(byte_addr >> 3);
    w[8 * byte_addr[2:0] +: 8] = v;
    mem_rd.mem[byte_addr >> 3] = w;
  endtask

  // run a MAC command and return its `cnt` results
  task automatic mac(input logic [63:0] base, input logic [63:0] stride, input int cnt,
                     output logic signed [15:0] res [32]);
    logic [63:0] d;
    wr(12'h040, base); wr(12'h048, stride); wr(12'h050, 64'(cnt));
    wr(12'h060, 64'd0);
    wait_idle();
    for (int w = 0; w < 8; w++) begin
      rdreg(12'(12'h080 + 8*w), d);
      for (int s = 0; s < 4; s++) res[4*w + s] = d[16*s +: 16];
    end
  endtask

  logic signed [15:0] res [32];

  initial begin
    int t0;
    mreq = '0;
    repeat (4) @(negedge clk); rst = 0;

    // ---- memcpy kernels ----
    memcpy(64'h0010_0000, 64'h0080_0000, 64);
    memcpy(64'h0020_0000, 64'h00a0_0000, 128 * 1024);
    memcpy(64'h0100_0000, 64'h0200_0000, 1024 * 1024);

    // ---- 8-element MAC ----
    for (int k = 0; k < 64; k++) v1[k] = (k < 8) ? 8'($urandom) : 8'h0;
    for (int k = 0; k < 64; k++) set_byte(64'h3000 + 64'(k), 8'($urandom));
    load_v1();
    t0 = cycle;
    mac(64'h3000, 64'd64, 1, res);
    begin
      int s;
      s = 0;
      for (int k = 0; k < 8; k++) s += int'($signed(v1[k])) * int'(mbyte(64'h3000 + 64'(k)));
      check(res[0] == sat16(s), $sformatf("8-element MAC got %0d exp %0d", res[0], s));
    end
    $display("8-element MAC: %0d cycles including register writes", cycle - t0);

    // ---- 8x8 matrix product: A rows at 0x4000 + 64 i, B at 0x5000 (row-major) ----
    begin
      logic signed [7:0] a [8][8], b [8][8];
      for (int i = 0; i < 8; i++)
        for (int j = 0; j < 8; j++) begin
          a[i][j] = 8'($urandom); b[i][j] = 8'($urandom);
          set_byte(64'h4000 + 64'(64 * i + j), a[i][j]);
        end
      t0 = cycle;
      for (int j = 0; j < 8; j++) begin
        for (int k = 0; k < 64; k++) v1[k] = (k < 8) ? b[k][j] : 8'h0;
        load_v1();
        mac(64'h4000, 64'd64, 8, res);
        for (int i = 0; i < 8; i++) begin
          int s;
          s = 0;
          for (int k = 0; k < 8; k++) s += int'(a[i][k]) * int'(b[k][j]);
          check(res[i] == sat16(s), $sformatf("8x8 C[%0d][%0d] got %0d exp %0d", i, j, res[i], s));
        end
      end
      $display("8x8 matmul: 8 commands, %0d cycles", cycle - t0);
    end

    // ---- 32 x 256-byte matrix times a 256-element vector ----
    begin
      logic signed [7:0] x [256];
      int acc [32];
      for (int k = 0; k < 256; k++) x[k] = 8'(($urandom % 15) - 7);
      for (int r = 0; r < 32; r++)
        for (int k = 0; k < 256; k++) set_byte(64'h1_0000 + 64'(256 * r + k), 8'(($urandom % 15) - 7));
      for (int r = 0; r < 32; r++) acc[r] = 0;
      t0 = cycle;
      for (int p = 0; p < 4; p++) begin
        for (int k = 0; k < 64; k++) v1[k] = x[64 * p + k];
        load_v1();
        mac(64'h1_0000 + 64'(64 * p), 64'd256, 32, res);
        for (int r = 0; r < 32; r++) acc[r] += int'(res[r]);
      end
      for (int r = 0; r < 32; r++) begin
        int s;
        s = 0;
        for (int k = 0; k < 256; k++) s += int'(x[k]) * int'(mbyte(64'h1_0000 + 64'(256 * r + k)));
        check(acc[r] == s, $sformatf("256B-row matvec row %0d got %0d exp %0d", r, acc[r], s));
      end
      $display("32 x 256B matvec: 4 commands, %0d cycles", cycle - t0);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
