// tb_nmce: self-checking testbench of the near-memory compute engine.
//
// A behavioural memory serves the read and write nodes. The testbench
// programs the engine over its register bus and checks: 32 strided int8 dot
// products against a reference computed here, int16 saturation in both
// directions, the status register, a memcpy of several lines, and that the
// result of a dot product is written one cycle after the last beat of its
// line arrives (the single-cycle 64-byte MAC).
module tb_nmce;
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

  // both nodes reach the same memory contents: one model per node, writes
  // mirrored into the read model by the testbench where needed
  tl_mem_model #(.OOO(0), .STALL(20)) mem_rd (.clk, .rst, .a_valid(rd_a_valid), .a_ready(rd_a_ready),
      .a(rd_a), .d_valid(rd_d_valid), .d_ready(rd_d_ready), .d(rd_d));
  tl_mem_model #(.OOO(0), .STALL(20)) mem_wr (.clk, .rst, .a_valid(wr_a_valid), .a_ready(wr_a_ready),
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
    int n = 0;
    @(negedge clk);
    while (busy && n < 20000) begin @(negedge clk); n++; end
  endtask

  // single-cycle MAC: busy falls one cycle after the last beat of the line
  int unsigned beats = 0, last_beat_cycle = 0, mac_lat = 0;
  always @(posedge clk) if (!rst) begin
    if (rd_d_valid && rd_d_ready) begin
      beats++;
      if (beats % LINE_BEATS == 0) last_beat_cycle = cycle;
    end
  end

  logic [7:0] v1 [64];
  logic [63:0] d;

  function automatic logic signed [15:0] ref_dot(input logic [63:0] base);
    int s = 0;
    for (int k = 0; k < 64; k++) begin
      logic [63:0] w;
      w = mem_rd.rd((base >> 3) + 64'(k / 8));
      s += int'($signed(v1[k])) * int'($signed(w[8*(k%8) +: 8]));
    end
    return sat16(s);
  endfunction

  task automatic load_v1();
    for (int w = 0; w < 8; w++) begin
      logic [63:0] x;
      for (int b = 0; b < 8; b++) x[8*b +: 8] = v1[8*w + b];
      wr(12'(8*w), x);
    end
  endtask

  task automatic run_mac(input logic [63:0] base, input logic [63:0] stride, input int cnt, input string tag);
    logic [15:0] exp [32];
    for (int i = 0; i < cnt; i++) exp[i] = ref_dot(base + stride * 64'(i));
    wr(12'h040, base); wr(12'h048, stride); wr(12'h050, 64'(cnt));
    wr(12'h060, 64'd0);
    wait_idle();
    rdreg(12'h068, d);
    check(d[1] == 1 && d[0] == 0 && d[13:8] == 6'(cnt), $sformatf("%s status %h", tag, d));
    for (int w = 0; w < 8; w++) begin
      rdreg(12'(12'h080 + 8*w), d);
      for (int s = 0; s < 4; s++) begin
        logic [15:0] e;
        e = (4*w + s < cnt) ? exp[4*w + s] : 16'h0;
        check(d[16*s +: 16] == e, $sformatf("%s slot %0d got %h exp %h", tag, 4*w+s, d[16*s +: 16], e));
      end
    end
  endtask

  initial begin
    mreq = '0;
    repeat (4) @(negedge clk); rst = 0;

    // ---- random dot products, 32 operations, stride of 3 lines ----
    for (int k = 0; k < 64; k++) v1[k] = 8'($urandom);
    for (int i = 0; i < 32 * 3 * 8 + 8; i++) mem_rd.mem[64'h200 + 64'(i)] = {$urandom, $urandom};
    load_v1();
    for (int w = 0; w < 8; w++) begin
      rdreg(12'(8*w), d);
      check(d == {v1[8*w+7], v1[8*w+6], v1[8*w+5], v1[8*w+4], v1[8*w+3], v1[8*w+2], v1[8*w+1], v1[8*w]}, "v1Reg readback");
    end
    run_mac(64'h1000, 64'd192, 32, "random");

    // ---- saturation: +127*127*64 and -128*127*64 ----
    for (int k = 0; k < 64; k++) v1[k] = 8'sd127;
    for (int i = 0; i < 8; i++) begin
      mem_rd.mem[64'h800 + 64'(i)] = {8{8'h7f}};
      mem_rd.mem[64'h808 + 64'(i)] = {8{8'h80}};
      mem_rd.mem[64'h810 + 64'(i)] = {8{8'h01}};
    end
    load_v1();
    run_mac(64'h4000, 64'd64, 3, "saturate");
    rdreg(12'h080, d);
    check(d[15:0] == 16'h7fff && d[31:16] == 16'h8000 && d[47:32] == 16'd8128, "saturation values");

    // ---- single-cycle MAC: count = 1, no stalls seen by the check ----
    wr(12'h050, 64'd1);
    wr(12'h060, 64'd0);
    wait_idle();
    mac_lat = cycle - last_beat_cycle;
    // last beat taken at edge E (counter value c), result written at E+1,
    // idle seen at the negedge after E+1 when the counter reads c+2
    check(mac_lat == 2, $sformatf("MAC latency after last beat = %0d", mac_lat));

    // ---- count above the limit is clamped to 32 ----
    wr(12'h050, 64'd40);
    rdreg(12'h050, d);
    check(d == 64'd32, "count clamped to 32");

    // ---- memcpy: 4 lines, stride 128 ----
    for (int i = 0; i < 4 * 16; i++) mem_rd.mem[64'h1000 + 64'(i)] = {$urandom, $urandom};
    wr(12'h040, 64'h8000); wr(12'h048, 64'd128); wr(12'h050, 64'd4); wr(12'h058, 64'h20000);
    wr(12'h060, 64'd1);
    wait_idle();
    for (int l = 0; l < 4; l++)
      for (int b = 0; b < 8; b++)
        check(mem_wr.rd(64'h4000 + 64'(16*l + b)) == mem_rd.rd(64'h1000 + 64'(16*l + b)),
              $sformatf("memcpy line %0d beat %0d", l, b));
    check(mem_wr.puts == 4, $sformatf("memcpy puts %0d", mem_wr.puts));
    rdreg(12'h068, d);
    check(d[1] && d[13:8] == 6'd4, "memcpy status");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
