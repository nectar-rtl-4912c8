// tb_scratchpad: random line and word writes and reads against a reference
// array kept here, with random d_ready back-pressure, over the whole 64 KB.
// It also checks that line reads stream one beat per cycle when d_ready is
// held high.
module tb_scratchpad;
  import nectar_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic a_valid = 0, a_ready, d_valid, d_ready = 1;
  tl_a_t a = '0;
  tl_d_t d;

  scratchpad dut (.clk, .rst, .a_valid, .a_ready, .a, .d_valid, .d_ready, .d);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [63:0] ref_mem [8192];
  bit          bp = 0;    // random back-pressure on d_ready
  always @(negedge clk) d_ready = bp ? ($urandom % 3 != 0) : 1'b1;

  task automatic send_a(input tl_a_op_e op, input logic [2:0] size, input logic [63:0] addr,
                        input logic [63:0] data);
    @(negedge clk);
    a = '{opcode: op, size: size, source: 4'd5, address: addr, data: data};
    a_valid = 1;
    @(posedge clk); while (!a_ready) @(posedge clk);
    @(negedge clk); a_valid = 0;
  endtask

  task automatic put(input logic [2:0] size, input logic [15:0] addr);
    int n = (size == 3'd6) ? 8 : 1;
    @(negedge clk);
    for (int b = 0; b < n; b++) begin
      logic [63:0] v = {$urandom, $urandom};
      a = '{opcode: TL_PUT_FULL, size: size, source: 4'd5, address: 64'(addr) + 64'(8*b), data: v};
      a_valid = 1;
      @(posedge clk); while (!a_ready) @(posedge clk);
      ref_mem[(addr >> 3) + 16'(b)] = v;
      @(negedge clk);
    end
    a_valid = 0;
    while (!(d_valid && d_ready)) @(posedge clk);
    check(d.opcode == TL_ACK && d.source == 4'd5, "put acknowledged");
    @(negedge clk);
  endtask

  task automatic get(input logic [2:0] size, input logic [15:0] addr, output int cycles);
    int n = (size == 3'd6) ? 8 : 1;
    int got = 0;
    int t0;
    send_a(TL_GET, size, 64'(addr), 0);
    t0 = $time;
    while (got < n) begin
      @(posedge clk);
      if (d_valid && d_ready) begin
        check(d.opcode == TL_ACK_DATA && d.data == ref_mem[(addr >> 3) + 16'(got)],
              $sformatf("get %h beat %0d got %h exp %h", addr, got, d.data, ref_mem[(addr >> 3) + 16'(got)]));
        got++;
      end
    end
    cycles = ($time - t0) / 10;
  endtask

  initial begin
    int c;
    repeat (3) @(negedge clk); rst = 0;
    // line reads stream at one beat per cycle
    put(3'd6, 16'h0040);
    get(3'd6, 16'h0040, c);
    check(c <= 9, $sformatf("line read took %0d cycles", c));
    bp = 1;
    for (int i = 0; i < 40; i++) begin
      logic [15:0] addr;
      addr = 16'($urandom) & 16'hffc0;
      put(3'd6, addr);
      get(3'd6, addr, c);
      addr = 16'($urandom) & 16'hfff8;
      put(3'd3, addr);
      get(3'd3, addr, c);
    end
    // the top line of the 64 KB
    bp = 0;
    put(3'd6, 16'hffc0);
    get(3'd6, 16'hffc0, c);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
