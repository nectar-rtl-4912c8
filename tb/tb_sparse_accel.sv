// tb_sparse_accel: self-checking testbench of both sparse accelerator
// variants.
//
// V1 (RS_DEPTH = 1) runs against an in-order memory, V2 (RS_DEPTH = 4)
// against a memory that answers pending reads in random order. Both get the
// same commands and data: random signed sparse matrices A in the element
// format of the accelerator, times random dense int32 matrices B (13 x 64 and
// 13 x 128, the dense shapes of the evaluation), compared with C = A * B
// computed here. It also checks the RoCC response (rows written), that V2
// really had several reads in flight and received answers out of order, and
// an empty element list. V2 is built with its separate sparse-element port
// (SPLIT_PORTS), served by a third, in-order memory holding the same data;
// the test checks that V2's element reads used only that port.
module tb_sparse_accel;
  import nectar_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic cmd_valid = 0;
  rocc_cmd_t cmd = '0;
  logic [1:0] cmd_ready, resp_valid, busy, a_valid, a_ready, d_valid, d_ready;
  rocc_rsp_t resp [2];
  tl_a_t a [2];
  tl_d_t d [2];

  sparse_accel #(.RS_DEPTH(1)) v1 (.clk, .rst, .cmd_valid, .cmd_ready(cmd_ready[0]), .cmd,
      .resp_valid(resp_valid[0]), .resp_ready(1'b1), .resp(resp[0]), .busy(busy[0]),
      .a_valid(a_valid[0]), .a_ready(a_ready[0]), .a(a[0]),
      .d_valid(d_valid[0]), .d_ready(d_ready[0]), .d(d[0]),
      .l1_a_valid(v1_l1_a_valid), .l1_a_ready(1'b1), .l1_a(), .l1_d_valid(1'b0), .l1_d_ready(),
      .l1_d('0));
  sparse_accel #(.RS_DEPTH(4), .SPLIT_PORTS(1'b1)) v2 (.clk, .rst, .cmd_valid, .cmd_ready(cmd_ready[1]), .cmd,
      .resp_valid(resp_valid[1]), .resp_ready(1'b1), .resp(resp[1]), .busy(busy[1]),
      .a_valid(a_valid[1]), .a_ready(a_ready[1]), .a(a[1]),
      .d_valid(d_valid[1]), .d_ready(d_ready[1]), .d(d[1]),
      .l1_a_valid, .l1_a_ready, .l1_a, .l1_d_valid, .l1_d_ready, .l1_d);

  logic  v1_l1_a_valid, l1_a_valid, l1_a_ready, l1_d_valid, l1_d_ready;
  tl_a_t l1_a;
  tl_d_t l1_d;
  tl_mem_model #(.OOO(0), .STALL(10)) m2l1 (.clk, .rst, .a_valid(l1_a_valid), .a_ready(l1_a_ready),
      .a(l1_a), .d_valid(l1_d_valid), .d_ready(l1_d_ready), .d(l1_d));

  tl_mem_model #(.OOO(0), .STALL(10)) m1 (.clk, .rst, .a_valid(a_valid[0]), .a_ready(a_ready[0]),
      .a(a[0]), .d_valid(d_valid[0]), .d_ready(d_ready[0]), .d(d[0]));
  tl_mem_model #(.OOO(1), .STALL(10)) m2 (.clk, .rst, .a_valid(a_valid[1]), .a_ready(a_ready[1]),
      .a(a[1]), .d_valid(d_valid[1]), .d_ready(d_ready[1]), .d(d[1]));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // V2: reads in flight and answers out of issue order
  int inflight = 0, max_inflight = 0, ooo_answers = 0;
  int v2_main_sparse = 0, v1_l1_used = 0;
  always @(posedge clk) if (!rst) begin
    if (a_valid[1] && a_ready[1] && a[1].source == 4'd14) v2_main_sparse++;
    if (v1_l1_a_valid) v1_l1_used++;
  end
  logic [SRC_W-1:0] issue_q [$];
  always @(posedge clk) if (!rst) begin
    if (d_valid[1] && d_ready[1] && d[1].opcode == TL_ACK_DATA && d[1].source < 4) begin
      if (issue_q.size() != 0 && issue_q[0] != d[1].source) ooo_answers++;
      foreach (issue_q[i]) if (issue_q[i] == d[1].source) begin issue_q.delete(i); break; end
      inflight--;
    end
    if (a_valid[1] && a_ready[1] && a[1].opcode == TL_GET && a[1].source < 4) begin
      issue_q.push_back(a[1].source);
      inflight++;
      if (inflight > max_inflight) max_inflight = inflight;
    end
  end

  task automatic send(input logic [6:0] f, input logic [63:0] rs1, input logic [63:0] rs2, input bit xd);
    @(negedge clk);
    cmd = '{funct: f, rd: 5'd7, xd: xd, rs1: rs1, rs2: rs2};
    cmd_valid = 1;
    while (cmd_ready != 2'b11) @(negedge clk);
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic put(input logic [63:0] byte_addr, input logic [63:0] v);
    m1.mem[byte_addr >> 3] = v;
    m2.mem[byte_addr >> 3] = v;
    m2l1.mem[byte_addr >> 3] = v;
  endtask

  localparam logic [63:0] A_BASE = 64'h1_0000, B_BASE = 64'h2_0000, C_BASE = 64'h4_0000;

  task automatic run_case(input int rows_b, input int cols, input int out_rows, input int per_row);
    int n = 0;
    int signed b [13][128];
    longint signed c [8][128];
    for (int r = 0; r < rows_b; r++)
      for (int j = 0; j < cols; j += 2) begin
        b[r][j]   = int'($urandom) >>> 8;
        b[r][j+1] = int'($urandom) >>> 8;
        put(B_BASE + 64'(4 * (r * cols + j)), {32'(b[r][j+1]), 32'(b[r][j])});
      end
    for (int o = 0; o < out_rows; o++) begin
      for (int j = 0; j < cols; j++) c[o][j] = 0;
      for (int e = 0; e < per_row; e++) begin
        int idx = int'($urandom % rows_b);
        logic signed [15:0] w = 16'($urandom);
        for (int j = 0; j < cols; j++) c[o][j] += longint'(w) * longint'(b[idx][j]);
        put(A_BASE + 64'(8 * n), {e == per_row - 1, e == 0, 14'b0, w, 32'(idx)});
        n++;
      end
    end
    send(7'd0, A_BASE, 64'(n), 0);
    send(7'd1, B_BASE, 64'(cols), 0);
    send(7'd2, C_BASE, 0, 1);
    fork
      begin : w1 int t = 0; while (!resp_valid[0] && t < 200000) begin @(negedge clk); t++; end
        check(resp_valid[0] && resp[0].data == 64'(out_rows) && resp[0].rd == 5'd7, "V1 response"); end
      begin : w2 int t = 0; while (!resp_valid[1] && t < 200000) begin @(negedge clk); t++; end
        check(resp_valid[1] && resp[1].data == 64'(out_rows) && resp[1].rd == 5'd7, "V2 response"); end
    join
    repeat (3) @(negedge clk);
    for (int o = 0; o < out_rows; o++)
      for (int j = 0; j < cols; j += 2) begin
        logic [63:0] exp, g1, g2;
        exp = {32'(c[o][j+1]), 32'(c[o][j])};
        g1 = m1.rd((C_BASE + 64'(4 * (o * cols + j))) >> 3);
        g2 = m2.rd((C_BASE + 64'(4 * (o * cols + j))) >> 3);
        check(g1 == exp, $sformatf("V1 C[%0d][%0d] got %h exp %h", o, j, g1, exp));
        check(g2 == exp, $sformatf("V2 C[%0d][%0d] got %h exp %h", o, j, g2, exp));
      end
  endtask

  initial begin
    repeat (4) @(negedge clk); rst = 0;
    check(busy == 2'b00, "idle after reset");
    run_case(13, 64, 4, 2);    // 8 sparse elements, 13 x 64 dense
    run_case(13, 64, 4, 3);    // 12 sparse elements, 13 x 64 dense
    run_case(13, 128, 4, 2);   // 8 sparse elements, 13 x 128 dense
    // empty element list: answers at once with zero rows
    send(7'd0, A_BASE, 0, 0);
    send(7'd2, C_BASE, 0, 1);
    repeat (4) @(negedge clk);
    check(busy == 2'b00, "empty list finishes");
    check(max_inflight > 1, $sformatf("V2 reads in flight: %0d", max_inflight));
    check(ooo_answers > 0, $sformatf("V2 out-of-order answers: %0d", ooo_answers));
    check(m2l1.gets > 0 && v2_main_sparse == 0 && v1_l1_used == 0,
          $sformatf("element reads: V2 port l1 %0d, V2 main %0d, V1 l1 %0d", m2l1.gets, v2_main_sparse, v1_l1_used));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
