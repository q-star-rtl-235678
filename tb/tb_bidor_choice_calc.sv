// tb_bidor_choice_calc -- route-choice calculation against worked examples.
//
// 1. The 4 x 4 example of the Q-StaR paper: NR-weights 0.08 0.82 0.80 0.16 /
//    0.12 1.23 0.62 0.10 / 0.10 0.60 0.65 0.10 / 0.08 0.13 0.12 0.07 (node 0
//    first, in hundredths here). The bitmap printed for node 11 is
//    01110111111-1111 (destination 0 first, '-' for the node itself), and the
//    route 11 -> 4 costs 1.57 (XY) against 2.17 (YX). The node-11 bitmap
//    written by the calculator must match the printed string.
// 2. Random weights on the default 5 x 5 mesh: every bitmap against a
//    reference that walks each route hop by hop.
// Also checks the pass length, N*N cycles from start to done.
module tb_bidor_choice_calc;

  localparam int W_W = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------------- 4 x 4
  localparam int N4 = 16;
  logic           start4, busy4, done4, we4;
  logic [3:0]     node4;
  logic [N4-1:0]  data4;
  logic [W_W-1:0] w4 [N4];
  logic [N4-1:0]  got4 [N4];

  bidor_choice_calc #(.MESH_X(4), .MESH_Y(4), .W_W(W_W)) u4 (
    .clk(clk), .rst_n(rst_n), .start(start4), .w_nr(w4), .busy(busy4), .done(done4),
    .bm_we(we4), .bm_node(node4), .bm_data(data4));

  // ---------------------------------------------------------------- 5 x 5
  localparam int N5 = 25;
  logic           start5, busy5, done5, we5;
  logic [4:0]     node5;
  logic [N5-1:0]  data5;
  logic [W_W-1:0] w5 [N5];
  logic [N5-1:0]  got5 [N5];
  int             writes5 = 0;

  bidor_choice_calc dut (
    .clk(clk), .rst_n(rst_n), .start(start5), .w_nr(w5), .busy(busy5), .done(done5),
    .bm_we(we5), .bm_node(node5), .bm_data(data5));

  always @(posedge clk) begin
    if (we4) got4[node4] <= data4;
    if (we5 && rst_n) begin got5[node5] <= data5; writes5++; end
  end

  function automatic longint cost(int mx, int s, int d, bit yx, logic [W_W-1:0] w [N5]);
    int x, y, dx, dy;
    longint c;
    x = s % mx; y = s / mx; dx = d % mx; dy = d / mx;
    c = w[y*mx + x];
    while (x != dx || y != dy) begin
      if (!yx) begin
        if (x != dx) x += (dx > x) ? 1 : -1; else y += (dy > y) ? 1 : -1;
      end else begin
        if (y != dy) y += (dy > y) ? 1 : -1; else x += (dx > x) ? 1 : -1;
      end
      c += w[y*mx + x];
    end
    return c;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int fig [N4] = '{8, 82, 80, 16, 12, 123, 62, 10, 10, 60, 65, 10, 8, 13, 12, 7};
    string printed = "01110111111-1111";
    logic [W_W-1:0] wtmp [N5];
    longint t0;
    start4 = 0; start5 = 0;
    for (int n = 0; n < N4; n++) w4[n] = W_W'(fig[n]);
    for (int n = 0; n < N5; n++) w5[n] = W_W'($urandom % 400);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start4 = 1; start5 = 1;
    @(negedge clk);
    start4 = 0; start5 = 0;
    t0 = 0;
    while (!done5) begin @(negedge clk); t0++; end
    check(t0 == N5 * N5, $sformatf("5x5 pass took %0d cycles, expected %0d", t0, N5 * N5));
    check(!busy5 && !busy4, "busy after done");
    @(negedge clk);

    // worked example: node 11 of the 4 x 4 mesh
    for (int n = 0; n < N5; n++) wtmp[n] = (n < N4) ? w4[n] : '0;
    check(cost(4, 11, 4, 0, wtmp) == 157 && cost(4, 11, 4, 1, wtmp) == 217, "route costs 11->4");
    for (int d = 0; d < N4; d++) begin
      if (printed[d] != "-")
        check(got4[11][d] == (printed[d] == "1"),
              $sformatf("node 11 bit %0d is %0d, printed %s", d, got4[11][d], printed[d]));
    end
    check(got4[11][4] == 1'b0, "11 -> 4 must take XY");

    // random 5 x 5 against the reference
    check(writes5 == N5, $sformatf("%0d bitmap writes", writes5));
    for (int s = 0; s < N5; s++)
      for (int d = 0; d < N5; d++)
        check(got5[s][d] == !(cost(5, s, d, 0, w5) < cost(5, s, d, 1, w5)),
              $sformatf("b(%0d,%0d)", s, d));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
