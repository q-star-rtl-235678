// tb_qstar_noc -- end-to-end test of the full 5 x 5 network at its default size.
//
// The testbench plays all 20 I/O ports: a source per port injects packets of
// 1 to 4 flits, and a sink per port accepts flits and hands credits back after
// a random delay (with stretches where it stops consuming, to exhaust credits).
// A scoreboard keeps, for every (source port, destination port) pair, the flits
// in flight in order, with the VC each packet must travel on. Every delivered
// flit is checked for its exit port, its content, its order within the pair and
// its VC; every packet must arrive exactly once.
//
// Phases:
//   1. zero-load latency, bitmaps at reset (all XY, VC0): one packet at a time,
//      the head must leave 1 + 2*H cycles after it is accepted (H routers);
//   2. bitmaps written on the configuration bus: every node all ones (YX, VC1),
//      bitmaps read back, zero-load latency again;
//   3. bitmaps computed by the on-chip calculator from random weights; every
//      bitmap is compared with a reference computed here;
//   4. random traffic from all ports at a high load, with sink stalls;
//   5. drain, then check that nothing is missing.
// Mechanisms counted (each must occur): packets on VC0 and on VC1, bus bitmap
// writes, calculator runs, credit exhaustion at a sink, injection back-pressure,
// packets delayed by contention, multi-flit (wormhole) packets.
module tb_qstar_noc;
  import qstar_pkg::*;

  localparam int MX   = 5;
  localparam int MY   = 5;
  localparam int N    = MX * MY;
  localparam int NIO  = 2 * (MX + MY);
  localparam int BUF  = 32;
  localparam int W_W  = 16;
  localparam int NW   = $clog2(N);

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              io_in_valid   [NIO];
  flit_t             io_in_flit    [NIO];
  logic              io_in_ready   [NIO];
  link_t             io_out        [NIO];
  logic [NUM_VC-1:0] io_out_credit [NIO];
  logic              bm_we;
  logic [NW-1:0]     bm_node;
  logic [N-1:0]      bm_data;
  logic              calc_start;
  logic [W_W-1:0]    w_nr [N];
  logic              calc_busy, calc_done;

  qstar_noc dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // ------------------------------------------------------------ reference
  logic [N-1:0] bm_model [N];

  function automatic int manh(int a, int b);
    return (a > b) ? a - b : b - a;
  endfunction

  // cost of the XY (yx=0) or YX (yx=1) route from node s to node d
  function automatic longint route_cost(int s, int d, bit yx, logic [W_W-1:0] w [N]);
    int x, y, sx, sy, dx, dy;
    longint c;
    sx = s % MX; sy = s / MX; dx = d % MX; dy = d / MX;
    x = sx; y = sy; c = w[y*MX + x];
    // walk the route hop by hop
    while (x != dx || y != dy) begin
      if (!yx) begin
        if (x != dx) x += (dx > x) ? 1 : -1; else y += (dy > y) ? 1 : -1;
      end else begin
        if (y != dy) y += (dy > y) ? 1 : -1; else x += (dx > x) ? 1 : -1;
      end
      c += w[y*MX + x];
    end
    return c;
  endfunction

  function automatic int port_node(int p);
    return io_y(p, MX, MY) * MX + io_x(p, MX, MY);
  endfunction

  // ---------------------------------------------------------- scoreboard
  typedef struct {
    flit_t  f;
    logic   vc;
    longint t_in;
    int     hops;
  } exp_t;

  exp_t   expq [NIO][NIO][$];
  flit_t  txq  [NIO][$];
  int     seq  [NIO];
  int     in_flight = 0;
  int     sent_pkts = 0, recv_pkts = 0;

  // mechanism counters
  int n_vc0 = 0, n_vc1 = 0, n_cfg = 0, n_calc = 0, n_cred_exh = 0;
  int n_inj_stall = 0, n_delayed = 0, n_multi = 0;

  // wormhole: on one VC of one port, flits of a packet are contiguous
  int open_src [NIO][NUM_VC];

  function automatic void queue_packet(int p, int q, int len);
    int xq, yq;
    xq = io_x(q, MX, MY); yq = io_y(q, MX, MY);
    for (int i = 0; i < len; i++) begin
      flit_t f;
      f.head    = (i == 0);
      f.tail    = (i == len - 1);
      f.dst_x   = COORD_W'(xq);
      f.dst_y   = COORD_W'(yq);
      f.dst_dir = io_dir(q, MX, MY);
      f.data    = {5'(p), 5'(q), 14'(seq[p]), 4'(i), 4'($urandom)};
      txq[p].push_back(f);
    end
    seq[p]++;
    if (len > 1) n_multi++;
  endfunction

  // sources
  always @(posedge clk) begin
    if (rst_n) begin
      for (int p = 0; p < NIO; p++) begin
        if (io_in_valid[p] && !io_in_ready[p]) n_inj_stall++;
        if (io_in_valid[p] && io_in_ready[p]) begin
          exp_t e;
          flit_t f;
          int q, s, d;
          f = txq[p].pop_front();
          q = int'(f.data[26:22]);
          s = port_node(p);
          d = int'(f.dst_y) * MX + int'(f.dst_x);
          e.f    = f;
          e.vc   = bm_model[s][d];
          e.t_in = cyc;
          e.hops = manh(s % MX, d % MX) + manh(s / MX, d / MX) + 1;
          expq[p][q].push_back(e);
          in_flight++;
          if (f.head) sent_pkts++;
        end
        io_in_valid[p] <= (txq[p].size() > 0);
        if (txq[p].size() > 0) io_in_flit[p] <= txq[p][0];
      end
    end
  end

  // sinks
  int  held [NIO][NUM_VC];
  bit  sink_stall = 1'b0;
  bit  check_latency = 1'b0;

  always @(posedge clk) begin
    if (!rst_n) begin
      for (int q = 0; q < NIO; q++) begin
        io_out_credit[q] <= '0;
        for (int v = 0; v < NUM_VC; v++) begin
          held[q][v] = 0;
          open_src[q][v] = -1;
        end
      end
    end else begin
      for (int q = 0; q < NIO; q++) begin
        logic [NUM_VC-1:0] cr;
        cr = '0;
        if (io_out[q].valid) begin
          flit_t f;
          int p, v;
          exp_t e;
          f = io_out[q].flit;
          v = int'(io_out[q].vc);
          p = int'(f.data[31:27]);
          held[q][v]++;
          check(held[q][v] <= BUF, $sformatf("sink %0d vc %0d overflow", q, v));
          if (held[q][v] == BUF) n_cred_exh++;
          check(int'(f.data[26:22]) == q, $sformatf("flit for port %0d left by port %0d", f.data[26:22], q));
          if (p < NIO && expq[p][q].size() > 0) begin
            e = expq[p][q].pop_front();
            in_flight--;
            check(e.f == f, $sformatf("port %0d: flit %h expected %h", q, f, e.f));
            check(e.vc == io_out[q].vc, $sformatf("port %0d: vc %0d expected %0d", q, io_out[q].vc, e.vc));
            if (f.head) begin
              recv_pkts++;
              if (io_out[q].vc) n_vc1++; else n_vc0++;
              if (cyc - e.t_in > 2 * e.hops + 1) n_delayed++;
              if (check_latency)
                check(cyc - e.t_in == longint'(2 * e.hops + 1),
                      $sformatf("latency %0d from %0d to %0d, expected %0d", cyc - e.t_in, p, q, 2*e.hops+1));
            end
          end else begin
            check(1'b0, $sformatf("unexpected flit %h at port %0d", f, q));
          end
          // wormhole contiguity
          if (f.head) begin
            check(open_src[q][v] == -1, "head flit inside another packet on the same VC");
            open_src[q][v] = f.tail ? -1 : p;
          end else begin
            check(open_src[q][v] == p, "body flit of a different packet on the same VC");
            if (f.tail) open_src[q][v] = -1;
          end
        end
        if (!sink_stall) begin
          for (int v = 0; v < NUM_VC; v++) begin
            if (held[q][v] > 0 && ($urandom % 4) != 0) begin
              cr[v] = 1'b1;
              held[q][v]--;
            end
          end
        end
        io_out_credit[q] <= cr;
      end
    end
  end

  task automatic wait_idle(int limit);
    int t;
    t = 0;
    while ((in_flight > 0 || !all_tx_empty()) && t < limit) begin
      @(posedge clk);
      t++;
    end
    check(in_flight == 0 && all_tx_empty(), $sformatf("network did not drain, %0d flits missing", in_flight));
  endtask

  function automatic bit all_tx_empty();
    for (int p = 0; p < NIO; p++) if (txq[p].size() > 0) return 1'b0;
    return 1'b1;
  endfunction

  task automatic zero_load_round();
    for (int k = 0; k < 40; k++) begin
      int p, q;
      p = $urandom % NIO;
      q = $urandom % NIO;
      if (q == p) q = (q + 7) % NIO;
      queue_packet(p, q, 1 + ($urandom % 3));
      wait_idle(200);
      repeat (3) @(posedge clk);
    end
  endtask

  task automatic cfg_write(int node, logic [N-1:0] data);
    @(posedge clk);
    bm_we   <= 1'b1;
    bm_node <= NW'(node);
    bm_data <= data;
    @(posedge clk);
    bm_we   <= 1'b0;
    bm_model[node] = data;
    n_cfg++;
  endtask

  task automatic check_bitmaps(string when);
    // read the bitmaps back through the hierarchy
    logic [N-1:0] hw [N];
    hw[ 0] = dut.g_y[0].g_x[0].u_bitmap.bitmap; hw[ 1] = dut.g_y[0].g_x[1].u_bitmap.bitmap;
    hw[ 2] = dut.g_y[0].g_x[2].u_bitmap.bitmap; hw[ 3] = dut.g_y[0].g_x[3].u_bitmap.bitmap;
    hw[ 4] = dut.g_y[0].g_x[4].u_bitmap.bitmap; hw[ 5] = dut.g_y[1].g_x[0].u_bitmap.bitmap;
    hw[ 6] = dut.g_y[1].g_x[1].u_bitmap.bitmap; hw[ 7] = dut.g_y[1].g_x[2].u_bitmap.bitmap;
    hw[ 8] = dut.g_y[1].g_x[3].u_bitmap.bitmap; hw[ 9] = dut.g_y[1].g_x[4].u_bitmap.bitmap;
    hw[10] = dut.g_y[2].g_x[0].u_bitmap.bitmap; hw[11] = dut.g_y[2].g_x[1].u_bitmap.bitmap;
    hw[12] = dut.g_y[2].g_x[2].u_bitmap.bitmap; hw[13] = dut.g_y[2].g_x[3].u_bitmap.bitmap;
    hw[14] = dut.g_y[2].g_x[4].u_bitmap.bitmap; hw[15] = dut.g_y[3].g_x[0].u_bitmap.bitmap;
    hw[16] = dut.g_y[3].g_x[1].u_bitmap.bitmap; hw[17] = dut.g_y[3].g_x[2].u_bitmap.bitmap;
    hw[18] = dut.g_y[3].g_x[3].u_bitmap.bitmap; hw[19] = dut.g_y[3].g_x[4].u_bitmap.bitmap;
    hw[20] = dut.g_y[4].g_x[0].u_bitmap.bitmap; hw[21] = dut.g_y[4].g_x[1].u_bitmap.bitmap;
    hw[22] = dut.g_y[4].g_x[2].u_bitmap.bitmap; hw[23] = dut.g_y[4].g_x[3].u_bitmap.bitmap;
    hw[24] = dut.g_y[4].g_x[4].u_bitmap.bitmap;
    for (int n = 0; n < N; n++)
      check(hw[n] == bm_model[n], $sformatf("%s: bitmap of node %0d is %h, expected %h", when, n, hw[n], bm_model[n]));
  endtask

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NIO; p++) begin
      io_in_valid[p] = 1'b0;
      io_in_flit[p]  = '0;
      io_out_credit[p] = '0;
      seq[p] = 0;
    end
    for (int n = 0; n < N; n++) begin
      bm_model[n] = '0;
      w_nr[n] = '0;
    end
    bm_we = 1'b0; bm_node = '0; bm_data = '0; calc_start = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // 1. zero-load latency with reset bitmaps (XY everywhere)
    check_bitmaps("after reset");
    check_latency = 1'b1;
    zero_load_round();

    // 2. configuration bus: all YX
    for (int n = 0; n < N; n++) cfg_write(n, '1);
    @(posedge clk);
    check_bitmaps("after bus writes");
    zero_load_round();
    check_latency = 1'b0;

    // 3. choice calculator with random weights (8 fraction bits, 0..2.0)
    for (int n = 0; n < N; n++) w_nr[n] = W_W'($urandom % 512);
    for (int s = 0; s < N; s++)
      for (int d = 0; d < N; d++)
        bm_model[s][d] = !(route_cost(s, d, 1'b0, w_nr) < route_cost(s, d, 1'b1, w_nr));
    @(posedge clk);
    calc_start <= 1'b1;
    @(posedge clk);
    calc_start <= 1'b0;
    begin
      longint t0;
      t0 = cyc;
      while (!calc_done && cyc - t0 < 2000) @(posedge clk);
      check(calc_done == 1'b1, "calculator did not finish");
      check(cyc - t0 >= N * N && cyc - t0 <= N * N + 3, $sformatf("calculator took %0d cycles", cyc - t0));
    end
    n_calc++;
    @(posedge clk);
    @(posedge clk);
    check_bitmaps("after calculator");

    // 4. random traffic at high load, with sink stalls
    for (int round = 0; round < 12; round++) begin
      for (int p = 0; p < NIO; p++) begin
        for (int k = 0; k < 24; k++) begin
          int q;
          q = $urandom % NIO;
          if (q == p) q = (q + 1) % NIO;
          queue_packet(p, q, 1 + ($urandom % 4));
        end
      end
      if (round % 3 == 1) sink_stall = 1'b1;
      repeat (600) @(posedge clk);
      sink_stall = 1'b0;
      repeat (150) @(posedge clk);
    end

    // 5. drain
    wait_idle(100000);
    repeat (10) @(posedge clk);
    check(sent_pkts == recv_pkts, $sformatf("sent %0d packets, received %0d", sent_pkts, recv_pkts));

    $display("mechanisms: vc0=%0d vc1=%0d bus_writes=%0d calc_runs=%0d credit_exhausted=%0d inject_stall=%0d delayed=%0d multiflit=%0d packets=%0d",
             n_vc0, n_vc1, n_cfg, n_calc, n_cred_exh, n_inj_stall, n_delayed, n_multi, recv_pkts);
    check(n_vc0 > 0, "no packet used VC0");
    check(n_vc1 > 0, "no packet used VC1");
    check(n_cfg > 0, "no bus bitmap write");
    check(n_calc > 0, "no calculator run");
    check(n_cred_exh > 0, "credits never ran out");
    check(n_inj_stall > 0, "injection never back-pressured");
    check(n_delayed > 0, "no packet was delayed by contention");
    check(n_multi > 0, "no multi-flit packet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
