// tb_qstar_workloads -- the four synthetic traffic patterns on the 5 x 5 network.
//
// For each pattern the 20 I/O ports inject 4-flit packets at random times
// (Bernoulli, OFFERED flits per port per cycle) for RUN cycles, and the network
// is then drained. Each pattern is run several times:
//   XY          -- all bitmaps zero, i.e. plain dimension-order routing on VC0;
//   BiDOR-load  -- NR-weights equal to the per-router load measured in the XY
//                  run (scaled to at most 1000), i.e. a profiled weight set;
//   BiDOR-model -- NR-weights from the behavioural N-Rank model (nrank_model)
//                  for the pattern's node-level traffic matrix, 8 fraction bits;
//   BiDOR-plot  -- (uniform and overturn only) the published weight profiles
//                  of this network, read off the plots by eye.
// In every BiDOR run the weights are turned into bitmaps by the network's own
// route-choice calculator. Finally uniform traffic is offered beyond
// saturation (SAT_LOAD) with XY and with the published uniform profile, and
// the accepted throughput (flits delivered per port per cycle during the
// injection window) is printed.
// Every delivered flit is checked (exit port, content, order per port pair, VC
// equal to the bitmap bit of its source and destination nodes), every bitmap
// written by the calculator is compared with a reference, and all packets must
// arrive. Average and worst packet latency (from generation to the head's
// exit, source queueing included) is printed for both routings; it is
// reported, not checked. So is the load imbalance: the coefficient of
// variation (standard deviation over mean) of the number of flits each router
// forwards during the injection window (LCV).
// Patterns over the 20 ports (the port-level definitions are this design's
// choice): uniform -- any other port at random; shuffle -- port p sends to
// (2p + floor(2p/20)) mod 20; permutation -- a fixed random permutation;
// overturn -- each port sends to the port at the point-mirrored position on
// the opposite edge.
module tb_qstar_workloads;
  import qstar_pkg::*;
  import nrank_model::*;

  localparam int MX = 5, MY = 5, N = MX * MY, NIO = 2 * (MX + MY);
  localparam int BUF = 32, W_W = 16, NW = $clog2(N);
  localparam int RUN = 3000;
  localparam int PKT = 4;
  localparam real OFFERED = 0.30;          // load of the pattern runs
  localparam real SAT_LOAD [2] = '{0.50, 0.80};  // loads of the saturation runs
  // NR-weight profiles of the 5 x 5 edge-I/O network as published in plotted
  // form for uniform and overturn traffic, read off by eye, in thousandths
  localparam int PLOT_UN [N] = '{50, 49, 48, 49, 50,  50, 26, 26, 26, 50,  50, 26, 26, 26, 50,
                                 50, 26, 26, 26, 50,  50, 48, 48, 48, 50};
  localparam int PLOT_OV [N] = '{80, 90, 30, 20, 20,  90, 30, 20, 12, 20,  24, 20, 45, 20, 24,
                                 20, 12, 20, 30, 90,  20, 20, 30, 90, 80};

  logic              clk = 1'b0, rst_n = 1'b0;
  logic              io_in_valid [NIO];
  flit_t             io_in_flit [NIO];
  logic              io_in_ready [NIO];
  link_t             io_out [NIO];
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
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cyc, what); end
  endtask

  function automatic int port_node(int p);
    return io_y(p, MX, MY) * MX + io_x(p, MX, MY);
  endfunction

  function automatic longint route_cost(int s, int d, bit yx);
    int x, y, dx, dy;
    longint c;
    x = s % MX; y = s / MX; dx = d % MX; dy = d / MX;
    c = longint'(w_nr[y*MX + x]);
    while (x != dx || y != dy) begin
      if (!yx) begin
        if (x != dx) x += (dx > x) ? 1 : -1; else y += (dy > y) ? 1 : -1;
      end else begin
        if (y != dy) y += (dy > y) ? 1 : -1; else x += (dx > x) ? 1 : -1;
      end
      c += longint'(w_nr[y*MX + x]);
    end
    return c;
  endfunction

  // ------------------------------------------------------------ patterns
  int perm [NIO];

  function automatic int mirror(int p);
    int x, y;
    dir_e d;
    x = io_x(p, MX, MY); y = io_y(p, MX, MY); d = io_dir(p, MX, MY);
    case (d)
      DIR_N:   return io_index(MX - 1 - x, MY - 1, 2, MX, MY);
      DIR_S:   return io_index(MX - 1 - x, 0, 0, MX, MY);
      DIR_E:   return io_index(0, MY - 1 - y, 3, MX, MY);
      default: return io_index(MX - 1, MY - 1 - y, 1, MX, MY);
    endcase
  endfunction

  function automatic int dest(int pat, int p);
    int q;
    case (pat)
      0: begin q = $urandom % (NIO - 1); return (q >= p) ? q + 1 : q; end
      1: return (2 * p + (2 * p) / NIO) % NIO;
      2: return perm[p];
      default: return mirror(p);
    endcase
  endfunction

  // --------------------------------------------------------- scoreboard
  typedef struct { flit_t f; logic vc; longint t_gen; } exp_t;
  typedef struct { flit_t f; longint t_gen; } tx_t;
  exp_t   expq [NIO][NIO][$];
  tx_t    txq  [NIO][$];
  logic [N-1:0] bm_model [N];
  int     in_flight = 0, seqn = 0;
  longint lat_sum = 0, lat_max = 0, pkts = 0;
  bit     generating = 0;
  real    offered = OFFERED;
  longint dlv = 0;         // flits delivered during the injection window
  int     pattern = 0;
  int     n_vc [NUM_VC];

  always @(posedge clk) begin
    if (rst_n) begin
      for (int p = 0; p < NIO; p++) begin
        if (io_in_valid[p] && io_in_ready[p]) begin
          tx_t t;
          exp_t e;
          int q;
          t = txq[p].pop_front();
          q = int'(t.f.data[26:22]);
          e.f = t.f;
          e.vc = bm_model[port_node(p)][int'(t.f.dst_y) * MX + int'(t.f.dst_x)];
          e.t_gen = t.t_gen;
          expq[p][q].push_back(e);
        end
        if (generating && ($urandom % 10000) < int'(offered / PKT * 10000.0)) begin
          int q;
          q = dest(pattern, p);
          for (int k = 0; k < PKT; k++) begin
            tx_t t;
            t.f.head = (k == 0); t.f.tail = (k == PKT - 1);
            t.f.dst_x = COORD_W'(io_x(q, MX, MY)); t.f.dst_y = COORD_W'(io_y(q, MX, MY));
            t.f.dst_dir = io_dir(q, MX, MY);
            t.f.data = {5'(p), 5'(q), 14'(seqn), 4'(k), 4'(0)};
            t.t_gen = cyc;
            txq[p].push_back(t);
            in_flight++;
          end
          seqn++;
        end
        io_in_valid[p] <= (txq[p].size() > 0);
        if (txq[p].size() > 0) io_in_flit[p] <= txq[p][0].f;
      end
    end
  end

  logic sinkq [NIO][$];   // VCs of the flits a sink holds, in arrival order
  always @(posedge clk) begin
    if (!rst_n) begin
      for (int q = 0; q < NIO; q++) begin
        io_out_credit[q] <= '0;
        sinkq[q].delete();
      end
    end else begin
      for (int q = 0; q < NIO; q++) begin
        logic [NUM_VC-1:0] cr;
        cr = '0;
        if (io_out[q].valid) begin
          flit_t f;
          int p;
          exp_t e;
          f = io_out[q].flit;
          p = int'(f.data[31:27]);
          sinkq[q].push_back(io_out[q].vc);
          if (measuring) dlv++;
          if (p < NIO && expq[p][q].size() > 0) begin
            e = expq[p][q].pop_front();
            in_flight--;
            check(e.f == f && e.vc == io_out[q].vc, $sformatf("port %0d: got %h vc %0d, expected %h vc %0d", q, f, io_out[q].vc, e.f, e.vc));
            if (f.head) begin
              pkts++;
              lat_sum += cyc - e.t_gen;
              if (cyc - e.t_gen > lat_max) lat_max = cyc - e.t_gen;
              n_vc[io_out[q].vc]++;
            end
          end else check(0, $sformatf("unexpected flit at port %0d", q));
        end
        // the sink consumes one flit per cycle, oldest first
        if (sinkq[q].size() > 0) cr[sinkq[q].pop_front()] = 1'b1;
        io_out_credit[q] <= cr;
      end
    end
  end

  // per-node load: flits forwarded by each router (all four outputs)
  longint fwd [N];
  bit     measuring = 0;
  for (genvar y = 0; y < MY; y++) begin : g_my
    for (genvar x = 0; x < MX; x++) begin : g_mx
      always @(posedge clk) begin
        if (measuring) begin
          for (int d = 0; d < NUM_PORT; d++)
            if (dut.g_y[y].g_x[x].u_router.out_link[d].valid) fwd[y*MX + x]++;
        end
      end
    end
  end

  // coefficient of variation of the node loads
  function automatic real lcv();
    real mean, var_sum;
    mean = 0.0;
    for (int n = 0; n < N; n++) mean += real'(fwd[n]);
    mean = mean / N;
    var_sum = 0.0;
    for (int n = 0; n < N; n++) var_sum += (real'(fwd[n]) - mean) ** 2;
    return (mean > 0.0) ? $sqrt(var_sum / N) / mean : 0.0;
  endfunction

  // configuration bus monitor: calculator writes against the reference
  logic calc_phase = 0;
  always @(posedge clk) begin
    if (rst_n && calc_phase && dut.calc_we) begin
      check(dut.calc_data == bm_model[dut.calc_node], $sformatf("bitmap of node %0d", dut.calc_node));
    end
  end

  task automatic run(string name, string mode);
    lat_sum = 0; lat_max = 0; pkts = 0; n_vc[0] = 0; n_vc[1] = 0; dlv = 0;
    for (int n = 0; n < N; n++) fwd[n] = 0;
    generating = 1;
    measuring = 1;
    repeat (RUN) @(posedge clk);
    generating = 0;
    measuring = 0;
    for (int t = 0; t < 50000 && in_flight > 0; t++) @(posedge clk);
    check(in_flight == 0, $sformatf("%s/%s: %0d flits not delivered", name, mode, in_flight));
    check(pkts > 0, "no packets");
    $display("%-12s %-11s load=%0.2f packets=%0d vc0=%0d vc1=%0d avg_latency=%0.1f max_latency=%0d LCV=%0.3f accepted=%0.3f",
             name, mode, offered, pkts, n_vc[0], n_vc[1], real'(lat_sum) / real'(pkts), lat_max, lcv(),
             real'(dlv) / real'(NIO * RUN));
    repeat (20) @(posedge clk);
  endtask

  // plain XY: clear all bitmaps over the configuration bus
  task automatic clear_bitmaps();
    for (int n = 0; n < N; n++) begin
      @(posedge clk);
      bm_we <= 1; bm_node <= NW'(n); bm_data <= '0;
      bm_model[n] = '0;
    end
    @(posedge clk);
    bm_we <= 0;
  endtask

  // load the NR-weights, let the calculator rebuild all bitmaps (each write
  // is checked against the reference by the bus monitor), then run traffic
  task automatic bidor(string name, string mode, int wv [N]);
    for (int n = 0; n < N; n++) w_nr[n] = W_W'(wv[n]);
    for (int s = 0; s < N; s++)
      for (int d = 0; d < N; d++)
        bm_model[s][d] = !(route_cost(s, d, 0) < route_cost(s, d, 1));
    calc_phase = 1;
    @(posedge clk);
    calc_start <= 1;
    @(posedge clk);
    calc_start <= 0;
    while (!calc_done) @(posedge clk);
    @(posedge clk);
    calc_phase = 0;
    run(name, mode);
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static string names [4] = '{"uniform", "shuffle", "permutation", "overturn"};
    for (int p = 0; p < NIO; p++) begin
      io_in_valid[p] = 0; io_in_flit[p] = '0; io_out_credit[p] = '0; perm[p] = p;
    end
    // fixed random permutation without fixed points
    for (int p = NIO - 1; p > 0; p--) begin
      int j, tmp;
      j = $urandom % p;
      tmp = perm[p]; perm[p] = perm[j]; perm[j] = tmp;
    end
    for (int n = 0; n < N; n++) begin bm_model[n] = '0; w_nr[n] = '0; end
    bm_we = 0; bm_node = '0; bm_data = '0; calc_start = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    for (int pat = 0; pat < 4; pat++) begin
      mat_t t;
      vec_t wnr;
      int   iters;
      int   wv [N];
      longint fmax;
      string ws;
      pattern = pat;
      clear_bitmaps();
      run(names[pat], "XY");

      // (a) measured XY load, scaled so that the busiest router gets 1000
      fmax = 1;
      for (int n = 0; n < N; n++) if (fwd[n] > fmax) fmax = fwd[n];
      for (int n = 0; n < N; n++) wv[n] = int'((fwd[n] * 1000) / fmax);
      bidor(names[pat], "BiDOR-load", wv);

      // (b) traffic matrix over nodes and the N-Rank model, 8 fraction bits
      for (int s = 0; s < MAXN; s++) for (int d = 0; d < MAXN; d++) t[s][d] = 0.0;
      for (int p = 0; p < NIO; p++) begin
        if (pat == 0) begin
          for (int q = 0; q < NIO; q++) if (q != p) t[port_node(p)][port_node(q)] += 1.0;
        end else begin
          t[port_node(p)][port_node(dest(pat, p))] += 1.0;
        end
      end
      wnr = nrank(MX, MY, t, iters);
      ws = "";
      for (int n = 0; n < N; n++) begin
        wv[n] = int'(wnr[n] * 256.0 + 0.5);
        ws = {ws, $sformatf(" %0.2f", wnr[n])};
      end
      $display("%s: N-Rank model converged after %0d iterations, w_NR =%s", names[pat], iters, ws);
      check(iters > 0 && iters < 100, "N-Rank did not converge");
      bidor(names[pat], "BiDOR-model", wv);

      // (c) published weight profiles (uniform and overturn only)
      if (pat == 0) begin
        wv = PLOT_UN;
        bidor(names[pat], "BiDOR-plot", wv);
      end else if (pat == 3) begin
        wv = PLOT_OV;
        bidor(names[pat], "BiDOR-plot", wv);
      end
    end

    // uniform traffic beyond saturation: accepted throughput of XY and BiDOR
    pattern = 0;
    for (int l = 0; l < 2; l++) begin
      int wv [N];
      offered = SAT_LOAD[l];
      clear_bitmaps();
      run("uniform", "XY");
      wv = PLOT_UN;
      bidor("uniform", "BiDOR-plot", wv);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
