// tb_qstar_router -- one interior router (at x=2, y=2 of a 5 x 5 mesh).
//
// All four inputs are driven with packets of 1 to 4 flits on both VCs to random
// destinations, each input obeying the credits the router hands back. Each
// output is drained by a sink that returns credits after a random delay and
// sometimes not at all for a while. Checks:
//   - every flit leaves by the port a reference XY (VC0) or YX (VC1) rule
//     gives for its packet, on the VC it came in on, and in order per
//     input VC;
//   - on one output VC, the flits of a packet are never interleaved with
//     another packet (wormhole lock);
//   - a sink never receives more flits than the credits it gave;
//   - credits come back to each input, one per flit, and all are returned;
//   - with no contention a flit takes two cycles through the router.
module tb_qstar_router;
  import qstar_pkg::*;

  localparam int BUF = 32;
  localparam int RX = 2, RY = 2;

  logic              clk = 1'b0, rst_n = 1'b0;
  link_t             in_link    [NUM_PORT];
  logic [NUM_VC-1:0] credit_out [NUM_PORT];
  link_t             out_link   [NUM_PORT];
  logic [NUM_VC-1:0] credit_in  [NUM_PORT];

  qstar_router #(.MY_X(RX), .MY_Y(RY)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0d: %s", cyc, what); end
  endtask

  function automatic int ref_port(int dx, int dy, bit yx, int exitd);
    if (dx == RX && dy == RY) return exitd;
    if (!yx) begin
      if (dx > RX) return 1; if (dx < RX) return 3;
      return (dy > RY) ? 2 : 0;
    end
    if (dy > RY) return 2; if (dy < RY) return 0;
    return (dx > RX) ? 1 : 3;
  endfunction

  typedef struct { flit_t f; int port; longint t; } exp_t;
  exp_t  expq  [NUM_PORT][NUM_VC][$];
  flit_t txq   [NUM_PORT][NUM_VC][$];
  int    cred  [NUM_PORT][NUM_VC];   // sender side credits per input VC
  int    held  [NUM_PORT][NUM_VC];   // sink occupancy per output VC
  int    open_in [NUM_PORT][NUM_VC];
  bit    cur_vc  [NUM_PORT];         // VC of the packet being sent on each input
  int    in_pkt  [NUM_PORT];         // flits of the current packet still to send
  bit    sink_hold = 0, zero_load = 1;
  int    n_sent = 0, n_recv = 0, n_hold_full = 0, n_lat = 0;
  int    pkt_id = 0;

  function automatic void make_packet(int i, int v);
    int len, dx, dy, ed;
    len = 1 + ($urandom % 4);
    dx = $urandom % 5; dy = $urandom % 5; ed = $urandom % 4;
    for (int k = 0; k < len; k++) begin
      flit_t f;
      f.head = (k == 0); f.tail = (k == len - 1);
      f.dst_x = COORD_W'(dx); f.dst_y = COORD_W'(dy); f.dst_dir = dir_e'(ed);
      f.data = {2'(i), 1'(v), 13'(pkt_id), 4'(k), 12'($urandom)};
      txq[i][v].push_back(f);
    end
    pkt_id++;
  endfunction

  // drivers and sinks, at the falling edge
  always @(negedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < NUM_PORT; i++) begin
        for (int v = 0; v < NUM_VC; v++) if (credit_out[i][v]) cred[i][v]++;
        in_link[i] = '0;
        // pick a VC at a packet boundary, keep it for the whole packet
        if (in_pkt[i] == 0) begin
          cur_vc[i] = 1'($urandom);
          if (txq[i][cur_vc[i]].size() == 0) cur_vc[i] = !cur_vc[i];
        end
        if (txq[i][cur_vc[i]].size() > 0 && cred[i][cur_vc[i]] > 0 && ($urandom % 4) != 0) begin
          exp_t e;
          flit_t f;
          f = txq[i][cur_vc[i]].pop_front();
          in_link[i] = '{valid: 1'b1, vc: cur_vc[i], flit: f};
          cred[i][cur_vc[i]]--;
          e.f = f;
          e.port = ref_port(int'(f.dst_x), int'(f.dst_y), cur_vc[i], int'(f.dst_dir));
          e.t = cyc;
          if (f.head) in_pkt[i] = f.tail ? 0 : 1; else if (f.tail) in_pkt[i] = 0;
          expq[i][cur_vc[i]].push_back(e);
          n_sent++;
        end
      end
      for (int o = 0; o < NUM_PORT; o++) begin
        credit_in[o] = '0;
        for (int v = 0; v < NUM_VC; v++) begin
          if (!sink_hold && held[o][v] > 0 && ($urandom % 3) != 0) begin
            credit_in[o][v] = 1'b1;
            held[o][v]--;
          end
        end
      end
    end
  end

  // monitor, just after the rising edge
  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      for (int o = 0; o < NUM_PORT; o++) begin
        if (out_link[o].valid) begin
          flit_t f;
          int i, v;
          exp_t e;
          f = out_link[o].flit;
          i = int'(f.data[31:30]);
          v = int'(f.data[29]);
          n_recv++;
          check(int'(out_link[o].vc) == v, "flit changed VC");
          held[o][v]++;
          check(held[o][v] <= BUF, "sink overrun: flit sent without credit");
          if (held[o][v] == BUF) n_hold_full++;
          if (expq[i][v].size() == 0) check(0, "unexpected flit");
          else begin
            e = expq[i][v].pop_front();
            check(e.f == f, $sformatf("out %0d: flit %h expected %h", o, f, e.f));
            check(e.port == o, $sformatf("flit from in %0d vc %0d left by %0d, expected %0d", i, v, o, e.port));
            if (zero_load) begin
              check(cyc - e.t == 2, $sformatf("router latency %0d", cyc - e.t));
              n_lat++;
            end
          end
          if (f.head) begin
            check(open_in[o][v] == -1, "head inside an open packet");
            open_in[o][v] = f.tail ? -1 : i;
          end else begin
            check(open_in[o][v] == i, "packets interleaved on an output VC");
            if (f.tail) open_in[o][v] = -1;
          end
        end
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit all_empty();
    for (int i = 0; i < NUM_PORT; i++)
      for (int v = 0; v < NUM_VC; v++)
        if (txq[i][v].size() > 0 || expq[i][v].size() > 0) return 0;
    return 1;
  endfunction

  initial begin
    for (int i = 0; i < NUM_PORT; i++) begin
      in_link[i] = '0; credit_in[i] = '0; in_pkt[i] = 0; cur_vc[i] = 0;
      for (int v = 0; v < NUM_VC; v++) begin
        cred[i][v] = BUF; held[i][v] = 0; open_in[i][v] = -1;
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // zero load: one single-flit packet at a time
    for (int k = 0; k < 30; k++) begin
      int i, v;
      flit_t f;
      i = $urandom % NUM_PORT; v = $urandom % NUM_VC;
      make_packet(i, v);
      while (txq[i][v].size() > 1) void'(txq[i][v].pop_back());
      f = txq[i][v][0]; f.tail = 1'b1; txq[i][v][0] = f;
      repeat (8) @(posedge clk);
    end
    check(n_lat == 30, $sformatf("%0d zero-load flits seen", n_lat));
    zero_load = 0;
    // heavy random traffic with sink stalls
    for (int round = 0; round < 10; round++) begin
      for (int i = 0; i < NUM_PORT; i++)
        for (int v = 0; v < NUM_VC; v++)
          for (int k = 0; k < 20; k++) make_packet(i, v);
      sink_hold = (round % 2 == 1);
      repeat (300) @(posedge clk);
      sink_hold = 0;
      repeat (200) @(posedge clk);
    end
    while (!all_empty()) @(posedge clk);
    repeat (20) @(posedge clk);
    check(n_sent == n_recv, $sformatf("sent %0d received %0d", n_sent, n_recv));
    for (int i = 0; i < NUM_PORT; i++)
      for (int v = 0; v < NUM_VC; v++)
        check(cred[i][v] == BUF, $sformatf("input %0d vc %0d got back %0d credits", i, v, cred[i][v]));
    check(n_hold_full > 0, "an output never ran out of credits");
    $display("sent=%0d credit_exhausted=%0d", n_sent, n_hold_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
