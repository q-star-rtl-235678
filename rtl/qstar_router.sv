// qstar_router -- input-queued wormhole router with two isolated VCs.
//
// Four bidirectional ports (0 = N, 1 = E, 2 = S, 3 = W). Each input port has
// one vc_fifo per VC. A flit never changes VC: VC0 flits are routed XY at every
// hop and VC1 flits YX (dor_route), which is what keeps the network free of
// deadlock. The route of a packet is computed from its head flit and kept for
// the body flits (wormhole switching).
//
// Per cycle:
//   1. Each input picks one of its VCs whose head flit can move (round-robin):
//      the flit must have a credit for its output VC and, if it is a head flit,
//      that output VC must be free; otherwise the output VC must already be held
//      by this input's packet.
//   2. Each output picks one of the inputs that selected it (round-robin).
//   3. The winners are popped and written into the output register, which is
//      the channel to the next router; a head flit that is not also a tail
//      locks its output VC until its tail leaves.
// The routing and allocation cycle plus the channel register give the two
// cycles per hop of the evaluated network (one for logic, one for the channel).
//
// Credit-based flow control: each output keeps a credit counter per VC,
// started at OUT_CREDITS (the downstream buffer depth) and decremented per flit
// sent; a pop of an input buffer sends one credit pulse upstream on the next
// cycle (credit_out registered).
// From the paper: input queues, 4 ports, wormhole, credit flow control, 2 VCs
// bound to XY/YX, 1-cycle routing decision, 2-cycle hop. This design's choice:
// static 32/32 buffer split, separable input-first round-robin allocation,
// registered credits.
module qstar_router
  import qstar_pkg::*;
#(
  parameter int MY_X        = 0,
  parameter int MY_Y        = 0,
  parameter int BUF_DEPTH   = 32,
  parameter int OUT_CREDITS = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  link_t             in_link    [NUM_PORT],
  output logic [NUM_VC-1:0] credit_out [NUM_PORT],
  output link_t             out_link   [NUM_PORT],
  input  logic [NUM_VC-1:0] credit_in  [NUM_PORT]
);

  localparam int CW = $clog2(OUT_CREDITS + 1);

  // ---------------------------------------------------------------- buffers
  flit_t head_f   [NUM_PORT][NUM_VC];
  logic  empty    [NUM_PORT][NUM_VC];
  logic  pop      [NUM_PORT][NUM_VC];
  dir_e  rc_dir   [NUM_PORT][NUM_VC];
  dir_e  route_q  [NUM_PORT][NUM_VC];
  dir_e  req_dir  [NUM_PORT][NUM_VC];

  for (genvar i = 0; i < NUM_PORT; i++) begin : g_in
    for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
      vc_fifo #(.DEPTH(BUF_DEPTH)) u_fifo (
        .clk   (clk),
        .rst_n (rst_n),
        .push  (in_link[i].valid && (in_link[i].vc == 1'(v))),
        .din   (in_link[i].flit),
        .pop   (pop[i][v]),
        .dout  (head_f[i][v]),
        .empty (empty[i][v]),
        .full  ()
      );

      dor_route u_rc (
        .cur_x   (COORD_W'(MY_X)),
        .cur_y   (COORD_W'(MY_Y)),
        .vc      (1'(v)),
        .dst_x   (head_f[i][v].dst_x),
        .dst_y   (head_f[i][v].dst_y),
        .dst_dir (head_f[i][v].dst_dir),
        .out_dir (rc_dir[i][v])
      );

      assign req_dir[i][v] = head_f[i][v].head ? rc_dir[i][v] : route_q[i][v];
    end
  end

  // ---------------------------------------------------------- output state
  logic          lock_v  [NUM_PORT][NUM_VC];
  logic [1:0]    lock_in [NUM_PORT][NUM_VC];
  logic [CW-1:0] cred    [NUM_PORT][NUM_VC];

  // -------------------------------------------- stage 1: VC pick per input
  logic [NUM_VC-1:0] elig     [NUM_PORT];
  logic              vc_sel   [NUM_PORT];
  logic              in_req   [NUM_PORT];
  dir_e              in_dir   [NUM_PORT];
  logic              in_won   [NUM_PORT];

  always_comb begin
    for (int i = 0; i < NUM_PORT; i++) begin
      for (int v = 0; v < NUM_VC; v++) begin
        elig[i][v] = !empty[i][v] && (cred[req_dir[i][v]][v] != '0) &&
                     (lock_v[req_dir[i][v]][v] ? (lock_in[req_dir[i][v]][v] == 2'(i))
                                               : head_f[i][v].head);
      end
    end
  end

  for (genvar i = 0; i < NUM_PORT; i++) begin : g_varb
    logic vc_any;
    rr_arbiter #(.N(NUM_VC)) u_varb (
      .clk       (clk),
      .rst_n     (rst_n),
      .req       (elig[i]),
      .advance   (in_won[i]),
      .grant     (),
      .grant_idx (vc_sel[i]),
      .any       (vc_any)
    );
    assign in_req[i] = vc_any;
    assign in_dir[i] = req_dir[i][vc_sel[i]];
  end

  // --------------------------------------- stage 2: input pick per output
  logic [NUM_PORT-1:0] sw_req [NUM_PORT];
  logic [NUM_PORT-1:0] sw_gnt [NUM_PORT];
  logic [1:0]          sw_idx [NUM_PORT];
  logic                sw_any [NUM_PORT];

  always_comb begin
    for (int o = 0; o < NUM_PORT; o++) begin
      for (int i = 0; i < NUM_PORT; i++) begin
        sw_req[o][i] = in_req[i] && (int'(in_dir[i]) == o);
      end
    end
  end

  for (genvar o = 0; o < NUM_PORT; o++) begin : g_sarb
    rr_arbiter #(.N(NUM_PORT)) u_sarb (
      .clk       (clk),
      .rst_n     (rst_n),
      .req       (sw_req[o]),
      .advance   (1'b1),
      .grant     (sw_gnt[o]),
      .grant_idx (sw_idx[o]),
      .any       (sw_any[o])
    );
  end

  always_comb begin
    for (int i = 0; i < NUM_PORT; i++) begin
      in_won[i] = 1'b0;
      for (int o = 0; o < NUM_PORT; o++) begin
        if (sw_gnt[o][i]) in_won[i] = 1'b1;
      end
      for (int v = 0; v < NUM_VC; v++) begin
        pop[i][v] = in_won[i] && (vc_sel[i] == 1'(v));
      end
    end
  end

  // winner of each output: its VC and flit
  logic  out_vc   [NUM_PORT];
  flit_t out_flit [NUM_PORT];
  logic  sent     [NUM_PORT][NUM_VC];

  always_comb begin
    for (int o = 0; o < NUM_PORT; o++) begin
      out_vc[o]   = vc_sel[sw_idx[o]];
      out_flit[o] = head_f[sw_idx[o]][out_vc[o]];
      for (int v = 0; v < NUM_VC; v++) begin
        sent[o][v] = sw_any[o] && (out_vc[o] == 1'(v));
      end
    end
  end

  // ------------------------------------------------ state and output regs
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NUM_PORT; p++) begin
        out_link[p]   <= '0;
        credit_out[p] <= '0;
        for (int v = 0; v < NUM_VC; v++) begin
          lock_v[p][v]  <= 1'b0;
          lock_in[p][v] <= '0;
          cred[p][v]    <= CW'(OUT_CREDITS);
          route_q[p][v] <= DIR_N;
        end
      end
    end else begin
      for (int p = 0; p < NUM_PORT; p++) begin
        // channel register
        if (sw_any[p]) begin
          out_link[p] <= '{valid: 1'b1, vc: out_vc[p], flit: out_flit[p]};
          if (out_flit[p].head && !out_flit[p].tail) begin
            lock_v[p][out_vc[p]]  <= 1'b1;
            lock_in[p][out_vc[p]] <= sw_idx[p];
          end else if (out_flit[p].tail) begin
            lock_v[p][out_vc[p]]  <= 1'b0;
          end
        end else begin
          out_link[p].valid <= 1'b0;
        end
        // credits
        for (int v = 0; v < NUM_VC; v++) begin
          cred[p][v] <= cred[p][v] - CW'(sent[p][v]) + CW'(credit_in[p][v]);
          credit_out[p][v] <= pop[p][v];
          if (pop[p][v] && head_f[p][v].head) route_q[p][v] <= rc_dir[p][v];
        end
      end
    end
  end

  // A credit counter never exceeds the downstream buffer size.
  for (genvar p = 0; p < NUM_PORT; p++) begin : g_chk
    for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
      a_credit_range: assert property (@(posedge clk) disable iff (!rst_n)
                                       cred[p][v] <= CW'(OUT_CREDITS));
    end
  end

endmodule
