// bidor_choice_calc -- BiDOR route calculation: w_NR weights -> bitmaps.
//
// For every source s and destination d the cost of a route is the sum of the
// NR-weights of all nodes on it, both end nodes included. The XY route from
// (sx,sy) to (dx,dy) covers row sy between sx and dx and then column dx between
// sy and dy; the YX route covers column sx and then row dy. The bit b(s,d) is
// 0 (XY) when the XY cost is strictly smaller and 1 (YX) otherwise. The paper
// writes b as an argmin and does not say how a tie is broken; its printed
// example bitmap has a 1 wherever source and destination share a row or column
// (where the two routes are the same), so ties give 1 here.
//
// Operation: a `start` pulse latches the NUM_NODES weights (unsigned fixed
// point, W_W bits, scale of this design's choosing, e.g. 8 fraction bits) and
// then one (s,d) pair is evaluated per cycle, d fastest. After the last d of a
// source its full bitmap is written out on the configuration bus (bm_we,
// bm_node, bm_data) for one cycle. A full pass takes NUM_NODES^2 cycles; `busy`
// is high during it and `done` pulses once at the end. `start` is ignored while
// busy.
// The paper computes this offline in software; doing it in hardware next to
// the bitmaps is this design's choice, the rule computed is the paper's.
module bidor_choice_calc #(
  parameter int MESH_X = 5,
  parameter int MESH_Y = 5,
  parameter int W_W    = 16
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             start,
  input  logic [W_W-1:0]                   w_nr [MESH_X*MESH_Y],
  output logic                             busy,
  output logic                             done,
  output logic                             bm_we,
  output logic [$clog2(MESH_X*MESH_Y)-1:0] bm_node,
  output logic [MESH_X*MESH_Y-1:0]         bm_data
);

  localparam int N  = MESH_X * MESH_Y;
  localparam int NW = $clog2(N);
  localparam int SW = W_W + $clog2(MESH_X + MESH_Y);  // a route visits < X+Y nodes

  logic [W_W-1:0] w_q [N];
  logic [NW-1:0]  s_q, d_q;
  logic [N-1:0]   acc_q;
  logic [SW-1:0]  cost_xy, cost_yx;
  logic           b;
  logic [N-1:0]   row;   // bitmap of the current source including the current bit

  always_comb begin
    row      = acc_q;
    row[d_q] = b;
  end

  // Route costs of the current pair.
  always_comb begin
    int sx, sy, dx, dy, x0, x1, y0, y1;
    sx = int'(s_q) % MESH_X;  sy = int'(s_q) / MESH_X;
    dx = int'(d_q) % MESH_X;  dy = int'(d_q) / MESH_X;
    x0 = (sx < dx) ? sx : dx; x1 = (sx < dx) ? dx : sx;
    y0 = (sy < dy) ? sy : dy; y1 = (sy < dy) ? dy : sy;
    cost_xy = '0;
    cost_yx = '0;
    for (int n = 0; n < N; n++) begin
      int nx, ny;
      logic in_xy, in_yx;
      nx = n % MESH_X;
      ny = n / MESH_X;
      in_xy = ((ny == sy) && (nx >= x0) && (nx <= x1)) ||
              ((nx == dx) && (ny >= y0) && (ny <= y1));
      in_yx = ((nx == sx) && (ny >= y0) && (ny <= y1)) ||
              ((ny == dy) && (nx >= x0) && (nx <= x1));
      if (in_xy) cost_xy = cost_xy + SW'(w_q[n]);
      if (in_yx) cost_yx = cost_yx + SW'(w_q[n]);
    end
    b = !(cost_xy < cost_yx);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      bm_we   <= 1'b0;
      bm_node <= '0;
      bm_data <= '0;
      s_q     <= '0;
      d_q     <= '0;
      acc_q   <= '0;
      for (int n = 0; n < N; n++) w_q[n] <= '0;
    end else begin
      done  <= 1'b0;
      bm_we <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          s_q  <= '0;
          d_q  <= '0;
          for (int n = 0; n < N; n++) w_q[n] <= w_nr[n];
        end
      end else begin
        acc_q[d_q] <= b;
        if (int'(d_q) == N - 1) begin
          bm_we     <= 1'b1;
          bm_node   <= s_q;
          bm_data   <= row;
          d_q       <= '0;
          if (int'(s_q) == N - 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            s_q <= s_q + 1'b1;
          end
        end else begin
          d_q <= d_q + 1'b1;
        end
      end
    end
  end

endmodule
