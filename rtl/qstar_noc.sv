// qstar_noc -- the Q-StaR network: a 2D mesh of BiDOR routers with edge I/O.
//
// MESH_X x MESH_Y qstar_router instances (5 x 5 by default) are connected to
// their north, east, south and west neighbours. Every router port that faces
// the edge of the mesh is an I/O port of the network: 2*(MESH_X+MESH_Y) ports,
// 20 for 5 x 5, five per side, two of them on each corner node. Port numbering
// is given in qstar_pkg.
//
// Injection (io_in_*): a source hands flits over with valid/ready. The port's
// bidor_inject looks the head flit's destination up in the bitmap of its node
// and sends the packet on VC0 (XY route) or VC1 (YX route). A packet keeps its
// VC, and so its route, to the destination, where it leaves by the I/O port
// named in its head flit.
// Ejection (io_out, io_out_credit): the flit leaves with its VC on a link
// identical to a router-to-router channel. The sink must be able to hold
// BUF_DEPTH flits per VC and returns one credit pulse per flit it frees.
//
// Route bitmaps: each node has an N-bit bitmap (bidor_bitmap). They are
// written either directly on the configuration bus (bm_we, bm_node, bm_data),
// for bitmaps computed offline, or by the built-in bidor_choice_calc, which
// derives them from a set of NR-weights (w_nr, calc_start; N*N cycles). While
// the calculator writes, it has priority over the external bus. Bitmaps reset
// to zero, i.e. plain XY routing.
//
// Timing: with no contention a flit spends one cycle on the injection link and
// two cycles per router it passes (routing/allocation, then the channel
// register), so a packet's head leaves the network 1 + 2*H cycles after it is
// accepted, H being the number of routers on its route.
module qstar_noc
  import qstar_pkg::*;
#(
  parameter int MESH_X    = 5,
  parameter int MESH_Y    = 5,
  parameter int BUF_DEPTH = 32,
  parameter int W_W       = 16,
  localparam int N   = MESH_X * MESH_Y,
  localparam int NIO = 2 * (MESH_X + MESH_Y),
  localparam int NW  = $clog2(N)
) (
  input  logic              clk,
  input  logic              rst_n,
  // I/O ports, injection side
  input  logic              io_in_valid   [NIO],
  input  flit_t             io_in_flit    [NIO],
  output logic              io_in_ready   [NIO],
  // I/O ports, ejection side
  output link_t             io_out        [NIO],
  input  logic [NUM_VC-1:0] io_out_credit [NIO],
  // bitmap configuration bus
  input  logic              bm_we,
  input  logic [NW-1:0]     bm_node,
  input  logic [N-1:0]      bm_data,
  // route-choice calculator
  input  logic              calc_start,
  input  logic [W_W-1:0]    w_nr          [N],
  output logic              calc_busy,
  output logic              calc_done
);

  link_t             r_in   [MESH_Y][MESH_X][NUM_PORT];
  link_t             r_out  [MESH_Y][MESH_X][NUM_PORT];
  logic [NUM_VC-1:0] r_crout[MESH_Y][MESH_X][NUM_PORT];
  logic [NUM_VC-1:0] r_crin [MESH_Y][MESH_X][NUM_PORT];
  logic [N-1:0]      bm     [N];

  // ------------------------------------------------- bitmap configuration
  logic          calc_we;
  logic [NW-1:0] calc_node;
  logic [N-1:0]  calc_data;
  logic          cfg_we;
  logic [NW-1:0] cfg_node;
  logic [N-1:0]  cfg_data;

  bidor_choice_calc #(.MESH_X(MESH_X), .MESH_Y(MESH_Y), .W_W(W_W)) u_calc (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (calc_start),
    .w_nr    (w_nr),
    .busy    (calc_busy),
    .done    (calc_done),
    .bm_we   (calc_we),
    .bm_node (calc_node),
    .bm_data (calc_data)
  );

  assign cfg_we   = calc_we || bm_we;
  assign cfg_node = calc_we ? calc_node : bm_node;
  assign cfg_data = calc_we ? calc_data : bm_data;

  // ------------------------------------------------------------- the mesh
  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      localparam int ID = y * MESH_X + x;

      bidor_bitmap #(.NUM_NODES(N), .NODE_ID(ID)) u_bitmap (
        .clk    (clk),
        .rst_n  (rst_n),
        .we     (cfg_we),
        .wnode  (cfg_node),
        .wdata  (cfg_data),
        .bitmap (bm[ID])
      );

      qstar_router #(
        .MY_X        (x),
        .MY_Y        (y),
        .BUF_DEPTH   (BUF_DEPTH),
        .OUT_CREDITS (BUF_DEPTH)
      ) u_router (
        .clk        (clk),
        .rst_n      (rst_n),
        .in_link    (r_in[y][x]),
        .credit_out (r_crout[y][x]),
        .out_link   (r_out[y][x]),
        .credit_in  (r_crin[y][x])
      );

      for (genvar d = 0; d < NUM_PORT; d++) begin : g_port
        localparam int P  = io_index(x, y, d, MESH_X, MESH_Y);
        // neighbour across port d and the port it uses to face us
        localparam int NX = (d == 1) ? x + 1 : (d == 3) ? x - 1 : x;
        localparam int NY = (d == 2) ? y + 1 : (d == 0) ? y - 1 : y;
        localparam int OD = (d + 2) % 4;

        if (P >= 0) begin : g_io
          bidor_inject #(.MESH_X(MESH_X), .MESH_Y(MESH_Y), .BUF_DEPTH(BUF_DEPTH)) u_inject (
            .clk       (clk),
            .rst_n     (rst_n),
            .bitmap    (bm[ID]),
            .in_valid  (io_in_valid[P]),
            .in_flit   (io_in_flit[P]),
            .in_ready  (io_in_ready[P]),
            .out_link  (r_in[y][x][d]),
            .credit_in (r_crout[y][x][d])
          );
          assign io_out[P]        = r_out[y][x][d];
          assign r_crin[y][x][d]  = io_out_credit[P];
        end else begin : g_mesh
          assign r_in[y][x][d]    = r_out[NY][NX][OD];
          assign r_crin[y][x][d]  = r_crout[NY][NX][OD];
        end
      end
    end
  end

endmodule
