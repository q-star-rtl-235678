// dor_route -- one hop of dimension-order routing (XY on VC0, YX on VC1).
//
// Combinational. Given the current router's coordinates and the destination of
// a head flit, it returns the output port the flit takes at this router:
//   XY (vc = 0): move along X until the destination column is reached, then
//                along Y;
//   YX (vc = 1): move along Y first, then along X.
// At the destination node the flit leaves by the I/O port named in the flit
// (dst_dir). Node (0,0) is the north-west corner, x grows to the east and y to
// the south, so a larger y is reached through the S port.
// The XY/YX rule and the fixed VC-to-route mapping follow the paper; the
// coordinate convention and the exit-port field are this design's choice.
module dor_route
  import qstar_pkg::*;
(
  input  logic [COORD_W-1:0] cur_x,
  input  logic [COORD_W-1:0] cur_y,
  input  logic               vc,
  input  logic [COORD_W-1:0] dst_x,
  input  logic [COORD_W-1:0] dst_y,
  input  dir_e               dst_dir,
  output dir_e               out_dir
);

  dir_e x_step, y_step;

  always_comb begin
    x_step = (dst_x > cur_x) ? DIR_E : DIR_W;
    y_step = (dst_y > cur_y) ? DIR_S : DIR_N;
    if (dst_x == cur_x && dst_y == cur_y) begin
      out_dir = dst_dir;
    end else if (vc == VC_XY) begin
      out_dir = (dst_x != cur_x) ? x_step : y_step;
    end else begin
      out_dir = (dst_y != cur_y) ? y_step : x_step;
    end
  end

endmodule
