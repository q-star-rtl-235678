// tb_dor_route -- exhaustive check of the XY/YX hop decision on an 8 x 8 grid
// of coordinates: every current node, destination node, VC and exit port.
// The reference walks the rule in the other order of tests (first "which
// dimension is finished", then "which way").
module tb_dor_route;
  import qstar_pkg::*;

  logic [COORD_W-1:0] cur_x, cur_y, dst_x, dst_y;
  logic               vc;
  dir_e               dst_dir, out_dir;

  dor_route dut (.*);

  int checks = 0, failures = 0;

  function automatic dir_e ref_dir(int cx, int cy, int dx, int dy, bit yx, dir_e exitd);
    bit x_done, y_done;
    x_done = (cx == dx);
    y_done = (cy == dy);
    if (x_done && y_done) return exitd;
    if (yx) begin
      if (!y_done) return (dy < cy) ? DIR_N : DIR_S;
      return (dx < cx) ? DIR_W : DIR_E;
    end
    if (!x_done) return (dx < cx) ? DIR_W : DIR_E;
    return (dy < cy) ? DIR_N : DIR_S;
  endfunction

  initial begin
    for (int cx = 0; cx < 8; cx++)
      for (int cy = 0; cy < 8; cy++)
        for (int dx = 0; dx < 8; dx++)
          for (int dy = 0; dy < 8; dy++)
            for (int v = 0; v < 2; v++) begin
              cur_x = 3'(cx); cur_y = 3'(cy); dst_x = 3'(dx); dst_y = 3'(dy);
              vc = 1'(v);
              dst_dir = dir_e'($urandom % 4);
              #1;
              checks++;
              if (out_dir != ref_dir(cx, cy, dx, dy, v[0], dst_dir)) begin
                failures++;
                if (failures < 10)
                  $display("FAIL: (%0d,%0d)->(%0d,%0d) vc%0d gave %s", cx, cy, dx, dy, v, out_dir.name());
              end
            end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
