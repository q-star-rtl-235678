// tb_bidor_inject -- the BiDOR lookup and VC choice at an injection port.
//
// Packets of 1 to 5 flits to random destinations are offered with valid/ready
// while the bitmap is random and changes between packets. Checks: each flit
// appears on the link one cycle after it is accepted, the head's VC is the
// bitmap bit of its destination node, body flits keep the head's VC even if
// the bitmap changes mid-packet, and the port never sends more flits on a VC
// than the router buffer has credits for (credits are held back at times, so
// in_ready must drop).
module tb_bidor_inject;
  import qstar_pkg::*;

  localparam int MX = 5, MY = 5, N = MX * MY, BUF = 32;

  logic              clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0]      bitmap;
  logic              in_valid, in_ready;
  flit_t             in_flit;
  link_t             out_link;
  logic [NUM_VC-1:0] credit_in;

  bidor_inject dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int outstanding [NUM_VC];
  int n_stall = 0, n_vc [NUM_VC], n_midchange = 0;
  bit    exp_valid;
  flit_t exp_flit;
  logic  exp_vc, pkt_vc;
  bit    hold_credits;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // router buffer model: returns credits unless held
  always @(negedge clk) begin
    if (rst_n) begin
      for (int v = 0; v < NUM_VC; v++) begin
        credit_in[v] = 1'b0;
        if (!hold_credits && outstanding[v] > 0 && ($urandom % 2)) begin
          credit_in[v] = 1'b1;
        end
      end
    end
  end

  initial begin
    int flits_left;
    bit acc;
    in_valid = 0; in_flit = '0; bitmap = '0; credit_in = '0; hold_credits = 0;
    outstanding[0] = 0; outstanding[1] = 0; n_vc[0] = 0; n_vc[1] = 0;
    exp_valid = 0; exp_flit = '0; exp_vc = 0; pkt_vc = 0;
    flits_left = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 8000; t++) begin
      @(negedge clk);
      #1;
      hold_credits = ((t / 300) % 3 == 2);
      // new stimulus
      if (!in_valid || in_ready) begin
        // previous flit (if any) was accepted at the last edge, build the next
        if (flits_left == 0) begin
          int len;
          len = 1 + ($urandom % 5);
          flits_left = len;
          in_flit.head  = 1'b1;
          in_flit.dst_x = COORD_W'($urandom % MX);
          in_flit.dst_y = COORD_W'($urandom % MY);
          in_flit.dst_dir = dir_e'($urandom % 4);
          if (($urandom % 4) == 0) bitmap = N'({$urandom, $urandom});
        end else begin
          in_flit.head = 1'b0;
          if (($urandom % 3) == 0) begin bitmap = ~bitmap; n_midchange++; end
        end
        in_flit.tail = (flits_left == 1);
        in_flit.data = $urandom;
        in_valid = ($urandom % 5) != 0;
      end
      #1;
      if (in_valid && !in_ready) n_stall++;
      acc = in_valid && in_ready;
      @(posedge clk);
      // the flit accepted at this edge is on the link right after it
      #1;
      for (int v = 0; v < NUM_VC; v++) if (credit_in[v]) outstanding[v]--;
      exp_valid = 0;
      if (acc) begin
        int d;
        d = int'(in_flit.dst_y) * MX + int'(in_flit.dst_x);
        if (in_flit.head) pkt_vc = bitmap[d];
        exp_valid = 1;
        exp_flit = in_flit;
        exp_vc = pkt_vc;
        outstanding[pkt_vc]++;
        n_vc[pkt_vc]++;
        check(outstanding[pkt_vc] <= BUF, "credit overrun");
        flits_left--;
      end
      check(out_link.valid == exp_valid, "link valid one cycle after acceptance");
      if (exp_valid) begin
        check(out_link.flit == exp_flit, "flit content");
        check(out_link.vc == exp_vc, $sformatf("vc %0d expected %0d", out_link.vc, exp_vc));
      end
    end
    check(n_stall > 0, "in_ready never dropped");
    check(n_vc[0] > 0 && n_vc[1] > 0, "both VCs used");
    check(n_midchange > 0, "bitmap changed inside a packet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
