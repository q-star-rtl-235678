// tb_rr_arbiter -- random requests against a round-robin reference.
// The reference keeps its own "last winner" and grants the next requester
// after it in circular order. Also checks that with all requesting each of the
// N requesters wins once every N grants.
module tb_rr_arbiter;
  localparam int N = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] req, grant;
  logic [$clog2(N)-1:0] grant_idx;
  logic advance, any;

  rr_arbiter dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int last = N - 1;
  int wins [N];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic int ref_winner(logic [N-1:0] r, int l);
    for (int k = 1; k <= N; k++) if (r[(l + k) % N]) return (l + k) % N;
    return -1;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = '0; advance = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 4000; t++) begin
      int w;
      @(negedge clk);
      req     = (t < 400) ? '1 : N'($urandom);
      advance = (t < 400) ? 1'b1 : 1'($urandom);
      #1;
      w = ref_winner(req, last);
      check(any == (w >= 0), "any");
      if (w >= 0) begin
        check(grant == N'(1) << w, $sformatf("req %b grant %b expected %0d", req, grant, w));
        check(int'(grant_idx) == w, "grant_idx");
        if (t < 400) wins[w]++;
      end else begin
        check(grant == '0, "grant without request");
      end
      @(posedge clk);
      if (advance && w >= 0) last = w;
    end
    for (int i = 0; i < N; i++) check(wins[i] == 100, $sformatf("requester %0d won %0d of 400", i, wins[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
