// tb_vc_fifo -- random push/pop against a queue model of the VC buffer.
// Checks head flit, empty and full flags each cycle, and that a flit pushed at
// one edge is at the head (if the buffer was empty) from the next cycle on.
module tb_vc_fifo;
  import qstar_pkg::*;

  localparam int DEPTH = 32;

  logic  clk = 1'b0, rst_n = 1'b0;
  logic  push, pop;
  flit_t din, dout;
  logic  empty, full;

  vc_fifo dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  flit_t model [$];
  int n_full = 0, n_empty = 0;

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

  initial begin
    push = 0; pop = 0; din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 6000; t++) begin
      int bias;
      // alternate between filling and draining phases so both flags occur
      bias = ((t / 400) % 2 == 0) ? 3 : 1;
      @(negedge clk);
      check(empty == (model.size() == 0), "empty flag");
      check(full == (model.size() == DEPTH), "full flag");
      if (model.size() > 0) check(dout == model[0], $sformatf("head %h expected %h", dout, model[0]));
      if (full) n_full++;
      if (empty) n_empty++;
      push = (($urandom % 4) < bias) && (model.size() < DEPTH);
      pop  = (($urandom % 4) < (4 - bias)) && (model.size() > 0);
      din  = flit_t'({$urandom, $urandom});
      @(posedge clk);
      #1;
      if (pop)  void'(model.pop_front());
      if (push) model.push_back(din);
    end
    check(n_full > 0 && n_empty > 0, "both full and empty reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
