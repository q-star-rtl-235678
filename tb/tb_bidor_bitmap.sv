// tb_bidor_bitmap -- a node's bitmap takes only the writes addressed to it.
// Random writes to random nodes; the model changes only for NODE_ID. Checks
// the reset value (all XY) and that a write shows from the next cycle.
module tb_bidor_bitmap;
  localparam int NN = 25;
  localparam int ID = 11;

  logic clk = 1'b0, rst_n = 1'b0;
  logic we;
  logic [$clog2(NN)-1:0] wnode;
  logic [NN-1:0] wdata, bitmap;

  bidor_bitmap #(.NUM_NODES(NN), .NODE_ID(ID)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, hits = 0;
  logic [NN-1:0] model;

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
    we = 0; wnode = '0; wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    model = '0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      check(bitmap == model, $sformatf("bitmap %h expected %h", bitmap, model));
      we    = 1'($urandom);
      wnode = 5'((($urandom % 3) == 0) ? ID : ($urandom % NN));
      wdata = NN'($urandom);
      @(posedge clk);
      if (we && int'(wnode) == ID) begin model = wdata; hits++; end
    end
    check(hits > 0, "no write hit this node");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
