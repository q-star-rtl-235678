// bidor_bitmap -- a node's route-choice bitmap.
//
// Node s holds one bit per node of the network: bit d is b(s,d), the route
// choice for packets from s to d (0 = XY route on VC0, 1 = YX route on VC1).
// Bit d of the packed vector corresponds to the d-th character of the bitmap
// string printed in the paper's example, which lists b(s,0) first.
// The bitmap is only rewritten when the load weights change; it is written
// through a shared configuration bus (`we`, `wnode`, `wdata`) and a node takes
// the write whose `wnode` equals its NODE_ID. The new value is visible from
// the cycle after the write. Lookups read `bitmap` combinationally.
// Reset clears the bitmap, so that an unconfigured network routes every packet
// XY, like plain dimension-order routing (this reset value is this design's
// choice; the paper does not discuss reset).
module bidor_bitmap #(
  parameter int NUM_NODES = 25,
  parameter int NODE_ID   = 0
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         we,
  input  logic [$clog2(NUM_NODES)-1:0] wnode,
  input  logic [NUM_NODES-1:0]         wdata,
  output logic [NUM_NODES-1:0]         bitmap
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bitmap <= '0;
    end else if (we && (int'(wnode) == NODE_ID)) begin
      bitmap <= wdata;
    end
  end

endmodule
