// vc_fifo -- flit buffer of one virtual channel of one router input port.
//
// A synchronous first-in first-out buffer of DEPTH flits. The head flit is
// visible combinationally on `dout` while `empty` is low, so the router can
// route and arbitrate on it in the same cycle and pop it at the clock edge.
// A flit pushed at an edge can be popped from the next edge on (the "logic"
// cycle of a hop). Push and pop may happen in the same cycle.
//
// The evaluated network gives each input port 64 flits of buffer shared by two
// VCs; here that space is split statically into two buffers of 32 flits each
// (DEPTH = 32), which is this design's reading of "shared". Credit-based flow
// control upstream guarantees that a full buffer is never pushed; the
// assertions check that rule.
module vc_fifo
  import qstar_pkg::*;
#(
  parameter int DEPTH = 32
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  push,
  input  flit_t din,
  input  logic  pop,
  output flit_t dout,
  output logic  empty,
  output logic  full
);

  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  flit_t          mem [DEPTH];
  logic [AW-1:0]  rd_ptr, wr_ptr;
  logic [AW:0]    count;

  assign empty = (count == '0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign dout  = mem[rd_ptr];

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop)  rd_ptr <= incr(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // Flow-control rules: credits must prevent overflow, the router must not
  // pop an empty buffer.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
