// bidor_inject -- injection side of one I/O port: the BiDOR route lookup.
//
// A source offers flits with a valid/ready handshake (a flit moves when
// in_valid and in_ready are both high at a clock edge). For a head flit the
// destination node index (dst_y * MESH_X + dst_x) selects one bit of the
// node's bitmap: 0 puts the packet on VC0 and so on the XY route, 1 on VC1 and
// the YX route. The body and tail flits of the packet follow on the same VC,
// so the route choice never travels inside the flits.
// The port keeps one credit counter per VC for the router input buffer behind
// it (BUF_DEPTH flits each); in_ready is high when the chosen VC has a credit.
// The accepted flit is registered onto the link to the router, so injection
// costs one channel cycle like any other hop.
// From the paper: lookup by destination at injection, bit value -> XY/YX and
// VC0/VC1. This design's choice: valid/ready source interface, credit counters
// kept here.
module bidor_inject
  import qstar_pkg::*;
#(
  parameter int MESH_X    = 5,
  parameter int MESH_Y    = 5,
  parameter int BUF_DEPTH = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [MESH_X*MESH_Y-1:0]   bitmap,
  input  logic                       in_valid,
  input  flit_t                      in_flit,
  output logic                       in_ready,
  output link_t                      out_link,
  input  logic [NUM_VC-1:0]          credit_in
);

  localparam int CW = $clog2(BUF_DEPTH + 1);
  localparam int NW = $clog2(MESH_X * MESH_Y);

  logic [CW-1:0] cred [NUM_VC];
  logic          pkt_vc_q;
  logic          sel_vc;
  logic [NW-1:0] dst_node;
  logic          fire;

  assign dst_node = NW'(in_flit.dst_y) * NW'(MESH_X) + NW'(in_flit.dst_x);
  assign sel_vc   = in_flit.head ? bitmap[dst_node] : pkt_vc_q;
  assign in_ready = (cred[sel_vc] != '0);
  assign fire     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_link <= '0;
      pkt_vc_q <= VC_XY;
      for (int v = 0; v < NUM_VC; v++) cred[v] <= CW'(BUF_DEPTH);
    end else begin
      out_link <= '{valid: fire, vc: sel_vc, flit: in_flit};
      if (fire && in_flit.head) pkt_vc_q <= sel_vc;
      for (int v = 0; v < NUM_VC; v++) begin
        cred[v] <= cred[v] - CW'(fire && (sel_vc == 1'(v))) + CW'(credit_in[v]);
      end
    end
  end

endmodule
