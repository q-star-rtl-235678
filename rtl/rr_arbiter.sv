// rr_arbiter -- round-robin arbiter.
//
// Combinational grant: the first requester at or after the priority pointer,
// searching upwards and wrapping around, wins. `grant` is one-hot, `grant_idx`
// its index and `any` says whether anyone won. When `advance` is high at a clock
// edge and there is a grant, the pointer moves to one past the winner, so the
// winner gets the lowest priority next time. The paper does not describe the
// router's allocators; round-robin is this design's choice.
module rr_arbiter #(
  parameter int N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 advance,
  output logic [N-1:0]         grant,
  output logic [$clog2(N)-1:0] grant_idx,
  output logic                 any
);

  localparam int IW = $clog2(N);

  logic [IW-1:0] ptr;

  always_comb begin
    grant     = '0;
    grant_idx = '0;
    any       = 1'b0;
    // Two passes over the requesters: first those at or above the pointer,
    // then those below it.
    for (int k = 0; k < N; k++) begin
      if (!any && req[k] && (k >= int'(ptr))) begin
        any       = 1'b1;
        grant[k]  = 1'b1;
        grant_idx = IW'(k);
      end
    end
    for (int k = 0; k < N; k++) begin
      if (!any && req[k] && (k < int'(ptr))) begin
        any       = 1'b1;
        grant[k]  = 1'b1;
        grant_idx = IW'(k);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0;
    end else if (advance && any) begin
      ptr <= (int'(grant_idx) == N - 1) ? '0 : grant_idx + 1'b1;
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));

endmodule
