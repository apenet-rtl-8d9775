// rr_arbiter: round-robin arbiter with N requesters.
//
// gnt is a one-hot combinational grant: the first requester at or after the
// priority pointer, going upward and wrapping.  When 'advance' is high in a
// cycle with a grant, the pointer moves to the requester after the granted
// one, so every requester is served within N grants.  The router uses one
// per output port.  The paper names an arbiter; round-robin is this design's
// choice.
module rr_arbiter #(
  parameter int unsigned N = 7
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] ptr;
  logic [IW-1:0] gidx;

  always_comb begin
    gnt  = '0;
    gidx = '0;
    for (int k = N - 1; k >= 0; k--) begin
      int unsigned idx;
      idx = (int'(ptr) + k) % N;
      if (req[idx]) begin
        gnt  = '0;
        gnt[idx] = 1'b1;
        gidx = IW'(idx);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (advance && (req != '0))
      ptr <= (gidx == IW'(N - 1)) ? '0 : gidx + 1'b1;
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
  assert property (@(posedge clk) disable iff (!rst_n) (req != '0) |-> (gnt != '0));
endmodule
