// xbar_switch: fully connected N x N switch (crossbar) for flits.
//
// Combinational.  Each output j has an enable and a select naming the input
// it is connected to; it then carries that input's flit and VC tag, and the
// output's ready is returned to the selected input.  An input connected to no
// enabled output sees ready low.  The router's arbiters make sure no two
// outputs select the same input.  The paper gives a fully connected 7x7
// switch; the valid/ready flow control is this design's.
module xbar_switch
  import apenet_pkg::*;
#(
  parameter int unsigned N = 7
) (
  input  logic  [N-1:0]        in_valid,
  input  flit_t [N-1:0]        in_flit,
  output logic  [N-1:0]        in_ready,
  input  logic  [N-1:0]        out_en,
  input  logic  [N-1:0][2:0]   out_sel,
  input  logic  [N-1:0]        out_vc_tag,
  output logic  [N-1:0]        out_valid,
  output flit_t [N-1:0]        out_flit,
  output logic  [N-1:0]        out_vc,
  input  logic  [N-1:0]        out_ready
);
  always_comb begin
    in_ready = '0;
    for (int j = 0; j < N; j++) begin
      out_valid[j] = out_en[j] && in_valid[out_sel[j]];
      out_flit[j]  = in_flit[out_sel[j]];
      out_vc[j]    = out_vc_tag[j];
      if (out_en[j] && out_ready[j]) in_ready[out_sel[j]] = 1'b1;
    end
  end
endmodule
