// dor_route: dimension-ordered route computation on a 3D torus.
//
// Combinational.  From the destination coordinates of a header, the node's
// own coordinates and the torus size it picks the output port: X is
// corrected first, then Y, then Z; when all three match the packet leaves on
// the local port.  In each dimension it takes the shorter way round the ring
// (+ when the + distance is at most half the ring).  It also picks the
// virtual channel on the outgoing link with the dateline rule: a packet
// enters each dimension on VC0, keeps its VC while it goes on in the same
// dimension, and moves to VC1 when it crosses the wrap-around link of the
// ring (from coordinate N-1 to 0 going +, or 0 to N-1 going -).  This breaks
// the cyclic channel dependency of each ring, which is what the two virtual
// channels are for.  The paper gives dimension-ordered routing and two
// virtual channels for deadlock avoidance; the shortest-way choice and the
// dateline rule are this design's.
module dor_route
  import apenet_pkg::*;
(
  input  xyz_t        my_coord,
  input  xyz_t        dim_size,   // ring length of each dimension (>= 1)
  input  xyz_t        dst,
  input  logic [2:0]  in_port,    // port the packet arrived on
  input  logic        in_vc,
  output logic [2:0]  out_port,
  output logic        out_vc
);
  always_comb begin
    logic found;
    logic [COORD_W:0] dplus;
    out_port = P_LOC;
    out_vc   = 1'b0;
    found    = 1'b0;
    dplus    = '0;
    for (int d = 0; d < 3; d++) begin
      if (!found && dst[d] != my_coord[d]) begin
        found = 1'b1;
        if (dst[d] >= my_coord[d]) dplus = {1'b0, dst[d]} - {1'b0, my_coord[d]};
        else                       dplus = {1'b0, dst[d]} + {1'b0, dim_size[d]} - {1'b0, my_coord[d]};
        if ({dplus, 1'b0} <= {2'b0, dim_size[d]}) begin
          out_port = 3'(2 * d);
          // continue in the same dimension: keep the VC
          out_vc   = (in_port == 3'(2 * d + 1)) ? in_vc : 1'b0;
          if (my_coord[d] == dim_size[d] - 1'b1) out_vc = 1'b1;   // wrap link
        end else begin
          out_port = 3'(2 * d + 1);
          out_vc   = (in_port == 3'(2 * d)) ? in_vc : 1'b0;
          if (my_coord[d] == '0) out_vc = 1'b1;                   // wrap link
        end
      end
    end
  end
endmodule
