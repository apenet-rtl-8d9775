// apenet_node: the packet-switching logic of one APElink+ card.
//
// A node of the APEnet+ 3D torus.  The network interface (net_if) turns
// host transfer requests into packets and writes arriving payload into host
// memory; the router forwards packets between the network interface (port 6)
// and six torus links X+, X-, Y+, Y-, Z+, Z- (ports 0..5) by
// dimension-ordered wormhole routing; each torus link carries packets to the
// neighbouring node over 4 bonded lanes with CRC-checked, credit
// flow-controlled framing and two virtual channels.
// The node's coordinates and the torus size are inputs, so the same logic
// serves any torus up to 256 nodes per dimension; a dimension of size 1 is
// never routed along.  Everything runs on one clock (250 MHz in the card's
// 128-bit datapath).  The PCIe core, the embedded processor, the memory
// controller and the transceivers are not part of this logic: the host side
// is plain request, data, memory-write and event ports, and each link's lanes
// are the parallel sides of its transceivers.
// The block structure follows the paper; sizes marked as such in the
// sub-blocks are this design's choices.
module apenet_node
  import apenet_pkg::*;
#(
  parameter int unsigned BUF_DEPTH    = 512,
  parameter int unsigned TRAIN_CYCLES = 16,
  parameter int unsigned MAX_SKEW     = 8,
  parameter int unsigned MAX_PAYLOAD  = 256,
  parameter int unsigned FIFO_DEPTH   = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  xyz_t        my_coord,
  input  xyz_t        dim_size,
  // host side
  input  logic        cmd_valid,
  input  cmd_t        cmd,
  output logic        cmd_ready,
  input  logic        hd_valid,
  input  word_t       hd_data,
  output logic        hd_ready,
  output logic        cmd_done,
  output logic        mw_valid,
  output logic [47:0] mw_addr,
  output word_t       mw_data,
  input  logic        mw_ready,
  output logic        ev_valid,
  output rx_event_t   ev,
  // torus links, index = port number (0 X+, 1 X-, 2 Y+, 3 Y-, 4 Z+, 5 Z-)
  output logic [NLINK-1:0][NLANE-1:0][LANE_W-1:0] lane_tx,
  input  logic [NLINK-1:0][NLANE-1:0][LANE_W-1:0] lane_rx,
  output logic [NLINK-1:0]                        link_locked
);
  logic  [NPORT-1:0] r_in_valid, r_in_ready, r_in_vc, r_in_grant;
  flit_t [NPORT-1:0] r_in_flit;
  logic  [NPORT-1:0] r_out_valid, r_out_ready, r_out_vc;
  flit_t [NPORT-1:0] r_out_flit;

  router u_router (
    .clk, .rst_n, .my_coord, .dim_size,
    .in_valid(r_in_valid), .in_flit(r_in_flit), .in_vc(r_in_vc), .in_ready(r_in_ready), .in_grant(r_in_grant),
    .out_valid(r_out_valid), .out_flit(r_out_flit), .out_vc(r_out_vc), .out_ready(r_out_ready)
  );

  for (genvar l = 0; l < NLINK; l++) begin : g_link
    torus_link #(.BUF_DEPTH(BUF_DEPTH), .TRAIN_CYCLES(TRAIN_CYCLES), .MAX_SKEW(MAX_SKEW)) u_link (
      .clk, .rst_n,
      .tx_valid(r_out_valid[l]), .tx_flit(r_out_flit[l]), .tx_vc(r_out_vc[l]), .tx_ready(r_out_ready[l]),
      .rx_valid(r_in_valid[l]),  .rx_flit(r_in_flit[l]),  .rx_vc(r_in_vc[l]),  .rx_ready(r_in_ready[l]), .rx_grant(r_in_grant[l]),
      .lane_tx(lane_tx[l]), .lane_rx(lane_rx[l]), .locked(link_locked[l])
    );
  end

  assign r_in_vc[P_LOC] = 1'b0;
  net_if #(.MAX_PAYLOAD(MAX_PAYLOAD), .FIFO_DEPTH(FIFO_DEPTH)) u_ni (
    .clk, .rst_n, .my_coord,
    .cmd_valid, .cmd, .cmd_ready, .hd_valid, .hd_data, .hd_ready, .cmd_done,
    .tx_valid(r_in_valid[P_LOC]), .tx_flit(r_in_flit[P_LOC]), .tx_ready(r_in_ready[P_LOC]),
    .rx_valid(r_out_valid[P_LOC]), .rx_flit(r_out_flit[P_LOC]), .rx_ready(r_out_ready[P_LOC]),
    .mw_valid, .mw_addr, .mw_data, .mw_ready, .ev_valid, .ev
  );
endmodule
