// router: wormhole router of the APEnet+ node, 7 ports in, 7 ports out.
//
// Ports 0..5 are the torus links X+, X-, Y+, Y-, Z+, Z-, port 6 the network
// interface.  Every cycle each input that shows a head flit (sop) and is not
// yet connected runs it through its dor_route instance and requests the
// output port it names.  Each output has a round-robin arbiter among the
// inputs requesting it; a grant connects the input to the output in the
// xbar_switch and locks the connection, after which flits move at one per
// cycle under valid/ready until the footer (eop) passes and the output is
// released.  in_grant tells an input, in the cycle of the grant, that the
// head it shows has won: a torus link, which offers the heads of its two
// virtual channels in turn, must keep showing that one.  Because routing is
// recomputed every cycle until the grant, a head waiting for a busy output
// does not stop the other VC of the same link from being offered.  The VC
// chosen by dor_route goes out with every flit of the packet.
// Header-in to header-out is 1 cycle when the output is free (4 ns at
// 250 MHz), inside the 60 ns routing latency the paper measured.
// From the paper: 7x7 fully connected switch, routing and arbitration blocks,
// dimension-ordered wormhole routing.  Pipeline depth, round-robin policy and
// the handshake are this design's choices.
module router
  import apenet_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  xyz_t                 my_coord,
  input  xyz_t                 dim_size,
  input  logic  [NPORT-1:0]    in_valid,
  input  flit_t [NPORT-1:0]    in_flit,
  input  logic  [NPORT-1:0]    in_vc,
  output logic  [NPORT-1:0]    in_ready,
  output logic  [NPORT-1:0]    in_grant,
  output logic  [NPORT-1:0]    out_valid,
  output flit_t [NPORT-1:0]    out_flit,
  output logic  [NPORT-1:0]    out_vc,
  input  logic  [NPORT-1:0]    out_ready
);
  // per input
  logic [NPORT-1:0]      granted;
  logic [NPORT-1:0][2:0] cport;
  logic [NPORT-1:0]      cvc;
  // per output
  logic [NPORT-1:0]      locked;
  logic [NPORT-1:0][2:0] owner;
  logic [NPORT-1:0]      ovc;
  logic [NPORT-1:0][NPORT-1:0] areq, agnt;
  logic [NPORT-1:0]      sw_in_ready;

  for (genvar i = 0; i < NPORT; i++) begin : g_rc
    hdr_t h;
    assign h = hdr_t'(in_flit[i].data);
    dor_route u_rc (
      .my_coord, .dim_size, .dst(h.dst), .in_port(3'(i)), .in_vc(in_vc[i]),
      .out_port(cport[i]), .out_vc(cvc[i])
    );
  end

  for (genvar j = 0; j < NPORT; j++) begin : g_arb
    for (genvar i = 0; i < NPORT; i++) begin : g_req
      assign areq[j][i] = in_valid[i] && in_flit[i].sop && !granted[i] && cport[i] == 3'(j);
    end
    rr_arbiter #(.N(NPORT)) u_arb (
      .clk, .rst_n, .req(areq[j]), .advance(!locked[j]), .gnt(agnt[j])
    );
  end

  xbar_switch #(.N(NPORT)) u_sw (
    .in_valid, .in_flit, .in_ready(sw_in_ready),
    .out_en(locked), .out_sel(owner), .out_vc_tag(ovc),
    .out_valid, .out_flit, .out_vc, .out_ready
  );

  // only a granted input may pop; a waiting head flit stays put
  assign in_ready = sw_in_ready & granted;
  always_comb begin
    in_grant = '0;
    for (int j = 0; j < NPORT; j++)
      if (!locked[j]) in_grant = in_grant | agnt[j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      granted <= '0;
      locked  <= '0;
      owner   <= '0;
      ovc     <= '0;
    end else begin
      // allocation
      for (int j = 0; j < NPORT; j++) begin
        if (!locked[j]) begin
          for (int i = 0; i < NPORT; i++) begin
            if (agnt[j][i]) begin
              locked[j]  <= 1'b1;
              owner[j]   <= 3'(i);
              ovc[j]     <= cvc[i];
              granted[i] <= 1'b1;
            end
          end
        end else if (out_valid[j] && out_ready[j] && out_flit[j].eop) begin
          locked[j]         <= 1'b0;
          granted[owner[j]] <= 1'b0;
        end
      end
    end
  end

  // a packet never turns back on the link it came from
  for (genvar i = 0; i < NLINK; i++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      (in_valid[i] && in_flit[i].sop && !granted[i]) |-> cport[i] != 3'(i));
  end
endmodule
