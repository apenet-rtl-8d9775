// torus_link: one of the six torus links of a node (X+, X-, Y+, Y-, Z+, Z-).
//
// Transmit: flits from the router's output port go through link_tx and
// leave as 128-bit words cut into 4 lanes of 32 bits (lane i = bits
// [32i+31:32i]), one word per cycle, for 4 bonded transceivers.
// Receive: the 4 lanes are re-aligned by lane_align, decoded by link_rx and
// written into one of two virtual-channel buffers of BUF_DEPTH words.  A
// selector offers the router the head of a packet from each non-empty VC in
// turn, one per cycle, until the router grants one (rx_grant); it then stays
// on that VC until the footer has gone.  So a packet waiting for a busy
// output never hides the other VC from the router.  Each word the router
// takes is returned as a credit to the far transmitter through our own
// link_tx.
// link_rx also hands link_tx the far side's ACK/NAK and credit words.
// The router sees the VC a packet arrived on, for its dateline rule.
// From the paper: 4 bonded lanes with alignment, 2 VC receive buffers with
// credit flow control embedded in the link protocol, CRC and header/footer
// re-transmission.  Buffer depth, lane width and the VC selection policy
// are this design's.
module torus_link
  import apenet_pkg::*;
#(
  parameter int unsigned BUF_DEPTH    = 512,
  parameter int unsigned TRAIN_CYCLES = 16,
  parameter int unsigned MAX_SKEW     = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // router output port -> link
  input  logic                          tx_valid,
  input  flit_t                         tx_flit,
  input  logic                          tx_vc,
  output logic                          tx_ready,
  // link -> router input port
  output logic                          rx_valid,
  output flit_t                         rx_flit,
  output logic                          rx_vc,
  input  logic                          rx_ready,
  input  logic                          rx_grant,     // router took the offered head
  // lanes
  output logic [NLANE-1:0][LANE_W-1:0]  lane_tx,
  input  logic [NLANE-1:0][LANE_W-1:0]  lane_rx,
  output logic                          locked
);
  word_t tx_word, rx_word;
  logic ack_h, nak_h, ack_f, nak_f, cred_v;
  logic [1:0][15:0] cred_cnt;
  logic req_ack_h, req_nak_h, req_ack_f, req_nak_f;
  logic push, push_vc;
  flit_t push_flit;
  logic [1:0] snd_credit;
  logic ev_stuff, ev_retx_h, ev_retx_f, ev_credit_stall, ev_perr, ev_unstuff;

  link_tx #(.BUF_DEPTH(BUF_DEPTH), .TRAIN_CYCLES(TRAIN_CYCLES)) u_tx (
    .clk, .rst_n,
    .in_valid(tx_valid), .in_flit(tx_flit), .in_vc(tx_vc), .in_ready(tx_ready),
    .tx_word,
    .rx_ack_h(ack_h), .rx_nak_h(nak_h), .rx_ack_f(ack_f), .rx_nak_f(nak_f),
    .rx_credit_valid(cred_v), .rx_credit_cnt(cred_cnt),
    .snd_ack_h(req_ack_h), .snd_nak_h(req_nak_h), .snd_ack_f(req_ack_f), .snd_nak_f(req_nak_f),
    .snd_credit,
    .ev_stuff, .ev_retx_h, .ev_retx_f, .ev_credit_stall
  );

  always_comb
    for (int i = 0; i < NLANE; i++) lane_tx[i] = tx_word[i*LANE_W +: LANE_W];

  lane_align #(.MAX_SKEW(MAX_SKEW)) u_align (
    .clk, .rst_n, .lane_in(lane_rx), .word_out(rx_word), .locked
  );

  link_rx u_rx (
    .clk, .rst_n, .rx_word, .rx_valid(locked),
    .push, .push_vc, .push_flit,
    .ack_h, .nak_h, .ack_f, .nak_f, .credit_valid(cred_v), .credit_cnt(cred_cnt),
    .req_ack_h, .req_nak_h, .req_ack_f, .req_nak_f,
    .ev_perr, .ev_unstuff
  );

  // two virtual-channel receive buffers
  logic [1:0] vc_empty, vc_full, vc_rd;
  flit_t [1:0] vc_head;
  for (genvar v = 0; v < NVC; v++) begin : g_vc
    logic [$clog2(BUF_DEPTH+1)-1:0] cnt;
    sync_fifo #(.WIDTH($bits(flit_t)), .DEPTH(BUF_DEPTH)) u_buf (
      .clk, .rst_n,
      .wr_en(push && push_vc == 1'(v)), .wr_data(push_flit),
      .rd_en(vc_rd[v]), .rd_data(vc_head[v]),
      .full(vc_full[v]), .empty(vc_empty[v]), .count(cnt)
    );
  end

  // VC selector: alternate between waiting heads until one is granted
  logic busy, cur, last;
  logic pick;
  always_comb begin
    if (busy) pick = cur;
    else if (!vc_empty[0] && !vc_empty[1]) pick = !last;
    else pick = vc_empty[0];
  end
  assign rx_valid = !vc_empty[pick];
  assign rx_flit  = vc_head[pick];
  assign rx_vc    = pick;
  assign vc_rd    = (rx_valid && rx_ready) ? (2'b01 << pick) : 2'b00;
  assign snd_credit = vc_rd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cur <= 1'b0; last <= 1'b1;
    end else if (rx_valid && rx_ready && rx_flit.eop) begin
      busy <= 1'b0;
    end else if (!busy && rx_valid) begin
      last <= pick;                    // next cycle offer the other VC ...
      if (rx_grant) begin              // ... unless this head has won
        busy <= 1'b1; cur <= pick;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && vc_full[push_vc]));
endmodule
