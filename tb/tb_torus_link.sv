// tb_torus_link: two torus links connected back to back, as on a cable
// between two neighbouring nodes.  Each lane of each direction has its own
// delay (lane skew).  Packets on both VCs go both ways at once, with random
// back-pressure from the receiving router side.  Bit errors are injected on
// the wire into chosen header, payload and footer words.  The testbench
// checks that every packet arrives complete, in order per VC, with its data
// intact except where payload was corrupted, and that exactly those packets
// have the perr bit set in their footer.  It counts lane skew locks, header
// and footer re-transmissions, payload errors, escapes and credit stalls,
// and fails if any of them never happened.
//
// The link mechanisms follow the APEnet+ description (2 VCs, credits, CRC,
// header/footer re-transmission); buffer sizes and error placement are this
// testbench's choices.
module tb_torus_link;
  import apenet_pkg::*;
  import tb_util_pkg::*;
  localparam int BUF = 16;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic  [1:0] tx_valid, tx_vc, tx_ready, rx_valid, rx_vc, rx_ready, locked;
  flit_t [1:0] tx_flit, rx_flit;
  logic  [1:0][NLANE-1:0][LANE_W-1:0] lane_tx, lane_rx;

  for (genvar s = 0; s < 2; s++) begin : g_side
    torus_link #(.BUF_DEPTH(BUF)) u_link (
      .clk, .rst_n,
      .tx_valid(tx_valid[s]), .tx_flit(tx_flit[s]), .tx_vc(tx_vc[s]), .tx_ready(tx_ready[s]),
      .rx_valid(rx_valid[s]), .rx_flit(rx_flit[s]), .rx_vc(rx_vc[s]), .rx_ready(rx_ready[s]), .rx_grant(rx_ready[s]),
      .lane_tx(lane_tx[s]), .lane_rx(lane_rx[s]), .locked(locked[s])
    );
  end
  always #2 clk = ~clk;

  // cable: per-lane delay lines and error injection
  int skew[2][NLANE];
  logic [1:0][NLANE-1:0][7:0][LANE_W-1:0] dl;
  logic [1:0] flip;                 // flip bit 0 of lane 0 this cycle
  always_ff @(posedge clk)
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < NLANE; i++) begin
        dl[s][i][0] <= lane_tx[s][i] ^ ((i == 0 && flip[s]) ? 32'd1 : 32'd0);
        for (int k = 1; k < 8; k++) dl[s][i][k] <= dl[s][i][k-1];
      end
  always_comb
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < NLANE; i++) lane_rx[1-s][i] = dl[s][i][skew[s][i]];

  // error plan: per side, which kinds still to corrupt (0 header, 1 payload, 2 footer)
  int flips_left[2][3] = '{'{3, 3, 3}, '{3, 3, 3}};
  logic [1:0] arm = '0;
  int n_retx_h = 0, n_retx_f = 0, n_perr = 0, n_esc = 0, n_stall = 0;
  for (genvar s = 0; s < 2; s++) begin : g_inj
    int kind;
    always_comb begin
      int st;
      st = int'(g_side[s].u_link.u_tx.st);
      kind = -1;
      // a data word is on the wire this cycle (not an ESC in front of one)
      if (g_side[s].u_link.u_tx.send_data && !g_side[s].u_link.u_tx.ev_stuff) begin
        if (st == 1 || st == 4) kind = 0;                                   // header
        else if (st == 5 && (g_side[s].u_link.u_tx.re_f || tx_flit[s].eop)) kind = 2;  // footer
        else if (st == 5) kind = 1;                                         // payload
      end
      flip[s] = arm[s] && kind >= 0 && flips_left[s][kind < 0 ? 0 : kind] > 0;
    end
    always @(posedge clk) if (rst_n) begin
      arm[s] <= ($urandom % 4) == 0;
      if (flip[s]) flips_left[s][kind]--;
      if (g_side[s].u_link.u_tx.ev_retx_h) n_retx_h++;
      if (g_side[s].u_link.u_tx.ev_retx_f) n_retx_f++;
      if (g_side[s].u_link.u_tx.ev_stuff) n_esc++;
      if (g_side[s].u_link.u_tx.ev_credit_stall) n_stall++;
    end
  end

  // stimulus and expectation
  flit_t inq[2][$]; logic invq[2][$];
  flit_t expq[2][2][$];             // per receiving side, per VC
  int sent_pkts = 0, rcvd_pkts = 0;
  bit perr_pkt[2][2][$];            // expected perr per packet

  assign tx_valid[0] = inq[0].size() != 0;
  assign tx_valid[1] = inq[1].size() != 0;
  assign tx_flit[0] = tx_valid[0] ? inq[0][0] : '0;
  assign tx_flit[1] = tx_valid[1] ? inq[1][0] : '0;
  assign tx_vc[0] = tx_valid[0] ? invq[0][0] : 1'b0;
  assign tx_vc[1] = tx_valid[1] ? invq[1][0] : 1'b0;

  task automatic add_packet(int s, int len, logic vc);
    hdr_t h;
    h = '{addr: 48'($urandom), rsvd: '0, op: OP_PUT, len: 16'(len), src: '0, dst: '0};
    if (len > 2 && $urandom % 3 == 0) h.addr[47:16] = 32'hBCBC_BCBC;   // header needs an escape
    inq[s].push_back('{sop: 1, eop: 0, data: word_t'(h)}); invq[s].push_back(vc);
    expq[1-s][vc].push_back('{sop: 1, eop: 0, data: word_t'(h)});
    for (int w = 0; w < len; w++) begin
      word_t d;
      d = rand_word();
      inq[s].push_back('{sop: 0, eop: 0, data: d}); invq[s].push_back(vc);
      expq[1-s][vc].push_back('{sop: 0, eop: 0, data: d});
    end
    inq[s].push_back('{sop: 0, eop: 1, data: word_t'({96'd0, 16'(len), 16'd0})}); invq[s].push_back(vc);
    expq[1-s][vc].push_back('{sop: 0, eop: 1, data: word_t'({96'd0, 16'(len), 16'd0})});
    sent_pkts++;
  endtask

  // per receiving side and VC: whether the packet being received had a payload flip
  bit corrupt_now[2][2];
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < 2; s++) begin
      if (tx_valid[s] && tx_ready[s]) begin void'(inq[s].pop_front()); void'(invq[s].pop_front()); end
      if (rx_valid[s] && rx_ready[s]) begin
        flit_t e; logic v;
        v = rx_vc[s];
        checks++;
        if (expq[s][v].size() == 0) begin failures++; $display("side %0d vc %0d: unexpected flit", s, v); end
        else begin
          e = expq[s][v].pop_front();
          if (e.eop) begin
            ftr_t f;
            f = ftr_t'(rx_flit[s].data);
            rcvd_pkts++;
            if (f.perr) n_perr++;
            if (f.perr != corrupt_now[s][v] || rx_flit[s].data[127:1] != e.data[127:1] || !rx_flit[s].eop) begin
              failures++; $display("side %0d: footer mismatch perr=%b expected %b", s, f.perr, corrupt_now[s][v]);
            end
            corrupt_now[s][v] = 0;
          end else if (!e.sop && rx_flit[s].data != e.data) begin
            // payload word corrupted on the wire: allowed only if it differs in bit 0 of lane 0
            if ((rx_flit[s].data ^ e.data) != word_t'(1)) begin failures++; $display("payload mismatch"); end
            corrupt_now[s][v] = 1;
          end else if (rx_flit[s] != e) begin
            failures++; $display("side %0d: mismatch %h vs %h", s, rx_flit[s].data, e.data);
          end
        end
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 2; s++) for (int i = 0; i < NLANE; i++) skew[s][i] = $urandom % 5;
    skew[0][2] = 4; skew[0][1] = 0;
    rx_ready = '1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int p = 0; p < 40; p++) begin
      add_packet(0, $urandom % 12, 1'($urandom));
      add_packet(1, $urandom % 12, 1'($urandom));
    end
    for (int n = 0; n < 20000 && rcvd_pkts < sent_pkts; n++) begin
      @(negedge clk);
      rx_ready = (n % 600 < 150) ? 2'b00 : 2'($urandom) | 2'($urandom);
    end
    checks++;
    if (rcvd_pkts != sent_pkts) begin failures++; $display("packets sent %0d received %0d", sent_pkts, rcvd_pkts); end
    checks++;
    if (!(&locked)) failures++;
    $display("torus_link: packets=%0d retx_h=%0d retx_f=%0d perr=%0d escapes=%0d stalls=%0d",
             rcvd_pkts, n_retx_h, n_retx_f, n_perr, n_esc, n_stall);
    checks++;
    if (n_retx_h == 0 || n_retx_f == 0 || n_perr == 0 || n_esc == 0 || n_stall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
