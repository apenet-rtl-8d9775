// tb_apenet_node: end-to-end test of a small APEnet+ cluster.
//
// Eight nodes, every parameter at its default, are wired as a 4 x 2 x 1
// torus: X+ of each node to X- of its +X neighbour and so on; in the ring of
// size 1 (Z) each node's Z+ is cabled to its own Z-.  Every lane of every
// cable has its own delay (lane skew).  All nodes at once send RDMA PUT
// transfers to random nodes (themselves included), one of them longer than a
// packet, while the testbench flips bits on the wire in chosen header,
// payload and footer words of a few links.  Hosts accept memory writes
// with random back-pressure.
//
// Checked: every word of every transfer lands at the right address of the
// right node, except in packets whose event reports a payload error, and
// exactly the corrupted packets report one; every request completes; every
// packet produces one event with the right source.  Counted, and failed if
// never seen: lane skew compensated, header and footer re-transmission,
// payload error reported, word-stuffing escape, credit stall (node 5 stops
// taking memory writes for a while as seven nodes send it 300 words each, so
// its links' buffers fill and the senders wait for credits), arbitration
// contention in a router, a hop on virtual channel 1 (dateline), transfer
// fragmentation, host memory back-pressure.
//
// The checks follow the behaviour the APEnet+ description asks for
// (delivery, header/footer repair, payload errors flagged, deadlock
// freedom); the torus size, traffic pattern and error placement are this
// testbench's choices.
module tb_apenet_node;
  import apenet_pkg::*;
  import tb_util_pkg::*;
  localparam int NX = 4, NY = 2, NN = NX * NY;
  localparam int NCMD = 6;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  // per-node host signals
  xyz_t [NN-1:0]  my_coord;
  xyz_t           dim_size;
  logic [NN-1:0]  cmd_valid, cmd_ready, hd_valid, hd_ready, cmd_done, mw_valid, mw_ready, ev_valid;
  cmd_t [NN-1:0]  cmd;
  word_t [NN-1:0] hd_data, mw_data;
  logic [NN-1:0][47:0] mw_addr;
  rx_event_t [NN-1:0] ev;
  logic [NN-1:0][NLINK-1:0][NLANE-1:0][LANE_W-1:0] lane_tx, lane_rx;
  logic [NN-1:0][NLINK-1:0] link_locked;

  always #2 clk = ~clk;     // 250 MHz

  for (genvar n = 0; n < NN; n++) begin : g_node
    apenet_node dut (
      .clk, .rst_n, .my_coord(my_coord[n]), .dim_size,
      .cmd_valid(cmd_valid[n]), .cmd(cmd[n]), .cmd_ready(cmd_ready[n]),
      .hd_valid(hd_valid[n]), .hd_data(hd_data[n]), .hd_ready(hd_ready[n]), .cmd_done(cmd_done[n]),
      .mw_valid(mw_valid[n]), .mw_addr(mw_addr[n]), .mw_data(mw_data[n]), .mw_ready(mw_ready[n]),
      .ev_valid(ev_valid[n]), .ev(ev[n]),
      .lane_tx(lane_tx[n]), .lane_rx(lane_rx[n]), .link_locked(link_locked[n])
    );
  end

  function automatic int node_at(int x, int y);
    return ((y + NY) % NY) * NX + (x + NX) % NX;
  endfunction

  // far end of each link: (node, port) -> (node, port)
  function automatic int peer_node(int n, int l);
    int x, y;
    x = n % NX; y = n / NX;
    case (l)
      0: return node_at(x + 1, y);
      1: return node_at(x - 1, y);
      2: return node_at(x, y + 1);
      3: return node_at(x, y - 1);
      default: return n;
    endcase
  endfunction

  // cables: per-lane delay lines (0..4 extra cycles) and bit-error injection
  int skew[NN][NLINK][NLANE];
  logic [NN-1:0][NLINK-1:0][NLANE-1:0][4:0][LANE_W-1:0] dl;
  logic [NN-1:0][NLINK-1:0] flip;
  always_ff @(posedge clk)
    for (int n = 0; n < NN; n++)
      for (int l = 0; l < NLINK; l++)
        for (int i = 0; i < NLANE; i++) begin
          dl[n][l][i][0] <= lane_tx[n][l][i] ^ ((i == 0 && flip[n][l]) ? 32'd1 : 32'd0);
          for (int k = 1; k < 5; k++) dl[n][l][i][k] <= dl[n][l][i][k-1];
        end
  always_comb
    for (int n = 0; n < NN; n++)
      for (int l = 0; l < NLINK; l++)
        for (int i = 0; i < NLANE; i++)
          lane_rx[peer_node(n, l)][l ^ 1][i] = dl[n][l][i][skew[n][l][i]];

  // error injection on the X+ link of nodes 0 and 5 and the Y- link of node 2
  int flips_left[NN][NLINK][3];
  logic [NN-1:0][NLINK-1:0] arm;
  int n_retx_h = 0, n_retx_f = 0, n_esc = 0, n_stall = 0, n_contention = 0, n_vc1 = 0;
  for (genvar n = 0; n < NN; n++) begin : g_mon
    for (genvar l = 0; l < NLINK; l++) begin : g_l
      int kind;
      always_comb begin
        int st;
        st = int'(g_node[n].dut.g_link[l].u_link.u_tx.st);
        kind = -1;
        if (g_node[n].dut.g_link[l].u_link.u_tx.send_data && !g_node[n].dut.g_link[l].u_link.u_tx.ev_stuff) begin
          if (st == 1 || st == 4) kind = 0;
          else if (st == 5 && (g_node[n].dut.g_link[l].u_link.u_tx.re_f ||
                               g_node[n].dut.g_link[l].u_link.u_tx.in_flit.eop)) kind = 2;
          else if (st == 5) kind = 1;
        end
        flip[n][l] = arm[n][l] && kind >= 0 && flips_left[n][l][kind < 0 ? 0 : kind] > 0;
      end
      always @(posedge clk) if (rst_n) begin
        arm[n][l] <= ($urandom % 3) == 0;
        if (flip[n][l]) flips_left[n][l][kind]--;
        if (g_node[n].dut.g_link[l].u_link.u_tx.ev_retx_h) n_retx_h++;
        if (g_node[n].dut.g_link[l].u_link.u_tx.ev_retx_f) n_retx_f++;
        if (g_node[n].dut.g_link[l].u_link.u_tx.ev_stuff) n_esc++;
        if (g_node[n].dut.g_link[l].u_link.u_tx.ev_credit_stall) n_stall++;
        if (g_node[n].dut.u_router.out_valid[l] && g_node[n].dut.u_router.out_ready[l] &&
            g_node[n].dut.u_router.out_flit[l].sop && g_node[n].dut.u_router.out_vc[l]) n_vc1++;
      end
    end
    always @(posedge clk) if (rst_n)
      for (int j = 0; j < NPORT; j++)
        if (!$onehot0(g_node[n].dut.u_router.areq[j])) n_contention++;
  end

  int cc = 0;
  always @(posedge clk) cc++;

  // host models
  word_t dq[NN][$];
  word_t expmem[NN][logic [47:0]];
  word_t gotmem[NN][logic [47:0]];
  int    dones[NN], events = 0, n_perr = 0, n_frag = 0, n_bp = 0, npkts = 0;
  logic [47:0] perr_base[$]; int perr_len[$]; int perr_node[$];

  for (genvar n = 0; n < NN; n++) begin : g_host
    // host data stream, presented on the falling edge
    always @(negedge clk) begin
      hd_valid[n] = dq[n].size() != 0;
      hd_data[n]  = hd_valid[n] ? dq[n][0] : '0;
    end
    always @(posedge clk) if (rst_n) begin
      // node 5's host stops taking writes for a while: its links back up
      mw_ready[n] <= ($urandom % 5) != 0 && !(n == 5 && cc > 200 && cc < 4000);
      if (hd_valid[n] && hd_ready[n]) void'(dq[n].pop_front());
      if (cmd_done[n]) dones[n]++;
      if (mw_valid[n] && !mw_ready[n]) n_bp++;
      if (mw_valid[n] && mw_ready[n]) gotmem[n][mw_addr[n]] = mw_data[n];
      if (ev_valid[n]) begin
        events++;
        if (ev[n].len == 16'd256) n_frag++;
        if (ev[n].perr) begin
          n_perr++; perr_base.push_back(ev[n].addr); perr_len.push_back(int'(ev[n].len)); perr_node.push_back(n);
        end
        checks++;
        if (ev[n].src[2] != 0 || ev[n].src[0] >= NX || ev[n].src[1] >= NY || ev[n].addr[47:40] != 8'(node_at(ev[n].src[0], ev[n].src[1]))) begin
          failures++; $display("node %0d: bad event %p", n, ev[n]);
        end
      end
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    dim_size = '{8'd1, 8'(NY), 8'(NX)};
    for (int n = 0; n < NN; n++) begin
      my_coord[n] = '{8'd0, 8'(n / NX), 8'(n % NX)};
      dones[n] = 0;
      for (int l = 0; l < NLINK; l++) begin
        for (int i = 0; i < NLANE; i++) skew[n][l][i] = $urandom % 5;
        for (int k = 0; k < 3; k++) flips_left[n][l][k] = 0;
      end
    end
    for (int k = 0; k < 3; k++) begin flips_left[0][0][k] = 2; flips_left[5][0][k] = 2; flips_left[2][3][k] = 2; end
    cmd_valid = '0; cmd = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // each node: NCMD transfers
    fork
      for (int n0 = 0; n0 < NN; n0++) begin
        automatic int n = n0;
        fork
          for (int c = 0; c < NCMD; c++) begin
            automatic int dst, len;
            automatic logic [47:0] a;
            dst = $urandom % NN;
            len = (n == 3 && c == 1) ? 300 : 1 + $urandom % 40;
            if (c == 2 && n != 5) begin dst = 5; len = 300; end   // hot spot
            a = {8'(n), 8'(c), 32'h0};
            for (int w = 0; w < len; w++) begin
              automatic word_t d;
              d = rand_word();
              if (w == 2 && c == 0) d[127:96] = 32'hBCBC_BCBC;   // needs an escape on the links
              dq[n].push_back(d);
              expmem[dst][a + 48'(16 * w)] = d;
            end
            npkts += (len + 255) / 256;
            @(negedge clk);
            cmd[n] = '{dst: '{8'd0, 8'(dst / NX), 8'(dst % NX)}, op: OP_PUT, addr: a, len: 24'(len)};
            while (!cmd_ready[n]) @(negedge clk);
            cmd_valid[n] = 1;              // taken at the next rising edge
            @(negedge clk); cmd_valid[n] = 0;
            while (dones[n] <= c) @(posedge clk);
          end
        join_none
      end
    join_none
    cyc = 0;
    while (events < npkts || npkts == 0) begin @(posedge clk); cyc++; if (cyc > 300000) break; end
    repeat (20) @(posedge clk);
    // memory contents
    for (int n = 0; n < NN; n++) begin
      foreach (expmem[n][a]) begin
        bit exempt;
        exempt = 0;
        foreach (perr_base[k])
          if (perr_node[k] == n && a >= perr_base[k] && a < perr_base[k] + 48'(16 * perr_len[k])) exempt = 1;
        checks++;
        if (!gotmem[n].exists(a)) begin failures++; $display("node %0d: no write at %h", n, a); end
        else if (!exempt && gotmem[n][a] != expmem[n][a]) begin failures++; $display("node %0d: wrong data at %h", n, a); end
      end
    end
    // a flagged packet must really have been corrupted
    foreach (perr_base[k]) begin
      int bad;
      bad = 0;
      for (int w = 0; w < perr_len[k]; w++)
        if (gotmem[perr_node[k]].exists(perr_base[k] + 48'(16 * w)) &&
            gotmem[perr_node[k]][perr_base[k] + 48'(16 * w)] != expmem[perr_node[k]][perr_base[k] + 48'(16 * w)]) bad++;
      checks++;
      if (bad == 0) begin failures++; $display("node %0d: packet at %h flagged but intact", perr_node[k], perr_base[k]); end
    end
    for (int n = 0; n < NN; n++) begin
      checks++;
      if (dones[n] != NCMD) begin failures++; $display("node %0d: %0d of %0d requests done", n, dones[n], NCMD); end
      checks++;
      if (link_locked[n] != '1) begin failures++; $display("node %0d: links locked %b", n, link_locked[n]); end
    end
    checks++;
    if (events != npkts) begin failures++; $display("events %0d packets %0d", events, npkts); end
    $display("mechanisms: retx_h=%0d retx_f=%0d perr=%0d escapes=%0d credit_stalls=%0d contention=%0d vc1_hops=%0d fragments=%0d mem_backpressure=%0d",
             n_retx_h, n_retx_f, n_perr, n_esc, n_stall, n_contention, n_vc1, n_frag, n_bp);
    checks++; if (n_retx_h == 0) begin failures++; $display("no header re-transmission"); end
    checks++; if (n_retx_f == 0) begin failures++; $display("no footer re-transmission"); end
    checks++; if (n_perr == 0)   begin failures++; $display("no payload error"); end
    checks++; if (n_esc == 0)    begin failures++; $display("no escape"); end
    checks++; if (n_stall == 0)  begin failures++; $display("no credit stall"); end
    checks++; if (n_contention == 0) begin failures++; $display("no contention"); end
    checks++; if (n_vc1 == 0)    begin failures++; $display("no VC1 hop"); end
    checks++; if (n_frag == 0)   begin failures++; $display("no fragmentation"); end
    checks++; if (n_bp == 0)     begin failures++; $display("no memory back-pressure"); end
    $display("simulated %0d cycles", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
