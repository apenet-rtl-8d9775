// tb_net_if: the network interface with its router port looped back
// (packets it sends come straight back to its receive side, with random
// gaps and back-pressure).  Several host requests of different lengths are
// sent, longer than one packet so that they are cut into fragments of
// MAX_PAYLOAD words.  The testbench checks every packet header (coordinates,
// op, length, address advancing by 16 bytes per word), every host memory
// write (address and data), every received-packet event, one cmd_done per
// request, and that fragmentation happened.
//
// Fragmenting a host transfer into packets and writing received data to
// memory follow the APEnet+ description; the packet size and host ports are
// this design's.
module tb_net_if;
  import apenet_pkg::*;
  import tb_util_pkg::*;
  localparam int MAXP = 8;
  logic clk = 0, rst_n = 0;
  xyz_t my_coord;
  logic cmd_valid, cmd_ready, hd_valid, hd_ready, cmd_done;
  cmd_t cmd;
  word_t hd_data, mw_data;
  logic tx_valid, tx_ready, rx_valid, rx_ready, mw_valid, mw_ready, ev_valid;
  flit_t tx_flit, rx_flit;
  logic [47:0] mw_addr;
  rx_event_t ev;
  int checks = 0, failures = 0;

  net_if #(.MAX_PAYLOAD(MAXP), .FIFO_DEPTH(4)) dut (.*);
  always #2 clk = ~clk;

  // loopback with gaps
  logic gate;
  assign rx_valid = tx_valid && gate;
  assign rx_flit  = tx_flit;
  assign tx_ready = rx_ready && gate;

  word_t dq[$];                 // host data to stream
  word_t mq[$]; logic [47:0] aq[$];   // expected memory writes
  hdr_t  hq[$];                 // expected headers
  int dones = 0, events = 0, frags = 0;

  assign hd_valid = dq.size() != 0;
  assign hd_data  = hd_valid ? dq[0] : '0;

  always @(posedge clk) if (rst_n) begin
    gate     <= ($urandom % 4) != 0;
    mw_ready <= ($urandom % 3) != 0;
    if (hd_valid && hd_ready) void'(dq.pop_front());
    if (cmd_done) dones++;
    if (tx_valid && tx_ready && tx_flit.sop) begin
      hdr_t h, e;
      h = hdr_t'(tx_flit.data);
      checks++;
      e = hq.pop_front();
      if (h != e) begin failures++; $display("header %h expected %h", h, e); end
      if (h.len == 16'(MAXP)) frags++;
    end
    if (mw_valid && mw_ready) begin
      checks++;
      if (mw_addr != aq[0] || mw_data != mq[0]) begin failures++; $display("write %h:%h expected %h:%h", mw_addr, mw_data, aq[0], mq[0]); end
      void'(aq.pop_front()); void'(mq.pop_front());
    end
    if (ev_valid) begin
      events++;
      checks++;
      if (ev.src != my_coord || ev.perr || ev.op != OP_PUT) failures++;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lens[5] = '{3, 8, 20, 0, 17};
    int pk = 0;
    my_coord = '{8'd3, 8'd1, 8'd2};
    cmd_valid = 0; cmd = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 5; c++) begin
      logic [47:0] a;
      int rem;
      a = 48'h1000_0000 + 48'(c * 48'h10000);
      cmd = '{dst: '{8'd1, 8'd1, 8'd1}, op: OP_PUT, addr: a, len: 24'(lens[c])};
      rem = lens[c];
      do begin
        int f;
        f = rem > MAXP ? MAXP : rem;
        hq.push_back('{addr: a, rsvd: '0, op: OP_PUT, len: 16'(f), src: my_coord, dst: cmd.dst});
        for (int w = 0; w < f; w++) begin
          word_t d;
          d = rand_word();
          dq.push_back(d); mq.push_back(d); aq.push_back(a + 48'(16 * w));
        end
        a += 48'(16 * f);
        rem -= f;
        pk++;
      end while (rem > 0);
      @(negedge clk);
      while (!cmd_ready) @(negedge clk);
      cmd_valid = 1;                     // taken at the next rising edge
      @(negedge clk); cmd_valid = 0;
      while (dones <= c) @(posedge clk);
    end
    while (events < pk) @(posedge clk);
    repeat (10) @(posedge clk);
    checks++;
    if (dones != 5 || events != pk || mq.size() != 0 || hq.size() != 0 || frags < 4) begin
      failures++; $display("dones=%0d events=%0d/%0d writes left=%0d frags=%0d", dones, events, pk, mq.size(), frags);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
