// tb_link_rx: the testbench plays the far transmitter.  It builds a word
// stream with its own framing code: packets on both VCs, a header and a
// footer that arrive corrupted once and are then sent again, a packet whose
// payload is corrupted, an escaped payload word, an empty packet, and
// control words (credits, ACK/NAK) mixed in between, with gaps where the
// lanes are not yet valid.  It checks every word pushed into the VC buffers
// (VC, flags, data, the perr bit of the footer), every ACK/NAK request, and
// every control word passed on to the co-located transmitter.
//
// CRC checking, header/footer re-transmission requests and footer-flagged
// payload errors follow the APEnet+ description; the word formats are this
// design's.
module tb_link_rx;
  import apenet_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  word_t rx_word;
  logic rx_valid;
  logic push, push_vc;
  flit_t push_flit;
  logic ack_h, nak_h, ack_f, nak_f, credit_valid;
  logic [1:0][15:0] credit_cnt;
  logic req_ack_h, req_nak_h, req_ack_f, req_nak_f, ev_perr, ev_unstuff;
  int checks = 0, failures = 0;

  link_rx dut (.*);
  always #5 clk = ~clk;

  word_t wq[$];                     // stream to send
  flit_t pq[$]; logic pvq[$];       // expected pushes
  int    rq[$];                     // expected requests: 0 ackh 1 nakh 2 ackf 3 nakf
  int    oq[$];                     // expected passed-on controls: 4+kind, 8 credit
  int    cq0[$], cq1[$];
  int n_perr = 0, n_unstuff = 0;

  task automatic put_data(word_t w);
    if (w[127:96] == 32'hBCBC_BCBC) wq.push_back(kword(C_ESC, '0));
    wq.push_back(w);
  endtask

  task automatic packet(int len, logic vc, int bad_hdr, int bad_ftr, int bad_pay, int kword_at);
    hdr_t h; word_t f; logic [31:0] pc; word_t pay[$];
    bit perr;
    h = '{addr: 48'($urandom), rsvd: '0, op: OP_PUT, len: 16'(len), src: '0, dst: '0};
    for (int b = 0; b < bad_hdr; b++) begin
      put_data(word_t'(h) ^ (word_t'(1) << ($urandom % 90)));
      wq.push_back(kword(C_HCRC, {55'd0, vc, crc32_ref(32'hFFFF_FFFF, word_t'(h))}));
      rq.push_back(1);
      wq.push_back(kword(C_IDLE, '0));
    end
    put_data(word_t'(h));
    wq.push_back(kword(C_HCRC, {55'd0, vc, crc32_ref(32'hFFFF_FFFF, word_t'(h))}));
    rq.push_back(0);
    pq.push_back('{sop: 1, eop: 0, data: word_t'(h)}); pvq.push_back(vc);
    pc = 32'hFFFF_FFFF; perr = 0;
    for (int w = 0; w < len; w++) begin
      word_t d, sent;
      d = rand_word();
      if (w == kword_at) d[127:96] = 32'hBCBC_BCBC;
      pc = crc32_ref(pc, d);
      sent = d;
      if (w == bad_pay) begin sent[5] = ~sent[5]; perr = 1; end
      put_data(sent);
      pq.push_back('{sop: 0, eop: 0, data: sent}); pvq.push_back(vc);
      if (w == 0) begin                  // a credit word inside the payload
        wq.push_back(kword(C_CREDIT, {56'd0, 16'(w + 3), 16'(len)}));
        oq.push_back(8); cq0.push_back(len); cq1.push_back(w + 3);
      end
    end
    f = word_t'({96'd0, 16'(len), 16'd0});
    for (int b = 0; b < bad_ftr; b++) begin
      put_data(f ^ (word_t'(1) << (1 + $urandom % 90)));
      wq.push_back(kword(C_FCRC, {24'd0, pc, crc32_ref(32'hFFFF_FFFF, f)}));
      rq.push_back(3);
      wq.push_back(kword(C_ACKH, '0)); oq.push_back(4 + C_ACKH);
    end
    put_data(f);
    wq.push_back(kword(C_FCRC, {24'd0, pc, crc32_ref(32'hFFFF_FFFF, f)}));
    rq.push_back(2);
    f[0] = perr;
    pq.push_back('{sop: 0, eop: 1, data: f}); pvq.push_back(vc);
    wq.push_back(kword(C_NAKF, '0)); oq.push_back(4 + C_NAKF);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checks on every cycle
  always @(posedge clk) if (rst_n && rx_valid) begin
    if (ev_perr) n_perr++;
    if (ev_unstuff) n_unstuff++;
    if (push) begin
      checks++;
      if (pq.size() == 0 || push_flit != pq[0] || push_vc != pvq[0]) begin
        failures++; $display("push mismatch: got %h", push_flit);
      end else begin void'(pq.pop_front()); void'(pvq.pop_front()); end
    end
    if (req_ack_h | req_nak_h | req_ack_f | req_nak_f) begin
      int got;
      got = req_ack_h ? 0 : req_nak_h ? 1 : req_ack_f ? 2 : 3;
      checks++;
      if (rq.size() == 0 || rq[0] != got) begin failures++; $display("request %0d unexpected", got); end
      else void'(rq.pop_front());
    end
    if (credit_valid) begin
      checks++;
      if (oq.size() == 0 || oq[0] != 8 || credit_cnt[0] != 16'(cq0[0]) || credit_cnt[1] != 16'(cq1[0])) failures++;
      else begin void'(oq.pop_front()); void'(cq0.pop_front()); void'(cq1.pop_front()); end
    end
    if (ack_h | nak_h | ack_f | nak_f) begin
      int got;
      got = 4 + (ack_h ? C_ACKH : nak_h ? C_NAKH : ack_f ? C_ACKF : C_NAKF);
      checks++;
      if (oq.size() == 0 || oq[0] != got) failures++;
      else void'(oq.pop_front());
    end
  end

  initial begin
    rx_valid = 0; rx_word = '0;
    // lanes not aligned yet: garbage that must be ignored
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3) begin @(negedge clk); rx_word = rand_word(); end
    packet(3, 0, 0, 0, -1, -1);
    packet(4, 1, 1, 0, -1, -1);
    packet(2, 0, 0, 1, -1, -1);
    packet(5, 1, 0, 0, 2, -1);
    packet(3, 0, 0, 0, -1, 1);
    packet(0, 1, 0, 0, -1, -1);
    packet(6, 0, 2, 2, 4, 0);
    while (wq.size() != 0) begin
      @(negedge clk);
      if ($urandom % 5 == 0) begin
        rx_word = rand_word(); rx_valid = 0;     // gap: lanes deliver nothing
      end else begin
        rx_word = wq.pop_front(); rx_valid = 1;
      end
    end
    @(negedge clk); rx_word = kword(C_IDLE, '0);
    repeat (3) @(posedge clk);
    checks++;
    if (pq.size() != 0 || rq.size() != 0 || oq.size() != 0) begin
      failures++; $display("left over: pushes %0d requests %0d controls %0d", pq.size(), rq.size(), oq.size());
    end
    checks++;
    if (n_perr != 2 || n_unstuff != 2) begin failures++; $display("perr %0d unstuff %0d", n_perr, n_unstuff); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
