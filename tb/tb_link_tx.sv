// tb_link_tx: the testbench plays the far end of the link.  It decodes the
// transmitted word stream on its own (escapes, control words, CRCs computed
// with an independent model), answers headers and footers with ACK or, for
// chosen packets, NAK, and returns credits after a delay.  It checks that:
// the link starts with TRAIN_CYCLES alignment words; every packet arrives
// whole and in order with correct header, payload and footer CRCs and VC;
// a NAKed header or footer is sent again; a data word starting with K_MAGIC
// is escaped; the sender never overruns the far buffer (BUF_DEPTH credits),
// starts a packet only with credits for all of it, and does stall on credits; requests from the co-located receiver (ACK,
// NAK, credit returns) appear as control words with the right counts.
//
// Credits, word stuffing and header/footer re-transmission follow the
// APEnet+ description; the word formats and the stop-and-wait timing are
// this design's.
module tb_link_tx;
  import apenet_pkg::*;
  import tb_util_pkg::*;
  localparam int BUF = 12, TRAIN = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_vc, in_ready;
  flit_t in_flit;
  word_t tx_word;
  logic rx_ack_h = 0, rx_nak_h = 0, rx_ack_f = 0, rx_nak_f = 0, rx_credit_valid = 0;
  logic [1:0][15:0] rx_credit_cnt = '0;
  logic snd_ack_h = 0, snd_nak_h = 0, snd_ack_f = 0, snd_nak_f = 0;
  logic [1:0] snd_credit = '0;
  logic ev_stuff, ev_retx_h, ev_retx_f, ev_credit_stall;
  int checks = 0, failures = 0;
  int n_stall = 0, n_retx_h = 0, n_retx_f = 0, n_esc = 0;

  link_tx #(.BUF_DEPTH(BUF), .TRAIN_CYCLES(TRAIN)) dut (.*);
  always #5 clk = ~clk;

  // stimulus
  flit_t inq[$];
  logic  invcq[$];
  flit_t expq[$];
  logic  expvc[$];

  assign in_valid = inq.size() != 0;
  assign in_flit  = in_valid ? inq[0] : '0;
  assign in_vc    = in_valid ? invcq[0] : 1'b0;

  // far end state
  int cycle = 0;
  bit esc = 0;
  int fstate = 0;        // 0 expect header, 1 got header, 2 payload, 3 got footer
  word_t hq, fq;
  int remaining;
  logic [31:0] pcrc;
  int outstanding[2] = '{0, 0};     // words in the far buffer per VC
  int nak_h_plan = 2, nak_f_plan = 2;
  int resp_delay[$]; int resp_kind[$];
  int cred_due[$]; int cred_vc[$];
  int ctrl_seen[int];
  int sent_credit_total[2] = '{0, 0}, seen_credit_total[2] = '{0, 0};
  logic cur_vc;

  always @(posedge clk) if (rst_n) begin
    cycle++;
    if (in_valid && in_ready) begin void'(inq.pop_front()); void'(invcq.pop_front()); end
    if (ev_credit_stall) n_stall++;
    if (ev_retx_h) n_retx_h++;
    if (ev_retx_f) n_retx_f++;
    // decode the wire
    if (cycle <= TRAIN) begin
      checks++;
      if (tx_word != ((cycle == TRAIN) ? {4{32'hE0E0_E0E0}} : {4{32'hBCBC_BCBC}})) failures++;
    end else if (!esc && tx_word[127:96] == 32'hBCBC_BCBC) begin
      int t;
      t = tx_word[95:88];
      ctrl_seen[t] = ctrl_seen.exists(t) ? ctrl_seen[t] + 1 : 1;
      if (t == C_ESC) begin esc = 1; n_esc++; end
      if (t == C_CREDIT) begin
        seen_credit_total[0] += tx_word[15:0];
        seen_credit_total[1] += tx_word[31:16];
      end
      if (t == C_HCRC) begin
        checks++;
        if (fstate != 1 || tx_word[31:0] != crc32_ref(32'hFFFF_FFFF, hq)) begin
          failures++; $display("bad HCRC state=%0d", fstate);
        end
        if (nak_h_plan > 0 && ($urandom % 2)) begin
          nak_h_plan--; resp_kind.push_back(1); fstate = 0;
        end else begin
          flit_t e;
          resp_kind.push_back(0);
          cur_vc = tx_word[32];
          e = expq.pop_front();
          checks++;
          if (e != '{sop: 1, eop: 0, data: hq} || expvc.pop_front() != cur_vc) begin
            failures++; $display("header mismatch %h vs %h", hq, e.data);
          end
          outstanding[cur_vc]++;
          remaining = int'(hq[63:48]); pcrc = 32'hFFFF_FFFF; fstate = 2;
        end
        resp_delay.push_back(cycle + 3 + $urandom % 4);
      end
      if (t == C_FCRC) begin
        checks++;
        if (fstate != 3 || tx_word[31:0] != crc32_ref(32'hFFFF_FFFF, fq) || tx_word[63:32] != pcrc) begin
          failures++; $display("bad FCRC");
        end
        if (nak_f_plan > 0 && ($urandom % 2)) begin
          nak_f_plan--; resp_kind.push_back(3); fstate = 2;
        end else begin
          flit_t e;
          resp_kind.push_back(2);
          e = expq.pop_front(); void'(expvc.pop_front());
          checks++;
          if (e != '{sop: 0, eop: 1, data: fq}) begin failures++; $display("footer mismatch"); end
          outstanding[cur_vc]++;
          fstate = 0;
        end
        resp_delay.push_back(cycle + 3 + $urandom % 4);
      end
    end else begin
      if (esc) begin
        checks++;
        if (tx_word[127:96] != 32'hBCBC_BCBC) failures++;   // only K words are escaped
      end
      esc = 0;
      case (fstate)
        0, 1: begin hq = tx_word; fstate = 1; end
        2: if (remaining > 0) begin
             flit_t e;
             e = expq.pop_front(); void'(expvc.pop_front());
             checks++;
             if (e != '{sop: 0, eop: 0, data: tx_word}) begin failures++; $display("payload mismatch"); end
             pcrc = crc32_ref(pcrc, tx_word);
             remaining--;
             outstanding[cur_vc]++;
           end else begin fq = tx_word; fstate = 3; end
        3: fq = tx_word;
      endcase
    end
    for (int v = 0; v < 2; v++) begin
      checks++;
      if (outstanding[v] > BUF) begin failures++; $display("far buffer overrun vc%0d", v); end
    end
  end

  // far end: responses and credit returns
  always @(posedge clk) if (rst_n) begin
    rx_ack_h <= 0; rx_nak_h <= 0; rx_ack_f <= 0; rx_nak_f <= 0; rx_credit_valid <= 0;
    if (resp_delay.size() != 0 && resp_delay[0] <= cycle) begin
      int k;
      void'(resp_delay.pop_front());
      k = resp_kind.pop_front();
      case (k)
        0: rx_ack_h <= 1; 1: rx_nak_h <= 1; 2: rx_ack_f <= 1; 3: rx_nak_f <= 1;
      endcase
    end else if ((outstanding[0] > 0 || outstanding[1] > 0) && ($urandom % 8 == 0)) begin
      rx_credit_valid <= 1;
      rx_credit_cnt   <= {16'(outstanding[1]), 16'(outstanding[0])};
      outstanding[0] = 0; outstanding[1] = 0;
    end
  end

  task automatic add_packet(int len, logic vc, bit kfirst);
    hdr_t h;
    h = '{addr: 48'($urandom), rsvd: '0, op: OP_PUT, len: 16'(len), src: '0, dst: '{default: 8'd1}};
    inq.push_back('{sop: 1, eop: 0, data: word_t'(h)}); invcq.push_back(vc);
    expq.push_back('{sop: 1, eop: 0, data: word_t'(h)}); expvc.push_back(vc);
    for (int w = 0; w < len; w++) begin
      word_t d;
      d = rand_word();
      if (kfirst && w == 1) d[127:96] = 32'hBCBC_BCBC;
      inq.push_back('{sop: 0, eop: 0, data: d}); invcq.push_back(vc);
      expq.push_back('{sop: 0, eop: 0, data: d}); expvc.push_back(vc);
    end
    inq.push_back('{sop: 0, eop: 1, data: word_t'({96'd0, 16'(len), 16'd0})}); invcq.push_back(vc);
    expq.push_back('{sop: 0, eop: 1, data: word_t'({96'd0, 16'(len), 16'd0})}); expvc.push_back(vc);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 12; p++) add_packet($urandom % 9, 1'(p % 3 == 0), p % 4 == 1);
    // requests from the co-located receiver while traffic flows
    repeat (40) @(posedge clk);
    @(negedge clk); snd_ack_h = 1; snd_credit = 2'b11; sent_credit_total[0]++; sent_credit_total[1]++;
    @(negedge clk); snd_ack_h = 0; snd_nak_f = 1; snd_credit = 2'b01; sent_credit_total[0]++;
    @(negedge clk); snd_nak_f = 0; snd_credit = 2'b00;
    while (inq.size() != 0 || fstate != 0 || resp_delay.size() != 0) @(posedge clk);
    repeat (30) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d flits not delivered", expq.size()); end
    checks++;
    if (n_stall == 0 || n_retx_h != 2 || n_retx_f != 2 || n_esc == 0) begin
      failures++; $display("stall=%0d retx_h=%0d retx_f=%0d esc=%0d", n_stall, n_retx_h, n_retx_f, n_esc);
    end
    checks++;
    if (!ctrl_seen.exists(C_ACKH) || !ctrl_seen.exists(C_NAKF) ||
        seen_credit_total[0] != sent_credit_total[0] || seen_credit_total[1] != sent_credit_total[1]) begin
      failures++; $display("control requests not sent as expected");
    end
    $display("link_tx: stalls=%0d retx_h=%0d retx_f=%0d escapes=%0d", n_stall, n_retx_h, n_retx_f, n_esc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
