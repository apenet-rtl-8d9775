// link_tx: transmit side of a torus link.
//
// Sends one 128-bit link word per cycle (split over the 4 lanes outside).
// After reset it sends TRAIN_CYCLES-1 alignment words and one ALIGN_END word
// for the far lane_align.
// Then every cycle carries, in this priority: the data word owed after an ESC;
// a control word the co-located receiver asked for (ACK/NAK of a header or
// footer, or a credit return); the next word of the packet in flight; IDLE.
//
// Packet framing (word stuffing): the header goes out as a data word
// followed by an HCRC control word carrying the header's CRC-32 and the
// packet's VC; then the sender waits for ACK_H, and on NAK_H sends the
// header and HCRC again.  Payload words follow back to back under a running
// CRC-32.  The footer goes out with an FCRC word carrying the footer CRC and
// the payload CRC, and is likewise held until ACK_F and re-sent on NAK_F.
// A data word whose top 32 bits equal K_MAGIC is preceded by ESC.
//
// Flow control: one credit per word of the far receiver's buffer of each
// VC, BUF_DEPTH at reset.  A packet is started only when its VC has credits
// for all of it (header, payload length from the header, footer), so a
// packet that has started never stalls half-way on the link and never holds
// the link against the other VC (virtual cut-through); BUF_DEPTH must
// therefore be at least the longest packet.  Credits come back in CREDIT
// control words decoded by the co-located link_rx.  A header is counted against the buffer once, however
// often it is re-sent, because the receiver stores it only once accepted.
//
// From the paper: word-stuffing protocol, CRC-32, re-transmission of header
// and footer, credits carried in the link protocol, 2 VCs.  The word
// formats, the stop-and-wait acknowledgement and the priorities are this
// design's.  Control words themselves carry no CRC.
module link_tx
  import apenet_pkg::*;
#(
  parameter int unsigned BUF_DEPTH    = 512,
  parameter int unsigned TRAIN_CYCLES = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // from the router output port
  input  logic        in_valid,
  input  flit_t       in_flit,
  input  logic        in_vc,
  output logic        in_ready,
  // to the lanes
  output word_t       tx_word,
  // decoded by the co-located link_rx from the far side
  input  logic        rx_ack_h,
  input  logic        rx_nak_h,
  input  logic        rx_ack_f,
  input  logic        rx_nak_f,
  input  logic        rx_credit_valid,
  input  logic [1:0][15:0] rx_credit_cnt,
  // requests of the co-located link_rx, to be sent to the far side
  input  logic        snd_ack_h,
  input  logic        snd_nak_h,
  input  logic        snd_ack_f,
  input  logic        snd_nak_f,
  input  logic [1:0]  snd_credit,
  // event strobes
  output logic        ev_stuff,
  output logic        ev_retx_h,
  output logic        ev_retx_f,
  output logic        ev_credit_stall
);
  typedef enum logic [2:0] {
    S_TRAIN, S_IDLE, S_HCRC, S_WAIT_H, S_RE_H, S_PAY, S_FCRC, S_WAIT_F
  } st_e;
  st_e st, st_n;

  localparam int unsigned CW = $clog2(BUF_DEPTH + 1);
  logic [$clog2(TRAIN_CYCLES+1)-1:0] train_cnt;
  logic [1:0][CW-1:0] credits;
  logic [1:0][15:0]   pend_cred;
  logic pend_ackh, pend_nakh, pend_ackf, pend_nakf;
  logic esc_pend;
  word_t esc_word, hdr_q, ftr_q;
  logic cur_vc;
  logic re_f;                  // footer must be sent again
  logic [31:0] pcrc, hcrc, fcrc, pcrc_n;

  crc32_d128 u_hcrc (.crc_in(CRC_INIT), .data(hdr_q),        .crc_out(hcrc));
  crc32_d128 u_fcrc (.crc_in(CRC_INIT), .data(ftr_q),        .crc_out(fcrc));
  crc32_d128 u_pcrc (.crc_in(pcrc),     .data(in_flit.data), .crc_out(pcrc_n));

  logic resp_any, slot_free, take, vc_sel, has_credit;
  hdr_t in_hdr;
  logic [CW:0] need;
  assign in_hdr = hdr_t'(in_flit.data);
  logic send_data;
  word_t data_w;

  // the pending credit counts go out in this cycle's credit word
  logic cred_sent;
  assign cred_sent = (st != S_TRAIN) && !esc_pend &&
                     !(pend_ackh | pend_nakh | pend_ackf | pend_nakf) && (pend_cred != '0);
  assign resp_any  = pend_ackh | pend_nakh | pend_ackf | pend_nakf | (pend_cred != '0);
  assign slot_free = (st != S_TRAIN) && !esc_pend && !resp_any;
  assign vc_sel    = (st == S_IDLE) ? in_vc : cur_vc;
  // a header needs room for the whole packet, later words one each
  assign need = (st == S_IDLE) ? (CW+1)'(in_hdr.len) + (CW+1)'(2) : (CW+1)'(1);
  assign has_credit = {1'b0, credits[vc_sel]} >= need;
  assign in_ready  = slot_free && has_credit &&
                     ((st == S_IDLE && in_flit.sop) || (st == S_PAY && !re_f));
  assign take      = in_valid && in_ready;
  assign ev_credit_stall = in_valid && !has_credit && (st == S_IDLE || st == S_PAY) && slot_free;

  // word to send this cycle, and next state
  always_comb begin
    st_n      = st;
    tx_word   = ctrl_word(C_IDLE, '0);
    send_data = 1'b0;
    data_w    = in_flit.data;
    ev_retx_h = 1'b0;
    ev_retx_f = 1'b0;
    if (st == S_TRAIN) begin
      tx_word = (train_cnt == ($clog2(TRAIN_CYCLES+1))'(TRAIN_CYCLES - 1)) ? ALIGN_END : ALIGN_WORD;
    end else if (esc_pend) begin
      tx_word = esc_word;
    end else if (pend_ackh) tx_word = ctrl_word(C_ACKH, '0);
    else if (pend_nakh)     tx_word = ctrl_word(C_NAKH, '0);
    else if (pend_ackf)     tx_word = ctrl_word(C_ACKF, '0);
    else if (pend_nakf)     tx_word = ctrl_word(C_NAKF, '0);
    else if (pend_cred != '0)
      tx_word = ctrl_word(C_CREDIT, {56'd0, pend_cred[1], pend_cred[0]});
    else begin
      unique case (st)
        S_IDLE: if (take) begin send_data = 1'b1; st_n = S_HCRC; end
        S_HCRC: begin tx_word = ctrl_word(C_HCRC, {55'd0, cur_vc, hcrc}); st_n = S_WAIT_H; end
        S_RE_H: begin send_data = 1'b1; data_w = hdr_q; st_n = S_HCRC; ev_retx_h = 1'b1; end
        S_PAY: begin
          if (re_f) begin
            send_data = 1'b1; data_w = ftr_q; st_n = S_FCRC; ev_retx_f = 1'b1;
          end else if (take) begin
            send_data = 1'b1;
            if (in_flit.eop) st_n = S_FCRC;
          end
        end
        S_FCRC: begin tx_word = ctrl_word(C_FCRC, {24'd0, pcrc, fcrc}); st_n = S_WAIT_F; end
        default: ;
      endcase
      if (send_data) tx_word = is_k(data_w) ? ctrl_word(C_ESC, '0) : data_w;
    end
    // acknowledgements may arrive in any cycle
    if (st == S_WAIT_H && rx_ack_h) st_n = S_PAY;
    if (st == S_WAIT_H && rx_nak_h) st_n = S_RE_H;
    if (st == S_WAIT_F && rx_ack_f) st_n = S_IDLE;
    if (st == S_WAIT_F && rx_nak_f) st_n = S_PAY;
  end
  assign ev_stuff = send_data && is_k(data_w);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_TRAIN;
      train_cnt <= '0;
      credits   <= {2{CW'(BUF_DEPTH)}};
      pend_cred <= '0;
      {pend_ackh, pend_nakh, pend_ackf, pend_nakf} <= '0;
      esc_pend  <= 1'b0;
      esc_word  <= '0;
      hdr_q     <= '0;
      ftr_q     <= '0;
      cur_vc    <= 1'b0;
      re_f      <= 1'b0;
      pcrc      <= CRC_INIT;
    end else begin
      st <= st_n;
      if (st == S_TRAIN) begin
        train_cnt <= train_cnt + 1'b1;
        if (train_cnt == ($clog2(TRAIN_CYCLES+1))'(TRAIN_CYCLES - 1)) st <= S_IDLE;
      end
      // escape bookkeeping
      if (esc_pend) esc_pend <= 1'b0;
      else if (send_data && is_k(data_w)) begin
        esc_pend <= 1'b1;
        esc_word <= data_w;
      end
      // responses: set by requests, cleared when sent (send order above)
      if (st != S_TRAIN && !esc_pend) begin
        if (pend_ackh)      pend_ackh <= 1'b0;
        else if (pend_nakh) pend_nakh <= 1'b0;
        else if (pend_ackf) pend_ackf <= 1'b0;
        else if (pend_nakf) pend_nakf <= 1'b0;
      end
      if (snd_ack_h) pend_ackh <= 1'b1;
      if (snd_nak_h) pend_nakh <= 1'b1;
      if (snd_ack_f) pend_ackf <= 1'b1;
      if (snd_nak_f) pend_nakf <= 1'b1;
      // credit returns: cleared when sent, plus the new pops
      for (int v = 0; v < 2; v++) begin
        pend_cred[v] <= (cred_sent ? 16'd0 : pend_cred[v]) + 16'(snd_credit[v]);
      end
      // credits towards the far receiver
      for (int v = 0; v < 2; v++) begin
        credits[v] <= credits[v]
                    + (rx_credit_valid ? CW'(rx_credit_cnt[v]) : '0)
                    - ((take && vc_sel == 1'(v)) ? CW'(1) : '0);
      end
      // packet state
      if (take && st == S_IDLE) begin
        hdr_q  <= in_flit.data;
        cur_vc <= in_vc;
      end
      if (st == S_WAIT_H && rx_ack_h) pcrc <= CRC_INIT;
      if (take && st == S_PAY) begin
        if (in_flit.eop) ftr_q <= in_flit.data;
        else             pcrc  <= pcrc_n;
      end
      if (st == S_WAIT_F && rx_nak_f) re_f <= 1'b1;
      if (st == S_PAY && re_f && slot_free) re_f <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
    (st == S_IDLE && in_valid) |-> in_flit.sop);
  assert property (@(posedge clk) disable iff (!rst_n)
    (st == S_IDLE && in_valid) |-> (32'(in_hdr.len) + 2 <= BUF_DEPTH));
  for (genvar v = 0; v < 2; v++) begin : g_cchk
    assert property (@(posedge clk) disable iff (!rst_n) credits[v] <= CW'(BUF_DEPTH));
  end
endmodule
