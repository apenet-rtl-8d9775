// link_rx: receive side of a torus link.
//
// Takes the aligned 128-bit words from lane_align and undoes the framing of
// link_tx.  A word with K_MAGIC on top is a control word unless an ESC came
// just before it.  Control words from the far transmitter are acted on
// here (HCRC, FCRC) or passed to the co-located link_tx (ACK/NAK of our own
// packets, returned credits).
//
// A header data word is held until its HCRC word: if the CRC-32 matches, the
// header is pushed into the VC buffer named in the HCRC word and ACK_H is
// requested, otherwise NAK_H, and a re-sent header simply replaces the held
// one.  The header's length field then tells how many payload words follow;
// they are pushed as they arrive under a running CRC-32.  The next data word
// is the footer, held until FCRC: a bad footer CRC asks for NAK_F; a good one
// pushes the footer, with its perr bit set when the payload CRC differs, and
// asks for ACK_F.  Corrupted payload is therefore delivered and flagged, for
// software to handle, while header and footer are recovered by the link.
// Buffer space is guaranteed by the far transmitter's credits.
//
// From the paper: word stuffing, CRC-32, header/footer re-transmission,
// payload errors signalled by the footer, 2 VC receive buffers.  The formats
// and the state machine are this design's.
module link_rx
  import apenet_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  word_t       rx_word,
  input  logic        rx_valid,      // lane alignment locked
  // into the VC buffers
  output logic        push,
  output logic        push_vc,
  output flit_t       push_flit,
  // far side's responses, for the co-located link_tx
  output logic        ack_h,
  output logic        nak_h,
  output logic        ack_f,
  output logic        nak_f,
  output logic        credit_valid,
  output logic [1:0][15:0] credit_cnt,
  // requests to the co-located link_tx
  output logic        req_ack_h,
  output logic        req_nak_h,
  output logic        req_ack_f,
  output logic        req_nak_f,
  // event strobes
  output logic        ev_perr,
  output logic        ev_unstuff
);
  typedef enum logic [1:0] { R_EXP_H, R_GOT_H, R_PAY, R_GOT_F } st_e;
  st_e st;
  logic  esc;
  word_t hdr_q, ftr_q;
  logic  vc_q;
  logic [15:0] remaining;
  logic [31:0] pcrc, pcrc_n, hcrc, fcrc;
  hdr_t  hq;
  ftr_t  fq;
  logic  is_ctrl;
  ctrl_e ctype;
  logic  hdr_ok, ftr_ok, pay_ok;

  crc32_d128 u_hcrc (.crc_in(CRC_INIT), .data(hdr_q),   .crc_out(hcrc));
  crc32_d128 u_fcrc (.crc_in(CRC_INIT), .data(ftr_q),   .crc_out(fcrc));
  crc32_d128 u_pcrc (.crc_in(pcrc),     .data(rx_word), .crc_out(pcrc_n));

  assign is_ctrl = rx_valid && !esc && is_k(rx_word);
  assign ctype   = ctrl_e'(rx_word[95:88]);
  assign hq      = hdr_t'(hdr_q);
  assign hdr_ok  = hcrc == rx_word[31:0];
  assign ftr_ok  = fcrc == rx_word[31:0];
  assign pay_ok  = pcrc == rx_word[63:32];

  always_comb begin
    push = 1'b0; push_vc = vc_q; push_flit = '{sop: 1'b0, eop: 1'b0, data: rx_word};
    {ack_h, nak_h, ack_f, nak_f} = '0;
    credit_valid = 1'b0;
    credit_cnt   = {rx_word[31:16], rx_word[15:0]};
    {req_ack_h, req_nak_h, req_ack_f, req_nak_f} = '0;
    ev_perr    = 1'b0;
    ev_unstuff = rx_valid && esc;
    fq = ftr_t'(ftr_q);
    if (is_ctrl) begin
      case (ctype)
        C_ACKH:   ack_h = 1'b1;
        C_NAKH:   nak_h = 1'b1;
        C_ACKF:   ack_f = 1'b1;
        C_NAKF:   nak_f = 1'b1;
        C_CREDIT: credit_valid = 1'b1;
        C_HCRC: if (st == R_GOT_H) begin
          if (hdr_ok) begin
            push = 1'b1; push_vc = rx_word[32];
            push_flit = '{sop: 1'b1, eop: 1'b0, data: hdr_q};
            req_ack_h = 1'b1;
          end else req_nak_h = 1'b1;
        end
        C_FCRC: if (st == R_GOT_F) begin
          if (ftr_ok) begin
            fq.perr = fq.perr | !pay_ok;
            ev_perr = !pay_ok;
            push = 1'b1;
            push_flit = '{sop: 1'b0, eop: 1'b1, data: word_t'(fq)};
            req_ack_f = 1'b1;
          end else req_nak_f = 1'b1;
        end
        default: ;
      endcase
    end else if (rx_valid && st == R_PAY && remaining != '0) begin
      push = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= R_EXP_H; esc <= 1'b0; hdr_q <= '0; ftr_q <= '0; vc_q <= 1'b0;
      remaining <= '0; pcrc <= CRC_INIT;
    end else if (rx_valid) begin
      if (is_ctrl) begin
        esc <= (ctype == C_ESC);
        if (ctype == C_HCRC && st == R_GOT_H) begin
          if (hdr_ok) begin
            st <= R_PAY; vc_q <= rx_word[32]; remaining <= hq.len; pcrc <= CRC_INIT;
          end else st <= R_EXP_H;
        end
        if (ctype == C_FCRC && st == R_GOT_F)
          st <= ftr_ok ? R_EXP_H : R_PAY;     // bad footer: it will come again
      end else begin
        esc <= 1'b0;
        unique case (st)
          R_EXP_H, R_GOT_H: begin hdr_q <= rx_word; st <= R_GOT_H; end
          R_PAY: if (remaining != '0) begin
                   remaining <= remaining - 1'b1;
                   pcrc <= pcrc_n;
                 end else begin
                   ftr_q <= rx_word; st <= R_GOT_F;
                 end
          R_GOT_F: ftr_q <= rx_word;
          default: ;
        endcase
      end
    end
  end
endmodule
