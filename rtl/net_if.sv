// net_if: the TX/RX FIFOs and logic of the network interface.
//
// Transmit: the host side hands in a request (cmd_t: destination node,
// operation, destination address, length in words) and then streams the
// data words, 128 bits each.  The block cuts the stream into packets of at
// most MAX_PAYLOAD words: a header (destination and source coordinates,
// operation, payload length, destination address advanced by 16 bytes per
// word already sent), the payload words, and a footer.  Packets pass
// through a TX FIFO to the router's local port.
// Receive: packets from the router's local port pass through an RX FIFO.
// The payload of every packet is written to host memory at the address in
// its header (mw_*, one word per cycle under mw_ready), which is the RDMA
// PUT data path; when the footer arrives, ev_valid reports the packet
// (source, op, address, length, payload-error flag) for one cycle.
// Operations other than PUT (GET, SEND) are reported the same way for the
// embedded processor's firmware, which the paper puts in charge of GET and
// of address translation; addresses are used as given.
// From the paper: fragmentation of the host stream into packets, PUT in
// hardware, header/payload/footer packets, TX/RX FIFOs.  The request format,
// the 4 KB packet limit and the memory-write interface are this design's.
module net_if
  import apenet_pkg::*;
#(
  parameter int unsigned MAX_PAYLOAD = 256,
  parameter int unsigned FIFO_DEPTH  = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  xyz_t        my_coord,
  // host request and data
  input  logic        cmd_valid,
  input  cmd_t        cmd,
  output logic        cmd_ready,
  input  logic        hd_valid,
  input  word_t       hd_data,
  output logic        hd_ready,
  output logic        cmd_done,
  // router local port
  output logic        tx_valid,
  output flit_t       tx_flit,
  input  logic        tx_ready,
  input  logic        rx_valid,
  input  flit_t       rx_flit,
  output logic        rx_ready,
  // host memory writes
  output logic        mw_valid,
  output logic [47:0] mw_addr,
  output word_t       mw_data,
  input  logic        mw_ready,
  // received-packet events
  output logic        ev_valid,
  output rx_event_t   ev
);
  localparam int unsigned FW = $bits(flit_t);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  // ---------------- transmit ----------------
  typedef enum logic [1:0] { T_IDLE, T_HDR, T_PAY, T_FTR } tst_e;
  tst_e tst;
  cmd_t c_q;
  logic [23:0] rem;
  logic [15:0] frag, cnt;
  logic tf_full, tf_empty, tf_wr;
  flit_t tf_in, tf_out;
  logic [CW-1:0] tf_cnt;
  hdr_t h;
  ftr_t f;
  logic [15:0] frag_n;

  assign frag_n = (rem > 24'(MAX_PAYLOAD)) ? 16'(MAX_PAYLOAD) : 16'(rem);
  assign cmd_ready = (tst == T_IDLE);
  assign hd_ready  = (tst == T_PAY) && !tf_full;

  always_comb begin
    h = '{addr: c_q.addr, rsvd: '0, op: c_q.op, len: frag_n, src: my_coord, dst: c_q.dst};
    f = '{rsvd: '0, len: frag, rsvd2: '0, perr: 1'b0};
    tf_wr = 1'b0;
    tf_in = '{sop: 1'b0, eop: 1'b0, data: hd_data};
    unique case (tst)
      T_HDR: begin tf_wr = !tf_full; tf_in = '{sop: 1'b1, eop: 1'b0, data: word_t'(h)}; end
      T_PAY: tf_wr = hd_valid && !tf_full;
      T_FTR: begin tf_wr = !tf_full; tf_in = '{sop: 1'b0, eop: 1'b1, data: word_t'(f)}; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tst <= T_IDLE; c_q <= '0; rem <= '0; frag <= '0; cnt <= '0; cmd_done <= 1'b0;
    end else begin
      cmd_done <= 1'b0;
      unique case (tst)
        T_IDLE: if (cmd_valid) begin c_q <= cmd; rem <= cmd.len; tst <= T_HDR; end
        T_HDR: if (tf_wr) begin
          frag <= frag_n; cnt <= frag_n;
          tst  <= (frag_n == '0) ? T_FTR : T_PAY;
        end
        T_PAY: if (tf_wr) begin
          cnt <= cnt - 1'b1;
          if (cnt == 16'd1) tst <= T_FTR;
        end
        T_FTR: if (tf_wr) begin
          rem      <= rem - 24'(frag);
          c_q.addr <= c_q.addr + {28'd0, frag, 4'd0};
          if (rem == 24'(frag)) begin tst <= T_IDLE; cmd_done <= 1'b1; end
          else tst <= T_HDR;
        end
      endcase
    end
  end

  sync_fifo #(.WIDTH(FW), .DEPTH(FIFO_DEPTH)) u_txf (
    .clk, .rst_n, .wr_en(tf_wr), .wr_data(tf_in),
    .rd_en(tx_valid && tx_ready), .rd_data(tf_out),
    .full(tf_full), .empty(tf_empty), .count(tf_cnt)
  );
  assign tx_valid = !tf_empty;
  assign tx_flit  = tf_out;

  // ---------------- receive ----------------
  typedef enum logic [1:0] { R_HDR, R_PAY, R_FTR } rst_e;
  rst_e rs;
  hdr_t rh;
  logic [15:0] off;
  logic rf_full, rf_empty, rf_rd;
  flit_t rf_out;
  logic [CW-1:0] rf_cnt;
  ftr_t rft;
  hdr_t rh_in;
  assign rh_in = hdr_t'(rf_out.data);

  assign rx_ready = !rf_full;
  sync_fifo #(.WIDTH(FW), .DEPTH(FIFO_DEPTH)) u_rxf (
    .clk, .rst_n, .wr_en(rx_valid && !rf_full), .wr_data(rx_flit),
    .rd_en(rf_rd), .rd_data(rf_out),
    .full(rf_full), .empty(rf_empty), .count(rf_cnt)
  );

  assign rft      = ftr_t'(rf_out.data);
  assign mw_valid = (rs == R_PAY) && !rf_empty;
  assign mw_addr  = rh.addr + {28'd0, off, 4'd0};
  assign mw_data  = rf_out.data;
  always_comb begin
    unique case (rs)
      R_HDR:   rf_rd = !rf_empty;
      R_PAY:   rf_rd = !rf_empty && mw_ready;
      default: rf_rd = !rf_empty;
    endcase
  end
  assign ev_valid = (rs == R_FTR) && !rf_empty;
  assign ev = '{src: rh.src, op: rh.op, addr: rh.addr, len: rh.len, perr: rft.perr};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs <= R_HDR; rh <= '0; off <= '0;
    end else if (rf_rd) begin
      unique case (rs)
        R_HDR: begin
          rh  <= hdr_t'(rf_out.data);
          off <= '0;
          rs  <= (rh_in.len == '0) ? R_FTR : R_PAY;
        end
        R_PAY: begin
          off <= off + 1'b1;
          if (off + 1'b1 == rh.len) rs <= R_FTR;
        end
        default: rs <= R_HDR;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (rs == R_HDR && !rf_empty) |-> rf_out.sop);
  assert property (@(posedge clk) disable iff (!rst_n) (rs == R_FTR && !rf_empty) |-> rf_out.eop);
endmodule
