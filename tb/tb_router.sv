// tb_router: packets injected on all 7 inputs at once, with random
// destinations and random back-pressure on the outputs.  Each output must
// deliver whole packets (no interleaving), on the port the dimension-order
// rule picks, with every word intact and in order per input/output pair.
// Also checks the 1-cycle header latency through an idle router (within the
// 60 ns = 15 cycles at 250 MHz the paper reports) and that contention for an
// output occurred.
module tb_router;
  import apenet_pkg::*;
  logic clk = 0, rst_n = 0;
  xyz_t my_coord, dim_size;
  logic  [NPORT-1:0] in_valid, in_ready, in_grant, in_vc, out_valid, out_vc, out_ready;
  flit_t [NPORT-1:0] in_flit, out_flit;
  int checks = 0, failures = 0;
  int contention = 0;

  router dut (.*);
  always #2 clk = ~clk;

  // expected flits per (input, output) pair
  flit_t expq[NPORT][NPORT][$];
  // stimulus queue per input
  flit_t inq[NPORT][$];
  int sent_words = 0, rcvd_words = 0;

  function automatic int ref_port(xyz_t d);
    for (int k = 0; k < 3; k++) if (d[k] != my_coord[k]) begin
      int dp;
      dp = (int'(d[k]) - int'(my_coord[k]) + int'(dim_size[k])) % int'(dim_size[k]);
      return (2 * dp <= int'(dim_size[k])) ? 2 * k : 2 * k + 1;
    end
    return P_LOC;
  endfunction

  task automatic make_packet(int i, int seq);
    hdr_t h; int len, op; xyz_t d;
    do begin
      for (int k = 0; k < 3; k++) d[k] = COORD_W'($urandom % 4);
      op = ref_port(d);
    end while (op == i);      // a packet never leaves on the link it came in on
    len = $urandom % 6;
    h = '{addr: 48'(seq), rsvd: '0, op: OP_PUT, len: 16'(len), src: '{default: COORD_W'(i)}, dst: d};
    inq[i].push_back('{sop: 1, eop: 0, data: word_t'(h)});
    expq[i][op].push_back('{sop: 1, eop: 0, data: word_t'(h)});
    for (int w = 0; w <= len; w++) begin
      flit_t f;
      f = '{sop: 0, eop: (w == len), data: {32'(i), 32'(seq), 32'(w), $urandom}};
      inq[i].push_back(f);
      expq[i][op].push_back(f);
    end
    sent_words += len + 2;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // drive inputs from the queues
  always_comb
    for (int i = 0; i < NPORT; i++) begin
      in_valid[i] = inq[i].size() != 0;
      in_flit[i]  = in_valid[i] ? inq[i][0] : '0;
      in_vc[i]    = 1'b0;
    end

  // per-output packet owner (input index), found from the header's src field
  int owner[NPORT];
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NPORT; i++)
      if (in_valid[i] && in_ready[i]) void'(inq[i].pop_front());
    for (int j = 0; j < NPORT; j++) begin
      int c;
      c = 0;
      for (int i = 0; i < NPORT; i++) if (dut.areq[j][i]) c++;
      if (c > 1) contention++;
      if (out_valid[j] && out_ready[j]) begin
        flit_t e;
        hdr_t oh;
        oh = hdr_t'(out_flit[j].data);
        if (out_flit[j].sop) owner[j] = int'(oh.src[0]);
        checks++;
        rcvd_words++;
        if (expq[owner[j]][j].size() == 0) begin
          failures++; $display("unexpected flit on output %0d", j);
        end else begin
          e = expq[owner[j]][j].pop_front();
          if (e != out_flit[j]) begin
            failures++;
            $display("output %0d: got %h exp %h", j, out_flit[j], e);
          end
        end
      end
    end
  end

  initial begin
    int lat;
    my_coord = '{COORD_W'(1), COORD_W'(2), COORD_W'(1)};
    dim_size = '{COORD_W'(4), COORD_W'(4), COORD_W'(4)};
    out_ready = '1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // header latency through an idle router
    @(negedge clk);
    make_packet(P_LOC, 0);
    lat = 0;
    while (!(out_valid != 0)) begin @(posedge clk); #1; lat++; end
    checks++;
    if (lat != 1) begin failures++; $display("header latency %0d cycles", lat); end
    repeat (20) @(posedge clk);
    // heavy random traffic
    for (int seq = 1; seq < 200; seq++) begin
      @(negedge clk);
      for (int i = 0; i < NPORT; i++) if (inq[i].size() < 20) make_packet(i, seq);
      out_ready = NPORT'($urandom) | NPORT'($urandom);
    end
    for (int n = 0; n < 5000 && rcvd_words < sent_words; n++) begin
      @(negedge clk);
      out_ready = NPORT'($urandom) | NPORT'($urandom);
    end
    checks++;
    if (rcvd_words != sent_words) begin failures++; $display("words sent %0d received %0d", sent_words, rcvd_words); end
    checks++;
    if (contention == 0) failures++;
    $display("router: %0d words, contention cycles %0d", rcvd_words, contention);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
