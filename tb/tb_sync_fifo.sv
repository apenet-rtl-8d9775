// tb_sync_fifo: random writes and reads against a queue model; checks data
// order, empty, full and count every cycle.
//
// The FIFO serves the virtual-channel buffers and interface FIFOs of the
// APEnet+ block diagram; its first-word fall-through behaviour is this
// design's.
module tb_sync_fifo;
  localparam int W = 20, D = 8;
  logic clk = 0, rst_n = 0;
  logic wr_en, rd_en, full, empty;
  logic [W-1:0] wr_data, rd_data;
  logic [$clog2(D+1)-1:0] count;
  logic [W-1:0] q[$];
  int checks = 0, failures = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      int bias;
      bias = (n / 500) % 2 ? 3 : 1;        // phases that fill and phases that drain
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == D) || count != q.size()) begin
        failures++;
        $display("flags: n=%0d size=%0d empty=%b full=%b count=%0d", n, q.size(), empty, full, count);
      end
      if (q.size() != 0) begin
        checks++;
        if (rd_data != q[0]) failures++;
      end
      wr_en   = ($urandom % 4) < bias && !full;
      rd_en   = ($urandom % 4) < 4 - bias && !empty;
      wr_data = W'($urandom);
      @(posedge clk);
      if (rd_en) void'(q.pop_front());
      if (wr_en) q.push_back(wr_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
