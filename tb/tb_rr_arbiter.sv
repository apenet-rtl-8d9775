// tb_rr_arbiter: random requests against a reference round-robin pointer.
// Checks the grant every cycle and that a requester held high is served
// within N grants.
//
// The router's arbiter is named in the APEnet+ description; round robin is
// this design's choice.
module tb_rr_arbiter;
  localparam int N = 7;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req, gnt;
  logic advance;
  int checks = 0, failures = 0;
  int ptr;

  rr_arbiter #(.N(N)) dut (.clk, .rst_n, .req, .advance, .gnt);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] ref_gnt(logic [N-1:0] r, int p);
    for (int k = 0; k < N; k++) if (r[(p + k) % N]) return N'(1) << ((p + k) % N);
    return '0;
  endfunction

  initial begin
    int wait_cnt;
    req = '0; advance = 0; ptr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      req = N'($urandom);
      advance = ($urandom % 4) != 0;
      #1;
      checks++;
      if (gnt !== ref_gnt(req, ptr)) begin
        failures++;
        $display("cycle %0d req=%b ptr=%0d gnt=%b exp=%b", n, req, ptr, gnt, ref_gnt(req, ptr));
      end
      @(posedge clk);
      if (advance && req != 0)
        for (int k = 0; k < N; k++) if (gnt[k]) ptr = (k + 1) % N;
    end
    // fairness: requester 3 held high with all others also high
    wait_cnt = 0;
    @(negedge clk); req = '1; advance = 1;
    while (!gnt[3]) begin @(negedge clk); wait_cnt++; end
    checks++;
    if (wait_cnt > N - 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
