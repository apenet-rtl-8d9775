// tb_xbar_switch: random connection patterns (each input used by at most one
// output, as the router guarantees) checked against the expected steering
// of valid, flit, VC tag and ready.
//
// The 7x7 fully connected switch follows the APEnet+ description; the
// valid/ready port handshake is this design's.
module tb_xbar_switch;
  import apenet_pkg::*;
  localparam int N = 7;
  logic  [N-1:0]      in_valid, in_ready, out_en, out_vc_tag, out_valid, out_vc, out_ready;
  flit_t [N-1:0]      in_flit, out_flit;
  logic  [N-1:0][2:0] out_sel;
  int checks = 0, failures = 0;

  xbar_switch #(.N(N)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      int perm[N];
      logic [N-1:0] exp_ready;
      for (int i = 0; i < N; i++) perm[i] = i;
      perm.shuffle();
      for (int i = 0; i < N; i++) begin
        in_valid[i] = 1'($urandom);
        in_flit[i]  = '{sop: 1'($urandom), eop: 1'($urandom), data: {$urandom, $urandom, $urandom, $urandom}};
        out_en[i]   = 1'($urandom);
        out_sel[i]  = 3'(perm[i]);
        out_vc_tag[i] = 1'($urandom);
        out_ready[i] = 1'($urandom);
      end
      #1;
      exp_ready = '0;
      for (int j = 0; j < N; j++) begin
        checks++;
        if (out_valid[j] != (out_en[j] && in_valid[perm[j]]) ||
            out_flit[j] != in_flit[perm[j]] || out_vc[j] != out_vc_tag[j]) failures++;
        if (out_en[j] && out_ready[j]) exp_ready[perm[j]] = 1'b1;
      end
      checks++;
      if (in_ready != exp_ready) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
