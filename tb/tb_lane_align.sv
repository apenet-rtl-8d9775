// tb_lane_align: a transmitter model sends alignment words and then a
// numbered word stream; each lane is delayed by its own random skew.  After
// lock the aligned output must reproduce the stream word for word, with a
// latency of 1 cycle plus the largest skew.  Repeated for many skew sets.
//
// Bonding four lanes per link follows the APEnet+ description; the training
// pattern and the lock timing checked here are this design's.
module tb_lane_align;
  import apenet_pkg::*;
  localparam int MAX_SKEW = 8;
  localparam int TRAIN = 16;
  logic clk = 0, rst_n = 0;
  logic [NLANE-1:0][LANE_W-1:0] lane_in;
  word_t word_out;
  logic locked;
  int checks = 0, failures = 0;

  lane_align #(.MAX_SKEW(MAX_SKEW)) dut (.clk, .rst_n, .lane_in, .word_out, .locked);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t src_word(int t);
    if (t < TRAIN - 1) return ALIGN_WORD;
    if (t == TRAIN - 1) return ALIGN_END;
    return {32'(t) ^ 32'h1111_0000, 32'(t) ^ 32'h2222_0000, 32'(t) ^ 32'h3333_0000, 32'(t) ^ 32'h4444_0000};
  endfunction

  initial begin
    for (int run = 0; run < 60; run++) begin
      int skew[NLANE], maxs, t, lock_t;
      maxs = 0;
      for (int i = 0; i < NLANE; i++) begin
        skew[i] = (run == 0) ? 0 : $urandom % MAX_SKEW;
        if (skew[i] > maxs) maxs = skew[i];
      end
      rst_n = 0;
      @(negedge clk);
      rst_n = 1;
      lock_t = -1;
      for (t = 0; t < 80; t++) begin
        for (int i = 0; i < NLANE; i++) begin
          word_t w;
          w = (t - skew[i] < 0) ? '0 : src_word(t - skew[i]);
          lane_in[i] = w[i*LANE_W +: LANE_W];
        end
        @(posedge clk); #1;
        if (locked && lock_t < 0) lock_t = t;
        // output at this point reflects the words fed at cycle t
        if (locked && t >= TRAIN + maxs + 1) begin
          checks++;
          if (word_out != src_word(t - maxs)) begin
            failures++;
            if (failures < 10) $display("run %0d t=%0d skew=%p got=%h exp=%h", run, t, skew, word_out, src_word(t - maxs));
          end
        end
        @(negedge clk);
      end
      checks++;
      if (lock_t != TRAIN + maxs) begin
        failures++;
        $display("run %0d: locked at %0d, expected %0d", run, lock_t, TRAIN + maxs);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
