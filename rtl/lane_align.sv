// lane_align: automatic alignment of the 4 bonded lanes of a torus link.
//
// Each lane delivers LANE_W bits per cycle from its own transceiver and may
// lag the others by up to MAX_SKEW-1 cycles.  After reset the far transmitter
// sends a training sequence of alignment words (K_MAGIC on every lane) that
// ends with one ALIGN_END word (ALIGN_END_LANE on every lane).  While
// unlocked, each lane waits for its end marker; from then on a
// per-lane delay counter grows by one every cycle until the last lane has
// seen its marker.  At that point the counters hold exactly how much earlier
// each lane arrived, and the block locks: lane i is taken from a history
// shift register delay[i] cycles back, so all lanes line up with the latest
// one.  If the skew spans MAX_SKEW cycles or more the search restarts.  The
// aligned word is registered: 1 cycle of latency, plus the skew of the
// slowest lane.  'locked' rises one cycle after the aligned end marker has
// been output, so the marker itself is never presented as valid.  Aligning on
// the end of training rather than its start lets the receiver come out of
// reset late, as long as it is ready before the end marker arrives.  The paper says only that the automatic alignment of the
// bonded lanes is the authors' own; the marker scheme is this design's.
module lane_align
  import apenet_pkg::*;
#(
  parameter int unsigned MAX_SKEW = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [NLANE-1:0][LANE_W-1:0]  lane_in,
  output word_t                         word_out,
  output logic                          locked
);
  localparam int unsigned DW = $clog2(MAX_SKEW + 1);
  logic [NLANE-1:0]                         seen;
  logic [NLANE-1:0][DW-1:0]                 delay;
  logic [NLANE-1:0][MAX_SKEW-1:0][LANE_W-1:0] hist;
  logic [NLANE-1:0]                         mark;
  logic                                     all_seen, overflow, found;

  always_comb begin
    overflow = 1'b0;
    for (int i = 0; i < NLANE; i++) begin
      mark[i] = (lane_in[i] == ALIGN_END_LANE);
      if (seen[i] && delay[i] == DW'(MAX_SKEW - 1)) overflow = 1'b1;
    end
    all_seen = &(seen | mark);
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < NLANE; i++) begin
      hist[i][0] <= lane_in[i];
      for (int k = 1; k < MAX_SKEW; k++) hist[i][k] <= hist[i][k-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seen     <= '0;
      delay    <= '0;
      found    <= 1'b0;
      locked   <= 1'b0;
      word_out <= '0;
    end else begin
      locked <= found;
      if (!found) begin
        if (overflow) begin
          seen  <= '0;
          delay <= '0;
        end else begin
          for (int i = 0; i < NLANE; i++) begin
            if (seen[i])      delay[i] <= delay[i] + 1'b1;
            else if (mark[i]) seen[i]  <= 1'b1;
          end
          if (all_seen) found <= 1'b1;
        end
      end
      for (int i = 0; i < NLANE; i++)
        word_out[i*LANE_W +: LANE_W] <= (delay[i] == '0) ? lane_in[i]
                                        : hist[i][delay[i] - 1'b1];
    end
  end
endmodule
