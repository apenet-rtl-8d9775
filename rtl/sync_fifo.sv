// sync_fifo: single-clock first-word-fall-through FIFO.
//
// DEPTH entries of WIDTH bits held in an array (a RAM block on an FPGA).
// rd_data shows the oldest entry whenever empty is low; a read (rd_en)
// removes it at the clock edge.  A write (wr_en) when full and a read when
// empty are errors, caught by assertions.  count is the fill level.  Used for
// the two virtual-channel receive buffers of every torus link and for the
// TX/RX FIFOs of the network interface; the paper names these buffers, the
// FIFO organisation is this design's.
module sync_fifo #(
  parameter int unsigned WIDTH = 130,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     full,
  output logic                     empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign empty   = (count == '0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign rd_data = mem[rp];

  function automatic logic [AW-1:0] nxt(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (wr_en && !full)  wp <= nxt(wp);
      if (rd_en && !empty) rp <= nxt(rp);
      unique case ({wr_en && !full, rd_en && !empty})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));
endmodule
