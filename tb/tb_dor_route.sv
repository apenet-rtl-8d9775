// tb_dor_route: two checks of the route computation.
//  1. Single decisions for random positions and torus sizes against a
//     reference written with ring distances in both directions.
//  2. Whole walks: a packet is moved hop by hop through a random torus
//     following the block's decisions; it must arrive in exactly the
//     minimal number of hops, correct X before Y before Z, and change VC
//     at most once per dimension, exactly when it crosses a wrap link.
//
// Dimension-ordered routing follows the APEnet+ description; the X-Y-Z
// order, the shorter-way rule and the dateline VC rule checked here are this
// design's choices.
module tb_dor_route;
  import apenet_pkg::*;
  xyz_t my_coord, dim_size, dst;
  logic [2:0] in_port, out_port;
  logic in_vc, out_vc;
  int checks = 0, failures = 0;

  dor_route dut (.my_coord, .dim_size, .dst, .in_port, .in_vc, .out_port, .out_vc);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // 1. single decisions
    for (int n = 0; n < 3000; n++) begin
      int d, dp, dm, ep, ev;
      for (int k = 0; k < 3; k++) begin
        dim_size[k] = COORD_W'(1 + $urandom % 9);
        my_coord[k] = COORD_W'($urandom % dim_size[k]);
        dst[k]      = COORD_W'($urandom % dim_size[k]);
      end
      in_port = 3'($urandom % 7);
      in_vc   = 1'($urandom);
      #1;
      d = -1;
      for (int k = 2; k >= 0; k--) if (dst[k] != my_coord[k]) d = k;
      if (d < 0) begin ep = P_LOC; ev = 0; end
      else begin
        dp = (int'(dst[d]) - int'(my_coord[d]) + int'(dim_size[d])) % int'(dim_size[d]);
        dm = int'(dim_size[d]) - dp;
        if (dp <= dm) begin
          ep = 2 * d;
          ev = (in_port == 2 * d + 1) ? in_vc : 0;
          if (my_coord[d] == dim_size[d] - 1) ev = 1;
        end else begin
          ep = 2 * d + 1;
          ev = (in_port == 2 * d) ? in_vc : 0;
          if (my_coord[d] == 0) ev = 1;
        end
      end
      checks++;
      if (out_port != 3'(ep) || out_vc != 1'(ev)) begin
        failures++;
        $display("decision: my=%p dim=%p dst=%p inp=%0d invc=%0d -> %0d/%0d exp %0d/%0d",
                 my_coord, dim_size, dst, in_port, in_vc, out_port, out_vc, ep, ev);
      end
    end
    // 2. walks
    for (int n = 0; n < 500; n++) begin
      xyz_t src;
      int hops, minhops, last_dim, vc_changes[3];
      bit bad;
      for (int k = 0; k < 3; k++) begin
        dim_size[k] = COORD_W'(1 + $urandom % 8);
        src[k] = COORD_W'($urandom % dim_size[k]);
        dst[k] = COORD_W'($urandom % dim_size[k]);
        vc_changes[k] = 0;
      end
      minhops = 0;
      for (int k = 0; k < 3; k++) begin
        int a;
        a = (int'(dst[k]) - int'(src[k]) + int'(dim_size[k])) % int'(dim_size[k]);
        minhops += (a < int'(dim_size[k]) - a) ? a : int'(dim_size[k]) - a;
      end
      my_coord = src; in_port = P_LOC; in_vc = 0; hops = 0; last_dim = 0; bad = 0;
      forever begin
        int dd;
        logic wrap;
        #1;
        if (out_port == P_LOC) break;
        dd = out_port / 2;
        if (dd < last_dim) bad = 1;
        last_dim = dd;
        wrap = (out_port[0] == 0) ? (my_coord[dd] == dim_size[dd] - 1) : (my_coord[dd] == 0);
        if (out_vc != (wrap | (in_port / 2 == dd && in_port != P_LOC ? in_vc : 1'b0))) bad = 1;
        if (out_vc && !(in_port / 2 == dd && in_vc)) vc_changes[dd]++;
        if (out_port[0] == 0) my_coord[dd] = (my_coord[dd] == dim_size[dd] - 1) ? '0 : my_coord[dd] + 1'b1;
        else                  my_coord[dd] = (my_coord[dd] == 0) ? dim_size[dd] - 1'b1 : my_coord[dd] - 1'b1;
        in_port = out_port ^ 3'd1;    // arrives on the opposite link
        in_vc   = out_vc;
        hops++;
        if (hops > 30) begin bad = 1; break; end
      end
      checks++;
      if (bad || hops != minhops || my_coord != dst || vc_changes[0] > 1 || vc_changes[1] > 1 || vc_changes[2] > 1) begin
        failures++;
        $display("walk %0d: src=%p dst=%p dim=%p hops=%0d min=%0d end=%p", n, src, dst, dim_size, hops, minhops, my_coord);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
