// Testbench of xy_route_fork: one instance per input port. For random
// (dst, mask) pairs and router positions, the expected select vector is the
// union of the unicast XY next hops towards every destination of the set
// that can be reached through this input (a flit moving in Y stays in its
// column, a flit moving east never serves destinations west of the router
// and vice versa), never back to the neighbour it came from. Unicast and reduction flits
// must follow the single XY route.
module tb_xy_route_fork;
  import noc_pkg::*;
  hdr_t h;
  logic [XW-1:0] lx;
  logic [YW-1:0] ly;
  logic [NumDirs-1:0] sel [NumDirs];
  int checks = 0, failures = 0;

  for (genvar p = 0; p < NumDirs; p++) begin : g_dut
    xy_route_fork #(.IN_PORT(dir_e'(p))) dut (.hdr_i(h), .local_x_i(lx),
                                              .local_y_i(ly), .select_o(sel[p]));
  end

  function automatic int hop(int dx, int dy, int x, int y);
    if (dx > x) return 1;       // E
    if (dx < x) return 3;       // W
    if (dy > y) return 0;       // N
    if (dy < y) return 2;       // S
    return 4;                   // L
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      h = '0;
      h.dst_x = XW'($urandom); h.dst_y = YW'($urandom);
      h.x_mask = XW'($urandom & 3); h.y_mask = YW'($urandom & 3);
      h.op = (i % 5 == 0) ? OpLsbAnd : OpMulticast;
      lx = XW'($urandom); ly = YW'($urandom);
      #1;
      for (int p = 0; p < NumDirs; p++) begin
        logic [NumDirs-1:0] e;
        e = '0;
        for (int x = 0; x < 8; x++) for (int y = 0; y < 4; y++) begin
          bit in_set, reach;
          int nh;
          if (h.op == OpMulticast)
            in_set = ((x ^ h.dst_x) & ~h.x_mask & 7) == 0 &&
                     ((y ^ h.dst_y) & ~h.y_mask & 3) == 0;
          else
            in_set = (x == h.dst_x) && (y == h.dst_y);
          reach = 1;
          if (h.op != OpMulticast) reach = 1; else begin
            if ((p == 0 || p == 2) && x != lx) reach = 0;
          if (p == 1 && x > lx) reach = 0;   // came from east: moving west
          if (p == 3 && x < lx) reach = 0;   // came from west: moving east
          end
          if (in_set && reach) begin
            nh = hop(x, y, lx, ly);
            if (nh != p || p == 4 || h.op != OpMulticast) e[nh] = 1'b1;
          end
        end
        // Reductions are unicast towards dst whatever the input.
        checks++;
        if (sel[p] !== e) begin
          failures++;
          if (failures < 10)
            $display("port %0d dst=%0d,%0d m=%0d,%0d local=%0d,%0d got %b exp %b",
                     p, h.dst_x, h.dst_y, h.x_mask, h.y_mask, lx, ly, sel[p], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
