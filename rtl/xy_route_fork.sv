// xy_route_fork: route computation of one router input, extended for
// multicast.
//
// Unicast flits and reductions (whose masks describe sources, not
// destinations) take the single XY route to `dst`. Multicast flits carry a
// (dst, mask) pair naming an aligned block of destination columns and rows;
// they are forked along an XY tree: along X while the flit still moves in X,
// into North/South in every destination column, and into the local port at
// every destination node. A flit is never sent back through the neighbour
// port it came from; a multicast injected locally whose set includes the
// injecting node is also delivered to that node's own local port. The output is the `select` vector for the stream fork; combinational.
module xy_route_fork
  import noc_pkg::*;
#(
  parameter dir_e IN_PORT = DirL          // which port this input is
) (
  input  hdr_t                hdr_i,
  input  logic [XW-1:0]       local_x_i,
  input  logic [YW-1:0]       local_y_i,
  output logic [NumDirs-1:0]  select_o
);

  logic [XW-1:0] dx_min, dx_max;
  logic [YW-1:0] dy_min, dy_max;
  logic col_hit, row_hit, moving_y;

  always_comb begin
    dx_min = hdr_i.dst_x & ~hdr_i.x_mask;
    dx_max = hdr_i.dst_x | hdr_i.x_mask;
    dy_min = hdr_i.dst_y & ~hdr_i.y_mask;
    dy_max = hdr_i.dst_y | hdr_i.y_mask;
    col_hit = ((local_x_i ^ hdr_i.dst_x) & ~hdr_i.x_mask) == '0;
    row_hit = ((local_y_i ^ hdr_i.dst_y) & ~hdr_i.y_mask) == '0;
    moving_y = (IN_PORT == DirN) || (IN_PORT == DirS);
    select_o = '0;
    if (hdr_i.op != OpMulticast) begin
      select_o = xy_unicast(hdr_i.dst_x, hdr_i.dst_y, local_x_i, local_y_i);
    end else begin
      select_o[DirE] = !moving_y && (IN_PORT != DirE) && (dx_max > local_x_i);
      select_o[DirW] = !moving_y && (IN_PORT != DirW) && (dx_min < local_x_i);
      select_o[DirN] = col_hit && (IN_PORT != DirN) && (dy_max > local_y_i);
      select_o[DirS] = col_hit && (IN_PORT != DirS) && (dy_min < local_y_i);
      select_o[DirL] = col_hit && row_hit;
    end
  end

endmodule
