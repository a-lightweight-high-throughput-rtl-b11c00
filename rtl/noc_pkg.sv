// noc_pkg: types and constants shared by the collective-capable NoC.
//
// A flit is a header (hdr_t) plus a payload whose width depends on the
// physical link (req: 64 bit, rsp: B response, wide: 512 bit). Every flit
// carries the full header, so routers treat each flit on its own; the
// `last` bit keeps multi-flit packets together in the wormhole arbiters.
//
// Coordinates: X grows eastward, Y grows northward (North = y+1), which is
// the convention under which the first-column routers of a 2D reduction
// towards the row-0 corner see "east, north and local" inputs. The 5x4
// system places memory tiles at x=0 and compute tiles at x=4..7, so X is
// 3 bits and Y is 2 bits wide.
//
// The coordinate masks follow the multi-address encoding: a mask bit set to
// 1 makes the matching coordinate bit a don't-care. For one-to-many packets
// (multicast) the masks widen `dst`; for many-to-one packets (reductions)
// they widen `src`, and `dst` stays a single node.
package noc_pkg;

  localparam int unsigned XW = 3;            // X coordinate bits (x = 0..7)
  localparam int unsigned YW = 2;            // Y coordinate bits (y = 0..3)
  localparam int unsigned AddrW = 32;        // AXI address width
  localparam int unsigned NarrowW = 64;      // narrow network data width
  localparam int unsigned WideW = 512;       // wide network data width
  localparam int unsigned LenW = 8;          // AXI burst length field
  localparam int unsigned NumDirs = 5;       // router ports N, E, S, W, L

  // Router port indices.
  typedef enum logic [2:0] {
    DirN = 3'd0, DirE = 3'd1, DirS = 3'd2, DirW = 3'd3, DirL = 3'd4
  } dir_e;

  // Collective opcode carried in AWUSER and in every flit header.
  typedef enum logic [2:0] {
    OpUnicast   = 3'd0,
    OpMulticast = 3'd1,
    OpSelectAw  = 3'd2,  // reduction of the AW requests of a reduction
    OpLsbAnd    = 3'd3,  // AND of the data LSBs (barriers)
    OpCollectB  = 3'd4,  // reduction of the B responses of a multicast
    OpFAdd      = 3'd5   // wide reduction: 8 x FP64 add, offloaded (DCA)
  } coll_op_e;

  // AXI channel a flit belongs to.
  typedef enum logic [1:0] {
    ChAw = 2'd0, ChW = 2'd1, ChB = 2'd2
  } axi_ch_e;

  typedef struct packed {
    logic [XW-1:0] dst_x;
    logic [YW-1:0] dst_y;
    logic [XW-1:0] src_x;
    logic [YW-1:0] src_y;
    logic [XW-1:0] x_mask;
    logic [YW-1:0] y_mask;
    coll_op_e      op;
    axi_ch_e       ch;
    logic          last;
  } hdr_t;

  // Payload of an AW flit (low bits of the link data).
  typedef struct packed {
    logic          narrow;
    logic [LenW-1:0] len;
    logic [AddrW-1:0] addr;
  } aw_payload_t;

  localparam int unsigned AwPayloadW = $bits(aw_payload_t);

  // Reductions travel as unicast towards `dst`; their masks name sources.
  function automatic logic is_reduction(coll_op_e op);
    return op inside {OpSelectAw, OpLsbAnd, OpCollectB, OpFAdd};
  endfunction

  // Reductions handled by the lightweight parallel reduction arbiters.
  function automatic logic is_par_reduction(coll_op_e op);
    return op inside {OpSelectAw, OpLsbAnd, OpCollectB};
  endfunction

  // Two flits belong to the same reduction when they share destination,
  // opcode, channel and the source set (src with masked bits cleared).
  function automatic logic same_reduction(hdr_t a, hdr_t b);
    return (a.dst_x == b.dst_x) && (a.dst_y == b.dst_y) &&
           (a.x_mask == b.x_mask) && (a.y_mask == b.y_mask) &&
           ((a.src_x & ~a.x_mask) == (b.src_x & ~b.x_mask)) &&
           ((a.src_y & ~a.y_mask) == (b.src_y & ~b.y_mask)) &&
           (a.op == b.op) && (a.ch == b.ch);
  endfunction

  // Input directions from which the flits of a reduction arrive at the
  // router at (lx, ly). The flits of every source follow XY routing to
  // `dst`, so they run along their own row to the destination column and
  // then along that column. The set of source rows/columns is an aligned
  // block, so "a source exists west of x" is simply min(set) < x.
  function automatic logic [NumDirs-1:0] red_inputs(hdr_t h,
                                                    logic [XW-1:0] lx,
                                                    logic [YW-1:0] ly);
    logic [XW-1:0] sx_min, sx_max;
    logic [YW-1:0] sy_min, sy_max;
    logic in_row, in_col;
    logic [NumDirs-1:0] r;
    sx_min = h.src_x & ~h.x_mask;
    sx_max = h.src_x | h.x_mask;
    sy_min = h.src_y & ~h.y_mask;
    sy_max = h.src_y | h.y_mask;
    in_row = ((ly ^ h.src_y) & ~h.y_mask) == '0;
    in_col = ((lx ^ h.src_x) & ~h.x_mask) == '0;
    r = '0;
    r[DirL] = in_row && in_col;
    if (lx < h.dst_x) begin
      r[DirW] = in_row && (sx_min < lx);
    end else if (lx > h.dst_x) begin
      r[DirE] = in_row && (sx_max > lx);
    end else begin
      r[DirW] = in_row && (sx_min < lx);
      r[DirE] = in_row && (sx_max > lx);
      if (ly <= h.dst_y) r[DirS] = (sy_min < ly);
      if (ly >= h.dst_y) r[DirN] = (sy_max > ly);
    end
    return r;
  endfunction

  // Plain XY route of a single destination: one-hot over the five ports.
  function automatic logic [NumDirs-1:0] xy_unicast(logic [XW-1:0] dx,
                                                    logic [YW-1:0] dy,
                                                    logic [XW-1:0] lx,
                                                    logic [YW-1:0] ly);
    logic [NumDirs-1:0] r;
    r = '0;
    if (dx > lx)      r[DirE] = 1'b1;
    else if (dx < lx) r[DirW] = 1'b1;
    else if (dy > ly) r[DirN] = 1'b1;
    else if (dy < ly) r[DirS] = 1'b1;
    else              r[DirL] = 1'b1;
    return r;
  endfunction

endpackage
