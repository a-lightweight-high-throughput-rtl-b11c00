// mask_translator: address decode and address-mask to coordinate-mask
// translation of the network interface ("Mask Transl." in the NI).
//
// The collective-targetable region is a submesh (X0, Y0, W, H) with W and H
// powers of two and X0, Y0 aligned to them. Every node of the region owns an
// equally sized, equally aligned address window of 2^NODE_BITS bytes, and the
// windows are laid out consecutively in Y-major order (node index = x*H + y).
// Under these rules the node index is a bit field of the address: the Y
// offset sits in addr[NODE_BITS +: YLOG] and the X offset just above it. The
// AWUSER mask uses the same layout, so the X and Y masks are plain bit
// selects of the address mask. All of this follows the paper's address-map
// rules; the concrete bases and window sizes below are this design's choice.
//
// Besides the cluster region, the map holds the L2 memory tiles of column 0
// (1 MiB each at MEM_BASE, one per row). Those are never multicast targets,
// so their masks are zero. Purely combinational.
module mask_translator
  import noc_pkg::*;
#(
  parameter int unsigned NODE_BITS = 18,          // 256 KiB window per cluster
  parameter int unsigned XLOG = 2,                // log2(W) of the region
  parameter int unsigned YLOG = 2,                // log2(H) of the region
  parameter logic [XW-1:0] REGION_X = 3'd4,       // bottom-left tile of region
  parameter logic [YW-1:0] REGION_Y = 2'd0,
  parameter logic [3:0] CLUSTER_BASE = 4'h1,      // addr[31:28] of the region
  parameter logic [3:0] MEM_BASE = 4'h8,          // addr[31:28] of L2 tiles
  parameter int unsigned MEM_BITS = 20            // 1 MiB per memory tile
) (
  input  logic [AddrW-1:0] addr_i,
  input  logic [AddrW-1:0] mask_i,
  output logic [XW-1:0]    dst_x_o,
  output logic [YW-1:0]    dst_y_o,
  output logic [XW-1:0]    x_mask_o,
  output logic [YW-1:0]    y_mask_o
);

  always_comb begin
    dst_x_o  = '0;
    dst_y_o  = '0;
    x_mask_o = '0;
    y_mask_o = '0;
    if (addr_i[AddrW-1 -: 4] == CLUSTER_BASE) begin
      dst_x_o  = REGION_X | XW'(addr_i[NODE_BITS+YLOG +: XLOG]);
      dst_y_o  = REGION_Y | YW'(addr_i[NODE_BITS +: YLOG]);
      x_mask_o = XW'(mask_i[NODE_BITS+YLOG +: XLOG]);
      y_mask_o = YW'(mask_i[NODE_BITS +: YLOG]);
    end else if (addr_i[AddrW-1 -: 4] == MEM_BASE) begin
      dst_x_o  = '0;
      dst_y_o  = YW'(addr_i[MEM_BITS +: YW]);
    end
  end

endmodule
