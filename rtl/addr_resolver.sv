// addr_resolver: resolves an incoming multi-address into the local address
// ("Addr. Resolut." in the NI).
//
// A multicast AW reaches every node of its destination set with the same
// (address, mask) pair. The masked bits of the address are don't-cares; this
// block replaces them with the bits of the local node's own coordinates, so
// the request lands in the local address window. The field layout is the
// one of mask_translator (Y offset at NODE_BITS, X offset above it).
// Purely combinational.
module addr_resolver
  import noc_pkg::*;
#(
  parameter int unsigned NODE_BITS = 18,
  parameter int unsigned XLOG = 2,
  parameter int unsigned YLOG = 2
) (
  input  logic [AddrW-1:0] addr_i,
  input  logic [XW-1:0]    x_mask_i,
  input  logic [YW-1:0]    y_mask_i,
  input  logic [XW-1:0]    local_x_i,
  input  logic [YW-1:0]    local_y_i,
  output logic [AddrW-1:0] addr_o
);

  logic [XLOG-1:0] xm, xl;
  logic [YLOG-1:0] ym, yl;

  always_comb begin
    xm = x_mask_i[XLOG-1:0];
    ym = y_mask_i[YLOG-1:0];
    xl = local_x_i[XLOG-1:0];
    yl = local_y_i[YLOG-1:0];
    addr_o = addr_i;
    addr_o[NODE_BITS +: YLOG] = (addr_i[NODE_BITS +: YLOG] & ~ym) | (yl & ym);
    addr_o[NODE_BITS+YLOG +: XLOG] =
        (addr_i[NODE_BITS+YLOG +: XLOG] & ~xm) | (xl & xm);
  end

endmodule
