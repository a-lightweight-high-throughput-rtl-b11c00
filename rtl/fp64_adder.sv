// fp64_adder: combinational IEEE-754 binary64 adder, the arithmetic of the
// FPU slices in this design.
//
// Normal operands, round to nearest even. Subnormal operands and results
// are flushed to zero, an exponent overflow gives infinity; NaN and
// infinity operands are not treated specially. The operands are aligned
// with three extra bits (guard, round, sticky), added or subtracted by sign,
// normalised by one right shift or a leading-zero left shift, and rounded.
// This is a compact stand-in: the cluster's real FPUs are full-featured
// units that the reduction offload borrows.
module fp64_adder (
  input  logic [63:0] a_i,
  input  logic [63:0] b_i,
  output logic [63:0] sum_o
);

  always_comb begin
    logic        sa, sb, sr;
    logic [10:0] ea, eb;
    logic [52:0] ma, mb;
    logic [11:0] d;
    logic [119:0] wide;
    logic [55:0] xa, xb;
    logic [56:0] s;
    logic        sticky;
    int          e, lz;
    logic [53:0] mr;
    logic        g, r, st, up;

    lz = 0; g = 1'b0; r = 1'b0; st = 1'b0; up = 1'b0; mr = '0;
    sa = a_i[63]; ea = a_i[62:52];
    sb = b_i[63]; eb = b_i[62:52];
    ma = (ea == '0) ? '0 : {1'b1, a_i[51:0]};
    mb = (eb == '0) ? '0 : {1'b1, b_i[51:0]};
    if (ea == '0) ea = '0;
    if (eb == '0) eb = '0;
    // Larger magnitude first.
    if ({eb, mb} > {ea, ma}) begin
      {sa, ea, ma, sb, eb, mb} = {sb, eb, mb, sa, ea, ma};
    end
    d      = {1'b0, ea} - {1'b0, eb};
    if (d > 12'd63) d = 12'd63;
    xa     = {ma, 3'b000};
    wide   = {mb, 3'b000, 64'b0} >> d;
    xb     = wide[119:64];
    sticky = |wide[63:0];
    xb[0]  = xb[0] | sticky;
    if (sa == sb) s = {1'b0, xa} + {1'b0, xb};
    else          s = {1'b0, xa} - {1'b0, xb};
    sr = sa;
    e  = int'(ea);
    sum_o = '0;
    if (ma == '0) begin
      sum_o = '0;
    end else if (s == '0) begin
      sum_o = '0;
    end else begin
      if (s[56]) begin
        s = {1'b0, s[56:2], s[1] | s[0]};
        e = e + 1;
      end else begin
        lz = 0;
        for (int i = 55; i >= 0; i--) begin
          if (s[i]) break;
          lz++;
        end
        s = s << lz;
        e = e - lz;
      end
      // s[55] is the hidden bit, s[54:3] the fraction.
      g  = s[2];
      r  = s[1];
      st = s[0];
      up = g && (r || st || s[3]);
      mr = {1'b0, s[55:3]} + 54'(up);
      if (mr[53]) begin
        mr = mr >> 1;
        e  = e + 1;
      end
      if (e <= 0)         sum_o = {sr, 63'b0};
      else if (e >= 2047) sum_o = {sr, 11'h7ff, 52'b0};
      else                sum_o = {sr, 11'(e), mr[51:0]};
    end
  end

endmodule
