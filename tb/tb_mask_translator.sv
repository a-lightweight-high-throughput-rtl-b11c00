// Testbench of mask_translator: random cluster-region and memory-region
// addresses and masks; expected coordinates and masks are computed here from
// the address map (256 KiB per cluster, Y-major node index, compute block at
// x = 4..7; 1 MiB per memory tile at x = 0).
module tb_mask_translator;
  import noc_pkg::*;
  logic [AddrW-1:0] addr, mask;
  logic [XW-1:0] dx, xm;
  logic [YW-1:0] dy, ym;
  int checks = 0, failures = 0;

  mask_translator dut (.addr_i(addr), .mask_i(mask), .dst_x_o(dx), .dst_y_o(dy),
                       .x_mask_o(xm), .y_mask_o(ym));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 400; i++) begin
      int unsigned node, ex, ey, exm, eym;
      node = $urandom_range(0, 15);
      if (i % 4 != 3) begin
        addr = 32'h1000_0000 + node * 32'h4_0000 + ($urandom & 32'h3_FFFF);
        mask = ($urandom & 32'h3F_0000);
        ex = 4 + node / 4;   // node = x_off * 4 + y
        ey = node % 4;
        exm = (mask / 32'h10_0000) % 4;
        eym = (mask / 32'h4_0000) % 4;
      end else begin
        addr = 32'h8000_0000 + (node % 4) * 32'h10_0000 + ($urandom & 32'hF_FFFF);
        mask = $urandom;
        ex = 0; ey = node % 4; exm = 0; eym = 0;
      end
      #1;
      checks++;
      if (dx != ex || dy != ey || xm != exm || ym != eym) begin
        failures++;
        $display("mismatch addr=%h mask=%h got %0d,%0d m%0d,%0d exp %0d,%0d m%0d,%0d",
                 addr, mask, dx, dy, xm, ym, ex, ey, exm, eym);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
