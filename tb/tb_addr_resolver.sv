// Testbench of addr_resolver: the masked node-index bits of a multicast
// address must take the local coordinates, all other bits stay. The expected
// address is rebuilt here from the node index arithmetic.
module tb_addr_resolver;
  import noc_pkg::*;
  logic [AddrW-1:0] addr, res;
  logic [XW-1:0] xm, lx;
  logic [YW-1:0] ym, ly;
  int checks = 0, failures = 0;

  addr_resolver dut (.addr_i(addr), .x_mask_i(xm), .y_mask_i(ym),
                     .local_x_i(lx), .local_y_i(ly), .addr_o(res));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      int unsigned ax, ay, ex, ey, off;
      logic [AddrW-1:0] exp_addr;
      ax = $urandom_range(0, 3); ay = $urandom_range(0, 3);
      off = $urandom & 32'h3_FFFF;
      addr = 32'h1000_0000 + (ax * 4 + ay) * 32'h4_0000 + off;
      xm = XW'($urandom_range(0, 3)); ym = YW'($urandom_range(0, 3));
      lx = XW'(4 + $urandom_range(0, 3)); ly = YW'($urandom_range(0, 3));
      ex = 0; ey = 0;
      for (int b = 0; b < 2; b++) begin
        ex += ((xm >> b) & 1) ? (((lx - 4) >> b) & 1) << b : ((ax >> b) & 1) << b;
        ey += ((ym >> b) & 1) ? ((ly >> b) & 1) << b : ((ay >> b) & 1) << b;
      end
      exp_addr = 32'h1000_0000 + (ex * 4 + ey) * 32'h4_0000 + off;
      #1;
      checks++;
      if (res !== exp_addr) begin
        failures++;
        $display("mismatch addr=%h xm=%0d ym=%0d l=%0d,%0d got %h exp %h",
                 addr, xm, ym, lx, ly, res, exp_addr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
