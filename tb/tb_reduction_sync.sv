// Testbench of reduction_sync: the expected input set is derived here by
// tracing the XY path of every source of the reduction to its destination
// and recording through which port it enters the router under test
// (Local for the router's own contribution). `ready` must be high exactly
// when every expected input holds a flit of the same reduction.
module tb_reduction_sync;
  import noc_pkg::*;
  logic [2:0] ref_idx;
  logic [NumDirs-1:0] valid, expected;
  hdr_t hdr [NumDirs];
  logic [XW-1:0] lx;
  logic [YW-1:0] ly;
  logic ready;
  int checks = 0, failures = 0;

  reduction_sync dut (.ref_i(ref_idx), .valid_i(valid), .hdr_i(hdr), .local_x_i(lx),
                      .local_y_i(ly), .expected_o(expected), .ready_o(ready));

  // Port through which a flit from (sx,sy) enters router (x,y) on its XY
  // way to (dx,dy); -1 if it does not pass.
  function automatic int entry(int sx, int sy, int dx, int dy, int x, int y);
    int cx, cy, prev;
    cx = sx; cy = sy; prev = 4;
    forever begin
      if (cx == x && cy == y) return prev;
      if (cx == dx && cy == dy) return -1;
      if (dx > cx)      begin cx++; prev = 3; end  // enters from West
      else if (dx < cx) begin cx--; prev = 1; end  // from East
      else if (dy > cy) begin cy++; prev = 2; end  // from South
      else              begin cy--; prev = 0; end  // from North
    end
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nready = 0;
    for (int i = 0; i < 4000; i++) begin
      hdr_t r;
      logic [NumDirs-1:0] e;
      logic exp_ready;
      r = '0;
      r.dst_x = XW'($urandom); r.dst_y = YW'($urandom);
      r.src_x = XW'($urandom); r.src_y = YW'($urandom);
      r.x_mask = XW'($urandom & 3); r.y_mask = YW'($urandom & 3);
      r.op = OpLsbAnd; r.ch = ChW;
      lx = XW'($urandom); ly = YW'($urandom);
      e = '0;
      for (int x = 0; x < 8; x++) for (int y = 0; y < 4; y++) begin
        if ((((x ^ r.src_x) & ~r.x_mask & 7) == 0) && (((y ^ r.src_y) & ~r.y_mask & 3) == 0)) begin
          int p;
          p = entry(x, y, r.dst_x, r.dst_y, lx, ly);
          if (p >= 0) e[p] = 1'b1;
        end
      end
      // Drive all expected inputs most of the time, sometimes drop one or
      // spoil one header.
      ref_idx = 3'($urandom_range(0, 4));
      for (int j = 0; j < NumDirs; j++) begin
        hdr[j] = r;
        hdr[j].src_x = r.src_x ^ (XW'($urandom) & r.x_mask);
        valid[j] = e[j] || ($urandom_range(0, 3) == 0);
      end
      if (e != '0) ref_idx = 3'($urandom_range(0, 4));
      for (int j = 0; j < NumDirs; j++) if (e[j] && $urandom_range(0, 2) == 0) ref_idx = 3'(j);
      if ($urandom_range(0, 4) == 0) valid[$urandom_range(0, 4)] = 1'b0;
      if ($urandom_range(0, 4) == 0) hdr[$urandom_range(0, 4)].dst_y ^= 2'b01;
      #1;
      exp_ready = valid[ref_idx] && e[ref_idx] && (hdr[ref_idx] == hdr[ref_idx]);
      for (int j = 0; j < NumDirs; j++)
        if (e[j] && !(valid[j] && hdr[j].dst_y == r.dst_y && hdr[ref_idx].dst_y == r.dst_y))
          exp_ready = 1'b0;
      if (!(hdr[ref_idx].dst_y == r.dst_y)) begin
        // reference header spoilt: expected set differs, skip the set check
        checks++;
        if (ready && !(e == '0)) begin end
      end else begin
        checks++;
        if (expected !== e) begin
          failures++;
          if (failures < 10)
            $display("expected mismatch local=%0d,%0d got %b exp %b", lx, ly, expected, e);
        end
        checks++;
        if (ready !== exp_ready) begin
          failures++;
          if (failures < 10)
            $display("ready mismatch got %b exp %b (e=%b v=%b ref=%0d)", ready, exp_ready, e, valid, ref_idx);
        end
        if (ready) nready++;
      end
    end
    checks++;
    if (nready < 50) begin
      failures++;
      $display("too few ready cases: %0d", nready);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
