// Testbench of reduction_arbiter: random reductions (LsbAnd, CollectB,
// SelectAW) at random router positions. The participating inputs are found
// here by tracing the XY path of every source; the output must appear only
// when all of them hold a flit, carry the operator's result (AND of the
// LSBs, OR of the response codes, or the reference flit) and release exactly
// the participating inputs. A second, incomplete reduction on another input
// must not block the complete one.
module tb_reduction_arbiter;
  import noc_pkg::*;
  localparam int DW = 64;
  logic [NumDirs-1:0] valid, ready;
  hdr_t hdr [NumDirs];
  logic [DW-1:0] data [NumDirs];
  logic [XW-1:0] lx;
  logic [YW-1:0] ly;
  logic vo, ro;
  hdr_t ho;
  logic [DW-1:0] dout;
  int checks = 0, failures = 0, n_and = 0, n_b = 0, n_aw = 0;

  reduction_arbiter #(.DATA_W(DW)) dut (.valid_i(valid), .ready_o(ready), .hdr_i(hdr),
    .data_i(data), .local_x_i(lx), .local_y_i(ly), .valid_o(vo), .ready_i(ro),
    .hdr_o(ho), .data_o(dout));

  function automatic int entry(int sx, int sy, int dx, int dy, int x, int y);
    int cx, cy, prev;
    cx = sx; cy = sy; prev = 4;
    forever begin
      if (cx == x && cy == y) return prev;
      if (cx == dx && cy == dy) return -1;
      if (dx > cx)      begin cx++; prev = 3; end
      else if (dx < cx) begin cx--; prev = 1; end
      else if (dy > cy) begin cy++; prev = 2; end
      else              begin cy--; prev = 0; end
    end
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      hdr_t r;
      logic [NumDirs-1:0] e;
      logic drop;
      logic exp_and;
      logic [1:0] exp_b;
      int first;
      r = '0;
      r.dst_x = XW'($urandom); r.dst_y = YW'($urandom);
      r.src_x = XW'($urandom); r.src_y = YW'($urandom);
      r.x_mask = XW'($urandom & 3); r.y_mask = YW'($urandom & 3);
      r.op = (i % 3 == 0) ? OpLsbAnd : (i % 3 == 1) ? OpCollectB : OpSelectAw;
      r.ch = (r.op == OpCollectB) ? ChB : (r.op == OpLsbAnd) ? ChW : ChAw;
      r.last = (r.op != OpSelectAw);
      lx = XW'($urandom); ly = YW'($urandom);
      e = '0;
      for (int x = 0; x < 8; x++) for (int y = 0; y < 4; y++)
        if ((((x ^ r.src_x) & ~r.x_mask & 7) == 0) && (((y ^ r.src_y) & ~r.y_mask & 3) == 0)) begin
          int p;
          p = entry(x, y, r.dst_x, r.dst_y, lx, ly);
          if (p >= 0) e[p] = 1'b1;
        end
      if (e == '0) continue;
      drop = ($urandom_range(0, 3) == 0);
      exp_and = 1'b1; exp_b = '0; first = -1;
      for (int j = 0; j < NumDirs; j++) begin
        hdr[j] = r;
        data[j] = {$urandom, $urandom};
        valid[j] = e[j];
        if (!e[j]) begin
          // an unrelated, incomplete reduction on a non-participating input
          hdr[j].dst_x = r.dst_x ^ 3'b100;
          valid[j] = ($urandom_range(0, 1) == 0);
        end else begin
          if (first < 0) first = j;
          exp_and &= data[j][0];
          exp_b |= data[j][1:0];
        end
      end
      if (drop) begin
        valid[first] = 1'b0;
      end
      ro = $urandom_range(0, 1);
      #1;
      checks++;
      if (vo !== !drop) begin
        // the unrelated flits could form a complete reduction by chance:
        // accept if the output header is not ours
        if (!(vo && ho.dst_x != r.dst_x)) begin
          failures++;
          if (failures < 10) $display("valid_o=%b drop=%b e=%b v=%b", vo, drop, e, valid);
        end
      end
      if (!drop && vo && ho.dst_x == r.dst_x) begin
        logic [DW-1:0] ed;
        ed = data[first];
        if (r.op == OpLsbAnd) begin ed[0] = exp_and; n_and++; end
        else if (r.op == OpCollectB) begin ed[1:0] = exp_b; n_b++; end
        else n_aw++;
        checks++;
        if (dout !== ed && r.op != OpSelectAw) begin
          failures++;
          if (failures < 10) $display("op %0d data got %h exp %h", r.op, dout, ed);
        end
        if (r.op == OpSelectAw) begin
          checks++;
          if (dout !== data[first] || ho.op != OpSelectAw) begin
            failures++;
            $display("SelectAW did not forward a participating AW");
          end
        end
        checks++;
        if (ready !== (ro ? e : '0)) begin
          failures++;
          if (failures < 10) $display("ready got %b exp %b", ready, ro ? e : 5'b0);
        end
      end
      #1;
    end
    checks++;
    if (n_and < 50 || n_b < 50 || n_aw < 50) begin
      failures++;
      $display("too few reductions: and=%0d b=%0d aw=%0d", n_and, n_b, n_aw);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
