// tb_tilebase_unit: checks the tile base address in both layouts.
// Reference: from the box origin's column-major element offset the test derives (i, j)
// of the K x N matrix and applies the tile-major formula of the memory layout
//   ((j/b)*(K/a) + i/a)*a*b*s + ((j mod b)*a + i mod a)*s
// (or j*K*s + i*s for column-major). Covers the 2-D/3-D/4-D views of the 384x128 FP8
// example, the tile bases of an 8 x 8 FP8 matrix with a 4 x 2 memory tile (0, 8, 16,
// 24), and random aligned origins in random views.
module tb_tilebase_unit;
  import tilelens_pkg::*;
  tma_desc_t desc;
  tma_cmd_t cmd;
  addr_t tile_base;
  int checks = 0, failures = 0;

  tilebase_unit dut (.desc, .cmd, .tile_base);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint tm_off(longint i, longint j, longint K, int la, int lb, int ls);
    longint a = 1 << la, b = 1 << lb;
    return ((((j >> lb) * (K >> la)) + (i >> la)) << (la + lb + ls)) +
           ((((j & (b - 1)) << la) + (i & (a - 1))) << ls);
  endfunction

  task automatic check(string name, longint K);
    longint lin, e;
    lin = longint'(cmd.coord[0]);
    for (int d = 1; d < int'(desc.rank); d++) lin += longint'(cmd.coord[d]) * longint'(desc.stride[d]);
    e = longint'(desc.global_base) +
        (desc.tile_major ? tm_off(lin % K, lin / K, K, desc.log2_a, desc.log2_b, desc.elem_log2)
                         : (lin << desc.elem_log2));
    #1; checks++;
    if (longint'(tile_base) != e) begin
      failures++; $display("%s: %h expected %h", name, tile_base, e);
    end
  endtask

  initial begin
    for (int tm = 0; tm < 2; tm++) begin
      desc = '0; desc.global_base = 48'h8000; desc.tile_major = tm[0];
      desc.log2_a = 7; desc.log2_b = 5; desc.lead_stride = 384;
      desc.rank = 2; desc.stride[1] = 384;
      cmd = '0; cmd.coord[0] = 256; cmd.coord[1] = 64;
      check("2D", 384);
      desc.rank = 3; desc.stride[2] = 128;
      cmd = '0; cmd.coord[1] = 64; cmd.coord[2] = 2;
      check("3D", 384);
      desc.rank = 4; desc.stride[3] = 64 * 384;
      cmd = '0; cmd.coord[2] = 2; cmd.coord[3] = 1;
      check("4D", 384);
    end
    // the 2-D example in tile-major is tile (T_i, T_j) = (2, 2): (2*3 + 2) * 4 KB
    desc.rank = 2; cmd = '0; cmd.coord[0] = 256; cmd.coord[1] = 64; #1;
    checks++;
    if (tile_base != 48'h8000 + 8 * 4096) begin failures++; $display("example tile"); end
    // 8 x 8 FP8 matrix with a 4 x 2 memory tile: the offsets of the tiles at rows 0/4 and
    // columns 0/2 are 0, 8, 16 and 24 (tile index times a*b*s = 8 bytes)
    desc = '0; desc.tile_major = 1; desc.log2_a = 2; desc.log2_b = 1; desc.lead_stride = 8;
    desc.rank = 2; desc.stride[1] = 8;
    for (int q = 0; q < 4; q++) begin
      int unsigned fig_off [4] = '{0, 8, 16, 24};
      cmd = '0; cmd.coord[0] = crd_t'((q % 2) * 4); cmd.coord[1] = crd_t'((q / 2) * 2); #1;
      checks++;
      if (tile_base != addr_t'(fig_off[q])) begin
        failures++; $display("8x8 example: tile (%0d,%0d) base %0d, expected %0d",
                             cmd.coord[0], cmd.coord[1], tile_base, fig_off[q]);
      end
    end
    for (int t = 0; t < 300; t++) begin
      int la, lb, ls, K, Kt, N, rb;
      ls = $urandom_range(1); la = $urandom_range(3, 9); lb = 12 - la - ls;
      Kt = $urandom_range(2, 8); K = Kt << la; N = $urandom_range(1, 8) << lb;
      desc = '0; desc.global_base = addr_t'($urandom_range(0, 4095)) << 12;
      desc.tile_major = $urandom_range(1); desc.elem_log2 = 2'(ls);
      desc.log2_a = 5'(la); desc.log2_b = 5'(lb); desc.lead_stride = crd_t'(K);
      cmd = '0;
      if ($urandom_range(1)) begin
        // 3-D view: (a, K/a, N) with strides (1, a, K)
        desc.rank = 3; desc.stride[1] = crd_t'(1 << la); desc.stride[2] = crd_t'(K);
        cmd.coord[1] = crd_t'($urandom_range(0, Kt - 1));
        cmd.coord[2] = crd_t'($urandom_range(0, N / (1 << lb) - 1) << lb);
      end else begin
        desc.rank = 2; desc.stride[1] = crd_t'(K);
        cmd.coord[0] = crd_t'($urandom_range(0, Kt - 1) << la);
        cmd.coord[1] = crd_t'($urandom_range(0, N / (1 << lb) - 1) << lb);
      end
      check($sformatf("rand%0d", t), K);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
