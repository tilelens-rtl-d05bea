// tb_counter_reconfig: checks the counter programme built for each layout.
// Directed cases, with expected strides and extents written out by hand from the rule
//   stride K, box v  ->  (stride a', extent b) then (stride b*K, extent v/b), a' = min(a,u):
//   * column-major 3-D view: strides/extents passed through unchanged;
//   * tile-major 2-D, a = u = 128, b = 32, K = 384, v = 64: (128,32)(12288,2);
//   * tile-major 3-D (1,384,128): (128,32)(12288,2) then the 128-stride dim scaled by b;
//   * tile-major a = 128 > u = 32: inner stride becomes 32;
//   * error cases: a < u, v not a multiple of b, no stride-K dimension.
// Then 2000 random descriptors (rank 2..5, both layouts, dimensions with strides below,
// equal to and above K in random order, random a, b, u and box sizes, some of them not
// covered) are compared against a reference. The reference builds the expected counter
// list one dimension at a time and derives the error flag from the coverage rules.
module tb_counter_reconfig;
  import tilelens_pkg::*;
  tma_desc_t desc;
  tma_cmd_t cmd;
  cnt_prog_t prog;
  logic err;
  int checks = 0, failures = 0;

  counter_reconfig dut (.desc, .cmd, .prog, .err);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_prog(string name, int n, int s0, int e0, int s1, int e1, int s2, int e2);
    #1; checks++;
    if (err || prog.n != 3'(n) ||
        (n > 0 && (prog.stride[0] != crd_t'(s0) || prog.extent[0] != crd_t'(e0))) ||
        (n > 1 && (prog.stride[1] != crd_t'(s1) || prog.extent[1] != crd_t'(e1))) ||
        (n > 2 && (prog.stride[2] != crd_t'(s2) || prog.extent[2] != crd_t'(e2)))) begin
      failures++;
      $display("%s: err=%0b n=%0d (%0d,%0d)(%0d,%0d)(%0d,%0d)", name, err, prog.n,
               prog.stride[0], prog.extent[0], prog.stride[1], prog.extent[1],
               prog.stride[2], prog.extent[2]);
    end
  endtask

  task automatic expect_err(string name);
    #1; checks++;
    if (!err) begin failures++; $display("%s: no err", name); end
  endtask

  initial begin
    desc = '0; cmd = '0;
    desc.lead_stride = 384; desc.log2_a = 7; desc.log2_b = 5;
    // column-major 3-D view
    desc.rank = 3; desc.stride[1] = 384; desc.stride[2] = 128;
    cmd.box[0] = 128; cmd.box[1] = 64; cmd.box[2] = 2;
    expect_prog("colmajor 3D", 2, 384, 64, 128, 2, 0, 0);
    // tile-major 2-D
    desc.tile_major = 1; desc.rank = 2;
    cmd.box[2] = 0;
    expect_prog("tm 2D", 2, 128, 32, 12288, 2, 0, 0);
    // tile-major 3-D
    desc.rank = 3; cmd.box[2] = 2;
    expect_prog("tm 3D", 3, 128, 32, 12288, 2, 128 * 32, 2);
    // wide memory tile: u = 32
    desc.rank = 2; cmd.box[0] = 32; cmd.box[1] = 96;
    expect_prog("tm a>u", 2, 32, 32, 12288, 3, 0, 0);
    // BF16 64x32 memory tile, K = 1024, v = 128
    desc.lead_stride = 1024; desc.stride[1] = 1024; desc.log2_a = 6; desc.log2_b = 5;
    desc.elem_log2 = 1; cmd.box[0] = 64; cmd.box[1] = 128;
    expect_prog("tm bf16", 2, 64, 32, 32768, 4, 0, 0);
    // errors
    desc.log2_a = 5; desc.log2_b = 6; cmd.box[0] = 64; cmd.box[1] = 128;
    expect_err("a<u");
    desc.log2_a = 6; desc.log2_b = 5; cmd.box[1] = 48;
    expect_err("v%b");
    cmd.box[1] = 64; desc.stride[1] = 2048;
    expect_err("no K dim");
    cmd.box[1] = 64; desc.stride[1] = 1024; cmd.box[0] = 48;
    expect_err("u not pow2");
    // random descriptors against the reference
    for (int t = 0; t < 2000; t++) begin
      int unsigned kk, la, lb, lu, rank, v;
      int unsigned es [$], ee [$];
      bit tm, found, xerr, bad;
      es.delete(); ee.delete();
      desc = '0; cmd = '0;
      tm = 1'($urandom_range(0, 3) != 0);
      rank = $urandom_range(2, 5);
      la = $urandom_range(3, 9); lb = $urandom_range(1, 7); lu = $urandom_range(3, 8);
      kk = (1 << la) * $urandom_range(1, 64);
      desc.rank = 3'(rank); desc.tile_major = tm; desc.lead_stride = kk;
      desc.log2_a = 5'(la); desc.log2_b = 5'(lb);
      cmd.box[0] = ($urandom_range(0, 19) == 0) ? $urandom_range(3, 200) : (1 << lu);
      found = 0;
      for (int d = 1; d < int'(rank); d++) begin
        int unsigned st;
        case ($urandom_range(0, 2))
          0: st = $urandom_range(1, kk - 1);
          1: st = found ? kk * $urandom_range(2, 8) : kk;
          default: st = kk * $urandom_range(2, 8);
        endcase
        if (st == kk) found = 1;
        desc.stride[d] = st;
        v = ($urandom_range(0, 9) == 0) ? $urandom_range(1, 300) : (1 << lb) * $urandom_range(1, 8);
        cmd.box[d] = v;
      end
      // reference programme
      xerr = 0; found = 0;
      for (int d = 1; d < int'(rank); d++) begin
        int unsigned st, bx;
        st = desc.stride[d]; bx = cmd.box[d];
        if (!tm) begin es.push_back(st); ee.push_back(bx); end
        else if (st == kk && !found) begin
          int unsigned ae;
          found = 1;
          ae = (cmd.box[0] < (1 << la)) ? cmd.box[0] : (1 << la);
          es.push_back(ae);           ee.push_back(1 << lb);
          es.push_back(kk * (1 << lb)); ee.push_back(bx / (1 << lb));
          if (bx % (1 << lb) != 0) xerr = 1;
        end else if (st < kk) begin es.push_back(st * (1 << lb)); ee.push_back(bx); end
        else begin es.push_back(st); ee.push_back(bx); end
      end
      if (tm) begin
        if (!found) xerr = 1;
        if ((cmd.box[0] & (cmd.box[0] - 1)) != 0) xerr = 1;
        if (cmd.box[0] > (1 << la)) xerr = 1;
      end
      #1; checks++;
      bad = (err != xerr);
      if (!xerr) begin
        if (int'(prog.n) != es.size()) bad = 1;
        else foreach (es[q]) if (prog.stride[q] != es[q] || prog.extent[q] != ee[q]) bad = 1;
      end
      if (bad) begin
        failures++;
        if (failures < 6) $display("random %0d: tm=%0b rank=%0d err=%0b expected %0b n=%0d expected %0d",
                                   t, tm, rank, err, xerr, prog.n, es.size());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
