// tb_tilelens_tma: self-checking test of the tile-major TMA address engine.
//
// The reference model works on logical matrix positions, not on the engine's counters:
// for every row of the box it forms the column-major element offset from the view's
// coordinates and strides, splits it into (i, j) of the K x N matrix, and maps (i, j)
// to a byte offset with the tile-major formula
//   ((j/b)*(K/a) + i/a) * a*b*s + ((j mod b)*a + i mod a) * s,
// or the column-major one (j*K + i)*s. Cases: the 384x128 FP8 example seen through 2-D,
// 3-D and 4-D views (all three must give the same addresses), a box narrower than the
// memory tile (bit swap), BF16 with a 64x32 memory tile, column-major mode, random boxes
// with random back-pressure, and an unsupported box (a < u) that must raise err.
// Timing checked: first request two cycles after the command, then one per cycle.
module tb_tilelens_tma;
  import tilelens_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, req_valid, req_ready, done, err;
  tma_desc_t desc;
  tma_cmd_t  cmd;
  tma_req_t  req;
  int checks = 0, failures = 0;

  tilelens_tma dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .desc, .cmd,
                    .req_valid, .req_ready, .req, .done, .err);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint tm_off(longint i, longint j, longint K, int la, int lb, int ls);
    longint a = 1 << la, b = 1 << lb;
    return ((((j >> lb) * (K >> la)) + (i >> la)) << (la + lb + ls)) +
           ((((j & (b - 1)) << la) + (i & (a - 1))) << ls);
  endfunction

  longint exp_q[$];

  // Build the expected request list for the current desc/cmd.
  task automatic build_expected(longint K);
    int n [MAX_DIMS];
    int idx [MAX_DIMS];
    int total, rem;
    longint lin, i, j, off;
    exp_q.delete();
    total = 1;
    for (int d = 1; d < MAX_DIMS; d++) begin
      n[d] = (d < int'(desc.rank)) ? int'(cmd.box[d]) : 1;
      total *= n[d];
    end
    for (int t = 0; t < total; t++) begin
      rem = t;
      for (int d = 1; d < MAX_DIMS; d++) begin idx[d] = rem % n[d]; rem /= n[d]; end
      lin = longint'(cmd.coord[0]);
      for (int d = 1; d < int'(desc.rank); d++)
        lin += (longint'(cmd.coord[d]) + idx[d]) * longint'(desc.stride[d]);
      i = lin % K; j = lin / K;
      off = desc.tile_major ? tm_off(i, j, K, desc.log2_a, desc.log2_b, desc.elem_log2)
                            : (lin << desc.elem_log2);
      exp_q.push_back(longint'(desc.global_base) + off);
    end
  endtask

  int bp_pct = 0;
  always @(negedge clk) req_ready <= ($urandom_range(99) >= bp_pct);

  task automatic run_load(string name, longint K, bit expect_err);
    int got = 0, cyc = 0, first_cyc = -1;
    longint e;
    bit ok = 1, saw_err = 0;
    build_expected(K);
    @(negedge clk);
    cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
    forever begin
      @(posedge clk);
      cyc++;
      if (req_valid && req_ready) begin
        if (first_cyc < 0) first_cyc = cyc;
        e = (exp_q.size() > 0) ? exp_q.pop_front() : -1;
        if (longint'(req.src) != e) begin
          if (ok) $display("%s: req %0d src %h expected %h", name, got, req.src, e);
          ok = 0;
        end
        if (int'(req.bytes) != (int'(cmd.box[0]) << desc.elem_log2)) ok = 0;
        if (int'(req.dst) != int'(cmd.smem_dst) + got * (int'(cmd.box[0]) << desc.elem_log2)) ok = 0;
        got++;
      end
      if (done) begin saw_err = err; break; end
      if (cyc > 100000) break;
    end
    checks++;
    if (expect_err) begin
      if (!saw_err || got != 0) begin failures++; $display("%s: expected err", name); end
    end else begin
      if (!ok || saw_err || exp_q.size() != 0) begin
        failures++; $display("%s: FAIL got=%0d left=%0d err=%0b", name, got, exp_q.size(), saw_err);
      end
      if (bp_pct == 0) begin
        checks++;
        // accepted in cycle 0, phase 1 in cycle 1, first request in cycle 2 (counted as 2)
        if (first_cyc != 2 || cyc != got + 2) begin
          failures++; $display("%s: timing first=%0d total=%0d n=%0d", name, first_cyc, cyc, got);
        end
      end
    end
    repeat (2) @(posedge clk);
  endtask

  task automatic set_desc(longint base, int rank, int ls, bit tm, int la, int lb, longint K);
    desc = '0;
    desc.global_base = addr_t'(base);
    desc.rank = 3'(rank);
    desc.elem_log2 = 2'(ls);
    desc.tile_major = tm;
    desc.log2_a = 5'(la);
    desc.log2_b = 5'(lb);
    desc.lead_stride = crd_t'(K);
  endtask

  initial begin
    cmd_valid = 0; desc = '0; cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 384x128 FP8, 128x64 box at (256, 64); memory tile 128x32 ----
    for (int tm = 0; tm < 2; tm++) begin
      // 2-D view
      set_desc(48'h10_0000, 2, 0, tm[0], 7, 5, 384);
      desc.stride[1] = 384;
      cmd = '0; cmd.coord[0] = 256; cmd.coord[1] = 64; cmd.box[0] = 128; cmd.box[1] = 64;
      cmd.smem_dst = 24'h100;
      run_load($sformatf("2D tm=%0d", tm), 384, 0);
      // 3-D view (128,128,3) strides (1, 384, 128)
      set_desc(48'h10_0000, 3, 0, tm[0], 7, 5, 384);
      desc.stride[1] = 384; desc.stride[2] = 128;
      cmd = '0; cmd.coord[0] = 0; cmd.coord[1] = 64; cmd.coord[2] = 2;
      cmd.box[0] = 128; cmd.box[1] = 64; cmd.box[2] = 1;
      run_load($sformatf("3D tm=%0d", tm), 384, 0);
      // 4-D view (128,64,3,2) strides (1, 384, 128, 64*384)
      set_desc(48'h10_0000, 4, 0, tm[0], 7, 5, 384);
      desc.stride[1] = 384; desc.stride[2] = 128; desc.stride[3] = 64 * 384;
      cmd = '0; cmd.coord[2] = 2; cmd.coord[3] = 1;
      cmd.box[0] = 128; cmd.box[1] = 64; cmd.box[2] = 1; cmd.box[3] = 1;
      run_load($sformatf("4D tm=%0d", tm), 384, 0);
    end
    // 3-D view loading two row blocks at once (stride-128 dimension counted)
    set_desc(48'h20_0000, 3, 0, 1, 7, 5, 384);
    desc.stride[1] = 384; desc.stride[2] = 128;
    cmd = '0; cmd.coord[1] = 32; cmd.coord[2] = 1;
    cmd.box[0] = 128; cmd.box[1] = 32; cmd.box[2] = 2;
    run_load("3D two row blocks", 384, 0);

    // ---- wide memory tile: 32x32 FP8 box, 128x32 memory tile ----
    set_desc(48'h30_0000, 2, 0, 1, 7, 5, 384);
    desc.stride[1] = 384;
    cmd = '0; cmd.coord[0] = 96; cmd.coord[1] = 32; cmd.box[0] = 32; cmd.box[1] = 64;
    run_load("case2 32x32 in 128x32", 384, 0);

    // ---- BF16, 64x32 memory tile, 64x128 box ----
    set_desc(48'h40_0000, 2, 1, 1, 6, 5, 1024);
    desc.stride[1] = 1024;
    cmd = '0; cmd.coord[0] = 192; cmd.coord[1] = 96; cmd.box[0] = 64; cmd.box[1] = 128;
    run_load("BF16 64x32", 1024, 0);

    // ---- unsupported: memory tile narrower than the box (a = 32 < u = 64) ----
    set_desc(48'h40_0000, 2, 0, 1, 5, 7, 1024);
    desc.stride[1] = 1024;
    cmd = '0; cmd.box[0] = 64; cmd.box[1] = 128;
    run_load("a<u error", 1024, 1);

    // ---- random 2-D loads with back-pressure ----
    bp_pct = 30;
    for (int t = 0; t < 40; t++) begin
      int ls, la, lb, lu, Kt, Nt, K, v;
      ls = $urandom_range(1);
      la = $urandom_range(4, 8);
      lb = 12 - ls - la;
      lu = $urandom_range(3, la);
      if (((1 << lu) << ls) > 256) lu = 8 - ls;
      if (lu > la) lu = la;
      Kt = $urandom_range(1, 4); Nt = $urandom_range(1, 3);
      K = Kt << la;
      v = (1 << lb) * $urandom_range(1, Nt);
      set_desc(longint'($urandom_range(1, 255)) << 12, 2, ls, $urandom_range(1), la, lb, K);
      desc.stride[1] = crd_t'(K);
      cmd = '0;
      cmd.coord[0] = crd_t'($urandom_range(0, (K >> lu) - 1) << lu);
      cmd.coord[1] = crd_t'($urandom_range(0, Nt - v / (1 << lb)) << lb);
      cmd.box[0] = crd_t'(1 << lu);
      cmd.box[1] = crd_t'(v);
      cmd.smem_dst = 24'($urandom_range(0, 1023) << 4);
      run_load($sformatf("rand%0d la=%0d lu=%0d ls=%0d", t, la, lu, ls), K, 0);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
