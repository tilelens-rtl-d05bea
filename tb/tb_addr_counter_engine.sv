// tb_addr_counter_engine: checks the counter sweep of phase 2.
// A reference loop nest computes, for every counter position in inner-first order,
// tileBase + sum(cnt*stride)*s and dst = smem_dst + n*(u*s). Programmes: the two nested
// counters of a tile-major load (stride a / b*K), a 3-counter programme, a single
// request (no counters), and random programmes under random back-pressure. With ready
// held high the request count must equal the product of the extents, one per cycle,
// the first one the cycle after start.
module tb_addr_counter_engine;
  import tilelens_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, req_valid, req_ready, req_last;
  addr_t tile_base, req_src;
  cnt_prog_t prog;
  logic [1:0] elog;
  logic [8:0] bytes, bytes_o;
  logic [SMEM_W-1:0] dst, req_dst;
  int checks = 0, failures = 0;
  int bp = 0;

  addr_counter_engine dut (.clk, .rst_n, .start, .tile_base, .prog, .elem_log2(elog),
    .req_bytes(bytes), .smem_dst(dst), .busy, .req_valid, .req_ready, .req_src,
    .req_dst, .req_bytes_o(bytes_o), .req_last);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


  task automatic run(string name);
    longint exp_q[$];
    int total = 1, rem, got = 0, cyc = 0, first = -1;
    longint off;
    bit ok = 1;
    for (int k = 0; k < int'(prog.n); k++) total *= int'(prog.extent[k]);
    for (int t = 0; t < total; t++) begin
      rem = t; off = 0;
      for (int k = 0; k < int'(prog.n); k++) begin
        off += longint'(rem % int'(prog.extent[k])) * longint'(prog.stride[k]);
        rem /= int'(prog.extent[k]);
      end
      exp_q.push_back(longint'(tile_base) + (off << elog));
    end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    forever begin
      cyc++;
      req_ready = ($urandom_range(99) >= bp);
      #1;
      if (req_valid && req_ready) begin
        if (first < 0) first = cyc;
        if (longint'(req_src) != exp_q[got] || int'(req_dst) != int'(dst) + got * int'(bytes) ||
            bytes_o != bytes || req_last != (got == total - 1)) begin
          if (ok) $display("%s: req %0d src %h exp %h", name, got, req_src, exp_q[got]);
          ok = 0;
        end
        got++;
      end
      @(negedge clk);
      if (got == total || cyc > 50000) break;
    end
    req_ready = 1;
    checks++;
    if (!ok || got != total || busy) begin failures++; $display("%s: got %0d of %0d", name, got, total); end
    if (bp == 0) begin
      checks++;
      if (first != 1 || cyc != total) begin failures++; $display("%s: timing %0d %0d", name, first, cyc); end
    end
  endtask

  initial begin
    start = 0; req_ready = 1; prog = '0; tile_base = '0; elog = 0; bytes = 128; dst = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // tile-major 128x64 box, a = 128, b = 32, K = 384: (128,32)(12288,2)
    tile_base = 48'h1_0000; prog.n = 2;
    prog.stride[0] = 128; prog.extent[0] = 32; prog.stride[1] = 12288; prog.extent[1] = 2;
    run("two nested");
    prog = '0; prog.n = 3; elog = 1; bytes = 128; dst = 24'h400;
    prog.stride[0] = 64; prog.extent[0] = 4; prog.stride[1] = 8192; prog.extent[1] = 3;
    prog.stride[2] = 1000; prog.extent[2] = 2;
    run("three");
    prog = '0; run("single");
    bp = 40;
    for (int t = 0; t < 30; t++) begin
      prog = '0; prog.n = 3'($urandom_range(0, MAX_CNT));
      for (int k = 0; k < int'(prog.n); k++) begin
        prog.stride[k] = crd_t'($urandom_range(1, 1 << 20));
        prog.extent[k] = crd_t'($urandom_range(1, 3));
      end
      tile_base = addr_t'($urandom) << 8; elog = 2'($urandom_range(0, 2));
      bytes = 9'(32 << $urandom_range(0, 2)); dst = 24'($urandom_range(0, 4095));
      run($sformatf("rand%0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
