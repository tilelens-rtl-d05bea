// tb_l2_block_fill: checks 4 KB block insertion.
// An HBF return at any address inside a page must insert the 32 lines of that page, in
// order, one per cycle with ins_ready high (32 cycles); an HBM return inserts exactly its
// own 128 B line. Random back-pressure and random addresses follow.
module tb_l2_block_fill;
  import tilelens_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, in_hbf, ins_valid, ins_ready, ins_first, ins_last;
  addr_t in_addr, ins_addr, blk_base;
  logic blk_busy, blk_hbf;
  int checks = 0, failures = 0;

  l2_block_fill dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic block(addr_t a, bit hbf, int bp);
    int n = 0, cyc = 0, total;
    bit ok = 1;
    addr_t base;
    total = hbf ? 32 : 1;
    base  = hbf ? {a[47:12], 12'h0} : {a[47:7], 7'h0};
    @(negedge clk);
    in_valid = 1; in_addr = a; in_hbf = hbf;
    #1; if (!in_ready) ok = 0;
    @(negedge clk); in_valid = 0;
    while (n < total && cyc < 1000) begin
      ins_ready = ($urandom_range(99) >= bp);
      #1;
      if (ins_valid && ins_ready) begin
        if (ins_addr != base + addr_t'(n) * 128 || ins_first != (n == 0) || ins_last != (n == total - 1)) ok = 0;
        if (!blk_busy || blk_base != base || blk_hbf != hbf) ok = 0;
        n++;
      end
      cyc++;
      @(negedge clk);
    end
    ins_ready = 1; #1;
    checks++;
    if (!ok || n != total || ins_valid || blk_busy) begin failures++; $display("block %h hbf=%0b: %0d lines", a, hbf, n); end
    if (bp == 0) begin
      checks++;
      if (cyc != total) begin failures++; $display("block %h: %0d cycles", a, cyc); end
    end
  endtask

  initial begin
    in_valid = 0; in_addr = '0; in_hbf = 0; ins_ready = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    block(48'h1234_5678, 1, 0);
    block(48'h1234_5678, 0, 0);
    for (int t = 0; t < 50; t++) block(addr_t'({$urandom, $urandom}), $urandom_range(1), 30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
