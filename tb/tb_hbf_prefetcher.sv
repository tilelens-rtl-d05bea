// tb_hbf_prefetcher: checks the adaptive degree and the prefetch stream.
// Expected degree: min(floor(2*BL / (active_ctas*p_tile)), K/TILE_K), computed in the
// test. Case from the evaluated system: BL = 6000 requests (4.915 TB/s x 5 us / 4 KB),
// 132 CTAs, 16 requests per tile -> d = 5. Then CTAs retire and the degree must grow
// (within DIV_W + 4 cycles), reach the K/TILE_K cap, and equal the cap with no CTA.
// Prefetch stream: addresses trig + k*stride, k = 1..d, one per cycle; with the SRAM
// option 2d prefetches with k > d tagged for the SRAM buffer; none when disabled.
// Random configurations check the degree against the formula.
module tb_hbf_prefetcher;
  import tilelens_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_en, cfg_sram_en, cta_launch, cta_retire, trig_valid, trig_ready;
  logic pf_valid, pf_ready, pf_sram;
  logic [31:0] cfg_bl;
  logic [15:0] cfg_p_tile, cfg_k_iters, degree;
  logic [11:0] active_ctas;
  addr_t cfg_stride, trig_addr, pf_addr;
  int checks = 0, failures = 0;

  hbf_prefetcher dut (.clk, .rst_n, .cfg_en, .cfg_sram_en, .cfg_bl, .cfg_p_tile,
    .cfg_k_iters, .cfg_stride, .cta_launch, .cta_retire, .trig_valid, .trig_ready,
    .trig_addr, .pf_valid, .pf_ready, .pf_addr, .pf_sram, .degree, .active_ctas);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic set_ctas(int n);
    while (int'(active_ctas) < n) begin
      @(negedge clk); cta_launch = 1; @(negedge clk); cta_launch = 0;
    end
    while (int'(active_ctas) > n) begin
      @(negedge clk); cta_retire = 1; @(negedge clk); cta_retire = 0;
    end
  endtask

  task automatic check_degree(string name);
    longint pw, e;
    int wait_c = 0;
    pw = longint'(active_ctas) * longint'(cfg_p_tile);
    e = (pw == 0) ? longint'(cfg_k_iters) : (2 * longint'(cfg_bl)) / pw;
    if (e > longint'(cfg_k_iters)) e = longint'(cfg_k_iters);
    repeat (40) @(negedge clk);
    checks++;
    if (longint'(degree) != e) begin
      failures++; $display("%s: degree %0d expected %0d (ctas %0d)", name, degree, e, active_ctas);
    end
  endtask

  task automatic check_stream(string name, int d, bit sram);
    int n = 0, total;
    bit ok = 1;
    total = sram ? 2 * d : d;
    @(negedge clk); trig_valid = 1; trig_addr = 48'h5000_0000;
    #1;
    if (!trig_ready) ok = 0;
    @(negedge clk); trig_valid = 0;
    for (int c = 0; c < total + 3; c++) begin
      if (pf_valid) begin
        n++;
        if (pf_addr != trig_addr + addr_t'(n) * cfg_stride || pf_sram != (sram && n > d)) ok = 0;
      end
      @(negedge clk);
    end
    checks++;
    if (!ok || n != total) begin failures++; $display("%s: %0d prefetches, expected %0d", name, n, total); end
  endtask

  initial begin
    cfg_en = 1; cfg_sram_en = 0; cta_launch = 0; cta_retire = 0; trig_valid = 0;
    pf_ready = 1; trig_addr = '0;
    cfg_bl = 6000; cfg_p_tile = 16; cfg_k_iters = 64; cfg_stride = 48'h2_0000;
    repeat (2) @(posedge clk); rst_n = 1;
    check_degree("no CTA -> cap");
    set_ctas(132);
    check_degree("132 CTAs");
    checks++; if (degree != 5) begin failures++; $display("d=%0d, expected 5", degree); end
    check_stream("stream d=5", 5, 0);
    cfg_sram_en = 1;
    check_stream("two-tier d=5", 5, 1);
    cfg_sram_en = 0;
    // CTAs retire: degree grows
    set_ctas(66);
    check_degree("66 CTAs");
    checks++; if (degree != 11) begin failures++; $display("d=%0d, expected 11", degree); end
    set_ctas(3);
    check_degree("3 CTAs capped");
    checks++; if (degree != 64) begin failures++; $display("d=%0d, expected cap 64", degree); end
    set_ctas(0);
    check_degree("0 CTAs");
    // disabled
    cfg_en = 0; set_ctas(132); check_degree("disabled");
    begin
      int n = 0;
      @(negedge clk); trig_valid = 1; @(negedge clk); trig_valid = 0;
      repeat (10) begin if (pf_valid) n++; @(negedge clk); end
      checks++; if (n != 0) begin failures++; $display("disabled issued %0d", n); end
    end
    cfg_en = 1;
    for (int t = 0; t < 40; t++) begin
      cfg_bl = $urandom_range(1, 100000);
      cfg_p_tile = 16'($urandom_range(1, 128));
      cfg_k_iters = 16'($urandom_range(1, 2000));
      set_ctas($urandom_range(0, 150));
      check_degree($sformatf("rand%0d", t));
    end
    // stream with back-pressure
    cfg_bl = 6000; cfg_p_tile = 16; cfg_k_iters = 64; set_ctas(132);
    check_degree("again 132");
    begin
      int n = 0; bit ok = 1;
      @(negedge clk); trig_valid = 1; trig_addr = 48'h7000_0000; @(negedge clk); trig_valid = 0;
      for (int c = 0; c < 60; c++) begin
        pf_ready = $urandom_range(1);
        #1;
        if (pf_valid && pf_ready) begin
          n++; if (pf_addr != trig_addr + addr_t'(n) * cfg_stride) ok = 0;
        end
        @(negedge clk);
      end
      pf_ready = 1;
      checks++; if (!ok || n != 5) begin failures++; $display("bp stream n=%0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
