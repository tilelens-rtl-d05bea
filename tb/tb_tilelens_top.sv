// tb_tilelens_top: end-to-end run of a tiled matmul weight stream through the design,
// at the default parameters.
//
// The weight matrix (K = 1024, N = 256, BF16) lives in HBF in tile-major layout with a
// 64 x 32 memory tile; activations live in HBM in column-major layout. Around the top the
// test models the L2 (a set of present 128 B lines, answering lookups in the same cycle
// and taking insertions), the HBF (300-cycle read latency, one new read every 4 cycles)
// and the HBM (30-cycle latency). Two CTAs walk K in 64-row steps, each loading a 64 x 128
// box per step; the second CTA retires half way, so the prefetch degree must grow; the
// SRAM-buffer tier is enabled near the end. Then come a box narrower than the memory tile
// (bit swap), a column-major HBM load, an unsupported box (error) and a repeated load that
// must hit in the L2.
//
// Checked: every TMA request address against the tile-major formula; every HBF page read
// at most once and every demanded page read; every fill inserted (32 lines per HBF page,
// one per HBM line); the prefetch degree before and after the retirement; and that each
// mechanism happened: tile-major loads, wide-tile bit swap, column-major load, error,
// L2 hits, MSHR merges, stalls, prefetches, SRAM-tier prefetches, degree growth and cap.
module tb_tilelens_top;
  import tilelens_pkg::*;
  localparam int K = 1024, N = 256, LS = 1, LA = 6, LB = 5;
  localparam longint WB = 64'h1000_0000;      // weights (HBF)
  localparam longint AB = 64'h2000_0000;      // activations (HBM)
  localparam int HBF_LAT = 300, HBM_LAT = 30, HBF_GAP = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, tma_done, tma_err, tma_req_fire;
  tma_desc_t desc;
  tma_cmd_t cmd;
  tma_req_t tma_req_o;
  addr_t cfg_hbf_base, cfg_hbf_limit, cfg_pf_stride;
  logic cfg_pf_en, cfg_sram_en, cta_launch, cta_retire;
  logic [31:0] cfg_bl;
  logic [15:0] cfg_p_tile, cfg_k_iters, pf_degree;
  logic l2_lookup_valid, l2_lookup_hit;
  addr_t l2_lookup_addr;
  logic hbm_mem_valid, hbm_mem_ready, hbf_mem_valid, hbf_mem_ready;
  addr_t hbm_mem_addr, hbf_mem_addr;
  logic [5:0] hbm_mem_id, hbf_mem_id, fill_id;
  logic fill_valid, fill_ready, fill_hbf;
  logic l2_ins_valid, l2_ins_ready;
  addr_t l2_ins_addr;
  logic sram_pf_valid, sram_pf_ready;
  addr_t sram_pf_addr;
  logic [31:0] stat_l2_hits, stat_merges, stat_stall_cycles, stat_prefetches;

  tilelens_top dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- environment models ----------------
  bit     l2 [longint];              // present lines
  longint pend_ins [$];
  int     hbf_reads [longint];       // page -> times read
  bit     demanded [longint];        // HBF pages demanded
  typedef struct { longint due; bit hbf; int id; longint addr; } fill_t;
  fill_t  fills [$];
  int     n_hbf_fill = 0, n_hbm_fill = 0, n_ins = 0, n_sram_pf = 0, n_hbm_reads = 0;
  int     hbf_gap_cnt = 0;
  longint exp_src [$];
  int     req_mismatch = 0, n_tma_reqs = 0;

  always @(*) l2_lookup_hit = l2_lookup_valid && l2.exists(longint'(l2_lookup_addr) >> 7);

  always @(negedge clk) begin
    // apply the insertions of the previous cycle
    foreach (pend_ins[q]) l2[pend_ins[q]] = 1;
    pend_ins.delete();
    hbf_gap_cnt = (hbf_gap_cnt + 1) % HBF_GAP;
    hbf_mem_ready = (hbf_gap_cnt == 0);
    hbm_mem_ready = 1;
    l2_ins_ready  = 1;
    sram_pf_ready = 1;
    // present the oldest due fill
    fill_valid = 0;
    foreach (fills[f]) if (fills[f].due <= cycle) begin
      fill_valid = 1; fill_hbf = fills[f].hbf; fill_id = 6'(fills[f].id);
      break;
    end
    #1;
    if (fill_valid && fill_ready) begin
      foreach (fills[f]) if (fills[f].due <= cycle) begin
        if (fills[f].hbf) n_hbf_fill++; else n_hbm_fill++;
        fills.delete(f);
        break;
      end
    end
    if (hbf_mem_valid && hbf_mem_ready) begin
      longint pg;
      pg = longint'(hbf_mem_addr) >> 12;
      if (hbf_reads.exists(pg)) hbf_reads[pg]++; else hbf_reads[pg] = 1;
      fills.push_back('{cycle + HBF_LAT, 1'b1, int'(hbf_mem_id), longint'(hbf_mem_addr)});
    end
    if (hbm_mem_valid && hbm_mem_ready) begin
      n_hbm_reads++;
      fills.push_back('{cycle + HBM_LAT, 1'b0, int'(hbm_mem_id), longint'(hbm_mem_addr)});
    end
    if (l2_ins_valid && l2_ins_ready) begin
      pend_ins.push_back(longint'(l2_ins_addr) >> 7);
      n_ins++;
    end
    if (sram_pf_valid && sram_pf_ready) n_sram_pf++;
    if (tma_req_fire) begin
      longint e;
      n_tma_reqs++;
      e = (exp_src.size() > 0) ? exp_src.pop_front() : -1;
      if (longint'(tma_req_o.src) != e) begin
        if (req_mismatch < 5) $display("TMA request %h, expected %h", tma_req_o.src, e);
        req_mismatch++;
      end
      if (longint'(tma_req_o.src) >= WB && longint'(tma_req_o.src) < WB + K * N * 2)
        demanded[longint'(tma_req_o.src) >> 12] = 1;
    end
  end

  // ---------------- load driver ----------------
  function automatic longint tm_off(longint i, longint j);
    return ((((j >> LB) * (K >> LA)) + (i >> LA)) << (LA + LB + LS)) +
           ((((j & ((1 << LB) - 1)) << LA) + (i & ((1 << LA) - 1))) << LS);
  endfunction

  int n_tm_loads = 0, n_wide_loads = 0, n_col_loads = 0, n_err = 0;

  task automatic issue(bit expect_err);
    @(negedge clk); cmd_valid = 1;
    #1; while (!cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk); cmd_valid = 0;
    forever begin
      #1; if (tma_done) break;
      @(negedge clk);
    end
    if (tma_err) n_err++;
    checks++;
    if (tma_err != expect_err) begin failures++; $display("load err=%0b expected %0b", tma_err, expect_err); end
  endtask

  // weight load: rows [i0, i0+u), columns [j0, j0+v), tile-major 2-D view
  task automatic weight_load(int i0, int j0, int u, int v);
    desc = '0; desc.global_base = addr_t'(WB); desc.rank = 2; desc.stride[1] = K;
    desc.elem_log2 = LS; desc.tile_major = 1; desc.log2_a = LA; desc.log2_b = LB;
    desc.lead_stride = K;
    cmd = '0; cmd.coord[0] = i0; cmd.coord[1] = j0; cmd.box[0] = u; cmd.box[1] = v;
    cmd.smem_dst = 24'h0;
    for (int c = 0; c < v; c++) exp_src.push_back(WB + tm_off(i0, j0 + c));
    if (u < (1 << LA)) n_wide_loads++; else n_tm_loads++;
    issue(0);
  endtask

  int deg_first, deg_after, deg_grew = 0, deg_capped = 0;
  int d_prev;
  int tb_ctas = 0;
  always @(posedge clk) begin
    if (rst_n && pf_degree > 16'(d_prev) && d_prev != 0) deg_grew++;
    if (rst_n && pf_degree == cfg_k_iters && tb_ctas != 0) deg_capped++;
    d_prev = int'(pf_degree);
  end

  initial begin
    cmd_valid = 0; desc = '0; cmd = '0; cta_launch = 0; cta_retire = 0;
    cfg_hbf_base = addr_t'(WB); cfg_hbf_limit = addr_t'(WB + K * N * 2);
    cfg_pf_en = 1; cfg_sram_en = 0;
    cfg_bl = 40;                           // bus requests in flight over one HBF latency
    cfg_p_tile = 4;                        // 64 x 128 BF16 box = 4 pages
    cfg_k_iters = 16'(K / 64);             // K / TILE_K
    cfg_pf_stride = addr_t'(64 * (1 << LB) * 2);   // one 4 KB memory tile further along K
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); cta_launch = 1; @(negedge clk); @(negedge clk); cta_launch = 0;  // two CTAs
    tb_ctas = 2;
    repeat (50) @(negedge clk);
    deg_first = int'(pf_degree);
    checks++;
    if (deg_first != 10) begin failures++; $display("degree %0d, expected 10", deg_first); end

    for (int k = 0; k < K / 64; k++) begin
      if (k == 12) cfg_sram_en = 1;
      weight_load(k * 64, 0, 64, 128);
      if (k < 8) weight_load(k * 64, 128, 64, 128);
      if (k == 7) begin
        @(negedge clk); cta_retire = 1; @(negedge clk); cta_retire = 0; tb_ctas = 1;
        repeat (50) @(negedge clk);
        deg_after = int'(pf_degree);
        checks++;
        if (deg_after != 16) begin failures++; $display("degree %0d, expected 16 (cap)", deg_after); end
      end
    end
    cfg_sram_en = 0;
    // box narrower than the memory tile: u = 32 < a = 64
    weight_load(32, 64, 32, 64);
    // column-major activation load from HBM: 256 x 64 matrix, 64 x 16 box
    desc = '0; desc.global_base = addr_t'(AB); desc.rank = 2; desc.stride[1] = 256;
    desc.elem_log2 = LS; desc.lead_stride = 256;
    cmd = '0; cmd.coord[0] = 64; cmd.coord[1] = 16; cmd.box[0] = 64; cmd.box[1] = 16;
    for (int c = 0; c < 16; c++) exp_src.push_back(AB + ((longint'(16 + c) * 256 + 64) << LS));
    n_col_loads++;
    issue(0);
    // unsupported: memory tile narrower than the box
    desc.tile_major = 1; desc.log2_a = 5; desc.log2_b = 6; desc.global_base = addr_t'(WB);
    desc.stride[1] = K; desc.lead_stride = K;
    cmd = '0; cmd.box[0] = 64; cmd.box[1] = 64;
    issue(1);
    // wait for everything to drain, then reload a tile that is now in the L2
    repeat (HBF_LAT * 3) @(negedge clk);
    begin
      int hits_before;
      hits_before = int'(stat_l2_hits);
      weight_load(0, 0, 64, 128);
      repeat (10) @(negedge clk);
      checks++;
      if (int'(stat_l2_hits) - hits_before != 128) begin
        failures++; $display("reload hits %0d, expected 128", int'(stat_l2_hits) - hits_before);
      end
    end
    repeat (HBF_LAT * 2) @(negedge clk);

    // ---------------- end-of-run checks ----------------
    checks++;
    if (req_mismatch != 0 || exp_src.size() != 0) begin
      failures++; $display("%0d TMA address mismatches, %0d missing", req_mismatch, exp_src.size());
    end
    begin
      int dup = 0, missing = 0, extra = 0;
      foreach (hbf_reads[p]) begin
        if (hbf_reads[p] > 1) dup++;
        if (!demanded.exists(p)) extra++;
      end
      foreach (demanded[p]) if (!hbf_reads.exists(p)) missing++;
      checks++;
      if (dup != 0 || missing != 0) begin failures++; $display("HBF pages read twice %0d, never read %0d", dup, missing); end
      $display("HBF pages: demanded %0d, read %0d (prefetch-only %0d), HBM lines read %0d",
               demanded.num(), hbf_reads.num(), extra, n_hbm_reads);
    end
    checks++;
    if (fills.size() != 0 || n_ins != 32 * n_hbf_fill + n_hbm_fill) begin
      failures++; $display("fills left %0d, inserts %0d for %0d HBF + %0d HBM fills", fills.size(), n_ins, n_hbf_fill, n_hbm_fill);
    end
    $display("mechanisms: tile-major loads %0d, wide-tile loads %0d, column-major loads %0d, errors %0d",
             n_tm_loads, n_wide_loads, n_col_loads, n_err);
    $display("            L2 hits %0d, MSHR merges %0d, stall cycles %0d, prefetches %0d (SRAM tier %0d)",
             stat_l2_hits, stat_merges, stat_stall_cycles, stat_prefetches, n_sram_pf);
    $display("            degree %0d -> %0d, growth events %0d, capped cycles %0d, HBM fills %0d",
             deg_first, deg_after, deg_grew, deg_capped, n_hbm_fill);
    if (n_tm_loads == 0)        begin failures++; $display("no tile-major load"); end
    if (n_wide_loads == 0)      begin failures++; $display("no wide-tile load"); end
    if (n_col_loads == 0)       begin failures++; $display("no column-major load"); end
    if (n_err == 0)             begin failures++; $display("no error load"); end
    if (stat_l2_hits == 0)      begin failures++; $display("no L2 hit"); end
    if (stat_merges == 0)       begin failures++; $display("no MSHR merge"); end
    if (stat_stall_cycles == 0) begin failures++; $display("no stall"); end
    if (stat_prefetches == 0)   begin failures++; $display("no prefetch"); end
    if (n_sram_pf == 0)         begin failures++; $display("no SRAM-tier prefetch"); end
    if (deg_grew == 0)          begin failures++; $display("degree never grew"); end
    if (deg_capped == 0)        begin failures++; $display("degree never capped"); end
    if (n_hbm_fill == 0)        begin failures++; $display("no HBM fill"); end
    checks += 12;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
