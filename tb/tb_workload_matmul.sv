// tb_workload_matmul: read amplification of the evaluated matmul weight loads, per layout.
//
// The top runs at its default parameters. Around it sit an L2 model (a set of present 128 B
// lines), an HBF model (4 KB reads, 300-cycle latency, one new read every 4 cycles) and an
// HBM model (128 B reads, 30 cycles). The prefetcher is off, so every read is a demand
// read. For each case the test sends one K-step of two thread blocks' weight tiles
// through the TMA. It then counts the 4 KB pages (or, for HBM, the 128 B lines) read from
// memory.
//
// The weight shapes are the ones used by the evaluated kernels:
//   * Qwen-3 30B fused_moe: 128 x 256 BF16 compute tile. Expert gate/up weight K = 2048,
//     N = 1536; the expert dimensions come from the public model, not from the design.
//     The tile is loaded as two 64 x 256 boxes (64 BF16 = 128 B, the widest box row).
//     Layouts: column-major, and tile-major with memory tiles (64,32), (128,16), (256,8)
//     and (512,4). The last three are taller than the box row, so they take the bit-swap
//     path.
//   * Llama-3.1 70B FFN: 64 x 128 BF16 compute tile, K = 8192, N = 28672 (public model).
//     Layouts: column-major, tile-major (64,32), and column-major in HBM as the baseline.
//
// Expected amplification, worked out by hand from the layouts:
//
// | workload / layout             | pages (or lines) read | amplification |
// |-------------------------------|-----------------------|---------------|
// | Qwen, column-major            | 2 x 256 pages         | 16x           |
// | Qwen, tile-major (64,32)      | 2 x 16 pages          | 1x            |
// | Qwen, tile-major (128,16)     | 2 x 16 pages          | 1x            |
// | Qwen, tile-major (256,8)      | 2 x 32 pages          | 2x            |
// | Qwen, tile-major (512,4)      | 2 x 64 pages          | 4x            |
// | Llama, column-major           | 2 x 128 pages         | 32x           |
// | Llama, tile-major (64,32)     | 2 x 4 pages           | 1x            |
// | Llama, column-major in HBM    | 2 x 128 lines         | 1x            |
//
// Column-major reads one page per tile column; in tile-major a page covers min(a, 128)
// rows. Amplification = bytes read / bytes requested (x100 in the check). The printed TMA
// issue cycles show the other cost: column-major reads fill the 64 HBF MSHR entries, and the
// TMA stalls until fills free them; tile-major requests merge into few entries.
//
// Every TMA source address is also checked against the layout formula, and the set of
// pages read against the set the requests touch, each read once.
module tb_workload_matmul;
  import tilelens_pkg::*;
  localparam longint WB = 64'h1_0000_0000;    // weights
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
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- environment models ----------------
  bit     l2 [longint];
  longint pend_ins [$];
  int     reads [longint];          // page (HBF) or line (HBM) -> times read
  bit     touched [longint];        // pages/lines the requests touch
  typedef struct { longint due; bit hbf; int id; } fill_t;
  fill_t  fills [$];
  int     hbf_gap_cnt = 0, n_ins = 0, n_hbf_fill = 0, n_hbm_fill = 0;
  longint exp_src [$];
  int     req_mismatch = 0, n_reqs = 0;
  bit     cur_hbf;

  always @(*) l2_lookup_hit = l2_lookup_valid && l2.exists(longint'(l2_lookup_addr) >> 7);

  always @(negedge clk) begin
    foreach (pend_ins[q]) l2[pend_ins[q]] = 1;
    pend_ins.delete();
    hbf_gap_cnt = (hbf_gap_cnt + 1) % HBF_GAP;
    hbf_mem_ready = (hbf_gap_cnt == 0);
    hbm_mem_ready = 1;
    l2_ins_ready  = 1;
    sram_pf_ready = 1;
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
      if (reads.exists(pg)) reads[pg]++; else reads[pg] = 1;
      fills.push_back('{cycle + longint'(HBF_LAT), 1'b1, int'(hbf_mem_id)});
    end
    if (hbm_mem_valid && hbm_mem_ready) begin
      longint ln;
      ln = longint'(hbm_mem_addr) >> 7;
      if (reads.exists(ln)) reads[ln]++; else reads[ln] = 1;
      fills.push_back('{cycle + longint'(HBM_LAT), 1'b0, int'(hbm_mem_id)});
    end
    if (l2_ins_valid && l2_ins_ready) begin
      pend_ins.push_back(longint'(l2_ins_addr) >> 7);
      n_ins++;
    end
    if (tma_req_fire) begin
      longint e;
      n_reqs++;
      e = (exp_src.size() > 0) ? exp_src.pop_front() : -1;
      if (longint'(tma_req_o.src) != e) begin
        if (req_mismatch < 5) $display("TMA request %h, expected %h", tma_req_o.src, e);
        req_mismatch++;
      end
      touched[longint'(tma_req_o.src) >> (cur_hbf ? 12 : 7)] = 1;
    end
  end

  // tile-major byte offset of element (i, j) in a K-row matrix, memory tile 2^la x 2^lb,
  // BF16 elements
  function automatic longint tm_off(longint i, longint j, longint k, int la, int lb);
    return ((((j >> lb) * (k >> la)) + (i >> la)) << (la + lb + 1)) +
           ((((j & ((longint'(1) << lb) - 1)) << la) + (i & ((longint'(1) << la) - 1))) << 1);
  endfunction

  task automatic load(longint base, longint k, bit tm, int la, int lb, int i0, int j0, int v);
    @(negedge clk);
    desc = '0; desc.global_base = addr_t'(base); desc.rank = 2; desc.stride[1] = crd_t'(k);
    desc.elem_log2 = 1; desc.tile_major = tm; desc.log2_a = 5'(la); desc.log2_b = 5'(lb);
    desc.lead_stride = crd_t'(k);
    cmd = '0; cmd.coord[0] = crd_t'(i0); cmd.coord[1] = crd_t'(j0);
    cmd.box[0] = 64; cmd.box[1] = crd_t'(v);
    for (int c = 0; c < v; c++)
      exp_src.push_back(base + (tm ? tm_off(longint'(i0), longint'(j0 + c), k, la, lb)
                                  : ((longint'(j0 + c) * k + longint'(i0)) << 1)));
    cmd_valid = 1;
    #1; while (!cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk); cmd_valid = 0;
    forever begin
      #1; if (tma_done) break;
      @(negedge clk);
    end
    checks++;
    if (tma_err) begin failures++; $display("load rejected"); end
  endtask

  // One case: two thread blocks (column tiles jt, jt+1) at K-step kt.
  task automatic run_case(string name, longint base, longint k, longint n, int tk, int tn,
                          bit tm, int la, int lb, bit in_hbf, int kt, int jt,
                          int exp_reads, int exp_amp_x100);
    int useful, gran, dup, outside, amp;
    // return to a clean state: wait for outstanding fills, reset, clear the models
    while (fills.size() != 0) @(negedge clk);
    repeat (40) @(negedge clk);
    rst_n = 0;
    l2.delete(); reads.delete(); touched.delete(); exp_src.delete();
    req_mismatch = 0; n_reqs = 0; n_ins = 0; n_hbf_fill = 0; n_hbm_fill = 0;
    cur_hbf = in_hbf;
    cfg_hbf_base  = addr_t'(in_hbf ? base : 0);
    cfg_hbf_limit = addr_t'(in_hbf ? base + k * n * 2 : 0);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 2; c++)
      for (int h = 0; h < tk / 64; h++)
        load(base, k, tm, la, lb, kt * tk + h * 64, (jt + c) * tn, tn);
    while (fills.size() != 0) @(negedge clk);
    repeat (40) @(negedge clk);
    gran = in_hbf ? 4096 : 128;
    useful = 2 * tk * tn * 2;
    dup = 0; outside = 0;
    foreach (reads[p]) begin
      if (reads[p] > 1) dup++;
      if (!touched.exists(p)) outside++;
    end
    amp = int'((longint'(reads.num()) * gran * 100) / longint'(useful));
    $display("%-34s reads %4d  requests %4d  amplification %6.2fx  TMA issue cycles %0d",
             name, reads.num(), n_reqs, real'(amp) / 100.0, stat_stall_cycles + n_reqs);
    checks += 5;
    if (req_mismatch != 0 || exp_src.size() != 0) begin
      failures++; $display("  %0d address mismatches, %0d requests missing", req_mismatch, exp_src.size());
    end
    if (reads.num() != exp_reads) begin
      failures++; $display("  %0d reads, expected %0d", reads.num(), exp_reads);
    end
    if (amp != exp_amp_x100) begin
      failures++; $display("  amplification x100 %0d, expected %0d", amp, exp_amp_x100);
    end
    if (dup != 0 || outside != 0 || reads.num() != touched.num()) begin
      failures++; $display("  read twice %0d, read but not requested %0d, touched %0d", dup, outside, touched.num());
    end
    if (n_ins != 32 * n_hbf_fill + n_hbm_fill) begin
      failures++; $display("  %0d insertions for %0d HBF + %0d HBM fills", n_ins, n_hbf_fill, n_hbm_fill);
    end
  endtask

  localparam longint QK = 2048, QN = 1536;             // Qwen-3 30B expert gate/up weight
  localparam longint QBASE = WB + 5 * QK * QN * 2;     // expert 5
  localparam longint LK = 8192, LN = 28672;            // Llama-3.1 70B FFN weight

  initial begin
    cmd_valid = 0; desc = '0; cmd = '0; cta_launch = 0; cta_retire = 0;
    cfg_hbf_base = '0; cfg_hbf_limit = '0;
    cfg_pf_en = 0; cfg_sram_en = 0; cfg_bl = '0; cfg_p_tile = '0; cfg_k_iters = '0;
    cfg_pf_stride = '0;
    //        name                               base   K   N  TK  TN  tm la lb hbf kt  jt  reads amp
    run_case("Qwen fused_moe, column-major",     QBASE, QK, QN, 128, 256, 0, 0, 0, 1, 3, 2, 512, 1600);
    run_case("Qwen fused_moe, tile-major 64x32", QBASE, QK, QN, 128, 256, 1, 6, 5, 1, 3, 2,  32,  100);
    run_case("Qwen fused_moe, tile-major 128x16",QBASE, QK, QN, 128, 256, 1, 7, 4, 1, 3, 2,  32,  100);
    run_case("Qwen fused_moe, tile-major 256x8", QBASE, QK, QN, 128, 256, 1, 8, 3, 1, 3, 2,  64,  200);
    run_case("Qwen fused_moe, tile-major 512x4", QBASE, QK, QN, 128, 256, 1, 9, 2, 1, 3, 2, 128,  400);
    run_case("Llama FFN, column-major",          WB,    LK, LN,  64, 128, 0, 0, 0, 1, 100, 200, 256, 3200);
    run_case("Llama FFN, tile-major 64x32",      WB,    LK, LN,  64, 128, 1, 6, 5, 1, 100, 200,   8,  100);
    run_case("Llama FFN, column-major in HBM",   WB,    LK, LN,  64, 128, 0, 0, 0, 0, 100, 200, 256,  100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
