// tb_workload_latency: latency hiding by the adaptive prefetcher across the HBF latency
// sweep, on the Llama-3.1 70B FFN weight stream.
//
// The top runs at its default parameters and stands for one HBF channel's controller. The
// weight matrix is K = 8192 by N = 28672 BF16 (public model sizes), stored tile-major with
// memory tile (64,32). Each compute tile is 64 x 128, so one K-step of one thread block is
// a single 64 x 128 box: 4 pages, 128 requests.
//
// Two thread blocks walk K side by side. Each block issues its next load only once every
// line of its previous load is in the L2. This is a one-stage pipeline, so an unhidden miss
// costs the block the full HBF latency. Half way, the second block retires and the first
// runs on alone, as a straggler.
//
// Timing is at 2 GHz, unscaled:
//   * one HBF channel carries 4.915 TB/s / 96 channels = 25.6 B per cycle, so the model
//     accepts one 4 KB read every 160 cycles;
//   * the latency L sweeps 2000, 4000, 10000, 20000 and 40000 cycles (1, 2, 5, 10, 20 us).
//
// Prefetcher settings:
//   * BL = L/160 pages;
//   * p_tile = 4;
//   * K/TILE_K = 128;
//   * stride = one 4 KB tile along K.
// The expected degree is min(2*BL/(2*4), 128) with two blocks and min(2*BL/4, 128) after
// the retirement.
//
// Each latency runs twice, without and with prefetching. Checked:
//   * every TMA address against the tile-major formula;
//   * no page read twice;
//   * every demanded page read;
//   * the degree with two blocks and with one.
// Runtime checks:
//   * prefetching is faster;
//   * without it, every K-step waits at least one latency;
//   * with it, at 1-5 us, the bus is kept busy: the run ends within 25% of the time the
//     bus needs for every page read (160 cycles each) plus one latency.
// The stream covers the whole weight column: K/TILE_K = 128 steps. The second block retires
// after 64 of them. The deepest prefetches near the end fall outside the demanded pages,
// into the next column's tiles; the degree cap K/TILE_K does not stop them, and they
// count as bus time.
// At 10 and 20 us a channel needs 125 and 250 pages in flight, more than the 64 HBF MSHR
// entries. Those runs are reported, not bounded.
module tb_workload_latency;
  import tilelens_pkg::*;
  localparam longint WB = 64'h1_0000_0000;
  localparam longint K = 8192, N = 28672;
  localparam int LA = 6, LB = 5, TN = 128, STEPS = 128, JT = 200, HBF_GAP = 160, HBM_LAT = 30;

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
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- environment models ----------------
  bit     l2 [longint];
  longint pend_ins [$];
  int     reads [longint];
  bit     demanded [longint];
  typedef struct { longint due; bit hbf; int id; } fill_t;
  fill_t  fills [$];
  int     hbf_gap_cnt = 0, hbf_lat = 2000;
  longint exp_src [$];
  int     req_mismatch = 0, n_reqs = 0;

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
        fills.delete(f);
        break;
      end
    end
    if (hbf_mem_valid && hbf_mem_ready) begin
      longint pg;
      pg = longint'(hbf_mem_addr) >> 12;
      if (reads.exists(pg)) reads[pg]++; else reads[pg] = 1;
      fills.push_back('{cycle + longint'(hbf_lat), 1'b1, int'(hbf_mem_id)});
    end
    if (hbm_mem_valid && hbm_mem_ready)
      fills.push_back('{cycle + longint'(HBM_LAT), 1'b0, int'(hbm_mem_id)});
    if (l2_ins_valid && l2_ins_ready) pend_ins.push_back(longint'(l2_ins_addr) >> 7);
    if (tma_req_fire) begin
      longint e;
      n_reqs++;
      e = (exp_src.size() > 0) ? exp_src.pop_front() : -1;
      if (longint'(tma_req_o.src) != e) begin
        if (req_mismatch < 5) $display("TMA request %h, expected %h", tma_req_o.src, e);
        req_mismatch++;
      end
      demanded[longint'(tma_req_o.src) >> 12] = 1;
    end
  end

  function automatic longint tm_off(longint i, longint j);
    return ((((j >> LB) * (K >> LA)) + (i >> LA)) << (LA + LB + 1)) +
           ((((j & ((longint'(1) << LB) - 1)) << LA) + (i & ((longint'(1) << LA) - 1))) << 1);
  endfunction

  // lines of the last load of each block, which must be in the L2 before its next load
  longint lines [2][$];

  task automatic wait_data(int c);
    bit all_in;
    forever begin
      all_in = 1;
      foreach (lines[c][q]) if (!l2.exists(lines[c][q])) all_in = 0;
      if (all_in) break;
      @(negedge clk);
    end
  endtask

  task automatic load(int c, int step);
    int i0, j0;
    i0 = step * 64; j0 = (JT + c) * TN;
    @(negedge clk);
    desc = '0; desc.global_base = addr_t'(WB); desc.rank = 2; desc.stride[1] = crd_t'(K);
    desc.elem_log2 = 1; desc.tile_major = 1; desc.log2_a = 5'(LA); desc.log2_b = 5'(LB);
    desc.lead_stride = crd_t'(K);
    cmd = '0; cmd.coord[0] = crd_t'(i0); cmd.coord[1] = crd_t'(j0);
    cmd.box[0] = 64; cmd.box[1] = crd_t'(TN);
    lines[c].delete();
    for (int q = 0; q < TN; q++) begin
      longint a;
      a = WB + tm_off(longint'(i0), longint'(j0) + longint'(q));
      exp_src.push_back(a);
      lines[c].push_back(a >> 7);
    end
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

  task automatic pulse_cta(bit launch);
    @(negedge clk);
    if (launch) cta_launch = 1; else cta_retire = 1;
    @(negedge clk);
    cta_launch = 0; cta_retire = 0;
  endtask

  // Runs the stream once; returns the cycles from the first load to the last data.
  task automatic run(int lat, bit pf, output longint runtime);
    longint t0;
    int dup, missing, d2, d1, exp_d2, exp_d1;
    while (fills.size() != 0) @(negedge clk);
    repeat (40) @(negedge clk);
    rst_n = 0;
    l2.delete(); reads.delete(); demanded.delete(); exp_src.delete();
    lines[0].delete(); lines[1].delete();
    req_mismatch = 0; n_reqs = 0;
    hbf_lat = lat;
    cfg_pf_en = pf;
    cfg_bl = 32'(lat / HBF_GAP);
    repeat (3) @(negedge clk);
    rst_n = 1;
    pulse_cta(1); pulse_cta(1);
    repeat (40) @(negedge clk);            // degree settles (32-step divider)
    d2 = int'(pf_degree);
    t0 = cycle;
    d1 = 0;
    for (int s = 0; s < STEPS; s++) begin
      if (s == STEPS / 2) begin
        pulse_cta(0);
        repeat (40) @(negedge clk);
        d1 = int'(pf_degree);
      end
      for (int c = 0; c < 2; c++) if (c == 0 || s < STEPS / 2) begin
        wait_data(c);
        load(c, s);
      end
    end
    wait_data(0);
    runtime = cycle - t0;
    exp_d2 = (2 * (lat / HBF_GAP)) / 8;  if (exp_d2 > 128) exp_d2 = 128;
    exp_d1 = (2 * (lat / HBF_GAP)) / 4;  if (exp_d1 > 128) exp_d1 = 128;
    dup = 0; missing = 0;
    foreach (reads[p]) if (reads[p] > 1) dup++;
    foreach (demanded[p]) if (!reads.exists(p)) missing++;
    checks += 4;
    if (req_mismatch != 0 || exp_src.size() != 0) begin
      failures++; $display("  %0d address mismatches, %0d requests missing", req_mismatch, exp_src.size());
    end
    if (dup != 0 || missing != 0) begin
      failures++; $display("  pages read twice %0d, demanded but never read %0d", dup, missing);
    end
    if (d2 != exp_d2) begin failures++; $display("  degree with 2 blocks %0d, expected %0d", d2, exp_d2); end
    if (d1 != exp_d1) begin failures++; $display("  degree with 1 block %0d, expected %0d", d1, exp_d1); end
    $display("L=%5d prefetch=%0d degree %3d -> %3d  pages demanded %4d read %4d  prefetches %5d  cycles %0d",
             lat, pf, d2, d1, demanded.num(), reads.num(), stat_prefetches, runtime);
  endtask

  int lats [5] = '{2000, 4000, 10000, 20000, 40000};

  initial begin
    longint t_off, t_on, bus, n_pages;
    cmd_valid = 0; desc = '0; cmd = '0; cta_launch = 0; cta_retire = 0;
    cfg_hbf_base = addr_t'(WB); cfg_hbf_limit = addr_t'(WB + K * N * 2);
    cfg_pf_en = 0; cfg_sram_en = 0; cfg_bl = '0;
    cfg_p_tile = 16'd4;
    cfg_k_iters = 16'(K / 64);
    cfg_pf_stride = addr_t'(4096);
    foreach (lats[x]) begin
      run(lats[x], 0, t_off);
      run(lats[x], 1, t_on);
      n_pages = longint'(reads.num());
      bus = n_pages * HBF_GAP + longint'(lats[x]);
      checks += 2;
      if (t_on >= t_off) begin failures++; $display("  prefetching not faster at L=%0d", lats[x]); end
      if (t_off < longint'(STEPS) * longint'(lats[x])) begin
        failures++; $display("  without prefetching %0d cycles, below %0d steps x L", t_off, STEPS);
      end
      if (lats[x] <= 10000) begin
        checks++;
        if (t_on * 4 > bus * 5) begin
          failures++; $display("  with prefetching %0d cycles, bus-bound time + L is %0d", t_on, bus);
        end
      end
      $display("       speed-up %6.2fx, bus time of the pages read + L: %0d cycles", real'(t_off) / real'(t_on), bus);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
