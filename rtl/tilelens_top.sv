// tilelens_top: tile-major TMA with the memory-side support of an HBM+HBF GPU.
//
// Datapath, in request order:
//   tilelens_tma  -> one request per cycle (u*s bytes) for every row of the TMA box,
//                    tile-major remapped when the descriptor asks for it;
//   arbiter       -> prefetches (L2 tier) go first, then TMA demand requests;
//   L2 lookup     -> the address leaves on l2_lookup_*; the L2 answers hit/miss in the
//                    same cycle; a hit ends the request;
//   routing       -> addresses in [cfg_hbf_base, cfg_hbf_limit) live in HBF (weights are
//                    placed there per tensor at allocation), all others in HBM;
//   mixed_mshr    -> 128 B entries for HBM, 4 KB entries for HBF; reads leave on
//                    hbm_mem_* / hbf_mem_*, fills come back on fill_*;
//   hbf_prefetcher-> triggered by each demand access to a new 4 KB HBF page, hit or
//                    miss; issues d stride prefetches; SRAM-tier ones leave on sram_pf_*;
//   l2_block_fill -> every fill is inserted in the L2 on l2_ins_*: 32 lines for a 4 KB
//                    HBF block, one line for HBM.
// A demand request that would trigger the prefetcher waits while the prefetcher is still
// issuing for the previous trigger, so no trigger is lost.
//
// Parts outside this design connect through ports: the L2 arrays (l2_lookup_*, l2_ins_*),
// the HBM and HBF stacks (*_mem_*, fill_*), the SRAM buffer (sram_pf_*), and the SMs
// (cmd_*, cta_launch/cta_retire, and tma_req_* which shows every request the TMA issues
// with its shared-memory destination). Counters of TMA requests that hit in the L2, MSHR
// merges, stalled TMA cycles and issued prefetches are outputs.
// Follows the paper: the components and where each sits. This design's choice: the
// arbitration order, the address-range routing and the single-cycle L2 lookup port.
module tilelens_top
  import tilelens_pkg::*;
#(
  parameter int unsigned HBM_ENTRIES = 64,
  parameter int unsigned HBF_ENTRIES = 64,
  parameter int unsigned DEG_W       = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // TMA load commands
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  tma_desc_t   desc,
  input  tma_cmd_t    cmd,
  output logic        tma_done,
  output logic        tma_err,
  // every TMA request leaving the engine (src, shared-memory dst, bytes), for the SM side
  output logic        tma_req_fire,
  output tma_req_t    tma_req_o,
  // address map and prefetcher configuration
  input  addr_t       cfg_hbf_base,
  input  addr_t       cfg_hbf_limit,
  input  logic        cfg_pf_en,
  input  logic        cfg_sram_en,
  input  logic [31:0] cfg_bl,
  input  logic [15:0] cfg_p_tile,
  input  logic [DEG_W-1:0] cfg_k_iters,
  input  addr_t       cfg_pf_stride,
  input  logic        cta_launch,
  input  logic        cta_retire,
  output logic [DEG_W-1:0] pf_degree,
  // L2 lookup (answered in the same cycle)
  output logic        l2_lookup_valid,
  output addr_t       l2_lookup_addr,
  input  logic        l2_lookup_hit,
  // memory reads
  output logic        hbm_mem_valid,
  input  logic        hbm_mem_ready,
  output addr_t       hbm_mem_addr,
  output logic [$clog2(HBM_ENTRIES)-1:0] hbm_mem_id,
  output logic        hbf_mem_valid,
  input  logic        hbf_mem_ready,
  output addr_t       hbf_mem_addr,
  output logic [$clog2(HBF_ENTRIES)-1:0] hbf_mem_id,
  // memory fills
  input  logic        fill_valid,
  output logic        fill_ready,
  input  logic        fill_hbf,
  input  logic [$clog2(HBF_ENTRIES > HBM_ENTRIES ? HBF_ENTRIES : HBM_ENTRIES)-1:0] fill_id,
  // L2 line insertion
  output logic        l2_ins_valid,
  input  logic        l2_ins_ready,
  output addr_t       l2_ins_addr,
  // SRAM-buffer tier prefetches
  output logic        sram_pf_valid,
  input  logic        sram_pf_ready,
  output addr_t       sram_pf_addr,
  // statistics
  output logic [31:0] stat_l2_hits,
  output logic [31:0] stat_merges,
  output logic [31:0] stat_stall_cycles,
  output logic [31:0] stat_prefetches
);
  // ---------------- TMA ----------------
  logic     tma_req_valid, tma_req_ready;
  tma_req_t tma_req;

  tilelens_tma u_tma (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .desc, .cmd,
    .req_valid (tma_req_valid),
    .req_ready (tma_req_ready),
    .req       (tma_req),
    .done      (tma_done),
    .err       (tma_err)
  );

  assign tma_req_fire = tma_req_valid && tma_req_ready;
  assign tma_req_o    = tma_req;

  // ---------------- prefetcher ----------------
  logic  pf_trig_valid, pf_trig_ready, pf_valid, pf_ready, pf_sram;
  addr_t pf_addr;

  hbf_prefetcher #(.DEG_W(DEG_W)) u_pf (
    .clk, .rst_n,
    .cfg_en      (cfg_pf_en),
    .cfg_sram_en (cfg_sram_en),
    .cfg_bl      (cfg_bl),
    .cfg_p_tile  (cfg_p_tile),
    .cfg_k_iters (cfg_k_iters),
    .cfg_stride  (cfg_pf_stride),
    .cta_launch, .cta_retire,
    .trig_valid  (pf_trig_valid),
    .trig_ready  (pf_trig_ready),
    .trig_addr   (tma_req.src),
    .pf_valid    (pf_valid),
    .pf_ready    (pf_ready),
    .pf_addr     (pf_addr),
    .pf_sram     (pf_sram),
    .degree      (pf_degree),
    .active_ctas ()
  );

  // ---------------- arbitration, L2 lookup, routing ----------------
  logic  sel_pf, sel_valid, sel_hbf, in_hbf_range;
  addr_t sel_addr;
  logic  m_req_valid, m_req_ready, m_merged;
  logic  pf_to_sram, pf_l2_valid, dem_new_page;
  logic  done_valid, done_ready, done_hbf, blk_busy, blk_hbf, in_flight_blk;
  addr_t done_addr, blk_base;

  function automatic logic same_block(addr_t a, addr_t base, logic hbf);
    return hbf ? (a[ADDR_W-1:LGMS_LOG2] == base[ADDR_W-1:LGMS_LOG2])
               : (a[ADDR_W-1:LINE_LOG2] == base[ADDR_W-1:LINE_LOG2]);
  endfunction

  // The selected address belongs to a block that has returned from memory but is not
  // (fully) in the L2 yet: its MSHR entry is already free, so it must not miss again.
  assign in_flight_blk = (blk_busy && same_block(sel_addr, blk_base, blk_hbf)) ||
                         (done_valid && done_ready && same_block(sel_addr, done_addr, done_hbf));

  assign pf_to_sram   = pf_valid && pf_sram;
  assign pf_l2_valid  = pf_valid && !pf_sram;
  assign sel_pf       = pf_l2_valid;
  assign sel_valid    = pf_l2_valid || tma_req_valid;
  assign sel_addr     = sel_pf ? pf_addr : tma_req.src;
  assign in_hbf_range = (sel_addr >= cfg_hbf_base) && (sel_addr < cfg_hbf_limit);
  assign sel_hbf      = in_hbf_range;

  assign l2_lookup_valid = sel_valid;
  assign l2_lookup_addr  = sel_addr;

  // Every demand access to a new 4 KB HBF page triggers the prefetcher, whether it hits
  // in the L2 or not: once the stream runs ahead, demands hit, and they must keep it
  // going. Consecutive TMA requests to the same page count once.
  addr_t last_page_q;
  logic  last_page_v;
  assign dem_new_page = !sel_pf && tma_req_valid && sel_hbf &&
                        !(last_page_v && last_page_q == {sel_addr[ADDR_W-1:LGMS_LOG2], {LGMS_LOG2{1'b0}}});

  always_comb begin
    m_req_valid   = 1'b0;
    pf_ready      = 1'b0;
    tma_req_ready = 1'b0;
    pf_trig_valid = 1'b0;
    sram_pf_valid = pf_to_sram;
    sram_pf_addr  = pf_addr;
    if (pf_to_sram) begin
      pf_ready = sram_pf_ready;
    end else if (sel_pf) begin
      // prefetch: dropped on an L2 hit, for a block being inserted, or outside HBF
      if (l2_lookup_hit || in_flight_blk || !in_hbf_range) pf_ready = 1'b1;
      else begin
        m_req_valid = 1'b1;
        pf_ready    = m_req_ready;
      end
    end else if (tma_req_valid) begin
      if (dem_new_page && !pf_trig_ready) tma_req_ready = 1'b0;       // wait for prefetcher
      else if (l2_lookup_hit) begin
        tma_req_ready = 1'b1;
        pf_trig_valid = dem_new_page;
      end
      else if (in_flight_blk) tma_req_ready = 1'b0;                   // wait for insertion
      else begin
        m_req_valid   = 1'b1;
        tma_req_ready = m_req_ready;
        pf_trig_valid = dem_new_page && m_req_ready;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_page_q <= '0;
      last_page_v <= 1'b0;
    end else if (pf_trig_valid) begin
      last_page_q <= {sel_addr[ADDR_W-1:LGMS_LOG2], {LGMS_LOG2{1'b0}}};
      last_page_v <= 1'b1;
    end
  end

  // ---------------- MSHR ----------------

  mixed_mshr #(.HBM_ENTRIES(HBM_ENTRIES), .HBF_ENTRIES(HBF_ENTRIES)) u_mshr (
    .clk, .rst_n,
    .req_valid    (m_req_valid),
    .req_ready    (m_req_ready),
    .req_addr     (sel_addr),
    .req_hbf      (sel_hbf),
    .req_demand   (!sel_pf),
    .lookup_miss  (),
    .req_merged   (m_merged),
    .hbm_mem_valid, .hbm_mem_ready, .hbm_mem_addr, .hbm_mem_id,
    .hbf_mem_valid, .hbf_mem_ready, .hbf_mem_addr, .hbf_mem_id,
    .fill_valid, .fill_ready, .fill_hbf, .fill_id,
    .done_ready   (done_ready),
    .done_valid   (done_valid),
    .done_addr    (done_addr),
    .done_hbf     (done_hbf),
    .done_waiters (),
    .hbm_used     (),
    .hbf_used     ()
  );

  // ---------------- 4 KB L2 insertion ----------------
  l2_block_fill u_fill (
    .clk, .rst_n,
    .in_valid  (done_valid),
    .in_ready  (done_ready),
    .in_addr   (done_addr),
    .in_hbf    (done_hbf),
    .ins_valid (l2_ins_valid),
    .ins_ready (l2_ins_ready),
    .ins_addr  (l2_ins_addr),
    .ins_first (),
    .ins_last  (),
    .blk_busy  (blk_busy),
    .blk_base  (blk_base),
    .blk_hbf   (blk_hbf)
  );

  // ---------------- statistics ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stat_l2_hits      <= '0;
      stat_merges       <= '0;
      stat_stall_cycles <= '0;
      stat_prefetches   <= '0;
    end else begin
      if (tma_req_valid && tma_req_ready && !sel_pf && l2_lookup_hit) stat_l2_hits <= stat_l2_hits + 1;
      if (m_req_valid && m_merged) stat_merges <= stat_merges + 1;
      if (tma_req_valid && !tma_req_ready) stat_stall_cycles <= stat_stall_cycles + 1;
      if (pf_valid && pf_ready) stat_prefetches <= stat_prefetches + 1;
    end
  end
endmodule
