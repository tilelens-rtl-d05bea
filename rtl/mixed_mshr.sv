// mixed_mshr: miss status holding registers partitioned by memory granularity.
//
// HBM and HBF sit behind the same L2 but are read at different sizes: 128 B lines for HBM
// and 4 KB pages for HBF. With microsecond HBF latencies, 128 B entries would fill up
// long before enough HBF reads were in flight, so the MSHR is split: one partition tracks
// HBM misses per 128 B line, the other tracks HBF misses per 4 KB page, so each HBF
// entry covers 32 lines.
//
// A request (addr, hbf, demand) is looked up in its partition. A match merges into the
// outstanding entry (demand requests add a waiter; prefetches are simply dropped). A miss
// allocates a free entry and sends one read to that memory (hbm_mem_* or hbf_mem_*),
// carrying the entry index as its id. A request that misses when its partition is full,
// or whose memory port is not ready, is stalled (req_ready low). A fill (fill_valid,
// fill_hbf, fill_id) frees its entry and reports the line/page address and the number of
// demand waiters on done_*; it is held until fill_ready. An entry being filled in a cycle
// is not matched by a request in the same cycle (the request allocates again).
// lookup_miss tells, combinationally, whether the presented request would allocate.
//
// Follows the paper: the partition and the 4 KB tracking granularity of HBF. This
// design's choice: entry counts (the paper gives none), merging rules, handshakes.
module mixed_mshr
  import tilelens_pkg::*;
#(
  parameter int unsigned HBM_ENTRIES = 64,
  parameter int unsigned HBF_ENTRIES = 64,
  parameter int unsigned WAIT_W      = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  // request
  input  logic               req_valid,
  output logic               req_ready,
  input  addr_t              req_addr,
  input  logic               req_hbf,
  input  logic               req_demand,
  output logic               lookup_miss,
  output logic               req_merged,     // info: accepted request merged
  // memory read ports
  output logic               hbm_mem_valid,
  input  logic               hbm_mem_ready,
  output addr_t              hbm_mem_addr,
  output logic [$clog2(HBM_ENTRIES)-1:0] hbm_mem_id,
  output logic               hbf_mem_valid,
  input  logic               hbf_mem_ready,
  output addr_t              hbf_mem_addr,
  output logic [$clog2(HBF_ENTRIES)-1:0] hbf_mem_id,
  // fills
  input  logic               fill_valid,
  output logic               fill_ready,
  input  logic               fill_hbf,
  input  logic [$clog2(HBF_ENTRIES > HBM_ENTRIES ? HBF_ENTRIES : HBM_ENTRIES)-1:0] fill_id,
  input  logic               done_ready,
  output logic               done_valid,
  output addr_t              done_addr,
  output logic               done_hbf,
  output logic [WAIT_W-1:0]  done_waiters,
  // occupancy
  output logic [$clog2(HBM_ENTRIES+1)-1:0] hbm_used,
  output logic [$clog2(HBF_ENTRIES+1)-1:0] hbf_used
);
  localparam int unsigned HBM_TAG_W = ADDR_W - LINE_LOG2;
  localparam int unsigned HBF_TAG_W = ADDR_W - LGMS_LOG2;
  localparam int unsigned HID_W = $clog2(HBM_ENTRIES);
  localparam int unsigned FID_W = $clog2(HBF_ENTRIES);

  logic [HBM_ENTRIES-1:0] hbm_v;
  logic [HBM_TAG_W-1:0]   hbm_tag  [HBM_ENTRIES];
  logic [WAIT_W-1:0]      hbm_wait [HBM_ENTRIES];
  logic [HBF_ENTRIES-1:0] hbf_v;
  logic [HBF_TAG_W-1:0]   hbf_tag  [HBF_ENTRIES];
  logic [WAIT_W-1:0]      hbf_wait [HBF_ENTRIES];

  logic [HBM_TAG_W-1:0] req_htag;
  logic [HBF_TAG_W-1:0] req_ftag;
  logic                 hit, free_avail, mem_rdy, fill_fire, do_alloc, do_merge;
  logic [HID_W-1:0]     hbm_hit_idx, hbm_free_idx;
  logic [FID_W-1:0]     hbf_hit_idx, hbf_free_idx;
  logic                 hbm_hit, hbf_hit, hbm_free, hbf_free;

  assign req_htag = req_addr[ADDR_W-1:LINE_LOG2];
  assign req_ftag = req_addr[ADDR_W-1:LGMS_LOG2];
  assign fill_fire = fill_valid && fill_ready;

  always_comb begin
    hbm_hit = 1'b0; hbm_hit_idx = '0; hbm_free = 1'b0; hbm_free_idx = '0;
    for (int e = HBM_ENTRIES-1; e >= 0; e--) begin
      if (hbm_v[e] && hbm_tag[e] == req_htag &&
          !(fill_fire && !fill_hbf && fill_id == ($bits(fill_id))'(e))) begin
        hbm_hit = 1'b1; hbm_hit_idx = HID_W'(e);
      end
      if (!hbm_v[e]) begin hbm_free = 1'b1; hbm_free_idx = HID_W'(e); end
    end
    hbf_hit = 1'b0; hbf_hit_idx = '0; hbf_free = 1'b0; hbf_free_idx = '0;
    for (int e = HBF_ENTRIES-1; e >= 0; e--) begin
      if (hbf_v[e] && hbf_tag[e] == req_ftag &&
          !(fill_fire && fill_hbf && fill_id == ($bits(fill_id))'(e))) begin
        hbf_hit = 1'b1; hbf_hit_idx = FID_W'(e);
      end
      if (!hbf_v[e]) begin hbf_free = 1'b1; hbf_free_idx = FID_W'(e); end
    end
  end

  assign hit         = req_hbf ? hbf_hit : hbm_hit;
  assign free_avail  = req_hbf ? hbf_free : hbm_free;
  assign mem_rdy     = req_hbf ? hbf_mem_ready : hbm_mem_ready;
  assign lookup_miss = !hit;
  assign req_ready   = hit || (free_avail && mem_rdy);
  assign do_merge    = req_valid && hit;
  assign do_alloc    = req_valid && !hit && free_avail && mem_rdy;
  assign req_merged  = do_merge;

  assign hbm_mem_valid = req_valid && !req_hbf && !hit && free_avail;
  assign hbm_mem_addr  = {req_htag, {LINE_LOG2{1'b0}}};
  assign hbm_mem_id    = hbm_free_idx;
  assign hbf_mem_valid = req_valid && req_hbf && !hit && free_avail;
  assign hbf_mem_addr  = {req_ftag, {LGMS_LOG2{1'b0}}};
  assign hbf_mem_id    = hbf_free_idx;

  // Fill reporting (combinational view of the entry being freed).
  assign fill_ready   = done_ready;
  assign done_valid   = fill_valid;
  assign done_hbf     = fill_hbf;
  assign done_addr    = fill_hbf ? {hbf_tag[FID_W'(fill_id)], {LGMS_LOG2{1'b0}}}
                                 : {hbm_tag[HID_W'(fill_id)], {LINE_LOG2{1'b0}}};
  assign done_waiters = fill_hbf ? hbf_wait[FID_W'(fill_id)] : hbm_wait[HID_W'(fill_id)];

  always_comb begin
    hbm_used = '0;
    hbf_used = '0;
    for (int e = 0; e < HBM_ENTRIES; e++) hbm_used = hbm_used + hbm_v[e];
    for (int e = 0; e < HBF_ENTRIES; e++) hbf_used = hbf_used + hbf_v[e];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hbm_v <= '0;
      hbf_v <= '0;
      for (int e = 0; e < HBM_ENTRIES; e++) begin hbm_tag[e] <= '0; hbm_wait[e] <= '0; end
      for (int e = 0; e < HBF_ENTRIES; e++) begin hbf_tag[e] <= '0; hbf_wait[e] <= '0; end
    end else begin
      if (fill_fire) begin
        if (fill_hbf) hbf_v[FID_W'(fill_id)] <= 1'b0;
        else          hbm_v[HID_W'(fill_id)] <= 1'b0;
      end
      if (do_alloc) begin
        if (req_hbf) begin
          hbf_v[hbf_free_idx]    <= 1'b1;
          hbf_tag[hbf_free_idx]  <= req_ftag;
          hbf_wait[hbf_free_idx] <= req_demand ? WAIT_W'(1) : '0;
        end else begin
          hbm_v[hbm_free_idx]    <= 1'b1;
          hbm_tag[hbm_free_idx]  <= req_htag;
          hbm_wait[hbm_free_idx] <= req_demand ? WAIT_W'(1) : '0;
        end
      end
      if (do_merge && req_demand) begin
        if (req_hbf) begin
          if (hbf_wait[hbf_hit_idx] != '1) hbf_wait[hbf_hit_idx] <= hbf_wait[hbf_hit_idx] + 1'b1;
        end else begin
          if (hbm_wait[hbm_hit_idx] != '1) hbm_wait[hbm_hit_idx] <= hbm_wait[hbm_hit_idx] + 1'b1;
        end
      end
    end
  end

  a_fill_valid_entry: assert property (@(posedge clk) disable iff (!rst_n)
    fill_valid |-> (fill_hbf ? hbf_v[FID_W'(fill_id)] : hbm_v[HID_W'(fill_id)]));
endmodule
