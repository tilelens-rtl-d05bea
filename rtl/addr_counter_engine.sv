// addr_counter_engine: phase 2 of a TMA load, counter-based address generation.
//
// A set of nested counters (up to MAX_CNT, innermost first) sweeps the TMA box. Each
// counter value is multiplied by its stride and the products are added to the tile base:
//   srcAddr = tileBase + (sum_k cnt[k]*stride[k]) * s.
// Each counter position is one memory request of u*s contiguous bytes (dimension 0 of the
// box is never counted). The destination address in shared memory starts at the command's
// smem_dst and simply increments by u*s per request, in counter order. The counter
// programme (strides and extents) comes from counter_reconfig, so the tile-major layout
// changes only what is loaded at start, not this engine.
//
// Interface: `start` (one cycle, only while idle) loads the programme; requests then come
// out with a valid/ready handshake, one per cycle while ready is high; `last` marks the
// final request, after which the engine is idle again. With n = 0 counters the box is a
// single request. Follows the paper (Fig. 10: counters, stride multipliers, adder tree).
// This design's choice: the handshake and one request per cycle.
module addr_counter_engine
  import tilelens_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  addr_t              tile_base,
  input  cnt_prog_t          prog,
  input  logic [1:0]         elem_log2,
  input  logic [8:0]         req_bytes,
  input  logic [SMEM_W-1:0]  smem_dst,
  output logic               busy,
  output logic               req_valid,
  input  logic               req_ready,
  output addr_t              req_src,
  output logic [SMEM_W-1:0]  req_dst,
  output logic [8:0]         req_bytes_o,
  output logic               req_last
);
  crd_t               cnt [MAX_CNT];
  cnt_prog_t          prog_q;
  addr_t              base_q;
  logic [1:0]         elog_q;
  logic [8:0]         bytes_q;
  logic [SMEM_W-1:0]  dst_q;
  logic               at_end [MAX_CNT];
  logic               inner_wrap [MAX_CNT];   // all counters inside k are at their end
  addr_t              off;

  // A counter is at its end when it holds extent-1 (unused counters always are).
  always_comb begin
    for (int k = 0; k < MAX_CNT; k++)
      at_end[k] = (k >= int'(prog_q.n)) || (cnt[k] + 1 >= prog_q.extent[k]);
    off = '0;
    for (int k = 0; k < MAX_CNT; k++)
      if (k < int'(prog_q.n)) off = off + addr_t'(64'(cnt[k]) * 64'(prog_q.stride[k]));
    req_last = 1'b1;
    for (int k = 0; k < MAX_CNT; k++) begin
      inner_wrap[k] = req_last;
      req_last = req_last & at_end[k];
    end
  end

  assign req_valid   = busy;
  assign req_src     = base_q + (off << elog_q);
  assign req_dst     = dst_q;
  assign req_bytes_o = bytes_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      prog_q  <= '0;
      base_q  <= '0;
      elog_q  <= '0;
      bytes_q <= '0;
      dst_q   <= '0;
      for (int k = 0; k < MAX_CNT; k++) cnt[k] <= '0;
    end else if (!busy) begin
      if (start) begin
        busy    <= 1'b1;
        prog_q  <= prog;
        base_q  <= tile_base;
        elog_q  <= elem_log2;
        bytes_q <= req_bytes;
        dst_q   <= smem_dst;
        for (int k = 0; k < MAX_CNT; k++) cnt[k] <= '0;
      end
    end else if (req_ready) begin
      dst_q <= dst_q + SMEM_W'(bytes_q);
      if (req_last) busy <= 1'b0;
      // Ripple increment: counter k steps when all inner counters wrap.
      for (int k = 0; k < MAX_CNT; k++)
        if (inner_wrap[k] && k < int'(prog_q.n))
          cnt[k] <= at_end[k] ? '0 : cnt[k] + 1;
    end
  end
endmodule
