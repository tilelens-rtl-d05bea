// l2_block_fill: the insertion side of the mixed-granularity L2.
//
// When an HBF read returns, the whole 4 KB block is inserted into the L2, not just the
// line that missed: with tile-major layout every byte of the block belongs to the same
// compute tile, so the later requests of that tile hit. The L2 keeps its 128 B lines, so
// a 4 KB return becomes 32 consecutive line insertions; an HBM return is one line.
//
// Interface: in_valid/in_ready takes a returned block (address, hbf flag); in_ready is
// high only while idle. Line insertions leave on ins_valid/ins_ready, one per cycle, with
// ins_first/ins_last marking the block. A 4 KB block takes 32 cycles with ins_ready high.
// blk_busy/blk_base/blk_hbf show the block being inserted, so that requests to it can
// wait instead of missing in the L2 and reading the block a second time.
// Follows the paper: full 4 KB insertion for HBF returns. This design's choice: the line
// size (128 B), the sequential one-line-per-cycle insertion, the handshakes. The L2 tag
// and data arrays themselves are outside this block.
module l2_block_fill
  import tilelens_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  addr_t  in_addr,
  input  logic   in_hbf,
  output logic   ins_valid,
  input  logic   ins_ready,
  output addr_t  ins_addr,
  output logic   ins_first,
  output logic   ins_last,
  output logic   blk_busy,      // a block is being inserted
  output addr_t  blk_base,      // its base address (page or line aligned)
  output logic   blk_hbf
);
  localparam int unsigned LPB_W = LGMS_LOG2 - LINE_LOG2;   // log2(lines per 4 KB)

  logic               busy, hbf_q;
  addr_t              base_q;
  logic [LPB_W-1:0]   idx, last_idx;

  assign in_ready  = !busy;
  assign blk_busy  = busy;
  assign blk_base  = base_q;
  assign blk_hbf   = hbf_q;
  assign ins_valid = busy;
  assign ins_addr  = base_q + (addr_t'(idx) << LINE_LOG2);
  assign ins_first = (idx == '0);
  assign ins_last  = (idx == last_idx);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      hbf_q    <= 1'b0;
      base_q   <= '0;
      idx      <= '0;
      last_idx <= '0;
    end else if (!busy) begin
      if (in_valid) begin
        busy     <= 1'b1;
        hbf_q    <= in_hbf;
        idx      <= '0;
        base_q   <= in_hbf ? {in_addr[ADDR_W-1:LGMS_LOG2], {LGMS_LOG2{1'b0}}}
                           : {in_addr[ADDR_W-1:LINE_LOG2], {LINE_LOG2{1'b0}}};
        last_idx <= in_hbf ? '1 : '0;
      end
    end else if (ins_ready) begin
      idx <= idx + 1'b1;
      if (ins_last) busy <= 1'b0;
    end
  end
endmodule
