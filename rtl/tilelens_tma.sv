// tilelens_tma: a TMA address engine with transparent tile-major support.
//
// The host programs a descriptor (global base, rank, strides, element size) and a kernel
// issues a load with the box origin coordinates, the box size and a shared-memory
// destination. The engine works in two phases:
//   1. tileBase: tilebase_unit computes the box's first byte address. In tile-major mode
//      the coordinate*stride products are split by the leading stride K into the row
//      index i and the column term K*j, and i is shifted by log2(b).
//   2. Address generation: counter_reconfig builds the counter programme (in tile-major
//      mode the stride-K dimension becomes two nested counters) and addr_counter_engine
//      sweeps it, producing one request of u*s bytes per cycle. When the memory tile is
//      wider than the box (a > u) every request address passes through tile_bit_swap.
// Column-major descriptors (tile_major = 0) get exactly the unmodified TMA behaviour, so
// the same kernel runs on either layout; only the descriptor differs.
//
// Interface: cmd_valid/cmd_ready accepts a descriptor and command together (the engine
// takes one load at a time). Requests leave on req_valid/req_ready. `done` pulses for one
// cycle after the last request is accepted, or right after phase 1 if the box is not
// covered by the extension (`err` is then high with it and no request is issued).
// Timing: command accepted in cycle t, phase 1 registered in t+1, first request valid
// in t+2, then one request per cycle while req_ready is high.
// Follows the paper: the two phases, the split & sum, the shift by log2 b, the nested
// counter split and the bit swap. This design's choice: the handshakes, the one-cycle
// phase 1 and the error signalling. The data returned to shared memory (and swizzling)
// is not part of this block.
module tilelens_tma
  import tilelens_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cmd_valid,
  output logic       cmd_ready,
  input  tma_desc_t  desc,
  input  tma_cmd_t   cmd,
  output logic       req_valid,
  input  logic       req_ready,
  output tma_req_t   req,
  output logic       done,
  output logic       err
);
  typedef enum logic [1:0] {S_IDLE, S_BASE, S_ISSUE} state_e;
  state_e     state;
  tma_desc_t  desc_q;
  tma_cmd_t   cmd_q;
  addr_t      tile_base;
  cnt_prog_t  prog;
  logic       cfg_err;
  logic       eng_valid, eng_last;
  addr_t      eng_src;
  logic [SMEM_W-1:0] eng_dst;
  logic [8:0] eng_bytes;
  logic [4:0] log2_u, log2_us, log2_au;
  logic       wide;

  tilebase_unit u_base (.desc(desc_q), .cmd(cmd_q), .tile_base(tile_base));
  counter_reconfig u_reconf (.desc(desc_q), .cmd(cmd_q), .prog(prog), .err(cfg_err));

  assign log2_u  = clog2_pow2(cmd_q.box[0]);
  assign log2_us = log2_u + 5'(desc_q.elem_log2);
  assign wide    = desc_q.tile_major && (desc_q.log2_a > log2_u);
  assign log2_au = wide ? (desc_q.log2_a - log2_u) : 5'd0;

  addr_counter_engine u_eng (
    .clk, .rst_n,
    .start       (state == S_BASE && !cfg_err),
    .tile_base   (tile_base),
    .prog        (prog),
    .elem_log2   (desc_q.elem_log2),
    .req_bytes   (9'(cmd_q.box[0] << desc_q.elem_log2)),
    .smem_dst    (cmd_q.smem_dst),
    .busy        (),
    .req_valid   (eng_valid),
    .req_ready   (req_ready),
    .req_src     (eng_src),
    .req_dst     (eng_dst),
    .req_bytes_o (eng_bytes),
    .req_last    (eng_last)
  );

  tile_bit_swap u_swap (
    .addr_in  (eng_src),
    .en       (wide),
    .log2_us  (log2_us),
    .log2_b   (desc_q.log2_b),
    .log2_au  (log2_au),
    .addr_out (req.src)
  );

  assign req.dst   = eng_dst;
  assign req.bytes = eng_bytes;
  assign req.last  = eng_last;
  assign req_valid = (state == S_ISSUE) && eng_valid;
  assign cmd_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      desc_q <= '0;
      cmd_q  <= '0;
      done   <= 1'b0;
      err    <= 1'b0;
    end else begin
      done <= 1'b0;
      err  <= 1'b0;
      unique case (state)
        S_IDLE:  if (cmd_valid) begin
                   desc_q <= desc;
                   cmd_q  <= cmd;
                   state  <= S_BASE;
                 end
        S_BASE:  if (cfg_err) begin
                   done  <= 1'b1;
                   err   <= 1'b1;
                   state <= S_IDLE;
                 end else begin
                   state <= S_ISSUE;
                 end
        S_ISSUE: if (eng_valid && req_ready && eng_last) begin
                   done  <= 1'b1;
                   state <= S_IDLE;
                 end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The request stream must stay stable while stalled.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid && !req_ready |=> req_valid && $stable(req.src));
endmodule
