// counter_reconfig: the stride and tile-dimension converter of the tile-major TMA.
//
// Phase 2 of a TMA load sweeps the box with one counter per non-contiguous dimension;
// the contiguous dimension 0 (u elements, u*s bytes) is one memory request. This block
// builds that counter programme from the descriptor and the box.
//
// Column-major mode: counter k is (stride[d], box[d]) for d = 1..rank-1, unchanged.
// Tile-major mode, with a' = min(a, u) (a' = u is the "wide memory tile" case a > u):
//   * the dimension whose stride equals K is replaced by two nested counters,
//       inner: stride a', extent b        (rows within one memory tile)
//       outer: stride b*K, extent v/b     (jump to the next memory tile)
//   * a dimension with stride below K walks rows across memory tiles; its stride is
//     scaled by b, the same i << log2 b rule the tile base uses;
//   * a dimension with stride above K keeps its stride (for whole-tile column steps,
//     as the paper's alignment assumption gives, tile-major and column-major agree).
// err flags boxes the extension does not cover: a < u, u not a power of two, no
// dimension with stride K, or v not a multiple of b.
//
// Interface: combinational. Follows the paper: the split of the stride-K counter and the
// use of u in place of a when a > u. This design's choice: scaling the other sub-K
// strides by b, and the error conditions.
module counter_reconfig
  import tilelens_pkg::*;
(
  input  tma_desc_t  desc,
  input  tma_cmd_t   cmd,
  output cnt_prog_t  prog,
  output logic       err
);
  logic [4:0] log2_u, log2_ae;
  logic       split_done;
  int         k;

  always_comb begin
    log2_u  = clog2_pow2(cmd.box[0]);
    log2_ae = (desc.log2_a > log2_u) ? log2_u : desc.log2_a;
    prog    = '0;
    err     = 1'b0;
    split_done = 1'b0;
    k = 0;
    for (int d = 1; d < MAX_DIMS; d++) begin
      if (d < int'(desc.rank)) begin
        if (!desc.tile_major) begin
          prog.stride[k] = desc.stride[d];
          prog.extent[k] = cmd.box[d];
          k = k + 1;
        end else if (desc.stride[d] == desc.lead_stride && !split_done) begin
          prog.stride[k]   = crd_t'(1) << log2_ae;
          prog.extent[k]   = crd_t'(1) << desc.log2_b;
          prog.stride[k+1] = desc.lead_stride << desc.log2_b;
          prog.extent[k+1] = cmd.box[d] >> desc.log2_b;
          if ((cmd.box[d] & ((crd_t'(1) << desc.log2_b) - 1)) != '0 ||
              cmd.box[d] == '0) err = 1'b1;
          split_done = 1'b1;
          k = k + 2;
        end else if (desc.stride[d] < desc.lead_stride) begin
          prog.stride[k] = desc.stride[d] << desc.log2_b;
          prog.extent[k] = cmd.box[d];
          k = k + 1;
        end else begin
          prog.stride[k] = desc.stride[d];
          prog.extent[k] = cmd.box[d];
          k = k + 1;
        end
      end
    end
    prog.n = 3'(k);
    if (desc.tile_major) begin
      if (desc.log2_a < log2_u) err = 1'b1;
      if ((cmd.box[0] & (cmd.box[0] - 1)) != '0 || cmd.box[0] == '0) err = 1'b1;
      if (!split_done) err = 1'b1;
    end
  end
endmodule
