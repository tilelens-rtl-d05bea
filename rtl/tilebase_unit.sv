// tilebase_unit: phase 1 of a TMA load, the tile base address.
//
// Every coordinate is multiplied by its stride (dimension 0 has stride 1). In column-major
// mode the products are summed, scaled by the element size s and added to the global base:
//   tileBase = globalBase + (sum_d coord[d]*stride[d]) * s.
// In tile-major mode the split_sum unit separates the row index i from the column term
// K*j using the leading stride K, and the row index is shifted left by log2(b):
//   tileBase = globalBase + (K*j + (i << log2 b)) * s.
// This is exact because the box origin is aligned to memory-tile boundaries in i and j
// (K and N are multiples of a and b). When the box is narrower than the memory tile
// (a > u) the same formula places the box in a u x b sub-tile view; the bit swap applied
// to each request address corrects that later.
//
// Interface: combinational; desc and cmd in, tile_base (byte address) out.
// Follows the paper: the multiply/add structure of the original unit and the split, shift
// and add of the extension. This design's choice: one-cycle combinational form, widths.
module tilebase_unit
  import tilelens_pkg::*;
(
  input  tma_desc_t  desc,
  input  tma_cmd_t   cmd,
  output addr_t      tile_base
);
  addr_t prod   [MAX_DIMS];
  crd_t  stride [MAX_DIMS];
  addr_t row_sum, col_sum, lin_sum, off;

  always_comb begin
    for (int d = 0; d < MAX_DIMS; d++) begin
      stride[d] = (d == 0) ? crd_t'(1) : desc.stride[d];
      prod[d]   = addr_t'(64'(cmd.coord[d]) * 64'(stride[d]));
    end
  end

  split_sum #(.NDIM(MAX_DIMS)) u_split (
    .prod        (prod),
    .stride      (stride),
    .rank        (desc.rank),
    .lead_stride (desc.lead_stride),
    .row_sum     (row_sum),
    .col_sum     (col_sum)
  );

  // Column-major: all products summed (same set of products, same adders reused).
  assign lin_sum = row_sum + col_sum;
  assign off     = desc.tile_major ? (col_sum + (row_sum << desc.log2_b)) : lin_sum;
  assign tile_base = desc.global_base + (off << desc.elem_log2);
endmodule
