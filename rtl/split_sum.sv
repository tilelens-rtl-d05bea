// split_sum: the "Split & Sum" unit of the tile-major TMA extension.
//
// Phase 1 of a TMA load multiplies every coordinate by its stride. In column-major mode
// these products are simply added. For tile-major remapping the products must be split
// into a row part i and a column part K*j, because the two parts are scaled differently.
// Any valid view of a column-major K x N matrix steps between columns with a stride of at
// least K, so this unit compares each dimension's stride with the leading stride K: a
// product whose stride is below K goes to the row adder tree, the rest to the column
// adder tree. Dimension 0 is the contiguous one (stride 1) and always counts as a row.
//
// Interface: purely combinational. prod[d] is coord[d]*stride[d] in elements; dims at or
// above `rank` are ignored. row_sum = i, col_sum = K*j, both in elements.
// Follows the paper: the stride comparison and the two adder trees. This design's choice:
// the widths (ADDR_W-bit sums, CRD_W-bit strides) and ignoring dims beyond rank.
module split_sum
  import tilelens_pkg::*;
#(
  parameter int unsigned NDIM = MAX_DIMS
) (
  input  addr_t                 prod [NDIM],
  input  crd_t                  stride [NDIM],
  input  logic [2:0]            rank,
  input  crd_t                  lead_stride,
  output addr_t                 row_sum,
  output addr_t                 col_sum
);
  always_comb begin
    row_sum = '0;
    col_sum = '0;
    for (int d = 0; d < NDIM; d++) begin
      if (d < int'(rank)) begin
        if (d == 0 || stride[d] < lead_stride) row_sum = row_sum + prod[d];
        else                                   col_sum = col_sum + prod[d];
      end
    end
  end
endmodule
