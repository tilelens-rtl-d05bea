// tile_bit_swap: address correction for a memory tile wider than the TMA box (a > u).
//
// When a > u the TMA computes every request address as if the memory tile were u x b.
// Inside one 4 KB tile that address offset reads, from the top bit down,
//   [ sub-tile : log2(a/u) | column : log2(b) | row : log2(u*s) ]
// while the real a x b tile stores
//   [ column : log2(b) | sub-tile : log2(a/u) | row : log2(u*s) ].
// Because a, b, u and s are all powers of two the correction is a swap of the two upper
// fields; the low row bits and every bit above the tile are passed unchanged. Example:
// FP8, 32x32 box, 128x32 memory tile: (sub2 | col5 | row5) becomes (col5 | sub2 | row5).
//
// Interface: combinational. en = 0 (a <= u, or column-major) passes the address through.
// Field widths are given as log2 values. Follows the paper exactly (Fig. 12(c)); the
// base address is assumed aligned to the memory tile so absolute address bits can be used.
module tile_bit_swap
  import tilelens_pkg::*;
(
  input  addr_t       addr_in,
  input  logic        en,
  input  logic [4:0]  log2_us,   // row field width, log2(u*s)
  input  logic [4:0]  log2_b,    // column field width
  input  logic [4:0]  log2_au,   // sub-tile field width, log2(a/u)
  output addr_t       addr_out
);
  addr_t low_mask, upper_mask, col, sub;
  logic [6:0] top_pos;

  always_comb begin
    top_pos    = 7'(log2_us) + 7'(log2_b) + 7'(log2_au);
    low_mask   = (addr_t'(1) << log2_us) - 1;
    upper_mask = ~((addr_t'(1) << top_pos) - 1);
    col        = (addr_in >> log2_us) & ((addr_t'(1) << log2_b) - 1);
    sub        = (addr_in >> (7'(log2_us) + 7'(log2_b))) & ((addr_t'(1) << log2_au) - 1);
    if (en)
      addr_out = (addr_in & upper_mask)
               | (col << (7'(log2_us) + 7'(log2_au)))
               | (sub << log2_us)
               | (addr_in & low_mask);
    else
      addr_out = addr_in;
  end
endmodule
