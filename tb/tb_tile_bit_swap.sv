// tb_tile_bit_swap: checks the field swap of the wide-memory-tile correction.
// The reference rebuilds the address from (column, sub-tile, row) fields with plain
// arithmetic: a u x b sub-tile address  sub*(u*b*s) + col*(u*s) + row  must become
// col*(a*s) + sub*(u*s) + row, with the bits above the memory tile unchanged. Includes
// the FP8 32x32-box / 128x32-tile example, random field widths, and en = 0.
module tb_tile_bit_swap;
  import tilelens_pkg::*;
  addr_t in, out;
  logic en;
  logic [4:0] lus, lb, lau;
  int checks = 0, failures = 0;

  tile_bit_swap dut (.addr_in(in), .en, .log2_us(lus), .log2_b(lb), .log2_au(lau), .addr_out(out));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(int us_l, int b_l, int au_l, longint hi, longint sub, longint col, longint row);
    longint exp_v, tile_l;
    tile_l = us_l + b_l + au_l;
    en = 1; lus = 5'(us_l); lb = 5'(b_l); lau = 5'(au_l);
    in = addr_t'((hi << tile_l) + (sub << (us_l + b_l)) + (col << us_l) + row);
    exp_v = (hi << tile_l) + (col * ((1 << au_l) << us_l)) + (sub << us_l) + row;
    #1;
    checks++;
    if (longint'(out) != exp_v) begin
      failures++;
      $display("swap us=%0d b=%0d au=%0d in=%h out=%h exp=%h", us_l, b_l, au_l, in, out, exp_v);
    end
  endtask

  initial begin
    // FP8, u = 32 (32 B rows), b = 32, a/u = 4: (sub2|col5|row5) -> (col5|sub2|row5)
    check_one(5, 5, 2, 'h1234, 3, 17, 9);
    check_one(5, 5, 2, 0, 1, 31, 31);
    for (int t = 0; t < 300; t++) begin
      int us_l, b_l, au_l;
      us_l = $urandom_range(5, 7);
      au_l = $urandom_range(0, 12 - us_l);
      b_l  = 12 - us_l - au_l;
      check_one(us_l, b_l, au_l, longint'($urandom_range(0, 65535)),
                longint'($urandom_range(0, (1 << au_l) - 1)),
                longint'($urandom_range(0, (1 << b_l) - 1)),
                longint'($urandom_range(0, (1 << us_l) - 1)));
    end
    // disabled: pass-through
    en = 0; in = 48'h1234_5678_9abc; #1;
    checks++;
    if (out != in) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
