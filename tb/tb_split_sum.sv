// tb_split_sum: checks the split of coordinate*stride products by the leading stride.
// Directed case: the 3-D view (128,128,3) of a 384x128 matrix at (0, 64, 2) must give
// i = 256 and K*j = 64*384. Random cases: the reference sums the products of dims whose
// stride is below K (and dim 0) into i, the others into K*j, for random ranks.
module tb_split_sum;
  import tilelens_pkg::*;
  addr_t prod [MAX_DIMS];
  crd_t  stride [MAX_DIMS];
  logic [2:0] rank;
  crd_t lead;
  addr_t row_sum, col_sum;
  int checks = 0, failures = 0;

  split_sum dut (.prod, .stride, .rank, .lead_stride(lead), .row_sum, .col_sum);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint er, ec;
    // 3-D view example
    rank = 3; lead = 384;
    stride[0] = 1; stride[1] = 384; stride[2] = 128; stride[3] = 0; stride[4] = 0;
    prod[0] = 0; prod[1] = 64 * 384; prod[2] = 2 * 128; prod[3] = 0; prod[4] = 0;
    #1; checks++;
    if (row_sum != 256 || col_sum != 64 * 384) begin
      failures++; $display("3D example: i=%0d Kj=%0d", row_sum, col_sum);
    end
    for (int t = 0; t < 500; t++) begin
      rank = 3'($urandom_range(1, 5));
      lead = crd_t'($urandom_range(1, 4096));
      er = 0; ec = 0;
      for (int d = 0; d < MAX_DIMS; d++) begin
        stride[d] = (d == 0) ? 1 : crd_t'($urandom_range(1, 8192));
        prod[d]   = addr_t'($urandom_range(0, 1 << 30));
        if (d < rank) begin
          if (d == 0 || stride[d] < lead) er += longint'(prod[d]);
          else ec += longint'(prod[d]);
        end
      end
      #1; checks++;
      if (longint'(row_sum) != er || longint'(col_sum) != ec) begin
        failures++; $display("rand %0d: i=%0d/%0d Kj=%0d/%0d", t, row_sum, er, col_sum, ec);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
