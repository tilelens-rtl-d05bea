// tb_mixed_mshr: checks the granularity split, merging, stalls and fills of the MSHR.
// The reference keeps its own table of outstanding HBM lines (128 B) and HBF pages (4 KB)
// with their demand-waiter counts and entry ids. Directed: two HBF requests 2 KB apart
// share one entry while two HBM requests 2 KB apart do not; prefetches merge without
// adding a waiter; a full HBF partition and a busy memory port stall the request; a fill
// reports the page and its waiters. Then random traffic is checked against the table.
module tb_mixed_mshr;
  import tilelens_pkg::*;
  localparam int HE = 64, FE = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, req_ready, req_hbf, req_demand, lookup_miss, req_merged;
  addr_t req_addr, hbm_mem_addr, hbf_mem_addr, done_addr;
  logic hbm_mem_valid, hbm_mem_ready, hbf_mem_valid, hbf_mem_ready;
  logic [5:0] hbm_mem_id, hbf_mem_id, fill_id;
  logic fill_valid, fill_ready, fill_hbf, done_ready, done_valid, done_hbf;
  logic [7:0] done_waiters;
  logic [6:0] hbm_used, hbf_used;
  int checks = 0, failures = 0;

  mixed_mshr dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: key = {hbf, tag}
  int ref_wait [longint];
  int ref_id   [longint];
  longint id_key_hbf [int];
  longint id_key_hbm [int];

  function automatic longint key_of(addr_t a, bit hbf);
    return hbf ? ((longint'(a) >> LGMS_LOG2) | (64'd1 << 62)) : (longint'(a) >> LINE_LOG2);
  endfunction

  // Present one request; returns 1 when it was accepted.
  task automatic send(addr_t a, bit hbf, bit demand, output bit accepted);
    longint k;
    bit ok = 1;
    k = key_of(a, hbf);
    @(negedge clk);
    req_valid = 1; req_addr = a; req_hbf = hbf; req_demand = demand;
    #1;
    accepted = req_ready;
    if (ref_wait.exists(k)) begin
      if (!req_ready || lookup_miss || hbm_mem_valid || hbf_mem_valid) ok = 0;
      if (demand) ref_wait[k]++;
    end else if (req_ready) begin
      if (hbf) begin
        if (!hbf_mem_valid || hbm_mem_valid || hbf_mem_addr != {a[47:12], 12'h0}) ok = 0;
        ref_id[k] = int'(hbf_mem_id); id_key_hbf[int'(hbf_mem_id)] = k;
      end else begin
        if (!hbm_mem_valid || hbf_mem_valid || hbm_mem_addr != {a[47:7], 7'h0}) ok = 0;
        ref_id[k] = int'(hbm_mem_id); id_key_hbm[int'(hbm_mem_id)] = k;
      end
      ref_wait[k] = demand ? 1 : 0;
    end
    checks++;
    if (!ok) begin failures++; $display("req %h hbf=%0b: ready=%0b miss=%0b", a, hbf, req_ready, lookup_miss); end
    @(posedge clk); #1;
    req_valid = 0;
  endtask

  task automatic fill(bit hbf, int id);
    longint k;
    k = hbf ? id_key_hbf[id] : id_key_hbm[id];
    @(negedge clk);
    fill_valid = 1; fill_hbf = hbf; fill_id = 6'(id);
    #1;
    checks++;
    if (!done_valid || done_hbf != hbf || done_waiters != 8'(ref_wait[k]) ||
        done_addr != (hbf ? addr_t'((k & ~(64'd1 << 62)) << 12) : addr_t'(k << 7))) begin
      failures++; $display("fill hbf=%0b id=%0d addr=%h waiters=%0d/%0d", hbf, id, done_addr, done_waiters, ref_wait[k]);
    end
    ref_wait.delete(k); ref_id.delete(k);
    if (hbf) id_key_hbf.delete(id); else id_key_hbm.delete(id);
    @(posedge clk); #1;
    fill_valid = 0;
  endtask

  initial begin
    bit acc;
    req_valid = 0; fill_valid = 0; fill_hbf = 0; fill_id = 0; done_ready = 1;
    hbm_mem_ready = 1; hbf_mem_ready = 1; req_addr = '0; req_hbf = 0; req_demand = 1;
    repeat (2) @(posedge clk); rst_n = 1;

    send(48'h1000_0040, 1, 1, acc);        // HBF page alloc
    send(48'h1000_0840, 1, 1, acc);        // same 4 KB page, 2 KB away: merge
    send(48'h1000_0F80, 1, 0, acc);        // prefetch to same page: merge, no waiter
    send(48'h2000_0040, 0, 1, acc);        // HBM line alloc
    send(48'h2000_0060, 0, 1, acc);        // same 128 B line: merge
    send(48'h2000_0840, 0, 1, acc);        // 2 KB away: a new HBM line
    checks++;
    if (hbf_used != 1 || hbm_used != 2) begin failures++; $display("used %0d %0d", hbf_used, hbm_used); end
    fill(1, ref_id[key_of(48'h1000_0000, 1)]);   // 2 waiters
    fill(0, ref_id[key_of(48'h2000_0040, 0)]);
    // fill the HBF partition, then one more page must stall
    for (int p = 0; p < FE; p++) send(addr_t'(48'h3000_0000 + p * 4096), 1, 1, acc);
    begin
      @(negedge clk); req_valid = 1; req_addr = 48'h3100_0000; req_hbf = 1; #1;
      checks++;
      if (req_ready || hbf_mem_valid) begin failures++; $display("full partition not stalled"); end
      // HBM side is unaffected
      req_hbf = 0; #1;
      checks++;
      if (!req_ready) begin failures++; $display("HBM stalled by full HBF partition"); end
      req_valid = 0;
    end
    fill(1, 7);
    send(48'h3100_0000, 1, 1, acc);
    checks++; if (!acc) begin failures++; $display("not accepted after a fill"); end
    // memory port busy
    hbf_mem_ready = 0;
    for (int id = 0; id < FE; id++) if (id_key_hbf.exists(id)) fill(1, id);
    @(negedge clk); req_valid = 1; req_addr = 48'h3200_0000; req_hbf = 1; #1;
    checks++; if (req_ready) begin failures++; $display("port busy not stalled"); end
    req_valid = 0; hbf_mem_ready = 1;
    for (int id = 0; id < HE; id++) if (id_key_hbm.exists(id)) fill(0, id);
    // random traffic
    for (int t = 0; t < 2000; t++) begin
      if ($urandom_range(3) == 0 && (id_key_hbf.num() + id_key_hbm.num()) > 0) begin
        int id; bit h;
        h = (id_key_hbf.num() > 0) && ($urandom_range(1) == 1 || id_key_hbm.num() == 0);
        if (h) void'(id_key_hbf.first(id)); else void'(id_key_hbm.first(id));
        repeat ($urandom_range(0, 3)) if (h) void'(id_key_hbf.next(id)); else void'(id_key_hbm.next(id));
        fill(h, id);
      end else begin
        send(addr_t'(48'h4000_0000 + $urandom_range(0, 95) * 1024 + $urandom_range(0, 7) * 16),
             $urandom_range(1), $urandom_range(3) != 0, acc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
