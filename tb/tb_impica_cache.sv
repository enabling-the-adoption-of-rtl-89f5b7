// tb_impica_cache: exercises the IMPICA cache's three policies on one set of
// a 32KB 2-way cache: line locking (a set with both lines locked refuses a
// new line; reading the word unlocks it only for the owning request ID),
// eviction of an operation's lines when it completes, and root priority (a
// non-root line is replaced before a root line). Read data is checked
// against the filled lines.
module tb_impica_cache;
  import impica_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  paddr_t lk_pa, fill_pa, rd_pa;
  logic lk_hit, lk_can_alloc, hit_lock, alloc, alloc_root, fill, rd_en, evict_en;
  logic lk_way, lk_victim, alloc_way, fill_way;
  slot_t hit_rid, alloc_rid, rd_rid, evict_rid;
  line_t fill_data; word_t rd_data;
  logic [31:0] n_hits, n_misses, n_evict_done;
  impica_cache #(.BYTES(32768), .WAYS(2)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask

  function automatic line_t pattern(paddr_t a);
    line_t l; for (int w = 0; w < 8; w++) l[w*64 +: 64] = {a[31:0], 32'(w)} ^ 64'hA5A5_0000_0000_0000; return l;
  endfunction
  // bring a line in for an operation: lookup, reserve the victim, fill it
  task automatic bring(paddr_t a, slot_t rid, logic root, output logic way);
    @(negedge clk); lk_pa = a;
    @(negedge clk);
    way = lk_victim;
    alloc = 1; alloc_way = lk_victim; alloc_rid = rid; alloc_root = root;
    @(negedge clk); alloc = 0;
    fill = 1; fill_pa = a; fill_way = way; fill_data = pattern(a);
    @(negedge clk); fill = 0;
  endtask
  task automatic read(paddr_t a, slot_t rid, output word_t d);
    @(negedge clk); rd_en = 1; rd_pa = a; rd_rid = rid;
    @(negedge clk); rd_en = 0; d = rd_data;
  endtask

  // three addresses in set 5 with different tags
  localparam paddr_t A = 40'h01_0000_0140, B = 40'h02_0000_0140, C = 40'h03_0000_0140;
  initial begin
    automatic logic wa, wb, wc; automatic word_t d;
    {hit_lock, alloc, fill, rd_en, evict_en, alloc_root} = '0;
    lk_pa = '0; fill_pa = '0; rd_pa = '0; alloc_way = 0; fill_way = 0; fill_data = '0;
    hit_rid = '0; alloc_rid = '0; rd_rid = '0; evict_rid = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    bring(A, 7'd1, 1'b1, wa);
    bring(B, 7'd2, 1'b0, wb);
    chk(wa != wb, "second line goes to the other way");
    @(negedge clk); lk_pa = C; @(negedge clk);
    chk(!lk_hit && !lk_can_alloc, "set with both lines locked cannot allocate");
    read(A + 8*3, 7'd9, d);
    chk(d == pattern(A)[3*64 +: 64], "read word 3 of A");
    @(negedge clk); lk_pa = C; @(negedge clk);
    chk(!lk_can_alloc, "read by another request ID does not unlock");
    read(A + 8*3, 7'd1, d);
    read(B, 7'd2, d);
    chk(d == pattern(B)[63:0], "read word 0 of B");
    @(negedge clk); lk_pa = C; @(negedge clk);
    chk(lk_can_alloc && lk_victim == wb, "victim is the non-root line B, not the root line A");
    // hit on A moves it to request 4 and locks it
    @(negedge clk); lk_pa = A; @(negedge clk);
    chk(lk_hit, "A hits");
    hit_lock = 1; hit_rid = 7'd4; @(negedge clk); hit_lock = 0;
    // completion of request 2 drops B
    @(negedge clk); evict_en = 1; evict_rid = 7'd2; @(negedge clk); evict_en = 0;
    @(negedge clk); lk_pa = B; @(negedge clk);
    chk(!lk_hit, "B evicted when its operation completed");
    chk(n_evict_done == 1, "one line evicted");
    // completion of request 4 while A is still locked keeps A
    @(negedge clk); evict_en = 1; evict_rid = 7'd4; @(negedge clk); evict_en = 0;
    @(negedge clk); lk_pa = A; @(negedge clk);
    chk(lk_hit, "locked line survives completion eviction");
    chk(n_hits == 1 && n_misses == 2, "hit/miss counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
