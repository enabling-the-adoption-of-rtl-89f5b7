// tb_impica_access_engine: the access engine with a real IMPICA cache, a
// region table, and a memory model that answers line reads out of order
// after a random delay. The testbench plays the address engine: it pushes
// virtual addresses (tagged with slot and destination register) and, for
// each response, reads the word from the cache (which unlocks the line).
// Pages are 4KB pages through the flat table plus one 2MB page. Checked:
// every response carries the right physical address, slot and register;
// the cached word equals memory; the TLB removes repeated walks (walks at
// most one per distinct page, TLB hits counted); several misses are
// outstanding at once; an address outside every region raises fault.
module tb_impica_access_engine;
  import impica_pkg::*;
  timeunit 1ns;
  timeprecision 10ps;
  localparam int NACC = 120;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic acc_valid = 0, acc_ready, rsp_valid, rsp_ready = 0;
  acc_t acc = '0;
  resp_t rsp;
  logic rt_we = 0, rt_valid = 0; logic [1:0] rt_idx = '0; logic [6:0] rt_region = '0;
  paddr_t rt_flat_base = '0;
  paddr_t c_lk_pa, c_fill_pa;
  logic c_lk_hit, c_can_alloc, c_hit_lock, c_alloc, c_alloc_root, c_fill;
  logic [0:0] c_lk_way, c_victim, c_alloc_way, c_fill_way;
  slot_t c_rid;
  line_t c_fill_data;
  logic mreq_valid, mreq_ready, mrsp_valid, mrsp_ready;
  paddr_t mreq_addr; logic [3:0] mreq_id, mrsp_id; line_t mrsp_data;
  logic fault;
  logic [31:0] n_walks, n_tlb_hits, n_lock_stalls, n_pend_max, n_hits, n_misses, n_evd;
  logic rd_en = 0; paddr_t rd_pa = '0; slot_t rd_rid = '0; word_t rd_data;

  impica_access_engine dut (
    .clk, .rst_n, .acc_valid, .acc_ready, .acc, .rsp_valid, .rsp_ready, .rsp,
    .rt_we, .rt_idx, .rt_valid, .rt_region, .rt_flat_base, .tlb_flush(1'b0),
    .c_lk_pa, .c_lk_hit, .c_lk_can_alloc(c_can_alloc), .c_lk_victim(c_victim),
    .c_hit_lock, .c_rid, .c_alloc, .c_alloc_way, .c_alloc_root,
    .c_fill, .c_fill_pa, .c_fill_way, .c_fill_data,
    .mreq_valid, .mreq_ready, .mreq_addr, .mreq_id, .mrsp_valid, .mrsp_ready, .mrsp_id, .mrsp_data,
    .fault, .n_walks, .n_tlb_hits, .n_lock_stalls, .n_pend_max);
  impica_cache u_cache (
    .clk, .rst_n, .lk_pa(c_lk_pa), .lk_hit(c_lk_hit), .lk_way(c_lk_way), .lk_can_alloc(c_can_alloc),
    .lk_victim(c_victim), .hit_lock(c_hit_lock), .hit_rid(c_rid),
    .alloc(c_alloc), .alloc_way(c_alloc_way), .alloc_rid(c_rid), .alloc_root(c_alloc_root),
    .fill(c_fill), .fill_pa(c_fill_pa), .fill_way(c_fill_way), .fill_data(c_fill_data),
    .rd_en, .rd_pa, .rd_rid, .rd_data, .evict_en(1'b0), .evict_rid('0),
    .n_hits, .n_misses, .n_evict_done(n_evd));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // ---------------- simulated physical memory ----------------
  word_t pmem [paddr_t];                     // word address -> data
  function automatic word_t rd64(paddr_t pa);
    paddr_t k = {pa[PA_W-1:3], 3'b0};
    return pmem.exists(k) ? pmem[k] : '0;
  endfunction
  task automatic wr64(paddr_t pa, word_t d); pmem[{pa[PA_W-1:3], 3'b0}] = d; endtask

  // page table: region 0 covers VA[47:41] = 7'h20
  localparam vaddr_t VBASE   = 48'h4000_0000_0000;
  localparam paddr_t FLAT    = 40'h00_0100_0000;
  paddr_t next_frame = 40'h00_2000_0000;
  paddr_t v2p_page [vaddr_t];                // 4KB page -> frame
  function automatic paddr_t new_frame();
    paddr_t f = next_frame + paddr_t'(($urandom % 64) * 4096);
    next_frame = next_frame + 40'h10_0000;
    return f;
  endfunction
  // map one 4KB page
  task automatic map4k(vaddr_t va);
    paddr_t fe = FLAT + paddr_t'({va[40:21], 3'b0});
    word_t  fl = rd64(fe);
    paddr_t st;
    if (!fl[0]) begin
      st = new_frame();
      wr64(fe, word_t'(st) | 64'h1);
    end else st = {fl[PA_W-1:12], 12'h0};
    if (!v2p_page.exists({va[47:12], 12'h0})) begin
      v2p_page[{va[47:12], 12'h0}] = new_frame();
      wr64(st + paddr_t'({va[20:12], 3'b0}), word_t'(v2p_page[{va[47:12], 12'h0}]) | 64'h1);
    end
  endtask
  function automatic paddr_t v2p(vaddr_t va);
    return v2p_page[{va[47:12], 12'h0}] | paddr_t'(va[11:0]);
  endfunction

  // ---------------- memory controller model ----------------
  typedef struct { paddr_t a; logic [3:0] id; longint due; } mreq_s;
  mreq_s pend [$];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) mreq_ready <= ($urandom % 4) != 0;
  always @(posedge clk) begin
    if (rst_n && mreq_valid && mreq_ready)
      pend.push_back('{a: mreq_addr, id: mreq_id, due: cyc + 10 + ($urandom % 30)});
  end
  always @(posedge clk) begin
    if (rst_n && mrsp_valid && mrsp_ready) begin
      mrsp_valid <= 1'b0;
    end
    if (rst_n && (!mrsp_valid || mrsp_ready)) begin
      mrsp_valid <= 1'b0;
      foreach (pend[i]) begin
        if (pend[i].due <= cyc) begin
          line_t l;
          for (int w = 0; w < 8; w++) l[w*64 +: 64] = rd64({pend[i].a[PA_W-1:6], 6'h0} + paddr_t'(w*8));
          mrsp_valid <= 1'b1; mrsp_id <= pend[i].id; mrsp_data <= l;
          pend.delete(i);
          break;
        end
      end
    end
  end

  // ---------------- test ----------------
  vaddr_t va_of [NACC];
  acc_t   sent [$];
  int nrsp = 0, nacc = 0, ndata_ok = 0;
  always @(posedge clk) if (rst_n && acc_valid && acc_ready) nacc++;
  always @(posedge clk) rsp_ready <= ($urandom % 3) != 0;
  // responses: match to the sent access by slot, then read the word
  always @(posedge clk) begin
    rd_en <= 1'b0;
    if (rst_n && rsp_valid && rsp_ready) begin
      int idx;
      idx = -1;
      foreach (sent[i]) if (idx < 0 && sent[i].slot == rsp.slot) idx = i;
      check(idx >= 0, "response for an outstanding access");
      if (idx >= 0) begin
        check(rsp.pa == v2p(sent[idx].va), "translated physical address");
        check(rsp.rd == sent[idx].rd, "destination register carried");
        sent.delete(idx);
      end
      rd_en <= 1'b1; rd_pa <= rsp.pa; rd_rid <= rsp.slot;
      nrsp++;
    end
  end
  paddr_t rd_pa_q;
  logic   rd_q = 0;
  always @(posedge clk) begin
    rd_q <= rd_en; rd_pa_q <= rd_pa;
    if (rd_q) begin
      check(rd_data == rd64(rd_pa_q), "cached word equals memory");
      ndata_ok++;
    end
  end

  initial begin
    #2000000 $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1);
    $finish;
  end

  int npages;
  initial begin
    vaddr_t pages [8];
    mrsp_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // region 0: VA[47:41] = 7'h20, flat table at FLAT
    @(negedge clk); rt_we = 1; rt_idx = 0; rt_valid = 1; rt_region = 7'h20; rt_flat_base = FLAT;
    @(negedge clk); rt_we = 0;
    // 7 scattered 4KB pages, one 2MB page
    for (int p = 0; p < 7; p++) begin
      pages[p] = VBASE + vaddr_t'(p * 48'h20_3000);
      map4k(pages[p]);
    end
    pages[7] = VBASE + 48'h0100_0000_0000 + 48'h40_0000;
    wr64(FLAT + paddr_t'({pages[7][40:21], 3'b0}), 64'h00_4000_0000 | 64'h3);
    for (int o = 0; o < 4096; o += 512) v2p_page[pages[7] + vaddr_t'(o)] = 40'h00_4000_0000 + paddr_t'(o);
    for (int o = 0; o < 4096; o += 512) v2p_page[pages[7] + vaddr_t'(o) + 48'h1000] = 40'h00_4000_1000 + paddr_t'(o);
    // fill memory words that the accesses will read
    for (int i = 0; i < NACC; i++) begin
      int p;
      p = $urandom % 8;
      va_of[i] = pages[p] + vaddr_t'(($urandom % 4) * 512 + ($urandom % 8) * 8);
      if (p == 7 && ($urandom % 2)) va_of[i] += 48'h1000;
      wr64(v2p(va_of[i]), {$urandom, $urandom});
    end
    // issue: slots 0..15 circulate; a slot is reused only after its response
    for (int i = 0; i < NACC; i++) begin
      acc_t a;
      a.va = va_of[i]; a.slot = slot_t'(i % 16); a.rd = reg_t'(1 + i % 7); a.root = (i % 3 == 0);
      while (1) begin
        bit busy;
        busy = 0;
        foreach (sent[k]) if (sent[k].slot == a.slot) busy = 1;
        if (!busy) break;
        @(negedge clk);
      end
      @(negedge clk);
      sent.push_back(a);
      acc_valid = 1; acc = a;
      while (nacc <= i) @(negedge clk);
      acc_valid = 0;
    end
    while (nrsp < NACC) @(negedge clk);
    repeat (5) @(negedge clk);
    $display("walks=%0d tlb_hits=%0d hits=%0d misses=%0d pend_max=%0d lockstalls=%0d", n_walks, n_tlb_hits, n_hits, n_misses, n_pend_max, n_lock_stalls);
    check(ndata_ok == NACC, "every response read from the cache");
    check(n_walks >= 8 && n_walks <= 9, "one walk per distinct page (2MB page walks once)");
    check(n_tlb_hits >= NACC - 9, "other translations hit the TLB");
    check(n_pend_max >= 2, "several line misses outstanding at once");
    check(!fault, "no fault for mapped addresses");
    // unmapped region
    @(negedge clk); acc_valid = 1; acc.va = 48'h1000_0000_0000; acc.slot = 3;
    while (nacc <= NACC) @(negedge clk);
    acc_valid = 0;
    repeat (20) @(negedge clk);
    check(fault, "address outside every region faults");
    check(nrsp == NACC, "faulting access gets no response");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
