// tb_impica_hashtable: the hash-table lookup workload on the IMPICA core, a
// scaled copy of a chained hash table with 1.5 items per bucket (256
// buckets, 384 keys; the evaluated table has 2^20 buckets and 1.5 x 2^20
// keys). The bucket array and the item nodes lie in one region, spread over
// 4KB pages; the bucket array sits in a 2MB page. Each lookup hashes the key
// (key mod 256), loads the bucket head and follows the chain; 16 lookups
// run at once in 16 data-RAM slots, four rounds, with present and absent
// keys. Checked: every result against a software lookup, one context switch
// per load, every operation done, cache completion eviction used.
module tb_impica_hashtable;
  import impica_pkg::*;

  localparam int NB    = 256;      // buckets
  localparam int NKEYS = 384;      // 1.5 x buckets, the table's growth limit
  localparam int NOPS  = 16;       // concurrent lookups per round
  localparam int ROUNDS = 4;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic im_we; logic [11:0] im_addr; logic [31:0] im_wdata;
  logic dm_en, dm_we; logic [10:0] dm_addr; word_t dm_wdata, dm_rdata;
  logic req_valid, req_ready; req_t req;
  logic rt_we, rt_valid; logic [1:0] rt_idx; logic [6:0] rt_region; paddr_t rt_flat_base;
  logic mreq_valid, mreq_ready, mrsp_valid, mrsp_ready;
  paddr_t mreq_addr; logic [3:0] mreq_id, mrsp_id; line_t mrsp_data;
  logic done_valid, fault; slot_t done_slot;
  logic [31:0] n_ctx, n_walks, n_lock_stalls, n_hits, n_misses, n_pend_max;

  impica_core dut (
    .clk, .rst_n, .im_we, .im_addr, .im_wdata,
    .h_dm_en(dm_en), .h_dm_we(dm_we), .h_dm_addr(dm_addr), .h_dm_wdata(dm_wdata), .h_dm_rdata(dm_rdata),
    .h_req_valid(req_valid), .h_req_ready(req_ready), .h_req(req),
    .rt_we, .rt_idx, .rt_valid, .rt_region, .rt_flat_base, .tlb_flush(1'b0),
    .mreq_valid, .mreq_ready, .mreq_addr, .mreq_id, .mrsp_valid, .mrsp_ready, .mrsp_id, .mrsp_data,
    .done_valid, .done_slot, .fault, .n_ctx_switch(n_ctx), .n_walks, .n_lock_stalls,
    .n_cache_hits(n_hits), .n_cache_misses(n_misses), .n_pend_max);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
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

  // ---------------- program: hash-table lookup ----------------
  // P0 = bucket array, P1 = key, P2 <- item with that key (0 if none)
  instr_t prog [14];
  initial begin
    prog[0]  = mk(OP_LDP,  1, 0, 0, 0);
    prog[1]  = mk(OP_LDP,  2, 0, 0, 1);
    prog[2]  = mk(OP_ADDI, 4, 0, 0, NB - 1);
    prog[3]  = mk(OP_AND,  3, 2, 4, 0);
    prog[4]  = mk(OP_SLLI, 3, 3, 0, 3);
    prog[5]  = mk(OP_ADD,  3, 3, 1, 0);
    prog[6]  = mk(OP_LD,   1, 3, 0, 0);     // chain head
    prog[7]  = mk(OP_BEQ,  0, 1, 0, 5);     // end of chain
    prog[8]  = mk(OP_LD,   5, 1, 0, 0);     // item key
    prog[9]  = mk(OP_BEQ,  0, 5, 2, 3);     // found
    prog[10] = mk(OP_LD,   1, 1, 0, 8);     // next item
    prog[11] = mk(OP_BEQ,  0, 0, 0, -4);
    prog[12] = mk(OP_STP,  0, 1, 0, 2);
    prog[13] = mk(OP_DONE, 0, 0, 0, 0);
  end

  vaddr_t item_va [NKEYS];
  word_t  item_key [NKEYS];
  vaddr_t head [NB];
  int     ndone = 0, naccepted = 0;
  always @(posedge clk) if (rst_n && req_valid && req_ready) naccepted++;
  always @(posedge clk) if (rst_n && done_valid) ndone++;

  task automatic host_wr(int slot, int w, word_t d);
    @(negedge clk); dm_en = 1; dm_we = 1; dm_addr = 11'(slot*16 + w); dm_wdata = d;
    @(negedge clk); dm_en = 0; dm_we = 0;
  endtask
  task automatic host_rd(int slot, int w, output word_t d);
    @(negedge clk); dm_en = 1; dm_we = 0; dm_addr = 11'(slot*16 + w);
    @(negedge clk); dm_en = 0; #0 d = dm_rdata;
  endtask

  // software lookup, also counting the loads the program will make
  function automatic vaddr_t sw_lookup(word_t key, output int loads);
    vaddr_t p = head[key % NB];
    loads = 1;
    while (p != 0) begin
      int i = -1;
      for (int k = 0; k < NKEYS; k++) if (item_va[k] == p) i = k;
      loads++;
      if (item_key[i] == key) return p;
      loads++;
      p = (rd64(v2p(p) + 8) == 0) ? '0 : vaddr_t'(rd64(v2p(p) + 8));
    end
    return '0;
  endfunction

  localparam vaddr_t BUCKETS = VBASE + 48'h0100_0000_0000;
  int loads_expected = 0;
  initial begin
    im_we = 0; dm_en = 0; dm_we = 0; req_valid = 0; rt_we = 0; rt_valid = 0;
    im_addr = '0; im_wdata = '0; dm_addr = '0; dm_wdata = '0; req = '0;
    mreq_ready = 0; rt_idx = '0; rt_region = '0; rt_flat_base = '0; mrsp_valid = 0; mrsp_id = '0; mrsp_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // bucket array in one 2MB page
    wr64(FLAT + paddr_t'({BUCKETS[40:21], 3'b0}), 64'h00_7000_0000 | 64'h3);
    for (int o = 0; o < NB * 8; o += 4096) v2p_page[BUCKETS + vaddr_t'(o)] = 40'h00_7000_0000 + paddr_t'(o);
    for (int b = 0; b < NB; b++) head[b] = '0;
    // items: distinct random keys, inserted at the chain heads
    for (int i = 0; i < NKEYS; i++) begin
      item_key[i] = word_t'(i * 7919 + ($urandom % 7) * 1000003);
      item_va[i]  = VBASE + vaddr_t'((i / 16) * 48'h2_1000) + vaddr_t'((i % 16) * 32);
      map4k(item_va[i]);
      wr64(v2p(item_va[i]), item_key[i]);
      wr64(v2p(item_va[i]) + 8, word_t'(head[item_key[i] % NB]));
      head[item_key[i] % NB] = item_va[i];
    end
    for (int b = 0; b < NB; b++) wr64(v2p(BUCKETS + vaddr_t'(b * 8)), word_t'(head[b]));
    @(negedge clk); rt_we = 1; rt_idx = 0; rt_valid = 1; rt_region = VBASE[47:41]; rt_flat_base = FLAT;
    @(negedge clk); rt_we = 0;
    for (int i = 0; i < 14; i++) begin
      @(negedge clk); im_we = 1; im_addr = 12'(i); im_wdata = prog[i];
    end
    @(negedge clk); im_we = 0;
    for (int r = 0; r < ROUNDS; r++) begin
      word_t  key [NOPS];
      vaddr_t exp [NOPS];
      for (int s = 0; s < NOPS; s++) begin
        int ld;
        key[s] = ((s % 4) == 3) ? word_t'(5 + 256 * $urandom_range(0, 1000)) * 2 + 1
                                : item_key[$urandom % NKEYS];
        exp[s] = sw_lookup(key[s], ld);
        loads_expected += ld;
        host_wr(s, 0, word_t'(BUCKETS));
        host_wr(s, 1, key[s]);
        host_wr(s, PARAM_DONE, '0);
      end
      for (int s = 0; s < NOPS; s++) begin
        @(negedge clk); req_valid = 1; req = '{start_pc: '0, slot: slot_t'(s)};
        while (naccepted != r * NOPS + s + 1) @(negedge clk);
        req_valid = 0;
      end
      for (int s = 0; s < NOPS; s++) begin
        word_t flag, res;
        do begin repeat (20) @(negedge clk); host_rd(s, PARAM_DONE, flag); end while (flag != 1);
        host_rd(s, 2, res);
        check(res == word_t'(exp[s]), $sformatf("round %0d slot %0d key %0d result %h expected %h", r, s, key[s], res, exp[s]));
      end
    end
    check(ndone == ROUNDS * NOPS, "every lookup completed");
    check(n_ctx == 32'(loads_expected), $sformatf("context switches %0d vs loads %0d", n_ctx, loads_expected));
    check(n_hits + n_misses == 32'(loads_expected), "each load looked up once in the cache");
    check(!fault, "no translation fault");
    $display("lookups=%0d loads=%0d walks=%0d hits=%0d misses=%0d lockstalls=%0d cycles=%0d",
             ROUNDS * NOPS, loads_expected, n_walks, n_hits, n_misses, n_lock_stalls, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
