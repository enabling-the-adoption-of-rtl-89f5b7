// tb_impica_core: end-to-end test of the IMPICA accelerator. The testbench
// plays the host, the operating system and the memory controller. It builds
// a linked list in a simulated memory whose virtual pages are scattered over
// physical frames through a region-based page table (flat table plus 4KB
// tables, and one 2MB page), loads a list-search program into the
// instruction RAM, and launches several searches at once in different data
// RAM slots. The memory answers line reads after a random latency, out of
// order. Checked: every search returns the node address a software model
// finds, completion flags, one context switch per load, page walks happen,
// the number of cache misses is bounded by the lines touched.
module tb_impica_core;
  import impica_pkg::*;

  localparam int NODES = 40;
  localparam int NOPS  = 8;

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

  // ---------------- program: linked-list search ----------------
  // P0 = head, P1 = key, P2 <- node with that key (0 if none)
  instr_t prog [10];
  initial begin
    prog[0] = mk(OP_LDP, 1, 0, 0, 0);
    prog[1] = mk(OP_LDP, 2, 0, 0, 1);
    prog[2] = mk(OP_BEQ, 0, 1, 0, 6);
    prog[3] = mk(OP_LD,  3, 1, 0, 0);
    prog[4] = mk(OP_BEQ, 0, 3, 2, 4);
    prog[5] = mk(OP_LD,  1, 1, 0, 8);
    prog[6] = mk(OP_BEQ, 0, 0, 0, -4);
    prog[7] = mk(OP_DONE, 0, 0, 0, 0);
    prog[8] = mk(OP_STP, 0, 1, 0, 2);
    prog[9] = mk(OP_DONE, 0, 0, 0, 0);
  end

  vaddr_t node_va [NODES];
  word_t  node_key [NODES];
  int     loads_expected = 0;
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

  initial begin
    im_we = 0; dm_en = 0; dm_we = 0; req_valid = 0; rt_we = 0; rt_valid = 0;
    im_addr = '0; im_wdata = '0; dm_addr = '0; dm_wdata = '0; req = '0;
    mreq_ready = 0; rt_idx = '0; rt_region = '0; rt_flat_base = '0; mrsp_valid = 0; mrsp_id = '0; mrsp_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // build the list: nodes spread over many pages
    for (int i = 0; i < NODES; i++) begin
      node_va[i]  = VBASE + vaddr_t'(i * 48'h3_0040) + vaddr_t'(($urandom % 32) * 16);
      node_key[i] = word_t'(1000 + i * 7);
      map4k(node_va[i]);
    end
    for (int i = 0; i < NODES; i++) begin
      wr64(v2p(node_va[i]),     node_key[i]);
      wr64(v2p(node_va[i]) + 8, (i == NODES-1) ? '0 : word_t'(node_va[i+1]));
    end
    // OS: region table entry 0
    @(negedge clk); rt_we = 1; rt_idx = 0; rt_valid = 1; rt_region = VBASE[47:41]; rt_flat_base = FLAT;
    @(negedge clk); rt_we = 0;
    // load code
    for (int i = 0; i < 10; i++) begin
      @(negedge clk); im_we = 1; im_addr = 12'(i); im_wdata = prog[i];
    end
    @(negedge clk); im_we = 0;
    // launch NOPS searches; the last looks for a missing key
    for (int s = 0; s < NOPS; s++) begin
      int tgt = (s == NOPS-1) ? -1 : (NODES - 1 - 3*s);
      host_wr(s, 0, word_t'(node_va[0]));
      host_wr(s, 1, (tgt < 0) ? 64'd5 : node_key[tgt]);
      host_wr(s, PARAM_DONE, '0);
      loads_expected += (tgt < 0) ? 2*NODES : 2*tgt + 1;
    end
    for (int s = 0; s < NOPS; s++) begin
      @(negedge clk); req_valid = 1; req = '{start_pc: '0, slot: slot_t'(s)};
      while (naccepted != s + 1) @(negedge clk);
      req_valid = 0;
    end
    // poll for completion, as the host would
    begin
      automatic word_t flag;
      for (int s = 0; s < NOPS; s++) begin
        do begin repeat (20) @(negedge clk); host_rd(s, PARAM_DONE, flag); end while (flag != 1);
      end
    end
    for (int s = 0; s < NOPS; s++) begin
      word_t r;
      int tgt = (s == NOPS-1) ? -1 : (NODES - 1 - 3*s);
      host_rd(s, 2, r);
      check(r == ((tgt < 0) ? '0 : word_t'(node_va[tgt])), $sformatf("slot %0d result %h", s, r));
    end
    check(ndone == NOPS, "completions");
    check(n_ctx == 32'(loads_expected), $sformatf("context switches %0d vs loads %0d", n_ctx, loads_expected));
    check(n_hits + n_misses == 32'(loads_expected), "each load looked up once");
    check(n_walks > 0 && n_walks <= 32'(NODES), $sformatf("page walks %0d", n_walks));
    check(n_misses >= 32'(NODES) && n_misses <= 32'(loads_expected), $sformatf("misses %0d", n_misses));
    check(n_pend_max > 1, $sformatf("outstanding reads %0d", n_pend_max));
    check(!fault, "no translation fault");
    $display("ctx=%0d walks=%0d hits=%0d misses=%0d lockstalls=%0d pendmax=%0d cycles=%0d",
             n_ctx, n_walks, n_hits, n_misses, n_lock_stalls, n_pend_max, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
