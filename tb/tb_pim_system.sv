// tb_pim_system: end-to-end test of the whole chip,
// in a reduced configuration (4 PIM cores, 2 filters per signature).
// IMPICA: linked-list searches through a region page table with one 2MB
// page, launched concurrently in different data-RAM slots, against an
// out-of-order memory. LazyPIM, at the same time on several PIM cores:
//  core 0  a kernel that shares nothing with the processor and commits;
//  core 1  a kernel that reads a line the processor writes; it rolls back
//          three times, then runs in lock mode where the processor's write
//          is refused, and commits;
//  core 2  a kernel that writes five lines of one L1 set, so a speculative
//          line must be evicted: it rolls back and re-runs with four lines;
//  core 3  a kernel reading 700 distinct lines, more than one 256B filter
//          holds, so its PIMReadSet spills into a second filter.
// Every mechanism is counted; one that never happened is a failure.
module tb_pim_system;
  import impica_pkg::*;
  timeunit 1ns;
  timeprecision 10ps;
  localparam int M  = 4;
  localparam int NF = 2;
  localparam int NODES = 24;
  localparam int NOPS  = 6;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  // ---------------- IMPICA signals ----------------
  logic i_im_we = 0; logic [11:0] i_im_addr = '0; logic [31:0] i_im_wdata = '0;
  logic i_dm_en = 0, i_dm_we = 0; logic [10:0] i_dm_addr = '0; word_t i_dm_wdata = '0, i_dm_rdata;
  logic i_req_valid = 0, i_req_ready; req_t i_req = '0;
  logic i_rt_we = 0, i_rt_valid = 0; logic [1:0] i_rt_idx = '0; logic [6:0] i_rt_region = '0;
  paddr_t i_rt_flat_base = '0;
  logic i_tlb_flush = 0;
  logic i_mreq_valid, i_mreq_ready = 0, i_mrsp_valid = 0, i_mrsp_ready;
  paddr_t i_mreq_addr; logic [3:0] i_mreq_id, i_mrsp_id = '0; line_t i_mrsp_data = '0;
  logic i_done_valid, i_fault; slot_t i_done_slot;
  logic [31:0] i_n_ctx_switch, i_n_walks, i_n_lock_stalls, i_n_cache_hits, i_n_cache_misses;
  // ---------------- LazyPIM signals ----------------
  logic [M-1:0] p_k_start = '0, p_k_end = '0, p_core_restart, p_k_done, p_busy;
  logic [63:0] p_k_start_pc [M], p_restart_pc [M];
  logic [M-1:0] p_creq_valid = '0, p_creq_ready, p_creq_we = '0, p_crsp_valid;
  logic [31:0] p_creq_addr [M];
  lazypim_pkg::word_t p_creq_wdata [M], p_crsp_rdata [M];
  logic [M-1:0] p_mreq_valid, p_mreq_ready = '0, p_mreq_we, p_mrsp_valid = '0;
  lazypim_pkg::laddr_t p_mreq_laddr [M];
  lazypim_pkg::line_t p_mreq_wdata [M], p_mrsp_data [M];
  logic [7:0] p_mreq_wmask [M];
  logic [31:0] p_n_rollbacks [M], p_n_evict_rollbacks [M], p_n_commits [M];
  logic cpu_wr_valid = 0, cpu_wr_block, cpu_cmd_done = 0, cpu_scan_hit, dir_lock;
  lazypim_pkg::laddr_t cpu_wr_laddr = '0, cpu_scan_laddr = '0;
  lazypim_pkg::cpu_cmd_e cpu_cmd;
  logic [$clog2(M)-1:0] cpu_cmd_core;
  logic [31:0] n_checks, n_conflicts, n_lock_modes, n_sig_bytes;

  pim_system #(.M(4), .NFILT(2)) dut (.*);

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
  always @(posedge clk) i_mreq_ready <= ($urandom % 4) != 0;
  always @(posedge clk) begin
    if (rst_n && i_mreq_valid && i_mreq_ready)
      pend.push_back('{a: i_mreq_addr, id: i_mreq_id, due: cyc + 10 + ($urandom % 30)});
  end
  always @(posedge clk) begin
    if (rst_n && i_mrsp_valid && i_mrsp_ready) begin
      i_mrsp_valid <= 1'b0;
    end
    if (rst_n && (!i_mrsp_valid || i_mrsp_ready)) begin
      i_mrsp_valid <= 1'b0;
      foreach (pend[i]) begin
        if (pend[i].due <= cyc) begin
          line_t l;
          for (int w = 0; w < 8; w++) l[w*64 +: 64] = rd64({pend[i].a[PA_W-1:6], 6'h0} + paddr_t'(w*8));
          i_mrsp_valid <= 1'b1; i_mrsp_id <= pend[i].id; i_mrsp_data <= l;
          pend.delete(i);
          break;
        end
      end
    end
  end

  // ---------------- IMPICA program: linked-list search ----------------
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
  int     i_done_n = 0, i_nacc = 0;
  always @(posedge clk) if (rst_n && i_req_valid && i_req_ready) i_nacc++;
  always @(posedge clk) if (rst_n && i_done_valid) i_done_n++;
  task automatic host_wr(int slot, int w, word_t d);
    @(negedge clk); i_dm_en = 1; i_dm_we = 1; i_dm_addr = 11'(slot*16 + w); i_dm_wdata = d;
    @(negedge clk); i_dm_en = 0; i_dm_we = 0;
  endtask
  task automatic host_rd(int slot, int w, output word_t d);
    @(negedge clk); i_dm_en = 1; i_dm_we = 0; i_dm_addr = 11'(slot*16 + w);
    @(negedge clk); i_dm_en = 0; #0.1 d = i_dm_rdata;
  endtask

  task automatic run_impica();
    vaddr_t big;
    for (int i = 0; i < NODES; i++) begin
      node_va[i]  = VBASE + vaddr_t'(i * 48'h3_0040) + vaddr_t'(($urandom % 32) * 16);
      node_key[i] = word_t'(500 + i * 3);
    end
    // the last four nodes live in one 2MB page
    big = VBASE + 48'h0100_0000_0000;
    wr64(FLAT + paddr_t'({big[40:21], 3'b0}), 64'h00_6000_0000 | 64'h3);
    for (int i = NODES - 4; i < NODES; i++) begin
      node_va[i] = big + vaddr_t'((i - NODES + 4) * 48'h4_0000 + 64);
      v2p_page[{node_va[i][47:12], 12'h0}] = 40'h00_6000_0000 + paddr_t'({node_va[i][20:12], 12'h0});
    end
    for (int i = 0; i < NODES - 4; i++) map4k(node_va[i]);
    for (int i = 0; i < NODES; i++) begin
      wr64(v2p(node_va[i]),     node_key[i]);
      wr64(v2p(node_va[i]) + 8, (i == NODES-1) ? '0 : word_t'(node_va[i+1]));
    end
    @(negedge clk); i_rt_we = 1; i_rt_idx = 0; i_rt_valid = 1; i_rt_region = VBASE[47:41]; i_rt_flat_base = FLAT;
    @(negedge clk); i_rt_we = 0;
    for (int i = 0; i < 10; i++) begin
      @(negedge clk); i_im_we = 1; i_im_addr = 12'(i); i_im_wdata = prog[i];
    end
    @(negedge clk); i_im_we = 0;
    for (int s = 0; s < NOPS; s++) begin
      host_wr(s, 0, word_t'(node_va[0]));
      host_wr(s, 1, node_key[NODES - 1 - s]);
      host_wr(s, PARAM_DONE, '0);
    end
    for (int s = 0; s < NOPS; s++) begin
      @(negedge clk); i_req_valid = 1; i_req = '{start_pc: '0, slot: slot_t'(s)};
      while (i_nacc != s + 1) @(negedge clk);
      i_req_valid = 0;
    end
    for (int s = 0; s < NOPS; s++) begin
      word_t flag;
      do begin repeat (20) @(negedge clk); host_rd(s, PARAM_DONE, flag); end while (flag != 1);
    end
    for (int s = 0; s < NOPS; s++) begin
      word_t r;
      host_rd(s, 2, r);
      check(r == word_t'(node_va[NODES - 1 - s]), $sformatf("IMPICA search %0d result", s));
    end
  endtask

  // ---------------- LazyPIM: memory of the PIM cores ----------------
  lazypim_pkg::line_t lmem [lazypim_pkg::laddr_t];
  function automatic lazypim_pkg::word_t lword(logic [31:0] a);
    lazypim_pkg::line_t l;
    l = '0;
    if (lmem.exists(a[31:6])) l = lmem[a[31:6]];
    return l[a[5:3]*64 +: 64];
  endfunction
  always @(posedge clk) p_mreq_ready <= M'({$urandom, $urandom});
  for (genvar p = 0; p < M; p++) begin : g_mem
    initial begin
      p_mrsp_data[p] = '0;
      p_k_start_pc[p] = '0;
      p_creq_addr[p] = '0;
      p_creq_wdata[p] = '0;
      forever begin
        @(negedge clk);
        if (p_mreq_valid[p] && p_mreq_ready[p]) begin
          if (p_mreq_we[p]) begin
            lazypim_pkg::line_t l;
            l = '0;
            if (lmem.exists(p_mreq_laddr[p])) l = lmem[p_mreq_laddr[p]];
            for (int w = 0; w < 8; w++)
              if (p_mreq_wmask[p][w]) l[w*64 +: 64] = p_mreq_wdata[p][w*64 +: 64];
            lmem[p_mreq_laddr[p]] = l;
          end else begin
            lazypim_pkg::laddr_t a;
            a = p_mreq_laddr[p];
            repeat (2 + $urandom % 4) @(negedge clk);
            p_mrsp_data[p] = '0;
            if (lmem.exists(a)) p_mrsp_data[p] = lmem[a];
            p_mrsp_valid[p] = 1;
            @(negedge clk);
            p_mrsp_valid[p] = 0;
          end
        end
      end
    end
  end

  // ---------------- LazyPIM: processor side ----------------
  // the processor cache: dirty PIM-region lines it holds, scanned on command
  lazypim_pkg::laddr_t cpu_dirty [$];
  int n_flush_cmd = 0, n_inval_cmd = 0, n_scan_hits = 0, n_wr_blocked = 0, n_dirlock_cycles = 0;
  always @(posedge clk) if (dir_lock) n_dirlock_cycles++;
  initial begin
    forever begin
      @(negedge clk);
      if (cpu_cmd != lazypim_pkg::CPU_CMD_NONE) begin
        if (cpu_cmd == lazypim_pkg::CPU_CMD_FLUSH_READSET) n_flush_cmd++; else n_inval_cmd++;
        foreach (cpu_dirty[i]) begin
          cpu_scan_laddr = cpu_dirty[i]; #0.2;
          if (cpu_scan_hit) n_scan_hits++;
          @(negedge clk);
        end
        cpu_cmd_done = 1; @(negedge clk); cpu_cmd_done = 0;
      end
    end
  end
  semaphore cpu_wr_sem = new(1);
  task automatic cpu_write(lazypim_pkg::laddr_t a, output bit blocked);
    cpu_wr_sem.get(1);
    @(negedge clk); cpu_wr_valid = 1; cpu_wr_laddr = a; #0.2;
    while (cpu_wr_block && cpu_cmd != lazypim_pkg::CPU_CMD_NONE) begin @(negedge clk); #0.2; end
    blocked = cpu_wr_block;
    if (blocked) n_wr_blocked++;
    @(negedge clk); cpu_wr_valid = 0;
    if (!blocked) cpu_dirty.push_back(a);
    cpu_wr_sem.put(1);
  endtask

  // ---------------- LazyPIM: PIM core driver ----------------
  bit restart_seen [M];
  always @(posedge clk) for (int p = 0; p < M; p++) if (p_core_restart[p]) restart_seen[p] = 1;
  // one access; returns 0 if the kernel was rolled back meanwhile
  task automatic pim_access(int p, bit we, logic [31:0] a, lazypim_pkg::word_t d, output lazypim_pkg::word_t r, output bit ok);
    @(negedge clk);
    p_creq_valid[p] = 1; p_creq_we[p] = we; p_creq_addr[p] = a; p_creq_wdata[p] = d;
    #0.2;
    while (!p_creq_ready[p]) begin @(negedge clk); #0.2; end
    @(posedge clk);
    p_creq_valid[p] <= 0;
    @(negedge clk);
    r = p_crsp_rdata[p];
    repeat (2) @(negedge clk);
    ok = !restart_seen[p];
  endtask
  task automatic kernel_start(int p);
    restart_seen[p] = 0;
    @(negedge clk); p_k_start[p] = 1; p_k_start_pc[p] = 64'(p * 256); @(negedge clk); p_k_start[p] = 0;
  endtask
  // end of kernel: 1 = committed, 0 = rolled back
  task automatic kernel_end(int p, output bit committed);
    @(negedge clk); p_k_end[p] = 1; @(negedge clk); p_k_end[p] = 0;
    while (!p_k_done[p] && !restart_seen[p]) @(negedge clk);
    committed = !restart_seen[p];
    restart_seen[p] = 0;
    if (!committed) check(p_restart_pc[p] == 64'(p * 256), "restart at the kernel's checkpoint");
  endtask

  int core1_attempts = 0, core2_evicts = 0;
  lazypim_pkg::word_t expect_mem [logic [31:0]];
  task automatic run_core0();
    bit ok, c;
    lazypim_pkg::word_t r;
    kernel_start(0);
    for (int i = 0; i < 16; i++) begin
      pim_access(0, 1, 32'h0010_0000 + 32'(i * 72), 64'(1000 + i), r, ok);
      expect_mem[32'h0010_0000 + 32'(i * 72)] = 64'(1000 + i);
    end
    pim_access(0, 0, 32'h0010_0000, 0, r, ok);
    check(r == 1000, "kernel reads its own speculative store");
    check(lword(32'h0010_0000) != 1000, "speculative store not yet in memory");
    kernel_end(0, c);
    check(c, "independent kernel commits");
  endtask
  task automatic run_core1();
    bit ok, c, blk;
    lazypim_pkg::word_t r;
    kernel_start(1);
    c = 0;
    while (!c) begin
      core1_attempts++;
      pim_access(1, 0, 32'h0020_0000, 0, r, ok);
      pim_access(1, 1, 32'h0020_1000, 64'(core1_attempts), r, ok);
      if (core1_attempts <= 3) begin
        cpu_write(26'(32'h0020_0000 >> 6), blk);
        check(!blk, "processor write to a shared line before lock mode");
      end else begin
        cpu_write(26'(32'h0020_0000 >> 6), blk);
        check(blk, "processor write to a locked PIMReadSet line refused");
      end
      kernel_end(1, c);
    end
    expect_mem[32'h0020_1000] = 64'(core1_attempts);
  endtask
  task automatic run_core2();
    bit ok, c;
    lazypim_pkg::word_t r;
    int nlines;
    kernel_start(2);
    nlines = 5;
    c = 0;
    while (!c) begin
      ok = 1;
      for (int t = 0; t < nlines && ok; t++) pim_access(2, 1, 32'h0100_0000 + 32'(t << 14) + 32'h240, 64'(77 + t), r, ok);
      if (!ok) begin
        core2_evicts++;
        nlines = 4;
        restart_seen[2] = 0;
        continue;
      end
      kernel_end(2, c);
    end
    for (int t = 0; t < 4; t++) expect_mem[32'h0100_0000 + 32'(t << 14) + 32'h240] = 64'(77 + t);
  endtask
  int core3_bytes_before;
  task automatic run_core3();
    bit ok, c;
    lazypim_pkg::word_t r;
    kernel_start(3);
    for (int i = 0; i < 700; i++) pim_access(3, 0, 32'h0200_0000 + 32'(i * 64), 0, r, ok);
    pim_access(3, 1, 32'h0300_0000, 64'hABC, r, ok);
    expect_mem[32'h0300_0000] = 64'hABC;
    core3_bytes_before = n_sig_bytes;
    kernel_end(3, c);
    check(c, "large kernel commits");
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int p = 0; p < M; p++) restart_seen[p] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      run_impica();
      run_core0();
      run_core1();
      run_core2();
      run_core3();
    join
    repeat (10) @(negedge clk);
    foreach (expect_mem[a]) check(lword(a) == expect_mem[a], $sformatf("committed data at %h", a));
    $display("IMPICA: ctx=%0d walks=%0d hits=%0d misses=%0d lockstalls=%0d done=%0d",
             i_n_ctx_switch, i_n_walks, i_n_cache_hits, i_n_cache_misses, i_n_lock_stalls, i_done_n);
    $display("LazyPIM: checks=%0d conflicts=%0d lockmodes=%0d sigbytes=%0d flush=%0d inval=%0d scanhits=%0d blocked=%0d core1_attempts=%0d core2_evicts=%0d",
             n_checks, n_conflicts, n_lock_modes, n_sig_bytes, n_flush_cmd, n_inval_cmd, n_scan_hits, n_wr_blocked, core1_attempts, core2_evicts);
    // every mechanism must have happened
    check(i_done_n == NOPS, "IMPICA: all operations completed");
    check(i_n_ctx_switch > 0, "IMPICA: context switches on memory instructions");
    check(i_n_walks > 0, "IMPICA: region page-table walks");
    check(i_n_cache_hits > 0 && i_n_cache_misses > 0, "IMPICA: cache hits and misses");
    check(i_n_lock_stalls > 0, "IMPICA: lookups waiting on locked lines");
    check(!i_fault, "IMPICA: no translation fault");
    check(p_n_commits[0] == 1 && p_n_commits[1] == 1 && p_n_commits[2] == 1 && p_n_commits[3] == 1, "LazyPIM: commits");
    check(p_n_rollbacks[1] == 3, "LazyPIM: three conflict rollbacks on core 1");
    check(n_lock_modes == 1, "LazyPIM: lock mode after three rollbacks");
    check(n_wr_blocked >= 1, "LazyPIM: processor write refused in lock mode");
    check(p_n_evict_rollbacks[2] == 1 && core2_evicts == 1, "LazyPIM: rollback on speculative eviction");
    check(n_conflicts == 3, "LazyPIM: conflicts detected");
    check(n_flush_cmd == 3 && n_inval_cmd >= 4, "LazyPIM: processor flush and invalidate commands");
    check(n_scan_hits > 0, "LazyPIM: processor lines found in a signature");
    check(n_sig_bytes - core3_bytes_before >= 3 * 256, "LazyPIM: large read set spilled into a second filter");
    check(n_dirlock_cycles > 0, "LazyPIM: directory locked during commit/flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
