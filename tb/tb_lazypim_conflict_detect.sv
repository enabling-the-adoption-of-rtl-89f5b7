// tb_lazypim_conflict_detect: two PIM cores whose PIMReadSets are real
// signature instances; the processor cache is played by the testbench.
// Checks: a kernel whose reads miss the processor's writes commits (cache
// invalidate command first, commit only after it is done, directory locked
// meanwhile); a kernel that read a line the processor wrote rolls back
// (flush command, rollback, CPUWriteSet erased); PIM-region writes are held
// off during the scan; after three rollbacks lock mode is set and writes to
// lines in the PIMReadSet are refused, other writes pass, and the next
// check commits; a one-filter compare takes one cycle.
module tb_lazypim_conflict_detect;
  import lazypim_pkg::*;
  timeunit 1ns;
  timeprecision 10ps;
  localparam int M = 2, NF = 2;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic cpu_wr_valid = 0, cpu_wr_block;
  laddr_t cpu_wr_laddr = '0;
  logic [M-1:0] k_start = '0, fin_req = '0, lock_mode, k_done = '0, rs_hit, ws_hit;
  resolve_e resolve [M];
  logic [0:0] sig_rd_idx;
  logic [2047:0] rs_filter [M];
  logic [1:0] rs_used [M], ws_used [M];
  laddr_t q_addr;
  cpu_cmd_e cpu_cmd;
  logic [0:0] cpu_cmd_core;
  logic cpu_cmd_done = 0, cpu_scan_hit, dir_lock;
  laddr_t cpu_scan_laddr = '0;
  logic [31:0] n_checks, n_conflicts, n_lock_modes, n_sig_bytes;
  int checks = 0, failures = 0;

  lazypim_conflict_detect #(.M(M), .NFILT(NF)) dut (.*);

  // PIM-side read sets
  logic [M-1:0] rs_ins = '0, rs_clr = '0;
  laddr_t rs_addr = '0;
  for (genvar p = 0; p < M; p++) begin : g_rs
    bloom_signature #(.NFILT(NF)) u (
      .clk, .rst_n, .clear(rs_clr[p]), .ins(rs_ins[p]), .ins_addr(rs_addr),
      .q_addr, .q_hit(rs_hit[p]), .rd_idx(sig_rd_idx), .rd_filter(rs_filter[p]),
      .n_used(rs_used[p]), .overflow(), .n_inserted());
    assign ws_used[p] = 2'd1;
    assign ws_hit[p]  = (q_addr == laddr_t'(26'h77));
  end

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  task automatic pim_read(input int p, input laddr_t a);
    @(negedge clk); rs_ins[p] = 1; rs_addr = a; @(negedge clk); rs_ins[p] = 0;
  endtask
  task automatic cpu_write(input laddr_t a, output bit blocked);
    @(negedge clk); cpu_wr_valid = 1; cpu_wr_laddr = a; #0.2;
    blocked = cpu_wr_block;
    @(negedge clk); cpu_wr_valid = 0;
  endtask
  // one kernel check; returns what was decided
  task automatic check_kernel(input int p, output resolve_e r, output int cmp_cycles, output bit wr_held, output bit scan_hit77);
    int t0;
    bit b;
    @(negedge clk); fin_req[p] = 1; t0 = $time;
    while (cpu_cmd == CPU_CMD_NONE) @(negedge clk);
    cmp_cycles = ($time - t0) / 2 - 1;
    chk(cpu_cmd_core == p[0] && dir_lock, "command for this core with the directory locked");
    // during the scan: a processor write is refused; probe membership
    cpu_wr_valid = 1; cpu_wr_laddr = 26'h5; #0.2; wr_held = cpu_wr_block; cpu_wr_valid = 0;
    cpu_scan_laddr = (cpu_cmd == CPU_CMD_FLUSH_READSET) ? laddr_t'(26'h1234) : laddr_t'(26'h77); #0.2;
    scan_hit77 = cpu_scan_hit;
    repeat (3) @(negedge clk);
    cpu_cmd_done = 1; #0.2;
    r = resolve[p];
    chk(r != RES_NONE, "decision given when the cache finishes");
    @(negedge clk); cpu_cmd_done = 0; fin_req[p] = 0;
    if (r == RES_COMMIT) begin
      chk(dir_lock, "directory locked until the write-back ends");
      repeat (4) @(negedge clk);
      k_done[p] = 1; @(negedge clk); k_done[p] = 0;
      chk(!dir_lock, "directory unlocked after commit");
    end else begin
      rs_clr[p] = !lock_mode[p]; @(negedge clk); rs_clr[p] = 0;
    end
  endtask

  initial begin
    #200000 $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1);
    $finish;
  end

  initial begin
    resolve_e r;
    int cyc;
    bit held, sh, blk;
    repeat (3) @(posedge clk); rst_n = 1;
    // core 0: no conflict
    @(negedge clk); k_start = 2'b01; @(negedge clk); k_start = 0;
    cpu_write(26'h1234, blk);
    chk(!blk, "write outside any locked set passes");
    pim_read(0, 26'h99);
    pim_read(0, 26'h9a);
    check_kernel(0, r, cyc, held, sh);
    chk(r == RES_COMMIT, "disjoint sets commit");
    chk(cyc == 1, "one filter pair compared in one cycle");
    chk(held, "writes held during the invalidate scan");
    chk(sh, "scan sees PIMWriteSet membership");
    // core 1: reads what the processor wrote -> rollbacks then lock mode
    @(negedge clk); k_start = 2'b10; @(negedge clk); k_start = 0;
    for (int n = 1; n <= 3; n++) begin
      pim_read(1, 26'h1234);
      pim_read(1, 26'h2000);
      cpu_write(26'h1234, blk);
      chk(!blk, "write accepted before lock mode");
      check_kernel(1, r, cyc, held, sh);
      chk(r == RES_ROLLBACK, "conflict rolls back");
      chk(held && sh, "flush scan sees PIMReadSet membership, writes held");
      chk(lock_mode[1] == (n == 3), "lock mode only after three rollbacks");
    end
    chk(n_conflicts == 3 && n_lock_modes == 1, "conflict and lock counters");
    // lock mode: read set kept, writes to it refused
    cpu_write(26'h1234, blk);
    chk(blk, "write to a locked PIMReadSet line refused");
    cpu_write(26'h3333, blk);
    chk(!blk, "write to another line passes");
    check_kernel(1, r, cyc, held, sh);
    chk(r == RES_COMMIT, "locked kernel commits");
    chk(lock_mode[1] == 0, "lock released after commit");
    cpu_write(26'h1234, blk);
    chk(!blk, "line writable again");
    chk(n_checks == 5, "five checks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
