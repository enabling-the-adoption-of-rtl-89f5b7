// tb_lazypim_pim_unit: plays the L1 cache and the processor-side detector
// around one PIM unit. Checks: dispatch starts speculation and records the
// checkpoint PC; kernel reads/writes reach the PIMReadSet/PIMWriteSet;
// finishing raises fin_req on the next cycle; a rollback drops speculative
// lines, clears the signatures and restarts at the checkpoint one cycle
// later; in lock mode the PIMReadSet survives the rollback; a speculative
// eviction also rolls back; a commit triggers the L1 write-back and ends
// the kernel when it is done.
module tb_lazypim_pim_unit;
  import lazypim_pkg::*;
  timeunit 1ns;
  timeprecision 10ps;
  localparam int NF = 4;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic k_start = 0, k_end = 0, core_restart, k_done, busy;
  logic [63:0] k_start_pc = '0, restart_pc;
  logic l1_spec, l1_commit, l1_rollback, l1_commit_done = 0, l1_spec_evict = 0;
  logic ev_rd = 0, ev_wr = 0;
  laddr_t ev_laddr = '0, q_addr = '0;
  logic fin_req, lock_mode = 0, rs_hit, ws_hit;
  resolve_e resolve = RES_NONE;
  logic [1:0] sig_rd_idx = '0;
  logic [2047:0] rs_filter, ws_filter;
  logic [2:0] rs_used, ws_used;
  logic [31:0] n_rollbacks, n_evict_rollbacks, n_commits;
  int checks = 0, failures = 0;

  lazypim_pim_unit #(.NFILT(NF)) dut (.*);

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  laddr_t ra [10], wa [5];
  task automatic run_body();
    for (int i = 0; i < 10; i++) begin
      @(negedge clk); ev_rd = 1; ev_laddr = ra[i];
      @(negedge clk); ev_rd = 0;
    end
    for (int i = 0; i < 5; i++) begin
      @(negedge clk); ev_wr = 1; ev_laddr = wa[i];
      @(negedge clk); ev_wr = 0;
    end
  endtask
  task automatic finish_kernel();
    @(negedge clk); k_end = 1; @(negedge clk); k_end = 0;
    chk(fin_req, "kernel end offers the signatures on the next cycle");
  endtask
  task automatic pulse_resolve(input resolve_e r, output bit saw_l1);
    @(negedge clk); resolve = r; #0.2;
    saw_l1 = (r == RES_COMMIT) ? l1_commit : l1_rollback;
    @(negedge clk); resolve = RES_NONE;
  endtask

  initial begin
    #200000 $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1);
    $finish;
  end

  initial begin
    bit saw, hit_all;
    for (int i = 0; i < 10; i++) ra[i] = laddr_t'(32'h1000 + i * 97);
    for (int i = 0; i < 5; i++)  wa[i] = laddr_t'(32'h9000 + i * 131);
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    chk(!busy && !l1_spec, "idle after reset");
    k_start = 1; k_start_pc = 64'h4000; @(negedge clk); k_start = 0;
    chk(busy && l1_spec, "dispatch starts speculation");
    run_body();
    hit_all = 1;
    for (int i = 0; i < 10; i++) begin q_addr = ra[i]; #0.1; hit_all &= rs_hit; end
    chk(hit_all, "kernel reads in PIMReadSet");
    hit_all = 1;
    for (int i = 0; i < 5; i++) begin q_addr = wa[i]; #0.1; hit_all &= ws_hit; end
    chk(hit_all, "kernel writes in PIMWriteSet");
    chk(rs_used == 1 && ws_used == 1, "one filter each");
    finish_kernel();
    chk(!l1_spec, "no speculation while waiting for the processor");
    // rollback (no lock)
    pulse_resolve(RES_ROLLBACK, saw);
    chk(saw, "rollback drops L1 speculative lines");
    chk(core_restart && restart_pc == 64'h4000, "core restarts at the checkpoint");
    chk(rs_used == 0 && ws_used == 0, "signatures erased on rollback");
    chk(l1_spec && n_rollbacks == 1, "re-executing speculatively");
    // re-execute, roll back in lock mode: read set kept
    run_body();
    finish_kernel();
    lock_mode = 1;
    pulse_resolve(RES_ROLLBACK, saw);
    chk(saw && rs_used == 1 && ws_used == 0, "lock mode keeps the PIMReadSet");
    // speculative eviction during execution
    @(negedge clk); l1_spec_evict = 1; #0.2;
    chk(l1_rollback, "speculative eviction rolls back");
    @(negedge clk); l1_spec_evict = 0;
    chk(core_restart && n_evict_rollbacks == 1, "restart after speculative eviction");
    lock_mode = 0;
    run_body();
    finish_kernel();
    pulse_resolve(RES_COMMIT, saw);
    chk(saw, "commit starts the L1 write-back");
    chk(busy && !k_done, "kernel not done before write-back ends");
    repeat (5) @(negedge clk);
    l1_commit_done = 1; @(negedge clk); l1_commit_done = 0;
    chk(k_done && n_commits == 1, "kernel done after write-back");
    @(negedge clk);
    chk(!busy && rs_used == 0 && ws_used == 0, "idle with empty signatures");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
