// tb_lazypim_l1: drives the PIM-core L1 with random loads and stores against
// a word-level reference, with a memory model that merges masked
// write-backs. Checks: normal loads/stores with evictions; stores inside a
// kernel stay out of memory until commit; rollback restores the pre-kernel
// values; commit writes exactly the speculative words and finishes within
// one scan of all lines plus the write-backs; evicting a speculative line
// raises spec_evict; a hit load answers one cycle after it is taken.
module tb_lazypim_l1;
  timeunit 1ns;
  timeprecision 10ps;
  import lazypim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic creq_valid = 0, creq_ready, creq_we = 0;
  logic [PA_W-1:0] creq_addr = '0;
  word_t creq_wdata = '0, crsp_rdata;
  logic crsp_valid;
  logic spec = 0, commit = 0, rollback = 0, commit_done, spec_evict, ev_rd, ev_wr;
  laddr_t ev_laddr;
  logic mreq_valid, mreq_ready, mreq_we;
  laddr_t mreq_laddr;
  line_t mreq_wdata;
  logic [WPL-1:0] mreq_wmask;
  logic mrsp_valid = 0;
  line_t mrsp_data = '0;
  logic [31:0] n_spec_lines_committed;
  int checks = 0, failures = 0;

  lazypim_l1 dut (.*);

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // memory: lines, masked write merge, read answered 3..6 cycles later
  line_t mem [laddr_t];
  int n_mem_wr = 0;
  always @(posedge clk) mreq_ready <= ($urandom % 3) != 0;
  // sampled at the falling edge: a handshake seen there completes at the
  // next rising edge
  initial begin
    forever begin
      @(negedge clk);
      if (mreq_valid && mreq_ready) begin
        if (mreq_we) begin
          line_t l;
          l = mem.exists(mreq_laddr) ? mem[mreq_laddr] : '0;
          for (int w = 0; w < WPL; w++)
            if (mreq_wmask[w]) l[w*WORD_W +: WORD_W] = mreq_wdata[w*WORD_W +: WORD_W];
          mem[mreq_laddr] = l;
          n_mem_wr++;
        end else begin
          laddr_t a;
          a = mreq_laddr;
          repeat (2 + $urandom % 4) @(negedge clk);
          mrsp_data  = mem.exists(a) ? mem[a] : '0;
          mrsp_valid = 1;
          @(negedge clk);
          mrsp_valid = 0;
        end
      end
    end
  end

  function automatic word_t mem_word(logic [PA_W-1:0] a);
    line_t l = mem.exists(a[PA_W-1:6]) ? mem[a[PA_W-1:6]] : '0;
    return l[a[5:3]*WORD_W +: WORD_W];
  endfunction

  word_t gold [logic [PA_W-1:0]];
  function automatic word_t gval(logic [PA_W-1:0] a);
    if (gold.exists(a)) return gold[a];
    return '0;
  endfunction
  int n_ev_rd = 0, n_ev_wr = 0;
  always @(negedge clk) begin
    #0.5;
    if (ev_rd) n_ev_rd++;
    if (ev_wr) n_ev_wr++;
  end

  // addresses: 6 sets x 7 tags x 8 words, so sets overflow their 4 ways
  function automatic logic [PA_W-1:0] rnd_addr();
    int s = $urandom % 6, t = $urandom % 7, w = $urandom % 8;
    return PA_W'((t << 14) | ((s * 37) << 6) | (w << 3));
  endfunction

  // one access; returns 1 if it completed, 0 if spec_evict was raised
  task automatic access(input bit we, input logic [PA_W-1:0] a, input word_t d, output word_t rd, output bit ok);
    @(negedge clk);
    creq_valid = 1; creq_we = we; creq_addr = a; creq_wdata = d;
    #0.2;
    while (!creq_ready) begin @(negedge clk); #0.2; end
    @(posedge clk);
    creq_valid <= 0;
    @(negedge clk);
    ok = 1;
    if (spec_evict) begin ok = 0; return; end
    if (!we) begin
      chk(crsp_valid, "load answers one cycle after it is taken");
      rd = crsp_rdata;
    end
  endtask

  initial begin
    #4000000 $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1);
    $finish;
  end

  initial begin
    word_t r, v;
    bit ok;
    logic [PA_W-1:0] a;
    word_t pre [logic [PA_W-1:0]];
    int t0, nsw, wr0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. plain traffic
    for (int i = 0; i < 600; i++) begin
      a = rnd_addr();
      if ($urandom % 2) begin
        v = {$urandom, $urandom};
        access(1, a, v, r, ok); gold[a] = v;
      end else begin
        access(0, a, 0, r, ok);
        begin chk(r == gval(a), "plain load returns last store"); end
      end
    end
    chk(n_ev_rd == 0 && n_ev_wr == 0, "no signature events outside a kernel");
    // 2. kernel with stores, then rollback
    pre = gold;
    spec = 1;
    wr0 = n_mem_wr;
    nsw = 0;
    for (int i = 0; i < 40; i++) begin
      // stay inside 3 tags of each set so no speculative line must leave
      a = PA_W'((($urandom % 3) << 14) | ((($urandom % 6) * 37) << 6) | (($urandom % 8) << 3));
      if ($urandom % 2) begin
        v = {$urandom, $urandom};
        access(1, a, v, r, ok);
        if (!ok) begin chk(0, "unexpected spec_evict"); break; end
        gold[a] = v; nsw++;
      end else begin
        access(0, a, 0, r, ok);
        chk(r == gval(a), "kernel load sees own stores");
      end
    end
    $display("kernel: %0d stores (%0d reported), %0d loads (%0d reported)", nsw, n_ev_wr, 40 - nsw, n_ev_rd);
    chk(n_ev_wr == nsw, "every kernel store reported to the write set");
    chk(n_ev_rd == 40 - nsw, "every kernel load reported to the read set");
    foreach (gold[k]) begin
      word_t p0;
      p0 = '0;
      if (pre.exists(k)) p0 = pre[k];
      if (gold[k] != p0) chk(mem_word(k) != gold[k], "speculative data kept out of memory");
    end
    @(negedge clk); rollback = 1; @(negedge clk); rollback = 0; spec = 0;
    gold = pre;
    foreach (gold[k]) begin
      access(0, k, 0, r, ok);
      chk(r == gold[k], "rollback restores pre-kernel value");
      if (r != gold[k]) $display("  a=%h got %h exp %h mem %h", k, r, gold[k], mem_word(k));
    end
    // 3. kernel with stores, then commit
    spec = 1;
    for (int i = 0; i < 30; i++) begin
      a = PA_W'((($urandom % 3) << 14) | ((($urandom % 6) * 37) << 6) | (($urandom % 8) << 3));
      v = {$urandom, $urandom};
      access(1, a, v, r, ok); gold[a] = v;
    end
    @(negedge clk); commit = 1; t0 = $time; @(negedge clk); commit = 0;
    wait (commit_done);
    spec = 0;
    $display("commit scan took %0d cycles, %0d lines", ($time - t0) / 2, n_spec_lines_committed);
    chk(($time - t0) / 2 <= 1024 + 4 * 18 + 8, "commit within one scan plus write-backs");
    chk(n_spec_lines_committed > 0 && n_spec_lines_committed <= 18, "committed lines counted");
    @(negedge clk);
    // 4. speculative eviction: 5 tags in one set
    spec = 1;
    for (int t = 0; t < 4; t++) begin
      access(1, PA_W'((t + 8) << 14 | (5 << 6)), 64'hA, r, ok);
      chk(ok, "speculative store within the set's ways");
    end
    access(0, PA_W'(12 << 14 | (5 << 6)), 0, r, ok);
    chk(!ok, "fifth line in a full speculative set raises spec_evict");
    @(negedge clk); rollback = 1; @(negedge clk); rollback = 0; spec = 0;
    // after rollback, committed data still correct everywhere
    foreach (gold[k]) begin
      access(0, k, 0, r, ok);
      chk(r == gold[k], "value after commit and later rollback");
    end
    // 5. commit writes speculative words to memory
    spec = 1;
    access(1, PA_W'(20 << 14 | (3 << 6) | (2 << 3)), 64'hFEED, r, ok);
    chk(mem_word(PA_W'(20 << 14 | (3 << 6) | (2 << 3))) != 64'hFEED, "not in memory before commit");
    @(negedge clk); commit = 1; @(negedge clk); commit = 0;
    wait (commit_done); spec = 0;
    @(negedge clk);
    chk(mem_word(PA_W'(20 << 14 | (3 << 6) | (2 << 3))) == 64'hFEED, "in memory after commit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
