// lazypim_conflict_detect: LazyPIM's processor-side hardware, next to the
// shared last-level cache. It keeps one CPUWriteSet signature per PIM core
// (processor writes to the PIM data region while that core's kernel is
// live; the processor also feeds in its dirty PIM lines when the kernel
// starts) and resolves each finished kernel in turn:
//  1. read the core's PIMReadSet, one 256B filter at a time, and intersect
//     every used filter with every used filter of its CPUWriteSet; two
//     filters overlap when every partition has a common bit;
//  2a. no overlap: ask the processor cache to invalidate the lines that hit
//     the PIMWriteSet, lock the PIM data directory entries, tell the core
//     to commit, wait until its write-back is done, erase the CPUWriteSet;
//  2b. overlap: lock the directory, ask the processor cache to write back
//     its dirty lines that hit the PIMReadSet, tell the core to roll back,
//     erase the CPUWriteSet. After LOCK_AFTER rollbacks of the same kernel
//     the core keeps its PIMReadSet and processor writes to lines in it are
//     refused (cpu_wr_block) until the kernel commits, so it cannot roll
//     back again.
// The processor cache is not part of this design: it receives cpu_cmd, scans
// its lines using q_addr/q_hit (membership in the selected core's signature)
// and answers cpu_cmd_done. While a scan runs, q_addr belongs to it and all
// PIM-region writes are refused.
// Follows the paper: the three signatures, the order of the commit and
// rollback steps, locking during commit/flush, locking after three
// rollbacks. Own choices: one kernel is resolved at a time (round robin),
// one filter pair per cycle, and the command/query handshake to the cache.
module lazypim_conflict_detect
  import lazypim_pkg::*;
#(
  parameter int unsigned M          = 16,                 // paper: up to 16 PIM cores
  parameter int unsigned NFILT      = 16,                 // paper: 12KB per core = 3 x 16 x 256B
  parameter int unsigned BITS       = 2048,               // paper: 256B
  parameter int unsigned K          = 4,                  // partitions (assumed)
  parameter int unsigned LOCK_AFTER = 3,                  // paper: three rollbacks
  localparam int unsigned FI_W      = (NFILT > 1) ? $clog2(NFILT) : 1,
  localparam int unsigned CW        = (M > 1) ? $clog2(M) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // processor writes to the PIM data region (page flag bit already checked)
  input  logic             cpu_wr_valid,
  input  laddr_t           cpu_wr_laddr,
  output logic             cpu_wr_block,
  // kernel launches, to start a fresh CPUWriteSet
  input  logic [M-1:0]     k_start,
  // PIM units
  input  logic [M-1:0]     fin_req,
  output resolve_e         resolve [M],
  output logic [M-1:0]     lock_mode,      // to the PIM units
  input  logic [M-1:0]     k_done,
  output logic [FI_W-1:0]  sig_rd_idx,
  input  logic [BITS-1:0]  rs_filter [M],
  input  logic [FI_W:0]    rs_used [M],
  input  logic [FI_W:0]    ws_used [M],
  output laddr_t           q_addr,
  input  logic [M-1:0]     rs_hit,
  input  logic [M-1:0]     ws_hit,
  // processor cache
  output cpu_cmd_e         cpu_cmd,
  output logic [CW-1:0]    cpu_cmd_core,
  input  logic             cpu_cmd_done,
  input  laddr_t           cpu_scan_laddr,
  output logic             cpu_scan_hit,
  output logic             dir_lock,
  // statistics
  output logic [31:0]      n_checks,
  output logic [31:0]      n_conflicts,
  output logic [31:0]      n_lock_modes,
  output logic [31:0]      n_sig_bytes
);
  typedef enum logic [2:0] {C_IDLE, C_CMP, C_FLUSH, C_INVAL, C_COMMIT} cstate_e;

  cstate_e        st;
  logic [CW-1:0]  cur;
  logic [FI_W:0]  i_idx, j_idx;
  logic [1:0]     nroll [M];
  logic [M-1:0]   live;
  logic [M-1:0]   lock_q;

  // CPUWriteSets
  logic [BITS-1:0] cw_filter [M];
  logic [FI_W:0]   cw_used   [M];
  logic [M-1:0]    cw_clear;
  logic [M-1:0]    cw_hit_unused;
  for (genvar p = 0; p < M; p++) begin : g_cw
    bloom_signature #(.BITS(BITS), .K(K), .NFILT(NFILT)) u_cw (
      .clk, .rst_n, .clear(cw_clear[p]),
      .ins(cpu_wr_valid && !cpu_wr_block && live[p]), .ins_addr(cpu_wr_laddr),
      .q_addr(cpu_wr_laddr), .q_hit(cw_hit_unused[p]),
      .rd_idx(j_idx[FI_W-1:0]), .rd_filter(cw_filter[p]), .n_used(cw_used[p]),
      .overflow(), .n_inserted());
  end

  function automatic logic overlap(logic [BITS-1:0] a, logic [BITS-1:0] b);
    logic [BITS-1:0] x = a & b;
    for (int k = 0; k < K; k++) if (x[k*(BITS/K) +: BITS/K] == '0) return 1'b0;
    return 1'b1;
  endfunction

  wire scanning = (st == C_FLUSH) || (st == C_INVAL);
  assign sig_rd_idx   = i_idx[FI_W-1:0];
  assign q_addr       = scanning ? cpu_scan_laddr : cpu_wr_laddr;
  assign cpu_scan_hit = (st == C_FLUSH) ? rs_hit[cur] : ws_hit[cur];
  assign cpu_cmd      = (st == C_FLUSH) ? CPU_CMD_FLUSH_READSET :
                        (st == C_INVAL) ? CPU_CMD_INVAL_WRITESET : CPU_CMD_NONE;
  assign cpu_cmd_core = cur;
  assign dir_lock     = scanning || (st == C_COMMIT);
  assign cpu_wr_block = cpu_wr_valid && (scanning || |(lock_q & rs_hit));
  // the rollback that reaches LOCK_AFTER already keeps the PIMReadSet
  wire lock_now = (32'(nroll[cur]) + 1 >= LOCK_AFTER);
  always_comb begin
    lock_mode = lock_q;
    if (st == C_FLUSH && cpu_cmd_done && lock_now) lock_mode[cur] = 1'b1;
  end

  // round-robin choice of the next finished kernel
  logic          any_fin;
  logic [CW-1:0] pick;
  always_comb begin
    any_fin = 1'b0;
    pick    = '0;
    for (int o = 1; o <= M; o++) begin
      automatic int p = (int'(cur) + o) % M;
      if (!any_fin && fin_req[p]) begin
        any_fin = 1'b1;
        pick    = CW'(p);
      end
    end
  end

  wire cmp_hit = overlap(rs_filter[cur], cw_filter[cur]);
  wire last_j  = (j_idx + 1'b1 >= cw_used[cur]);
  wire last_i  = (i_idx + 1'b1 >= rs_used[cur]);

  always_comb begin
    for (int p = 0; p < M; p++) begin
      resolve[p]  = RES_NONE;
      cw_clear[p] = k_start[p];
    end
    if (st == C_INVAL && cpu_cmd_done) resolve[cur] = RES_COMMIT;
    if (st == C_FLUSH && cpu_cmd_done) begin
      resolve[cur]  = RES_ROLLBACK;
      cw_clear[cur] = 1'b1;
    end
    if (st == C_COMMIT && k_done[cur]) cw_clear[cur] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st           <= C_IDLE;
      cur          <= '0;
      i_idx        <= '0;
      j_idx        <= '0;
      lock_q       <= '0;
      live         <= '0;
      n_checks     <= '0;
      n_conflicts  <= '0;
      n_lock_modes <= '0;
      n_sig_bytes  <= '0;
      for (int p = 0; p < M; p++) nroll[p] <= '0;
    end else begin
      live <= (live | k_start) & ~(k_done);
      unique case (st)
        C_IDLE: if (any_fin) begin
          cur         <= pick;
          i_idx       <= '0;
          j_idx       <= '0;
          n_checks    <= n_checks + 1;
          n_sig_bytes <= n_sig_bytes + (32'(rs_used[pick]) + 32'(ws_used[pick])) * (BITS / 8);
          st          <= C_CMP;
        end
        C_CMP: begin
          if (rs_used[cur] == '0 || cw_used[cur] == '0) begin
            st <= C_INVAL;                       // an empty set cannot overlap
          end else if (cmp_hit) begin
            n_conflicts <= n_conflicts + 1;
            st          <= C_FLUSH;
          end else if (last_j) begin
            j_idx <= '0;
            if (last_i) st <= C_INVAL;
            else        i_idx <= i_idx + 1'b1;
          end else begin
            j_idx <= j_idx + 1'b1;
          end
        end
        C_FLUSH: if (cpu_cmd_done) begin
          if (lock_now && !lock_q[cur]) begin
            lock_q[cur]  <= 1'b1;
            n_lock_modes   <= n_lock_modes + 1;
          end
          if (nroll[cur] != 2'b11) nroll[cur] <= nroll[cur] + 1'b1;
          st <= C_IDLE;
        end
        C_INVAL: if (cpu_cmd_done) st <= C_COMMIT;
        C_COMMIT: if (k_done[cur]) begin
          lock_q[cur]    <= 1'b0;
          nroll[cur]     <= '0;
          st             <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

endmodule
