// pim_system: the logic layer of a 3D-stacked memory with the two PIM
// mechanisms of the design. It holds
//  * an IMPICA pointer-chasing accelerator (impica_core), which walks linked
//    data structures next to DRAM and translates their virtual addresses
//    with its own region-based page table, and
//  * LazyPIM coherence support for M general-purpose PIM cores: per core an
//    L1 cache with speculative-write bits and per-word dirty masks
//    (lazypim_l1) and a unit with the kernel checkpoint and the
//    PIMReadSet/PIMWriteSet signatures (lazypim_pim_unit), and, on the
//    processor side of the off-chip link, the conflict detector with the
//    CPUWriteSets (lazypim_conflict_detect).
// Parts the design does not contain are reached through ports: the vault
// memory controllers (IMPICA line reads i_m*, PIM L1 traffic p_m*), the PIM
// cores' pipelines (p_c*, p_k*), and the processor's cache (cpu_*). The two
// mechanisms share no signals; the paper presents them as independent
// solutions to address translation and coherence and does not combine them
// in one evaluated system, so the top only places them side by side.
module pim_system #(
  parameter int unsigned M     = 16,                      // paper: 16 PIM cores (4-16 evaluated)
  parameter int unsigned NFILT = 16,                      // paper: 12KB of signatures per core = 3 x 16 x 256B
  localparam int unsigned FI_W = (NFILT > 1) ? $clog2(NFILT) : 1,
  localparam int unsigned CW   = (M > 1) ? $clog2(M) : 1
) (
  input  logic   clk,
  input  logic   rst_n,
  // ---------------- IMPICA ----------------
  input  logic   i_im_we,
  input  logic [11:0] i_im_addr,
  input  logic [31:0] i_im_wdata,
  input  logic   i_dm_en,
  input  logic   i_dm_we,
  input  logic [10:0] i_dm_addr,
  input  impica_pkg::word_t  i_dm_wdata,
  output impica_pkg::word_t  i_dm_rdata,
  input  logic   i_req_valid,
  output logic   i_req_ready,
  input  impica_pkg::req_t   i_req,
  input  logic   i_rt_we,
  input  logic [1:0] i_rt_idx,
  input  logic   i_rt_valid,
  input  logic [6:0] i_rt_region,
  input  impica_pkg::paddr_t i_rt_flat_base,
  input  logic   i_tlb_flush,
  output logic   i_mreq_valid,
  input  logic   i_mreq_ready,
  output impica_pkg::paddr_t i_mreq_addr,
  output logic [3:0] i_mreq_id,
  input  logic   i_mrsp_valid,
  output logic   i_mrsp_ready,
  input  logic [3:0] i_mrsp_id,
  input  impica_pkg::line_t  i_mrsp_data,
  output logic   i_done_valid,
  output impica_pkg::slot_t  i_done_slot,
  output logic   i_fault,
  output logic [31:0] i_n_ctx_switch,
  output logic [31:0] i_n_walks,
  output logic [31:0] i_n_lock_stalls,
  output logic [31:0] i_n_cache_hits,
  output logic [31:0] i_n_cache_misses,
  // ---------------- LazyPIM: PIM core side ----------------
  input  logic [M-1:0]  p_k_start,
  input  logic [63:0]   p_k_start_pc [M],
  input  logic [M-1:0]  p_k_end,
  output logic [M-1:0]  p_core_restart,
  output logic [63:0]   p_restart_pc [M],
  output logic [M-1:0]  p_k_done,
  output logic [M-1:0]  p_busy,
  input  logic [M-1:0]  p_creq_valid,
  output logic [M-1:0]  p_creq_ready,
  input  logic [M-1:0]  p_creq_we,
  input  logic [31:0]   p_creq_addr [M],
  input  lazypim_pkg::word_t p_creq_wdata [M],
  output logic [M-1:0]  p_crsp_valid,
  output lazypim_pkg::word_t p_crsp_rdata [M],
  output logic [M-1:0]  p_mreq_valid,
  input  logic [M-1:0]  p_mreq_ready,
  output logic [M-1:0]  p_mreq_we,
  output lazypim_pkg::laddr_t p_mreq_laddr [M],
  output lazypim_pkg::line_t  p_mreq_wdata [M],
  output logic [7:0]    p_mreq_wmask [M],
  input  logic [M-1:0]  p_mrsp_valid,
  input  lazypim_pkg::line_t  p_mrsp_data [M],
  output logic [31:0]   p_n_rollbacks [M],
  output logic [31:0]   p_n_evict_rollbacks [M],
  output logic [31:0]   p_n_commits [M],
  // ---------------- LazyPIM: processor side ----------------
  input  logic          cpu_wr_valid,
  input  lazypim_pkg::laddr_t cpu_wr_laddr,
  output logic          cpu_wr_block,
  output lazypim_pkg::cpu_cmd_e cpu_cmd,
  output logic [CW-1:0] cpu_cmd_core,
  input  logic          cpu_cmd_done,
  input  lazypim_pkg::laddr_t cpu_scan_laddr,
  output logic          cpu_scan_hit,
  output logic          dir_lock,
  output logic [31:0]   n_checks,
  output logic [31:0]   n_conflicts,
  output logic [31:0]   n_lock_modes,
  output logic [31:0]   n_sig_bytes
);
  // ---------------- IMPICA accelerator ----------------
  logic [31:0] i_n_pend_max;
  impica_core u_impica (
    .clk, .rst_n,
    .im_we(i_im_we), .im_addr(i_im_addr), .im_wdata(i_im_wdata),
    .h_dm_en(i_dm_en), .h_dm_we(i_dm_we), .h_dm_addr(i_dm_addr), .h_dm_wdata(i_dm_wdata),
    .h_dm_rdata(i_dm_rdata),
    .h_req_valid(i_req_valid), .h_req_ready(i_req_ready), .h_req(i_req),
    .rt_we(i_rt_we), .rt_idx(i_rt_idx), .rt_valid(i_rt_valid), .rt_region(i_rt_region),
    .rt_flat_base(i_rt_flat_base), .tlb_flush(i_tlb_flush),
    .mreq_valid(i_mreq_valid), .mreq_ready(i_mreq_ready), .mreq_addr(i_mreq_addr),
    .mreq_id(i_mreq_id), .mrsp_valid(i_mrsp_valid), .mrsp_ready(i_mrsp_ready),
    .mrsp_id(i_mrsp_id), .mrsp_data(i_mrsp_data),
    .done_valid(i_done_valid), .done_slot(i_done_slot), .fault(i_fault),
    .n_ctx_switch(i_n_ctx_switch), .n_walks(i_n_walks), .n_lock_stalls(i_n_lock_stalls),
    .n_cache_hits(i_n_cache_hits), .n_cache_misses(i_n_cache_misses),
    .n_pend_max(i_n_pend_max));

  // ---------------- LazyPIM ----------------
  lazypim_pkg::resolve_e resolve [M];
  logic [M-1:0]    lock_mode, fin_req, rs_hit, ws_hit;
  logic [FI_W-1:0] sig_rd_idx;
  logic [2047:0]   rs_filter [M];
  logic [2047:0]   ws_filter [M];
  logic [FI_W:0]   rs_used [M];
  logic [FI_W:0]   ws_used [M];
  lazypim_pkg::laddr_t q_addr;

  for (genvar p = 0; p < M; p++) begin : g_pim
    logic spec, commit, rollback, commit_done, spec_evict, ev_rd, ev_wr;
    lazypim_pkg::laddr_t ev_laddr;

    lazypim_l1 u_l1 (
      .clk, .rst_n,
      .creq_valid(p_creq_valid[p]), .creq_ready(p_creq_ready[p]), .creq_we(p_creq_we[p]),
      .creq_addr(p_creq_addr[p]), .creq_wdata(p_creq_wdata[p]),
      .crsp_valid(p_crsp_valid[p]), .crsp_rdata(p_crsp_rdata[p]),
      .spec, .commit, .rollback, .commit_done, .spec_evict, .ev_rd, .ev_wr, .ev_laddr,
      .mreq_valid(p_mreq_valid[p]), .mreq_ready(p_mreq_ready[p]), .mreq_we(p_mreq_we[p]),
      .mreq_laddr(p_mreq_laddr[p]), .mreq_wdata(p_mreq_wdata[p]), .mreq_wmask(p_mreq_wmask[p]),
      .mrsp_valid(p_mrsp_valid[p]), .mrsp_data(p_mrsp_data[p]),
      .n_spec_lines_committed());

    lazypim_pim_unit #(.NFILT(NFILT)) u_unit (
      .clk, .rst_n,
      .k_start(p_k_start[p]), .k_start_pc(p_k_start_pc[p]), .k_end(p_k_end[p]),
      .core_restart(p_core_restart[p]), .restart_pc(p_restart_pc[p]), .k_done(p_k_done[p]),
      .busy(p_busy[p]),
      .l1_spec(spec), .l1_commit(commit), .l1_rollback(rollback),
      .l1_commit_done(commit_done), .l1_spec_evict(spec_evict),
      .ev_rd, .ev_wr, .ev_laddr,
      .fin_req(fin_req[p]), .resolve(resolve[p]), .lock_mode(lock_mode[p]),
      .sig_rd_idx, .rs_filter(rs_filter[p]), .ws_filter(ws_filter[p]),
      .rs_used(rs_used[p]), .ws_used(ws_used[p]),
      .q_addr, .rs_hit(rs_hit[p]), .ws_hit(ws_hit[p]),
      .n_rollbacks(p_n_rollbacks[p]), .n_evict_rollbacks(p_n_evict_rollbacks[p]),
      .n_commits(p_n_commits[p]));
  end

  lazypim_conflict_detect #(.M(M), .NFILT(NFILT)) u_cd (
    .clk, .rst_n,
    .cpu_wr_valid, .cpu_wr_laddr, .cpu_wr_block,
    .k_start(p_k_start),
    .fin_req, .resolve, .lock_mode, .k_done(p_k_done),
    .sig_rd_idx, .rs_filter, .rs_used, .ws_used,
    .q_addr, .rs_hit, .ws_hit,
    .cpu_cmd, .cpu_cmd_core, .cpu_cmd_done, .cpu_scan_laddr, .cpu_scan_hit, .dir_lock,
    .n_checks, .n_conflicts, .n_lock_modes, .n_sig_bytes);
endmodule
