// lazypim_pim_unit: the LazyPIM hardware beside one PIM core. It holds the
// kernel checkpoint (starting PC), the PIMReadSet and PIMWriteSet
// signatures, and the kernel's speculation state:
//   IDLE   -> RUN    on dispatch: checkpoint the PC, L1 stores become speculative
//   RUN             every kernel read/write reported by the L1 enters the
//                   PIMReadSet/PIMWriteSet
//   RUN    -> RUN    a speculative line had to be evicted: drop speculative
//                   lines, clear the PIM signatures, restart at the checkpoint
//   RUN    -> WAIT   the kernel finished: offer both signatures to the
//                   processor's conflict detector (fin_req)
//   WAIT   -> COMMIT detector says commit: L1 writes back its speculative words
//   COMMIT -> IDLE   write-back done, signatures erased, kernel done
//   WAIT   -> RUN    detector says roll back: drop speculative lines, erase
//                   signatures, restart at the checkpoint
// In lock mode (set by the detector after repeated rollbacks) the PIMReadSet
// is kept across the rollback, because the processor uses it to lock those
// lines. The core's registers are checkpointed by the core itself, which is
// not part of this design; restart_pc is given back with core_restart.
// Follows the paper: checkpoint, three-way signature use, commit/rollback,
// roll back on speculative eviction. Own choices: the state machine, the
// pulse interfaces, and counting rollbacks here for reporting.
module lazypim_pim_unit
  import lazypim_pkg::*;
#(
  parameter int unsigned NFILT = 16,                      // paper: 12KB of signatures per core = 3 x 16 x 256B
  parameter int unsigned BITS  = 2048,                    // paper: 256B filters
  localparam int unsigned FI_W = (NFILT > 1) ? $clog2(NFILT) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // kernel dispatch from the processor, and end of kernel from the core
  input  logic            k_start,
  input  logic [63:0]     k_start_pc,
  input  logic            k_end,
  output logic            core_restart,
  output logic [63:0]     restart_pc,
  output logic            k_done,
  output logic            busy,
  // L1 cache
  output logic            l1_spec,
  output logic            l1_commit,
  output logic            l1_rollback,
  input  logic            l1_commit_done,
  input  logic            l1_spec_evict,
  input  logic            ev_rd,
  input  logic            ev_wr,
  input  laddr_t          ev_laddr,
  // to/from the processor-side conflict detector
  output logic            fin_req,
  input  resolve_e        resolve,
  input  logic            lock_mode,
  input  logic [FI_W-1:0] sig_rd_idx,
  output logic [BITS-1:0] rs_filter,
  output logic [BITS-1:0] ws_filter,
  output logic [FI_W:0]   rs_used,
  output logic [FI_W:0]   ws_used,
  input  laddr_t          q_addr,
  output logic            rs_hit,
  output logic            ws_hit,
  output logic [31:0]     n_rollbacks,
  output logic [31:0]     n_evict_rollbacks,
  output logic [31:0]     n_commits
);
  typedef enum logic [2:0] {P_IDLE, P_RUN, P_WAIT, P_COMMIT} pstate_e;
  pstate_e st;
  logic    rs_clear, ws_clear;

  bloom_signature #(.BITS(BITS), .NFILT(NFILT)) u_rs (
    .clk, .rst_n, .clear(rs_clear), .ins(ev_rd && st == P_RUN), .ins_addr(ev_laddr),
    .q_addr, .q_hit(rs_hit), .rd_idx(sig_rd_idx), .rd_filter(rs_filter), .n_used(rs_used),
    .overflow(), .n_inserted());
  bloom_signature #(.BITS(BITS), .NFILT(NFILT)) u_ws (
    .clk, .rst_n, .clear(ws_clear), .ins(ev_wr && st == P_RUN), .ins_addr(ev_laddr),
    .q_addr, .q_hit(ws_hit), .rd_idx(sig_rd_idx), .rd_filter(ws_filter), .n_used(ws_used),
    .overflow(), .n_inserted());

  wire do_rollback = (st == P_WAIT && resolve == RES_ROLLBACK) || (st == P_RUN && l1_spec_evict);

  assign l1_spec     = (st == P_RUN);
  assign l1_commit   = (st == P_WAIT) && (resolve == RES_COMMIT);
  assign l1_rollback = do_rollback;
  assign fin_req     = (st == P_WAIT);
  assign busy        = (st != P_IDLE);
  assign rs_clear    = (do_rollback && !lock_mode) || (st == P_COMMIT && l1_commit_done) || k_start;
  assign ws_clear    = do_rollback || (st == P_COMMIT && l1_commit_done) || k_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st                <= P_IDLE;
      restart_pc        <= '0;
      core_restart      <= 1'b0;
      k_done            <= 1'b0;
      n_rollbacks       <= '0;
      n_evict_rollbacks <= '0;
      n_commits         <= '0;
    end else begin
      core_restart <= 1'b0;
      k_done       <= 1'b0;
      unique case (st)
        P_IDLE: if (k_start) begin
          restart_pc <= k_start_pc;
          st         <= P_RUN;
        end
        P_RUN: begin
          if (l1_spec_evict) begin
            core_restart      <= 1'b1;
            n_evict_rollbacks <= n_evict_rollbacks + 1;
          end else if (k_end) begin
            st <= P_WAIT;
          end
        end
        P_WAIT: begin
          if (resolve == RES_COMMIT) st <= P_COMMIT;
          else if (resolve == RES_ROLLBACK) begin
            core_restart <= 1'b1;
            n_rollbacks  <= n_rollbacks + 1;
            st           <= P_RUN;
          end
        end
        P_COMMIT: if (l1_commit_done) begin
          k_done    <= 1'b1;
          n_commits <= n_commits + 1;
          st        <= P_IDLE;
        end
        default: st <= P_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) k_start |-> st == P_IDLE)
    else $error("lazypim_pim_unit: kernel dispatched to a busy PIM core");
endmodule
