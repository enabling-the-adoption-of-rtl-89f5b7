// impica_access_engine: the memory half of IMPICA's address-access decoupled
// core. It has no functional units. It takes entries from the access queue,
// translates the virtual address with its TLB and, on a TLB miss, the
// region-based page table walker, then looks the physical line up in the
// IMPICA cache. A hit locks the line for the operation and moves the entry to
// the response queue at once. A miss reserves a victim line and sends the
// read to the memory controller without waiting for the data, so several
// reads can be outstanding; when a line returns it is written into the cache
// and the entry moves to the response queue. If every line of the set is
// locked the engine stalls until the address engine unlocks one.
//
// Follows the paper: translate, issue without waiting, fill the cache, move
// the entry to the response queue, stall on a fully locked set. Own choices:
// one access-queue entry is handled at a time (translation and lookup are not
// pipelined); up to NPEND line reads are outstanding, tagged with their
// pending-table index, and may return in any order; page walks use tag
// NPEND. A translation fault drops the access and raises the sticky fault
// output (the paper does not say how IMPICA reports faults).
module impica_access_engine
  import impica_pkg::*;
#(
  parameter int unsigned NPEND   = 8,                     // assumed outstanding line reads
  parameter int unsigned TLB_N   = 32,                    // paper: 32 TLB entries
  parameter int unsigned REGIONS = 4,                     // paper example: 4 regions
  parameter int unsigned WAYS    = 2,                     // paper: 2-way cache
  localparam int unsigned ID_W   = $clog2(NPEND + 1),
  localparam int unsigned WAY_W  = $clog2(WAYS)
) (
  input  logic   clk,
  input  logic   rst_n,
  // access queue head
  input  logic   acc_valid,
  output logic   acc_ready,
  input  acc_t   acc,
  // response queue tail
  output logic   rsp_valid,
  input  logic   rsp_ready,
  output resp_t  rsp,
  // region table / TLB management by the OS
  input  logic   rt_we,
  input  logic [$clog2(REGIONS)-1:0] rt_idx,
  input  logic   rt_valid,
  input  logic [6:0] rt_region,
  input  paddr_t rt_flat_base,
  input  logic   tlb_flush,
  // IMPICA cache
  output paddr_t c_lk_pa,
  input  logic   c_lk_hit,
  input  logic   c_lk_can_alloc,
  input  logic [WAY_W-1:0] c_lk_victim,
  output logic   c_hit_lock,
  output slot_t  c_rid,
  output logic   c_alloc,
  output logic [WAY_W-1:0] c_alloc_way,
  output logic   c_alloc_root,
  output logic   c_fill,
  output paddr_t c_fill_pa,
  output logic [WAY_W-1:0] c_fill_way,
  output line_t  c_fill_data,
  // memory controller
  output logic   mreq_valid,
  input  logic   mreq_ready,
  output paddr_t mreq_addr,
  output logic [ID_W-1:0] mreq_id,
  input  logic   mrsp_valid,
  output logic   mrsp_ready,
  input  logic [ID_W-1:0] mrsp_id,
  input  line_t  mrsp_data,
  // status
  output logic   fault,
  output logic [31:0] n_walks,
  output logic [31:0] n_tlb_hits,
  output logic [31:0] n_lock_stalls,
  output logic [31:0] n_pend_max
);
  typedef enum logic [1:0] {A_IDLE, A_XLATE, A_WALK, A_CACHE} astate_e;

  typedef struct packed {
    logic             v;
    paddr_t           pa;
    logic [WAY_W-1:0] way;
    slot_t            slot;
    reg_t             rd;
  } pend_t;

  astate_e st;
  acc_t    cur;
  paddr_t  pa_q;
  pend_t   pend [NPEND];

  // TLB and page walker
  logic   tlb_hit;
  paddr_t tlb_pa;
  logic   w_start, w_busy, w_done, w_fault, w_big;
  logic [PA_W-13:0] w_ppn;
  logic   w_mreq_valid, w_mreq_ready, w_mrsp_valid;
  paddr_t w_mreq_addr, w_addr_q;
  word_t  w_mrsp_data;

  impica_tlb #(.ENTRIES(TLB_N)) u_tlb (
    .clk, .rst_n, .flush(tlb_flush),
    .lk_va(cur.va), .lk_hit(tlb_hit), .lk_pa(tlb_pa),
    .fill_en(w_done && !w_fault), .fill_va(cur.va), .fill_ppn(w_ppn), .fill_pg2m(w_big));

  impica_rpt_walker #(.REGIONS(REGIONS)) u_walk (
    .clk, .rst_n,
    .rt_we, .rt_idx, .rt_valid, .rt_region, .rt_flat_base,
    .start(w_start), .va(cur.va), .busy(w_busy), .done(w_done), .fault(w_fault),
    .ppn(w_ppn), .pg2m(w_big),
    .mreq_valid(w_mreq_valid), .mreq_ready(w_mreq_ready), .mreq_addr(w_mreq_addr),
    .mrsp_valid(w_mrsp_valid), .mrsp_data(w_mrsp_data), .n_walks(n_walks));

  // free pending-table entry
  logic             pend_free;
  logic [ID_W-1:0]  pend_idx;
  int unsigned      pend_cnt;
  always_comb begin
    pend_free = 1'b0;
    pend_idx  = '0;
    pend_cnt  = 0;
    for (int i = 0; i < NPEND; i++) begin
      if (pend[i].v) pend_cnt++;
      if (!pend_free && !pend[i].v) begin
        pend_free = 1'b1;
        pend_idx  = ID_W'(i);
      end
    end
  end

  wire fill_rsp = mrsp_valid && (mrsp_id != ID_W'(NPEND));
  wire walk_rsp = mrsp_valid && (mrsp_id == ID_W'(NPEND));
  wire pend_t fp = pend[mrsp_id[$clog2(NPEND)-1:0]];

  assign w_mrsp_valid = walk_rsp;
  assign w_mrsp_data  = mrsp_data[w_addr_q[5:3]*WORD_W +: WORD_W];
  assign w_start      = (st == A_XLATE) && !tlb_hit && !w_busy;
  assign c_lk_pa      = pa_q;
  assign c_rid        = cur.slot;
  assign c_alloc_root = cur.root;
  assign c_alloc_way  = c_lk_victim;
  assign c_fill_pa    = fp.pa;
  assign c_fill_way   = fp.way;
  assign c_fill_data  = mrsp_data;

  wire in_cache = (st == A_CACHE);
  wire can_miss = in_cache && !c_lk_hit && c_lk_can_alloc && pend_free && !w_mreq_valid;

  always_comb begin
    acc_ready    = (st == A_IDLE);
    mrsp_ready   = walk_rsp || rsp_ready;
    c_fill       = fill_rsp && rsp_ready;
    c_hit_lock   = 1'b0;
    c_alloc      = 1'b0;
    rsp_valid    = 1'b0;
    rsp          = '0;
    w_mreq_ready = mreq_ready;
    mreq_valid   = w_mreq_valid;
    mreq_addr    = w_mreq_addr;
    mreq_id      = ID_W'(NPEND);
    if (fill_rsp) begin
      rsp_valid = 1'b1;
      rsp       = '{pa: fp.pa, slot: fp.slot, rd: fp.rd};
    end else if (in_cache && c_lk_hit) begin
      rsp_valid  = 1'b1;
      rsp        = '{pa: pa_q, slot: cur.slot, rd: cur.rd};
      c_hit_lock = rsp_ready;
    end
    if (can_miss) begin
      mreq_valid = 1'b1;
      mreq_addr  = {pa_q[PA_W-1:6], 6'd0};
      mreq_id    = pend_idx;
      c_alloc    = mreq_ready;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st            <= A_IDLE;
      cur           <= '0;
      pa_q          <= '0;
      w_addr_q      <= '0;
      fault         <= 1'b0;
      n_tlb_hits    <= '0;
      n_lock_stalls <= '0;
      n_pend_max    <= '0;
      for (int i = 0; i < NPEND; i++) pend[i] <= '0;
    end else begin
      if (w_mreq_valid && mreq_ready) w_addr_q <= w_mreq_addr;
      if (c_fill) pend[mrsp_id[$clog2(NPEND)-1:0]].v <= 1'b0;
      if (32'(pend_cnt) > n_pend_max) n_pend_max <= 32'(pend_cnt);
      unique case (st)
        A_IDLE: if (acc_valid) begin
          cur <= acc;
          st  <= A_XLATE;
        end
        A_XLATE: begin
          if (tlb_hit) begin
            pa_q       <= tlb_pa;
            n_tlb_hits <= n_tlb_hits + 1;
            st         <= A_CACHE;
          end else if (w_start) begin
            st <= A_WALK;
          end
        end
        A_WALK: if (w_done) begin
          if (w_fault) begin
            fault <= 1'b1;
            st    <= A_IDLE;
          end else begin
            st <= A_XLATE;             // the TLB now holds the entry
          end
        end
        A_CACHE: begin
          if (c_hit_lock) st <= A_IDLE;
          else if (c_alloc) begin
            pend[pend_idx[$clog2(NPEND)-1:0]] <= '{v: 1'b1, pa: pa_q, way: c_lk_victim,
                                                   slot: cur.slot, rd: cur.rd};
            st <= A_IDLE;
          end else if (!c_lk_hit && !c_lk_can_alloc) begin
            n_lock_stalls <= n_lock_stalls + 1;
          end
        end
        default: st <= A_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) c_fill |-> fp.v)
    else $error("impica_access_engine: memory response for an unused tag");
endmodule
