// impica_core: the IMPICA in-memory pointer-chasing accelerator, placed in
// the logic layer of a 3D-stacked memory. It wires together the blocks of the
// paper's core diagram: (1) request queue, (2) instruction RAM, (3) data RAM,
// (4) access queue, (5) IMPICA cache, (6) response queue, the address engine
// and the access engine (which holds the TLB and the region-based page table
// walker).
//
// Host interface (packet style, as in the paper): the host loads the
// traversal code into the instruction RAM (im_*), writes the call's
// parameters into an operation slot of the memory-mapped data RAM (h_dm_*),
// and enqueues {start PC, slot} in the request queue (h_req_*). When the
// operation finishes, the result is in the slot's parameter words and word 7
// of the slot reads 1; the host polls it. done_valid/done_slot also report
// completion. The operating system programs the region table (rt_*) and
// shoots down the TLB (tlb_flush). Memory: line reads to the vault memory
// controller, tagged so several can be outstanding (m*).
// Sizes follow the paper (16-entry queues, 16KB RAMs, 32KB 2-way cache,
// 32-entry TLB); the instruction set and interfaces are this design's own.
module impica_core
  import impica_pkg::*;
#(
  parameter int unsigned QDEPTH  = 16,                    // paper: 16 entries per queue
  parameter int unsigned IRAM_B  = 16384,                 // paper: 16KB instruction RAM
  parameter int unsigned DRAM_B  = 16384,                 // paper: 16KB data RAM
  parameter int unsigned CACHE_B = 32768,                 // paper: 32KB
  parameter int unsigned WAYS    = 2,                     // paper: 2-way
  parameter int unsigned TLB_N   = 32,                    // paper: 32 entries
  parameter int unsigned REGIONS = 4,                     // paper example
  parameter int unsigned NPEND   = 8,                     // assumed
  localparam int unsigned ID_W   = $clog2(NPEND + 1),
  localparam int unsigned IAW    = $clog2(IRAM_B / 4),
  localparam int unsigned DAW    = $clog2(DRAM_B / 8)
) (
  input  logic   clk,
  input  logic   rst_n,
  // instruction load
  input  logic   im_we,
  input  logic [IAW-1:0] im_addr,
  input  logic [31:0] im_wdata,
  // memory-mapped data RAM (host side)
  input  logic   h_dm_en,
  input  logic   h_dm_we,
  input  logic [DAW-1:0] h_dm_addr,
  input  word_t  h_dm_wdata,
  output word_t  h_dm_rdata,
  // request queue
  input  logic   h_req_valid,
  output logic   h_req_ready,
  input  req_t   h_req,
  // OS management
  input  logic   rt_we,
  input  logic [$clog2(REGIONS)-1:0] rt_idx,
  input  logic   rt_valid,
  input  logic [6:0] rt_region,
  input  paddr_t rt_flat_base,
  input  logic   tlb_flush,
  // memory controller
  output logic   mreq_valid,
  input  logic   mreq_ready,
  output paddr_t mreq_addr,
  output logic [ID_W-1:0] mreq_id,
  input  logic   mrsp_valid,
  output logic   mrsp_ready,
  input  logic [ID_W-1:0] mrsp_id,
  input  line_t  mrsp_data,
  // completion and status
  output logic   done_valid,
  output slot_t  done_slot,
  output logic   fault,
  output logic [31:0] n_ctx_switch,
  output logic [31:0] n_walks,
  output logic [31:0] n_lock_stalls,
  output logic [31:0] n_cache_hits,
  output logic [31:0] n_cache_misses,
  output logic [31:0] n_pend_max
);
  // request queue (1)
  logic q_req_valid, q_req_ready;
  req_t q_req;
  impica_queue #(.T(req_t), .DEPTH(QDEPTH)) u_reqq (
    .clk, .rst_n, .in_valid(h_req_valid), .in_ready(h_req_ready), .in_data(h_req),
    .out_valid(q_req_valid), .out_ready(q_req_ready), .out_data(q_req), .count());

  // instruction RAM (2): port A loads, port B fetches
  logic im_en;
  logic [IAW-1:0] im_raddr;
  logic [31:0] im_rdata, im_unused;
  impica_ram #(.WIDTH(32), .BYTES(IRAM_B)) u_iram (
    .clk,
    .a_en(im_we), .a_we(im_we), .a_addr(im_addr), .a_wdata(im_wdata), .a_rdata(im_unused),
    .b_en(im_en), .b_we(1'b0), .b_addr(im_raddr), .b_wdata('0), .b_rdata(im_rdata));

  // data RAM (3): port A host, port B address engine
  logic dm_en, dm_we;
  logic [DAW-1:0] dm_addr;
  word_t dm_wdata, dm_rdata;
  impica_ram #(.WIDTH(WORD_W), .BYTES(DRAM_B)) u_dram (
    .clk,
    .a_en(h_dm_en), .a_we(h_dm_we), .a_addr(h_dm_addr), .a_wdata(h_dm_wdata), .a_rdata(h_dm_rdata),
    .b_en(dm_en), .b_we(dm_we), .b_addr(dm_addr), .b_wdata(dm_wdata), .b_rdata(dm_rdata));

  // access queue (4) and response queue (6)
  logic ae_acc_valid, ae_acc_ready, q_acc_valid, q_acc_ready;
  acc_t ae_acc, q_acc;
  logic xe_rsp_valid, xe_rsp_ready, q_rsp_valid, q_rsp_ready;
  resp_t xe_rsp, q_rsp;
  impica_queue #(.T(acc_t), .DEPTH(QDEPTH)) u_accq (
    .clk, .rst_n, .in_valid(ae_acc_valid), .in_ready(ae_acc_ready), .in_data(ae_acc),
    .out_valid(q_acc_valid), .out_ready(q_acc_ready), .out_data(q_acc), .count());
  impica_queue #(.T(resp_t), .DEPTH(QDEPTH)) u_rspq (
    .clk, .rst_n, .in_valid(xe_rsp_valid), .in_ready(xe_rsp_ready), .in_data(xe_rsp),
    .out_valid(q_rsp_valid), .out_ready(q_rsp_ready), .out_data(q_rsp), .count());

  // IMPICA cache (5)
  localparam int unsigned WAY_W = $clog2(WAYS);
  paddr_t c_lk_pa, c_fill_pa, c_rd_pa;
  logic   c_lk_hit, c_can_alloc, c_hit_lock, c_alloc, c_alloc_root, c_fill, c_rd_en;
  logic [WAY_W-1:0] c_lk_way, c_victim, c_alloc_way, c_fill_way;
  slot_t  c_rid, c_rd_rid;
  line_t  c_fill_data;
  word_t  c_rd_data;
  logic [31:0] n_evict_done;
  impica_cache #(.BYTES(CACHE_B), .WAYS(WAYS)) u_cache (
    .clk, .rst_n,
    .lk_pa(c_lk_pa), .lk_hit(c_lk_hit), .lk_way(c_lk_way), .lk_can_alloc(c_can_alloc),
    .lk_victim(c_victim),
    .hit_lock(c_hit_lock), .hit_rid(c_rid),
    .alloc(c_alloc), .alloc_way(c_alloc_way), .alloc_rid(c_rid), .alloc_root(c_alloc_root),
    .fill(c_fill), .fill_pa(c_fill_pa), .fill_way(c_fill_way), .fill_data(c_fill_data),
    .rd_en(c_rd_en), .rd_pa(c_rd_pa), .rd_rid(c_rd_rid), .rd_data(c_rd_data),
    .evict_en(done_valid), .evict_rid(done_slot),
    .n_hits(n_cache_hits), .n_misses(n_cache_misses), .n_evict_done(n_evict_done));

  impica_address_engine u_addr (
    .clk, .rst_n,
    .req_valid(q_req_valid), .req_ready(q_req_ready), .req(q_req),
    .imem_en(im_en), .imem_addr(im_raddr), .imem_rdata(im_rdata),
    .dmem_en(dm_en), .dmem_we(dm_we), .dmem_addr(dm_addr), .dmem_wdata(dm_wdata),
    .dmem_rdata(dm_rdata),
    .acc_valid(ae_acc_valid), .acc_ready(ae_acc_ready), .acc(ae_acc),
    .rsp_valid(q_rsp_valid), .rsp_ready(q_rsp_ready), .rsp(q_rsp),
    .crd_en(c_rd_en), .crd_pa(c_rd_pa), .crd_slot(c_rd_rid), .crd_data(c_rd_data),
    .done_valid, .done_slot, .n_ctx_switch, .n_instr());

  logic [31:0] n_tlb_hits;
  impica_access_engine #(.NPEND(NPEND), .TLB_N(TLB_N), .REGIONS(REGIONS), .WAYS(WAYS)) u_acc (
    .clk, .rst_n,
    .acc_valid(q_acc_valid), .acc_ready(q_acc_ready), .acc(q_acc),
    .rsp_valid(xe_rsp_valid), .rsp_ready(xe_rsp_ready), .rsp(xe_rsp),
    .rt_we, .rt_idx, .rt_valid, .rt_region, .rt_flat_base, .tlb_flush,
    .c_lk_pa, .c_lk_hit, .c_lk_can_alloc(c_can_alloc), .c_lk_victim(c_victim),
    .c_hit_lock, .c_rid, .c_alloc, .c_alloc_way, .c_alloc_root,
    .c_fill, .c_fill_pa, .c_fill_way, .c_fill_data,
    .mreq_valid, .mreq_ready, .mreq_addr, .mreq_id, .mrsp_valid, .mrsp_ready, .mrsp_id,
    .mrsp_data,
    .fault, .n_walks, .n_tlb_hits, .n_lock_stalls, .n_pend_max);
endmodule
