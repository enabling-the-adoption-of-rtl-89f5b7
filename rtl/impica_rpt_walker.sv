// impica_rpt_walker: walks IMPICA's region-based page table (RPT).
// Level 1, the region table, maps the few contiguous IMPICA regions: VA[47:41]
// is compared with every valid entry's region address and the match selects
// that region's flat page table. Level 2, the flat table of 2^20 entries, is
// indexed by VA[40:21]; its entry either maps a 2MB page directly or points
// to a level-3 table of 2^9 entries for 4KB pages, indexed by VA[20:12].
// VA[11:0] is the page offset. A walk therefore costs one or two memory
// reads. The field positions, table sizes, the region-table compare and the
// choice of 2MB or 4KB pages at the last level follow the paper (its Fig. 9).
//
// Own choices: the region table (4 entries, the paper's example) is held in
// registers written by the host rather than cached in the IMPICA cache;
// table entries are 8 bytes, so an index is scaled by 8 before it is added to
// a table base; entry format: bit 0 valid, bit 1 pg2m (flat table only),
// bits PA_W-1:12 the next table's base or the physical frame.
// Interface: start/va begins a walk; done pulses with ppn/pg2m, or with
// fault when no region matches or an entry is invalid. Memory reads use a
// word request/response handshake, one read outstanding.
module impica_rpt_walker
  import impica_pkg::*;
#(
  parameter int unsigned REGIONS = 4                      // paper example: 4-entry region table
) (
  input  logic   clk,
  input  logic   rst_n,
  // region table programming (by the OS through the host interface)
  input  logic   rt_we,
  input  logic [$clog2(REGIONS)-1:0] rt_idx,
  input  logic   rt_valid,
  input  logic [6:0] rt_region,         // VA[47:41] of the region
  input  paddr_t rt_flat_base,          // physical base of its flat table
  // walk request
  input  logic   start,
  input  vaddr_t va,
  output logic   busy,
  output logic   done,
  output logic   fault,
  output logic [PA_W-13:0] ppn,
  output logic   pg2m,
  // page-table memory reads
  output logic   mreq_valid,
  input  logic   mreq_ready,
  output paddr_t mreq_addr,
  input  logic   mrsp_valid,
  input  word_t  mrsp_data,
  output logic [31:0] n_walks
);
  typedef struct packed {
    logic       valid;
    logic [6:0] region;
    paddr_t     flat_base;
  } region_t;

  typedef enum logic [2:0] {W_IDLE, W_FLAT_REQ, W_FLAT_WAIT, W_SMALL_REQ, W_SMALL_WAIT} wstate_e;

  region_t rt [REGIONS];
  wstate_e st;
  vaddr_t  va_q;
  paddr_t  flat_base_q, small_base_q;

  // (1) region table compare, (2) flat-table address, (3) small-table address
  logic   rt_hit;
  paddr_t rt_base;
  always_comb begin
    rt_hit  = 1'b0;
    rt_base = '0;
    for (int i = 0; i < REGIONS; i++) begin
      if (!rt_hit && rt[i].valid && rt[i].region == va[47:41]) begin
        rt_hit  = 1'b1;
        rt_base = rt[i].flat_base;
      end
    end
  end

  wire paddr_t flat_addr  = flat_base_q  + paddr_t'({va_q[40:21], 3'b000});
  wire paddr_t small_addr = small_base_q + paddr_t'({va_q[20:12], 3'b000});

  assign busy       = (st != W_IDLE);
  assign mreq_valid = (st == W_FLAT_REQ) || (st == W_SMALL_REQ);
  assign mreq_addr  = (st == W_SMALL_REQ) ? small_addr : flat_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < REGIONS; i++) rt[i] <= '0;
      st           <= W_IDLE;
      va_q         <= '0;
      flat_base_q  <= '0;
      small_base_q <= '0;
      done         <= 1'b0;
      fault        <= 1'b0;
      ppn          <= '0;
      pg2m        <= 1'b0;
      n_walks      <= '0;
    end else begin
      done  <= 1'b0;
      fault <= 1'b0;
      if (rt_we) rt[rt_idx] <= '{valid: rt_valid, region: rt_region, flat_base: rt_flat_base};
      unique case (st)
        W_IDLE: if (start) begin
          va_q        <= va;
          flat_base_q <= rt_base;
          n_walks     <= n_walks + 1;
          if (rt_hit) st <= W_FLAT_REQ;
          else begin done <= 1'b1; fault <= 1'b1; end
        end
        W_FLAT_REQ:  if (mreq_ready) st <= W_FLAT_WAIT;
        W_FLAT_WAIT: if (mrsp_valid) begin
          if (!mrsp_data[0]) begin
            done <= 1'b1; fault <= 1'b1; st <= W_IDLE;
          end else if (mrsp_data[1]) begin
            done  <= 1'b1;
            pg2m <= 1'b1;
            ppn   <= {mrsp_data[PA_W-1:21], 9'd0};
            st    <= W_IDLE;
          end else begin
            small_base_q <= {mrsp_data[PA_W-1:12], 12'd0};
            st           <= W_SMALL_REQ;
          end
        end
        W_SMALL_REQ:  if (mreq_ready) st <= W_SMALL_WAIT;
        W_SMALL_WAIT: if (mrsp_valid) begin
          done  <= 1'b1;
          fault <= !mrsp_data[0];
          pg2m <= 1'b0;
          ppn   <= mrsp_data[PA_W-1:12];
          st    <= W_IDLE;
        end
        default: st <= W_IDLE;
      endcase
    end
  end
endmodule
