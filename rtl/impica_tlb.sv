// impica_tlb: IMPICA's translation lookaside buffer (32 entries in the
// paper). Fully associative; each entry maps a 4KB virtual page to a
// physical page, or a 2MB virtual page to a 2MB frame when the region-based
// page table chose a 2MB page. Lookup is combinational; a fill writes the
// entry chosen by a round-robin pointer (invalid entries are used first).
// flush invalidates every entry: it is the shoot-down the operating system
// performs when the CPU changes an IMPICA region. The entry count follows
// the paper; full associativity and round-robin replacement are this
// design's choices.
module impica_tlb
  import impica_pkg::*;
#(
  parameter int unsigned ENTRIES = 32                     // paper: 32 TLB entries
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   flush,
  // lookup
  input  vaddr_t lk_va,
  output logic   lk_hit,
  output paddr_t lk_pa,
  // fill after a page walk
  input  logic   fill_en,
  input  vaddr_t fill_va,
  input  logic [PA_W-13:0] fill_ppn,    // 4KB physical page number
  input  logic   fill_pg2m             // 2MB page: ppn[8:0] ignored
);
  localparam int unsigned VPN_W = VA_W - 12;
  localparam int unsigned PPN_W = PA_W - 12;

  typedef struct packed {
    logic             valid;
    logic             pg2m;
    logic [VPN_W-1:0] vpn;
    logic [PPN_W-1:0] ppn;
  } entry_t;

  entry_t entries [ENTRIES];
  logic [$clog2(ENTRIES)-1:0] rr;

  function automatic logic match(entry_t e, vaddr_t va);
    if (!e.valid) return 1'b0;
    if (e.pg2m)  return e.vpn[VPN_W-1:9] == va[VA_W-1:21];
    return e.vpn == va[VA_W-1:12];
  endfunction

  always_comb begin
    lk_hit = 1'b0;
    lk_pa  = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (!lk_hit && match(entries[i], lk_va)) begin
        lk_hit = 1'b1;
        lk_pa  = entries[i].pg2m ? {entries[i].ppn[PPN_W-1:9], lk_va[20:0]}
                                  : {entries[i].ppn, lk_va[11:0]};
      end
    end
  end

  // victim: first invalid entry, else the round-robin pointer
  logic [$clog2(ENTRIES)-1:0] victim;
  logic found_free;
  always_comb begin
    victim     = rr;
    found_free = 1'b0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (!found_free && !entries[i].valid) begin
        victim     = $clog2(ENTRIES)'(i);
        found_free = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr <= '0;
      for (int i = 0; i < ENTRIES; i++) entries[i] <= '0;
    end else if (flush) begin
      for (int i = 0; i < ENTRIES; i++) entries[i].valid <= 1'b0;
    end else if (fill_en) begin
      entries[victim] <= '{valid: 1'b1, pg2m: fill_pg2m,
                           vpn: fill_va[VA_W-1:12], ppn: fill_ppn};
      if (!found_free) rr <= rr + 1'b1;
    end
  end
endmodule
