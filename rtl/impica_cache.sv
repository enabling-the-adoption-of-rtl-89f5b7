// impica_cache: the IMPICA cache, which carries data fetched by the access
// engine to the address engine (32KB, 2-way in the paper). Each tag holds
// the address tag, a dirty bit D, a valid bit V, a request ID (RID), a lock
// bit L and a root bit R, as in the paper's Fig. 8. Its three policies
// follow the paper:
//  * line locking: L is set when the access engine inserts (or hits) a line
//    for an operation and cleared only when the address engine reads the
//    word for that operation's response; a set whose lines are all locked
//    cannot take a new line, and the access engine stalls on it;
//  * eviction on completion: when an operation finishes, every unlocked line
//    whose RID is that operation's is invalidated at once;
//  * root priority: lines brought in by the first few accesses of an
//    operation get R, and the victim choice prefers non-root lines.
// Own choices: 64B lines; a line being filled is reserved (tag written,
// V=0, L=1) when its memory read is issued, so several misses can be
// outstanding; on a hit the RID moves to the newest user so only that user's
// read unlocks it; victim order invalid > non-root > root, ties broken by a
// per-set LRU bit. The accelerator never stores to memory, so D stays 0.
// Timing: lookup is combinational; read data appears one cycle after rd_en.
module impica_cache
  import impica_pkg::*;
#(
  parameter int unsigned BYTES = 32768,                   // paper: 32KB
  parameter int unsigned WAYS  = 2                        // paper: 2-way
) (
  input  logic   clk,
  input  logic   rst_n,
  // lookup by the access engine
  input  paddr_t lk_pa,
  output logic   lk_hit,
  output logic [$clog2(WAYS)-1:0] lk_way,
  output logic   lk_can_alloc,          // some line of the set is unlocked
  output logic [$clog2(WAYS)-1:0] lk_victim,
  // lock a hit line for an operation
  input  logic   hit_lock,
  input  slot_t  hit_rid,
  // reserve a line for a miss
  input  logic   alloc,
  input  logic [$clog2(WAYS)-1:0] alloc_way,
  input  slot_t  alloc_rid,
  input  logic   alloc_root,
  // fill a reserved line with data from memory
  input  logic   fill,
  input  paddr_t fill_pa,
  input  logic [$clog2(WAYS)-1:0] fill_way,
  input  line_t  fill_data,
  // read by the address engine; unlocks the line
  input  logic   rd_en,
  input  paddr_t rd_pa,
  input  slot_t  rd_rid,
  output word_t  rd_data,
  // operation completion: drop its lines
  input  logic   evict_en,
  input  slot_t  evict_rid,
  output logic [31:0] n_hits,
  output logic [31:0] n_misses,
  output logic [31:0] n_evict_done
);
  localparam int unsigned LINES = BYTES / LINE_B;
  localparam int unsigned SETS  = LINES / WAYS;
  localparam int unsigned OFF_W = $clog2(LINE_B);
  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned TAG_W = PA_W - OFF_W - SET_W;
  localparam int unsigned WAY_W = $clog2(WAYS);

  typedef struct packed {
    logic [TAG_W-1:0] tag;
    logic             d;
    logic             v;
    slot_t            rid;
    logic             l;
    logic             r;
  } meta_t;

  meta_t meta [SETS][WAYS];
  logic  lru  [SETS];                   // way to replace next on a tie (WAYS=2)
  line_t data [SETS*WAYS];

  function automatic logic [SET_W-1:0] set_of(paddr_t pa);
    return pa[OFF_W +: SET_W];
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(paddr_t pa);
    return pa[PA_W-1 -: TAG_W];
  endfunction

  // lookup
  always_comb begin
    automatic logic [SET_W-1:0] s = set_of(lk_pa);
    automatic int best = 3;
    lk_hit       = 1'b0;
    lk_way       = '0;
    lk_can_alloc = 1'b0;
    lk_victim    = WAY_W'(lru[s]);
    for (int w = 0; w < WAYS; w++) begin
      automatic meta_t m = meta[s][w];
      automatic int rank;
      if (!lk_hit && m.v && m.tag == tag_of(lk_pa)) begin
        lk_hit = 1'b1;
        lk_way = WAY_W'(w);
      end
      // rank: 0 invalid, 1 valid non-root, 2 valid root (locked: never)
      rank = !m.v ? 0 : (m.r ? 2 : 1);
      if (!m.l) begin
        lk_can_alloc = 1'b1;
        if (rank < best || (rank == best && w == int'(lru[s]))) begin
          best      = rank;
          lk_victim = WAY_W'(w);
        end
      end
    end
  end

  // read-side hit way
  logic rd_hit;
  logic [WAY_W-1:0] rd_way;
  always_comb begin
    rd_hit = 1'b0;
    rd_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!rd_hit && meta[set_of(rd_pa)][w].v && meta[set_of(rd_pa)][w].tag == tag_of(rd_pa)) begin
        rd_hit = 1'b1;
        rd_way = WAY_W'(w);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        lru[s] <= 1'b0;
        for (int w = 0; w < WAYS; w++) meta[s][w] <= '0;
      end
      n_hits       <= '0;
      n_misses     <= '0;
      n_evict_done <= '0;
    end else begin
      if (evict_en) begin
        automatic int unsigned k = 0;
        for (int s = 0; s < SETS; s++)
          for (int w = 0; w < WAYS; w++)
            if (meta[s][w].v && !meta[s][w].l && meta[s][w].rid == evict_rid) begin
              meta[s][w].v <= 1'b0;
              k++;
            end
        n_evict_done <= n_evict_done + k;
      end
      if (rd_en && rd_hit && meta[set_of(rd_pa)][rd_way].rid == rd_rid)
        meta[set_of(rd_pa)][rd_way].l <= 1'b0;
      // a hit overrides an unlock or completion eviction of the same line
      if (hit_lock) begin
        meta[set_of(lk_pa)][lk_way].v   <= 1'b1;
        meta[set_of(lk_pa)][lk_way].l   <= 1'b1;
        meta[set_of(lk_pa)][lk_way].rid <= hit_rid;
        lru[set_of(lk_pa)]              <= ~lk_way[0];
        n_hits <= n_hits + 1;
      end
      if (alloc) begin
        meta[set_of(lk_pa)][alloc_way] <= '{tag: tag_of(lk_pa), d: 1'b0, v: 1'b0,
                                            rid: alloc_rid, l: 1'b1, r: alloc_root};
        lru[set_of(lk_pa)] <= ~alloc_way[0];
        n_misses <= n_misses + 1;
      end
      if (fill) meta[set_of(fill_pa)][fill_way].v <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (fill) data[{set_of(fill_pa), fill_way}] <= fill_data;
    if (rd_en) rd_data <= data[{set_of(rd_pa), rd_way}][rd_pa[OFF_W-1:3]*WORD_W +: WORD_W];
  end

  assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> rd_hit)
    else $error("impica_cache: address engine read a line that is not present");
  assert property (@(posedge clk) disable iff (!rst_n) alloc |-> !meta[set_of(lk_pa)][alloc_way].l)
    else $error("impica_cache: allocation of a locked line");
endmodule
