// bloom_signature: an address signature built from parallel (partitioned)
// Bloom filters, as LazyPIM uses for its PIMReadSet, PIMWriteSet and
// CPUWriteSet. One filter is a 256-byte (2048-bit) register split into K
// partitions; inserting a line address sets one bit in each partition, the
// bit chosen by an H3 hash (an XOR of fixed bit masks selected by the
// address bits, i.e. plain Boolean logic). A filter holds up to 607
// addresses before its false-positive rate passes 20% (paper); after that
// many insertions the signature moves on to its next filter, up to NFILT
// filters, so the bound holds for large kernels. There are no false
// negatives.
//
// Ports: ins inserts an address (one per cycle); clear erases everything;
// q_addr/q_hit test an address against every used filter (combinational);
// rd_idx/rd_filter read out one filter, which is how the signature is sent
// to the processor; n_used is the number of filters in use; overflow is set
// if more than NFILT*MAX_PER_FILTER addresses were inserted (the last filter
// then keeps absorbing them, still without false negatives).
// Follows the paper: 256B filters, parallel Bloom filters, 607 addresses,
// multiple filters, and NFILT=16 (12KB of signatures per PIM core is three
// signatures of 16 x 256B). Own choices: K=4 partitions and H3 constants from
// an integer hash finaliser.
module bloom_signature
  import lazypim_pkg::*;
#(
  parameter int unsigned BITS           = 2048,           // paper: 256B
  parameter int unsigned K              = 4,              // assumed hash count
  parameter int unsigned MAX_PER_FILTER = 607,            // paper: 607 addresses at 20% FP
  parameter int unsigned NFILT          = 16,             // paper: 12KB per core = 3 x 16 x 256B
  parameter int unsigned AW             = LADDR_W,
  localparam int unsigned PB            = BITS / K,       // bits per partition
  localparam int unsigned HW            = $clog2(PB),
  localparam int unsigned FI_W          = (NFILT > 1) ? $clog2(NFILT) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic            ins,
  input  logic [AW-1:0]   ins_addr,
  input  logic [AW-1:0]   q_addr,
  output logic            q_hit,
  input  logic [FI_W-1:0] rd_idx,
  output logic [BITS-1:0] rd_filter,
  output logic [FI_W:0]   n_used,
  output logic            overflow,
  output logic [31:0]     n_inserted
);
  logic [BITS-1:0] filt [NFILT];
  logic [FI_W-1:0] cur;
  logic [$clog2(MAX_PER_FILTER+1)-1:0] cur_cnt;

  // H3 masks: for partition k and address bit i, a pseudo-random HW-bit value
  // taken from a 32-bit integer finaliser (multiply/xor-shift) of (k, i); fixed at elaboration.
  typedef logic [K-1:0][AW-1:0][HW-1:0] h3_t;
  function automatic h3_t h3_table();
    h3_t t;
    for (int unsigned k = 0; k < K; k++)
      for (int unsigned i = 0; i < AW; i++) begin
        logic [31:0] x;
        x = 32'h9E37_79B9 + (k << 8) + i;
        x = x ^ (x >> 16); x = x * 32'h85EB_CA6B;
        x = x ^ (x >> 13); x = x * 32'hC2B2_AE35;
        x = x ^ (x >> 16);
        t[k][i] = x[HW-1:0];
      end
    return t;
  endfunction
  localparam h3_t H3 = h3_table();

  function automatic logic [HW-1:0] hash(int unsigned k, logic [AW-1:0] a);
    logic [HW-1:0] h = '0;
    for (int i = 0; i < AW; i++) if (a[i]) h ^= H3[k][i];
    return h;
  endfunction

  function automatic logic [BITS-1:0] bits_of(logic [AW-1:0] a);
    logic [BITS-1:0] b = '0;
    for (int k = 0; k < K; k++) b[k*PB + int'(hash(k, a))] = 1'b1;
    return b;
  endfunction

  wire [BITS-1:0] qb = bits_of(q_addr);
  always_comb begin
    q_hit = 1'b0;
    for (int f = 0; f < NFILT; f++)
      if (FI_W'(f) <= cur && n_inserted != 0 && ((filt[f] & qb) == qb)) q_hit = 1'b1;
  end

  assign rd_filter = filt[rd_idx];
  assign n_used    = (n_inserted == 0) ? '0 : {1'b0, cur} + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int f = 0; f < NFILT; f++) filt[f] <= '0;
      cur        <= '0;
      cur_cnt    <= '0;
      overflow   <= 1'b0;
      n_inserted <= '0;
    end else if (clear) begin
      for (int f = 0; f < NFILT; f++) filt[f] <= '0;
      cur        <= '0;
      cur_cnt    <= '0;
      overflow   <= 1'b0;
      n_inserted <= '0;
    end else if (ins) begin
      automatic logic full = (cur_cnt == ($bits(cur_cnt))'(MAX_PER_FILTER));
      automatic logic last = (cur == FI_W'(NFILT - 1));
      automatic logic [FI_W-1:0] tgt = (full && !last) ? cur + 1'b1 : cur;
      filt[tgt]  <= filt[tgt] | bits_of(ins_addr);
      n_inserted <= n_inserted + 1;
      if (full && !last) begin
        cur     <= cur + 1'b1;
        cur_cnt <= 1;
      end else if (full) begin
        overflow <= 1'b1;
      end else begin
        cur_cnt <= cur_cnt + 1'b1;
      end
    end
  end
endmodule
