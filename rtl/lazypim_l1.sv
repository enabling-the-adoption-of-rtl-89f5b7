// lazypim_l1: the private L1 data cache of a PIM core, with LazyPIM's two
// additions: a speculative-write bit per line and a per-word dirty bit mask.
// While a PIM kernel runs (spec=1) every store marks its line speculative;
// speculative data never leaves the cache until the kernel commits. On
// commit the cache walks all lines and writes back only the dirty words of
// each speculative line (the word mask lets memory merge them with processor
// writes to other words of the same line), then clears the bits. On
// rollback it drops every speculative line in one cycle. If a miss must
// evict a speculative line, the cache raises spec_evict instead, and the
// kernel rolls back (paper: "If a speculative line is selected for
// eviction, the core rolls back"). Every read and write of the kernel is
// reported (ev_*) so the PIMReadSet/PIMWriteSet can record it.
//
// Follows the paper: 64KB, 4-way, 64B lines, one speculative bit per line,
// per-word dirty mask, roll back on speculative eviction. Own choices: a
// blocking cache with one miss at a time; replacement takes an invalid
// line, else round-robin, skipping speculative lines while any other way
// is free of them; a store inside a kernel to a line that is dirty from
// before the kernel first writes that line back, so a rollback cannot lose
// non-speculative data. Timing: a hit takes the request in the cycle it is
// presented and answers a load one cycle later; a miss takes one write-back
// (if dirty) and one line read, then the request is served as a hit.
module lazypim_l1
  import lazypim_pkg::*;
#(
  parameter int unsigned BYTES = 65536,                   // paper: 64KB
  parameter int unsigned WAYS  = 4,                       // paper: 4-way
  localparam int unsigned WAY_W = $clog2(WAYS)
) (
  input  logic          clk,
  input  logic          rst_n,
  // core side
  input  logic          creq_valid,
  output logic          creq_ready,
  input  logic          creq_we,
  input  logic [PA_W-1:0] creq_addr,
  input  word_t         creq_wdata,
  output logic          crsp_valid,
  output word_t         crsp_rdata,
  // LazyPIM control
  input  logic          spec,
  input  logic          commit,
  input  logic          rollback,
  output logic          commit_done,
  output logic          spec_evict,
  output logic          ev_rd,
  output logic          ev_wr,
  output laddr_t        ev_laddr,
  // memory side (line reads, masked line writes)
  output logic          mreq_valid,
  input  logic          mreq_ready,
  output logic          mreq_we,
  output laddr_t        mreq_laddr,
  output line_t         mreq_wdata,
  output logic [WPL-1:0] mreq_wmask,
  input  logic          mrsp_valid,
  input  line_t         mrsp_data,
  output logic [31:0]   n_spec_lines_committed
);
  localparam int unsigned LINES = BYTES / (LINE_W / 8);
  localparam int unsigned SETS  = LINES / WAYS;
  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned TAG_W = LADDR_W - SET_W;

  typedef struct packed {
    logic [TAG_W-1:0] tag;
    logic             v;
    logic             sp;
    logic [WPL-1:0]   dm;
  } meta_t;

  typedef enum logic [2:0] {L_IDLE, L_WB, L_RD, L_WAIT, L_PREWB, L_SCAN} lstate_e;

  meta_t  meta [SETS][WAYS];
  logic [WAY_W-1:0] rr [SETS];
  line_t  data [LINES];
  lstate_e st;
  logic [SET_W+WAY_W-1:0] scan;

  wire laddr_t           la   = creq_addr[PA_W-1:6];
  wire [SET_W-1:0]       set  = la[SET_W-1:0];
  wire [TAG_W-1:0]       tag  = la[LADDR_W-1:SET_W];
  wire [2:0]             widx = creq_addr[5:3];

  logic hit;
  logic [WAY_W-1:0] hway, vway;
  logic vfree, vnons;
  logic [WAY_W-1:0] fway, nway;
  // victim: first invalid way, else the round-robin way unless it holds
  // speculative data, else the first non-speculative way; only when every
  // way is speculative is a speculative line chosen (and the kernel rolls
  // back)
  always_comb begin
    hit   = 1'b0;
    hway  = '0;
    vfree = 1'b0;
    vnons = 1'b0;
    fway  = '0;
    nway  = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!hit && meta[set][w].v && meta[set][w].tag == tag) begin
        hit  = 1'b1;
        hway = WAY_W'(w);
      end
      if (!vfree && !meta[set][w].v) begin
        vfree = 1'b1;
        fway  = WAY_W'(w);
      end
      if (!vnons && !meta[set][w].sp) begin
        vnons = 1'b1;
        nway  = WAY_W'(w);
      end
    end
    if (vfree)                     vway = fway;
    else if (!meta[set][rr[set]].sp) vway = rr[set];
    else if (vnons)                vway = nway;
    else                           vway = rr[set];
  end

  wire meta_t hm = meta[set][hway];
  wire meta_t vm = meta[set][vway];
  wire [SET_W-1:0] sset = scan[SET_W+WAY_W-1:WAY_W];
  wire [WAY_W-1:0] sway = scan[WAY_W-1:0];
  wire meta_t sm = meta[sset][sway];

  wire need_prewb = spec && creq_we && hit && !hm.sp && (hm.dm != '0);
  wire serve      = (st == L_IDLE) && creq_valid && hit && !need_prewb && !commit && !rollback;
  wire evict_spec = (st == L_IDLE) && creq_valid && !hit && !commit && !rollback && vm.v && vm.sp;

  assign creq_ready = serve || evict_spec;
  assign ev_rd      = serve && !creq_we && spec;
  assign ev_wr      = serve &&  creq_we && spec;
  assign ev_laddr   = la;

  always_comb begin
    mreq_valid = 1'b0;
    mreq_we    = 1'b0;
    mreq_laddr = la;
    mreq_wdata = data[{set, vway}];
    mreq_wmask = vm.dm;
    unique case (st)
      L_WB: begin
        mreq_valid = 1'b1;
        mreq_we    = 1'b1;
        mreq_laddr = {vm.tag, set};
      end
      L_PREWB: begin
        mreq_valid = 1'b1;
        mreq_we    = 1'b1;
        mreq_laddr = la;
        mreq_wdata = data[{set, hway}];
        mreq_wmask = hm.dm;
      end
      L_RD: mreq_valid = 1'b1;
      L_SCAN: begin
        mreq_valid = sm.v && sm.sp && (sm.dm != '0);
        mreq_we    = 1'b1;
        mreq_laddr = {sm.tag, sset};
        mreq_wdata = data[scan];
        mreq_wmask = sm.dm;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= L_IDLE;
      scan        <= '0;
      crsp_valid  <= 1'b0;
      commit_done <= 1'b0;
      spec_evict  <= 1'b0;
      n_spec_lines_committed <= '0;
      for (int s = 0; s < SETS; s++) begin
        rr[s] <= '0;
        for (int w = 0; w < WAYS; w++) meta[s][w] <= '0;
      end
    end else begin
      crsp_valid  <= 1'b0;
      commit_done <= 1'b0;
      spec_evict  <= 1'b0;
      unique case (st)
        L_IDLE: begin
          if (rollback) begin
            for (int s = 0; s < SETS; s++)
              for (int w = 0; w < WAYS; w++)
                if (meta[s][w].sp) meta[s][w] <= '0;
          end else if (commit) begin
            scan <= '0;
            st   <= L_SCAN;
          end else if (creq_valid) begin
            if (serve) begin
              if (creq_we) begin
                meta[set][hway].dm[widx] <= 1'b1;
                if (spec) meta[set][hway].sp <= 1'b1;
              end else begin
                crsp_valid <= 1'b1;
              end
            end else if (need_prewb) begin
              st <= L_PREWB;
            end else if (evict_spec) begin
              spec_evict <= 1'b1;
            end else if (!hit) begin
              st <= (vm.v && vm.dm != '0) ? L_WB : L_RD;
            end
          end
        end
        L_PREWB: if (mreq_ready) begin
          meta[set][hway].dm <= '0;
          st <= L_IDLE;
        end
        L_WB: if (mreq_ready) begin
          meta[set][vway].v <= 1'b0;
          st <= L_RD;
        end
        L_RD: if (mreq_ready) st <= L_WAIT;
        L_WAIT: if (mrsp_valid) begin
          meta[set][vway] <= '{tag: tag, v: 1'b1, sp: 1'b0, dm: '0};
          if (vway == rr[set]) rr[set] <= rr[set] + 1'b1;
          st <= L_IDLE;
        end
        L_SCAN: begin
          if (!mreq_valid || mreq_ready) begin
            if (sm.v && sm.sp) begin
              meta[sset][sway].sp <= 1'b0;
              meta[sset][sway].dm <= '0;
              n_spec_lines_committed <= n_spec_lines_committed + 1;
            end
            scan <= scan + 1'b1;
            if (scan == '1) begin
              commit_done <= 1'b1;
              st          <= L_IDLE;
            end
          end
        end
        default: st <= L_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (serve && creq_we) data[{set, hway}][widx*WORD_W +: WORD_W] <= creq_wdata;
    if (serve) crsp_rdata <= data[{set, hway}][widx*WORD_W +: WORD_W];
    if (st == L_WAIT && mrsp_valid) data[{set, vway}] <= mrsp_data;
  end

  assert property (@(posedge clk) disable iff (!rst_n) (mreq_valid && mreq_we) |-> mreq_wmask != '0)
    else $error("lazypim_l1: write-back with an empty word mask");
endmodule
