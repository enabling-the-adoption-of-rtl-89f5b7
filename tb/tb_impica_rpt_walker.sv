// tb_impica_rpt_walker: walks the region-based page table for 4KB pages, a
// 2MB page, an address outside every region and an unmapped 2MB range.
// Checks the physical page found, that a 4KB walk takes exactly two memory
// reads and a 2MB walk one, the addresses read (flat base + 8*VA[40:21],
// small-table base + 8*VA[20:12]) and the faults.
module tb_impica_rpt_walker;
  import impica_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic rt_we, rt_valid, start, busy, done, fault, pg2m, mreq_valid, mreq_ready, mrsp_valid;
  logic [1:0] rt_idx; logic [6:0] rt_region; paddr_t rt_flat_base, mreq_addr;
  vaddr_t va; logic [PA_W-13:0] ppn; word_t mrsp_data; logic [31:0] n_walks;
  impica_rpt_walker #(.REGIONS(4)) dut (.*);
  int checks = 0, failures = 0, nreads = 0;
  word_t pmem [paddr_t];
  paddr_t last_addr [$];
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask

  assign mreq_ready = 1'b1;
  always @(posedge clk) begin
    mrsp_valid <= 1'b0;
    if (rst_n && mreq_valid) begin
      nreads++;
      last_addr.push_back(mreq_addr);
      mrsp_valid <= 1'b1;
      mrsp_data  <= pmem.exists(mreq_addr) ? pmem[mreq_addr] : '0;
    end
  end

  task automatic walk(vaddr_t v, output logic f, output logic [PA_W-13:0] p, output logic b, output int reads);
    int n0 = nreads;
    @(negedge clk); start = 1; va = v;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    f = fault; p = ppn; b = pg2m; reads = nreads - n0;
  endtask

  localparam paddr_t FLAT1 = 40'h10_0000, FLAT2 = 40'h80_0000;
  initial begin
    automatic logic f, b; automatic logic [PA_W-13:0] p; automatic int r;
    automatic vaddr_t v1 = 48'h4000_1234_5678, v2 = 48'h0600_0040_0abc, v3 = 48'h7000_0000_0000;
    rt_we = 0; rt_valid = 0; start = 0; va = '0; rt_idx = 0; rt_region = 0; rt_flat_base = 0;
    mrsp_valid = 0; mrsp_data = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); rt_we = 1; rt_idx = 0; rt_valid = 1; rt_region = v1[47:41]; rt_flat_base = FLAT1;
    @(negedge clk); rt_idx = 2; rt_region = v2[47:41]; rt_flat_base = FLAT2;
    @(negedge clk); rt_we = 0;
    // v1: 4KB page through small table at 0x300000
    pmem[FLAT1 + paddr_t'({v1[40:21], 3'b0})] = 64'h30_0001;
    pmem[40'h30_0000 + paddr_t'({v1[20:12], 3'b0})] = 64'hAB_CDE0_0001;
    // v2: 2MB page at physical 0x40_0000_0000 >> keep in 40 bits
    pmem[FLAT2 + paddr_t'({v2[40:21], 3'b0})] = 64'h12_3460_0003;
    walk(v1, f, p, b, r);
    chk(!f && !b && p == 28'hABCDE00, $sformatf("4KB walk ppn %h", p));
    chk(r == 2, $sformatf("4KB walk reads %0d", r));
    chk(last_addr[0] == FLAT1 + paddr_t'({v1[40:21], 3'b0}), "flat entry address");
    chk(last_addr[1] == 40'h30_0000 + paddr_t'({v1[20:12], 3'b0}), "small entry address");
    last_addr.delete();
    walk(v2, f, p, b, r);
    chk(!f && b && p == {19'h091A3, 9'd0}, $sformatf("2MB walk ppn %h", p));
    chk(r == 1, "2MB walk reads");
    walk(v3, f, p, b, r);
    chk(f && r == 0, "address outside every region faults without a read");
    walk(v1 + 48'h20_0000, f, p, b, r);
    chk(f && r == 1, "unmapped flat entry faults");
    chk(n_walks == 4, "walk count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
