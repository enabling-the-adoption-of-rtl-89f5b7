// tb_impica_tlb: fills the 32-entry TLB with 4KB and 2MB translations,
// checks hits and translated addresses against a model, checks that a 33rd
// fill evicts exactly one entry, and that a flush (shoot-down) empties it.
module tb_impica_tlb;
  import impica_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic flush, lk_hit, fill_en, fill_pg2m;
  vaddr_t lk_va, fill_va;
  paddr_t lk_pa;
  logic [PA_W-13:0] fill_ppn;
  impica_tlb #(.ENTRIES(32)) dut (.*);
  int checks = 0, failures = 0;
  vaddr_t vas [33];
  logic [PA_W-13:0] ppns [33];
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  initial begin
    flush = 0; fill_en = 0; fill_pg2m = 0; lk_va = '0; fill_va = '0; fill_ppn = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 33; i++) begin
      vas[i]  = 48'h4000_0000_0000 + 48'(i) * 48'h20_1000;
      ppns[i] = 28'($urandom);
    end
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); fill_en = 1; fill_va = vas[i]; fill_ppn = ppns[i]; fill_pg2m = (i == 5);
    end
    @(negedge clk); fill_en = 0;
    for (int i = 0; i < 32; i++) begin
      lk_va = vas[i] | 48'h123; @(negedge clk);
      chk(lk_hit, $sformatf("hit %0d", i));
      if (i == 5) chk(lk_pa == {ppns[i][27:9], lk_va[20:0]}, "2MB translation");
      else        chk(lk_pa == {ppns[i], 12'h123}, $sformatf("4KB translation %0d", i));
    end
    lk_va = vas[5] + 48'h1_0000; @(negedge clk); chk(lk_hit, "2MB page covers neighbouring 4KB page");
    lk_va = vas[32]; @(negedge clk); chk(!lk_hit, "miss before fill");
    @(negedge clk); fill_en = 1; fill_va = vas[32]; fill_ppn = ppns[32]; fill_pg2m = 0;
    @(negedge clk); fill_en = 0;
    begin
      int nh = 0;
      for (int i = 0; i < 33; i++) begin lk_va = vas[i]; @(negedge clk); if (lk_hit) nh++; end
      chk(nh == 32, $sformatf("capacity 32, got %0d", nh));
    end
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    lk_va = vas[32]; @(negedge clk); chk(!lk_hit, "flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
