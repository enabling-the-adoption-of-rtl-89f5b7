// tb_impica_address_engine: runs the address engine alone. The testbench
// provides the instruction and data RAMs and plays the access engine and
// the IMPICA cache: each access-queue entry is answered after a random delay
// through the response queue, in a shuffled order, with the word read from
// a model memory (identity translation). Three list searches and one
// arithmetic program run concurrently. Checked: results written to the
// parameter area, completion flags, one context switch per load, root bits
// on the first two loads of each operation only, the slot carried by every
// access, and ALU results.
module tb_impica_address_engine;
  import impica_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic req_valid, req_ready, imem_en, dmem_en, dmem_we, acc_valid, acc_ready, rsp_valid, rsp_ready;
  logic crd_en, done_valid;
  req_t req; logic [PC_W-1:0] imem_addr; logic [31:0] imem_rdata;
  logic [10:0] dmem_addr; word_t dmem_wdata, dmem_rdata, crd_data;
  acc_t acc; resp_t rsp; paddr_t crd_pa; slot_t crd_slot, done_slot;
  logic [31:0] n_ctx_switch, n_instr;
  impica_address_engine dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask

  logic [31:0] iram [4096];
  word_t dram [2048];
  word_t vmem [vaddr_t];
  always @(posedge clk) begin
    if (imem_en) imem_rdata <= iram[imem_addr];
    if (dmem_en) begin
      if (dmem_we) dram[dmem_addr] <= dmem_wdata;
      dmem_rdata <= dram[dmem_addr];
    end
    if (crd_en) crd_data <= vmem.exists(vaddr_t'(crd_pa)) ? vmem[vaddr_t'(crd_pa)] : '0;
  end

  // access engine / cache stand-in
  typedef struct { resp_t r; int due; } pr_t;
  pr_t waiting [$];
  int cyc = 0, nacc = 0, nroot = 0, bad_root = 0;
  int loads_of [128];
  always @(posedge clk) cyc <= cyc + 1;
  assign acc_ready = 1'b1;
  always @(posedge clk) if (rst_n && acc_valid) begin
    waiting.push_back('{r: '{pa: paddr_t'(acc.va), slot: acc.slot, rd: acc.rd}, due: cyc + 5 + $urandom % 40});
    nacc++;
    if (acc.root != (loads_of[acc.slot] < 2)) bad_root++;
    loads_of[acc.slot]++;
  end
  int pick;
  always @(posedge clk) begin
    if (rst_n && rsp_valid && rsp_ready) begin rsp_valid <= 0; end
    if (rst_n && (!rsp_valid || rsp_ready)) begin
      rsp_valid <= 0;
      pick = -1;
      foreach (waiting[i]) if (pick < 0 && waiting[i].due <= cyc && ($urandom % 2)) pick = i;
      if (pick >= 0) begin rsp_valid <= 1; rsp <= waiting[pick].r; waiting.delete(pick); end
    end
  end

  int ndone = 0, naccepted = 0;
  always @(posedge clk) if (rst_n && req_valid && req_ready) naccepted++;
  always @(posedge clk) if (rst_n && done_valid) ndone++;

  initial begin
    automatic int pc = 0;
    automatic vaddr_t node [20];
    req_valid = 0; req = '0; rsp_valid = 0; rsp = '0;
    foreach (loads_of[i]) loads_of[i] = 0;
    foreach (dram[i]) dram[i] = '0;
    foreach (iram[i]) iram[i] = '0;
    // list search at PC 0 (P0 head, P1 key, P2 result)
    iram[0] = mk(OP_LDP, 1, 0, 0, 0);
    iram[1] = mk(OP_LDP, 2, 0, 0, 1);
    iram[2] = mk(OP_BEQ, 0, 1, 0, 6);
    iram[3] = mk(OP_LD,  3, 1, 0, 0);
    iram[4] = mk(OP_BEQ, 0, 3, 2, 4);
    iram[5] = mk(OP_LD,  1, 1, 0, 8);
    iram[6] = mk(OP_BEQ, 0, 0, 0, -4);
    iram[8] = mk(OP_STP, 0, 1, 0, 2);
    iram[9] = mk(OP_DONE, 0, 0, 0, 0);
    // arithmetic at PC 16: P2 = ((P0 + P1) << 4) ^ (P0 - 3), then BLTU/BGEU
    iram[16] = mk(OP_LDP, 1, 0, 0, 0);
    iram[17] = mk(OP_LDP, 2, 0, 0, 1);
    iram[18] = mk(OP_ADD, 3, 1, 2, 0);
    iram[19] = mk(OP_SLLI, 3, 3, 0, 4);
    iram[20] = mk(OP_ADDI, 4, 1, 0, -3);
    iram[21] = mk(OP_XOR, 3, 3, 4, 0);
    iram[22] = mk(OP_BLTU, 0, 2, 1, 2);      // P1 < P0 -> skip
    iram[23] = mk(OP_ADDI, 3, 0, 0, 99);
    iram[24] = mk(OP_STP, 0, 3, 0, 2);
    iram[25] = mk(OP_DONE, 0, 0, 0, 0);
    for (int i = 0; i < 20; i++) node[i] = 48'h1000_0000 + vaddr_t'(i * 4160);
    for (int i = 0; i < 20; i++) begin
      vmem[node[i]] = word_t'(500 + i);
      vmem[node[i] + 8] = (i == 19) ? '0 : word_t'(node[i+1]);
    end
    for (int s = 0; s < 3; s++) begin
      dram[s*16 + 0] = word_t'(node[0]);
      dram[s*16 + 1] = word_t'(500 + 19 - 5*s);
    end
    dram[3*16 + 0] = 64'd1000; dram[3*16 + 1] = 64'd24;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int s = 0; s < 4; s++) begin
      @(negedge clk); req_valid = 1; req = '{start_pc: (s == 3) ? 12'd16 : 12'd0, slot: slot_t'(s)};
      while (naccepted != s + 1) @(negedge clk);
      req_valid = 0;
    end
    while (ndone < 4) @(negedge clk);
    repeat (3) @(negedge clk);
    for (int s = 0; s < 3; s++) begin
      chk(dram[s*16 + 2] == word_t'(node[19 - 5*s]), $sformatf("search %0d result %h", s, dram[s*16+2]));
      chk(dram[s*16 + 7] == 64'd1, "completion flag");
      chk(loads_of[s] == 2*(19 - 5*s) + 1, $sformatf("loads of op %0d: %0d", s, loads_of[s]));
    end
    chk(dram[3*16 + 2] == ((64'd1024 << 4) ^ 64'd997), $sformatf("alu result %h", dram[3*16+2]));
    chk(n_ctx_switch == 32'(nacc), "one context switch per load");
    chk(bad_root == 0, "root bit only on the first two loads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
