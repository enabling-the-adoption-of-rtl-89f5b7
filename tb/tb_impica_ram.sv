// tb_impica_ram: writes random words through both ports of a 16KB RAM and
// reads them back through the other port, checking the one-cycle read
// latency and the depth (2048 x 64-bit words).
module tb_impica_ram;
  logic clk = 0;
  always #1 clk = ~clk;
  logic a_en, a_we, b_en, b_we;
  logic [10:0] a_addr, b_addr;
  logic [63:0] a_wdata, b_wdata, a_rdata, b_rdata;
  impica_ram #(.WIDTH(64), .BYTES(16384)) dut (.*);
  int checks = 0, failures = 0;
  logic [63:0] model [2048];
  initial begin
    a_en = 0; a_we = 0; b_en = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0;
    for (int i = 0; i < 2048; i++) begin
      @(negedge clk);
      model[i] = {$urandom, $urandom};
      if (i % 2) begin a_en = 1; a_we = 1; a_addr = 11'(i); a_wdata = model[i]; b_en = 0; end
      else       begin b_en = 1; b_we = 1; b_addr = 11'(i); b_wdata = model[i]; a_en = 0; end
    end
    @(negedge clk); a_en = 0; b_en = 0; a_we = 0; b_we = 0;
    for (int n = 0; n < 1000; n++) begin
      int x = $urandom % 2048, y = $urandom % 2048;
      @(negedge clk); a_en = 1; a_addr = 11'(x); b_en = 1; b_addr = 11'(y);
      @(negedge clk); a_en = 0; b_en = 0;
      checks += 2;
      if (b_rdata != model[y]) begin failures++; $display("FAIL b %0d", y); end
      if (a_rdata != model[x]) begin failures++; $display("FAIL a %0d", x); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
