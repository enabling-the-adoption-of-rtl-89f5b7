// tb_impica_queue: checks the FIFO used for IMPICA's queues against a
// SystemVerilog queue model under random pushes and pops, including the
// full (16 entries) and empty conditions.
module tb_impica_queue;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  logic [4:0] count;
  impica_queue #(.T(logic [15:0]), .DEPTH(16)) dut (.*);
  int checks = 0, failures = 0, fulls = 0;
  logic [15:0] model [$];
  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      in_valid  = ($urandom % 100) < ((c / 500) % 2 ? 30 : 70);
      out_ready = ($urandom % 100) < ((c / 500) % 2 ? 70 : 30);
      in_data   = 16'($urandom);
      checks++;
      if (in_ready != (model.size() < 16) || out_valid != (model.size() > 0) || count != 5'(model.size()))
        begin failures++; $display("FAIL flags at %0d", c); end
      if (out_valid) begin
        checks++;
        if (out_data != model[0]) begin failures++; $display("FAIL data %h vs %h", out_data, model[0]); end
      end
      if (model.size() == 16) fulls++;
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    checks++; if (fulls == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
