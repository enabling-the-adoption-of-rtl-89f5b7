// tb_bloom_signature: inserts random line addresses and checks there are no
// false negatives, that the false-positive rate of a filter loaded with 607
// addresses stays near the 20% design point, that the signature moves to a
// new filter after 607 insertions, and that clear empties it.
// Small NFILT (3) so overflow into the last filter is also exercised.
module tb_bloom_signature;
  import lazypim_pkg::*;
  localparam int NF = 3;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic clear = 0, ins = 0;
  logic [LADDR_W-1:0] ins_addr = '0, q_addr = '0;
  logic q_hit, overflow;
  logic [1:0] rd_idx = '0;
  logic [2047:0] rd_filter;
  logic [2:0] n_used;
  logic [31:0] n_inserted;
  int checks = 0, failures = 0;

  bloom_signature #(.NFILT(NF)) dut (.*);

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [LADDR_W-1:0] kept [2000];
  initial begin
    #20000000 $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1);
    $finish;
  end

  initial begin
    int fp;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(n_used == 0, "empty signature has no filters");
    q_addr = 26'h123456; #0.5;
    chk(!q_hit, "empty signature never hits");
    // fill exactly one filter with 607 addresses
    for (int i = 0; i < 607; i++) begin
      kept[i] = LADDR_W'({$urandom, $urandom});
      ins = 1; ins_addr = kept[i];
      @(negedge clk);
    end
    ins = 0;
    chk(n_used == 1, "607 addresses fit one filter");
    for (int i = 0; i < 607; i++) begin
      q_addr = kept[i]; #0.5;
      chk(q_hit, "no false negative");
    end
    // false-positive rate with a loaded filter
    fp = 0;
    for (int i = 0; i < 4000; i++) begin
      q_addr = LADDR_W'({$urandom, $urandom}) | 26'h2000000; #0.5;
      if (q_hit) fp++;
    end
    $display("false positives %0d / 4000 at 607 addresses", fp);
    chk(fp < 4000 * 30 / 100, "false-positive rate near 20% or lower");
    chk(fp > 0, "filter is populated (some false positives)");
    // next insert moves to filter 1
    @(negedge clk);
    for (int i = 607; i < 2000; i++) begin
      kept[i] = LADDR_W'({$urandom, $urandom});
      ins = 1; ins_addr = kept[i];
      @(negedge clk);
      if (i == 607) chk(n_used == 2, "608th address opens the second filter");
    end
    ins = 0;
    chk(n_used == 3, "all three filters used");
    chk(overflow, "overflow flagged past NFILT*607");
    chk(n_inserted == 2000, "insert counter");
    for (int i = 0; i < 2000; i++) begin
      q_addr = kept[i]; #0.5;
      chk(q_hit, "no false negative after overflow");
    end
    rd_idx = 0; #0.5;
    chk(rd_filter != 0, "filter 0 readable");
    // one insert per cycle: 2000 inserts took 2000 cycles
    clear = 1; @(negedge clk); clear = 0;
    chk(n_used == 0 && !overflow && n_inserted == 0, "clear empties signature");
    q_addr = kept[5]; #0.5;
    chk(!q_hit, "cleared signature does not hit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
