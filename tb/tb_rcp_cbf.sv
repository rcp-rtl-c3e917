// tb_rcp_cbf: self-checking test of the counting bloom filter.
// Inserts random line addresses, checks that every inserted line hits (no false
// negatives), removes them again and checks that the filter is empty and that
// the false-positive rate while loaded stays low.  The query is combinational.
module tb_rcp_cbf;
  import rcp_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic ins_en = 0, rem_en = 0, q_hit;
  laddr_t ins_addr = '0, rem_addr = '0, q_addr = '0;
  rcp_cbf dut (.*);

  initial begin #1_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  laddr_t set_a [32];
  int fp;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 32; i++) begin q_addr = laddr_t'($urandom); #1 check(!q_hit, "empty filter misses"); end
    for (int i = 0; i < 32; i++) begin
      set_a[i] = laddr_t'($urandom);
      @(negedge clk); ins_en = 1; ins_addr = set_a[i];
    end
    @(negedge clk); ins_en = 0;
    for (int i = 0; i < 32; i++) begin q_addr = set_a[i]; #1 check(q_hit, "inserted line hits"); end
    fp = 0;
    for (int i = 0; i < 200; i++) begin q_addr = laddr_t'($urandom); #1 fp += int'(q_hit); end
    check(fp < 40, $sformatf("false positives low (%0d/200)", fp));
    // insert and remove in the same cycle cancel
    @(negedge clk); ins_en = 1; ins_addr = set_a[0]; rem_en = 1; rem_addr = set_a[0];
    @(negedge clk); ins_en = 0; rem_en = 0;
    for (int i = 0; i < 32; i++) begin
      q_addr = set_a[i]; #1 check(q_hit, "still hits before removal");
    end
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); rem_en = 1; rem_addr = set_a[i];
    end
    @(negedge clk); rem_en = 0;
    for (int i = 0; i < 32; i++) begin q_addr = set_a[i]; #1 check(!q_hit, "removed line misses"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
