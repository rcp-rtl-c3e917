// tb_rcp_spec_buf: self-checking test of the speculative buffer.
// Writes entries at load-queue indices and checks the indexed read, the
// associative search by line address (match, live = match and not stale, the
// lowest live entry), the mask updates (clear, merged, stale, remote) and that
// an indexed write wins over a mask update in the same cycle.
module tb_rcp_spec_buf;
  import rcp_pkg::*;
  localparam int unsigned N = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic        wr_en = 0;
  logic [7:0]  wr_idx = '0, rd_idx = '0;
  sb_entry_t   wr_entry = '0, rd_entry, q_live_entry;
  logic [N-1:0] clr_mask = '0, set_merged_mask = '0, set_stale_mask = '0, clr_remote_mask = '0;
  laddr_t      q_addr = '0, q2_addr = '0;
  logic [N-1:0] q_match, q_live, q2_match, valid_o;
  rcp_spec_buf #(.ENTRIES(N)) dut (.*);

  initial begin #1_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic wr(input int i, input laddr_t a, input logic remote);
    @(negedge clk);
    wr_en = 1; wr_idx = 8'(i);
    wr_entry = '{valid: 1'b1, ready: 1'b1, meta: '{count: 4'd1, merged: 1'b0, remote: remote, stale: 1'b0},
                 addr: a, data: {16{a, 6'd0}}, state: ST_E};
    @(negedge clk);
    wr_en = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    #1 check(valid_o == '0, "empty after reset");
    wr(3, 26'h100, 1'b1);
    wr(7, 26'h100, 1'b0);
    wr(9, 26'h222, 1'b0);
    rd_idx = 8'd9; q_addr = 26'h100; q2_addr = 26'h222;
    #1;
    check(rd_entry.valid && rd_entry.addr == 26'h222 && rd_entry.data == {16{26'h222, 6'd0}}, "indexed read");
    check(q_match == (N'(1) << 3 | N'(1) << 7), "search by address");
    check(q_live_entry.meta.remote && q_live_entry.addr == 26'h100, "lowest live entry");
    check(q2_match == N'(1) << 9, "second search port");
    // stale entry 3: no longer live
    @(negedge clk); set_stale_mask = N'(1) << 3;
    @(negedge clk); set_stale_mask = '0;
    #1 check(q_match == (N'(1) << 3 | N'(1) << 7) && q_live == N'(1) << 7, "stale entry matches but is not live");
    check(!q_live_entry.meta.remote, "live entry is now 7");
    // merged / remote masks
    @(negedge clk); set_merged_mask = N'(1) << 7; clr_remote_mask = N'(1) << 3;
    @(negedge clk); set_merged_mask = '0; clr_remote_mask = '0;
    rd_idx = 8'd7; #1 check(rd_entry.meta.merged, "merged flag set");
    rd_idx = 8'd3; #1 check(!rd_entry.meta.remote && rd_entry.meta.stale, "remote flag cleared");
    // write beats a clear in the same cycle
    @(negedge clk); clr_mask = N'(1) << 9 | N'(1) << 3; wr_en = 1; wr_idx = 8'd9;
    wr_entry.addr = 26'h333;
    @(negedge clk); clr_mask = '0; wr_en = 0;
    #1 check(valid_o == (N'(1) << 9 | N'(1) << 7), "clear applied, write kept");
    rd_idx = 8'd9; #1 check(rd_entry.addr == 26'h333, "written entry");
    // random writes and searches
    for (int it = 0; it < 200; it++) begin
      int i;
      laddr_t a;
      i = $urandom_range(N - 1); a = laddr_t'($urandom_range(3));
      wr(i, a, 1'b0);
      rd_idx = 8'(i); q_addr = a; #1;
      check(rd_entry.addr == a && q_match[i] && q_live[i], "random write then search");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
