// tb_rcp_resolve_seq: self-checking test of the load-resolution sequencer.
// A model L1 answers every request two cycles after accepting it and clears
// the specBuf bit of a resolved load.  Checks that PrMerge(j) resolves exactly
// the valid entries from the head to j in order, PrPurge(j) those from j to
// the tail (with wrap-around), that the processor gets one response at the end,
// and that ordinary requests pass through with their 1-cycle response.
module tb_rcp_resolve_seq;
  import rcp_pkg::*;
  localparam int unsigned LQ = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic cmd_valid = 0, cmd_ready, cmd_resp_valid, l1_valid, l1_ready, l1_resp_valid;
  pr_op_t cmd_op = OP_RD, l1_op;
  logic [ADDR_W-1:0] cmd_addr = '0, l1_addr;
  logic [7:0] cmd_lq = '0, lq_head = '0, lq_tail = '0, l1_lq;
  word_t cmd_wdata = '0, cmd_resp_data, l1_wdata, l1_resp_data;
  logic [LQ-1:0] sb_valid;
  rcp_resolve_seq #(.LQ(LQ)) dut (.*);

  initial begin #1_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  // model L1
  int busy = 0;
  pr_op_t seen_op [$];
  int     seen_lq [$];
  logic [7:0] pend_lq;
  assign l1_ready = (busy == 0);
  always @(posedge clk) begin
    l1_resp_valid <= 1'b0;
    if (!rst_n) begin
      busy <= 0; sb_valid <= '0; l1_resp_data <= '0;
    end else if (l1_valid && l1_ready) begin
      busy <= 2; pend_lq <= l1_lq;
      seen_op.push_back(l1_op); seen_lq.push_back(int'(l1_lq));
      l1_resp_data <= l1_wdata + 64'(l1_addr);
      if (l1_op == OP_RD) begin busy <= 0; l1_resp_valid <= 1'b1; end
    end else if (busy == 1) begin
      busy <= 0; l1_resp_valid <= 1'b1;
      sb_valid[pend_lq[4:0]] <= 1'b0;
    end else if (busy > 1) busy <= busy - 1;
  end

  task automatic bulk(input pr_op_t o, input int j, input int head, input int tail, input logic [LQ-1:0] v);
    int n, exp_n;
    int idx, last;
    logic [LQ-1:0] vv;
    @(negedge clk);
    sb_valid = v; seen_op.delete(); seen_lq.delete();
    cmd_valid = 1; cmd_op = o; cmd_lq = 8'(j); lq_head = 8'(head); lq_tail = 8'(tail);
    @(negedge clk);
    cmd_valid = 0;
    n = 0;
    while (!cmd_resp_valid && n < 1000) begin @(negedge clk); n++; end
    check(cmd_resp_valid, "bulk resolution answers");
    @(negedge clk);
    check(!cmd_resp_valid, "single response");
    // expected sequence
    idx = (o == OP_PRMERGE) ? head : j;
    last = (o == OP_PRMERGE) ? j : (tail + LQ - 1) % LQ;
    exp_n = 0; vv = v;
    forever begin
      if (vv[idx]) begin
        check(exp_n < seen_lq.size() && seen_lq[exp_n] == idx && seen_op[exp_n] == o,
              $sformatf("resolves entry %0d in order", idx));
        exp_n++;
      end
      if (idx == last) break;
      idx = (idx + 1) % LQ;
    end
    check(seen_lq.size() == exp_n, $sformatf("resolves exactly %0d entries (got %0d)", exp_n, seen_lq.size()));
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // pass-through read
    @(negedge clk);
    cmd_valid = 1; cmd_op = OP_RD; cmd_addr = 32'h40; cmd_wdata = 64'd5;
    #1 check(cmd_ready && l1_valid, "read passes through");
    @(negedge clk);
    cmd_valid = 0;
    check(cmd_resp_valid && cmd_resp_data == 64'h45, "pass-through response after 1 cycle");
    bulk(OP_PRMERGE, 5, 2, 10, 32'h0000_03f4);
    bulk(OP_PRPURGE, 6, 2, 10, 32'h0000_03f4);
    bulk(OP_PRMERGE, 1, 30, 4, 32'hc000_0007);   // wraps
    bulk(OP_PRPURGE, 30, 20, 3, 32'hc000_0007);  // wraps
    for (int it = 0; it < 30; it++) begin
      int h, t, j;
      h = $urandom_range(LQ - 1); t = (h + 1 + $urandom_range(LQ - 2)) % LQ;
      j = (h + $urandom_range((t + LQ - h) % LQ - 1)) % LQ;
      bulk(($urandom_range(1) == 0) ? OP_PRMERGE : OP_PRPURGE, j, h, t, LQ'({$urandom}));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
