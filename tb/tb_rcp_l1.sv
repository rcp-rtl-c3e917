// tb_rcp_l1: self-checking test of the L1 controller with a model L2.
// The model L2 accepts one request at a time and answers it 7 cycles later
// with the line from a reference memory (so that the processor sees the
// 8-cycle L2 round trip as 9 cycles, 1 + 8), and records every message.
// Checks: 1-cycle hit latency, miss handling, silent E->M, SpecRd hit (XSpec),
// SpecRd miss -> GetSpec with no allocation (ISpec), SpecRd hit in the specBuf,
// local PrMerge/PrPurge without messages, L1Merge / L1Purge for the last load
// of a remote group, forwarded GetSpec answered without a state change,
// invalidation of a speculative line (replay notification, resolution ignored)
// and eviction with a Put.  Small cache: 4 sets x 2 ways.
module tb_rcp_l1;
  import rcp_pkg::*;
  localparam int unsigned LQ = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  logic cpu_req_valid = 0, cpu_req_ready, cpu_resp_valid, spec_inv_valid;
  pr_op_t cpu_req_op = OP_RD;
  logic [ADDR_W-1:0] cpu_req_addr = '0;
  logic [7:0] cpu_req_lq = '0;
  word_t cpu_req_wdata = '0, cpu_resp_data;
  logic [LQ-1:0] sb_valid_o, spec_inv_mask;
  logic req_valid, req_ready, resp_valid, fwd_valid = 0, fwd_ack_valid;
  l1_to_l2_t req;
  l2_resp_t resp;
  l2_fwd_t fwd = '0;
  l1_fwd_ack_t fwd_ack;
  l1_ev_t ev;
  laddr_t dbg_addr = '0;
  coh_state_t dbg_state;
  rcp_l1 #(.SETS(4), .WAYS(2), .LQ(LQ)) dut (.*);

  initial begin #2_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  // ---- model L2
  function automatic line_t pat(laddr_t la);
    line_t l;
    for (int w = 0; w < 8; w++) l = put_word(l, WSEL_W'(w), {6'd0, la, 24'h0, 8'(w)});
    return l;
  endfunction
  line_t mem [laddr_t];
  int n_msg [l1_req_t];
  int busy = 0;
  l1_to_l2_t cur;
  logic shared_next = 0;
  assign req_ready = (busy == 0) && rst_n;
  always @(posedge clk) begin
    resp_valid <= 1'b0;
    if (req_valid && req_ready) begin
      cur <= req; busy <= 6;
      if (n_msg.exists(req.kind)) n_msg[req.kind]++; else n_msg[req.kind] = 1;
      if (req.kind == RQ_PUTM) mem[req.addr] = req.data;
    end else if (busy == 1) begin
      busy <= 0; resp_valid <= 1'b1;
      resp.data   <= mem.exists(cur.addr) ? mem[cur.addr] : pat(cur.addr);
      resp.shared <= shared_next;
      resp.stale  <= 1'b0;
    end else if (busy > 1) busy <= busy - 1;
  end
  function automatic int msgs(l1_req_t k);
    return n_msg.exists(k) ? n_msg[k] : 0;
  endfunction

  word_t rdv;
  int lat;
  task automatic op(input pr_op_t o, input int line, input int w, input int lq, input word_t wd);
    int unsigned t0;
    int n;
    @(negedge clk);
    cpu_req_valid = 1; cpu_req_op = o; cpu_req_addr = {line[25:0], 3'(w), 3'b0}; cpu_req_lq = 8'(lq);
    cpu_req_wdata = wd;
    n = 0;
    while (!cpu_req_ready && n < 1000) begin @(negedge clk); n++; end
    t0 = cyc;
    @(negedge clk);
    cpu_req_valid = 0;
    n = 0;
    while (!cpu_resp_valid && n < 1000) begin @(negedge clk); n++; end
    check(cpu_resp_valid, "response");
    rdv = cpu_resp_data; lat = int'(cyc - t0);
  endtask
  task automatic look(input int line);
    dbg_addr = laddr_t'(line); #1;
  endtask
  task automatic forward(input fwd_t k, input int line);
    @(negedge clk);
    while (!cpu_req_ready) @(negedge clk);
    fwd_valid = 1; fwd.kind = k; fwd.addr = laddr_t'(line);
    @(negedge clk);
    fwd_valid = 0;
    check(fwd_ack_valid, "forward acknowledged in the next cycle");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // miss, hit, silent E->M
    op(OP_RD, 8, 1, 0, 0);
    check(rdv == get_word(pat(8), 1) && lat == 9, $sformatf("miss data and 9-cycle latency (%0d)", lat));
    check(msgs(RQ_GETS) == 1, "GetS sent");
    op(OP_RD, 8, 2, 0, 0);
    check(rdv == get_word(pat(8), 2) && lat == 1, "hit in 1 cycle");
    look(8); check(dbg_state == CS_E, "E after unshared GetS");
    op(OP_WR, 8, 2, 0, 64'hbeef);
    check(lat == 1 && msgs(RQ_GETX) == 0 && msgs(RQ_UPGRADE) == 0, "write hit on E is silent");
    look(8); check(dbg_state == CS_M, "E -> M");
    op(OP_RD, 8, 2, 0, 0); check(rdv == 64'hbeef, "written data read back");
    // SpecRd hit -> MSpec, local merge
    op(OP_SPECRD, 8, 2, 0, 0);
    check(rdv == 64'hbeef && lat == 1, "SpecRd hit");
    look(8); check(dbg_state == CS_MSPEC, "M -> MSpec");
    op(OP_PRMERGE, 0, 0, 0, 0);
    look(8); check(dbg_state == CS_M && msgs(RQ_L1MERGE) == 0, "MSpec -> M, no message");
    // SpecRd miss -> GetSpec, no allocation
    op(OP_SPECRD, 12, 3, 4, 0);
    check(rdv == get_word(pat(12), 3) && msgs(RQ_GETSPEC) == 1, "GetSpec on SpecRd miss");
    look(12); check(dbg_state == CS_ISPEC, "ISpec, no cache allocation");
    check(sb_valid_o[4], "specBuf entry valid");
    op(OP_SPECRD, 12, 5, 5, 0);
    check(rdv == get_word(pat(12), 5) && msgs(RQ_GETSPEC) == 1 && lat == 1, "SpecRd served by the specBuf");
    op(OP_PRMERGE, 0, 0, 4, 0);
    check(msgs(RQ_L1MERGE) == 0, "first load of the group merges locally");
    op(OP_PRMERGE, 0, 0, 5, 0);
    check(msgs(RQ_L1MERGE) == 1, "last load sends L1Merge");
    look(12); check(dbg_state == CS_E && sb_valid_o == '0, "ISpec -> E after L1Merge");
    // ISpec purged
    op(OP_SPECRD, 16, 0, 1, 0);
    op(OP_PRPURGE, 0, 0, 1, 0);
    check(msgs(RQ_L1PURGE) == 1, "L1Purge sent");
    look(16); check(dbg_state == CS_I, "ISpec -> I");
    // forwarded GetSpec leaves M untouched
    forward(FW_GETSPEC, 8);
    check(get_word(fwd_ack.data, 2) == 64'hbeef && !fwd_ack.dirty, "FwdGetSpec answered with data, not dirty");
    look(8); check(dbg_state == CS_M, "owner stays M after FwdGetSpec");
    // forwarded L1Merge: M -> S with dirty data
    forward(FW_L1MERGE, 8);
    check(fwd_ack.dirty && get_word(fwd_ack.data, 2) == 64'hbeef, "FwdL1Merge flushes dirty data");
    look(8); check(dbg_state == CS_S, "M -> S");
    // invalidation of a speculative line
    op(OP_SPECRD, 8, 0, 7, 0);
    look(8); check(dbg_state == CS_SSPEC, "S -> SSpec");
    @(negedge clk);
    fwd_valid = 1; fwd.kind = FW_INV; fwd.addr = 26'd8;
    #1 check(spec_inv_valid && spec_inv_mask == LQ'(1) << 7, "replay notification for load 7");
    @(negedge clk); fwd_valid = 0;
    look(8); check(dbg_state == CS_I, "SSpec -> I on invalidation");
    op(OP_PRMERGE, 0, 0, 7, 0);
    check(msgs(RQ_L1MERGE) == 1 && sb_valid_o == '0, "resolution of invalidated load ignored");
    // write miss, eviction: lines 0, 4, 8 in set 0 (2 ways)
    op(OP_WR, 0, 0, 0, 64'h1);
    op(OP_WR, 4, 0, 0, 64'h2);
    op(OP_WR, 20, 0, 0, 64'h3);
    check(msgs(RQ_PUTM) >= 1, "eviction sends PutM");
    op(OP_RD, 0, 0, 0, 0); check(rdv == 64'h1, "evicted dirty line comes back");
    op(OP_RD, 4, 0, 0, 0); check(rdv == 64'h2, "evicted dirty line comes back");
    op(OP_RD, 20, 0, 0, 0); check(rdv == 64'h3, "line 20 data");
    // upgrade on S
    shared_next = 1;
    op(OP_RD, 24, 0, 0, 0);
    look(24); check(dbg_state == CS_S, "shared GetS -> S");
    shared_next = 0;
    op(OP_WR, 24, 1, 0, 64'h77);
    check(msgs(RQ_UPGRADE) == 1, "write on S sends Upgrade");
    look(24); check(dbg_state == CS_M, "S -> M");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
