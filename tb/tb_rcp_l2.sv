// tb_rcp_l2: self-checking test of the shared L2 / directory with two model
// L1s and a model memory (20-cycle latency).  The model L1s answer every
// forwarded request in the next cycle.  Checks: grant of E and S, forwarded
// GetS, GetSpec served by the M owner without changing the directory
// (non-interference), GetSpec from memory without allocation (ISpec), L1Merge
// forwarded to the owner, L1Purge, the spec core count, invalidation of
// speculative copies by GetX, recall of L1 copies on an L2 eviction, and the L2
// part of the round trip (7 cycles from request to response; with the L1's
// request register this is the 8-cycle round trip).  Small L2: 4 sets x 2 ways.
module tb_rcp_l2;
  import rcp_pkg::*;
  localparam int unsigned NC = 2, LQ = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  logic [NC-1:0] req_valid = '0, req_ready, resp_valid, fwd_valid, fwd_ack_valid;
  l1_to_l2_t req [NC];
  l2_resp_t resp;
  l2_fwd_t fwd;
  l1_fwd_ack_t fwd_ack [NC];
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t mem_req;
  line_t mem_resp_data;
  logic ev_getspec_fwd, ev_getspec_mem, ev_merge_nonspec, ev_merge_spec, ev_merge_fwd,
        ev_purge_nonspec, ev_purge_spec, ev_spec_inv, ev_recall;
  laddr_t dbg_addr = '0;
  coh_state_t dbg_state;
  logic [NC-1:0] dbg_sharers;
  logic [7:0] dbg_owner, dbg_spec_core;
  rcp_l2 #(.NUM_CORES(NC), .SETS(4), .WAYS(2), .LQ(LQ)) dut (.*);

  initial begin #2_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  function automatic line_t pat(laddr_t la);
    line_t l;
    for (int w = 0; w < 8; w++) l = put_word(l, WSEL_W'(w), {6'd0, la, 24'h0, 8'(w)});
    return l;
  endfunction

  // ---- memory model
  line_t mem [laddr_t];
  int mbusy = 0, n_memrd = 0;
  laddr_t ma;
  assign mem_req_ready = (mbusy == 0);
  always @(posedge clk) begin
    mem_resp_valid <= 1'b0;
    if (mem_req_valid && mem_req_ready) begin
      if (mem_req.we) mem[mem_req.addr] = mem_req.data;
      else begin mbusy <= 19; ma <= mem_req.addr; n_memrd++; end
    end else if (mbusy == 1) begin
      mbusy <= 0; mem_resp_valid <= 1'b1;
      mem_resp_data <= mem.exists(ma) ? mem[ma] : pat(ma);
    end else if (mbusy > 1) mbusy <= mbusy - 1;
  end

  // ---- model L1s: answer forwards in the next cycle
  line_t ack_data = '0;
  logic  ack_dirty = 1'b0;
  fwd_t  last_fwd [NC];
  int    n_fwd [NC];
  initial for (int c = 0; c < NC; c++) n_fwd[c] = 0;
  always @(posedge clk) begin
    fwd_ack_valid <= '0;
    for (int c = 0; c < NC; c++) if (rst_n && fwd_valid[c]) begin
      fwd_ack_valid[c] <= 1'b1;
      fwd_ack[c] <= '{data: ack_data, dirty: ack_dirty};
      last_fwd[c] = fwd.kind;
      n_fwd[c]++;
    end
  end

  // ---- event counters
  int n_ev [9];
  initial for (int i = 0; i < 9; i++) n_ev[i] = 0;
  always @(posedge clk) if (rst_n) begin
    n_ev[0] += int'(ev_getspec_fwd);  n_ev[1] += int'(ev_getspec_mem);
    n_ev[2] += int'(ev_merge_nonspec); n_ev[3] += int'(ev_merge_spec);
    n_ev[4] += int'(ev_merge_fwd);    n_ev[5] += int'(ev_purge_nonspec);
    n_ev[6] += int'(ev_purge_spec);   n_ev[7] += int'(ev_spec_inv);
    n_ev[8] += int'(ev_recall);
  end

  l2_resp_t r;
  int lat;
  task automatic send(input int c, input l1_req_t k, input int line, input int lq = 0,
                      input line_t d = '0);
    int unsigned t0;
    int n;
    @(negedge clk);
    req_valid[c] = 1'b1; req[c] = '{kind: k, addr: laddr_t'(line), lq: 8'(lq), data: d};
    t0 = cyc;
    n = 0;
    #1;
    while (!req_ready[c] && n < 5000) begin @(negedge clk); n++; end
    @(negedge clk);
    req_valid[c] = 1'b0;
    n = 0;
    while (!resp_valid[c] && n < 5000) begin @(negedge clk); n++; end
    check(resp_valid[c], "response");
    r = resp; lat = int'(cyc - t0);
    @(posedge clk); #1;          // let the event counters see the response cycle
  endtask
  task automatic look(input int line);
    dbg_addr = laddr_t'(line); #1;
  endtask

  initial begin
    for (int c = 0; c < NC; c++) req[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // GetS miss -> E
    send(0, RQ_GETS, 1);
    check(r.data == pat(1) && !r.shared && n_memrd == 1, "GetS miss: memory data, exclusive");
    look(1); check(dbg_state == CS_E && dbg_owner == 8'd0, "L2 E, owner core 0");
    // GetS from core 1: forwarded to the owner, both share
    send(1, RQ_GETS, 1);
    check(last_fwd[0] == FW_GETS && r.shared, "GetS forwarded to owner, S granted");
    look(1); check(dbg_state == CS_S && dbg_sharers == 2'b11, "L2 S with two sharers");
    send(0, RQ_GETS, 1);
    check(lat == 7, $sformatf("L2 hit: response 7 cycles after the request (%0d)", lat));
    // GetX -> M; GetSpec from core 1 served by the owner, directory unchanged
    send(0, RQ_GETX, 2);
    look(2); check(dbg_state == CS_M && dbg_owner == 8'd0, "L2 M, owner core 0");
    ack_data = {8{64'hd00d}};
    send(1, RQ_GETSPEC, 2, 3);
    check(last_fwd[0] == FW_GETSPEC && r.data == {8{64'hd00d}} && n_ev[0] == 1, "GetSpec forwarded, owner's data");
    look(2);
    check(dbg_state == CS_MSPEC && dbg_owner == 8'd0 && dbg_spec_core == 8'd1, "L2 MSpec, owner unchanged");
    // L1Merge forwarded to the owner, which flushes dirty data
    ack_dirty = 1'b1;
    send(1, RQ_L1MERGE, 2, 9);
    ack_dirty = 1'b0;
    check(last_fwd[0] == FW_L1MERGE && r.shared && !r.stale && n_ev[4] == 1 && n_ev[2] == 1, "L1Merge forwarded, S granted");
    look(2); check(dbg_state == CS_S && dbg_spec_core == 8'd0 && dbg_sharers == 2'b11, "L2 S, spec core 0");
    // GetSpec from memory, no allocation; purge
    send(1, RQ_GETSPEC, 3, 1);
    check(r.data == pat(3) && n_ev[1] == 1, "GetSpec from memory");
    look(3); check(dbg_state == CS_ISPEC, "L2 ISpec, not allocated");
    send(0, RQ_GETSPEC, 3, 1);
    look(3); check(dbg_spec_core == 8'd2, "two speculative cores");
    send(1, RQ_L1PURGE, 3, 1);
    check(n_ev[6] == 1, "purge with another speculative core");
    send(0, RQ_L1MERGE, 3, 1);
    check(!r.shared && n_ev[2] == 2, "last merge: exclusive");
    look(3); check(dbg_state == CS_E && dbg_owner == 8'd0 && dbg_spec_core == 8'd0, "ISpec -> E after merge");
    // L1Merge without an entry is answered stale
    send(1, RQ_L1MERGE, 3, 1);
    check(r.stale, "merge without an entry: stale");
    // GetX invalidates a speculative copy
    send(0, RQ_GETSPEC, 5, 2);
    send(1, RQ_GETX, 5);
    check(last_fwd[0] == FW_INV && n_ev[7] == 1, "GetX invalidates the speculative holder");
    look(5); check(dbg_state == CS_M && dbg_spec_core == 8'd0, "XSpec -> M");
    // recall: lines 1, 5 and 9 share set 1; line 1 is held by both cores
    send(0, RQ_GETS, 9);
    check(n_ev[8] >= 1, "L2 eviction recalls L1 copies");
    // PutM of the recalled-and-refetched line keeps its data
    send(1, RQ_GETX, 13, 0);
    send(1, RQ_PUTM, 13, 0, {8{64'h5555}});
    send(0, RQ_GETS, 13);
    check(r.data == {8{64'h5555}}, "PutM data kept by the L2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
