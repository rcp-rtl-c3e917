// tb_rcp_top_full: end-to-end test of rcp_top at its default (evaluated) size: 4 cores,
// 64 KB 8-way L1s, a 2 MB 16-way L2 bank, 32-entry load queues
//
// What it does: drives the core ports of every core one operation at a time,
// models main memory (100-cycle read latency, as the evaluated 50 ns DRAM at
// 2 GHz) and checks every load against a reference copy of memory.  Directed
// sequences exercise each protocol mechanism (speculative hits, GetSpec served
// by an owner or by memory, local and L2 merges and purges, invalidation of
// speculative copies, evictions, L2 recalls, allocator preemption); the event
// outputs are counted and any mechanism that never happened fails the test.  A
// random phase of loads, stores and speculative loads follows.  It also checks
// the non-interference property (a speculative load does not change the state
// of another core's copy) and the 1-cycle L1 hit latency and the 8-cycle L2
// round trip (9 cycles at the core port).
module tb_rcp_top_full;
  import rcp_pkg::*;

  // the default configuration of rcp_top
  localparam int unsigned NC  = 4;
  localparam int unsigned LQN = 32;
  localparam int unsigned L1S = 128;
  localparam int unsigned L1W = 8;
  localparam int unsigned L2S = 2048;
  localparam int unsigned L2W = 16;
  localparam int unsigned RAN = 8;
  localparam int unsigned MEM_LAT = 100;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  logic              core_valid      [NC];
  logic              core_ready      [NC];
  pr_op_t            core_op         [NC];
  logic [ADDR_W-1:0] core_addr       [NC];
  logic [7:0]        core_lq         [NC];
  word_t             core_wdata      [NC];
  logic [7:0]        core_lq_head    [NC];
  logic [7:0]        core_lq_tail    [NC];
  logic              core_resp_valid [NC];
  word_t             core_resp_data  [NC];
  logic              spec_inv_valid  [NC];
  logic [LQN-1:0]    spec_inv_mask   [NC];
  logic [7:0]        ra_rob_head     [NC];
  logic              ra_alloc_valid  [NC];
  logic [7:0]        ra_alloc_tag    [NC];
  logic              ra_alloc_grant  [NC];
  logic [$clog2(RAN)-1:0] ra_alloc_slot [NC];
  logic              ra_preempt_valid[NC];
  logic [7:0]        ra_preempt_tag  [NC];
  logic              ra_release_valid[NC];
  logic [7:0]        ra_release_tag  [NC];
  logic [RAN-1:0]    ra_busy         [NC];
  logic              mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t          mem_req;
  line_t             mem_resp_data;
  l1_ev_t            l1_ev           [NC];
  logic [8:0]        l2_ev;
  laddr_t            dbg_addr;
  coh_state_t        dbg_l1_state    [NC];
  coh_state_t        dbg_l2_state;
  logic [7:0]        dbg_spec_core;

  rcp_top  dut (.*);

  // ------------------------------------------------------------ memory model
  function automatic word_t init_word(laddr_t la, int w);
    return {6'd0, la, 24'h5A5A00, 8'(w)};
  endfunction
  line_t mem [laddr_t];
  function automatic line_t mem_line(laddr_t la);
    line_t l;
    if (mem.exists(la)) return mem[la];
    for (int w = 0; w < 8; w++) l = put_word(l, WSEL_W'(w), init_word(la, w));
    return l;
  endfunction
  int unsigned mem_cnt = 0;
  logic        mem_busy = 1'b0;
  laddr_t      mem_la;
  assign mem_req_ready = !mem_busy;
  always @(posedge clk) begin
    mem_resp_valid <= 1'b0;
    if (mem_req_valid && mem_req_ready) begin
      if (mem_req.we) mem[mem_req.addr] = mem_req.data;
      else begin mem_busy <= 1'b1; mem_la <= mem_req.addr; mem_cnt <= 2; end
    end else if (mem_busy) begin
      if (mem_cnt >= MEM_LAT - 1) begin
        mem_busy <= 1'b0; mem_resp_valid <= 1'b1; mem_resp_data <= mem_line(mem_la);
      end else mem_cnt <= mem_cnt + 1;
    end
  end

  // ------------------------------------------------------------ reference memory
  word_t refm [logic [31:0]];
  function automatic word_t ref_rd(logic [31:0] a);
    if (refm.exists(a)) return refm[a];
    return init_word(a[31:6], int'(a[5:3]));
  endfunction
  function automatic logic [31:0] A(int line, int w = 0);
    return {line[25:0], 3'(w), 3'b000};
  endfunction

  // ------------------------------------------------------------ event counters
  int n_specrd_hit, n_specrd_sbhit, n_getspec, n_merge_local, n_purge_local, n_l1merge,
      n_l1purge, n_ignored, n_fwd_getspec, n_fwd_l1merge, n_evict, n_inv_spec;
  int n_l2 [9];
  int n_spec_inv_port, n_preempt;
  initial begin
    {n_specrd_hit, n_specrd_sbhit, n_getspec, n_merge_local, n_purge_local, n_l1merge,
     n_l1purge, n_ignored, n_fwd_getspec, n_fwd_l1merge, n_evict, n_inv_spec} = '0;
    for (int i = 0; i < 9; i++) n_l2[i] = 0;
    n_spec_inv_port = 0; n_preempt = 0;
  end
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) begin
      n_specrd_hit   += int'(l1_ev[c].specrd_hit);
      n_specrd_sbhit += int'(l1_ev[c].specrd_sbhit);
      n_getspec      += int'(l1_ev[c].getspec);
      n_merge_local  += int'(l1_ev[c].merge_local);
      n_purge_local  += int'(l1_ev[c].purge_local);
      n_l1merge      += int'(l1_ev[c].l1merge);
      n_l1purge      += int'(l1_ev[c].l1purge);
      n_ignored      += int'(l1_ev[c].ignored);
      n_fwd_getspec  += int'(l1_ev[c].fwd_getspec);
      n_fwd_l1merge  += int'(l1_ev[c].fwd_l1merge);
      n_evict        += int'(l1_ev[c].evict);
      n_inv_spec     += int'(l1_ev[c].inv_spec);
      n_spec_inv_port += int'(spec_inv_valid[c]);
      n_preempt      += int'(ra_preempt_valid[c]);
    end
    for (int i = 0; i < 9; i++) n_l2[i] += int'(l2_ev[i]);
  end

  // ------------------------------------------------------------ watchdog
  initial begin
    #(64'd10 * 64'd2_000_000);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // ------------------------------------------------------------ core driver
  // One operation on core c; returns the response word and the cycles from
  // acceptance to response.
  task automatic op(input int c, input pr_op_t o, input logic [31:0] a, input int lq,
                    input word_t wd, input int head, input int tail,
                    output word_t rd, output int lat);
    int unsigned t0;
    int n;
    @(negedge clk);
    core_valid[c] = 1'b1; core_op[c] = o; core_addr[c] = a; core_lq[c] = 8'(lq);
    core_wdata[c] = wd; core_lq_head[c] = 8'(head); core_lq_tail[c] = 8'(tail);
    n = 0;
    while (!core_ready[c] && n < 100000) begin @(negedge clk); n++; end
    t0 = cyc;
    @(negedge clk);
    core_valid[c] = 1'b0;
    n = 0;
    while (!core_resp_valid[c] && n < 100000) begin @(negedge clk); n++; end
    check(core_resp_valid[c], "response arrives");
    rd  = core_resp_data[c];
    lat = int'(cyc - t0);
  endtask

  word_t rdv;
  int    lat;

  task automatic rd(input int c, input logic [31:0] a);
    op(c, OP_RD, a, 0, '0, 0, 0, rdv, lat);
    check(rdv == ref_rd(a), $sformatf("core %0d Rd %h: got %h exp %h", c, a, rdv, ref_rd(a)));
  endtask
  task automatic wr(input int c, input logic [31:0] a, input word_t v);
    op(c, OP_WR, a, 0, v, 0, 0, rdv, lat);
    refm[a] = v;
  endtask
  task automatic srd(input int c, input logic [31:0] a, input int lq);
    op(c, OP_SPECRD, a, lq, '0, 0, 0, rdv, lat);
    check(rdv == ref_rd(a), $sformatf("core %0d SpecRd %h: got %h exp %h", c, a, rdv, ref_rd(a)));
  endtask
  task automatic merge(input int c, input int lq, input int head, input int tail);
    op(c, OP_PRMERGE, '0, lq, '0, head, tail, rdv, lat);
  endtask
  task automatic purge(input int c, input int lq, input int head, input int tail);
    op(c, OP_PRPURGE, '0, lq, '0, head, tail, rdv, lat);
  endtask
  function automatic coh_state_t l1st(int c, int line);
    return dbg_l1_state[c];
  endfunction
  task automatic look(input int line);
    dbg_addr = laddr_t'(line);
    #1;
  endtask

  // ------------------------------------------------------------ test
  initial begin
    for (int c = 0; c < NC; c++) begin
      core_valid[c] = 0; core_op[c] = OP_RD; core_addr[c] = '0; core_lq[c] = '0;
      core_wdata[c] = '0; core_lq_head[c] = '0; core_lq_tail[c] = '0;
      ra_rob_head[c] = '0; ra_alloc_valid[c] = 0; ra_alloc_tag[c] = '0;
      ra_release_valid[c] = 0; ra_release_tag[c] = '0;
    end
    dbg_addr = '0;
    mem_resp_valid = 1'b0; mem_resp_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---- plain loads and stores, latency
    rd(0, A(100));                                   // miss to memory
    rd(0, A(100, 1));
    check(lat == 1, $sformatf("L1 hit latency 1 (got %0d)", lat));
    rd(1, A(100, 2));                                // L2 hit, core 0 owns E -> forward
    rd(2, A(100, 3));                                // L2 hit, S
    check(lat == 9, $sformatf("L2 hit round trip 8 (+1 at the core port) (got %0d)", lat));
    wr(0, A(100), 64'h1111);
    rd(1, A(100));
    rd(2, A(100));

    // ---- SpecRd hit in L1, local merge; SpecRd hit then purge
    rd(0, A(200));
    srd(0, A(200, 2), 0);
    look(200); check(dbg_l1_state[0] == CS_ESPEC, "E -> ESpec on SpecRd hit");
    merge(0, 0, 0, 1);
    look(200); check(dbg_l1_state[0] == CS_E, "ESpec -> E on PrMerge");
    srd(0, A(200, 3), 1);
    purge(0, 1, 1, 2);
    look(200); check(dbg_l1_state[0] == CS_E, "ESpec -> E on PrPurge");

    // ---- GetSpec to an M owner: forwarded, owner keeps M; merge through L2
    wr(0, A(300), 64'h3333);
    look(300); check(dbg_l1_state[0] == CS_M, "writer in M");
    srd(1, A(300), 0);
    look(300);
    check(dbg_l1_state[0] == CS_M, "non-interference: owner stays M after GetSpec");
    check(dbg_l1_state[1] == CS_ISPEC, "requester in ISpec");
    check(dbg_l2_state == CS_MSPEC, "L2 in MSpec");
    srd(1, A(300, 1), 1);                            // second load hits the specBuf
    merge(1, 1, 0, 2);                               // both merge: L1Merge forwarded to owner
    look(300);
    check(dbg_l1_state[0] == CS_S && dbg_l1_state[1] == CS_S, "owner and merger in S");
    check(dbg_l2_state == CS_S, "L2 S after merge");
    rd(1, A(300));

    // ---- GetSpec from memory, purge
    srd(2, A(400), 0);
    look(400);
    check(dbg_l2_state == CS_ISPEC, "L2 ISpec (no allocation)");
    purge(2, 0, 0, 1);
    look(400);
    check(dbg_l2_state == CS_I && dbg_l1_state[2] == CS_I, "ISpec -> I on purge");

    // ---- two speculative cores on one line
    srd(2, A(500), 0);
    srd(3 % NC, A(500, 1), 0);
    look(500); check(NC < 4 || dbg_spec_core == 8'd2, "spec core counts two cores");
    merge(2, 0, 0, 1);                               // merge while another core is speculative
    purge(3 % NC, 0, 0, 1);
    srd(2, A(600), 0);
    srd(3 % NC, A(600, 1), 0);
    purge(2, 0, 0, 1);                               // purge while another core is speculative
    merge(3 % NC, 0, 0, 1);
    look(600); check(dbg_spec_core == 8'd0, "spec core back to 0");

    // ---- a store invalidates speculative copies; their resolution is ignored
    srd(1, A(700), 2);
    wr(0, A(700), 64'h7777);
    look(700);
    check(dbg_l1_state[0] == CS_M && dbg_l1_state[1] == CS_I, "speculative copy invalidated");
    merge(1, 2, 2, 3);
    rd(1, A(700));

    // ---- L1 evictions: L1_WAYS + 1 lines of one L1 set
    for (int i = 0; i <= L1W; i++) wr(0, A(1000 + i * L1S), 64'(i));
    for (int i = 0; i <= L1W; i++) rd(0, A(1000 + i * L1S));

    // ---- L2 recall: L2_WAYS + 1 lines of one L2 set, spread over cores
    for (int i = 0; i <= L2W; i++) rd((i / L1W) % NC, A(2 * L2S * 16 + i * L2S));
    for (int i = 0; i <= L2W; i++) rd(0, A(2 * L2S * 16 + i * L2S));

    // ---- allocator preemption on core 0
    @(negedge clk);
    ra_rob_head[0] = 8'd0;
    for (int i = 0; i < RAN; i++) begin
      ra_alloc_valid[0] = 1'b1; ra_alloc_tag[0] = 8'(10 + i);
      @(negedge clk);
    end
    ra_alloc_tag[0] = 8'd5;                          // older than every occupant
    #1 check(ra_alloc_grant[0] && ra_preempt_valid[0] && ra_preempt_tag[0] == 8'(10 + RAN - 1),
             "oldest request preempts the youngest occupant");
    @(negedge clk);
    ra_alloc_tag[0] = 8'd100;                        // younger than all: stalls
    #1 check(!ra_alloc_grant[0], "younger request stalls when full");
    @(negedge clk);
    ra_alloc_valid[0] = 1'b0;

    // ---- random phase
    for (int it = 0; it < 1000; it++) begin
      int c, line, w, kind;
      logic [31:0] a;
      c = $urandom_range(NC - 1);
      line = 5000 + $urandom_range(2 * L2W) * L2S + $urandom_range(3);
      w = $urandom_range(7);
      a = A(line, w);
      kind = $urandom_range(5);
      if (kind < 2) rd(c, a);
      else if (kind < 4) wr(c, a, {$urandom, $urandom});
      else begin
        srd(c, a, 0);
        srd(c, A(line, (w + 1) % 8), 1);
        if (kind == 4) merge(c, 1, 0, 2); else purge(c, 0, 0, 2);
      end
    end

    // ---- every mechanism happened
    check(n_specrd_hit > 0,   "SpecRd hit in L1");
    check(n_specrd_sbhit > 0, "SpecRd hit in specBuf");
    check(n_getspec > 0,      "GetSpec sent");
    check(n_merge_local > 0,  "local PrMerge");
    check(n_purge_local > 0,  "local PrPurge");
    check(n_l1merge > 0,      "L1Merge sent");
    check(n_l1purge > 0,      "L1Purge sent");
    check(n_ignored > 0,      "resolution of an invalidated load ignored");
    check(n_fwd_getspec > 0,  "FwdGetSpec served by owner");
    check(n_fwd_l1merge > 0,  "FwdL1Merge served by owner");
    check(n_evict > 0,        "L1 eviction");
    check(n_inv_spec > 0,     "speculative copy invalidated in L1");
    check(n_spec_inv_port > 0, "replay notification to the core");
    check(n_preempt > 0,      "allocator preemption");
    check(n_l2[0] > 0, "L2 GetSpec forwarded");
    check(n_l2[1] > 0, "L2 GetSpec from memory");
    check(n_l2[2] > 0, "L2 merge, spec core 0");
    check(n_l2[3] > 0, "L2 merge, spec core > 0");
    check(n_l2[4] > 0, "L2 merge forwarded");
    check(n_l2[5] > 0, "L2 purge, spec core 0");
    check(n_l2[6] > 0, "L2 purge, spec core > 0");
    check(n_l2[7] > 0, "L2 speculative copies invalidated by GetX");
    check(n_l2[8] > 0, "L2 recall");
    $display("events: specrd_hit=%0d sbhit=%0d getspec=%0d mlocal=%0d plocal=%0d l1merge=%0d l1purge=%0d ignored=%0d fgetspec=%0d fl1merge=%0d evict=%0d invspec=%0d",
             n_specrd_hit, n_specrd_sbhit, n_getspec, n_merge_local, n_purge_local, n_l1merge,
             n_l1purge, n_ignored, n_fwd_getspec, n_fwd_l1merge, n_evict, n_inv_spec);
    $display("l2 events: %0d %0d %0d %0d %0d %0d %0d %0d %0d", n_l2[0], n_l2[1], n_l2[2],
             n_l2[3], n_l2[4], n_l2[5], n_l2[6], n_l2[7], n_l2[8]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
