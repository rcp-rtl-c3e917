// rcp_top: multi-core cache hierarchy running the reversible coherence protocol
// (RCP), the cache-side half of invisible speculative execution.
//
// NUM_CORES cores each have a load-resolution sequencer (rcp_resolve_seq) in
// front of a private L1 data cache (rcp_l1).  All L1s share one L2 bank
// (rcp_l2), which holds the directory, the per-core L2 speculative buffers and
// their counting bloom filters, and talks to main memory through mem_*.  Beside
// each core's cache port sits the priority allocator (rcp_prio_alloc) that the
// core uses for shared resources such as MSHRs; it is driven only by core
// signals and is brought out as ports.
//
// The processor cores are not part of this design.  Each core's side is a set of
// ports: the load/store/speculative-load port with PrMerge/PrPurge
// (core_* with the load-queue head and tail), the notification of speculative
// loads whose line was invalidated (spec_inv_*) and the allocator's ports
// (ra_*).  The L1-L2 connection is point to point per core; the evaluated system
// used a 4x2 mesh network, which is not modelled.
//
// Default sizes are the evaluated multi-core configuration: 4 cores, 32-entry
// load queue, 64 KB 8-way L1, one 2 MB 16-way L2 bank, 64-byte lines.  The
// number of allocator slots (8) is this design's choice.
//
// Timing: an L1 hit answers in the next cycle; an L1 miss that hits in the L2
// answers 9 cycles after the request (1 + 8-cycle L2 round trip); memory
// latency is whatever the memory port takes.  ev_* are one-cycle event pulses
// for statistics; dbg_* show the combined state of one line in every cache.
module rcp_top
  import rcp_pkg::*;
#(
  parameter int unsigned NUM_CORES   = 4,
  parameter int unsigned LQ          = 32,
  parameter int unsigned L1_SETS     = 128,
  parameter int unsigned L1_WAYS     = 8,
  parameter int unsigned L2_SETS     = 2048,
  parameter int unsigned L2_WAYS     = 16,
  parameter int unsigned RA_ENTRIES  = 8,
  parameter int unsigned ROB_SIZE    = 192
) (
  input  logic              clk,
  input  logic              rst_n,
  // core ports
  input  logic              core_valid      [NUM_CORES],
  output logic              core_ready      [NUM_CORES],
  input  pr_op_t            core_op         [NUM_CORES],
  input  logic [ADDR_W-1:0] core_addr       [NUM_CORES],
  input  logic [7:0]        core_lq         [NUM_CORES],
  input  word_t             core_wdata      [NUM_CORES],
  input  logic [7:0]        core_lq_head    [NUM_CORES],
  input  logic [7:0]        core_lq_tail    [NUM_CORES],
  output logic              core_resp_valid [NUM_CORES],
  output word_t             core_resp_data  [NUM_CORES],
  output logic              spec_inv_valid  [NUM_CORES],
  output logic [LQ-1:0]     spec_inv_mask   [NUM_CORES],
  // per-core resource allocator ports
  input  logic [7:0]        ra_rob_head     [NUM_CORES],
  input  logic              ra_alloc_valid  [NUM_CORES],
  input  logic [7:0]        ra_alloc_tag    [NUM_CORES],
  output logic              ra_alloc_grant  [NUM_CORES],
  output logic [$clog2(RA_ENTRIES)-1:0] ra_alloc_slot [NUM_CORES],
  output logic              ra_preempt_valid[NUM_CORES],
  output logic [7:0]        ra_preempt_tag  [NUM_CORES],
  input  logic              ra_release_valid[NUM_CORES],
  input  logic [7:0]        ra_release_tag  [NUM_CORES],
  output logic [RA_ENTRIES-1:0] ra_busy     [NUM_CORES],
  // memory port
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output mem_req_t          mem_req,
  input  logic              mem_resp_valid,
  input  line_t             mem_resp_data,
  // statistics and debug
  output l1_ev_t            l1_ev           [NUM_CORES],
  output logic [8:0]        l2_ev,
  input  laddr_t            dbg_addr,
  output coh_state_t        dbg_l1_state    [NUM_CORES],
  output coh_state_t        dbg_l2_state,
  output logic [7:0]        dbg_spec_core
);

  logic [NUM_CORES-1:0] l2_req_valid, l2_req_ready, l2_resp_valid, l2_fwd_valid, l2_ack_valid;
  l1_to_l2_t            l2_req  [NUM_CORES];
  l1_fwd_ack_t          l2_ack  [NUM_CORES];
  l2_resp_t             l2_resp;
  l2_fwd_t              l2_fwd;

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    logic              l1_valid, l1_ready, l1_resp_valid;
    pr_op_t            l1_op;
    logic [ADDR_W-1:0] l1_addr;
    logic [7:0]        l1_lq;
    word_t             l1_wdata, l1_resp_data;
    logic [LQ-1:0]     sb_valid;
    logic              rq_valid;
    l1_to_l2_t         rq;
    logic              ack_valid;

    rcp_resolve_seq #(.LQ(LQ)) u_seq (
      .clk, .rst_n,
      .cmd_valid(core_valid[c]), .cmd_ready(core_ready[c]), .cmd_op(core_op[c]),
      .cmd_addr(core_addr[c]), .cmd_lq(core_lq[c]), .cmd_wdata(core_wdata[c]),
      .lq_head(core_lq_head[c]), .lq_tail(core_lq_tail[c]),
      .cmd_resp_valid(core_resp_valid[c]), .cmd_resp_data(core_resp_data[c]),
      .l1_valid, .l1_ready, .l1_op, .l1_addr, .l1_lq, .l1_wdata,
      .l1_resp_valid, .l1_resp_data, .sb_valid
    );

    rcp_l1 #(.SETS(L1_SETS), .WAYS(L1_WAYS), .LQ(LQ)) u_l1 (
      .clk, .rst_n,
      .cpu_req_valid(l1_valid), .cpu_req_ready(l1_ready), .cpu_req_op(l1_op),
      .cpu_req_addr(l1_addr), .cpu_req_lq(l1_lq), .cpu_req_wdata(l1_wdata),
      .cpu_resp_valid(l1_resp_valid), .cpu_resp_data(l1_resp_data),
      .sb_valid_o(sb_valid),
      .spec_inv_valid(spec_inv_valid[c]), .spec_inv_mask(spec_inv_mask[c]),
      .req_valid(rq_valid), .req_ready(l2_req_ready[c]), .req(rq),
      .resp_valid(l2_resp_valid[c]), .resp(l2_resp),
      .fwd_valid(l2_fwd_valid[c]), .fwd(l2_fwd),
      .fwd_ack_valid(ack_valid), .fwd_ack(l2_ack[c]),
      .ev(l1_ev[c]),
      .dbg_addr, .dbg_state(dbg_l1_state[c])
    );
    assign l2_req_valid[c] = rq_valid;
    assign l2_req[c]       = rq;
    assign l2_ack_valid[c] = ack_valid;

    rcp_prio_alloc #(.ENTRIES(RA_ENTRIES), .ROB_SIZE(ROB_SIZE), .TAG_W(8)) u_ra (
      .clk, .rst_n,
      .rob_head(ra_rob_head[c]),
      .alloc_valid(ra_alloc_valid[c]), .alloc_tag(ra_alloc_tag[c]),
      .alloc_grant(ra_alloc_grant[c]), .alloc_slot(ra_alloc_slot[c]),
      .preempt_valid(ra_preempt_valid[c]), .preempt_tag(ra_preempt_tag[c]),
      .release_valid(ra_release_valid[c]), .release_tag(ra_release_tag[c]),
      .busy(ra_busy[c])
    );
  end

  logic [NUM_CORES-1:0] dbg_sharers_unused;
  logic [7:0]           dbg_owner_unused;

  rcp_l2 #(.NUM_CORES(NUM_CORES), .SETS(L2_SETS), .WAYS(L2_WAYS), .LQ(LQ)) u_l2 (
    .clk, .rst_n,
    .req_valid(l2_req_valid), .req_ready(l2_req_ready), .req(l2_req),
    .resp_valid(l2_resp_valid), .resp(l2_resp),
    .fwd_valid(l2_fwd_valid), .fwd(l2_fwd),
    .fwd_ack_valid(l2_ack_valid), .fwd_ack(l2_ack),
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid, .mem_resp_data,
    .ev_getspec_fwd(l2_ev[0]), .ev_getspec_mem(l2_ev[1]), .ev_merge_nonspec(l2_ev[2]),
    .ev_merge_spec(l2_ev[3]), .ev_merge_fwd(l2_ev[4]), .ev_purge_nonspec(l2_ev[5]),
    .ev_purge_spec(l2_ev[6]), .ev_spec_inv(l2_ev[7]), .ev_recall(l2_ev[8]),
    .dbg_addr, .dbg_state(dbg_l2_state), .dbg_sharers(dbg_sharers_unused),
    .dbg_owner(dbg_owner_unused), .dbg_spec_core
  );

endmodule
