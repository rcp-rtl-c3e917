// rcp_l2: shared L2 bank with the directory and the L2 side of the reversible
// coherence protocol (RCP), including one speculative buffer and one counting
// bloom filter per core.
//
// What it does.  The L2 keeps, for every line it holds, the base MESI state,
// the L1 sharers, the owner L1 (cur_owner) for E/M, a dirty bit and the data.
// It serves the L1 requests of the MESI protocol (GetS, GetX, Upgrade, Put*)
// and the three RCP messages:
//   * GetSpec: the data is returned without changing any state.  If an L1 owns
//     the line (M/E) the request is forwarded to it as FwdGetSpec and the owner
//     keeps its state.  On an L2 miss the data comes from memory and is kept in
//     the specBuf only; no L2 block is allocated.  The specBuf entry of the
//     requesting load is allocated and its address inserted in the core's CBF;
//     the line's spec core count rises, i.e. X becomes XSpec.
//   * L1Merge: spec core falls and the line makes the transition a GetS from
//     the merging core would make: MSpec/ESpec owned by another L1 forward
//     L1Merge to cur_owner and become S (or SSpec), ESpec whose owner is the
//     merging core stays E, ISpec allocates the line as E with the merging core
//     as owner (ESpec if other speculative copies remain), SSpec stays S.
//   * L1Purge: spec core falls; no state of the base line changes, so XSpec
//     returns to X when spec core reaches 0.
// A GetX/Upgrade invalidates every other copy, speculative ones included, and
// drops all specBuf entries of the line: XSpec -> M.
//
// How it works.  "Spec core" is not stored: it is the number of cores whose L2
// specBuf holds the line, found by checking every core's CBF and searching
// that core's specBuf only when its CBF answers positive.  The check takes one
// cycle whatever the contents (constant time).  So the L2 state XSpec is the
// stored base state X together with spec core > 0, exactly as in the protocol's
// L2 transition diagrams.  The bank is a blocking directory: it accepts one
// request at a time (round robin over the cores) and finishes it, including
// forwards to L1s and memory accesses, before taking the next; this serialises
// every transaction and replaces the NACKs of transient states.  An L2 miss that
// needs a block evicts a victim first, recalling (invalidating) its L1 copies and
// writing it back if dirty; the recalled L1s also lose their speculative
// entries of that line (their loads are replayed by the invalidation).  A
// GetSpec entry takes the lowest free slot of the core's L2 specBuf (the
// load-queue index of the load that created a group may be reused before the
// group resolves), and L1Merge/L1Purge find it by line address.
//
// Storage: the directory (tag, state, dirty, sharers, owner of every way plus
// the set's round-robin pointer) is one word per set and the data one word per
// line, both plain memories with one write port.  After reset the directory
// is cleared by a sweep of SETS cycles, during which no request is accepted.
//
// Interface and timing.  Per core: request valid/ready, response pulse,
// forward pulse and the L1's acknowledge pulse.  Memory: request valid/ready,
// read response pulse.  A request is accepted in the idle cycle, looked up for
// LOOKUP_CYCLES cycles and answered in the cycle after the last action, so an
// L2 hit costs the L1 1 + LOOKUP_CYCLES + 2 cycles beyond its own 1-cycle
// lookup.  dbg_* give the combined state of one line for tests.
//
// From the protocol: the L2 transitions (including the cur_owner comparison and
// the spec-core rules), GetSpec without L2 allocation on a miss, the per-core
// specBuf + CBF organisation and the constant-time check.  This design's
// choices: the blocking directory, round-robin arbitration, sequential forwards,
// inclusive L2 with victim recall, a clean L2 copy with no L1 sharer answering
// GetS with E, and the lookup delay chosen to give an 8-cycle L2 round trip.
module rcp_l2
  import rcp_pkg::*;
#(
  parameter int unsigned NUM_CORES     = 4,
  parameter int unsigned SETS          = 2048,  // 2 MB / 64 B / 16 ways
  parameter int unsigned WAYS          = 16,
  parameter int unsigned LQ            = 32,
  parameter int unsigned LOOKUP_CYCLES = 5,
  parameter int unsigned CBF_CTRS      = 256
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NUM_CORES-1:0] req_valid,
  output logic [NUM_CORES-1:0] req_ready,
  input  l1_to_l2_t            req      [NUM_CORES],
  output logic [NUM_CORES-1:0] resp_valid,
  output l2_resp_t             resp,
  output logic [NUM_CORES-1:0] fwd_valid,
  output l2_fwd_t              fwd,
  input  logic [NUM_CORES-1:0] fwd_ack_valid,
  input  l1_fwd_ack_t          fwd_ack  [NUM_CORES],
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output mem_req_t             mem_req,
  input  logic                 mem_resp_valid,
  input  line_t                mem_resp_data,
  // statistics
  output logic                 ev_getspec_fwd,   // GetSpec forwarded to an M/E owner
  output logic                 ev_getspec_mem,   // GetSpec served from memory, no allocation
  output logic                 ev_merge_nonspec, // L1Merge left spec core = 0
  output logic                 ev_merge_spec,    // L1Merge left spec core > 0
  output logic                 ev_merge_fwd,     // L1Merge forwarded to cur_owner
  output logic                 ev_purge_nonspec, // L1Purge left spec core = 0
  output logic                 ev_purge_spec,    // L1Purge left spec core > 0
  output logic                 ev_spec_inv,      // GetX/Upgrade dropped speculative copies
  output logic                 ev_recall,        // victim with L1 copies recalled
  // debug view of one line
  input  laddr_t               dbg_addr,
  output coh_state_t           dbg_state,
  output logic [NUM_CORES-1:0] dbg_sharers,
  output logic [7:0]           dbg_owner,
  output logic [7:0]           dbg_spec_core
);

  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned TAG_W = LADDR_W - IDX_W;
  localparam int unsigned WAY_W = $clog2(WAYS);
  localparam int unsigned CID_W = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1;
  localparam int unsigned LCNT_W = $clog2(LOOKUP_CYCLES + 1);

  typedef logic [TAG_W-1:0]     tag_t;
  typedef logic [IDX_W-1:0]     set_t;
  typedef logic [WAY_W-1:0]     way_t;
  typedef logic [CID_W-1:0]     cid_t;
  typedef logic [NUM_CORES-1:0] cvec_t;

  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_LOOKUP, S_RECALL_FWD, S_RECALL_WAIT, S_RECALL_CLR, S_WB,
    S_MEMRD, S_MEMWAIT, S_FWD, S_FWD_WAIT, S_FINISH
  } lst_t;

  // ---------------------------------------------------------------- arrays
  // One directory word per set (tag, state, dirty bit, L1 sharers and owner of
  // every way, plus the set's replacement pointer) and one data word per line.
  // Both are memories with a single write port; the directory is cleared by a
  // sweep after reset.
  typedef struct packed {
    tag_t  tag;
    mesi_t st;
    logic  dirty;
    cvec_t shr;
    cid_t  own;
  } wmeta_t;
  typedef struct packed {
    way_t              rr;
    wmeta_t [WAYS-1:0] w;
  } setm_t;

  setm_t meta_q [SETS];
  line_t data_q [SETS*WAYS];

  if (WAYS < 2 || (WAYS & (WAYS - 1)) != 0 || (SETS & (SETS - 1)) != 0) begin : g_chk
    $error("rcp_l2: SETS and WAYS must be powers of two, WAYS >= 2");
  end

  function automatic set_t set_of(laddr_t a);
    return a[IDX_W-1:0];
  endfunction
  function automatic tag_t tag_of(laddr_t a);
    return a[LADDR_W-1:IDX_W];
  endfunction
  function automatic cvec_t cbit(cid_t c);
    cvec_t v = '0;
    v[c] = 1'b1;
    return v;
  endfunction
  function automatic cid_t lowest(cvec_t v);
    cid_t r = '0;
    for (int i = NUM_CORES - 1; i >= 0; i--) if (v[i]) r = cid_t'(i);
    return r;
  endfunction

  // ---------------------------------------------------------------- transaction registers
  lst_t       st_fsm;
  set_t       iset_q;       // initialisation sweep
  cid_t       rr_core;
  cid_t       c_q;
  l1_req_t    kind_q;
  laddr_t     la_q;
  logic [7:0] lq_q;
  line_t      pdata_q;      // Put data
  logic       hit_q;
  way_t       way_q;
  line_t      dbuf_q;       // line data being assembled
  logic       dbuf_dirty_q;
  cvec_t      fmask_q;      // cores still to forward to
  fwd_t       fkind_q;      // forward kind (owner gets FW_GETX instead of FW_INV)
  cid_t       fowner_q;
  logic       fown_valid_q; // the line has an M/E owner in an L1
  cid_t       fcur_q;
  logic       need_mem_q;
  logic       entry_ok_q;   // L1Merge / L1Purge found its specBuf entry
  cvec_t      spec_q;       // cores holding speculative copies of la_q
  laddr_t     vaddr_q;      // victim line
  cvec_t      vmask_q;      // victim L1 holders still to recall
  cvec_t      vall_q;       // all victim L1 holders
  cid_t       vowner_q;
  logic       vown_valid_q;
  logic [LCNT_W-1:0] lcnt_q;

  // ---------------------------------------------------------------- specBufs and CBFs
  laddr_t      sb_q_addr;
  logic        sb_wr_en    [NUM_CORES];
  sb_entry_t   sb_wr_entry;
  logic [LQ-1:0] sb_clr    [NUM_CORES];
  logic [LQ-1:0] sb_match  [NUM_CORES];
  logic [LQ-1:0] sb_live   [NUM_CORES];
  sb_entry_t   sb_live_e   [NUM_CORES];
  sb_entry_t   sb_rd       [NUM_CORES];
  logic [LQ-1:0] sb_valid  [NUM_CORES];
  logic [LQ-1:0] sb_dbg_match [NUM_CORES];
  logic        cbf_ins     [NUM_CORES];
  logic        cbf_rem     [NUM_CORES];
  logic        cbf_hit     [NUM_CORES];
  cvec_t       spec_vec;

  assign sb_q_addr = (st_fsm == S_RECALL_CLR) ? vaddr_q : la_q;

  // A GetSpec entry goes to the lowest free slot: the load that created a
  // group may resolve before the group, and its load-queue index may be reused.
  logic [7:0] sb_widx [NUM_CORES];
  always_comb begin
    for (int k = 0; k < NUM_CORES; k++) begin
      sb_widx[k] = '0;
      for (int i = LQ - 1; i >= 0; i--) if (!sb_valid[k][i]) sb_widx[k] = 8'(i);
    end
  end

  for (genvar k = 0; k < NUM_CORES; k++) begin : g_core
    rcp_spec_buf #(.ENTRIES(LQ)) u_sb (
      .clk, .rst_n,
      .wr_en(sb_wr_en[k]), .wr_idx(sb_widx[k]), .wr_entry(sb_wr_entry),
      .clr_mask(sb_clr[k]), .set_merged_mask('0), .set_stale_mask('0), .clr_remote_mask('0),
      .rd_idx(lq_q), .rd_entry(sb_rd[k]),
      .q_addr(sb_q_addr), .q_match(sb_match[k]), .q_live(sb_live[k]), .q_live_entry(sb_live_e[k]),
      .q2_addr(dbg_addr), .q2_match(sb_dbg_match[k]),
      .valid_o(sb_valid[k])
    );
    rcp_cbf #(.NUM_CTR(CBF_CTRS)) u_cbf (
      .clk, .rst_n,
      .ins_en(cbf_ins[k]), .ins_addr(la_q),
      .rem_en(cbf_rem[k]), .rem_addr(sb_q_addr),
      .q_addr(sb_q_addr), .q_hit(cbf_hit[k])
    );
    // spec core: the CBF check gates the exact search of this core's specBuf
    assign spec_vec[k] = cbf_hit[k] && (|sb_match[k]);
  end

  function automatic logic [7:0] popcount(cvec_t v);
    logic [7:0] n = '0;
    for (int i = 0; i < NUM_CORES; i++) n += 8'(v[i]);
    return n;
  endfunction

  // ---------------------------------------------------------------- lookup
  set_t   set_c;
  setm_t  m_c;
  logic   hit_c, free_c;
  way_t   hway_c, fway_c;
  line_t  d_c;              // data of the hit way, or of the victim on a miss
  assign set_c = set_of(la_q);
  always_comb begin
    m_c = meta_q[set_c];
    hit_c = 1'b0; hway_c = '0; free_c = 1'b0; fway_c = '0;
    for (int unsigned w = 0; w < WAYS; w++)
      if (m_c.w[w].st != ST_I && m_c.w[w].tag == tag_of(la_q)) begin
        hit_c = 1'b1; hway_c = way_t'(w);
      end
    for (int w = WAYS - 1; w >= 0; w--)
      if (m_c.w[w].st == ST_I) begin
        free_c = 1'b1; fway_c = way_t'(w);
      end
    d_c = data_q[{set_c, hit_c ? hway_c : m_c.rr}];
  end

  // debug view
  always_comb begin
    setm_t m_d;
    logic  dh;
    way_t  dw;
    cvec_t ds;
    m_d = meta_q[set_of(dbg_addr)];
    dh = 1'b0; dw = '0;
    for (int unsigned w = 0; w < WAYS; w++)
      if (m_d.w[w].st != ST_I && m_d.w[w].tag == tag_of(dbg_addr)) begin
        dh = 1'b1; dw = way_t'(w);
      end
    ds = '0;
    for (int k = 0; k < NUM_CORES; k++) ds[k] = |sb_dbg_match[k];
    dbg_spec_core = popcount(ds);
    dbg_state     = combine(dh ? m_d.w[dw].st : ST_I, |ds);
    dbg_sharers   = dh ? m_d.w[dw].shr : '0;
    dbg_owner     = dh ? 8'(m_d.w[dw].own) : 8'hff;
  end

  // ---------------------------------------------------------------- arbitration
  cid_t pick;
  logic any_req;
  always_comb begin
    pick = rr_core; any_req = 1'b0;
    for (int i = NUM_CORES - 1; i >= 0; i--) begin
      int unsigned k;
      k = (int'(rr_core) + i) % NUM_CORES;
      if (req_valid[k]) begin pick = cid_t'(k); any_req = 1'b1; end
    end
    req_ready = '0;
    if (st_fsm == S_IDLE && any_req) req_ready[pick] = 1'b1;
  end

  // ---------------------------------------------------------------- outputs to L1s and memory
  always_comb begin
    fwd_valid = '0;
    fwd = '{kind: fkind_q, addr: la_q};
    if (st_fsm == S_RECALL_FWD) begin
      fwd_valid[lowest(vmask_q)] = 1'b1;
      fwd.addr = vaddr_q;
      fwd.kind = (vown_valid_q && lowest(vmask_q) == vowner_q) ? FW_GETX : FW_INV;
    end else if (st_fsm == S_FWD) begin
      fwd_valid[lowest(fmask_q)] = 1'b1;
      if (fkind_q == FW_INV && fown_valid_q && lowest(fmask_q) == fowner_q) fwd.kind = FW_GETX;
    end
    mem_req_valid = (st_fsm == S_MEMRD) || (st_fsm == S_WB && dbuf_dirty_q);
    mem_req.we    = (st_fsm == S_WB);
    mem_req.addr  = (st_fsm == S_WB) ? vaddr_q : la_q;
    mem_req.data  = dbuf_q;
  end

  // ---------------------------------------------------------------- specBuf / CBF control
  always_comb begin
    sb_wr_entry = '0;
    for (int k = 0; k < NUM_CORES; k++) begin
      sb_wr_en[k] = 1'b0; sb_clr[k] = '0; cbf_ins[k] = 1'b0; cbf_rem[k] = 1'b0;
    end
    if (st_fsm == S_RECALL_CLR) begin
      // recalled L1 copies are gone: their speculative copies go with them
      for (int k = 0; k < NUM_CORES; k++)
        if (vall_q[k] && |sb_match[k]) begin sb_clr[k] = sb_match[k]; cbf_rem[k] = 1'b1; end
    end else if (st_fsm == S_FINISH) begin
      unique case (kind_q)
        RQ_GETSPEC: begin
          sb_wr_en[c_q] = 1'b1;
          sb_wr_entry = '{valid: 1'b1, ready: 1'b1,
                          meta: '{count: 4'd1, merged: 1'b0, remote: 1'b1, stale: 1'b0},
                          addr: la_q, data: dbuf_q, state: hit_q ? m_c.w[way_q].st : ST_I};
          cbf_ins[c_q] = 1'b1;
        end
        RQ_L1MERGE, RQ_L1PURGE: if (entry_ok_q) begin
          sb_clr[c_q]  = sb_match[c_q];     // free the entry
          cbf_rem[c_q] = 1'b1;
        end
        RQ_GETX, RQ_UPGRADE: begin
          for (int k = 0; k < NUM_CORES; k++)
            if (|sb_match[k]) begin sb_clr[k] = sb_match[k]; cbf_rem[k] = 1'b1; end
        end
        default: ;
      endcase
    end
  end

  // ---------------------------------------------------------------- lookup result
  // What the request needs, evaluated at the end of the lookup.
  logic   p_alloc, p_mem, p_eok;
  cvec_t  p_fm;
  fwd_t   p_fk;
  mesi_t  p_bs;
  cid_t   p_own;
  wmeta_t p_vm;       // round-robin victim way
  cvec_t  p_vhold;    // its L1 holders
  always_comb begin
    cvec_t holders, others;
    p_bs    = hit_c ? m_c.w[hway_c].st : ST_I;
    p_own   = m_c.w[hway_c].own;
    holders = hit_c ? (m_c.w[hway_c].shr | ((p_bs == ST_E || p_bs == ST_M) ? cbit(p_own) : '0)) : '0;
    others  = holders & ~cbit(c_q);
    p_eok   = |sb_live[c_q];      // this core's entry for the line
    p_alloc = 1'b0; p_mem = 1'b0; p_fm = '0; p_fk = FW_INV;
    unique case (kind_q)
      RQ_GETS: begin
        p_alloc = !hit_c; p_mem = !hit_c;
        if (hit_c && (p_bs == ST_E || p_bs == ST_M) && p_own != c_q) begin p_fm = cbit(p_own); p_fk = FW_GETS; end
      end
      RQ_GETX, RQ_UPGRADE: begin
        p_alloc = !hit_c; p_mem = !hit_c;
        p_fm = (others | spec_vec) & ~cbit(c_q); p_fk = FW_INV;
      end
      RQ_GETSPEC: begin
        p_mem = !hit_c;
        if (hit_c && (p_bs == ST_E || p_bs == ST_M) && p_own != c_q) begin p_fm = cbit(p_own); p_fk = FW_GETSPEC; end
      end
      RQ_L1MERGE: begin
        p_alloc = p_eok && !hit_c;
        if (p_eok && hit_c && (p_bs == ST_E || p_bs == ST_M) && p_own != c_q) begin p_fm = cbit(p_own); p_fk = FW_L1MERGE; end
      end
      default: ;
    endcase
    p_vm    = m_c.w[m_c.rr];
    p_vhold = p_vm.shr | ((p_vm.st == ST_E || p_vm.st == ST_M) ? cbit(p_vm.own) : '0);
  end

  logic lookup_done;
  assign lookup_done = (st_fsm == S_LOOKUP) && (lcnt_q == LCNT_W'(LOOKUP_CYCLES - 1));

  // ---------------------------------------------------------------- final update
  wmeta_t f_wm;
  mesi_t  f_bs;
  cvec_t  f_shr;
  logic   f_own_me;   // the requester is the M/E owner
  logic   f_other;    // another core is the M/E owner
  logic   f_excl;     // GetS / L1Merge is granted E (or keeps M)
  always_comb begin
    f_wm     = m_c.w[way_q];
    f_bs     = hit_q ? f_wm.st : ST_I;
    f_shr    = hit_q ? f_wm.shr : '0;
    f_own_me = (f_bs == ST_E || f_bs == ST_M) && f_wm.own == c_q;
    f_other  = (f_bs == ST_E || f_bs == ST_M) && f_wm.own != c_q;
    f_excl   = !hit_q || f_own_me || (f_bs == ST_S && (f_shr & ~cbit(c_q)) == '0);
  end

  // ---------------------------------------------------------------- array writes
  logic  m_we;
  set_t  m_set;
  setm_t m_wd;
  logic  d_we;
  line_t d_wd;
  always_comb begin
    m_we = 1'b0; m_set = set_c; m_wd = m_c;
    d_we = 1'b0; d_wd = dbuf_q;
    unique case (st_fsm)
      S_INIT: begin
        m_we = 1'b1; m_set = iset_q; m_wd = '0;
      end
      S_LOOKUP: if (lookup_done && p_alloc && !free_c) begin
        m_we = 1'b1;
        m_wd.rr = way_t'(m_c.rr + 1'b1);
      end
      S_WB: if (!dbuf_dirty_q || mem_req_ready) begin
        m_we = 1'b1;
        m_wd.w[way_q].st    = ST_I;
        m_wd.w[way_q].shr   = '0;
        m_wd.w[way_q].dirty = 1'b0;
      end
      S_FINISH: begin
        unique case (kind_q)
          RQ_GETS, RQ_L1MERGE: if (kind_q == RQ_GETS || entry_ok_q) begin
            m_we = 1'b1; d_we = 1'b1;
            if (f_excl) begin
              // exclusive for the requester: I -> E, ISpec -> E/ESpec,
              // ESpec with cur_owner == sender stays E
              m_wd.w[way_q] = '{tag: tag_of(la_q),
                                st: (hit_q && f_bs == ST_M && f_own_me) ? ST_M : ST_E,
                                dirty: dbuf_dirty_q, shr: '0, own: c_q};
            end else begin
              // shared: S stays S, M/E owned by another core -> S with both
              m_wd.w[way_q].st    = ST_S;
              m_wd.w[way_q].shr   = f_shr | cbit(c_q) | (f_other ? cbit(f_wm.own) : '0);
              m_wd.w[way_q].dirty = dbuf_dirty_q;
            end
          end
          RQ_GETX, RQ_UPGRADE: begin
            m_we = 1'b1; d_we = 1'b1;
            m_wd.w[way_q] = '{tag: tag_of(la_q), st: ST_M, dirty: dbuf_dirty_q, shr: '0, own: c_q};
          end
          RQ_PUTS, RQ_PUTE, RQ_PUTM: if (hit_q) begin
            m_we = 1'b1;
            m_wd.w[way_q].shr = f_shr & ~cbit(c_q);
            if (f_own_me) begin
              // owner gives the line back: the L2 keeps it with no L1 copy
              m_wd.w[way_q].st = ST_S;
              if (kind_q == RQ_PUTM) begin
                m_wd.w[way_q].dirty = 1'b1;
                d_we = 1'b1; d_wd = pdata_q;
              end
            end
          end
          default: ;
        endcase
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (m_we) meta_q[m_set] <= m_wd;
    if (d_we) data_q[{set_c, way_q}] <= d_wd;
  end

  // ---------------------------------------------------------------- main sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_fsm <= S_INIT; iset_q <= '0;
      rr_core <= '0; c_q <= '0; kind_q <= RQ_GETS; la_q <= '0; lq_q <= '0;
      pdata_q <= '0; hit_q <= 1'b0; way_q <= '0; dbuf_q <= '0; dbuf_dirty_q <= 1'b0;
      fmask_q <= '0; fkind_q <= FW_INV; fowner_q <= '0; fown_valid_q <= 1'b0; fcur_q <= '0; need_mem_q <= 1'b0;
      entry_ok_q <= 1'b0; spec_q <= '0; vaddr_q <= '0; vmask_q <= '0; vall_q <= '0;
      vowner_q <= '0; vown_valid_q <= 1'b0; lcnt_q <= '0;
      resp_valid <= '0; resp <= '0;
      {ev_getspec_fwd, ev_getspec_mem, ev_merge_nonspec, ev_merge_spec, ev_merge_fwd,
       ev_purge_nonspec, ev_purge_spec, ev_spec_inv, ev_recall} <= '0;
    end else begin
      resp_valid <= '0;
      {ev_getspec_fwd, ev_getspec_mem, ev_merge_nonspec, ev_merge_spec, ev_merge_fwd,
       ev_purge_nonspec, ev_purge_spec, ev_spec_inv, ev_recall} <= '0;

      unique case (st_fsm)
        S_INIT: begin
          iset_q <= iset_q + 1'b1;
          if (iset_q == set_t'(SETS - 1)) st_fsm <= S_IDLE;
        end

        // ------------------------------------------------------------ accept
        S_IDLE: if (any_req) begin
          c_q     <= pick;
          kind_q  <= req[pick].kind;
          la_q    <= req[pick].addr;
          lq_q    <= req[pick].lq;
          pdata_q <= req[pick].data;
          rr_core <= cid_t'((int'(pick) + 1) % NUM_CORES);
          lcnt_q  <= '0;
          st_fsm  <= S_LOOKUP;
        end

        // ------------------------------------------------------------ lookup and plan
        S_LOOKUP: begin
          lcnt_q <= lcnt_q + 1'b1;
          if (lookup_done) begin
            hit_q      <= hit_c;
            entry_ok_q <= p_eok;
            spec_q     <= spec_vec;
            fmask_q    <= p_fm;
            fkind_q    <= p_fk;
            fowner_q   <= p_own;
            fown_valid_q <= hit_c && (p_bs == ST_E || p_bs == ST_M);
            need_mem_q <= p_mem;
            dbuf_q       <= hit_c ? d_c : sb_live_e[c_q].data;
            dbuf_dirty_q <= hit_c && m_c.w[hway_c].dirty;
            if (p_alloc && !free_c) begin
              // evict the round-robin victim, recalling its L1 copies
              way_q        <= m_c.rr;
              vaddr_q      <= {p_vm.tag, set_c};
              vmask_q      <= p_vhold;
              vall_q       <= p_vhold;
              vowner_q     <= p_vm.own;
              vown_valid_q <= (p_vm.st == ST_E || p_vm.st == ST_M);
              dbuf_q       <= d_c;
              dbuf_dirty_q <= p_vm.dirty;
              ev_recall    <= |p_vhold;
              st_fsm       <= (|p_vhold) ? S_RECALL_FWD : S_RECALL_CLR;
            end else begin
              way_q  <= hit_c ? hway_c : fway_c;
              st_fsm <= p_mem ? S_MEMRD : ((|p_fm) ? S_FWD : S_FINISH);
            end
          end
        end

        // ------------------------------------------------------------ victim recall
        S_RECALL_FWD: begin
          fcur_q <= lowest(vmask_q);
          st_fsm <= S_RECALL_WAIT;
        end
        S_RECALL_WAIT: if (fwd_ack_valid[fcur_q]) begin
          if (fwd_ack[fcur_q].dirty) begin
            dbuf_q <= fwd_ack[fcur_q].data;
            dbuf_dirty_q <= 1'b1;
          end
          vmask_q <= vmask_q & ~cbit(fcur_q);
          st_fsm  <= ((vmask_q & ~cbit(fcur_q)) == '0) ? S_RECALL_CLR : S_RECALL_FWD;
        end
        S_RECALL_CLR: st_fsm <= S_WB;
        S_WB: if (!dbuf_dirty_q || mem_req_ready) begin
          // restore the data buffer for the request being served
          dbuf_q       <= (kind_q == RQ_L1MERGE) ? sb_live_e[c_q].data : '0;
          dbuf_dirty_q <= 1'b0;
          st_fsm <= need_mem_q ? S_MEMRD : ((|fmask_q) ? S_FWD : S_FINISH);
        end

        // ------------------------------------------------------------ memory read
        S_MEMRD: if (mem_req_ready) st_fsm <= S_MEMWAIT;
        S_MEMWAIT: if (mem_resp_valid) begin
          dbuf_q <= mem_resp_data;
          dbuf_dirty_q <= 1'b0;
          st_fsm <= (|fmask_q) ? S_FWD : S_FINISH;
        end

        // ------------------------------------------------------------ forwards to L1s
        S_FWD: begin
          fcur_q <= lowest(fmask_q);
          st_fsm <= S_FWD_WAIT;
        end
        S_FWD_WAIT: if (fwd_ack_valid[fcur_q]) begin
          if (fkind_q == FW_GETSPEC) begin
            dbuf_q <= fwd_ack[fcur_q].data;      // owner's current data, L2 copy untouched
          end else if (fwd_ack[fcur_q].dirty) begin
            dbuf_q <= fwd_ack[fcur_q].data;
            dbuf_dirty_q <= 1'b1;
          end
          fmask_q <= fmask_q & ~cbit(fcur_q);
          st_fsm  <= ((fmask_q & ~cbit(fcur_q)) == '0) ? S_FINISH : S_FWD;
        end

        // ------------------------------------------------------------ answer
        S_FINISH: begin
          st_fsm <= S_IDLE;
          resp_valid[c_q] <= 1'b1;
          resp.data   <= dbuf_q;
          resp.shared <= 1'b0;
          resp.stale  <= 1'b0;
          unique case (kind_q)
            RQ_GETS, RQ_L1MERGE: begin
              if (kind_q == RQ_L1MERGE && !entry_ok_q) resp.stale <= 1'b1;
              else                                     resp.shared <= !f_excl;
              if (kind_q == RQ_L1MERGE && entry_ok_q) begin
                ev_merge_nonspec <= ((spec_q & ~cbit(c_q)) == '0);
                ev_merge_spec    <= ((spec_q & ~cbit(c_q)) != '0);
                ev_merge_fwd     <= f_other;
              end
            end
            RQ_GETX, RQ_UPGRADE: ev_spec_inv <= |(spec_q & ~cbit(c_q));
            RQ_GETSPEC: begin
              ev_getspec_fwd <= f_other;
              ev_getspec_mem <= !hit_q;
            end
            RQ_L1PURGE: begin
              resp.stale <= !entry_ok_q;
              if (entry_ok_q) begin
                ev_purge_nonspec <= ((spec_q & ~cbit(c_q)) == '0);
                ev_purge_spec    <= ((spec_q & ~cbit(c_q)) != '0);
              end
            end
            default: ;
          endcase
        end

        default: st_fsm <= S_IDLE;
      endcase
    end
  end

  // one request at a time, and a response only to the core being served
  always_comb begin
    if (rst_n) begin
      a_one_resp: assert ((resp_valid & (resp_valid - 1'b1)) == '0);
      a_one_fwd:  assert ((fwd_valid & (fwd_valid - 1'b1)) == '0);
    end
  end

endmodule
