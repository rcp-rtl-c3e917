// rcp_l1: private L1 data cache with the L1 side of the reversible coherence
// protocol (RCP) and the core's L1 speculative buffer.
//
// What it does.  The cache serves the processor's Rd and Wr like an ordinary
// MESI L1, and adds the speculative load SpecRd and its two resolutions, PrMerge
// (the load became safe) and PrPurge (the load was squashed).  A SpecRd never
// changes the state of any other cache:
//   * hit in the cache: the line is copied into the load's specBuf entry and
//     the line becomes XSpec (X = M/E/S) locally; no message;
//   * miss in the cache, hit in a live specBuf entry of the same line: the data
//     comes from the specBuf, no state change, no message;
//   * miss in both: GetSpec goes to the L2, the reply fills the specBuf entry
//     only (no cache block is allocated) and the line is ISpec.
// PrMerge/PrPurge on XSpec with X = M/E/S return the line to X without a
// message.  On ISpec, PrMerge sends L1Merge; the L2 answers whether the line is
// shared and the line is installed as S or E.  PrPurge on ISpec sends L1Purge
// and the line is simply gone (I).  A line that was invalidated while
// speculative goes to I and the later PrMerge/PrPurge is ignored.
// Forwarded requests from the L2: GetSpec is answered with data and no state
// change (non-interference); L1Merge takes an M/E owner to S and flushes dirty
// data; GetS downgrades; GetX/Inv invalidate.
//
// How it works.  The tag array stores only the base MESI state; a line is
// speculative while a specBuf entry of this core holds it (see rcp_pkg).  The
// loads of one line that are speculative at the same time form a group; only
// the last one to resolve triggers the coherence action, and the group ends as
// a merge if any member merged (metadata flag "merged").  The "remote" flag marks
// groups created by GetSpec, for which the L2 holds a matching entry and must
// see L1Merge/L1Purge.  Replacement is round robin; a speculative line may be
// replaced (its data stays in the specBuf).  Tags and states are kept as one
// word per set and the data as one word per line, both plain memories with a
// single write port; after reset the state memory is cleared by a sweep of
// SETS cycles, during which the processor port is not ready.  Writes to S use Upgrade, a write
// hit on E silently goes to M.
//
// Interface and timing.  Processor port: valid/ready request (op, byte
// address, load-queue index, write word), response pulse with the read word.
// A hit is accepted and answered in the next cycle (1-cycle round trip).
// Misses and messages are handled one at a time (one outstanding request).
// L2 port: request valid/ready, response pulse; forwarded requests arrive as
// pulses and are answered one cycle later; they have priority over processor
// requests.  sb_valid_o exposes which load-queue entries hold speculative
// loads; spec_inv_* reports speculative loads whose line was invalidated (a
// TSO core replays them).
//
// From the protocol: the states and transitions, the message set and the
// specBuf use.  This design's choices: one outstanding miss, round-robin
// replacement, the group bookkeeping above, the eviction handshake (a Put is
// acknowledged before the way is reused) and re-installation through L1Merge
// when a replaced line's speculative load merges.
module rcp_l1
  import rcp_pkg::*;
#(
  parameter int unsigned SETS = 128,   // 64 KB / 64 B / 8 ways
  parameter int unsigned WAYS = 8,
  parameter int unsigned LQ   = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  // processor side
  input  logic               cpu_req_valid,
  output logic               cpu_req_ready,
  input  pr_op_t             cpu_req_op,
  input  logic [ADDR_W-1:0]  cpu_req_addr,
  input  logic [7:0]         cpu_req_lq,
  input  word_t              cpu_req_wdata,
  output logic               cpu_resp_valid,
  output word_t              cpu_resp_data,
  output logic [LQ-1:0]      sb_valid_o,
  output logic               spec_inv_valid,
  output logic [LQ-1:0]      spec_inv_mask,
  // L2 side
  output logic               req_valid,
  input  logic               req_ready,
  output l1_to_l2_t          req,
  input  logic               resp_valid,
  input  l2_resp_t           resp,
  input  logic               fwd_valid,
  input  l2_fwd_t            fwd,
  output logic               fwd_ack_valid,
  output l1_fwd_ack_t        fwd_ack,
  // event pulses for statistics
  output l1_ev_t             ev,
  // debug view of one line: combined state as seen by this L1
  input  laddr_t             dbg_addr,
  output coh_state_t         dbg_state
);

  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned TAG_W = LADDR_W - IDX_W;
  localparam int unsigned WAY_W = $clog2(WAYS);

  typedef logic [TAG_W-1:0] tag_t;
  typedef logic [IDX_W-1:0] set_t;
  typedef logic [WAY_W-1:0] way_t;
  typedef logic [IDX_W+WAY_W-1:0] didx_t;

  typedef enum logic [2:0] {C_INIT, C_IDLE, C_EVICT, C_EVICT_WAIT, C_REQ, C_WAIT} cst_t;

  // One tag/state word per set (with the set's replacement pointer) and one
  // data word per line.  Both are memories with a single write port; the state
  // memory is cleared by a sweep after reset.
  typedef struct packed {
    way_t             rr;
    mesi_t [WAYS-1:0] st;
    tag_t  [WAYS-1:0] tag;
  } setm_t;

  setm_t meta_q [SETS];
  line_t data_q [SETS*WAYS];

  if (WAYS < 2 || (WAYS & (WAYS - 1)) != 0 || (SETS & (SETS - 1)) != 0) begin : g_chk
    $error("rcp_l1: SETS and WAYS must be powers of two, WAYS >= 2");
  end

  cst_t       cst_q;
  set_t       iset_q;     // initialisation sweep
  laddr_t     la_q;
  logic [WSEL_W-1:0] wsel_q;
  logic [7:0] lq_q;
  word_t      wdata_q;
  way_t       way_q;
  logic       install_q;
  l1_req_t    kind_q;
  l1_to_l2_t  put_q;

  // ---------------------------------------------------------------- lookups
  function automatic set_t set_of(laddr_t a);
    return a[IDX_W-1:0];
  endfunction
  function automatic tag_t tag_of(laddr_t a);
    return a[LADDR_W-1:IDX_W];
  endfunction

  laddr_t in_la;
  logic [WSEL_W-1:0] in_wsel;
  assign in_la   = cpu_req_addr[ADDR_W-1:OFFSET_W];
  assign in_wsel = cpu_req_addr[OFFSET_W-1:3];

  logic in_resolve;
  assign in_resolve = (cpu_req_op == OP_PRMERGE) || (cpu_req_op == OP_PRPURGE);

  // lookup of the incoming request (in C_IDLE; a PrMerge/PrPurge looks up the
  // line of its specBuf entry) or of the latched one
  sb_entry_t sb_rd;
  laddr_t la_c;
  setm_t  m_c;
  logic   hit_c;
  way_t   hway_c;
  logic   free_c;
  way_t   fway_c;
  way_t   vway_c;     // hit way, else free way, else round-robin victim
  line_t  d_c;        // data of vway_c
  always_comb begin
    la_c = (cst_q != C_IDLE) ? la_q : (in_resolve ? sb_rd.addr : in_la);
    m_c  = meta_q[set_of(la_c)];
    hit_c = 1'b0; hway_c = '0; free_c = 1'b0; fway_c = '0;
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (m_c.st[w] != ST_I && m_c.tag[w] == tag_of(la_c)) begin
        hit_c = 1'b1; hway_c = way_t'(w);
      end
    end
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (m_c.st[w] == ST_I) begin
        free_c = 1'b1; fway_c = way_t'(w);
      end
    end
    vway_c = hit_c ? hway_c : (free_c ? fway_c : m_c.rr);
    d_c    = data_q[{set_of(la_c), vway_c}];
  end

  // lookup of a forwarded request
  setm_t m_f;
  logic  fhit;
  way_t  fhway;
  line_t d_f;
  always_comb begin
    m_f  = meta_q[set_of(fwd.addr)];
    fhit = 1'b0; fhway = '0;
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (m_f.st[w] != ST_I && m_f.tag[w] == tag_of(fwd.addr)) begin
        fhit = 1'b1; fhway = way_t'(w);
      end
    end
    d_f = data_q[{set_of(fwd.addr), fhway}];
  end

  // ---------------------------------------------------------------- specBuf
  logic        sb_wr_en;
  logic [7:0]  sb_wr_idx;
  sb_entry_t   sb_wr_entry;
  logic [LQ-1:0] sb_clr, sb_set_merged, sb_set_stale, sb_clr_remote;
  logic [7:0]  sb_rd_idx;
  laddr_t      sb_q_addr;
  logic [LQ-1:0] sb_match, sb_live;
  sb_entry_t   sb_live_entry;
  logic [LQ-1:0] dbg_sb_match;

  rcp_spec_buf #(.ENTRIES(LQ)) u_sb (
    .clk, .rst_n,
    .wr_en(sb_wr_en), .wr_idx(sb_wr_idx), .wr_entry(sb_wr_entry),
    .clr_mask(sb_clr), .set_merged_mask(sb_set_merged), .set_stale_mask(sb_set_stale),
    .clr_remote_mask(sb_clr_remote),
    .rd_idx(sb_rd_idx), .rd_entry(sb_rd),
    .q_addr(sb_q_addr), .q_match(sb_match), .q_live(sb_live), .q_live_entry(sb_live_entry),
    .q2_addr(dbg_addr), .q2_match(dbg_sb_match),
    .valid_o(sb_valid_o)
  );

  always_comb begin
    setm_t m_d;
    mesi_t ds;
    m_d = meta_q[set_of(dbg_addr)];
    ds  = ST_I;
    for (int unsigned w = 0; w < WAYS; w++)
      if (m_d.st[w] != ST_I && m_d.tag[w] == tag_of(dbg_addr))
        ds = m_d.st[w];
    dbg_state = combine(ds, |dbg_sb_match);
  end

  assign sb_rd_idx  = (cst_q == C_IDLE) ? cpu_req_lq : lq_q;
  always_comb begin
    if (fwd_valid)                    sb_q_addr = fwd.addr;
    else if (cst_q != C_IDLE)         sb_q_addr = la_q;
    else if (in_resolve)              sb_q_addr = sb_rd.addr;
    else                              sb_q_addr = in_la;
  end

  // others of the group of the entry being resolved
  logic [LQ-1:0] others;
  always_comb begin
    others = sb_live;
    if (cpu_req_lq < 8'(LQ)) others[cpu_req_lq[$clog2(LQ)-1:0]] = 1'b0;
  end

  assign cpu_req_ready = (cst_q == C_IDLE) && !fwd_valid;
  logic accept;
  assign accept = cpu_req_valid && cpu_req_ready;

  // ---------------------------------------------------------------- requests
  always_comb begin
    req_valid = 1'b0;
    req       = '0;
    if (cst_q == C_EVICT) begin
      req_valid = 1'b1;
      req       = put_q;
    end else if (cst_q == C_REQ) begin
      req_valid = 1'b1;
      req.kind  = kind_q;
      req.addr  = la_q;
      req.lq    = lq_q;
    end
  end

  // ---------------------------------------------------------------- combinational control
  // Write-port requests to the specBuf are computed here from the same
  // conditions the sequential block below uses.
  always_comb begin
    sb_wr_en = 1'b0; sb_wr_idx = '0; sb_wr_entry = '0;
    sb_clr = '0; sb_set_merged = '0; sb_set_stale = '0; sb_clr_remote = '0;
    if (fwd_valid) begin
      if (fwd.kind == FW_GETX || fwd.kind == FW_INV) sb_set_stale = sb_match;
    end else if (accept) begin
      unique case (cpu_req_op)
        OP_SPECRD: begin
          sb_wr_idx = cpu_req_lq;
          if (hit_c) begin
            sb_wr_en = 1'b1;
            sb_wr_entry.valid = 1'b1;
            sb_wr_entry.ready = 1'b1;
            sb_wr_entry.meta  = '{count: 4'd1, merged: 1'b0, remote: 1'b0, stale: 1'b0};
            sb_wr_entry.addr  = in_la;
            sb_wr_entry.data  = d_c;
            sb_wr_entry.state = m_c.st[hway_c];
          end else if (|sb_live) begin
            sb_wr_en = 1'b1;
            sb_wr_entry = sb_live_entry;
            sb_wr_entry.meta.merged = 1'b0;
            if (sb_live_entry.meta.count != 4'hf) sb_wr_entry.meta.count = sb_live_entry.meta.count + 4'd1;
          end else begin
            // GetSpec in flight: entry reserved, not ready
            sb_wr_en = 1'b1;
            sb_wr_entry.valid = 1'b1;
            sb_wr_entry.ready = 1'b0;
            sb_wr_entry.meta  = '{count: 4'd1, merged: 1'b0, remote: 1'b1, stale: 1'b0};
            sb_wr_entry.addr  = in_la;
            sb_wr_entry.state = ST_I;
          end
        end
        OP_PRMERGE, OP_PRPURGE: begin
          if (sb_rd.valid) begin
            sb_wr_idx = cpu_req_lq;
            if (sb_rd.meta.stale || (|others) || !sb_rd.meta.remote) begin
              sb_wr_en = 1'b1;            // free the entry
              sb_wr_entry = '0;
              if (!sb_rd.meta.stale && (|others) && cpu_req_op == OP_PRMERGE)
                sb_set_merged = others;
            end else begin
              sb_wr_en = 1'b1;            // L1Merge / L1Purge in transit
              sb_wr_entry = sb_rd;
              sb_wr_entry.ready = 1'b0;
            end
          end
        end
        default: ;
      endcase
    end else if (cst_q == C_WAIT && resp_valid) begin
      unique case (kind_q)
        RQ_GETSPEC: begin
          sb_wr_en = 1'b1;
          sb_wr_idx = lq_q;
          sb_wr_entry = sb_rd;
          sb_wr_entry.ready = 1'b1;
          sb_wr_entry.data  = resp.data;
          sb_wr_entry.state = ST_I;
        end
        RQ_L1MERGE, RQ_L1PURGE: begin
          sb_wr_en = 1'b1;
          sb_wr_idx = lq_q;
          sb_wr_entry = '0;
        end
        RQ_GETX, RQ_UPGRADE: sb_clr_remote = sb_match;
        default: ;
      endcase
    end
  end

  assign spec_inv_valid = fwd_valid && (fwd.kind == FW_GETX || fwd.kind == FW_INV) && (|sb_match);
  assign spec_inv_mask  = spec_inv_valid ? sb_match : '0;

  // ---------------------------------------------------------------- cache array writes
  logic  m_we;
  set_t  m_set;
  setm_t m_wd;
  logic  d_we;
  didx_t d_idx;
  line_t d_wd;
  logic  wr_hit;
  assign wr_hit = hit_c && (m_c.st[hway_c] == ST_M || m_c.st[hway_c] == ST_E);

  always_comb begin
    m_we = 1'b0; m_set = set_of(la_c); m_wd = m_c;
    d_we = 1'b0; d_idx = {set_of(la_c), way_q}; d_wd = resp.data;
    if (cst_q == C_INIT) begin
      m_we = 1'b1; m_set = iset_q; m_wd = '0;
    end else if (fwd_valid) begin
      if (fhit && fwd.kind != FW_GETSPEC) begin
        m_we  = 1'b1;
        m_set = set_of(fwd.addr);
        m_wd  = m_f;
        m_wd.st[fhway] = (fwd.kind == FW_GETS || fwd.kind == FW_L1MERGE) ? ST_S : ST_I;
      end
    end else begin
      unique case (cst_q)
        C_IDLE: if (accept && cpu_req_op == OP_WR && wr_hit) begin
          m_we = 1'b1;
          m_wd.st[hway_c] = ST_M;
          d_we  = 1'b1;
          d_idx = {set_of(la_c), hway_c};
          d_wd  = put_word(d_c, in_wsel, cpu_req_wdata);
        end
        C_EVICT_WAIT: if (resp_valid) begin
          m_we = 1'b1;
          m_wd.st[way_q] = ST_I;
          m_wd.rr        = way_t'(m_c.rr + 1'b1);
        end
        C_WAIT: if (resp_valid) begin
          unique case (kind_q)
            RQ_GETS: begin
              m_we = 1'b1; d_we = 1'b1;
              m_wd.tag[way_q] = tag_of(la_q);
              m_wd.st[way_q]  = resp.shared ? ST_S : ST_E;
            end
            RQ_GETX, RQ_UPGRADE: begin
              m_we = 1'b1; d_we = 1'b1;
              m_wd.tag[way_q] = tag_of(la_q);
              m_wd.st[way_q]  = ST_M;
              d_wd = put_word(resp.data, wsel_q, wdata_q);
            end
            RQ_L1MERGE: if (install_q && !resp.stale) begin
              m_we = 1'b1; d_we = 1'b1;
              m_wd.tag[way_q] = tag_of(la_q);
              m_wd.st[way_q]  = resp.shared ? ST_S : ST_E;
            end
            default: ;
          endcase
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (m_we) meta_q[m_set] <= m_wd;
    if (d_we) data_q[d_idx] <= d_wd;
  end

  // ---------------------------------------------------------------- sequential
  // Start a transaction for the accepted request (a miss, or the L1Merge /
  // L1Purge of the last load of a group).  When the line has to be installed
  // and no way is free, the round-robin victim is put back to the L2 first.
  logic    st_install;
  l1_req_t st_kind;
  always_comb begin
    st_kind    = RQ_GETS;
    st_install = 1'b1;
    unique case (cpu_req_op)
      OP_RD:     st_kind = RQ_GETS;
      OP_WR:     st_kind = hit_c ? RQ_UPGRADE : RQ_GETX;
      OP_SPECRD: begin st_kind = RQ_GETSPEC; st_install = 1'b0; end
      default: begin
        st_kind    = (cpu_req_op == OP_PRMERGE || sb_rd.meta.merged) ? RQ_L1MERGE : RQ_L1PURGE;
        st_install = (st_kind == RQ_L1MERGE) && !hit_c;
      end
    endcase
  end

  // the accepted request needs an L2 transaction
  logic start_c;
  always_comb begin
    unique case (cpu_req_op)
      OP_RD:     start_c = !hit_c;
      OP_WR:     start_c = !wr_hit;
      OP_SPECRD: start_c = !hit_c && !(|sb_live);
      OP_PRMERGE, OP_PRPURGE:
                 start_c = sb_rd.valid && !sb_rd.meta.stale && !(|others) && sb_rd.meta.remote;
      default:   start_c = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cst_q <= C_INIT; iset_q <= '0;
      la_q <= '0; wsel_q <= '0; lq_q <= '0; wdata_q <= '0;
      way_q <= '0; install_q <= 1'b0; kind_q <= RQ_GETS; put_q <= '0;
      cpu_resp_valid <= 1'b0; cpu_resp_data <= '0;
      fwd_ack_valid <= 1'b0; fwd_ack <= '0;
      ev <= '0;
    end else begin
      cpu_resp_valid <= 1'b0;
      fwd_ack_valid  <= 1'b0;
      ev <= '0;

      if (cst_q == C_INIT) begin
        iset_q <= iset_q + 1'b1;
        if (iset_q == set_t'(SETS - 1)) cst_q <= C_IDLE;
      end else if (fwd_valid) begin
        // ---------------- forwarded request from the L2
        fwd_ack_valid <= 1'b1;
        fwd_ack.data  <= fhit ? d_f : '0;
        fwd_ack.dirty <= fhit && (m_f.st[fhway] == ST_M) && (fwd.kind != FW_GETSPEC);
        ev.fwd_l1merge <= (fwd.kind == FW_L1MERGE);
        ev.inv_spec    <= (fwd.kind == FW_GETX || fwd.kind == FW_INV) && (|sb_match);
        ev.fwd_getspec <= (fwd.kind == FW_GETSPEC);
      end else begin
        unique case (cst_q)
          C_IDLE: if (accept) begin
            la_q    <= la_c;
            wsel_q  <= in_wsel;
            lq_q    <= cpu_req_lq;
            wdata_q <= cpu_req_wdata;
            unique case (cpu_req_op)
              OP_RD: begin
                if (hit_c) begin
                  cpu_resp_valid <= 1'b1;
                  cpu_resp_data  <= get_word(d_c, in_wsel);
                end else begin
                                  end
              end
              OP_WR: begin
                if (wr_hit) begin
                  cpu_resp_valid <= 1'b1;
                  cpu_resp_data  <= '0;
                end else begin
                                  end
              end
              OP_SPECRD: begin
                if (hit_c) begin
                  cpu_resp_valid <= 1'b1;
                  cpu_resp_data  <= get_word(d_c, in_wsel);
                  ev.specrd_hit  <= 1'b1;
                end else if (|sb_live) begin
                  cpu_resp_valid  <= 1'b1;
                  cpu_resp_data   <= get_word(sb_live_entry.data, in_wsel);
                  ev.specrd_sbhit <= 1'b1;
                end else begin
                                    ev.getspec <= 1'b1;
                end
              end
              OP_PRMERGE, OP_PRPURGE: begin
                if (!sb_rd.valid) begin
                  cpu_resp_valid <= 1'b1;
                  cpu_resp_data  <= '0;
                end else if (sb_rd.meta.stale) begin
                  cpu_resp_valid <= 1'b1;
                  cpu_resp_data  <= '0;
                  ev.ignored     <= 1'b1;
                end else if ((|others) || !sb_rd.meta.remote) begin
                  cpu_resp_valid <= 1'b1;
                  cpu_resp_data  <= '0;
                  ev.merge_local <= (cpu_req_op == OP_PRMERGE);
                  ev.purge_local <= (cpu_req_op == OP_PRPURGE);
                end else begin
                                    ev.l1merge <= (st_kind == RQ_L1MERGE);
                  ev.l1purge <= (st_kind == RQ_L1PURGE);
                end
              end
              default: begin
                cpu_resp_valid <= 1'b1;
                cpu_resp_data  <= '0;
              end
            endcase
            if (start_c) begin
              kind_q    <= st_kind;
              install_q <= st_install;
              way_q     <= vway_c;
              if (st_install && !hit_c && !free_c) begin
                put_q.kind <= (m_c.st[vway_c] == ST_M) ? RQ_PUTM :
                              (m_c.st[vway_c] == ST_E) ? RQ_PUTE : RQ_PUTS;
                put_q.addr <= {m_c.tag[vway_c], set_of(la_c)};
                put_q.lq   <= '0;
                put_q.data <= d_c;
                cst_q    <= C_EVICT;
                ev.evict <= 1'b1;
              end else begin
                cst_q <= C_REQ;
              end
            end
          end

          C_EVICT: if (req_ready) cst_q <= C_EVICT_WAIT;

          C_EVICT_WAIT: if (resp_valid) cst_q <= C_REQ;

          C_REQ: if (req_ready) cst_q <= C_WAIT;

          C_WAIT: if (resp_valid) begin
            cst_q <= C_IDLE;
            cpu_resp_valid <= 1'b1;
            cpu_resp_data  <= (kind_q == RQ_GETS || kind_q == RQ_GETSPEC) ? get_word(resp.data, wsel_q) : '0;
          end

          default: cst_q <= C_IDLE;
        endcase
      end
    end
  end

  // The L2 never sends a response and a forwarded request in the same cycle,
  // and a request is held until it is accepted.
  l1_to_l2_t req_prev;
  logic      req_wait;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_prev <= '0; req_wait <= 1'b0;
    end else begin
      a_no_resp_fwd: assert (!(resp_valid && fwd_valid));
      a_req_stable:  assert (!req_wait || (req_valid && req == req_prev));
      req_prev <= req;
      req_wait <= req_valid && !req_ready;
    end
  end

endmodule
