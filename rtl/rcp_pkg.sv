// rcp_pkg: types and constants shared by the reversible coherence protocol (RCP)
// cache hierarchy.
//
// RCP extends a two-level MESI protocol (private L1s, shared L2 with a directory)
// with speculative loads.  A speculative load (SpecRd) moves a line from its
// stable state X to a speculative state XSpec; when the load later becomes safe
// the processor sends PrMerge and the line moves to the state an ordinary load
// would have produced; when it is squashed the processor sends PrPurge and the
// line returns to X.  The messages between L1 and L2 are the MESI ones plus
// GetSpec (speculative miss), L1Merge and L1Purge.
//
// In this implementation each cache stores only the base MESI state of a line.
// Whether the line is speculative (the "Spec" half of XSpec) is derived from the
// speculative buffers: in an L1 a line is XSpec while a valid specBuf entry of
// that core holds its address; in the L2 a line is XSpec while spec core > 0,
// i.e. while some core's L2 specBuf holds it.  coh_state_t below is the combined
// view used for reporting and in the testbenches.
//
// Sizes that the evaluated configuration gives: 64-byte lines.  The physical
// address width and the data word width of the processor port are this
// design's choice (32-bit byte address, 64-bit word).
package rcp_pkg;

  localparam int unsigned ADDR_W    = 32;               // byte address (assumed)
  localparam int unsigned LINE_B    = 64;               // 64 B line
  localparam int unsigned LINE_BITS = LINE_B * 8;
  localparam int unsigned OFFSET_W  = $clog2(LINE_B);
  localparam int unsigned LADDR_W   = ADDR_W - OFFSET_W; // line address
  localparam int unsigned WORD_BITS = 64;
  localparam int unsigned WSEL_W    = $clog2(LINE_BITS / WORD_BITS);

  typedef logic [LADDR_W-1:0]   laddr_t;
  typedef logic [LINE_BITS-1:0] line_t;
  typedef logic [WORD_BITS-1:0] word_t;

  // Base (non-speculative) MESI state stored in the tag arrays.
  typedef enum logic [1:0] {ST_I = 2'd0, ST_S = 2'd1, ST_E = 2'd2, ST_M = 2'd3} mesi_t;

  // Combined view: base state plus speculative flag (Table 1 of the protocol).
  typedef enum logic [2:0] {
    CS_I = 3'd0, CS_S = 3'd1, CS_E = 3'd2, CS_M = 3'd3,
    CS_ISPEC = 3'd4, CS_SSPEC = 3'd5, CS_ESPEC = 3'd6, CS_MSPEC = 3'd7
  } coh_state_t;

  function automatic coh_state_t combine(mesi_t base, logic spec);
    return coh_state_t'({spec, base});
  endfunction

  // Processor -> L1 operations.
  typedef enum logic [2:0] {
    OP_RD = 3'd0, OP_WR = 3'd1, OP_SPECRD = 3'd2, OP_PRMERGE = 3'd3, OP_PRPURGE = 3'd4
  } pr_op_t;

  // L1 -> L2 requests.
  typedef enum logic [3:0] {
    RQ_GETS = 4'd0, RQ_GETX = 4'd1, RQ_UPGRADE = 4'd2, RQ_GETSPEC = 4'd3,
    RQ_L1MERGE = 4'd4, RQ_L1PURGE = 4'd5, RQ_PUTS = 4'd6, RQ_PUTE = 4'd7, RQ_PUTM = 4'd8
  } l1_req_t;

  // L2 -> L1 forwarded requests.  FW_GETS downgrades an owner to S, FW_GETX and
  // FW_INV invalidate, FW_GETSPEC asks the owner for data without any state
  // change, FW_L1MERGE finalises a remote speculative load (owner goes to S and
  // flushes dirty data).
  typedef enum logic [2:0] {
    FW_GETS = 3'd0, FW_GETX = 3'd1, FW_INV = 3'd2, FW_GETSPEC = 3'd3, FW_L1MERGE = 3'd4
  } fwd_t;

  // Request from an L1 to the L2 (valid/ready handshake).
  typedef struct packed {
    l1_req_t kind;
    laddr_t  addr;
    logic [7:0] lq;     // load-queue index for GetSpec / L1Merge / L1Purge
    line_t   data;      // PutM write-back data
  } l1_to_l2_t;

  // Response from the L2 to the requesting L1 (single-cycle pulse).
  typedef struct packed {
    line_t data;
    logic  shared;      // GetS / L1Merge: line has other non-speculative copies
    logic  stale;       // L1Merge / L1Purge for an entry the L2 already dropped
  } l2_resp_t;

  // Forwarded request from the L2 to an L1 (single-cycle pulse).
  typedef struct packed {
    fwd_t   kind;
    laddr_t addr;
  } l2_fwd_t;

  // L1 answer to a forwarded request (single-cycle pulse, one cycle later).
  typedef struct packed {
    line_t data;
    logic  dirty;       // data is newer than the L2 copy (owner was M)
  } l1_fwd_ack_t;

  // Memory request (valid/ready), issued by the L2.
  typedef struct packed {
    logic   we;
    laddr_t addr;
    line_t  data;
  } mem_req_t;

  // Speculative buffer entry (Fig. "specBuf": valid, ready, metadata, addr,
  // SpecData, Coh_State).
  typedef struct packed {
    logic [3:0] count;  // speculative accesses to the line recorded in this entry
    logic       merged; // an older load of the same line in this core has merged
    logic       remote; // the L2 holds a matching entry (created by GetSpec)
    logic       stale;  // the line was invalidated: merge/purge is ignored
  } sb_meta_t;

  typedef struct packed {
    logic     valid;
    logic     ready;    // no coherence transaction for this entry is in transit
    sb_meta_t meta;
    laddr_t   addr;
    line_t    data;
    mesi_t    state;
  } sb_entry_t;

  // One-cycle event pulses of an L1 controller, counted by the testbenches.
  typedef struct packed {
    logic specrd_hit;    // SpecRd hit in the cache: X -> XSpec locally
    logic specrd_sbhit;  // SpecRd missed the cache but hit a live specBuf entry
    logic getspec;       // SpecRd missed both: GetSpec sent, line -> ISpec
    logic merge_local;   // PrMerge resolved without a message (XSpec -> X)
    logic purge_local;   // PrPurge resolved without a message (XSpec -> X)
    logic l1merge;       // L1Merge sent
    logic l1purge;       // L1Purge sent
    logic ignored;       // PrMerge/PrPurge ignored: line invalidated meanwhile
    logic fwd_getspec;   // forwarded GetSpec served, owner state unchanged
    logic fwd_l1merge;   // forwarded L1Merge: owner M/E -> S (flush if M)
    logic evict;         // line replaced (Put sent)
    logic inv_spec;      // invalidation hit a speculatively loaded line
  } l1_ev_t;

  function automatic word_t get_word(line_t l, logic [WSEL_W-1:0] sel);
    return l[sel*WORD_BITS +: WORD_BITS];
  endfunction

  function automatic line_t put_word(line_t l, logic [WSEL_W-1:0] sel, word_t w);
    line_t r = l;
    r[sel*WORD_BITS +: WORD_BITS] = w;
    return r;
  endfunction

endpackage
