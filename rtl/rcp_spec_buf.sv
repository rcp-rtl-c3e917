// rcp_spec_buf: speculative buffer (specBuf) of one core, used in the L1 and,
// one per core, in the L2.
//
// There is one entry per load-queue entry of the core: load-queue entry j of a
// core owns entry j of that core's specBuf in its L1 and in the L2.  Only loads
// that were issued speculatively have a valid entry.  An entry holds the fields
// of the protocol's specBuf entry: valid, ready (no coherence transaction for
// it is in transit), metadata, line address, SpecData (the line's data) and
// Coh_State (the line's state).  In this design the data and state are always
// captured; the protocol keeps them in the buffer only when the line is not in
// the cache, which changes the storage cost but not the behaviour.
//
// The metadata (see rcp_pkg::sb_meta_t) counts speculative accesses and carries
// three flags used by the controllers: merged (an older load of the same line
// has merged, so the group must finish as a merge), remote (the L2 holds a
// matching entry, so L1Merge/L1Purge must be sent) and stale (the line was
// invalidated while speculative, so merge/purge is ignored).
//
// The buffer is directly indexed, never associative for allocation, as the
// protocol requires so that it cannot be primed or probed like a cache.  The
// address match (q_addr -> q_match) compares all entries in parallel and is
// combinational, so its time does not depend on the contents.  q_live marks
// the matching entries that are not stale and q_live_entry is the lowest-index
// one of them.  A second match port (q2) serves status and debug queries.
//
// Interface: one indexed full-entry write port (wr_en/wr_idx/wr_entry, also used
// to free an entry by writing valid=0), mask ports that clear valid, set the
// merged or stale flag or clear the remote flag of several entries at once, an
// indexed read port and the match port.  Writes act at the clock edge; the
// indexed write wins over a mask port on the same entry.
module rcp_spec_buf
  import rcp_pkg::*;
#(
  parameter int unsigned ENTRIES = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  input  logic [7:0]           wr_idx,
  input  sb_entry_t            wr_entry,
  input  logic [ENTRIES-1:0]   clr_mask,
  input  logic [ENTRIES-1:0]   set_merged_mask,
  input  logic [ENTRIES-1:0]   set_stale_mask,
  input  logic [ENTRIES-1:0]   clr_remote_mask,
  input  logic [7:0]           rd_idx,
  output sb_entry_t            rd_entry,
  input  laddr_t               q_addr,
  output logic [ENTRIES-1:0]   q_match,
  output logic [ENTRIES-1:0]   q_live,
  output sb_entry_t            q_live_entry,
  input  laddr_t               q2_addr,
  output logic [ENTRIES-1:0]   q2_match,
  output logic [ENTRIES-1:0]   valid_o
);

  // the entry fields are kept in separate arrays; the data is written only
  // through the indexed port
  logic [ENTRIES-1:0] valid_q, ready_q;
  sb_meta_t           meta_q  [ENTRIES];
  laddr_t             addr_q  [ENTRIES];
  line_t              data_q  [ENTRIES];
  mesi_t              state_q [ENTRIES];

  localparam int unsigned IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  function automatic sb_entry_t entry(logic [IW-1:0] i);
    return '{valid: valid_q[i], ready: ready_q[i], meta: meta_q[i], addr: addr_q[i],
             data: data_q[i], state: state_q[i]};
  endfunction

  logic [IW-1:0] live_idx;
  always_comb begin
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      q_match[i]  = valid_q[i] && (addr_q[i] == q_addr);
      q_live[i]   = q_match[i] && !meta_q[i].stale;
      q2_match[i] = valid_q[i] && (addr_q[i] == q2_addr) && !meta_q[i].stale;
    end
    live_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--)
      if (q_live[i]) live_idx = IW'(i);
  end
  assign valid_o      = valid_q;
  assign q_live_entry = (|q_live) ? entry(live_idx) : '0;
  assign rd_entry     = (rd_idx < 8'(ENTRIES)) ? entry(rd_idx[IW-1:0]) : '0;

  always_ff @(posedge clk) begin
    if (wr_en) begin
      addr_q[wr_idx[IW-1:0]]  <= wr_entry.addr;
      data_q[wr_idx[IW-1:0]]  <= wr_entry.data;
      state_q[wr_idx[IW-1:0]] <= wr_entry.state;
    end
  end

  sb_meta_t meta_nx [ENTRIES];
  always_comb begin
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      meta_nx[i] = meta_q[i];
      if (set_merged_mask[i]) meta_nx[i].merged = 1'b1;
      if (set_stale_mask[i])  meta_nx[i].stale  = 1'b1;
      if (clr_remote_mask[i]) meta_nx[i].remote = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      ready_q <= '0;
      for (int unsigned i = 0; i < ENTRIES; i++) meta_q[i] <= '0;
    end else begin
      for (int unsigned i = 0; i < ENTRIES; i++) begin
        if (wr_en && wr_idx == 8'(i)) begin
          valid_q[i] <= wr_entry.valid;
          ready_q[i] <= wr_entry.ready;
          meta_q[i]  <= wr_entry.meta;
        end else begin
          meta_q[i] <= meta_nx[i];
          if (clr_mask[i]) valid_q[i] <= 1'b0;
        end
      end
    end
  end

endmodule
