// rcp_resolve_seq: turns the processor's bulk resolution of speculative loads
// into per-load PrMerge / PrPurge operations for the L1.
//
// When the visibility point moves, the processor sends a single operation for
// a whole run of loads: PrMerge for the youngest load that became safe (all
// older speculative loads are merged with it) or PrPurge for the oldest load
// that was squashed (all younger ones are purged with it).  This block walks
// the load queue and issues one PrMerge / PrPurge per load that holds a valid
// L1 specBuf entry: for PrMerge(j) from the load-queue head up to j, oldest
// first; for PrPurge(j) from j up to the entry before the tail.  The processor
// gets one response, when the last per-load operation has completed.  Rd, Wr and
// SpecRd pass straight through, requests and responses alike.
//
// How it works: a three-state walker (idle, check entry, wait for the L1) with
// an index that advances by one each step, wrapping at LQ.  One entry is
// examined per cycle, so a bulk resolution takes at most LQ checks plus the L1
// time of each valid entry.
//
// From the protocol: the bulk semantics of PrMerge (youngest, older ones
// merged) and PrPurge (oldest, younger ones squashed).  This design's choices:
// the walk order, one entry per cycle, and that the processor supplies the
// load-queue head and tail indices.
//
// Interface: cmd_* is the processor side (valid/ready, response pulse); l1_* is
// the L1 processor port of rcp_l1; sb_valid is the L1's specBuf valid vector.
module rcp_resolve_seq
  import rcp_pkg::*;
#(
  parameter int unsigned LQ = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  pr_op_t            cmd_op,
  input  logic [ADDR_W-1:0] cmd_addr,
  input  logic [7:0]        cmd_lq,
  input  word_t             cmd_wdata,
  input  logic [7:0]        lq_head,   // oldest load-queue entry
  input  logic [7:0]        lq_tail,   // first free load-queue entry
  output logic              cmd_resp_valid,
  output word_t             cmd_resp_data,
  output logic              l1_valid,
  input  logic              l1_ready,
  output pr_op_t            l1_op,
  output logic [ADDR_W-1:0] l1_addr,
  output logic [7:0]        l1_lq,
  output word_t             l1_wdata,
  input  logic              l1_resp_valid,
  input  word_t             l1_resp_data,
  input  logic [LQ-1:0]     sb_valid
);

  typedef enum logic [1:0] {R_IDLE, R_CHECK, R_WAIT, R_DONE} rst_t;

  rst_t       st_q;
  pr_op_t     op_q;
  logic [7:0] idx_q;    // entry being examined
  logic [7:0] last_q;   // last entry of the walk (inclusive)

  function automatic logic [7:0] nxt(logic [7:0] i);
    return (i == 8'(LQ - 1)) ? 8'd0 : i + 8'd1;
  endfunction
  function automatic logic [7:0] prv(logic [7:0] i);
    return (i == 8'd0) ? 8'(LQ - 1) : i - 8'd1;
  endfunction

  logic bulk;
  assign bulk = (cmd_op == OP_PRMERGE) || (cmd_op == OP_PRPURGE);

  logic idx_valid;
  assign idx_valid = (idx_q < 8'(LQ)) && sb_valid[idx_q[$clog2(LQ)-1:0]];

  always_comb begin
    cmd_ready      = 1'b0;
    l1_valid       = 1'b0;
    l1_op          = cmd_op;
    l1_addr        = cmd_addr;
    l1_lq          = cmd_lq;
    l1_wdata       = cmd_wdata;
    cmd_resp_valid = 1'b0;
    cmd_resp_data  = l1_resp_data;
    unique case (st_q)
      R_IDLE: begin
        if (bulk) begin
          cmd_ready = 1'b1;
        end else begin
          l1_valid  = cmd_valid;
          cmd_ready = l1_ready;
        end
        cmd_resp_valid = l1_resp_valid;   // responses of pass-through requests
      end
      R_CHECK: begin
        l1_valid = idx_valid;
        l1_op    = op_q;
        l1_addr  = '0;
        l1_lq    = idx_q;
        l1_wdata = '0;
      end
      R_DONE: begin
        cmd_resp_valid = 1'b1;
        cmd_resp_data  = '0;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= R_IDLE; op_q <= OP_PRMERGE; idx_q <= '0; last_q <= '0;
    end else begin
      unique case (st_q)
        R_IDLE: if (cmd_valid && bulk) begin
          op_q <= cmd_op;
          if (cmd_op == OP_PRMERGE) begin
            idx_q  <= lq_head;
            last_q <= cmd_lq;
          end else begin
            idx_q  <= cmd_lq;
            last_q <= prv(lq_tail);
          end
          st_q <= R_CHECK;
        end
        R_CHECK: begin
          if (idx_valid) begin
            if (l1_ready) st_q <= R_WAIT;
          end else if (idx_q == last_q) begin
            st_q <= R_DONE;
          end else begin
            idx_q <= nxt(idx_q);
          end
        end
        R_WAIT: if (l1_resp_valid) begin
          if (idx_q == last_q) st_q <= R_DONE;
          else begin
            idx_q <= nxt(idx_q);
            st_q  <= R_CHECK;
          end
        end
        R_DONE: st_q <= R_IDLE;
        default: st_q <= R_IDLE;
      endcase
    end
  end

endmodule
