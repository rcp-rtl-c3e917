// rcp_cbf: counting bloom filter over line addresses.
//
// One filter sits beside each core's L2 speculative buffer and approximately
// records the set of line addresses that buffer holds.  Addresses are inserted
// when an entry is allocated (GetSpec) and removed when it is freed (L1Merge,
// L1Purge, invalidation).  The membership check may give false positives but
// never false negatives; the L2 uses it to decide whether the (exact) search of
// that core's buffer is needed when counting speculative copies ("spec core").
//
// How it works: NUM_HASH hash functions each pick one of NUM_CTR counters of
// CTR_W bits.  Insert increments, remove decrements the selected counters.  A
// counter that reaches its maximum sticks there (it can no longer be decremented
// safely), which keeps the no-false-negative guarantee.  The query is purely
// combinational, so its time is the same whatever the contents, as the protocol
// requires to avoid a timing channel.
//
// The counting bloom filter itself and the constant check time follow the
// protocol description; the number of counters, their width, the number of hash
// functions and the XOR-fold hashes are this design's choices.
//
// Interface: ins_en/ins_addr and rem_en/rem_addr act at the clock edge (both may
// be active in one cycle); q_addr -> q_hit is combinational.
module rcp_cbf
  import rcp_pkg::*;
#(
  parameter int unsigned NUM_CTR  = 256,
  parameter int unsigned CTR_W    = 4,
  parameter int unsigned NUM_HASH = 2
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   ins_en,
  input  laddr_t ins_addr,
  input  logic   rem_en,
  input  laddr_t rem_addr,
  input  laddr_t q_addr,
  output logic   q_hit
);

  localparam int unsigned IDX_W = $clog2(NUM_CTR);
  localparam logic [CTR_W-1:0] CTR_MAX = '1;

  logic [CTR_W-1:0] ctr [NUM_CTR];

  // Hash k: XOR-fold of the address after a k-dependent rotation and mixing.
  function automatic logic [IDX_W-1:0] hash(laddr_t a, int unsigned k);
    logic [LADDR_W-1:0] m;
    logic [IDX_W-1:0]   h;
    m = a ^ (a << (3*k)) ^ (a >> (LADDR_W - 3*k)) ^ LADDR_W'(32'h9E37_79B9 * k);
    if (k == 0) m = a;
    h = '0;
    for (int unsigned b = 0; b < LADDR_W; b++) h[b % IDX_W] ^= m[b];
    return h;
  endfunction

  // counter indices of the inserted, removed and queried lines
  logic [IDX_W-1:0] ins_idx [NUM_HASH];
  logic [IDX_W-1:0] rem_idx [NUM_HASH];
  always_comb begin
    q_hit = 1'b1;
    for (int unsigned k = 0; k < NUM_HASH; k++) begin
      ins_idx[k] = hash(ins_addr, k);
      rem_idx[k] = hash(rem_addr, k);
      if (ctr[hash(q_addr, k)] == '0) q_hit = 1'b0;
    end
  end

  for (genvar i = 0; i < NUM_CTR; i++) begin : g_ctr
    logic inc, dec;
    always_comb begin
      inc = 1'b0;
      dec = 1'b0;
      for (int unsigned k = 0; k < NUM_HASH; k++) begin
        if (ins_en && ins_idx[k] == IDX_W'(i)) inc = 1'b1;
        if (rem_en && rem_idx[k] == IDX_W'(i)) dec = 1'b1;
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        ctr[i] <= '0;
      end else if (inc && !dec) begin
        if (ctr[i] != CTR_MAX) ctr[i] <= ctr[i] + 1'b1;
      end else if (dec && !inc) begin
        if (ctr[i] != CTR_MAX && ctr[i] != '0) ctr[i] <= ctr[i] - 1'b1;
      end
    end
  end

endmodule
