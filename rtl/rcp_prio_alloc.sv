// rcp_prio_alloc: shared-resource allocator that keeps younger (speculative)
// instructions from delaying older ones.
//
// It manages ENTRIES slots of a resource shared by in-flight instructions, such
// as MSHRs or execution-unit slots, and enforces two processor rules that go
// with the coherence protocol to make speculative execution invisible:
//   * no instruction may delay an older one: every instruction carries a
//     priority tag, its reorder-buffer (ROB) index.  When a request finds all
//     slots occupied, its tag is compared with the occupants'; if some occupant
//     is younger, the youngest one is preempted (its tag is reported so it can
//     be re-scheduled in the next cycle) and its slot goes to the request.
//     Otherwise the request stalls.
//   * resources are not freed early: a slot is released only when the ROB
//     reports that its instruction became safe or was squashed (release_*),
//     not when the instruction finishes.
//
// How it works: age = (tag - rob_head) mod ROB_SIZE, so a larger age is a
// younger instruction and a lower priority.  A release and an allocation may
// come in the same cycle; the release is applied first.  Allocation takes the
// lowest free slot.  Everything is decided combinationally and takes effect at
// the clock edge.
//
// From the protocol's processor support: tag assignment in program order, the
// comparison with occupants and preemption of the lowest-priority one,
// deallocation at the safe/squash point.  This design's choices: the number of
// slots, the modular age comparison and the lowest-free-slot policy.
module rcp_prio_alloc #(
  parameter int unsigned ENTRIES  = 8,
  parameter int unsigned ROB_SIZE = 192,
  parameter int unsigned TAG_W    = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [TAG_W-1:0]  rob_head,
  input  logic              alloc_valid,
  input  logic [TAG_W-1:0]  alloc_tag,
  output logic              alloc_grant,
  output logic [$clog2(ENTRIES)-1:0] alloc_slot,
  output logic              preempt_valid,
  output logic [TAG_W-1:0]  preempt_tag,
  input  logic              release_valid,
  input  logic [TAG_W-1:0]  release_tag,
  output logic [ENTRIES-1:0] busy
);

  localparam int unsigned SW = $clog2(ENTRIES);

  logic [ENTRIES-1:0] valid_q;
  logic [TAG_W-1:0]   tag_q [ENTRIES];

  function automatic logic [TAG_W-1:0] age(logic [TAG_W-1:0] t, logic [TAG_W-1:0] h);
    return (t >= h) ? (t - h) : TAG_W'(32'(t) + ROB_SIZE - 32'(h));
  endfunction

  logic [ENTRIES-1:0] valid_rel;
  logic               have_free;
  logic [SW-1:0]      free_slot;
  logic [SW-1:0]      young_slot;
  logic [TAG_W-1:0]   young_age;

  always_comb begin
    for (int unsigned i = 0; i < ENTRIES; i++)
      valid_rel[i] = valid_q[i] && !(release_valid && tag_q[i] == release_tag);
    have_free = 1'b0; free_slot = '0;
    for (int i = ENTRIES - 1; i >= 0; i--)
      if (!valid_rel[i]) begin have_free = 1'b1; free_slot = SW'(i); end
    young_slot = '0; young_age = '0;
    for (int unsigned i = 0; i < ENTRIES; i++)
      if (valid_rel[i] && age(tag_q[i], rob_head) >= young_age) begin
        young_age = age(tag_q[i], rob_head); young_slot = SW'(i);
      end
    alloc_grant   = 1'b0;
    alloc_slot    = free_slot;
    preempt_valid = 1'b0;
    preempt_tag   = tag_q[young_slot];
    if (alloc_valid) begin
      if (have_free) begin
        alloc_grant = 1'b1;
      end else if (young_age > age(alloc_tag, rob_head)) begin
        alloc_grant   = 1'b1;
        alloc_slot    = young_slot;
        preempt_valid = 1'b1;
      end
    end
  end

  assign busy = valid_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      for (int unsigned i = 0; i < ENTRIES; i++) tag_q[i] <= '0;
    end else begin
      valid_q <= valid_rel;
      if (alloc_grant) begin
        valid_q[alloc_slot] <= 1'b1;
        tag_q[alloc_slot]   <= alloc_tag;
      end
    end
  end

endmodule
