// tb_rcp_prio_alloc: self-checking test of the priority allocator.
// Fills every slot, checks that an older request preempts the youngest
// occupant, that a younger request stalls, that release frees a slot (also in
// the same cycle as an allocation) and that ages wrap around the ROB size.
module tb_rcp_prio_alloc;
  localparam int unsigned N = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [7:0] rob_head = '0, alloc_tag = '0, preempt_tag, release_tag = '0;
  logic alloc_valid = 0, alloc_grant, preempt_valid, release_valid = 0;
  logic [$clog2(N)-1:0] alloc_slot;
  logic [N-1:0] busy;
  rcp_prio_alloc #(.ENTRIES(N), .ROB_SIZE(192), .TAG_W(8)) dut (.*);

  initial begin #1_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    rob_head = 8'd180;                    // tags 180..191, 0.. wrap
    for (int i = 0; i < N; i++) begin
      alloc_valid = 1; alloc_tag = 8'((182 + 2 * i) % 192);
      #1 check(alloc_grant && !preempt_valid && alloc_slot == i[$clog2(N)-1:0], "free slot granted");
      @(negedge clk);
    end
    check(busy == '1, "all slots busy");
    // youngest occupant is tag (182 + 14) % 192 = 4
    alloc_tag = 8'd181;
    #1 check(alloc_grant && preempt_valid && preempt_tag == 8'd4, "older request preempts youngest (wrapped)");
    @(negedge clk);
    alloc_tag = 8'd10;                    // younger than all occupants
    #1 check(!alloc_grant && !preempt_valid, "younger request stalls");
    // release in the same cycle lets it in
    release_valid = 1; release_tag = 8'd184;
    #1 check(alloc_grant && !preempt_valid && alloc_slot == 1, "released slot reused in the same cycle");
    @(negedge clk);
    release_valid = 0; alloc_valid = 0;
    #1 check(busy == '1, "still full");
    for (int i = 0; i < 192; i += 7) begin
      release_valid = 1; release_tag = 8'(i);
      @(negedge clk);
    end
    release_valid = 0;
    // random: a grant never happens when full unless it preempts a younger one
    for (int it = 0; it < 300; it++) begin
      alloc_valid = 1; alloc_tag = 8'($urandom_range(191)); rob_head = 8'($urandom_range(191));
      release_valid = $urandom_range(1); release_tag = 8'($urandom_range(191));
      #1;
      if (preempt_valid) check(alloc_grant, "preemption grants");
      if (alloc_grant && !preempt_valid) check(!(&busy) || release_valid, "grant needs a free slot");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
