// tb_ca_tracker: self-checking test of the tag-bit / revoked-bit tracker.
// Drives random mixes of set_tag, untag_one, untag_all, leave and revoke and
// compares every tag bit and the revoked bit with a reference model kept in
// the testbench.  Also runs directed cases: a tagged line leaving sets the
// revoked bit, an untagged line leaving does not, untagOne of a line stops
// a later departure from revoking, untagAll clears everything.
module tb_ca_tracker;
  localparam int unsigned N = 512;
  localparam int unsigned W = $clog2(N);

  logic clk = 0, rst_n = 0;
  logic set_tag, untag_one, untag_all, leave, revoke;
  logic [W-1:0] set_idx, untag_idx, leave_idx;
  logic [N-1:0] tags;
  logic revoked;

  int checks = 0, failures = 0;
  bit [N-1:0] m_tags;
  bit m_rev;

  ca_tracker #(.NUM_LINES(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what);
    checks++;
    if (tags !== m_tags || revoked !== m_rev) begin
      failures++;
      $display("FAIL %s: rev=%0b exp=%0b tags_ok=%0b", what, revoked, m_rev, tags == m_tags);
    end
  endtask

  task automatic idle();
    set_tag = 0; untag_one = 0; untag_all = 0; leave = 0; revoke = 0;
    set_idx = '0; untag_idx = '0; leave_idx = '0;
  endtask

  // apply the inputs currently on the ports for one clock and update the model
  task automatic step(string what);
    bit [N-1:0] t; bit r;
    t = m_tags; r = m_rev;
    if (untag_all) begin t = '0; r = 0; end
    else begin
      if (leave) begin if (m_tags[leave_idx]) r = 1; t[leave_idx] = 0; end
      if (untag_one) t[untag_idx] = 0;
      if (set_tag) t[set_idx] = 1;
      if (revoke) r = 1;
    end
    @(posedge clk); #1;
    m_tags = t; m_rev = r;
    check(what);
    idle();
  endtask

  initial begin
    idle();
    m_tags = '0; m_rev = 0;
    #12 rst_n = 1;
    @(posedge clk); #1;
    check("reset");

    // directed: tag 3 and 7, untag 3, line 3 leaves -> no revoke
    set_tag = 1; set_idx = 3; step("tag3");
    set_tag = 1; set_idx = 7; step("tag7");
    untag_one = 1; untag_idx = 3; step("untag3");
    leave = 1; leave_idx = 3; step("leave3 untagged");
    if (revoked) begin failures++; $display("FAIL untagged leave revoked"); end
    checks++;
    leave = 1; leave_idx = 7; step("leave7 tagged");
    checks++;
    if (!revoked || tags[7]) begin failures++; $display("FAIL tagged leave"); end
    untag_all = 1; step("untag_all");
    checks++;
    if (revoked || tags != '0) begin failures++; $display("FAIL untag_all"); end
    revoke = 1; step("revoke");
    untag_all = 1; set_tag = 1; set_idx = 9; step("untag_all wins");

    // random
    for (int i = 0; i < 20000; i++) begin
      int unsigned r = $urandom_range(0, 99);
      set_tag   = (r < 40);
      set_idx   = W'($urandom_range(0, N-1));
      untag_one = ($urandom_range(0, 9) < 2);
      untag_idx = ($urandom_range(0,1) != 0) ? set_idx : W'($urandom_range(0, N-1));
      leave     = ($urandom_range(0, 9) < 3);
      leave_idx = W'($urandom_range(0, N-1));
      if (set_tag && leave && leave_idx == set_idx) leave_idx = leave_idx + 1'b1;
      untag_all = ($urandom_range(0, 99) < 3);
      revoke    = ($urandom_range(0, 999) < 5);
      step("random");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
