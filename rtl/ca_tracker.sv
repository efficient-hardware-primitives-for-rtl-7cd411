// ca_tracker: the tagSet and the accessRevokedBit of one hardware thread.
//
// The tagSet is approximated, as proposed for Conditional Access, by one tag
// bit per line of the L1 data cache (NUM_LINES bits, indexed by {set, way}).
// The accessRevokedBit is one extra bit per hardware thread.
//
//   set_tag     a successful cread tagged line set_idx
//   untag_one   untagOne: clear the tag bit of line untag_idx (no effect if
//               the bit is already clear)
//   untag_all   untagAll: clear every tag bit and the revoked bit
//   leave       line leave_idx leaves the cache, by a remote invalidation or
//               by an associativity eviction.  If it was tagged, its tag bit is
//               cleared and the revoked bit is set, in the same cycle.
//   revoke      sets the revoked bit unconditionally (context switch or
//               interrupt, which the proposal allows to revoke access)
//
// All updates take effect at the next rising clock edge; the outputs are the
// registered state.  untag_all has priority over every other input in the same
// cycle.  Reset clears all bits (the revoked bit is "initially clear").
// Only one hardware thread per core is modelled, which is the evaluated
// configuration (one thread per simulated core); an SMT core would instantiate
// one tracker per hardware thread.
//
// Lint note: Verilator reports rst_n as both synchronous and asynchronous
// (SYNCASYNCNET) only because the assertion below uses it in disable iff; in
// the circuit rst_n is purely an asynchronous reset.
module ca_tracker #(
  parameter int unsigned NUM_LINES = 512,
  localparam int unsigned IDX_W    = $clog2(NUM_LINES)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 set_tag,
  input  logic [IDX_W-1:0]     set_idx,
  input  logic                 untag_one,
  input  logic [IDX_W-1:0]     untag_idx,
  input  logic                 untag_all,
  input  logic                 leave,
  input  logic [IDX_W-1:0]     leave_idx,
  input  logic                 revoke,
  output logic [NUM_LINES-1:0] tags,
  output logic                 revoked
);

  logic [NUM_LINES-1:0] tags_d;
  logic                 revoked_d;

  always_comb begin
    tags_d    = tags;
    revoked_d = revoked;
    if (untag_all) begin
      tags_d    = '0;
      revoked_d = 1'b0;
    end else begin
      if (leave) begin
        if (tags[leave_idx]) revoked_d = 1'b1;
        tags_d[leave_idx] = 1'b0;
      end
      if (untag_one) tags_d[untag_idx] = 1'b0;
      if (set_tag)   tags_d[set_idx]   = 1'b1;
      if (revoke)    revoked_d         = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tags    <= '0;
      revoked <= 1'b0;
    end else begin
      tags    <= tags_d;
      revoked <= revoked_d;
    end
  end

  // A line cannot be tagged in the same cycle it leaves the cache.
  a_no_tag_on_leave: assert property (@(posedge clk) disable iff (!rst_n)
    !(set_tag && leave && set_idx == leave_idx));

endmodule
