// tb_core_agent: testbench model of one core running a Conditional Access
// workload against its L1: N_INC atomic increments of a shared counter, each
// done as  cread(head); cread(counter); untagOne(head); cread(counter) again;
// cwrite(counter, v+1); untagAll, retried from the start after any CAFAIL (the pattern of a
// CA-based lock-free stack push).  Between the cread and the cwrite it
// sometimes stores to four fresh private lines that map to the counter's cache
// set, which evicts the tagged counter line: the revoked bit must then be set
// and the cwrite must fail.  It also
// reloads the counter now and then (it must never go backwards) and checks
// its private lines.  Requests are driven 1 time unit after the falling edge.
module tb_core_agent
  import ca_pkg::*;
#(
  parameter int    ID    = 0,
  parameter int    N_INC = 4,
  parameter addr_t CNT   = 32'h0010_0000,
  parameter addr_t HEAD  = 32'h0010_0040,
  parameter addr_t STRIDE = 32'h2000
) (
  input  logic       clk,
  input  logic       rst_n,
  output logic       req_valid,
  input  logic       req_ready,
  output core_req_t  req,
  input  logic       resp_valid,
  input  core_resp_t resp,
  input  logic       revoked,
  input  logic       all_done,
  input  int         expect_total,
  output logic       done,
  output int         checks,
  output int         failures,
  output int         n_cread_ok,
  output int         n_cread_fail,
  output int         n_cwrite_ok,
  output int         n_cwrite_fail,
  output int         n_untag_one,
  output int         n_evict_revoke
);

  word_t priv [4];
  bit    have_priv = 0;

  task automatic op(input ca_op_e o, input addr_t a, input word_t wd, output core_resp_t rsp);
    @(negedge clk); #1;
    req_valid = 1'b1; req.op = o; req.addr = a; req.wdata = wd;
    while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk); #1;
    req_valid = 1'b0;
    while (!resp_valid) begin @(negedge clk); #1; end
    rsp = resp;
  endtask

  int round = 0;
  // four lines of the counter's set that no other core touches; a fresh group
  // for every eviction round, so four misses displace the whole set
  function automatic addr_t priv_addr(int j);
    return CNT + addr_t'(1 + (ID * 64 + round % 64) * 4 + j) * STRIDE;
  endfunction

  initial begin
    core_resp_t r;
    word_t v, last_seen;
    bit ok;
    req_valid = 0; req = '0; done = 0;
    checks = 0; failures = 0; n_cread_ok = 0; n_cread_fail = 0;
    n_cwrite_ok = 0; n_cwrite_fail = 0; n_untag_one = 0; n_evict_revoke = 0;
    last_seen = '0;
    wait (rst_n);
    repeat (ID % 7) @(negedge clk);
    for (int k = 0; k < N_INC; k++) begin
      ok = 0;
      while (!ok) begin
        op(OP_CREAD, HEAD, 0, r);
        if (r.ca_fail) begin n_cread_fail++; op(OP_UNTAG_ALL, 0, 0, r); continue; end
        n_cread_ok++;
        op(OP_CREAD, CNT, 0, r);
        if (r.ca_fail) begin n_cread_fail++; op(OP_UNTAG_ALL, 0, 0, r); continue; end
        n_cread_ok++;
        v = r.rdata;
        op(OP_UNTAG_ONE, HEAD, 0, r);
        n_untag_one++;
        if ($urandom_range(0, 7) == 0) begin
          round++;
          for (int j = 0; j < 4; j++) begin
            priv[j] = {16'(ID), 16'(k), 32'($urandom)};
            op(OP_STORE, priv_addr(j), priv[j], r);
          end
          have_priv = 1;
          checks++;
          if (!revoked) begin
            failures++;
            $display("FAIL core %0d: eviction of tagged counter did not revoke", ID);
          end else n_evict_revoke++;
        end
        repeat ($urandom_range(0, 3)) @(negedge clk);
        // re-read the counter, as a pop re-reads top->next: fails once revoked,
        // and if it succeeds the value cannot have changed since it was tagged
        op(OP_CREAD, CNT, 0, r);
        if (r.ca_fail) begin n_cread_fail++; op(OP_UNTAG_ALL, 0, 0, r); continue; end
        n_cread_ok++;
        checks++;
        if (r.rdata !== v) begin
          failures++;
          $display("FAIL core %0d: tagged counter changed %0d -> %0d without revoke", ID, v, r.rdata);
        end
        op(OP_CWRITE, CNT, v + 1, r);
        if (r.ca_fail) begin n_cwrite_fail++; op(OP_UNTAG_ALL, 0, 0, r); continue; end
        n_cwrite_ok++;
        op(OP_UNTAG_ALL, 0, 0, r);
        ok = 1;
      end
      if ($urandom_range(0, 3) == 0) begin
        op(OP_LOAD, CNT, 0, r);
        checks++;
        if (r.rdata < last_seen || r.rdata < v + 1) begin
          failures++;
          $display("FAIL core %0d: counter went backwards %0d < %0d", ID, r.rdata, last_seen);
        end
        last_seen = r.rdata;
      end
      if (have_priv && $urandom_range(0, 3) == 0) begin
        for (int j = 0; j < 4; j++) begin
          op(OP_LOAD, priv_addr(j), 0, r);
          checks++;
          if (r.rdata !== priv[j]) begin
            failures++;
            $display("FAIL core %0d: private word %0d = %h, expected %h", ID, j, r.rdata, priv[j]);
          end
        end
      end
    end
    done = 1;
    if (ID == 0) begin
      wait (all_done);
      op(OP_LOAD, CNT, 0, r);
      checks++;
      if (r.rdata !== word_t'(expect_total)) begin
        failures++;
        $display("FAIL final counter %0d, expected %0d", r.rdata, expect_total);
      end
    end
  end

endmodule
