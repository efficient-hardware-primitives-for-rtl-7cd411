// tb_ca_system: end-to-end test of the whole design at its default size
// (32 cores, 32 KiB 4-way L1 each).  Every core runs tb_core_agent: atomic
// increments of one shared counter built from cread/cwrite, retried on CAFAIL,
// with occasional evictions of the tagged counter line and reloads.  The
// caches are joined by a behavioural MSI directory.  Checks: the final counter
// equals its start value plus the number of increments (no update is lost, so
// a cwrite never succeeded after a conflicting write), the counter never goes
// backwards, private data survive writebacks, and every mechanism happened at
// least once: successful and failed cread and cwrite, untagOne, revoke by a
// remote invalidation, revoke by an associativity eviction, upgrades, M->S
// downgrades and writebacks.
module tb_ca_system;
  import ca_pkg::*;

  localparam int    N     = 32;
  localparam int    N_INC = 4;
  localparam addr_t CNT   = 32'h0010_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       core_req_valid  [N];
  logic       core_req_ready  [N];
  core_req_t  core_req        [N];
  logic       core_resp_valid [N];
  core_resp_t core_resp       [N];
  logic       revoke          [N];
  logic       revoked         [N];
  logic       mem_req_valid   [N];
  logic       mem_req_ready   [N];
  mem_req_t   mem_req         [N];
  logic       mem_resp_valid  [N];
  mem_resp_t  mem_resp        [N];
  logic       fwd_valid       [N];
  logic       fwd_ready       [N];
  fwd_t       fwd             [N];
  logic       fwd_ack_valid   [N];
  logic       fwd_ack_ready   [N];
  fwd_ack_t   fwd_ack         [N];

  ca_system dut (.*);

  int n_gets, n_getm, n_putm, n_inv, n_fwd_gets;
  msi_directory_model #(.N(N)) u_dir (
    .clk, .rst_n, .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid,
    .mem_resp, .fwd_valid, .fwd_ready, .fwd, .fwd_ack_valid, .fwd_ack_ready,
    .fwd_ack, .n_gets, .n_getm, .n_putm, .n_inv, .n_fwd_gets);

  logic done [N];
  int a_checks [N], a_fail [N], a_crok [N], a_crf [N], a_cwok [N], a_cwf [N],
      a_un1 [N], a_ev [N];
  logic all_done;
  int   expect_total;
  assign expect_total = int'(CNT) + N * N_INC;

  for (genvar g = 0; g < N; g++) begin : g_agent
    assign revoke[g] = 1'b0;
    tb_core_agent #(.ID(g), .N_INC(N_INC), .CNT(CNT)) u_agent (
      .clk, .rst_n,
      .req_valid(core_req_valid[g]), .req_ready(core_req_ready[g]), .req(core_req[g]),
      .resp_valid(core_resp_valid[g]), .resp(core_resp[g]), .revoked(revoked[g]),
      .all_done, .expect_total, .done(done[g]),
      .checks(a_checks[g]), .failures(a_fail[g]),
      .n_cread_ok(a_crok[g]), .n_cread_fail(a_crf[g]),
      .n_cwrite_ok(a_cwok[g]), .n_cwrite_fail(a_cwf[g]),
      .n_untag_one(a_un1[g]), .n_evict_revoke(a_ev[g]));
  end

  always_comb begin
    all_done = 1'b1;
    for (int j = 0; j < N; j++) if (!done[j]) all_done = 1'b0;
  end

  // revoked bit rising while the core is not evicting counts remote revokes
  int n_rev_rise = 0;
  logic rev_q [N];
  always @(posedge clk) begin
    for (int j = 0; j < N; j++) begin
      if (rst_n && revoked[j] && !rev_q[j]) n_rev_rise++;
      rev_q[j] <= rst_n ? revoked[j] : 1'b0;
    end
  end

  int checks = 0, failures = 0;
  task automatic need(string what, int count);
    checks++;
    $display("  %-28s %0d", what, count);
    if (count == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int crok, crf, cwok, cwf, un1, ev;
    #22 rst_n = 1;
    wait (all_done);
    repeat (200) @(posedge clk);
    crok = 0; crf = 0; cwok = 0; cwf = 0; un1 = 0; ev = 0;
    for (int j = 0; j < N; j++) begin
      checks += a_checks[j]; failures += a_fail[j];
      crok += a_crok[j]; crf += a_crf[j]; cwok += a_cwok[j]; cwf += a_cwf[j];
      un1 += a_un1[j]; ev += a_ev[j];
    end
    checks++;
    if (cwok != N * N_INC) begin failures++; $display("FAIL successful cwrites %0d", cwok); end
    $display("mechanism counts at %0t:", $time);
    need("cread succeeded", crok);
    need("cread failed", crf);
    need("cwrite succeeded", cwok);
    need("cwrite failed", cwf);
    need("untagOne", un1);
    need("revoked by eviction", ev);
    need("revoked bit set", n_rev_rise);
    need("revoked by remote INV", n_rev_rise > ev ? n_rev_rise - ev : 0);
    need("GETS", n_gets);
    need("GETM", n_getm);
    need("INV sent", n_inv);
    need("FWD_GETS downgrade", n_fwd_gets);
    need("PUTM writeback", n_putm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
