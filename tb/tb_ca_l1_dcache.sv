// tb_ca_l1_dcache: directed self-checking test of one CA L1 data cache.
// The testbench plays the directory: a responder process answers GETS/GETM
// with lines from a memory model and PUTM with an ack (optionally holding the
// answer back), and tasks inject INV / FWD_GETS forwards.  Expected data are
// computed from the memory model (each line starts as a pattern of its
// address).  Covered: load/cread/cwrite/untagOne/untagAll semantics, revoke on
// a remote INV of a tagged line, no revoke for an untagged line or a downgrade,
// revoke on an associativity eviction, writeback of a Modified victim, an INV
// that races with a cwrite upgrade, the context-switch revoke input, and the
// one-cycle hit latency.
module tb_ca_l1_dcache;
  import ca_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       core_req_valid, core_req_ready, core_resp_valid;
  core_req_t  core_req;
  core_resp_t core_resp;
  logic       revoke, revoked;
  logic       mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t   mem_req;
  mem_resp_t  mem_resp;
  logic       fwd_valid, fwd_ready, fwd_ack_valid, fwd_ack_ready;
  fwd_t       fwd;
  fwd_ack_t   fwd_ack;

  ca_l1_dcache dut (.*);

  int checks = 0, failures = 0;
  int n_gets = 0, n_getm = 0, n_putm = 0;
  line_t mem [laddr_t];
  mem_req_t last_putm;
  bit hold = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic line_t pattern(laddr_t la);
    line_t l;
    for (int w = 0; w < WORDS_PER_LINE; w++)
      l[w*WORD_W +: WORD_W] = {32'hC0DE_0000 | 32'(w), 32'(la)};
    return l;
  endfunction
  function automatic line_t mem_line(laddr_t la);
    return mem.exists(la) ? mem[la] : pattern(la);
  endfunction
  function automatic word_t mem_word(addr_t a);
    line_t l;
    l = mem_line(a[ADDR_W-1:OFFSET_W]);
    return l[a[OFFSET_W-1:3]*WORD_W +: WORD_W];
  endfunction

  task automatic expect_eq(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // ---- directory responder
  initial begin
    mem_req_t r;
    mem_req_ready = 0; mem_resp_valid = 0; mem_resp = '0;
    forever begin
      @(posedge clk);
      #1;
      mem_resp_valid = 0;
      if (mem_req_valid) begin
        r = mem_req;
        mem_req_ready = 1;
        @(posedge clk); #1;
        mem_req_ready = 0;
        repeat (3) @(posedge clk);
        while (hold) @(posedge clk);
        #1;
        mem_resp = '0;
        mem_resp.laddr = r.laddr;
        case (r.kind)
          REQ_GETS: begin n_gets++; mem_resp.data = mem_line(r.laddr); end
          REQ_GETM: begin n_getm++; mem_resp.data = mem_line(r.laddr); end
          default: begin n_putm++; mem[r.laddr] = r.data; last_putm = r; mem_resp.is_put_ack = 1; end
        endcase
        mem_resp_valid = 1;
      end
    end
  end

  // ---- core operation; returns response and latency in cycles
  task automatic op(input ca_op_e o, input addr_t a, input word_t wd,
                    output core_resp_t rsp, output int lat);
    @(posedge clk); #1;
    core_req_valid = 1; core_req.op = o; core_req.addr = a; core_req.wdata = wd;
    do @(posedge clk); while (!core_req_ready);
    #1; core_req_valid = 0;
    lat = 1;
    while (!core_resp_valid) begin @(posedge clk); #1; lat++; end
    rsp = core_resp;
  endtask

  task automatic send_fwd(input fwd_e k, input laddr_t la, output fwd_ack_t ack);
    @(posedge clk); #1;
    fwd_valid = 1; fwd.kind = k; fwd.laddr = la;
    do @(posedge clk); while (!fwd_ready);
    #1; fwd_valid = 0;
    while (!fwd_ack_valid) begin @(posedge clk); #1; end
    ack = fwd_ack;
    fwd_ack_ready = 1;
    @(posedge clk); #1;
    fwd_ack_ready = 0;
  endtask

  localparam addr_t STRIDE = 32'h2000; // lines 8 KiB apart share a set (128 sets)

  initial begin
    core_resp_t r; fwd_ack_t ack; int lat; int g0;
    addr_t A = 32'h0001_0008, B = 32'h0002_0010, C = 32'h0004_0000,
           D = 32'h0006_0018, E = 32'h0008_0020, F = 32'h000A_0028;
    core_req_valid = 0; core_req = '0; revoke = 0;
    fwd_valid = 0; fwd = '0; fwd_ack_ready = 0;
    #22 rst_n = 1;

    // 1. load miss then hit; hit latency one cycle
    op(OP_LOAD, A, 0, r, lat);  expect_eq("load A miss", r.rdata, mem_word(A));
    op(OP_LOAD, A, 0, r, lat);  expect_eq("load A hit", r.rdata, mem_word(A));
    expect_eq("hit latency", 64'(lat), 1);
    // 2. cread hit tags, succeeds
    op(OP_CREAD, A, 0, r, lat); expect_eq("cread A ok", r.ca_fail, 0);
    expect_eq("cread A data", r.rdata, mem_word(A));
    // 3. cwrite on tagged S line upgrades and stores
    g0 = n_getm;
    op(OP_CWRITE, A, 64'h1111, r, lat); expect_eq("cwrite A ok", r.ca_fail, 0);
    expect_eq("cwrite A used GETM", 64'(n_getm - g0), 1);
    op(OP_LOAD, A, 0, r, lat);  expect_eq("load A new", r.rdata, 64'h1111);
    // cwrite on tagged M line: hit
    op(OP_CWRITE, A, 64'h2222, r, lat); expect_eq("cwrite A M ok", r.ca_fail, 0);
    expect_eq("cwrite M latency", 64'(lat), 1);
    // 4. remote INV of tagged A: ack carries data, revoked set
    send_fwd(FWD_INV, A[31:6], ack);
    expect_eq("inv A has data", ack.has_data, 1);
    expect_eq("inv A data", ack.data[1*64 +: 64], 64'h2222);
    mem[A[31:6]] = ack.data;
    expect_eq("revoked after inv", revoked, 1);
    // 5. cread fails without memory traffic
    g0 = n_gets;
    op(OP_CREAD, B, 0, r, lat); expect_eq("cread B fails", r.ca_fail, 1);
    expect_eq("no fetch on failed cread", 64'(n_gets - g0), 0);
    // 6. untagAll clears revoked
    op(OP_UNTAG_ALL, 0, 0, r, lat); expect_eq("untagAll", revoked, 0);
    // 7. cwrite untagged fails and does not write
    op(OP_LOAD, B, 0, r, lat);
    op(OP_CWRITE, B, 64'h3333, r, lat); expect_eq("cwrite untagged fails", r.ca_fail, 1);
    op(OP_LOAD, B, 0, r, lat); expect_eq("B unchanged", r.rdata, mem_word(B));
    // 8. untagOne: INV no longer revokes
    op(OP_CREAD, B, 0, r, lat); expect_eq("cread B ok", r.ca_fail, 0);
    op(OP_UNTAG_ONE, B, 0, r, lat);
    send_fwd(FWD_INV, B[31:6], ack);
    expect_eq("inv untagged B no data", ack.has_data, 0);
    expect_eq("no revoke after untagOne", revoked, 0);
    // INV of a line not held: plain ack
    send_fwd(FWD_INV, 26'h3ff_0000, ack);
    expect_eq("inv absent", ack.has_data, 0);
    expect_eq("no revoke absent", revoked, 0);
    // 9. associativity eviction of tagged C revokes
    op(OP_CREAD, C, 0, r, lat); expect_eq("cread C ok", r.ca_fail, 0);
    for (int i = 1; i <= 4; i++) op(OP_LOAD, C + addr_t'(i) * STRIDE, 0, r, lat);
    expect_eq("revoked after eviction", revoked, 1);
    op(OP_CWRITE, C, 1, r, lat); expect_eq("cwrite after eviction fails", r.ca_fail, 1);
    op(OP_UNTAG_ALL, 0, 0, r, lat);
    // 10. writeback of Modified victim
    op(OP_STORE, D, 64'h4444, r, lat);
    g0 = n_putm;
    for (int i = 1; i <= 4; i++) op(OP_LOAD, D + addr_t'(i) * STRIDE, 0, r, lat);
    expect_eq("putm sent", 64'(n_putm - g0), 1);
    expect_eq("putm data", last_putm.data[3*64 +: 64], 64'h4444);
    expect_eq("no revoke untagged evict", revoked, 0);
    op(OP_LOAD, D, 0, r, lat); expect_eq("D reloaded", r.rdata, 64'h4444);
    // 11. INV races with cwrite upgrade -> cwrite fails, value not written
    op(OP_CREAD, E, 0, r, lat); expect_eq("cread E ok", r.ca_fail, 0);
    hold = 1;
    fork
      op(OP_CWRITE, E, 64'h5555, r, lat);
      begin
        while (!(mem_req_valid && mem_req.kind == REQ_GETM)) @(posedge clk);
        send_fwd(FWD_INV, E[31:6], ack);
        hold = 0;
      end
    join
    expect_eq("cwrite raced fails", r.ca_fail, 1);
    expect_eq("raced revoked", revoked, 1);
    op(OP_UNTAG_ALL, 0, 0, r, lat);
    op(OP_LOAD, E, 0, r, lat); expect_eq("E not written", r.rdata, mem_word(E));
    // 12. FWD_GETS downgrade of tagged M line keeps tag, no revoke
    op(OP_STORE, F, 64'h6666, r, lat);
    op(OP_CREAD, F, 0, r, lat); expect_eq("cread F ok", r.rdata, 64'h6666);
    send_fwd(FWD_GETS, F[31:6], ack);
    expect_eq("fwd_gets data", ack.data[5*64 +: 64], 64'h6666);
    mem[F[31:6]] = ack.data;
    expect_eq("no revoke on downgrade", revoked, 0);
    g0 = n_getm;
    op(OP_CWRITE, F, 64'h7777, r, lat); expect_eq("cwrite F after downgrade ok", r.ca_fail, 0);
    expect_eq("cwrite F upgraded", 64'(n_getm - g0), 1);
    // 13. context-switch revoke
    @(posedge clk); #1 revoke = 1; @(posedge clk); #1 revoke = 0;
    op(OP_CREAD, F, 0, r, lat); expect_eq("cread after revoke fails", r.ca_fail, 1);
    op(OP_UNTAG_ALL, 0, 0, r, lat);
    op(OP_CREAD, F, 0, r, lat); expect_eq("cread after untagAll", r.rdata, 64'h7777);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
