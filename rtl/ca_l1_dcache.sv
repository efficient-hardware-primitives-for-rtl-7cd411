// ca_l1_dcache: private MSI L1 data cache of one core, extended with
// Conditional Access (CA).
//
// What it does.  Besides ordinary loads and stores, the cache executes the four
// CA instructions with the semantics of the proposal:
//   cread     if the core's accessRevokedBit is set, fail (CAFAIL) without
//             touching memory; otherwise load the word and tag its line.
//   cwrite    fail if the revoked bit is set or the line is not tagged;
//             otherwise store the word.  cwrite never tags.
//   untagOne  clear the tag bit of the addressed line, no memory access.
//   untagAll  clear all tag bits and the revoked bit.
// The tag bits and the revoked bit live in ca_tracker (one tag bit per line).
// Whenever a line leaves the cache - a remote INV from the directory, or an
// associativity eviction to make room for a fill - the tracker sets the revoked
// bit if that line was tagged, in the same cycle the line is invalidated (and
// so atomically with the acknowledgement or with the fill request).  A
// downgrade (FWD_GETS, M->S) keeps the line and does not revoke.  The
// coherence protocol itself is plain MSI and is not changed by CA.
//
// How it works.  A blocking controller with one outstanding miss:
//   IDLE -> (hit)  response in the next cycle
//   IDLE -> (miss, Modified victim) WB -> WB_WAIT -> MISS_REQ -> MISS_WAIT -> IDLE
//   IDLE -> (miss or upgrade)                        MISS_REQ -> MISS_WAIT -> IDLE
// A store or cwrite to a Shared line sends GETM and keeps the Shared copy (and
// its tag) until the data returns.  The success of cread/cwrite is decided
// again when the fill returns, so an INV that arrived while waiting makes the
// instruction fail (the line is installed, but not tagged / not written).  A
// cread whose own fill had to evict a tagged line therefore fails too.
// Coherence forwards are accepted in every state (in IDLE ahead of a new core
// request), except in the cycle a directory response arrives; a forward for a
// line that sits in the writeback buffer is answered from that buffer.
//
// Interface.  core_req/core_resp: valid/ready request, one response pulse per
// request (core_resp_valid), in order.  mem_req (valid/ready) carries GETS,
// GETM and PUTM to the directory; mem_resp is always accepted.  fwd
// (valid/ready) brings INV and FWD_GETS; fwd_ack (valid/ready) answers each.
// revoke forces the revoked bit (context switch); revoked shows it, as a
// flag-register bit would.
//
// Own choices (the proposal gives the behaviour, not the circuit): 4 ways,
// invalid-way-first then round-robin replacement, a blocking controller, a
// one-cycle hit latency, and an untagged install of the line when a cread fails
// after its fill.
//
// Lint notes: rst_n is reported as both synchronous and asynchronous
// (SYNCASYNCNET) only because the handshake assertions use it in disable iff;
// the circuit uses it purely as an asynchronous reset.  The line address of
// mem_resp is not used (the blocking controller has one miss outstanding, so
// the response is known to be for it); the unused-bit reports for the helper
// functions' arguments are address fields those helpers do not need.
module ca_l1_dcache
  import ca_pkg::*;
#(
  parameter int unsigned CACHE_BYTES = 32768,
  parameter int unsigned WAYS        = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  // core side
  input  logic       core_req_valid,
  output logic       core_req_ready,
  input  core_req_t  core_req,
  output logic       core_resp_valid,
  output core_resp_t core_resp,
  input  logic       revoke,
  output logic       revoked,
  // directory side
  output logic       mem_req_valid,
  input  logic       mem_req_ready,
  output mem_req_t   mem_req,
  input  logic       mem_resp_valid,
  input  mem_resp_t  mem_resp,
  input  logic       fwd_valid,
  output logic       fwd_ready,
  input  fwd_t       fwd,
  output logic       fwd_ack_valid,
  input  logic       fwd_ack_ready,
  output fwd_ack_t   fwd_ack
);

  localparam int unsigned NUM_LINES = CACHE_BYTES / LINE_BYTES;
  localparam int unsigned SETS      = NUM_LINES / WAYS;
  localparam int unsigned SET_W     = $clog2(SETS);
  localparam int unsigned WAY_W     = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned IDX_W     = $clog2(NUM_LINES);
  localparam int unsigned ATAG_W    = LADDR_W - SET_W;

  typedef logic [IDX_W-1:0]  idx_t;
  typedef logic [ATAG_W-1:0] atag_t;
  typedef logic [SET_W-1:0]  set_t;
  typedef logic [WAY_W-1:0]  way_t;

  typedef enum logic [2:0] {
    ST_IDLE, ST_WB, ST_WB_WAIT, ST_MISS_REQ, ST_MISS_WAIT
  } state_e;

  // ---------------------------------------------------------------- storage
  line_t  data_q  [NUM_LINES];
  atag_t  atag_q  [NUM_LINES];
  msi_e   msi_q   [NUM_LINES];
  way_t   rr_q    [SETS];

  state_e     state_q;
  core_req_t  req_q;          // request being served by a miss
  idx_t       miss_idx_q;     // line slot the fill goes to
  laddr_t     wb_laddr_q;
  line_t      wb_data_q;
  logic       wb_valid_q;
  logic       ack_pending_q;
  fwd_ack_t   ack_q;
  logic       resp_valid_q;
  core_resp_t resp_q;

  // tracker controls
  logic tr_set, tr_untag_one, tr_untag_all, tr_leave;
  idx_t tr_set_idx, tr_untag_idx, tr_leave_idx;
  logic [NUM_LINES-1:0] tags;

  ca_tracker #(.NUM_LINES(NUM_LINES)) u_tracker (
    .clk, .rst_n,
    .set_tag(tr_set), .set_idx(tr_set_idx),
    .untag_one(tr_untag_one), .untag_idx(tr_untag_idx),
    .untag_all(tr_untag_all),
    .leave(tr_leave), .leave_idx(tr_leave_idx),
    .revoke, .tags, .revoked
  );

  function automatic set_t set_of(laddr_t la);
    return la[SET_W-1:0];
  endfunction
  function automatic atag_t atag_of(laddr_t la);
    return la[LADDR_W-1:SET_W];
  endfunction
  function automatic idx_t idx_of(set_t s, way_t w);
    return idx_t'(s) * idx_t'(WAYS) + idx_t'(w);
  endfunction
  function automatic word_t word_of(line_t l, addr_t a);
    return l[a[OFFSET_W-1:OFFSET_W-WORD_SEL_W]*WORD_W +: WORD_W];
  endfunction
  function automatic line_t merge(line_t l, addr_t a, word_t w);
    line_t r;
    r = l;
    r[a[OFFSET_W-1:OFFSET_W-WORD_SEL_W]*WORD_W +: WORD_W] = w;
    return r;
  endfunction

  // ------------------------------------------------------- core-side lookup
  laddr_t req_laddr;
  set_t   req_set;
  logic   req_hit;
  way_t   req_way;
  idx_t   req_idx;
  logic   vic_found_invalid;
  way_t   vic_way;
  idx_t   vic_idx;

  assign req_laddr = core_req.addr[ADDR_W-1:OFFSET_W];
  assign req_set   = set_of(req_laddr);

  always_comb begin
    req_hit = 1'b0;
    req_way = '0;
    vic_found_invalid = 1'b0;
    vic_way = rr_q[req_set];
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (msi_q[idx_of(req_set, way_t'(w))] != MSI_I &&
          atag_q[idx_of(req_set, way_t'(w))] == atag_of(req_laddr)) begin
        req_hit = 1'b1;
        req_way = way_t'(w);
      end
      if (msi_q[idx_of(req_set, way_t'(w))] == MSI_I) begin
        vic_found_invalid = 1'b1;
        vic_way = way_t'(w);
      end
    end
    req_idx = idx_of(req_set, req_way);
    vic_idx = idx_of(req_set, vic_way);
  end

  // ------------------------------------------------------- fwd-side lookup
  logic fwd_hit;
  idx_t fwd_idx;
  logic fwd_wb_hit;

  always_comb begin
    fwd_hit = 1'b0;
    fwd_idx = idx_of(set_of(fwd.laddr), '0);
    for (int w = 0; w < WAYS; w++) begin
      if (msi_q[idx_of(set_of(fwd.laddr), way_t'(w))] != MSI_I &&
          atag_q[idx_of(set_of(fwd.laddr), way_t'(w))] == atag_of(fwd.laddr)) begin
        fwd_hit = 1'b1;
        fwd_idx = idx_of(set_of(fwd.laddr), way_t'(w));
      end
    end
    fwd_wb_hit = wb_valid_q && (wb_laddr_q == fwd.laddr);
  end

  // A forward is taken in any state when no ack is pending, except in the
  // cycle a directory response arrives.  Taking forwards while a request waits
  // to be accepted keeps a serialising directory from deadlocking.
  assign fwd_ready = !ack_pending_q && !mem_resp_valid;
  logic fwd_take;
  assign fwd_take = fwd_valid && fwd_ready;

  assign core_req_ready = (state_q == ST_IDLE) && !fwd_valid;
  logic req_take;
  assign req_take = core_req_valid && core_req_ready;

  // ------------------------------------------------------- decode in IDLE
  // Outcome of a request accepted in IDLE.
  logic   need_miss;        // must go to the directory
  logic   is_upgrade;       // line present in S, GETM keeps the slot
  logic   imm_fail;         // cread/cwrite fails at once

  always_comb begin
    need_miss  = 1'b0;
    is_upgrade = 1'b0;
    imm_fail   = 1'b0;
    unique case (core_req.op)
      OP_LOAD:   need_miss = !req_hit;
      OP_STORE: begin
        need_miss  = !(req_hit && msi_q[req_idx] == MSI_M);
        is_upgrade = req_hit;
      end
      OP_CREAD: begin
        imm_fail  = revoked;
        need_miss = !revoked && !req_hit;
      end
      OP_CWRITE: begin
        imm_fail   = revoked || !req_hit || !tags[req_idx];
        need_miss  = !imm_fail && msi_q[req_idx] != MSI_M;
        is_upgrade = 1'b1;
      end
      default: ;
    endcase
  end

  // fill outcome in MISS_WAIT
  logic   fill_now;
  laddr_t miss_laddr;
  assign fill_now   = (state_q == ST_MISS_WAIT) && mem_resp_valid && !mem_resp.is_put_ack;
  assign miss_laddr = req_q.addr[ADDR_W-1:OFFSET_W];

  // ------------------------------------------------------- tracker controls
  always_comb begin
    tr_set       = 1'b0;
    tr_set_idx   = req_idx;
    tr_untag_one = 1'b0;
    tr_untag_idx = req_idx;
    tr_untag_all = 1'b0;
    tr_leave     = 1'b0;
    tr_leave_idx = vic_idx;
    if (fwd_take && fwd_hit && fwd.kind == FWD_INV) begin
      tr_leave     = 1'b1;
      tr_leave_idx = fwd_idx;
    end else if (req_take) begin
      unique case (core_req.op)
        OP_UNTAG_ONE: tr_untag_one = req_hit;
        OP_UNTAG_ALL: tr_untag_all = 1'b1;
        OP_CREAD:     tr_set       = !revoked && req_hit;
        default: ;
      endcase
      if (need_miss && !is_upgrade && msi_q[vic_idx] != MSI_I) tr_leave = 1'b1;
    end
    if (fill_now && req_q.op == OP_CREAD && !revoked) begin
      tr_set     = 1'b1;
      tr_set_idx = miss_idx_q;
    end
  end

  // ------------------------------------------------------- line arrays
  // Data and address-tag arrays have a single write port and no reset (a
  // slot is only read while its MSI state is valid).  A write is a store or
  // cwrite hit in IDLE, or a fill (merged with the store data when a store or
  // a successful cwrite caused it).
  logic  arr_we, atag_we;
  idx_t  arr_widx;
  line_t arr_wdata;

  always_comb begin
    arr_we    = 1'b0;
    atag_we   = 1'b0;
    arr_widx  = req_idx;
    arr_wdata = merge(data_q[req_idx], core_req.addr, core_req.wdata);
    if (state_q == ST_IDLE && req_take && !imm_fail && !need_miss &&
        (core_req.op == OP_STORE || core_req.op == OP_CWRITE))
      arr_we = 1'b1;
    if (fill_now) begin
      arr_we    = 1'b1;
      atag_we   = 1'b1;
      arr_widx  = miss_idx_q;
      arr_wdata = (req_q.op == OP_STORE || (req_q.op == OP_CWRITE && !revoked))
                  ? merge(mem_resp.data, req_q.addr, req_q.wdata) : mem_resp.data;
    end
  end

  always_ff @(posedge clk) begin
    if (arr_we)  data_q[arr_widx] <= arr_wdata;
    if (atag_we) atag_q[arr_widx] <= atag_of(miss_laddr);
  end

  // ------------------------------------------------------- control state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q       <= ST_IDLE;
      wb_valid_q    <= 1'b0;
      ack_pending_q <= 1'b0;
      resp_valid_q  <= 1'b0;
      resp_q        <= '0;
      ack_q         <= '0;
      req_q         <= '0;
      miss_idx_q    <= '0;
      wb_laddr_q    <= '0;
      wb_data_q     <= '0;
      for (int i = 0; i < NUM_LINES; i++) msi_q[i] <= MSI_I;
      for (int s = 0; s < SETS; s++) rr_q[s] <= '0;
    end else begin
      resp_valid_q <= 1'b0;
      if (ack_pending_q && fwd_ack_ready) ack_pending_q <= 1'b0;

      // ---- coherence forward
      if (fwd_take) begin
        ack_pending_q  <= 1'b1;
        ack_q.laddr    <= fwd.laddr;
        ack_q.has_data <= 1'b0;
        ack_q.data     <= '0;
        if (fwd_hit) begin
          if (msi_q[fwd_idx] == MSI_M) begin
            ack_q.has_data <= 1'b1;
            ack_q.data     <= data_q[fwd_idx];
          end
          msi_q[fwd_idx] <= (fwd.kind == FWD_INV) ? MSI_I : MSI_S;
        end else if (fwd_wb_hit) begin
          ack_q.has_data <= 1'b1;
          ack_q.data     <= wb_data_q;
        end
      end

      // ---- core side
      unique case (state_q)
        ST_IDLE: if (req_take) begin
          resp_q <= '0;
          if (imm_fail) begin
            resp_valid_q   <= 1'b1;
            resp_q.ca_fail <= 1'b1;
          end else if (need_miss) begin
            req_q <= core_req;
            if (is_upgrade) begin
              miss_idx_q <= req_idx;
              state_q    <= ST_MISS_REQ;
            end else begin
              miss_idx_q <= vic_idx;
              if (!vic_found_invalid) rr_q[req_set] <= rr_q[req_set] + 1'b1;
              msi_q[vic_idx] <= MSI_I;
              if (msi_q[vic_idx] == MSI_M) begin
                wb_laddr_q <= {atag_q[vic_idx], req_set};
                wb_data_q  <= data_q[vic_idx];
                wb_valid_q <= 1'b1;
                state_q    <= ST_WB;
              end else begin
                state_q <= ST_MISS_REQ;
              end
            end
          end else begin
            resp_valid_q <= 1'b1;
            unique case (core_req.op)
              OP_LOAD, OP_CREAD: resp_q.rdata <= word_of(data_q[req_idx], core_req.addr);
              default: ;
            endcase
          end
        end
        ST_WB: if (mem_req_ready) state_q <= ST_WB_WAIT;
        ST_WB_WAIT: if (mem_resp_valid && mem_resp.is_put_ack) begin
          wb_valid_q <= 1'b0;
          state_q    <= ST_MISS_REQ;
        end
        ST_MISS_REQ: if (mem_req_ready) state_q <= ST_MISS_WAIT;
        ST_MISS_WAIT: if (fill_now) begin
          state_q      <= ST_IDLE;
          resp_valid_q <= 1'b1;
          resp_q       <= '0;
          msi_q[miss_idx_q]  <= (req_q.op == OP_LOAD || req_q.op == OP_CREAD) ? MSI_S : MSI_M;
          unique case (req_q.op)
            OP_LOAD: resp_q.rdata <= word_of(mem_resp.data, req_q.addr);
            OP_CREAD:
              if (revoked) resp_q.ca_fail <= 1'b1;
              else         resp_q.rdata   <= word_of(mem_resp.data, req_q.addr);
            OP_CWRITE: if (revoked) resp_q.ca_fail <= 1'b1;
            default: ;
          endcase
        end
        default: state_q <= ST_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------- outputs
  assign core_resp_valid = resp_valid_q;
  assign core_resp       = resp_q;

  assign mem_req_valid = (state_q == ST_WB) || (state_q == ST_MISS_REQ);
  always_comb begin
    mem_req       = '0;
    mem_req.laddr = miss_laddr;
    if (state_q == ST_WB) begin
      mem_req.kind  = REQ_PUTM;
      mem_req.laddr = wb_laddr_q;
      mem_req.data  = wb_data_q;
    end else if (req_q.op == OP_LOAD || req_q.op == OP_CREAD) begin
      mem_req.kind = REQ_GETS;
    end else begin
      mem_req.kind = REQ_GETM;
    end
  end

  assign fwd_ack_valid = ack_pending_q;
  assign fwd_ack       = ack_q;

  // ------------------------------------------------------- handshake rules
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req));
  a_ack_stable: assert property (@(posedge clk) disable iff (!rst_n)
    fwd_ack_valid && !fwd_ack_ready |=> fwd_ack_valid && $stable(fwd_ack));

endmodule
