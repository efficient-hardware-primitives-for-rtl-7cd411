// msi_directory_model: behavioural model (not synthesizable) of a
// directory-based MSI coherence controller with a shared backing memory, used
// only by the system testbench.  The CA extension needs no change to the
// coherence protocol, so this is a plain blocking directory: it takes one
// request at a time from the cores (round robin), and
//   GETS  downgrades a Modified owner with FWD_GETS, adds the requester as a
//         sharer and returns the line;
//   GETM  sends INV to every other sharer/owner at once, waits for all acks,
//         makes the requester owner and returns the line;
//   PUTM  writes the line back if the sender is still the owner, and acks.
// Memory starts with each word equal to its own byte address.  Outputs are
// driven just after the falling clock edge and inputs are sampled there, so
// every handshake completes at the rising edge that follows.  LAT cycles of
// latency are added before each response.
module msi_directory_model
  import ca_pkg::*;
#(
  parameter int N   = 4,
  parameter int LAT = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       mem_req_valid  [N],
  output logic       mem_req_ready  [N],
  input  mem_req_t   mem_req        [N],
  output logic       mem_resp_valid [N],
  output mem_resp_t  mem_resp       [N],
  output logic       fwd_valid      [N],
  input  logic       fwd_ready      [N],
  output fwd_t       fwd            [N],
  input  logic       fwd_ack_valid  [N],
  output logic       fwd_ack_ready  [N],
  input  fwd_ack_t   fwd_ack        [N],
  output int         n_gets,
  output int         n_getm,
  output int         n_putm,
  output int         n_inv,
  output int         n_fwd_gets
);

  line_t      mem     [laddr_t];
  int         owner   [laddr_t];
  bit [N-1:0] sharers [laddr_t];

  function automatic line_t read_line(laddr_t la);
    line_t l;
    if (mem.exists(la)) return mem[la];
    for (int w = 0; w < WORDS_PER_LINE; w++)
      l[w*WORD_W +: WORD_W] = WORD_W'({la, OFFSET_W'(w * 8)});
    return l;
  endfunction

  // send kind to every core in targets, collect all acks
  task automatic forward(input bit [N-1:0] targets, input fwd_e kind, input laddr_t la);
    bit [N-1:0] to_accept, to_ack, accepted;
    to_accept = targets; to_ack = targets; accepted = '0;
    for (int j = 0; j < N; j++) if (targets[j]) begin
      fwd_valid[j] = 1'b1; fwd[j].kind = kind; fwd[j].laddr = la;
      if (kind == FWD_INV) n_inv++; else n_fwd_gets++;
      if (fwd_ready[j]) begin accepted[j] = 1'b1; to_accept[j] = 1'b0; end
    end
    while (to_accept != '0 || to_ack != '0 || accepted != '0) begin
      @(negedge clk);
      for (int j = 0; j < N; j++) begin
        fwd_ack_ready[j] = 1'b0;
        if (accepted[j]) begin fwd_valid[j] = 1'b0; accepted[j] = 1'b0; end
        if (to_accept[j] && fwd_ready[j]) begin accepted[j] = 1'b1; to_accept[j] = 1'b0; end
        if (to_ack[j] && !to_accept[j] && !accepted[j] && fwd_ack_valid[j]) begin
          if (fwd_ack[j].has_data) mem[la] = fwd_ack[j].data;
          fwd_ack_ready[j] = 1'b1;
          to_ack[j] = 1'b0;
        end
      end
    end
    @(negedge clk);
    for (int j = 0; j < N; j++) fwd_ack_ready[j] = 1'b0;
  endtask

  task automatic respond(input int i, input logic put_ack, input laddr_t la);
    repeat (LAT) @(negedge clk);
    mem_resp[i].is_put_ack = put_ack;
    mem_resp[i].laddr      = la;
    mem_resp[i].data       = put_ack ? '0 : read_line(la);
    mem_resp_valid[i]      = 1'b1;
    @(negedge clk);
    mem_resp_valid[i]      = 1'b0;
  endtask

  initial begin
    int rr, i, o;
    mem_req_t r;
    bit [N-1:0] tg;
    n_gets = 0; n_getm = 0; n_putm = 0; n_inv = 0; n_fwd_gets = 0;
    for (int j = 0; j < N; j++) begin
      mem_req_ready[j] = 0; mem_resp_valid[j] = 0; mem_resp[j] = '0;
      fwd_valid[j] = 0; fwd[j] = '0; fwd_ack_ready[j] = 0;
    end
    rr = 0;
    wait (rst_n);
    forever begin
      @(negedge clk);
      i = -1;
      for (int k = 0; k < N; k++)
        if (i < 0 && mem_req_valid[(rr + k) % N]) i = (rr + k) % N;
      if (i >= 0) begin
        rr = (i + 1) % N;
        r = mem_req[i];
        mem_req_ready[i] = 1'b1;
        @(negedge clk);
        mem_req_ready[i] = 1'b0;
        if (!owner.exists(r.laddr)) begin owner[r.laddr] = -1; sharers[r.laddr] = '0; end
        o = owner[r.laddr];
        case (r.kind)
          REQ_GETS: begin
            n_gets++;
            if (o >= 0 && o != i) begin
              tg = '0; tg[o] = 1'b1;
              forward(tg, FWD_GETS, r.laddr);
              sharers[r.laddr][o] = 1'b1;
            end
            owner[r.laddr] = -1;
            sharers[r.laddr][i] = 1'b1;
            respond(i, 1'b0, r.laddr);
          end
          REQ_GETM: begin
            n_getm++;
            tg = sharers[r.laddr];
            if (o >= 0) tg[o] = 1'b1;
            tg[i] = 1'b0;
            if (tg != '0) forward(tg, FWD_INV, r.laddr);
            owner[r.laddr] = i;
            sharers[r.laddr] = '0;
            respond(i, 1'b0, r.laddr);
          end
          default: begin
            n_putm++;
            if (o == i) begin
              mem[r.laddr] = r.data;
              owner[r.laddr] = -1;
            end
            respond(i, 1'b1, r.laddr);
          end
        endcase
      end
    end
  end

endmodule
