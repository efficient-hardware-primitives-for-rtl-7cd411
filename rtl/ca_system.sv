// ca_system: top level - the Conditional Access extension for a chip
// multiprocessor, one private CA-extended L1 data cache per core.
//
// Each core's L1 (ca_l1_dcache) holds that core's tag bits and revoked bit and
// executes load, store, cread, cwrite, untagOne and untagAll.  The cores
// themselves and the directory-based MSI coherence controller with its shared
// L2 are not part of this design: their sides are brought out as per-core
// ports (index c = core number).  Any directory that speaks the GETS/GETM/PUTM
// request, INV/FWD_GETS forward and acknowledgement channels of ca_pkg can be
// attached; CA needs no change to it.
//
// Timing: see ca_l1_dcache - a hit answers in the next cycle, misses take the
// directory's latency.  NUM_CORES defaults to 32, the largest thread count of
// the evaluation (one thread per core); the 32 KiB L1 with 64-byte lines is the
// evaluated L1 configuration, the 4 ways are this design's choice.
// The SYNCASYNCNET lint report on rst_n comes from the assertions inside each
// L1 (disable iff); the circuit uses rst_n only as an asynchronous reset.
module ca_system
  import ca_pkg::*;
#(
  parameter int unsigned NUM_CORES   = 32,
  parameter int unsigned CACHE_BYTES = 32768,
  parameter int unsigned WAYS        = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  // core side, per core
  input  logic       core_req_valid  [NUM_CORES],
  output logic       core_req_ready  [NUM_CORES],
  input  core_req_t  core_req        [NUM_CORES],
  output logic       core_resp_valid [NUM_CORES],
  output core_resp_t core_resp       [NUM_CORES],
  input  logic       revoke          [NUM_CORES],
  output logic       revoked         [NUM_CORES],
  // directory side, per core
  output logic       mem_req_valid   [NUM_CORES],
  input  logic       mem_req_ready   [NUM_CORES],
  output mem_req_t   mem_req         [NUM_CORES],
  input  logic       mem_resp_valid  [NUM_CORES],
  input  mem_resp_t  mem_resp        [NUM_CORES],
  input  logic       fwd_valid       [NUM_CORES],
  output logic       fwd_ready       [NUM_CORES],
  input  fwd_t       fwd             [NUM_CORES],
  output logic       fwd_ack_valid   [NUM_CORES],
  input  logic       fwd_ack_ready   [NUM_CORES],
  output fwd_ack_t   fwd_ack         [NUM_CORES]
);

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    ca_l1_dcache #(
      .CACHE_BYTES(CACHE_BYTES),
      .WAYS       (WAYS)
    ) u_l1 (
      .clk, .rst_n,
      .core_req_valid (core_req_valid[c]),
      .core_req_ready (core_req_ready[c]),
      .core_req       (core_req[c]),
      .core_resp_valid(core_resp_valid[c]),
      .core_resp      (core_resp[c]),
      .revoke         (revoke[c]),
      .revoked        (revoked[c]),
      .mem_req_valid  (mem_req_valid[c]),
      .mem_req_ready  (mem_req_ready[c]),
      .mem_req        (mem_req[c]),
      .mem_resp_valid (mem_resp_valid[c]),
      .mem_resp       (mem_resp[c]),
      .fwd_valid      (fwd_valid[c]),
      .fwd_ready      (fwd_ready[c]),
      .fwd            (fwd[c]),
      .fwd_ack_valid  (fwd_ack_valid[c]),
      .fwd_ack_ready  (fwd_ack_ready[c]),
      .fwd_ack        (fwd_ack[c])
    );
  end

endmodule
