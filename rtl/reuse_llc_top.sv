// reuse_llc_top: the shared reuse last-level cache of a CPU-GPU system.
//
// The CPU's and the GPU's private L2 caches send line reads and write-backs
// to this LLC. llc_arbiter picks one request at a time and reuse_llc serves
// it over a decoupled tag array (16384 tags, like a 1 MB 16-way cache of
// 64-byte lines) and a data array of half that capacity (8192 lines, 512 KB):
// a line's data is kept only after its tag has been referenced twice. DRAM,
// which the cache does not model, connects through the mem_* port; the L2s
// through the cpu_* and gpu_* ports. events_o reports each reuse-cache
// mechanism as a one-cycle pulse.
//
// Timing: after reset the arrays clear themselves for TAG_SETS cycles, during
// which no request is accepted. See reuse_llc for per-request latencies.
module reuse_llc_top
  import reuse_llc_pkg::*;
#(
  parameter int unsigned TAG_SETS  = 1024,
  parameter int unsigned TAG_WAYS  = 16,
  parameter int unsigned DATA_SETS = 512,
  parameter int unsigned DATA_WAYS = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // CPU L2
  input  logic        cpu_req_valid_i,
  output logic        cpu_req_ready_o,
  input  llc_req_t    cpu_req_i,
  output logic        cpu_rsp_valid_o,
  // GPU L2
  input  logic        gpu_req_valid_i,
  output logic        gpu_req_ready_o,
  input  llc_req_t    gpu_req_i,
  output logic        gpu_rsp_valid_o,
  // response data for whichever L2 has rsp_valid
  output llc_rsp_t    rsp_o,
  // DRAM
  output logic        mem_req_valid_o,
  input  logic        mem_req_ready_i,
  output mem_req_t    mem_req_o,
  input  logic        mem_rsp_valid_i,
  input  line_t       mem_rsp_data_i,
  // mechanism pulses
  output llc_events_t events_o
);

  logic     llc_req_valid, llc_req_ready;
  llc_req_t llc_req;
  logic     llc_rsp_valid;
  llc_rsp_t llc_rsp;

  llc_arbiter u_arb (
    .clk, .rst_n,
    .cpu_req_valid_i, .cpu_req_ready_o, .cpu_req_i, .cpu_rsp_valid_o,
    .gpu_req_valid_i, .gpu_req_ready_o, .gpu_req_i, .gpu_rsp_valid_o,
    .rsp_o,
    .llc_req_valid_o(llc_req_valid), .llc_req_ready_i(llc_req_ready),
    .llc_req_o(llc_req),
    .llc_rsp_valid_i(llc_rsp_valid), .llc_rsp_i(llc_rsp)
  );

  reuse_llc #(
    .TAG_SETS(TAG_SETS), .TAG_WAYS(TAG_WAYS),
    .DATA_SETS(DATA_SETS), .DATA_WAYS(DATA_WAYS)
  ) u_llc (
    .clk, .rst_n,
    .req_valid_i(llc_req_valid), .req_ready_o(llc_req_ready), .req_i(llc_req),
    .rsp_valid_o(llc_rsp_valid), .rsp_o(llc_rsp),
    .mem_req_valid_o, .mem_req_ready_i, .mem_req_o,
    .mem_rsp_valid_i, .mem_rsp_data_i,
    .events_o
  );

endmodule
