// llc_arbiter: shares the one LLC request port between the CPU and GPU L2s.
//
// The CPU and GPU share the last-level cache. This block forwards one
// request at a time to the LLC controller, alternating between the two L2s
// when both are waiting (round robin: the port that won last has the lower
// priority next time). It stamps each forwarded request with the port it came
// from and returns every LLC response to the L2 that the response's source
// field names. The reuse cache treats CPU and GPU lines alike, so nothing
// here depends on the source beyond routing. Round robin and the stamping are
// this design's choices; the paper only says that the two share the LLC.
//
// Interface and timing: valid/ready on the request side, combinational from
// input to output (no added latency); a request is taken when its valid and
// ready are both high. Responses are one-cycle pulses routed in the same
// cycle.
module llc_arbiter
  import reuse_llc_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  // CPU L2
  input  logic     cpu_req_valid_i,
  output logic     cpu_req_ready_o,
  input  llc_req_t cpu_req_i,
  output logic     cpu_rsp_valid_o,
  // GPU L2
  input  logic     gpu_req_valid_i,
  output logic     gpu_req_ready_o,
  input  llc_req_t gpu_req_i,
  output logic     gpu_rsp_valid_o,
  // response bundle seen by both L2s
  output llc_rsp_t rsp_o,
  // LLC controller
  output logic     llc_req_valid_o,
  input  logic     llc_req_ready_i,
  output llc_req_t llc_req_o,
  input  logic     llc_rsp_valid_i,
  input  llc_rsp_t llc_rsp_i
);

  logic gpu_first_q;  // GPU has priority when both request
  logic grant_gpu;

  always_comb begin
    grant_gpu = gpu_req_valid_i && (gpu_first_q || !cpu_req_valid_i);
    llc_req_valid_o = cpu_req_valid_i || gpu_req_valid_i;
    llc_req_o       = grant_gpu ? gpu_req_i : cpu_req_i;
    llc_req_o.src   = grant_gpu ? SRC_GPU : SRC_CPU;
    cpu_req_ready_o = llc_req_ready_i && !grant_gpu;
    gpu_req_ready_o = llc_req_ready_i && grant_gpu;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      gpu_first_q <= 1'b0;
    else if (llc_req_valid_o && llc_req_ready_i)
      gpu_first_q <= !grant_gpu;
  end

  assign rsp_o           = llc_rsp_i;
  assign cpu_rsp_valid_o = llc_rsp_valid_i && (llc_rsp_i.src == SRC_CPU);
  assign gpu_rsp_valid_o = llc_rsp_valid_i && (llc_rsp_i.src == SRC_GPU);

  // A waiting request stays put until it is taken.
  a_cpu_hold: assert property (@(posedge clk) disable iff (!rst_n)
    cpu_req_valid_i && !cpu_req_ready_o |=> cpu_req_valid_i && $stable(cpu_req_i));
  a_gpu_hold: assert property (@(posedge clk) disable iff (!rst_n)
    gpu_req_valid_i && !gpu_req_ready_o |=> gpu_req_valid_i && $stable(gpu_req_i));

endmodule
