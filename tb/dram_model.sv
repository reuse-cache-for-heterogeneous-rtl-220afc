// dram_model: behavioural main memory for simulating the reuse LLC.
//
// Not synthesizable. Accepts one line request per cycle when ready (ready is
// dropped at random, STALL_PCT percent of cycles, to exercise back-pressure).
// Writes are posted and take effect at once. Reads return in order,
// LATENCY cycles after acceptance. A line never written reads as
// reuse_ref_pkg::init_line(addr).
module dram_model
  import reuse_llc_pkg::*;
#(
  parameter int unsigned LATENCY   = 6,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid_i,
  output logic     req_ready_o,
  input  mem_req_t req_i,
  output logic     rsp_valid_o,
  output line_t    rsp_data_o
);

  line_t mem [line_addr_t];
  line_t rd_data_q [$];
  longint rd_due_q [$];
  longint cycle = 0;
  int unsigned reads = 0, writes = 0, stalls = 0;

  function automatic line_t peek(line_addr_t a);
    return mem.exists(a) ? mem[a] : reuse_ref_pkg::init_line(a);
  endfunction

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (!rst_n) begin
      req_ready_o <= 1'b0;
      rsp_valid_o <= 1'b0;
    end else begin
      req_ready_o <= ($urandom_range(99) >= STALL_PCT);
      if (req_valid_i && !req_ready_o) stalls <= stalls + 1;
      if (req_valid_i && req_ready_o) begin
        if (req_i.write) begin
          mem[req_i.addr] = req_i.wdata;
          writes <= writes + 1;
        end else begin
          rd_data_q.push_back(peek(req_i.addr));
          rd_due_q.push_back(cycle + LATENCY);
          reads <= reads + 1;
        end
      end
      rsp_valid_o <= 1'b0;
      if (rd_due_q.size() > 0 && rd_due_q[0] <= cycle) begin
        rsp_valid_o <= 1'b1;
        rsp_data_o  <= rd_data_q.pop_front();
        void'(rd_due_q.pop_front());
      end
    end
  end

endmodule
