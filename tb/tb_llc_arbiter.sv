// tb_llc_arbiter: checks the CPU/GPU arbiter in front of the LLC.
//
// Random request valids from both L2s (held until taken) and a random LLC
// ready. Every cycle it checks: the LLC sees a request whenever one is
// waiting; the granted one is the only one who sees ready; when both wait,
// the grant goes to the port that did not win the previous transfer; the
// forwarded request is the granted port's, with its source field set to that
// port; responses reach only the L2 named by their source field.
module tb_llc_arbiter;
  import reuse_llc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cpu_v, cpu_r, cpu_rv, gpu_v, gpu_r, gpu_rv, llc_v, llc_r, llc_rv;
  llc_req_t cpu_q, gpu_q, llc_q;
  llc_rsp_t rsp, llc_rsp;

  llc_arbiter dut (
    .clk, .rst_n,
    .cpu_req_valid_i(cpu_v), .cpu_req_ready_o(cpu_r), .cpu_req_i(cpu_q), .cpu_rsp_valid_o(cpu_rv),
    .gpu_req_valid_i(gpu_v), .gpu_req_ready_o(gpu_r), .gpu_req_i(gpu_q), .gpu_rsp_valid_o(gpu_rv),
    .rsp_o(rsp),
    .llc_req_valid_o(llc_v), .llc_req_ready_i(llc_r), .llc_req_o(llc_q),
    .llc_rsp_valid_i(llc_rv), .llc_rsp_i(llc_rsp)
  );

  int checks = 0, failures = 0, both_waiting = 0;
  int last_winner = 0;  // 0 CPU, 1 GPU; after reset CPU has priority

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic llc_req_t rand_req();
    llc_req_t r;
    r.addr = line_addr_t'($urandom());
    r.write = $urandom_range(1);
    r.wdata = {16{$urandom()}};
    r.src = src_e'($urandom_range(1));
    return r;
  endfunction

  initial begin
    cpu_v = 0; gpu_v = 0; llc_r = 0; llc_rv = 0;
    cpu_q = rand_req(); gpu_q = rand_req(); llc_rsp = '0;
    last_winner = 1;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      if (!cpu_v && $urandom_range(1)) begin cpu_v = 1; cpu_q = rand_req(); end
      if (!gpu_v && $urandom_range(1)) begin gpu_v = 1; gpu_q = rand_req(); end
      llc_r = $urandom_range(1);
      llc_rv = $urandom_range(1);
      llc_rsp = '{rdata: {16{$urandom()}}, write: $urandom_range(1), src: src_e'($urandom_range(1))};
      #1;
      check(llc_v == (cpu_v || gpu_v), "llc valid");
      check(cpu_rv == (llc_rv && llc_rsp.src == SRC_CPU), "cpu response routing");
      check(gpu_rv == (llc_rv && llc_rsp.src == SRC_GPU), "gpu response routing");
      check(rsp == llc_rsp, "response bundle");
      if (cpu_v || gpu_v) begin
        int win;
        llc_req_t exp_q;
        if (cpu_v && gpu_v) begin win = 1 - last_winner; both_waiting++; end
        else win = gpu_v ? 1 : 0;
        exp_q = win ? gpu_q : cpu_q;
        exp_q.src = win ? SRC_GPU : SRC_CPU;
        check(llc_q == exp_q, "forwarded request");
        check(cpu_r == (llc_r && win == 0) && gpu_r == (llc_r && win == 1), "ready routing");
        @(posedge clk);
        #1;
        if (llc_r) begin
          last_winner = win;
          if (win) gpu_v = 0; else cpu_v = 0;
        end
      end
    end
    check(both_waiting > 100, "contention exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
