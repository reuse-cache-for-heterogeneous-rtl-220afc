// tb_workload_mixes: a cache-friendly CPU stream against a streaming GPU
// stream, run on both tag-array sizes of the reuse cache (16384 tags, i.e.
// 1 MB worth, and 32768 tags, 2 MB worth; 8192 data lines in both).
//
// This is the situation the reuse cache is meant for (compare a SHA-like CPU
// kernel next to a histogram-like GPU kernel): the CPU loops PASSES times
// over 256 hot lines while the GPU reads 6000 lines it never touches again.
// The two streams are interleaved request by request. Checks, for each
// configuration:
//   * every read returns the DRAM contents of its line;
//   * the GPU's streaming lines never get a data entry (no data insertion
//     and no data hit for the GPU): single-use lines stay tag-only;
//   * each CPU hot line is inserted into the data array exactly once, on its
//     second reference, and every CPU read from the third pass on is a hit;
//   * no data entry is ever evicted.
module tb_workload_mixes;
  import reuse_llc_pkg::*;
  import reuse_ref_pkg::*;

  localparam int HOT = 256, PASSES = 8, GPU_LINES = 6000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int finished = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  for (genvar c = 0; c < 2; c++) begin : cfg
    localparam int TS = (c == 0) ? 1024 : 2048;

    logic cpu_v, cpu_r, cpu_rv, gpu_v, gpu_r, gpu_rv;
    llc_req_t cpu_q, gpu_q;
    llc_rsp_t rsp;
    logic mem_v, mem_r, mem_rv;
    mem_req_t mem_q;
    line_t mem_d;
    llc_events_t ev;

    reuse_llc_top #(.TAG_SETS(TS)) dut (
      .clk, .rst_n,
      .cpu_req_valid_i(cpu_v), .cpu_req_ready_o(cpu_r), .cpu_req_i(cpu_q), .cpu_rsp_valid_o(cpu_rv),
      .gpu_req_valid_i(gpu_v), .gpu_req_ready_o(gpu_r), .gpu_req_i(gpu_q), .gpu_rsp_valid_o(gpu_rv),
      .rsp_o(rsp),
      .mem_req_valid_o(mem_v), .mem_req_ready_i(mem_r), .mem_req_o(mem_q),
      .mem_rsp_valid_i(mem_rv), .mem_rsp_data_i(mem_d),
      .events_o(ev)
    );

    dram_model #(.LATENCY(10), .STALL_PCT(10)) u_mem (
      .clk, .rst_n,
      .req_valid_i(mem_v), .req_ready_o(mem_r), .req_i(mem_q),
      .rsp_valid_o(mem_rv), .rsp_data_o(mem_d)
    );

    int cpu_hits = 0, gpu_hits = 0, cpu_ins = 0, gpu_ins = 0, data_ev = 0;
    always @(posedge clk) if (rst_n) begin
      if (ev.data_hit    && ev.src == SRC_CPU) cpu_hits++;
      if (ev.data_hit    && ev.src == SRC_GPU) gpu_hits++;
      if (ev.data_insert && ev.src == SRC_CPU) cpu_ins++;
      if (ev.data_insert && ev.src == SRC_GPU) gpu_ins++;
      if (ev.data_evict || ev.tag_evict_data)  data_ev++;
    end

    // one read through one port, waiting for its response
    task automatic read(bit gpu, line_addr_t a);
      llc_req_t q;
      q = '{addr: a, write: 1'b0, wdata: '0, src: SRC_CPU};
      @(negedge clk);
      if (gpu) begin gpu_q = q; gpu_v = 1; end else begin cpu_q = q; cpu_v = 1; end
      @(posedge clk);
      while (!(gpu ? gpu_r : cpu_r)) @(posedge clk);
      @(negedge clk);
      if (gpu) gpu_v = 0; else cpu_v = 0;
      while (!(gpu ? gpu_rv : cpu_rv)) @(posedge clk);
      check(rsp.rdata == init_line(a), $sformatf("cfg %0d read data", c));
    endtask

    initial begin
      cpu_v = 0; gpu_v = 0; cpu_q = '0; gpu_q = '0;
      wait (rst_n);
      fork
        for (int p = 0; p < PASSES; p++)
          for (int i = 0; i < HOT; i++)
            read(1'b0, line_addr_t'(i * 7));
        for (int i = 0; i < GPU_LINES; i++)
          read(1'b1, line_addr_t'(32'h10_0000 + i));
      join
      repeat (20) @(posedge clk);
      $display("cfg %0d (%0d tags): cpu_hits=%0d cpu_data_ins=%0d gpu_hits=%0d gpu_data_ins=%0d data_evictions=%0d",
               c, TS * 16, cpu_hits, cpu_ins, gpu_hits, gpu_ins, data_ev);
      check(gpu_ins == 0 && gpu_hits == 0, $sformatf("cfg %0d streaming lines stay tag-only", c));
      check(cpu_ins == HOT, $sformatf("cfg %0d each hot line inserted once", c));
      check(cpu_hits == HOT * (PASSES - 2), $sformatf("cfg %0d hot lines hit from pass 3", c));
      check(data_ev == 0, $sformatf("cfg %0d no data evictions", c));
      finished++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (finished == 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
