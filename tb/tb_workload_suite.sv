// tb_workload_suite: the five CPU/GPU benchmark pairings of the evaluation,
// as synthetic address streams, on the default-size reuse LLC.
//
// Real traces are not available, so every benchmark is replaced by a stream
// with the memory behaviour of its class (sizes are this testbench's own):
//   CPU cache-friendly (Queens, SHA)  random reads over 300 hot lines
//   CPU cache-sensitive (blocked MM)  repeated row-major sweeps of a 2500-line
//                                     block, 15% write-backs
//   CPU large working set (BFS)       random reads over 2^20 lines
//   GPU cache-sensitive (Floyd-Warshall, Convolution, Recursive Gaussian)
//                                     repeated sweeps of 3000 lines, 10% writes
//   GPU cache-friendly (N-body)       random reads over 600 lines
//   GPU streaming (Histogram)         every line read once
// Pairings: Queens-FloydWarshall, BFS-Convolution, MatMul-RecursiveGaussian,
// SHA-Histogram, MatMul-NBody. Each pairing starts from reset and runs
// NREQ requests per side, both sides at once. A monitor predicts every
// request's mechanisms with reuse_ref_pkg and checks them and the returned
// data, then prints reads, hits and data insertions per side. It also checks
// properties of the policy: the streaming GPU never gets a data hit, the
// cache-friendly streams reach a hit rate above 50%, and the cache-sensitive
// streams, which revisit their lines every 2500-3000 requests, do hit once
// their lines have been seen twice.
module tb_workload_suite;
  import reuse_llc_pkg::*;
  import reuse_ref_pkg::*;

  localparam int NREQ = 8000;
  localparam int TS = 1024, TW = 16, DS = 512, DW = 16;

  typedef enum int {
    C_FRIENDLY, C_SENSITIVE, C_LARGE, G_SENSITIVE, G_FRIENDLY, G_STREAM
  } pattern_e;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cpu_v, cpu_r, cpu_rv, gpu_v, gpu_r, gpu_rv;
  llc_req_t cpu_q, gpu_q;
  llc_rsp_t rsp;
  logic mem_v, mem_r, mem_rv;
  mem_req_t mem_q;
  line_t mem_d;
  llc_events_t ev;

  reuse_llc_top dut (
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

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------------------------------------------------------- monitor
  reuse_ref model;
  line_t    golden [int];
  outcome_t seen, expected;
  bit       pending = 0;
  line_t    exp_data [2];
  bit       exp_write [2];
  int       acc_cnt [2] = '{0, 0};
  int       rsp_cnt [2] = '{0, 0};
  int       hits [2], reads [2], inserts [2];

  function automatic line_t gold(int a);
    return golden.exists(a) ? golden[a] : init_line(line_addr_t'(a));
  endfunction

  task automatic close_request();
    if (pending) check(seen == expected, "mechanisms of a request");
    pending = 0;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (ev.data_hit)        begin seen.data_hit = 1; hits[int'(ev.src)]++; end
    if (ev.tag_insert)      seen.tag_insert = 1;
    if (ev.data_insert)     begin seen.data_insert = 1; inserts[int'(ev.src)]++; end
    if (ev.tag_evict)       seen.tag_evict = 1;
    if (ev.tag_evict_data)  seen.tag_evict_data = 1;
    if (ev.data_evict)      seen.data_evict = 1;
    if (ev.dirty_writeback) seen.dirty_wb++;
    if (ev.write_hit)       seen.write_hit = 1;
    if (ev.write_around)    seen.write_around = 1;
    if (cpu_rv || gpu_rv) begin
      int s;
      s = gpu_rv ? 1 : 0;
      check(rsp.write == exp_write[s], "response kind");
      if (!exp_write[s]) check(rsp.rdata == exp_data[s], $sformatf("read data src %0d", s));
      rsp_cnt[s] <= rsp_cnt[s] + 1;
    end
    if ((cpu_v && cpu_r) || (gpu_v && gpu_r)) begin
      int s, a;
      llc_req_t q;
      s = (gpu_v && gpu_r) ? 1 : 0;
      q = s ? gpu_q : cpu_q;
      a = int'(q.addr);
      close_request();
      seen = '{default: 0};
      expected = model.access(a, q.write);
      pending = 1;
      exp_write[s] = q.write;
      exp_data[s]  = gold(a);
      if (q.write) golden[a] = q.wdata;
      else reads[s]++;
      acc_cnt[s] <= acc_cnt[s] + 1;
    end
  end

  // ---------------------------------------------------------------- streams
  task automatic issue(int s, int a, bit w);
    int acc0, rsp0;
    llc_req_t q;
    q = '{addr: line_addr_t'(a), write: w, wdata: {16{$urandom()}}, src: SRC_CPU};
    acc0 = acc_cnt[s];
    rsp0 = rsp_cnt[s];
    @(negedge clk);
    if (s == 0) begin cpu_q = q; cpu_v = 1; end
    else        begin gpu_q = q; gpu_v = 1; end
    while (acc_cnt[s] == acc0) @(negedge clk);
    if (s == 0) cpu_v = 0; else gpu_v = 0;
    while (rsp_cnt[s] == rsp0) @(negedge clk);
  endtask

  // n-th request of a pattern; CPU and GPU regions do not overlap
  task automatic next_req(pattern_e p, int n, output int a, output bit w);
    w = 0;
    unique case (p)
      C_FRIENDLY:  a = $urandom_range(299) * 3;
      C_SENSITIVE: begin a = 32'h0004_0000 + (n % 2500); w = ($urandom_range(99) < 15); end
      C_LARGE:     a = 32'h0010_0000 + $urandom_range(32'h000F_FFFF);
      G_SENSITIVE: begin a = 32'h0100_0000 + (n % 3000); w = ($urandom_range(99) < 10); end
      G_FRIENDLY:  a = 32'h0120_0000 + $urandom_range(599) * 5;
      G_STREAM:    a = 32'h0140_0000 + n;
      default:     a = 0;
    endcase
  endtask

  task automatic run_mix(string name, pattern_e pc, pattern_e pg);
    cpu_v = 0; gpu_v = 0;
    @(negedge clk) rst_n = 0;
    repeat (2) @(negedge clk);
    model = new(TS, TW, DS, DW);
    golden.delete();
    u_mem.mem.delete();
    pending = 0;
    hits = '{0, 0}; reads = '{0, 0}; inserts = '{0, 0};
    rst_n = 1;
    fork
      for (int n = 0; n < NREQ; n++) begin
        int a; bit w;
        next_req(pc, n, a, w);
        issue(0, a, w);
      end
      for (int n = 0; n < NREQ; n++) begin
        int a; bit w;
        next_req(pg, n, a, w);
        issue(1, a, w);
      end
    join
    repeat (50) @(posedge clk);
    close_request();
    $display("%-26s CPU: %5d reads %5d hits %5d data inserts | GPU: %5d reads %5d hits %5d data inserts",
             name, reads[0], hits[0], inserts[0], reads[1], hits[1], inserts[1]);
    if (pg == G_STREAM) check(hits[1] == 0, {name, ": streaming GPU never hits"});
    if (pc == C_FRIENDLY) check(hits[0] * 2 > reads[0], {name, ": cache-friendly CPU hit rate"});
    if (pg == G_FRIENDLY) check(hits[1] * 2 > reads[1], {name, ": cache-friendly GPU hit rate"});
    if (pc == C_SENSITIVE) check(hits[0] > 0, {name, ": cache-sensitive CPU reuses its block"});
    if (pg == G_SENSITIVE) check(hits[1] > 0, {name, ": cache-sensitive GPU reuses its sweep"});
  endtask

  initial begin
    cpu_v = 0; gpu_v = 0; cpu_q = '0; gpu_q = '0;
    repeat (2) @(posedge clk);
    run_mix("Queens-FloydWarshall",     C_FRIENDLY,  G_SENSITIVE);
    run_mix("BFS-Convolution",          C_LARGE,     G_SENSITIVE);
    run_mix("MatMul-RecursiveGaussian", C_SENSITIVE, G_SENSITIVE);
    run_mix("SHA-Histogram",            C_FRIENDLY,  G_STREAM);
    run_mix("MatMul-NBody",             C_SENSITIVE, G_FRIENDLY);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
