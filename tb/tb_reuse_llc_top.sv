// tb_reuse_llc_top: end-to-end test of the shared reuse LLC at its default
// size (16384 tags in 1024 sets x 16 ways, 8192 data lines in 512 x 16).
//
// Two request streams run at once, one per L2, each keeping one request in
// flight:
//   * CPU: a reuse-heavy stream over 14 hot lines in each of tag sets 0 and
//     512, with 20% write-backs;
//   * GPU: a mostly streaming stream that walks fresh lines through tag sets
//     0, 1 and 513, re-reading a recent line one time in four, 10% writes.
// Tag sets 0 and 512 share data set 0, and 1 and 513 share data set 1, so
// both tag and data replacement happen. A monitor at the clock edge follows
// the order in which the arbiter hands requests to the LLC, predicts each
// request's mechanisms with reuse_ref_pkg and compares them with the event
// pulses; every read must return the latest data written to its line. It
// counts how often each mechanism (hit, tag insert, data insert, tag
// eviction, tag eviction with data, data eviction, dirty write-back, write
// hit, write-around, CPU/GPU contention at the arbiter, DRAM back-pressure)
// happened, and fails for any that never did.
module tb_reuse_llc_top;
  import reuse_llc_pkg::*;
  import reuse_ref_pkg::*;

  localparam int NREQ = 3000;          // per source
  localparam int TS = 1024, TW = 16, DS = 512, DW = 16;

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

  dram_model #(.LATENCY(8), .STALL_PCT(20)) u_mem (
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

  reuse_ref model = new(TS, TW, DS, DW);
  line_t golden [int];
  function automatic line_t gold(int a);
    return golden.exists(a) ? golden[a] : init_line(line_addr_t'(a));
  endfunction

  // ---------------------------------------------------------------- monitor
  outcome_t seen, expected;
  bit       pending = 0;
  line_t    exp_data [2];
  bit       exp_write [2];
  int       acc_cnt [2] = '{0, 0};
  int       rsp_cnt [2] = '{0, 0};
  int n_hit = 0, n_tins = 0, n_dins = 0, n_tev = 0, n_tevd = 0, n_dev = 0;
  int n_wb = 0, n_wh = 0, n_wa = 0, n_contend = 0, n_mstall = 0;
  int n_dins_gpu = 0, n_dins_cpu = 0, n_hit_gpu = 0, n_hit_cpu = 0;

  task automatic close_request();
    if (pending) check(seen == expected, "mechanisms of a request");
    pending = 0;
  endtask

  always @(posedge clk) if (rst_n) begin
    // events of the request being served
    if (ev.data_hit)        begin seen.data_hit = 1; n_hit++;
                                  if (ev.src == SRC_GPU) n_hit_gpu++; else n_hit_cpu++; end
    if (ev.tag_insert)      begin seen.tag_insert = 1; n_tins++; end
    if (ev.data_insert)     begin seen.data_insert = 1; n_dins++;
                                  if (ev.src == SRC_GPU) n_dins_gpu++; else n_dins_cpu++; end
    if (ev.tag_evict)       begin seen.tag_evict = 1; n_tev++; end
    if (ev.tag_evict_data)  begin seen.tag_evict_data = 1; n_tevd++; end
    if (ev.data_evict)      begin seen.data_evict = 1; n_dev++; end
    if (ev.dirty_writeback) begin seen.dirty_wb++; n_wb++; end
    if (ev.write_hit)       begin seen.write_hit = 1; n_wh++; end
    if (ev.write_around)    begin seen.write_around = 1; n_wa++; end
    if (cpu_v && gpu_v)     n_contend++;
    if (mem_v && !mem_r)    n_mstall++;
    // responses
    if (cpu_rv || gpu_rv) begin
      int s;
      s = gpu_rv ? 1 : 0;
      check(!(cpu_rv && gpu_rv), "one response at a time");
      check(rsp.write == exp_write[s], "response kind");
      if (!exp_write[s]) check(rsp.rdata == exp_data[s], $sformatf("read data src %0d", s));
      rsp_cnt[s] <= rsp_cnt[s] + 1;
    end
    // acceptance of a new request by the LLC
    if ((cpu_v && cpu_r) || (gpu_v && gpu_r)) begin
      int s, a;
      llc_req_t q;
      check(!(cpu_v && cpu_r && gpu_v && gpu_r), "one grant at a time");
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
      acc_cnt[s] <= acc_cnt[s] + 1;
    end
  end

  // ---------------------------------------------------------------- drivers
  task automatic issue(int s, line_addr_t a, bit w);
    int acc0, rsp0;
    llc_req_t q;
    q = '{addr: a, write: w, wdata: {16{$urandom()}}, src: SRC_CPU};
    acc0 = acc_cnt[s];
    rsp0 = rsp_cnt[s];
    @(negedge clk);
    if (s == 0) begin cpu_q = q; cpu_v = 1; end
    else        begin gpu_q = q; gpu_v = 1; end
    while (acc_cnt[s] == acc0) @(negedge clk);
    if (s == 0) cpu_v = 0; else gpu_v = 0;
    while (rsp_cnt[s] == rsp0) @(negedge clk);
  endtask

  int done = 0;

  initial begin
    cpu_v = 0; gpu_v = 0; cpu_q = '0; gpu_q = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    fork
      begin : cpu_stream
        for (int n = 0; n < NREQ; n++) begin
          int set, tg;
          set = $urandom_range(1) ? 512 : 0;
          tg  = $urandom_range(13);
          issue(0, line_addr_t'(tg * TS + set), $urandom_range(99) < 20);
        end
      end
      begin : gpu_stream
        int next_tag;
        int recent [$];
        next_tag = 100;
        for (int n = 0; n < NREQ; n++) begin
          int a;
          if (recent.size() > 0 && $urandom_range(3) == 0)
            a = recent[$urandom_range(recent.size() - 1)];
          else begin
            int sets [3] = '{0, 1, 513};
            a = next_tag * TS + sets[$urandom_range(2)];
            next_tag++;
            recent.push_back(a);
            if (recent.size() > 24) void'(recent.pop_front());
          end
          issue(1, line_addr_t'(a), $urandom_range(99) < 10);
        end
      end
    join
    repeat (100) @(posedge clk);
    close_request();
    $display("hits=%0d (cpu %0d gpu %0d) tag_ins=%0d data_ins=%0d (cpu %0d gpu %0d) tag_ev=%0d tag_ev_data=%0d data_ev=%0d dirty_wb=%0d write_hit=%0d write_around=%0d contention=%0d dram_stall=%0d",
             n_hit, n_hit_cpu, n_hit_gpu, n_tins, n_dins, n_dins_cpu, n_dins_gpu, n_tev, n_tevd,
             n_dev, n_wb, n_wh, n_wa, n_contend, n_mstall);
    check(n_hit > 0,      "data hit happened");
    check(n_tins > 0,     "tag insertion happened");
    check(n_dins > 0,     "data insertion happened");
    check(n_tev > 0,      "tag eviction happened");
    check(n_tevd > 0,     "tag eviction with data happened");
    check(n_dev > 0,      "data eviction happened");
    check(n_wb > 0,       "dirty write-back happened");
    check(n_wh > 0,       "write hit happened");
    check(n_wa > 0,       "write-around happened");
    check(n_contend > 0,  "arbiter contention happened");
    check(n_mstall > 0,   "DRAM back-pressure happened");
    check(acc_cnt[0] == NREQ && acc_cnt[1] == NREQ, "all requests accepted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
