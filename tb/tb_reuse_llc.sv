// tb_reuse_llc: self-checking test of the reuse cache controller.
//
// Uses a small cache (4 tag sets x 2 ways, 2 data sets x 2 ways) so that
// every kind of eviction happens often. Random reads and write-backs to 32
// lines are sent one at a time. For each request the testbench predicts with
// reuse_ref_pkg which mechanisms must fire (hit, tag insert, data insert, tag
// eviction with or without data, data eviction, dirty write-back, write hit,
// write-around) and compares with the controller's event pulses; every read
// must return the last value written to that line. A data hit must answer in the
// second cycle after the request is accepted.
module tb_reuse_llc;
  import reuse_llc_pkg::*;
  import reuse_ref_pkg::*;

  localparam int TS = 4, TW = 2, DS = 2, DW = 2;
  localparam int NREQ = 4000;
  localparam int NLINES = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        req_valid, req_ready, rsp_valid;
  llc_req_t    req;
  llc_rsp_t    rsp;
  logic        mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t    mem_req;
  line_t       mem_rsp_data;
  llc_events_t ev;

  reuse_llc #(.TAG_SETS(TS), .TAG_WAYS(TW), .DATA_SETS(DS), .DATA_WAYS(DW)) dut (
    .clk, .rst_n,
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .rsp_valid_o(rsp_valid), .rsp_o(rsp),
    .mem_req_valid_o(mem_req_valid), .mem_req_ready_i(mem_req_ready),
    .mem_req_o(mem_req), .mem_rsp_valid_i(mem_rsp_valid),
    .mem_rsp_data_i(mem_rsp_data), .events_o(ev)
  );

  dram_model #(.LATENCY(5), .STALL_PCT(25)) u_mem (
    .clk, .rst_n,
    .req_valid_i(mem_req_valid), .req_ready_o(mem_req_ready), .req_i(mem_req),
    .rsp_valid_o(mem_rsp_valid), .rsp_data_o(mem_rsp_data)
  );

  int checks = 0, failures = 0;
  int cnt_hit = 0, cnt_tins = 0, cnt_dins = 0, cnt_tev = 0, cnt_tevd = 0;
  int cnt_dev = 0, cnt_wb = 0, cnt_wh = 0, cnt_wa = 0;

  line_t golden [int];
  function automatic line_t gold(int a);
    return golden.exists(a) ? golden[a] : init_line(line_addr_t'(a));
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // event accumulation for the request in flight
  outcome_t seen;
  always @(posedge clk) if (rst_n) begin
    if (ev.data_hit)        seen.data_hit       = 1;
    if (ev.tag_insert)      seen.tag_insert     = 1;
    if (ev.data_insert)     seen.data_insert    = 1;
    if (ev.tag_evict)       seen.tag_evict      = 1;
    if (ev.tag_evict_data)  seen.tag_evict_data = 1;
    if (ev.data_evict)      seen.data_evict     = 1;
    if (ev.dirty_writeback) seen.dirty_wb++;
    if (ev.write_hit)       seen.write_hit      = 1;
    if (ev.write_around)    seen.write_around   = 1;
  end

  reuse_ref model;

  initial begin
    int cyc;
    outcome_t exp_o;
    model = new(TS, TW, DS, DW);
    req_valid = 0;
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // reset sweep: ready must stay low for TAG_SETS cycles
    @(posedge clk);
    check(!req_ready, "ready during reset sweep");
    wait (req_ready);
    for (int n = 0; n < NREQ; n++) begin
      int a;
      bit w;
      line_t wd, exp_d;
      a = $urandom_range(NLINES - 1);
      w = ($urandom_range(99) < 25);
      wd = {16{$urandom()}};
      exp_d = gold(a);
      @(negedge clk);
      req_valid = 1;
      req = '{addr: line_addr_t'(a), write: w, wdata: wd,
             src: (n % 3 == 0) ? SRC_GPU : SRC_CPU};
      seen = '{default: 0};
      @(posedge clk);
      while (!req_ready) @(posedge clk);
      exp_o = model.access(a, w);
      @(negedge clk);
      req_valid = 0;
      cyc = 0;
      while (!rsp_valid) begin @(posedge clk); #1; cyc++; end
      check(rsp.src == req.src && rsp.write == w, "response source/kind");
      if (!w) check(rsp.rdata == exp_d, $sformatf("read data line %0d", a));
      else golden[a] = wd;
      // hit: tag read in the cycle after acceptance, data read in the next,
      // so the response is visible one clock edge after acceptance + 1
      if (exp_o.data_hit) check(cyc == 1, $sformatf("hit latency %0d", cyc));
      // wait for the controller to finish (data insertion follows the response)
      @(posedge clk);
      while (!req_ready) @(posedge clk);
      check(seen == exp_o, $sformatf("mechanisms for req %0d line %0d w=%0d", n, a, w));
      cnt_hit += exp_o.data_hit;  cnt_tins += exp_o.tag_insert;
      cnt_dins += exp_o.data_insert; cnt_tev += exp_o.tag_evict;
      cnt_tevd += exp_o.tag_evict_data; cnt_dev += exp_o.data_evict;
      cnt_wb += exp_o.dirty_wb; cnt_wh += exp_o.write_hit; cnt_wa += exp_o.write_around;
    end
    $display("hits=%0d tag_ins=%0d data_ins=%0d tag_ev=%0d tag_ev_data=%0d data_ev=%0d dirty_wb=%0d write_hit=%0d write_around=%0d",
             cnt_hit, cnt_tins, cnt_dins, cnt_tev, cnt_tevd, cnt_dev, cnt_wb, cnt_wh, cnt_wa);
    check(cnt_hit > 0 && cnt_tins > 0 && cnt_dins > 0 && cnt_tev > 0 && cnt_tevd > 0 &&
          cnt_dev > 0 && cnt_wb > 0 && cnt_wh > 0 && cnt_wa > 0, "every mechanism seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
