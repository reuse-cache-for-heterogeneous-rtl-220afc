// tb_reuse_data_array: checks the data array of the reuse cache.
//
// Small array (4 sets x 4 ways, 64-bit lines, 4-bit reverse pointers).
// Checks the reset sweep (ready low for exactly SETS cycles, all entries
// invalid), then random metadata/line writes, reads and LRU touches against
// a model: a read returns, one cycle later, the metadata (valid, dirty,
// reverse pointer) of every way, the line of the addressed way and the ages;
// a metadata-only write must keep the line; the victim is the first invalid
// way or else the oldest.
module tb_reuse_data_array;
  localparam int SETS = 4, WAYS = 4, LB = 64, TPTR_W = 4;
  localparam int SET_W = $clog2(SETS), WAY_W = $clog2(WAYS);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ready;
  logic rd_en; logic [SET_W-1:0] rd_set; logic [WAY_W-1:0] rd_way;
  logic [WAYS-1:0] rd_valid, rd_dirty;
  logic [WAYS-1:0][TPTR_W-1:0] rd_tptr;
  logic [LB-1:0] rd_line;
  logic [WAYS-1:0][WAY_W-1:0] rd_ages;
  logic [WAY_W-1:0] victim;
  logic wr_en; logic [SET_W-1:0] wr_set; logic [WAY_W-1:0] wr_way;
  logic wr_valid, wr_dirty, wr_line_en; logic [TPTR_W-1:0] wr_tptr; logic [LB-1:0] wr_line;
  logic touch; logic [WAY_W-1:0] touch_way;

  reuse_data_array #(.SETS(SETS), .WAYS(WAYS), .LINE_BITS(LB), .TPTR_W(TPTR_W)) dut (
    .clk, .rst_n, .ready_o(ready),
    .rd_en_i(rd_en), .rd_set_i(rd_set), .rd_way_i(rd_way),
    .rd_valid_o(rd_valid), .rd_dirty_o(rd_dirty), .rd_tptr_o(rd_tptr),
    .rd_line_o(rd_line), .rd_ages_o(rd_ages), .victim_way_o(victim),
    .wr_en_i(wr_en), .wr_set_i(wr_set), .wr_way_i(wr_way), .wr_valid_i(wr_valid),
    .wr_dirty_i(wr_dirty), .wr_tptr_i(wr_tptr), .wr_line_en_i(wr_line_en),
    .wr_line_i(wr_line), .touch_i(touch), .touch_way_i(touch_way)
  );

  bit m_valid [SETS][WAYS], m_dirty [SETS][WAYS], m_written [SETS][WAYS];
  int m_tptr [SETS][WAYS], m_age [SETS][WAYS];
  logic [LB-1:0] m_line [SETS][WAYS];
  int checks = 0, failures = 0;
  int last_set = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    int cyc;
    rd_en = 0; wr_en = 0; touch = 0; rd_set = '0; rd_way = '0;
    wr_set = '0; wr_way = '0; wr_valid = 0; wr_dirty = 0; wr_line_en = 0;
    wr_tptr = '0; wr_line = '0; touch_way = '0;
    for (int s = 0; s < SETS; s++)
      for (int w = 0; w < WAYS; w++) begin
        m_valid[s][w] = 0; m_dirty[s][w] = 0; m_written[s][w] = 0; m_age[s][w] = w;
        m_tptr[s][w] = 0; m_line[s][w] = '0;
      end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    cyc = 0;
    while (!ready) begin @(posedge clk); #1; cyc++; end
    check(cyc == SETS, $sformatf("reset sweep took %0d cycles", cyc));
    for (int n = 0; n < 6000; n++) begin
      int op, s, w;
      op = $urandom_range(2);
      s = $urandom_range(SETS - 1);
      w = $urandom_range(WAYS - 1);
      @(negedge clk);
      rd_en = 0; wr_en = 0; touch = 0;
      if (op == 0) begin
        wr_en = 1; wr_set = SET_W'(s); wr_way = WAY_W'(w);
        wr_valid = ($urandom_range(3) != 0); wr_dirty = $urandom_range(1);
        wr_tptr = TPTR_W'($urandom()); wr_line_en = $urandom_range(1);
        wr_line = {$urandom(), $urandom()};
        m_valid[s][w] = wr_valid; m_dirty[s][w] = wr_dirty; m_tptr[s][w] = wr_tptr;
        if (wr_line_en) begin m_line[s][w] = wr_line; m_written[s][w] = 1; end
      end else if (op == 1) begin
        int exp_victim, oldest;
        rd_en = 1; rd_set = SET_W'(s); rd_way = WAY_W'(w);
        last_set = s;
        @(negedge clk);
        rd_en = 0;
        exp_victim = -1;
        for (int k = WAYS - 1; k >= 0; k--) if (!m_valid[s][k]) exp_victim = k;
        for (int k = 0; k < WAYS; k++) if (m_age[s][k] == WAYS - 1) oldest = k;
        if (exp_victim < 0) exp_victim = oldest;
        for (int k = 0; k < WAYS; k++) begin
          check(rd_valid[k] == m_valid[s][k], $sformatf("valid s%0d w%0d", s, k));
          check(rd_dirty[k] == m_dirty[s][k], $sformatf("dirty s%0d w%0d", s, k));
          check(int'(rd_tptr[k]) == m_tptr[s][k], $sformatf("tptr s%0d w%0d", s, k));
          check(int'(rd_ages[k]) == m_age[s][k], $sformatf("age s%0d w%0d", s, k));
        end
        if (m_written[s][w]) check(rd_line == m_line[s][w], $sformatf("line s%0d w%0d", s, w));
        check(int'(victim) == exp_victim, $sformatf("victim s%0d", s));
      end else begin
        int a;
        touch = 1; touch_way = WAY_W'(w);
        a = m_age[last_set][w];
        for (int k = 0; k < WAYS; k++) if (m_age[last_set][k] < a) m_age[last_set][k]++;
        m_age[last_set][w] = 0;
      end
    end
    @(negedge clk);
    rd_en = 0; wr_en = 0; touch = 0;
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
