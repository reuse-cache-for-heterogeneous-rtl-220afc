// tb_reuse_tag_array: checks the tag array of the reuse cache.
//
// Small array (8 sets x 4 ways). Checks that the reset sweep holds ready low
// for exactly SETS cycles and leaves every entry invalid, then runs random
// entry writes, set reads and LRU touches against a model: every read must
// return the modelled entries (valid, tag, forward pointer and its NULL bit)
// and ages one cycle later, and the victim must be the first invalid way or
// else the oldest way.
module tb_reuse_tag_array;
  localparam int SETS = 8, WAYS = 4, TAG_W = 5, DPTR_W = 4;
  localparam int SET_W = $clog2(SETS), WAY_W = $clog2(WAYS);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ready;
  logic rd_en; logic [SET_W-1:0] rd_set;
  logic [WAYS-1:0] rd_valid, rd_dpv;
  logic [WAYS-1:0][TAG_W-1:0] rd_tag;
  logic [WAYS-1:0][DPTR_W-1:0] rd_dptr;
  logic [WAYS-1:0][WAY_W-1:0] rd_ages;
  logic [WAY_W-1:0] victim;
  logic wr_en; logic [SET_W-1:0] wr_set; logic [WAY_W-1:0] wr_way;
  logic wr_valid, wr_dpv; logic [TAG_W-1:0] wr_tag; logic [DPTR_W-1:0] wr_dptr;
  logic touch; logic [WAY_W-1:0] touch_way;

  reuse_tag_array #(.SETS(SETS), .WAYS(WAYS), .TAG_W(TAG_W), .DPTR_W(DPTR_W)) dut (
    .clk, .rst_n, .ready_o(ready),
    .rd_en_i(rd_en), .rd_set_i(rd_set), .rd_valid_o(rd_valid), .rd_tag_o(rd_tag),
    .rd_dpv_o(rd_dpv), .rd_dptr_o(rd_dptr), .rd_ages_o(rd_ages), .victim_way_o(victim),
    .wr_en_i(wr_en), .wr_set_i(wr_set), .wr_way_i(wr_way), .wr_valid_i(wr_valid),
    .wr_tag_i(wr_tag), .wr_dpv_i(wr_dpv), .wr_dptr_i(wr_dptr),
    .touch_i(touch), .touch_way_i(touch_way)
  );

  int m_valid [SETS][WAYS], m_tag [SETS][WAYS], m_dpv [SETS][WAYS], m_dptr [SETS][WAYS];
  int m_age [SETS][WAYS];
  int checks = 0, failures = 0;
  int last_set = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic compare(int s);
    int exp_victim, oldest;
    exp_victim = -1;
    for (int w = WAYS - 1; w >= 0; w--) if (!m_valid[s][w]) exp_victim = w;
    for (int w = 0; w < WAYS; w++) if (m_age[s][w] == WAYS - 1) oldest = w;
    if (exp_victim < 0) exp_victim = oldest;
    for (int w = 0; w < WAYS; w++) begin
      check(rd_valid[w] == m_valid[s][w][0], $sformatf("valid s%0d w%0d", s, w));
      if (m_valid[s][w] != 0) begin
        check(int'(rd_tag[w]) == m_tag[s][w], $sformatf("tag s%0d w%0d", s, w));
        check(rd_dpv[w] == m_dpv[s][w][0], $sformatf("dpv s%0d w%0d", s, w));
        if (m_dpv[s][w] != 0)
          check(int'(rd_dptr[w]) == m_dptr[s][w], $sformatf("dptr s%0d w%0d", s, w));
      end
      check(int'(rd_ages[w]) == m_age[s][w], $sformatf("age s%0d w%0d", s, w));
    end
    check(int'(victim) == exp_victim, $sformatf("victim s%0d", s));
  endtask

  initial begin
    int cyc;
    rd_en = 0; wr_en = 0; touch = 0;
    rd_set = '0; wr_set = '0; wr_way = '0; wr_valid = 0; wr_tag = '0; wr_dpv = 0;
    wr_dptr = '0; touch_way = '0;
    for (int s = 0; s < SETS; s++)
      for (int w = 0; w < WAYS; w++) begin
        m_valid[s][w] = 0; m_age[s][w] = w; m_tag[s][w] = 0; m_dpv[s][w] = 0;
        m_dptr[s][w] = 0;
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
        wr_valid = ($urandom_range(3) != 0); wr_tag = TAG_W'($urandom());
        wr_dpv = $urandom_range(1); wr_dptr = DPTR_W'($urandom());
        m_valid[s][w] = wr_valid; m_tag[s][w] = wr_tag; m_dpv[s][w] = wr_dpv;
        m_dptr[s][w] = wr_dptr;
      end else if (op == 1) begin
        rd_en = 1; rd_set = SET_W'(s);
        last_set = s;
        @(negedge clk);
        rd_en = 0;
        compare(s);
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
