// tb_lru_update: checks the LRU age update and victim choice of lru_update.
//
// Starting from the reset ages (age = way index), it applies 5000 random
// touches and compares the ages and the LRU way after every step with a
// model that keeps the ways in recency order as a list: a touch moves the
// way to the front, the victim is the last element.
module tb_lru_update;
  localparam int WAYS = 16;
  localparam int AW = $clog2(WAYS);

  logic [WAYS-1:0][AW-1:0] ages, ages_n;
  logic [AW-1:0] touch_way, lru_way;
  int order [$];   // most recent first
  int checks = 0, failures = 0;

  lru_update #(.WAYS(WAYS)) dut (
    .ages_i(ages), .touch_way_i(touch_way), .ages_o(ages_n), .lru_way_o(lru_way)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int w = 0; w < WAYS; w++) begin
      ages[w] = AW'(w);
      order.push_back(w);
    end
    for (int n = 0; n < 5000; n++) begin
      int t;
      t = (n % 7 == 0) ? order[$] : $urandom_range(WAYS - 1);
      #1;
      check(int'(lru_way) == order[$], $sformatf("victim step %0d", n));
      touch_way = AW'(t);
      #1;
      foreach (order[i]) if (order[i] == t) begin order.delete(i); break; end
      order.push_front(t);
      for (int i = 0; i < WAYS; i++)
        check(int'(ages_n[order[i]]) == i, $sformatf("age of way %0d step %0d", order[i], n));
      ages = ages_n;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
