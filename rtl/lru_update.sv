// lru_update: true-LRU bookkeeping for one cache set.
//
// Each way of a set carries an age of log2(WAYS) bits; the ages of a set are
// always a permutation of 0..WAYS-1, 0 being the most recently used way.
// Touching a way gives it age 0 and ages by one every way that was younger
// than it; the others keep their age. The victim is the way whose age is the
// largest. The LLC uses LRU replacement as in the evaluated system; the age
// encoding is this design's choice.
//
// Purely combinational: ages_o and lru_way_o follow the inputs in the same
// cycle.
module lru_update #(
  parameter int unsigned WAYS = 16,
  localparam int unsigned AW = $clog2(WAYS)
) (
  input  logic [WAYS-1:0][AW-1:0] ages_i,
  input  logic [AW-1:0]           touch_way_i,
  output logic [WAYS-1:0][AW-1:0] ages_o,
  output logic [AW-1:0]           lru_way_o
);

  logic [AW-1:0] touched_age;

  always_comb begin
    touched_age = ages_i[touch_way_i];
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (w == 32'(touch_way_i))
        ages_o[w] = '0;
      else if (ages_i[w] < touched_age)
        ages_o[w] = ages_i[w] + AW'(1);
      else
        ages_o[w] = ages_i[w];
    end
  end

  always_comb begin
    lru_way_o = '0;
    for (int unsigned w = 1; w < WAYS; w++)
      if (ages_i[w] > ages_i[lru_way_o])
        lru_way_o = AW'(w);
  end

endmodule
