// reuse_tag_array: the tag array of the reuse cache.
//
// The reuse cache keeps its tags apart from its data. Every tag entry holds
// the address tag and a forward pointer into the data array; the pointer is
// NULL (dpv = 0) while the line is "tag only", i.e. it has been seen once but
// its data is not stored. The array is set-associative: SETS sets of WAYS
// entries, with true-LRU ages per set (lru_update). Default size: 1024 sets x
// 16 ways = 16384 tags, as many as a conventional 1 MB cache of 64-byte lines
// has; the forward pointer indexes the 8192-line data array. The tag/pointer
// entry follows the paper's design; valid bits, one-cycle synchronous reads
// and the reset sweep are this design's choices.
//
// Interface and timing:
//   * After reset the array clears itself, one set per cycle; ready_o rises
//     after SETS cycles. Nothing else may be issued before.
//   * rd_en_i/rd_set_i: the whole set (entries, ages) appears on rd_*_o in the
//     next cycle and stays until the next read. victim_way_o is the first
//     invalid way of that set, else its LRU way.
//   * wr_en_i writes one entry at (wr_set_i, wr_way_i) at the clock edge.
//   * touch_i/touch_way_i make a way of the set read last the most recently
//     used one. A read of the same set in the same cycle as a write returns
//     the old contents.
module reuse_tag_array #(
  parameter int unsigned SETS   = 1024,
  parameter int unsigned WAYS   = 16,
  parameter int unsigned TAG_W  = 15,
  parameter int unsigned DPTR_W = 13,
  localparam int unsigned SET_W = $clog2(SETS),
  localparam int unsigned WAY_W = $clog2(WAYS)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  output logic                        ready_o,
  // read a set
  input  logic                        rd_en_i,
  input  logic [SET_W-1:0]            rd_set_i,
  output logic [WAYS-1:0]             rd_valid_o,
  output logic [WAYS-1:0][TAG_W-1:0]  rd_tag_o,
  output logic [WAYS-1:0]             rd_dpv_o,
  output logic [WAYS-1:0][DPTR_W-1:0] rd_dptr_o,
  output logic [WAYS-1:0][WAY_W-1:0]  rd_ages_o,
  output logic [WAY_W-1:0]            victim_way_o,
  // write one entry
  input  logic                        wr_en_i,
  input  logic [SET_W-1:0]            wr_set_i,
  input  logic [WAY_W-1:0]            wr_way_i,
  input  logic                        wr_valid_i,
  input  logic [TAG_W-1:0]            wr_tag_i,
  input  logic                        wr_dpv_i,
  input  logic [DPTR_W-1:0]           wr_dptr_i,
  // LRU update of the set read last
  input  logic                        touch_i,
  input  logic [WAY_W-1:0]            touch_way_i
);

  typedef struct packed {
    logic              valid;
    logic [TAG_W-1:0]  tag;
    logic              dpv;   // forward pointer is not NULL
    logic [DPTR_W-1:0] dptr;  // data array index {data set, data way}
  } tag_entry_t;

  typedef tag_entry_t [WAYS-1:0]  tag_row_t;
  typedef logic [WAYS-1:0][WAY_W-1:0] ages_t;

  tag_row_t   entries [SETS];
  ages_t      ages    [SETS];

  tag_row_t   row_q;
  ages_t      ages_q;
  logic [SET_W-1:0] last_set_q;

  logic             init_q;
  logic [SET_W-1:0] init_set_q;

  ages_t            ages_touched;
  logic [WAY_W-1:0] lru_way;
  ages_t            ages_reset;

  always_comb
    for (int unsigned w = 0; w < WAYS; w++)
      ages_reset[w] = WAY_W'(w);

  lru_update #(.WAYS(WAYS)) u_lru (
    .ages_i     (ages_q),
    .touch_way_i(touch_way_i),
    .ages_o     (ages_touched),
    .lru_way_o  (lru_way)
  );

  // reset sweep
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_q     <= 1'b1;
      init_set_q <= '0;
    end else if (init_q) begin
      init_set_q <= init_set_q + SET_W'(1);
      if (32'(init_set_q) == SETS - 1)
        init_q <= 1'b0;
    end
  end

  assign ready_o = !init_q;

  // storage: entry memory with a per-way write, ages memory
  always_ff @(posedge clk) begin
    if (init_q) begin
      entries[init_set_q] <= '0;
      ages[init_set_q]    <= ages_reset;
    end else begin
      if (wr_en_i)
        entries[wr_set_i][wr_way_i] <= '{valid: wr_valid_i, tag: wr_tag_i,
                                         dpv: wr_dpv_i, dptr: wr_dptr_i};
      if (touch_i)
        ages[last_set_q] <= ages_touched;
    end
  end

  // synchronous read of a whole set
  always_ff @(posedge clk) begin
    if (rd_en_i && !init_q) begin
      row_q      <= entries[rd_set_i];
      ages_q     <= ages[rd_set_i];
      last_set_q <= rd_set_i;
    end else if (touch_i && !init_q) begin
      ages_q     <= ages_touched;
    end
  end

  always_comb begin
    for (int unsigned w = 0; w < WAYS; w++) begin
      rd_valid_o[w] = row_q[w].valid;
      rd_tag_o[w]   = row_q[w].tag;
      rd_dpv_o[w]   = row_q[w].dpv;
      rd_dptr_o[w]  = row_q[w].dptr;
    end
    rd_ages_o = ages_q;
  end

  // victim: the first invalid way, else the LRU way
  always_comb begin
    victim_way_o = lru_way;
    for (int w = int'(WAYS) - 1; w >= 0; w--)
      if (!row_q[w].valid)
        victim_way_o = WAY_W'(w);
  end

endmodule
