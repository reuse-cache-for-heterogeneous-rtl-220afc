// reuse_data_array: the data array of the reuse cache.
//
// Holds the lines that have been referenced more than once. Every entry has
// a 64-byte line, a valid bit, a dirty bit and a reverse pointer naming the
// tag entry {tag set, tag way} that points to it; the reverse pointer lets the
// controller set that tag's forward pointer to NULL when the data entry is
// replaced. The array is SETS x WAYS entries, the set being the low bits of
// the line address, with true-LRU ages per set. Default: 512 x 16 = 8192
// lines = 512 KB, half of a conventional 1 MB LLC. The reverse pointer is the
// paper's; the set-associative organisation, the dirty bit and the timing are
// this design's choices.
//
// Metadata (valid, dirty, reverse pointer) and lines sit in separate
// memories: a read returns the metadata of every way of a set, for victim
// selection, but only the line of one way.
//
// Interface and timing:
//   * After reset the metadata is cleared, one set per cycle; ready_o rises
//     after SETS cycles.
//   * rd_en_i/rd_set_i/rd_way_i: metadata of the set, its ages and the line
//     of the given way appear in the next cycle and hold until the next read.
//     victim_way_o is the first invalid way, else the LRU way.
//   * wr_en_i writes the metadata of one entry, and its line when
//     wr_line_en_i is set.
//   * touch_i/touch_way_i make a way of the set read last the most recently
//     used one.
module reuse_data_array #(
  parameter int unsigned SETS      = 512,
  parameter int unsigned WAYS      = 16,
  parameter int unsigned LINE_BITS = 512,
  parameter int unsigned TPTR_W    = 14,
  localparam int unsigned SET_W = $clog2(SETS),
  localparam int unsigned WAY_W = $clog2(WAYS)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  output logic                        ready_o,
  // read
  input  logic                        rd_en_i,
  input  logic [SET_W-1:0]            rd_set_i,
  input  logic [WAY_W-1:0]            rd_way_i,
  output logic [WAYS-1:0]             rd_valid_o,
  output logic [WAYS-1:0]             rd_dirty_o,
  output logic [WAYS-1:0][TPTR_W-1:0] rd_tptr_o,
  output logic [LINE_BITS-1:0]        rd_line_o,
  output logic [WAYS-1:0][WAY_W-1:0]  rd_ages_o,
  output logic [WAY_W-1:0]            victim_way_o,
  // write
  input  logic                        wr_en_i,
  input  logic [SET_W-1:0]            wr_set_i,
  input  logic [WAY_W-1:0]            wr_way_i,
  input  logic                        wr_valid_i,
  input  logic                        wr_dirty_i,
  input  logic [TPTR_W-1:0]           wr_tptr_i,
  input  logic                        wr_line_en_i,
  input  logic [LINE_BITS-1:0]        wr_line_i,
  // LRU update of the set read last
  input  logic                        touch_i,
  input  logic [WAY_W-1:0]            touch_way_i
);

  typedef struct packed {
    logic              valid;
    logic              dirty;
    logic [TPTR_W-1:0] tptr;  // reverse pointer {tag set, tag way}
  } data_meta_t;

  typedef data_meta_t [WAYS-1:0]      meta_row_t;
  typedef logic [WAYS-1:0][WAY_W-1:0] ages_t;

  meta_row_t            meta  [SETS];
  ages_t                ages  [SETS];
  logic [LINE_BITS-1:0] lines [SETS*WAYS];

  meta_row_t            meta_q;
  ages_t                ages_q;
  logic [LINE_BITS-1:0] line_q;
  logic [SET_W-1:0]     last_set_q;

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

  always_ff @(posedge clk) begin
    if (init_q) begin
      meta[init_set_q] <= '0;
      ages[init_set_q] <= ages_reset;
    end else begin
      if (wr_en_i)
        meta[wr_set_i][wr_way_i] <= '{valid: wr_valid_i, dirty: wr_dirty_i,
                                      tptr: wr_tptr_i};
      if (touch_i)
        ages[last_set_q] <= ages_touched;
    end
  end

  always_ff @(posedge clk)
    if (!init_q && wr_en_i && wr_line_en_i)
      lines[{wr_set_i, wr_way_i}] <= wr_line_i;

  always_ff @(posedge clk) begin
    if (rd_en_i && !init_q) begin
      meta_q     <= meta[rd_set_i];
      ages_q     <= ages[rd_set_i];
      line_q     <= lines[{rd_set_i, rd_way_i}];
      last_set_q <= rd_set_i;
    end else if (touch_i && !init_q) begin
      ages_q     <= ages_touched;
    end
  end

  always_comb begin
    for (int unsigned w = 0; w < WAYS; w++) begin
      rd_valid_o[w] = meta_q[w].valid;
      rd_dirty_o[w] = meta_q[w].dirty;
      rd_tptr_o[w]  = meta_q[w].tptr;
    end
    rd_line_o = line_q;
    rd_ages_o = ages_q;
  end

  always_comb begin
    victim_way_o = lru_way;
    for (int w = int'(WAYS) - 1; w >= 0; w--)
      if (!meta_q[w].valid)
        victim_way_o = WAY_W'(w);
  end

endmodule
