// reuse_llc: the reuse cache controller with its tag and data arrays.
//
// A reuse cache stores a line's data only once the line has been referenced
// a second time. Its tag array (reuse_tag_array) is decoupled from, and
// larger than, its data array (reuse_data_array): tags point forward to data,
// data points back to its tag. Following the paper, a read request is served
// as follows:
//   * tag hit, pointer set      -> data hit, the line is read from the LLC;
//   * tag miss                  -> first miss: the line is read from DRAM and
//                                  sent to the L2; only the tag is inserted,
//                                  with a NULL pointer;
//   * tag hit, pointer NULL     -> reuse detected: the line is read from DRAM,
//                                  sent to the L2, written into the data
//                                  array and the tag's pointer updated.
// Replacement works on the two arrays separately. A replaced tag whose
// pointer is set takes its data entry with it. A replaced data entry is found
// from its reverse pointer, and that tag's pointer is set to NULL.
//
// This design's own choices, where the paper is silent: the controller serves
// one request at a time; the tag is looked up before DRAM is read (the paper
// describes the look-up after the fill; the outcome is the same); a
// write-back from an L2 updates the line and marks it dirty if its data is
// present, otherwise it goes straight to DRAM and leaves the tags alone;
// dirty lines removed by either eviction are written to DRAM; the data set is
// the low bits of the line address; victims are the first invalid way, else
// the LRU way.
//
// Interface and timing: req_ready_o is high only in the idle state once both
// arrays have finished their reset sweep (TAG_SETS cycles). On a data
// hit rsp_valid_o is high in the second cycle after the request is accepted
// (one cycle reads the tag set, the next reads the line and answers). A miss issues one DRAM read and answers in the cycle DRAM data
// returns. DRAM requests use a valid/ready handshake; DRAM writes are posted,
// reads return in order on mem_rsp_valid_i. rsp_valid_o is a one-cycle pulse
// the L2 must take. events_o pulses once for each mechanism that happens.
module reuse_llc
  import reuse_llc_pkg::*;
#(
  parameter int unsigned TAG_SETS  = 1024,
  parameter int unsigned TAG_WAYS  = 16,
  parameter int unsigned DATA_SETS = 512,
  parameter int unsigned DATA_WAYS = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // from the L2 caches (through the arbiter)
  input  logic        req_valid_i,
  output logic        req_ready_o,
  input  llc_req_t    req_i,
  output logic        rsp_valid_o,
  output llc_rsp_t    rsp_o,
  // to DRAM
  output logic        mem_req_valid_o,
  input  logic        mem_req_ready_i,
  output mem_req_t    mem_req_o,
  input  logic        mem_rsp_valid_i,
  input  line_t       mem_rsp_data_i,
  // mechanism pulses
  output llc_events_t events_o
);

  localparam int unsigned TSET_W = $clog2(TAG_SETS);
  localparam int unsigned TWAY_W = $clog2(TAG_WAYS);
  localparam int unsigned DSET_W = $clog2(DATA_SETS);
  localparam int unsigned DWAY_W = $clog2(DATA_WAYS);
  localparam int unsigned TAG_W  = LINE_ADDR_W - TSET_W;
  localparam int unsigned DPTR_W = DSET_W + DWAY_W;
  localparam int unsigned TPTR_W = TSET_W + TWAY_W;

  typedef enum logic [3:0] {
    S_IDLE,        // wait for a request
    S_TLOOK,       // tag set available: classify the request
    S_DHIT,        // data line available: answer a hit / apply a write
    S_TEV_RD,      // replaced tag's data entry available: remove it
    S_TEV_WB,      // write its dirty line to DRAM
    S_MISS_RD,     // first miss: request the line from DRAM
    S_MISS_WAIT,   // first miss: wait for DRAM, forward to the L2
    S_REUSE_RD,    // tag-only hit: request the line from DRAM
    S_REUSE_WAIT,  // tag-only hit: wait for DRAM, forward to the L2
    S_DSEL,        // data set available: choose the data victim
    S_DEV,         // victim's owner tag available: set its pointer to NULL
    S_DEV_WB,      // write the victim's dirty line to DRAM
    S_DINS,        // insert the line, point the tag at it
    S_WAROUND      // write that misses the data array: send to DRAM
  } state_e;

  state_e state_q, state_d;

  // ---------------------------------------------------------------- arrays
  logic                          t_ready, d_ready;
  logic                          t_rd_en;
  logic [TSET_W-1:0]             t_rd_set;
  logic [TAG_WAYS-1:0]           t_valid;
  logic [TAG_WAYS-1:0][TAG_W-1:0]  t_tag;
  logic [TAG_WAYS-1:0]           t_dpv;
  logic [TAG_WAYS-1:0][DPTR_W-1:0] t_dptr;
  logic [TWAY_W-1:0]             t_victim;
  logic                          t_wr_en;
  logic [TSET_W-1:0]             t_wr_set;
  logic [TWAY_W-1:0]             t_wr_way;
  logic                          t_wr_valid;
  logic [TAG_W-1:0]              t_wr_tag;
  logic                          t_wr_dpv;
  logic [DPTR_W-1:0]             t_wr_dptr;
  logic                          t_touch;
  logic [TWAY_W-1:0]             t_touch_way;

  logic                          d_rd_en;
  logic [DSET_W-1:0]             d_rd_set;
  logic [DWAY_W-1:0]             d_rd_way;
  logic [DATA_WAYS-1:0]          d_valid;
  logic [DATA_WAYS-1:0]          d_dirty;
  logic [DATA_WAYS-1:0][TPTR_W-1:0] d_tptr;
  line_t                         d_line;
  logic [DWAY_W-1:0]             d_victim;
  logic                          d_wr_en;
  logic [DSET_W-1:0]             d_wr_set;
  logic [DWAY_W-1:0]             d_wr_way;
  logic                          d_wr_valid;
  logic                          d_wr_dirty;
  logic [TPTR_W-1:0]             d_wr_tptr;
  logic                          d_wr_line_en;
  line_t                         d_wr_line;
  logic                          d_touch;
  logic [DWAY_W-1:0]             d_touch_way;

  reuse_tag_array #(
    .SETS(TAG_SETS), .WAYS(TAG_WAYS), .TAG_W(TAG_W), .DPTR_W(DPTR_W)
  ) u_tags (
    .clk, .rst_n, .ready_o(t_ready),
    .rd_en_i(t_rd_en), .rd_set_i(t_rd_set),
    .rd_valid_o(t_valid), .rd_tag_o(t_tag), .rd_dpv_o(t_dpv),
    .rd_dptr_o(t_dptr), .rd_ages_o(), .victim_way_o(t_victim),
    .wr_en_i(t_wr_en), .wr_set_i(t_wr_set), .wr_way_i(t_wr_way),
    .wr_valid_i(t_wr_valid), .wr_tag_i(t_wr_tag), .wr_dpv_i(t_wr_dpv),
    .wr_dptr_i(t_wr_dptr),
    .touch_i(t_touch), .touch_way_i(t_touch_way)
  );

  reuse_data_array #(
    .SETS(DATA_SETS), .WAYS(DATA_WAYS), .LINE_BITS(LINE_BITS), .TPTR_W(TPTR_W)
  ) u_data (
    .clk, .rst_n, .ready_o(d_ready),
    .rd_en_i(d_rd_en), .rd_set_i(d_rd_set), .rd_way_i(d_rd_way),
    .rd_valid_o(d_valid), .rd_dirty_o(d_dirty), .rd_tptr_o(d_tptr),
    .rd_line_o(d_line), .rd_ages_o(), .victim_way_o(d_victim),
    .wr_en_i(d_wr_en), .wr_set_i(d_wr_set), .wr_way_i(d_wr_way),
    .wr_valid_i(d_wr_valid), .wr_dirty_i(d_wr_dirty), .wr_tptr_i(d_wr_tptr),
    .wr_line_en_i(d_wr_line_en), .wr_line_i(d_wr_line),
    .touch_i(d_touch), .touch_way_i(d_touch_way)
  );

  // ------------------------------------------------------- request fields
  llc_req_t          req_q;
  logic [TSET_W-1:0] tset;
  logic [TAG_W-1:0]  tag;
  logic [DSET_W-1:0] dset;

  assign tset = req_q.addr[TSET_W-1:0];
  assign tag  = req_q.addr[LINE_ADDR_W-1:TSET_W];
  assign dset = req_q.addr[DSET_W-1:0];

  // ----------------------------------------------------------- tag compare
  logic [TAG_WAYS-1:0] hit_vec;
  logic                tag_hit;
  logic [TWAY_W-1:0]   hit_way;

  always_comb begin
    hit_way = '0;
    for (int unsigned w = 0; w < TAG_WAYS; w++) begin
      hit_vec[w] = t_valid[w] && (t_tag[w] == tag);
      if (hit_vec[w]) hit_way = TWAY_W'(w);
    end
    tag_hit = |hit_vec;
  end

  // ------------------------------------------------------------ registers
  logic [TWAY_W-1:0] tway_q;   // tag way of the line being served
  logic [DPTR_W-1:0] dptr_q;   // data entry being read / removed
  logic [DWAY_W-1:0] dway_q;   // data way chosen for insertion
  logic [TPTR_W-1:0] rev_q;    // reverse pointer of the data victim
  logic              dirty_q;  // the data victim is dirty
  line_addr_t        ev_addr_q;// line address of a removed tag's data
  line_t             fill_q;   // line fetched from DRAM for insertion
  mem_req_t          wb_q;     // pending DRAM write

  logic [TSET_W-1:0] rev_set;
  logic [TWAY_W-1:0] rev_way;
  assign rev_set = rev_q[TPTR_W-1:TWAY_W];
  assign rev_way = rev_q[TWAY_W-1:0];

  // --------------------------------------------------------------- control
  always_comb begin
    state_d         = state_q;
    req_ready_o     = 1'b0;
    rsp_valid_o     = 1'b0;
    rsp_o           = '{rdata: d_line, write: req_q.write, src: req_q.src};
    mem_req_valid_o = 1'b0;
    mem_req_o       = '{write: 1'b0, addr: req_q.addr, wdata: req_q.wdata};
    events_o        = '0;
    events_o.src    = req_q.src;

    t_rd_en = 1'b0;  t_rd_set = req_i.addr[TSET_W-1:0];
    t_wr_en = 1'b0;  t_wr_set = tset;  t_wr_way = tway_q;
    t_wr_valid = 1'b1; t_wr_tag = tag; t_wr_dpv = 1'b0; t_wr_dptr = '0;
    t_touch = 1'b0;  t_touch_way = hit_way;

    d_rd_en = 1'b0;  d_rd_set = dptr_q[DPTR_W-1:DWAY_W]; d_rd_way = dptr_q[DWAY_W-1:0];
    d_wr_en = 1'b0;  d_wr_set = dptr_q[DPTR_W-1:DWAY_W]; d_wr_way = dptr_q[DWAY_W-1:0];
    d_wr_valid = 1'b0; d_wr_dirty = 1'b0; d_wr_tptr = '0;
    d_wr_line_en = 1'b0; d_wr_line = req_q.wdata;
    d_touch = 1'b0;  d_touch_way = dptr_q[DWAY_W-1:0];

    unique case (state_q)
      S_IDLE: begin
        req_ready_o = t_ready && d_ready;
        if (req_valid_i && req_ready_o) begin
          t_rd_en = 1'b1;
          state_d = S_TLOOK;
        end
      end

      S_TLOOK: begin
        if (tag_hit && t_dpv[hit_way]) begin
          // data present: read it (hit, or write-back into the LLC)
          t_touch = 1'b1;
          d_rd_en = 1'b1;
          d_rd_set = t_dptr[hit_way][DPTR_W-1:DWAY_W];
          d_rd_way = t_dptr[hit_way][DWAY_W-1:0];
          state_d = S_DHIT;
        end else if (req_q.write) begin
          state_d = S_WAROUND;
        end else if (tag_hit) begin
          // second reference to a tag-only line
          t_touch = 1'b1;
          state_d = S_REUSE_RD;
        end else begin
          // first reference: insert the tag with a NULL pointer
          t_wr_en  = 1'b1;
          t_wr_way = t_victim;
          t_touch  = 1'b1;
          t_touch_way = t_victim;
          events_o.tag_insert = 1'b1;
          events_o.tag_evict  = t_valid[t_victim];
          if (t_valid[t_victim] && t_dpv[t_victim]) begin
            // the replaced tag owns a data entry: remove it as well
            d_rd_en  = 1'b1;
            d_rd_set = t_dptr[t_victim][DPTR_W-1:DWAY_W];
            d_rd_way = t_dptr[t_victim][DWAY_W-1:0];
            state_d  = S_TEV_RD;
          end else begin
            state_d  = S_MISS_RD;
          end
        end
      end

      S_DHIT: begin
        d_touch     = 1'b1;
        rsp_valid_o = 1'b1;
        if (req_q.write) begin
          d_wr_en      = 1'b1;
          d_wr_valid   = 1'b1;
          d_wr_dirty   = 1'b1;
          d_wr_tptr    = d_tptr[dptr_q[DWAY_W-1:0]];
          d_wr_line_en = 1'b1;
          events_o.write_hit = 1'b1;
        end else begin
          events_o.data_hit = 1'b1;
        end
        state_d = S_IDLE;
      end

      S_TEV_RD: begin
        d_wr_en = 1'b1;   // invalidate the data entry
        events_o.tag_evict_data = 1'b1;
        state_d = d_dirty[dptr_q[DWAY_W-1:0]] ? S_TEV_WB : S_MISS_RD;
      end

      S_TEV_WB, S_DEV_WB: begin
        mem_req_valid_o = 1'b1;
        mem_req_o       = wb_q;
        if (mem_req_ready_i) begin
          events_o.dirty_writeback = 1'b1;
          state_d = (state_q == S_TEV_WB) ? S_MISS_RD : S_DINS;
        end
      end

      S_MISS_RD, S_REUSE_RD: begin
        mem_req_valid_o = 1'b1;
        if (mem_req_ready_i)
          state_d = (state_q == S_MISS_RD) ? S_MISS_WAIT : S_REUSE_WAIT;
      end

      S_MISS_WAIT: begin
        rsp_o.rdata = mem_rsp_data_i;
        if (mem_rsp_valid_i) begin
          rsp_valid_o = 1'b1;
          state_d     = S_IDLE;
        end
      end

      S_REUSE_WAIT: begin
        rsp_o.rdata = mem_rsp_data_i;
        d_rd_set = dset;
        d_rd_way = '0;
        if (mem_rsp_valid_i) begin
          rsp_valid_o = 1'b1;   // forward to the L2 while inserting
          d_rd_en     = 1'b1;   // read the data set's metadata
          state_d     = S_DSEL;
        end
      end

      S_DSEL: begin
        d_rd_set = dset;
        d_rd_way = d_victim;
        t_rd_set = d_tptr[d_victim][TPTR_W-1:TWAY_W];
        if (d_valid[d_victim]) begin
          d_rd_en = 1'b1;       // the victim's line, in case it is dirty
          t_rd_en = 1'b1;       // the set of the victim's owner tag
          state_d = S_DEV;
        end else begin
          state_d = S_DINS;
        end
      end

      S_DEV: begin
        // follow the reverse pointer: set the owner tag's pointer to NULL
        t_wr_en    = 1'b1;
        t_wr_set   = rev_set;
        t_wr_way   = rev_way;
        t_wr_valid = t_valid[rev_way];
        t_wr_tag   = t_tag[rev_way];
        t_wr_dpv   = 1'b0;
        events_o.data_evict = 1'b1;
        state_d = dirty_q ? S_DEV_WB : S_DINS;
      end

      S_DINS: begin
        d_wr_en      = 1'b1;
        d_wr_set     = dset;
        d_wr_way     = dway_q;
        d_wr_valid   = 1'b1;
        d_wr_tptr    = {tset, tway_q};
        d_wr_line_en = 1'b1;
        d_wr_line    = fill_q;
        d_touch      = 1'b1;
        d_touch_way  = dway_q;
        t_wr_en      = 1'b1;
        t_wr_dpv     = 1'b1;
        t_wr_dptr    = {dset, dway_q};
        events_o.data_insert = 1'b1;
        state_d = S_IDLE;
      end

      S_WAROUND: begin
        mem_req_valid_o = 1'b1;
        mem_req_o.write = 1'b1;
        if (mem_req_ready_i) begin
          rsp_valid_o = 1'b1;
          events_o.write_around = 1'b1;
          state_d = S_IDLE;
        end
      end

      default: state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state_q <= S_IDLE;
    else        state_q <= state_d;
  end

  always_ff @(posedge clk) begin
    unique case (state_q)
      S_IDLE:
        if (req_valid_i && req_ready_o) req_q <= req_i;
      S_TLOOK: begin
        tway_q <= tag_hit ? hit_way : t_victim;
        dptr_q <= tag_hit ? t_dptr[hit_way] : t_dptr[t_victim];
        ev_addr_q <= {t_tag[t_victim], tset};
      end
      S_TEV_RD:
        wb_q <= '{write: 1'b1, addr: ev_addr_q, wdata: d_line};
      S_REUSE_WAIT:
        if (mem_rsp_valid_i) fill_q <= mem_rsp_data_i;
      S_DSEL: begin
        dway_q  <= d_victim;
        rev_q   <= d_tptr[d_victim];
        dirty_q <= d_dirty[d_victim];
      end
      S_DEV:
        wb_q <= '{write: 1'b1, addr: {t_tag[rev_way], rev_set}, wdata: d_line};
      default: ;
    endcase
  end

  // ------------------------------------------------------------ assertions
  // DRAM read data is only expected while waiting for it.
  a_mem_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid_i |-> (state_q == S_MISS_WAIT || state_q == S_REUSE_WAIT));
  // A data entry removed with its tag must point back at that tag.
  a_tag_evict_backptr: assert property (@(posedge clk) disable iff (!rst_n)
    state_q == S_TEV_RD |-> d_valid[dptr_q[DWAY_W-1:0]] &&
                            d_tptr[dptr_q[DWAY_W-1:0]] == {tset, tway_q});
  // The owner of a replaced data entry must point forward at it.
  a_data_evict_fwdptr: assert property (@(posedge clk) disable iff (!rst_n)
    state_q == S_DEV |-> t_valid[rev_way] && t_dpv[rev_way] &&
                         t_dptr[rev_way] == {dset, dway_q});
  // A tag matches in at most one way.
  a_single_hit: assert property (@(posedge clk) disable iff (!rst_n)
    state_q == S_TLOOK |-> $onehot0(hit_vec));

endmodule
