// reuse_llc_pkg: types and constants shared by the reuse last-level cache.
//
// The shared last-level cache (LLC) of the CPU-GPU system sees 31-bit
// physical byte addresses (a 2 GB memory) and 64-byte lines, so requests and
// DRAM transfers carry a 25-bit line address and a 512-bit line. The line
// size and memory size follow the evaluated system; the request, response,
// DRAM and event bundles are this design's own choice of interface.
package reuse_llc_pkg;

  localparam int unsigned ADDR_W      = 31;                 // 2 GB of DRAM
  localparam int unsigned LINE_BYTES  = 64;
  localparam int unsigned OFFSET_W    = $clog2(LINE_BYTES); // 6
  localparam int unsigned LINE_ADDR_W = ADDR_W - OFFSET_W;  // 25
  localparam int unsigned LINE_BITS   = LINE_BYTES * 8;     // 512

  typedef logic [LINE_ADDR_W-1:0] line_addr_t;
  typedef logic [LINE_BITS-1:0]   line_t;

  // Which private L2 a request came from.
  typedef enum logic {
    SRC_CPU = 1'b0,
    SRC_GPU = 1'b1
  } src_e;

  // Request from an L2: a line read, or a line write-back when write = 1.
  typedef struct packed {
    line_addr_t addr;
    logic       write;
    line_t      wdata;
    src_e       src;
  } llc_req_t;

  // Response to an L2: read data, or an acknowledgement of a write.
  typedef struct packed {
    line_t rdata;
    logic  write;
    src_e  src;
  } llc_rsp_t;

  // Request to DRAM: a line read, or a posted line write.
  typedef struct packed {
    logic       write;
    line_addr_t addr;
    line_t      wdata;
  } mem_req_t;

  // One-cycle pulses, one per mechanism of the reuse cache, tagged with the
  // source of the request being served.
  typedef struct packed {
    logic data_hit;        // read found tag and data
    logic tag_insert;      // first miss: tag inserted with a NULL pointer
    logic data_insert;     // miss on a tag-only entry: data inserted
    logic tag_evict;       // a valid tag was replaced
    logic tag_evict_data;  // ... and the data it pointed to was removed
    logic data_evict;      // a data entry was replaced; its tag pointer set to NULL
    logic dirty_writeback; // a removed dirty line was written to DRAM
    logic write_hit;       // write-back from an L2 updated a resident line
    logic write_around;    // write-back from an L2 sent straight to DRAM
    src_e src;
  } llc_events_t;

endpackage
