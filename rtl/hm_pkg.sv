// Shared types and constants of the HeteroMem / HeteroBox device-side memory tiering design.
//
// Every unit between the CXL controller and the memory controller talks in 64-byte lines:
// a request carries a 34-bit device byte address (16 GB), a write flag, a 64-bit byte mask
// and a 512-bit line; a read response carries the line back with the request's tag. The
// tag's source field tells the response router which unit issued the read (the host, the
// remapping cache, the reverse-table read of a migration, or the migration unit). Pages are
// 4 KB; remapping-table entries are 4 bytes, 16 to a line. The page size, line size, entry
// size and 16 GB capacity follow the paper; the tag layout and byte mask are this design's own.
package hm_pkg;

  localparam int unsigned ADDR_W      = 34;   // 16 GB device memory
  localparam int unsigned DATA_W      = 512;  // one 64-byte line
  localparam int unsigned BE_W        = DATA_W / 8;
  localparam int unsigned LINE_OFF_W  = 6;    // 64-byte line
  localparam int unsigned PAGE_OFF_W  = 12;   // 4 KB page
  localparam int unsigned PAGE_W      = ADDR_W - PAGE_OFF_W;  // 22-bit page index
  localparam int unsigned ENTRY_W     = 32;   // 4-byte remapping-table entry
  localparam int unsigned ENTRIES_PER_LINE = DATA_W / ENTRY_W;  // 16
  localparam int unsigned TAG_ID_W    = 16;

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [PAGE_W-1:0] page_t;
  typedef logic [DATA_W-1:0] line_t;

  // Which unit issued a memory read: used to route its response.
  typedef enum logic [1:0] {
    SRC_HOST = 2'd0,   // host CXL.mem request
    SRC_FILL = 2'd1,   // remapping cache line fill
    SRC_REV  = 2'd2,   // reverse-table read of a migration transaction
    SRC_MIG  = 2'd3    // page data read of the migration unit
  } src_e;

  typedef struct packed {
    src_e                src;
    logic [TAG_ID_W-1:0] id;
  } tag_t;

  typedef struct packed {
    addr_t           addr;
    logic            we;
    logic [BE_W-1:0] be;
    line_t           wdata;
    tag_t            tag;
  } mem_req_t;

  typedef struct packed {
    line_t rdata;
    tag_t  tag;
  } mem_rsp_t;

  // HeteroBox emulated-region configuration (one entry per region).
  localparam int unsigned HB_MAX_REGIONS = 4;
  localparam int unsigned HB_LAT_W       = 16;
  localparam int unsigned HB_BW_W        = 16;

  typedef struct packed {
    addr_t               start_addr;  // first byte of the region
    addr_t               end_addr;    // last byte of the region (inclusive)
    logic [HB_LAT_W-1:0] latency;     // extra read latency in cycles
    logic [HB_BW_W-1:0]  bw_limit;    // responses allowed per interval
  } hb_region_t;

  typedef struct packed {
    logic [2:0]          region_num;  // number of enabled regions
    logic [HB_BW_W-1:0]  bw_interval; // bandwidth counter reset interval in cycles
    hb_region_t [HB_MAX_REGIONS-1:0] region;
  } hb_cfg_t;

  // HeteroMem runtime configuration.
  typedef struct packed {
    logic        mig_enable;      // allow migrations
    page_t       fast_pages;      // dPA pages [0, fast_pages) are fast memory
    logic [15:0] hot_threshold;   // sketch minimum must exceed this
    logic [31:0] cms_period;      // sketch reset period in cycles
    logic [31:0] bitmap_period;   // ping-pong bitmap period in cycles
    logic [15:0] mig_limit;       // migration pairs allowed per window
    logic [31:0] mig_window;      // window length in cycles
  } hm_cfg_t;

  // HeteroMem status counters, readable over MMIO.
  typedef struct packed {
    logic        init_done;
    logic [31:0] migrations;
    logic [31:0] hot_pages;
    logic [31:0] cold_pages;
    logic [31:0] hot_dropped;
    logic [31:0] cache_misses;
  } hm_stat_t;

  function automatic page_t page_of(addr_t a);
    return a[ADDR_W-1:PAGE_OFF_W];
  endfunction

endpackage
