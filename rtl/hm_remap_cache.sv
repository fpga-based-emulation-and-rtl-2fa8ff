// Remapping cache: holds recently used 64-byte lines of the remapping table so that host
// addresses can be translated without reading the table from memory.
//
// A line holds the 16 four-byte entries of 16 consecutive host pages; the line index is the
// host page number divided by 16. The cache is direct-mapped with LINES lines (2 MB of data
// at the default 32768 lines, the size used in the paper's evaluation). Lookup: present
// rd_en and rd_line; rd_hit and rd_data are valid one cycle later (registered read, as a
// block RAM gives). Fill: fill_en writes a whole line and its tag. Update: upd_en rewrites
// the one entry of host page upd_page in place when its line is resident; the migration
// transaction uses it so the cache never holds a stale mapping. Fill and update are never
// presented together. The cache size follows the paper; direct mapping, the registered read
// and the update-in-place coherence are this design's choices.
module hm_remap_cache
  import hm_pkg::*;
#(
  parameter int unsigned LINES    = 32768,
  parameter int unsigned TBL_LINES = 262144   // lines in the remapping table (N_PAGES / 16)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          rd_en,
  input  logic [$clog2(TBL_LINES)-1:0]  rd_line,
  output logic                          rd_hit,
  output line_t                         rd_data,
  input  logic                          fill_en,
  input  logic [$clog2(TBL_LINES)-1:0]  fill_line,
  input  line_t                         fill_data,
  input  logic                          upd_en,
  input  page_t                         upd_page,
  input  logic [ENTRY_W-1:0]            upd_val,
  output logic                          init_done
);
  localparam int unsigned LW   = $clog2(TBL_LINES);
  localparam int unsigned IW   = $clog2(LINES);
  localparam int unsigned TW   = (LW > IW) ? LW - IW : 1;
  localparam int unsigned EW   = $clog2(ENTRIES_PER_LINE);

  typedef struct packed {
    logic          valid;
    logic [TW-1:0] tag;
  } tag_entry_t;

  logic [ENTRY_W-1:0] data_mem [LINES][ENTRIES_PER_LINE];
  tag_entry_t         tag_mem  [LINES];

  function automatic logic [IW-1:0] idx_of(logic [LW-1:0] l);
    return l[IW-1:0];
  endfunction
  function automatic logic [TW-1:0] tag_of(logic [LW-1:0] l);
    return (LW > IW) ? TW'(l >> IW) : '0;
  endfunction

  // Tags are cleared after reset by a sweep, one line per cycle.
  logic [IW:0] clr_ptr;
  assign init_done = clr_ptr[IW];

  // Update: the entry's line, and whether that line is resident.
  logic [LW-1:0] upd_line;
  logic [EW-1:0] upd_slot;
  logic          upd_hit;
  assign upd_line = LW'(upd_page >> EW);
  assign upd_slot = upd_page[EW-1:0];
  assign upd_hit  = tag_mem[idx_of(upd_line)].valid && tag_mem[idx_of(upd_line)].tag == tag_of(upd_line);

  always_ff @(posedge clk) begin
    if (fill_en) begin
      for (int e = 0; e < ENTRIES_PER_LINE; e++)
        data_mem[idx_of(fill_line)][e] <= fill_data[e*ENTRY_W +: ENTRY_W];
    end else if (upd_en && upd_hit) begin
      data_mem[idx_of(upd_line)][upd_slot] <= upd_val;
    end
    for (int e = 0; e < ENTRIES_PER_LINE; e++)
      rd_data[e*ENTRY_W +: ENTRY_W] <= data_mem[idx_of(rd_line)][e];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clr_ptr <= '0;
    end else if (!init_done) begin
      clr_ptr <= clr_ptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!init_done)
      tag_mem[clr_ptr[IW-1:0]] <= '0;
    else if (fill_en)
      tag_mem[idx_of(fill_line)] <= '{valid: 1'b1, tag: tag_of(fill_line)};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_hit <= 1'b0;
    else        rd_hit <= rd_en && init_done && tag_mem[idx_of(rd_line)].valid &&
                          tag_mem[idx_of(rd_line)].tag == tag_of(rd_line);
  end

  a_no_fill_and_update: assert property (@(posedge clk) disable iff (!rst_n) !(fill_en && upd_en));
endmodule
