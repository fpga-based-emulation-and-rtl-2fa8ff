// Remapping unit: the translation layer that keeps page migration invisible to the host.
//
// The host addresses device memory with host physical addresses (hPA); HeteroMem moves pages
// around and keeps, at the start of fast memory, a remapping table (hPA page -> dPA page)
// and a reverse table (dPA page -> hPA page), both arrays of 4-byte entries, 16 per 64-byte
// line. The forward table starts at device byte 0 and the reverse table right after it;
// together they fill the first rsv_pages pages, which the host must not use.
//
// Power-on: the unit writes the identity mapping into both tables, one line per cycle, and
// clears the remapping cache; init_done then rises and host requests are accepted.
//
// Translation (pipeline of the block diagram): an accepted host request looks up the
// remapping cache; one cycle later it is pushed into the request FIFO together with its hit
// bit, already translated if it hit. On a miss a read of the table line is pushed into the
// table request queue. At the FIFO head a hit leaves at once; a miss waits for its line,
// which arrives in the fill queue (misses complete in order because memory is in order), is
// translated with it and installs the line in the cache. Table reads and translated requests
// are merged by a round-robin arbiter. Every translated read is also shown to the profiling
// unit (prof_valid/prof_page). Read responses are routed by tag source: host data to the
// host, table lines to the fill queue, reverse-table lines to the migration logic.
//
// Migration transaction: on a migration request (already-translated hot slow page and cold
// fast page) the unit stops accepting host requests and drains its pipeline; reads the two
// reverse-table entries to learn the pages' hPAs, pulsing mu_en to start the migration unit
// right after issuing them; when both entries return it writes the four swapped entries
// (forward entries of both hPAs, reverse entries of both dPAs) with byte-masked writes,
// updating resident cache lines in place; and once the migration unit reports done it
// accepts host requests again.
//
// Interfaces are valid/ready for requests, valid-only for responses; memory must execute
// requests in order and writes are posted. The table layout, the cache + FIFO + translate
// structure, the blocking and the order of the migration steps follow the paper. The
// identity initial mapping, byte masks, in-order miss handling without merging, the drain
// before a migration and the FIFO depth are this design's choices.
module hm_remapping_unit
  import hm_pkg::*;
#(
  parameter int unsigned N_PAGES     = 4194304,
  parameter int unsigned CACHE_LINES = 32768,
  parameter int unsigned FIFO_DEPTH  = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // host side (CXL.mem)
  input  logic        host_req_valid,
  output logic        host_req_ready,
  input  mem_req_t    host_req,
  output logic        host_rsp_valid,
  output mem_rsp_t    host_rsp,
  // memory side
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output mem_req_t    mem_req,
  input  logic        mem_rsp_valid,
  input  mem_rsp_t    mem_rsp,
  // profiling unit
  output logic        prof_valid,
  output page_t       prof_page,
  output page_t       rsv_pages,
  input  logic        mig_valid,
  output logic        mig_ready,
  input  page_t       mig_hot_page,
  input  page_t       mig_cold_page,
  // migration unit
  output logic        mu_en,
  output page_t       mu_hot_page,
  output page_t       mu_cold_page,
  input  logic        mu_done,
  // status
  output logic        init_done,
  output logic        migrating,
  output logic [31:0] miss_count,
  output logic [31:0] mig_count
);
  localparam int unsigned TBL_LINES = N_PAGES / ENTRIES_PER_LINE;
  localparam int unsigned LW        = $clog2(TBL_LINES);
  localparam int unsigned EW        = $clog2(ENTRIES_PER_LINE);
  localparam int unsigned INIT_W    = LW + 1;
  localparam addr_t       REV_BASE  = addr_t'(N_PAGES) * addr_t'(4);
  localparam int unsigned RSV       = (N_PAGES * 2 * (ENTRY_W / 8) + (1 << PAGE_OFF_W) - 1) >> PAGE_OFF_W;

  typedef enum logic [2:0] {ST_INIT, ST_RUN, ST_DRAIN, ST_REV_RD, ST_REV_WAIT, ST_UPD, ST_MU_WAIT} state_e;

  typedef struct packed {
    logic          hit;
    logic [EW-1:0] slot;
    mem_req_t      req;
  } rq_entry_t;

  assign rsv_pages = PAGE_W'(RSV);

  state_e state;

  // Helpers: line address and slot of a table entry.
  function automatic addr_t entry_line_addr(addr_t base, page_t idx);
    addr_t a;
    a = base + (addr_t'(idx) << 2);
    return {a[ADDR_W-1:6], 6'b0};
  endfunction
  function automatic addr_t translate(addr_t hpa, logic [ENTRY_W-1:0] entry);
    return {entry[PAGE_W-1:0], hpa[PAGE_OFF_W-1:0]};
  endfunction
  function automatic logic [ENTRY_W-1:0] pick(line_t l, logic [EW-1:0] s);
    return l[32'(s)*ENTRY_W +: ENTRY_W];
  endfunction

  // ---------------------------------------------------------------- remapping cache
  line_t         fill_head;      // head of the fill queue (table line returned by memory)
  logic          cache_rd_en, cache_hit, cache_init;
  logic [LW-1:0] cache_rd_line, cache_fill_line;
  line_t         cache_rd_data;
  logic          cache_fill_en, cache_upd_en;
  page_t         cache_upd_page;
  logic [ENTRY_W-1:0] cache_upd_val;

  hm_remap_cache #(.LINES(CACHE_LINES), .TBL_LINES(TBL_LINES)) u_cache (
    .clk, .rst_n,
    .rd_en(cache_rd_en), .rd_line(cache_rd_line), .rd_hit(cache_hit), .rd_data(cache_rd_data),
    .fill_en(cache_fill_en), .fill_line(cache_fill_line), .fill_data(fill_head),
    .upd_en(cache_upd_en), .upd_page(cache_upd_page), .upd_val(cache_upd_val),
    .init_done(cache_init));

  // ---------------------------------------------------------------- lookup stage
  logic     s1_valid;
  mem_req_t s1_req;
  logic     s1_adv, host_fire;

  rq_entry_t rq_in, rq_head;
  logic      rq_push, rq_pop, rq_empty, rq_full;
  logic [$clog2(FIFO_DEPTH+1)-1:0] rq_count;
  mem_req_t  tq_in, tq_head;
  logic      tq_push, tq_pop, tq_empty, tq_full;
  logic [$clog2(FIFO_DEPTH+1)-1:0] tq_count;
  logic      fill_push, fill_pop, fill_empty, fill_full;
  logic [$clog2(FIFO_DEPTH+1)-1:0] fill_count;

  page_t         s1_page;
  logic [LW-1:0] s1_line;
  logic [EW-1:0] s1_slot;
  assign s1_page = page_of(s1_req.addr);
  assign s1_line = LW'(s1_page >> EW);
  assign s1_slot = s1_page[EW-1:0];

  assign host_req_ready = (state == ST_RUN) && cache_init && !mig_valid && (!s1_valid || s1_adv);
  assign host_fire      = host_req_valid && host_req_ready;
  assign cache_rd_en    = host_fire;
  assign cache_rd_line  = LW'(page_of(host_req.addr) >> EW);

  assign s1_adv  = s1_valid && !rq_full && (cache_hit || !tq_full);
  assign rq_push = s1_adv;
  assign tq_push = s1_adv && !cache_hit;

  always_comb begin
    rq_in.hit  = cache_hit;
    rq_in.slot = s1_slot;
    rq_in.req  = s1_req;
    if (cache_hit) rq_in.req.addr = translate(s1_req.addr, pick(cache_rd_data, s1_slot));
    tq_in        = '0;
    tq_in.addr   = {(ADDR_W-6)'(s1_line), 6'b0};
    tq_in.tag.src = SRC_FILL;
    tq_in.tag.id  = TAG_ID_W'(s1_line);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_req   <= '0;
    end else begin
      if (host_fire) begin
        s1_valid <= 1'b1;
        s1_req   <= host_req;
      end else if (s1_adv) begin
        s1_valid <= 1'b0;
      end
    end
  end

  hm_fifo #(.T(rq_entry_t), .DEPTH(FIFO_DEPTH)) u_req_fifo (
    .clk, .rst_n, .push(rq_push), .wr_data(rq_in), .pop(rq_pop), .rd_data(rq_head),
    .empty(rq_empty), .full(rq_full), .count(rq_count));
  hm_fifo #(.T(mem_req_t), .DEPTH(FIFO_DEPTH)) u_tbl_fifo (
    .clk, .rst_n, .push(tq_push), .wr_data(tq_in), .pop(tq_pop), .rd_data(tq_head),
    .empty(tq_empty), .full(tq_full), .count(tq_count));
  hm_fifo #(.T(line_t), .DEPTH(FIFO_DEPTH)) u_fill_fifo (
    .clk, .rst_n, .push(fill_push), .wr_data(mem_rsp.rdata), .pop(fill_pop), .rd_data(fill_head),
    .empty(fill_empty), .full(fill_full), .count(fill_count));

  // ---------------------------------------------------------------- translate + mux
  logic     p1_valid, p1_ready;   // arbiter port 1: translated requests
  mem_req_t p1_req;
  logic     p0_valid, p0_ready;   // arbiter port 0: table requests
  mem_req_t p0_req;

  assign p1_valid = !rq_empty && (rq_head.hit || !fill_empty);
  always_comb begin
    p1_req = rq_head.req;
    if (!rq_head.hit) p1_req.addr = translate(rq_head.req.addr, pick(fill_head, rq_head.slot));
  end
  assign rq_pop          = p1_valid && p1_ready;
  assign fill_pop        = rq_pop && !rq_head.hit;
  assign cache_fill_en   = fill_pop;
  assign cache_fill_line = LW'(page_of(rq_head.req.addr) >> EW);
  assign prof_valid      = rq_pop && !rq_head.req.we;
  assign prof_page       = page_of(p1_req.addr);

  // ---------------------------------------------------------------- migration transaction
  page_t              mig_hot, mig_cold;     // dPA pages
  logic [ENTRY_W-1:0] hpa_hot, hpa_cold;     // their hPA pages, from the reverse table
  logic [1:0]         rev_got;
  logic [1:0]         k;
  logic               mu_done_seen;
  logic [INIT_W-1:0]  init_ptr;

  // Port 0 request for the current state.
  always_comb begin
    p0_valid = 1'b0;
    p0_req   = '0;
    unique case (state)
      ST_INIT: begin
        p0_valid    = 1'b1;
        p0_req.addr = {(ADDR_W-6)'(init_ptr), 6'b0};
        p0_req.we   = 1'b1;
        p0_req.be   = '1;
        for (int e = 0; e < ENTRIES_PER_LINE; e++)
          p0_req.wdata[e*ENTRY_W +: ENTRY_W] =
            ENTRY_W'((32'(init_ptr) % TBL_LINES) * ENTRIES_PER_LINE + e);
      end
      ST_RUN, ST_DRAIN: begin
        p0_valid = !tq_empty;
        p0_req   = tq_head;
      end
      ST_REV_RD: begin
        p0_valid        = 1'b1;
        p0_req.addr     = entry_line_addr(REV_BASE, k[0] ? mig_cold : mig_hot);
        p0_req.tag.src  = SRC_REV;
        p0_req.tag.id   = TAG_ID_W'(k[0]);
      end
      ST_UPD: begin
        page_t              idx;
        logic [ENTRY_W-1:0] val;
        addr_t              base;
        unique case (k)
          2'd0: begin base = '0;       idx = PAGE_W'(hpa_hot);  val = ENTRY_W'(mig_cold); end
          2'd1: begin base = '0;       idx = PAGE_W'(hpa_cold); val = ENTRY_W'(mig_hot);  end
          2'd2: begin base = REV_BASE; idx = mig_cold;          val = hpa_hot;            end
          default: begin base = REV_BASE; idx = mig_hot;        val = hpa_cold;           end
        endcase
        p0_valid    = 1'b1;
        p0_req.addr = entry_line_addr(base, idx);
        p0_req.we   = 1'b1;
        // Entry offset within the line: the index's low bits, shifted by the base's line offset (0).
        p0_req.be    = BE_W'(4'hF) << (32'(idx[EW-1:0]) * 4);
        p0_req.wdata = DATA_W'(val) << (32'(idx[EW-1:0]) * ENTRY_W);
      end
      default: ;
    endcase
  end
  assign tq_pop = (state == ST_RUN || state == ST_DRAIN) && p0_valid && p0_ready;

  // Cache update for the two forward-table writes.
  assign cache_upd_en   = (state == ST_UPD) && !k[1] && p0_ready;
  assign cache_upd_page = k[0] ? PAGE_W'(hpa_cold) : PAGE_W'(hpa_hot);
  assign cache_upd_val  = k[0] ? ENTRY_W'(mig_hot) : ENTRY_W'(mig_cold);

  assign mig_ready    = (state == ST_RUN) && cache_init;
  assign migrating    = (state != ST_RUN) && (state != ST_INIT);
  assign mu_hot_page  = mig_hot;
  assign mu_cold_page = mig_cold;

  // ---------------------------------------------------------------- response logic
  assign host_rsp_valid = mem_rsp_valid && mem_rsp.tag.src == SRC_HOST;
  assign host_rsp       = mem_rsp;
  assign fill_push      = mem_rsp_valid && mem_rsp.tag.src == SRC_FILL;

  // Page index of the reverse-table entry carried by a response with id 0 (hot) or 1 (cold).
  page_t rev_page;
  assign rev_page = mem_rsp.tag.id[0] ? mig_cold : mig_hot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= ST_INIT;
      init_ptr     <= '0;
      mig_hot      <= '0;
      mig_cold     <= '0;
      hpa_hot      <= '0;
      hpa_cold     <= '0;
      rev_got      <= '0;
      k            <= '0;
      mu_en        <= 1'b0;
      mu_done_seen <= 1'b0;
      init_done    <= 1'b0;
      miss_count   <= '0;
      mig_count    <= '0;
    end else begin
      mu_en <= 1'b0;
      if (tq_push) miss_count <= miss_count + 1;
      if (mu_done) mu_done_seen <= 1'b1;
      if (mem_rsp_valid && mem_rsp.tag.src == SRC_REV) begin
        rev_got[mem_rsp.tag.id[0]] <= 1'b1;
        if (mem_rsp.tag.id[0]) hpa_cold <= pick(mem_rsp.rdata, rev_page[EW-1:0]);
        else                   hpa_hot  <= pick(mem_rsp.rdata, rev_page[EW-1:0]);
      end
      unique case (state)
        ST_INIT: begin
          if (p0_ready) begin
            init_ptr <= init_ptr + 1'b1;
            if (init_ptr == INIT_W'(2 * TBL_LINES - 1)) state <= ST_RUN;
          end
        end
        ST_RUN: begin
          init_done <= cache_init;
          if (mig_valid && mig_ready) begin
            mig_hot  <= mig_hot_page;
            mig_cold <= mig_cold_page;
            state    <= ST_DRAIN;
          end
        end
        ST_DRAIN: begin
          if (!s1_valid && rq_empty && tq_empty && fill_empty) begin
            state <= ST_REV_RD;
            k     <= '0;
            rev_got      <= '0;
            mu_done_seen <= 1'b0;
          end
        end
        ST_REV_RD: begin
          if (p0_ready) begin
            k <= k + 1'b1;
            if (k[0]) begin
              mu_en <= 1'b1;   // start the migration unit once both reads are issued
              state <= ST_REV_WAIT;
            end
          end
        end
        ST_REV_WAIT: begin
          if (rev_got == 2'b11) begin
            state <= ST_UPD;
            k     <= '0;
          end
        end
        ST_UPD: begin
          if (p0_ready) begin
            k <= k + 1'b1;
            if (k == 2'd3) state <= ST_MU_WAIT;
          end
        end
        ST_MU_WAIT: begin
          if (mu_done_seen || mu_done) begin
            state     <= ST_RUN;
            mig_count <= mig_count + 1;
          end
        end
        default: state <= ST_INIT;
      endcase
    end
  end

  // ---------------------------------------------------------------- arbiter
  hm_req_arbiter #(.N(2)) u_arb (
    .clk, .rst_n,
    .in_valid({p1_valid, p0_valid}), .in_ready({p1_ready, p0_ready}), .in_req({p1_req, p0_req}),
    .out_valid(mem_req_valid), .out_ready(mem_req_ready), .out_req(mem_req));

  // Every miss consumes exactly one fill, so the fill queue cannot overflow.
  a_fill_fits: assert property (@(posedge clk) disable iff (!rst_n) fill_push |-> !fill_full);
  // Host requests are blocked while a migration is in progress.
  a_block: assert property (@(posedge clk) disable iff (!rst_n) migrating |-> !host_req_ready);
  // Migration pages lie outside the metadata pages.
  a_not_meta: assert property (@(posedge clk) disable iff (!rst_n)
                               (mig_valid && mig_ready) |-> (mig_hot_page >= rsv_pages && mig_cold_page >= rsv_pages));
endmodule
