// Profiling unit: finds hot pages in slow memory and cold pages in fast memory from the
// translated read stream, and pairs them into migration requests.
//
// It watches the device page of every host read after translation (writes are not
// profiled). A page below cfg.fast_pages is a fast-memory access and is recorded in the
// ping-pong access bitmap, whose scan produces cold pages into the cold pages buffer. A page
// at or above it is a slow-memory access and goes to the Count-Min Sketch hot page detector.
// When a hot page is found, a cold page is taken from the buffer and the (hot, cold) pair is
// pushed into the migration FIFO; if no cold page is buffered or the FIFO is full, the hot
// page is dropped and counted (its hot bits stay set until the next sketch reset). The
// migration FIFO's output is released to the remapping unit as a valid/ready stream, at most
// cfg.mig_limit pairs per cfg.mig_window cycles, and only while cfg.mig_enable is set.
//
// rsv_pages is the number of pages at the start of fast memory that hold the remapping
// tables; they are never offered as cold pages. Pages are device page numbers.
// The fast/slow split, the bitmap and sketch, the cold buffer, the pairing and the rate
// limit follow the paper; queue depths and the drop rule are this design's choices.
module hm_profiling_unit
  import hm_pkg::*;
#(
  parameter int unsigned FAST_PAGES     = 1048576,
  parameter int unsigned CMS_D          = 4,
  parameter int unsigned CMS_W          = 1024,
  parameter int unsigned CMS_CNT_W      = 8,
  parameter int unsigned COLD_BUF_DEPTH = 64,
  parameter int unsigned MIG_FIFO_DEPTH = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  hm_cfg_t     cfg,
  input  page_t       rsv_pages,
  input  logic        acc_valid,
  input  page_t       acc_page,
  output logic        mig_valid,
  input  logic        mig_ready,
  output page_t       mig_hot_page,
  output page_t       mig_cold_page,
  output logic        init_done,
  output logic [31:0] hot_count,
  output logic [31:0] cold_count,
  output logic [31:0] drop_count
);
  typedef struct packed {
    page_t hot;
    page_t cold;
  } pair_t;

  // Region classifier: fast or slow stream.
  logic is_fast;
  assign is_fast = acc_page < cfg.fast_pages;

  // Coldness: ping-pong bitmap feeding the cold pages buffer.
  logic  cold_valid, cold_ready, bm_sel;
  page_t cold_page, cold_head;
  logic  cb_empty, cb_full, cb_pop;
  logic [$clog2(COLD_BUF_DEPTH+1)-1:0] cb_count;

  hm_pingpong_bitmap #(.FAST_PAGES(FAST_PAGES)) u_bitmap (
    .clk, .rst_n,
    .rec_valid(acc_valid && is_fast), .rec_page(acc_page),
    .scan_lo(rsv_pages), .scan_hi(cfg.fast_pages), .period(cfg.bitmap_period),
    .cold_valid, .cold_ready, .cold_page, .init_done, .sel(bm_sel));

  assign cold_ready = !cb_full;

  hm_fifo #(.T(page_t), .DEPTH(COLD_BUF_DEPTH)) u_cold_buf (
    .clk, .rst_n, .push(cold_valid && cold_ready), .wr_data(cold_page), .pop(cb_pop),
    .rd_data(cold_head), .empty(cb_empty), .full(cb_full), .count(cb_count));

  // Hotness: Count-Min Sketch on the slow stream.
  logic  hot_valid;
  page_t hot_page;
  hm_cms_hot_detector #(.D(CMS_D), .W(CMS_W), .CNT_W(CMS_CNT_W)) u_cms (
    .clk, .rst_n,
    .in_valid(acc_valid && !is_fast), .in_page(acc_page),
    .threshold(cfg.hot_threshold), .reset_period(cfg.cms_period),
    .hot_valid, .hot_page);

  // Pairing into the migration FIFO.
  pair_t mf_in, mf_head;
  logic  mf_push, mf_pop, mf_empty, mf_full;
  logic [$clog2(MIG_FIFO_DEPTH+1)-1:0] mf_count;

  assign mf_push = hot_valid && !cb_empty && !mf_full;
  assign cb_pop  = mf_push;
  assign mf_in   = '{hot: hot_page, cold: cold_head};

  hm_fifo #(.T(pair_t), .DEPTH(MIG_FIFO_DEPTH)) u_mig_fifo (
    .clk, .rst_n, .push(mf_push), .wr_data(mf_in), .pop(mf_pop), .rd_data(mf_head),
    .empty(mf_empty), .full(mf_full), .count(mf_count));

  // Migration rate limit: at most mig_limit pairs per window.
  logic [31:0] win_cnt;
  logic [15:0] win_pairs;
  logic        win_end;
  assign win_end       = (win_cnt + 1 >= cfg.mig_window);
  assign mig_valid     = !mf_empty && cfg.mig_enable && (win_pairs < cfg.mig_limit);
  assign mig_hot_page  = mf_head.hot;
  assign mig_cold_page = mf_head.cold;
  assign mf_pop        = mig_valid && mig_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_cnt    <= '0;
      win_pairs  <= '0;
      hot_count  <= '0;
      cold_count <= '0;
      drop_count <= '0;
    end else begin
      win_cnt <= win_end ? '0 : win_cnt + 1;
      if (win_end)     win_pairs <= '0;
      else if (mf_pop) win_pairs <= win_pairs + 1'b1;
      if (hot_valid)                 hot_count  <= hot_count + 1;
      if (cold_valid && cold_ready)  cold_count <= cold_count + 1;
      if (hot_valid && !mf_push)     drop_count <= drop_count + 1;
    end
  end
endmodule
