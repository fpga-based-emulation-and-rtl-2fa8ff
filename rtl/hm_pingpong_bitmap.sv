// Cold page detector: a ping-pong pair of access bitmaps over fast memory.
//
// Each bitmap has one bit per fast-memory page. During a period one bitmap (the active one)
// records accesses: every fast-memory read sets its page's bit. Meanwhile the other bitmap,
// which holds the previous period's accesses, is scanned: every page in [scan_lo, scan_hi)
// whose bit is clear was not read during a whole period and is sent out as a cold page.
// When the period ends, whatever part of the scanned bitmap has not yet been cleared is
// cleared, and the two bitmaps exchange roles.
//
// Bitmaps are kept as WORD_W-bit words. The scan reads one word per cycle, clears it in the
// same cycle, then emits the word's cold pages one per cycle on a valid/ready stream; it
// waits while the consumer (the cold pages buffer) is not ready. After reset both bitmaps
// are cleared by a one-word-per-cycle sweep (init_done rises when it ends), so in the first
// period every fast page in range counts as cold. Records arriving during the sweep are lost.
// The two bitmaps, the record/scan split and the per-period reset and swap follow the paper.
// Word width, the scan order, the exclusion of pages below scan_lo (the remapping-table
// pages) and the stall on a full buffer are this design's choices.
module hm_pingpong_bitmap
  import hm_pkg::*;
#(
  parameter int unsigned FAST_PAGES = 1048576,
  parameter int unsigned WORD_W     = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rec_valid,
  input  page_t       rec_page,
  input  page_t       scan_lo,
  input  page_t       scan_hi,
  input  logic [31:0] period,
  output logic        cold_valid,
  input  logic        cold_ready,
  output page_t       cold_page,
  output logic        init_done,
  output logic        sel          // 0: bitmap 0 records, bitmap 1 is scanned
);
  localparam int unsigned NW  = (FAST_PAGES + WORD_W - 1) / WORD_W;
  localparam int unsigned WPW = $clog2(NW + 1);
  localparam int unsigned BW  = $clog2(WORD_W);
  localparam int unsigned IW  = (NW > 1) ? $clog2(NW) : 1;

  typedef enum logic [1:0] {S_INIT, S_SCAN, S_WAIT, S_CLEAR} state_e;

  logic [WORD_W-1:0] bm0 [NW];
  logic [WORD_W-1:0] bm1 [NW];

  state_e            state;
  logic [WPW-1:0]    wptr;
  logic [WORD_W-1:0] mask;
  logic              mask_valid;
  logic [31:0]       pcnt;
  logic              period_end;
  logic [WPW-1:0]    end_word;

  page_t hi_eff;
  assign hi_eff     = (32'(scan_hi) > FAST_PAGES) ? PAGE_W'(FAST_PAGES) : scan_hi;
  assign end_word   = WPW'((32'(hi_eff) + WORD_W - 1) / WORD_W);
  assign init_done  = (state != S_INIT);
  assign period_end = (pcnt + 1 >= period);

  // Recording into the active bitmap.
  logic              rec_en;
  logic [WPW-1:0]    rec_word;
  logic [BW-1:0]     rec_bit;
  assign rec_en   = rec_valid && init_done && (rec_page < hi_eff);
  assign rec_word = WPW'(rec_page >> BW);
  assign rec_bit  = rec_page[BW-1:0];

  // Scanning the inactive bitmap.
  logic [WORD_W-1:0] scan_word, in_range;
  logic              load, clr_en;
  assign scan_word = sel ? bm0[IW'(wptr)] : bm1[IW'(wptr)];
  always_comb begin
    for (int b = 0; b < WORD_W; b++) begin
      logic [31:0] p;
      p = 32'(wptr) * WORD_W + b;
      in_range[b] = (p >= 32'(scan_lo)) && (p < 32'(hi_eff));
    end
  end
  assign load   = (state == S_SCAN) && !mask_valid && (wptr < end_word);
  assign clr_en = (state == S_INIT) || (state == S_CLEAR && wptr < WPW'(NW)) || load;

  logic [BW-1:0] low_idx;
  always_comb begin
    low_idx = '0;
    for (int b = WORD_W - 1; b >= 0; b--)
      if (mask[b]) low_idx = BW'(b);
  end
  assign cold_valid = (state == S_SCAN) && mask_valid && (mask != '0);
  assign cold_page  = PAGE_W'(32'(wptr) * WORD_W + 32'(low_idx));

  // Bitmap writes: the active map takes the record, the inactive map the clear.
  always_ff @(posedge clk) begin
    if (state == S_INIT) begin
      bm0[IW'(wptr)] <= '0;
      bm1[IW'(wptr)] <= '0;
    end else begin
      if (!sel && rec_en)        bm0[IW'(rec_word)] <= bm0[IW'(rec_word)] | (WORD_W'(1) << rec_bit);
      else if (sel && clr_en)    bm0[IW'(wptr)]     <= '0;
      if (sel && rec_en)         bm1[IW'(rec_word)] <= bm1[IW'(rec_word)] | (WORD_W'(1) << rec_bit);
      else if (!sel && clr_en)   bm1[IW'(wptr)]     <= '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_INIT;
      wptr       <= '0;
      mask       <= '0;
      mask_valid <= 1'b0;
      pcnt       <= '0;
      sel        <= 1'b0;
    end else begin
      pcnt <= (period_end || state == S_INIT) ? '0 : pcnt + 1;
      unique case (state)
        S_INIT: begin
          if (wptr == WPW'(NW - 1)) begin
            wptr  <= '0;
            state <= S_SCAN;
          end else wptr <= wptr + 1'b1;
        end
        S_SCAN, S_WAIT: begin
          if (period_end) begin
            state      <= S_CLEAR;
            mask_valid <= 1'b0;
          end else if (state == S_SCAN) begin
            if (load) begin
              mask       <= ~scan_word & in_range;
              mask_valid <= 1'b1;
            end else if (!mask_valid) begin
              state <= S_WAIT;            // whole range scanned
            end else if (mask == '0) begin
              mask_valid <= 1'b0;
              wptr       <= wptr + 1'b1;
            end else if (cold_ready) begin
              mask[low_idx] <= 1'b0;
            end
          end
        end
        S_CLEAR: begin
          if (wptr >= WPW'(NW - 1)) begin
            wptr  <= '0;
            sel   <= ~sel;
            state <= S_SCAN;
          end else wptr <= wptr + 1'b1;
        end
        default: state <= S_INIT;
      endcase
    end
  end
endmodule
