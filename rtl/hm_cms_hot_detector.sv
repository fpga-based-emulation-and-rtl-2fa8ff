// Hot page detector: a Count-Min Sketch over the slow-memory read stream.
//
// The sketch is a D x W array of saturating CNT_W-bit counters; each of the D rows ("lanes")
// has its own hash function that maps a page number to one of W counters. For every input
// page the D selected counters are incremented (stopping at their maximum), and the minimum
// of the D incremented values is the estimate of the page's access count. If it exceeds
// `threshold` the page is hot. Each counter has a hot bit; a hot page is reported only if
// at least one of its D hot bits is still clear, and reporting sets all D of them, so a page
// is not reported twice. Every `reset_period` cycles all counters and hot bits are cleared,
// which bounds the sketch's error by bounding the stream length it has seen.
//
// Timing: one page per cycle; hot_valid/hot_page are registered and appear the cycle after
// the input. An input arriving in the cycle of a periodic reset is discarded.
// The sketch structure, saturation, minimum, threshold, hot bits and periodic reset follow
// the paper. The hash functions (multiplicative hashing with a different odd constant per
// lane, the top log2(W) bits of the 32-bit product), D, W and CNT_W are this design's choices.
module hm_cms_hot_detector
  import hm_pkg::*;
#(
  parameter int unsigned D     = 4,
  parameter int unsigned W     = 1024,
  parameter int unsigned CNT_W = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  page_t       in_page,
  input  logic [15:0] threshold,
  input  logic [31:0] reset_period,
  output logic        hot_valid,
  output page_t       hot_page
);
  localparam int unsigned WB = $clog2(W);

  logic [CNT_W-1:0] cnt [D][W];
  logic             hot [D][W];
  logic [31:0]      period_cnt;
  logic             clear;

  // Hash of lane d: top WB bits of page * an odd per-lane constant.
  function automatic logic [WB-1:0] hash(int d, page_t p);
    logic [31:0] k, prod;
    k    = (32'h9E37_79B1 + 32'(d) * 32'h7F4A_7C16) | 32'h1;
    prod = 32'(p) * k;
    return prod[31 -: WB];
  endfunction

  logic [WB-1:0]    h    [D];
  logic [CNT_W-1:0] inc  [D];
  logic [CNT_W-1:0] est;
  logic             all_hot, is_hot;

  always_comb begin
    est     = '1;
    all_hot = 1'b1;
    for (int d = 0; d < D; d++) begin
      h[d]   = hash(d, in_page);
      inc[d] = (cnt[d][h[d]] == '1) ? cnt[d][h[d]] : cnt[d][h[d]] + 1'b1;
      if (inc[d] < est) est = inc[d];
      all_hot = all_hot && hot[d][h[d]];
    end
    is_hot = in_valid && !clear && (32'(est) > 32'(threshold)) && !all_hot;
  end

  assign clear = (period_cnt + 1 >= reset_period);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      period_cnt <= '0;
      hot_valid  <= 1'b0;
      hot_page   <= '0;
    end else begin
      period_cnt <= clear ? '0 : period_cnt + 1;
      hot_valid  <= is_hot;
      if (is_hot) hot_page <= in_page;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < D; d++)
        for (int w = 0; w < W; w++) begin
          cnt[d][w] <= '0;
          hot[d][w] <= 1'b0;
        end
    end else if (clear) begin
      for (int d = 0; d < D; d++)
        for (int w = 0; w < W; w++) begin
          cnt[d][w] <= '0;
          hot[d][w] <= 1'b0;
        end
    end else if (in_valid) begin
      for (int d = 0; d < D; d++) begin
        cnt[d][h[d]] <= inc[d];
        if (is_hot) hot[d][h[d]] <= 1'b1;
      end
    end
  end
endmodule
