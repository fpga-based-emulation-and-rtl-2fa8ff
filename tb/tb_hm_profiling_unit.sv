// Testbench of the profiling unit (64 fast pages, 2 reserved, threshold 3, sketch 4 x 64).
// 1. A slow page read 4 times becomes one migration pair whose cold page is a fast page
//    outside the reserved pages and not read recently.
// 2. Fast pages read many times are never reported hot.
// 3. Rate limit: with 2 pairs per 400-cycle window, no window carries more than 2 pairs.
// 4. mig_enable low holds pairs back.
// 5. With the consumer stalled, hot pages beyond the migration FIFO are dropped and counted;
//    every hot page is either delivered as a pair or dropped.
module tb_hm_profiling_unit;
  import hm_pkg::*;
  localparam int WIN = 400;

  logic clk = 0, rst_n = 0;
  hm_cfg_t cfg;
  page_t rsv_pages, acc_page, mig_hot_page, mig_cold_page;
  logic acc_valid, mig_valid, mig_ready, init_done;
  logic [31:0] hot_count, cold_count, drop_count;
  int checks = 0, failures = 0;
  int pairs = 0;
  longint cyc = 0;
  page_t hot_seen [$], cold_seen [$];

  hm_profiling_unit #(.FAST_PAGES(64), .CMS_W(64), .COLD_BUF_DEPTH(64), .MIG_FIFO_DEPTH(8)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (mig_valid && mig_ready) begin
      pairs++;
      hot_seen.push_back(mig_hot_page);
      cold_seen.push_back(mig_cold_page);
    end
  end
  // Pairs per window, windows identified by the unit's own window counter restarts.
  int cur_win = 0, cur_cnt = 0, max_cnt = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.win_end) begin cur_win++; cur_cnt = 0; end
    else if (mig_valid && mig_ready) begin
      cur_cnt++;
      if (cur_cnt > max_cnt) max_cnt = cur_cnt;
    end
  end

  task automatic read(page_t p);
    @(negedge clk); acc_valid = 1; acc_page = p;
    @(negedge clk); acc_valid = 0;
  endtask

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    cfg.mig_enable = 1; cfg.fast_pages = 64; cfg.hot_threshold = 3;
    cfg.cms_period = 1_000_000; cfg.bitmap_period = 100_000;
    cfg.mig_limit = 2; cfg.mig_window = WIN;
    rsv_pages = 2; acc_valid = 0; acc_page = '0; mig_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (init_done);
    repeat (100) @(negedge clk);              // let the scan fill the cold pages buffer
    // 1.
    for (int i = 0; i < 4; i++) read(22'd100);
    repeat (5) @(negedge clk);
    check("one pair", pairs, 1);
    check("hot page", hot_seen[0], 100);
    checks++;
    if (cold_seen[0] < 2 || cold_seen[0] >= 64) begin failures++; $display("FAIL cold page %0d", cold_seen[0]); end
    // 2.
    for (int i = 0; i < 10; i++) read(22'd10);
    repeat (5) @(negedge clk);
    check("fast page never hot", hot_count, 1);
    // 3. Six more hot pages.
    for (int p = 0; p < 6; p++) for (int i = 0; i < 4; i++) read(page_t'(200 + p));
    repeat (4 * WIN) @(negedge clk);
    check("all pairs delivered", pairs, 7);
    checks++;
    if (max_cnt > 2) begin failures++; $display("FAIL %0d pairs in one window", max_cnt); end
    for (int i = 1; i < 7; i++) check("pair order", hot_seen[i], 200 + i - 1);
    // Cold pages are distinct.
    for (int i = 0; i < 7; i++) for (int j = i + 1; j < 7; j++) begin
      checks++;
      if (cold_seen[i] == cold_seen[j]) begin failures++; $display("FAIL cold page reused"); end
    end
    // 4. Disable migration.
    cfg.mig_enable = 0;
    for (int i = 0; i < 4; i++) read(22'd300);
    repeat (2 * WIN) @(negedge clk);
    check("held while disabled", pairs, 7);
    cfg.mig_enable = 1;
    repeat (WIN) @(negedge clk);
    check("released when enabled", pairs, 8);
    // 5. Stall the consumer and create 12 hot pages: FIFO of 8 holds 8, 4 dropped.
    mig_ready = 0;
    for (int p = 0; p < 12; p++) for (int i = 0; i < 4; i++) read(page_t'(400 + p));
    repeat (5) @(negedge clk);
    check("drops", drop_count, 4);
    mig_ready = 1;
    repeat (5 * WIN) @(negedge clk);
    check("hot = delivered + dropped", hot_count, pairs + drop_count);
    check("cold pages counted", 64'(cold_count >= 62), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
