// Testbench of the Count-Min Sketch hot page detector.
// 1. A page read repeatedly is reported exactly once, on the access at which the estimate
//    first exceeds the threshold (threshold + 1 accesses; nothing else is in the sketch, so
//    the estimate is exact), one cycle after that access.
// 2. Pages read fewer times than the threshold are never reported (background of distinct
//    pages, each read twice).
// 3. After the periodic reset the same page is counted from zero and reported again.
// 4. With counters narrower than the threshold, saturation keeps the estimate at the counter
//    maximum, so nothing is reported.
module tb_hm_cms_hot_detector;
  import hm_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid, hot_valid, in_valid2, hot_valid2;
  page_t in_page, hot_page, in_page2, hot_page2;
  logic [15:0] threshold;
  logic [31:0] reset_period;
  int checks = 0, failures = 0;
  int n_hot = 0, n_hot2 = 0;
  page_t last_hot;
  int acc_cnt, hot_at, acc_base = 0;

  hm_cms_hot_detector #(.D(4), .W(256), .CNT_W(8)) dut (.clk, .rst_n, .in_valid, .in_page, .threshold,
                                                        .reset_period, .hot_valid, .hot_page);
  hm_cms_hot_detector #(.D(4), .W(256), .CNT_W(3)) dut_sat (.clk, .rst_n, .in_valid(in_valid2), .in_page(in_page2),
                                                            .threshold(16'd9), .reset_period, .hot_valid(hot_valid2), .hot_page(hot_page2));
  always #5 clk = ~clk;

  // Accesses counted at the clock edge; a report at edge k+1 belongs to the access at edge k.
  int acc_ff = 0;
  always @(posedge clk) if (in_valid) acc_ff <= acc_ff + 1;
  always @(posedge clk) if (rst_n) begin
    if (hot_valid)  begin n_hot++;  last_hot = hot_page; hot_at = acc_ff - acc_base; end
    if (hot_valid2) n_hot2++;
  end

  task automatic access(page_t p);
    @(negedge clk); in_valid = 1; in_page = p;
    @(posedge clk); acc_cnt++;
    #1 in_valid = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_page = '0; in_valid2 = 0; in_page2 = '0; acc_cnt = 0;
    threshold = 16'd5;
    reset_period = 32'd5000;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1. Page 0x1234: hot on the 6th access, reported once.
    for (int i = 0; i < 20; i++) access(22'h1234);
    @(negedge clk);
    checks++; if (n_hot != 1) begin failures++; $display("FAIL %0d reports for one page", n_hot); end
    checks++; if (last_hot != 22'h1234) begin failures++; $display("FAIL wrong hot page"); end
    checks++; if (hot_at != 6) begin failures++; $display("FAIL reported at access %0d, expected 6", hot_at); end
    // 2. Background pages with two accesses each: never hot.
    for (int i = 0; i < 100; i++) begin access(page_t'(5000 + i)); access(page_t'(5000 + i)); end
    @(negedge clk);
    checks++; if (n_hot != 1) begin failures++; $display("FAIL cold background reported hot (%0d)", n_hot); end
    // 3. Wait for the periodic reset, then the page must be detectable again after 6 accesses.
    do @(negedge clk); while (dut.period_cnt != 0);
    acc_base = acc_ff;
    for (int i = 0; i < 6; i++) access(22'h1234);
    repeat (2) @(negedge clk);
    checks++; if (n_hot != 2) begin failures++; $display("FAIL not reported again after reset (%0d)", n_hot); end
    checks++; if (hot_at != 6) begin failures++; $display("FAIL after reset reported at access %0d", hot_at); end
    // 4. Saturating 3-bit counters (max 7) never exceed threshold 9.
    for (int i = 0; i < 30; i++) begin
      @(negedge clk); in_valid2 = 1; in_page2 = 22'h77;
      @(posedge clk); #1 in_valid2 = 0;
    end
    @(negedge clk);
    checks++; if (n_hot2 != 0) begin failures++; $display("FAIL saturated counter reported hot"); end
    checks++; if (dut_sat.cnt[0][dut_sat.hash(0, 22'h77)] != 3'd7) begin failures++; $display("FAIL counter did not saturate at 7"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
