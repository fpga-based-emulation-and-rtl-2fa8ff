// Testbench of the ping-pong access bitmap (256 fast pages, scan range [4, 200)).
// Period 0 follows the clearing sweep, so every page in range must come out cold exactly
// once and nothing outside the range. During period 0 a set S of pages is read; in period 1
// the cold pages must be exactly the range minus S. Pages read in period 1 only must then be
// missing from period 2's output while S reappears. The consumer stalls at random; no page
// may be lost or repeated. Also checks that the bitmaps swap once per period.
module tb_hm_pingpong_bitmap;
  import hm_pkg::*;
  localparam int FP = 256, LO = 4, HI = 200, PERIOD = 1500;

  logic clk = 0, rst_n = 0;
  logic rec_valid, cold_valid, cold_ready, init_done, sel;
  page_t rec_page, cold_page, scan_lo, scan_hi;
  logic [31:0] period;
  int checks = 0, failures = 0;
  int seen [FP];
  int per_idx = 0;
  int swaps = 0;
  logic sel_q;

  hm_pingpong_bitmap #(.FAST_PAGES(FP)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    cold_ready <= ($urandom % 4 != 0);
    sel_q <= sel;
    if (rst_n && sel != sel_q) swaps++;
    if (cold_valid && cold_ready) begin
      if (int'(cold_page) < FP) seen[cold_page]++;
      else begin checks++; failures++; $display("FAIL page %0d out of bitmap", cold_page); end
    end
  end

  function automatic bit in_s(int p);    return (p % 7 == 3);  endfunction   // read in period 0
  function automatic bit in_t(int p);    return (p % 11 == 5); endfunction   // read in period 1

  task automatic check_period(string name, int k);
    for (int p = 0; p < FP; p++) begin
      int exp;
      exp = (p >= LO && p < HI) ? 1 : 0;
      if (k == 1 && in_s(p)) exp = 0;
      if (k == 2 && in_t(p)) exp = 0;
      checks++;
      if (seen[p] != exp) begin
        failures++;
        if (failures < 10) $display("FAIL %s: page %0d seen %0d times, expected %0d", name, p, seen[p], exp);
      end
      seen[p] = 0;
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rec_valid = 0; rec_page = '0; scan_lo = LO; scan_hi = HI; period = PERIOD;
    for (int p = 0; p < FP; p++) seen[p] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (init_done);
    // Period 0: read S (includes pages outside the scan range, which must be harmless).
    for (int p = 0; p < FP; p++) if (in_s(p)) begin
      @(negedge clk); rec_valid = 1; rec_page = page_t'(p);
    end
    @(negedge clk); rec_valid = 0;
    wait (swaps == 1);
    check_period("period 0", 0);
    // Period 1: read T.
    for (int p = 0; p < FP; p++) if (in_t(p)) begin
      @(negedge clk); rec_valid = 1; rec_page = page_t'(p);
    end
    @(negedge clk); rec_valid = 0;
    wait (swaps == 2);
    check_period("period 1", 1);
    wait (swaps == 3);
    check_period("period 2", 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
