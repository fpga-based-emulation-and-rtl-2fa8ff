// Testbench of the HeteroBox emulation logic, in front of an in-order memory model.
//
// 1. Latency: single reads to a region whose latency register is swept over 0..256; the
//    cycles from acceptance to response must equal max(L + 2, base), where base is the
//    memory-bound delay measured with latency 0 (the response can only leave once the
//    timestamp exceeds acceptance time + L, and the output is registered).
// 2. Independence: two regions with different latencies measured side by side.
// 3. Bandwidth: a burst of reads to a region limited to B responses per interval I; no
//    aligned interval may carry more than B responses and the burst must take about
//    N/B intervals; an unlimited region in the same run is not slowed.
// 4. Data and tag of every response are checked against the memory contents, in order;
//    writes go through undelayed.
module tb_hb_emulation_logic;
  import hm_pkg::*;
  import tb_pkg::*;

  localparam int MEM_LAT = 12;

  logic clk = 0, rst_n = 0;
  hb_cfg_t  cfg;
  logic     up_req_valid, up_req_ready, up_rsp_valid;
  mem_req_t up_req;
  mem_rsp_t up_rsp;
  logic     dn_req_valid, dn_req_ready, dn_rsp_valid;
  mem_req_t dn_req;
  mem_rsp_t dn_rsp;
  int checks = 0, failures = 0;
  longint cyc = 0;

  hb_emulation_logic #(.FIFO_DEPTH(16)) dut (.*);
  mem_model #(.LATENCY(MEM_LAT)) mem (.clk, .rst_n, .req_valid(dn_req_valid), .req_ready(dn_req_ready),
                                      .req(dn_req), .rsp_valid(dn_rsp_valid), .rsp(dn_rsp));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Expected responses, in order.
  addr_t  exp_addr [$];
  int     exp_id   [$];
  longint rsp_cycles [$];
  int     rsp_region [$];

  always @(posedge clk) if (rst_n && up_rsp_valid) begin
    addr_t a;
    a = exp_addr.pop_front();
    checks++;
    if (up_rsp.rdata !== pattern(a) || int'(up_rsp.tag.id) != exp_id.pop_front()) begin
      failures++;
      $display("FAIL response data/tag for address %h", a);
    end
    rsp_cycles.push_back(cyc);
    rsp_region.push_back(a >= 34'h10000 ? 1 : 0);
  end

  task automatic issue_read(addr_t a, int id);
    up_req = '0;
    up_req.addr = a;
    up_req.tag.id = 16'(id);
    up_req_valid = 1;
    exp_addr.push_back(a);
    exp_id.push_back(id);
    do @(posedge clk); while (!up_req_ready);
    #1 up_req_valid = 0;
  endtask

  // Delay of one isolated read from acceptance to response.
  task automatic one_read(addr_t a, output longint d);
    longint t0;
    int n;
    n = rsp_cycles.size();
    up_req = '0; up_req.addr = a; up_req.tag.id = 16'(n);
    exp_addr.push_back(a); exp_id.push_back(n);
    @(negedge clk); up_req_valid = 1;
    @(posedge clk); t0 = cyc;
    #1 up_req_valid = 0;
    wait (rsp_cycles.size() == n + 1);
    d = rsp_cycles[n] - t0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint base, d, d0, d1;
    int     lim_cnt, cnt_in_win, max_in_win;
    longint first, last;
    cfg = '0;
    cfg.region_num = 2;
    cfg.bw_interval = 16'd64;
    cfg.region[0].start_addr = '0;
    cfg.region[0].end_addr   = 34'hFFFF;
    cfg.region[0].bw_limit   = '1;
    cfg.region[1].start_addr = 34'h10000;
    cfg.region[1].end_addr   = 34'h1FFFF;
    cfg.region[1].bw_limit   = '1;
    up_req_valid = 0; up_req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);

    // 1. Latency sweep on region 0.
    cfg.region[0].latency = 0;
    one_read(34'h40, base);
    checks++;
    if (base < MEM_LAT) begin failures++; $display("FAIL base delay %0d below memory latency", base); end
    for (int l = 0; l <= 256; l += 32) begin
      cfg.region[0].latency = 16'(l);
      one_read(34'h80 + addr_t'(l * 64), d);
      check($sformatf("latency reg %0d", l), d, (l + 2 > base) ? l + 2 : base);
    end

    // 2. Two regions at once: region 0 latency 40, region 1 latency 100.
    cfg.region[0].latency = 40;
    cfg.region[1].latency = 100;
    one_read(34'h100, d0);
    one_read(34'h10100, d1);
    check("region 0 latency 40", d0, 42);
    check("region 1 latency 100", d1, 102);
    // Address outside every region: no extra latency.
    one_read(34'h30000, d);
    check("unmapped address", d, base);

    // Writes pass through undelayed.
    @(negedge clk);
    up_req = '0; up_req.addr = 34'h10200; up_req.we = 1; up_req.be = '1; up_req.wdata = pattern(34'h10200);
    up_req_valid = 1;
    @(posedge clk); #1;
    check("write accepted at once", 64'(dn_req_valid && dn_req.we), 1);
    @(negedge clk); up_req_valid = 0;

    // 3. Bandwidth: region 1 limited to 4 responses per 64-cycle interval; 48 reads.
    cfg.region[0].latency = 0;
    cfg.region[1].latency = 0;
    cfg.region[1].bw_limit = 4;
    rsp_cycles.delete(); rsp_region.delete();
    fork
      for (int i = 0; i < 48; i++) issue_read(34'h10000 + addr_t'(i * 64), 1000 + i);
    join
    wait (rsp_cycles.size() == 48);
    // Count responses inside each aligned interval (interval counter starts at reset).
    max_in_win = 0;
    for (int i = 0; i < 48; i++) begin
      cnt_in_win = 0;
      for (int j = 0; j < 48; j++)
        if ((rsp_cycles[j] - 1) / 64 == (rsp_cycles[i] - 1) / 64) cnt_in_win++;
      if (cnt_in_win > max_in_win) max_in_win = cnt_in_win;
    end
    checks++;
    if (max_in_win > 4) begin failures++; $display("FAIL %0d responses in one interval, limit 4", max_in_win); end
    first = rsp_cycles[0]; last = rsp_cycles[47];
    checks++;
    if (last - first < 10 * 64 || last - first > 12 * 64) begin
      failures++; $display("FAIL 48 responses at 4/interval took %0d cycles", last - first);
    end
    // Unlimited region 0 is not slowed by region 1's limit.
    cfg.region[1].bw_limit = '1;
    rsp_cycles.delete();
    fork
      for (int i = 0; i < 32; i++) issue_read(addr_t'(34'h2000 + i * 64), 2000 + i);
    join
    wait (rsp_cycles.size() == 32);
    checks++;
    if (rsp_cycles[31] - rsp_cycles[0] > 40) begin
      failures++; $display("FAIL unlimited burst took %0d cycles", rsp_cycles[31] - rsp_cycles[0]);
    end
    repeat (20) @(posedge clk);
    check("all responses returned", exp_addr.size(), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
