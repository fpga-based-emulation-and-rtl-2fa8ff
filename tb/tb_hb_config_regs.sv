// Testbench of the BAR register block: reset values of the default two-region configuration,
// write/read-back of every field, clamping of the region count, status read-back and the
// one-cycle read latency.
module tb_hb_config_regs;
  import hm_pkg::*;

  logic clk = 0, rst_n = 0;
  logic mmio_wr = 0, mmio_rd = 0;
  logic [11:0] mmio_addr = '0;
  logic [63:0] mmio_wdata = '0, mmio_rdata;
  logic mmio_rvalid;
  hb_cfg_t hb_cfg;
  hm_cfg_t hm_cfg;
  hm_stat_t hm_stat;
  int checks = 0, failures = 0;

  hb_config_regs #(.N_PAGES(1024), .FAST_PAGES(256)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic wr(logic [11:0] a, logic [63:0] d);
    @(negedge clk); mmio_wr = 1; mmio_addr = a; mmio_wdata = d;
    @(negedge clk); mmio_wr = 0;
  endtask

  task automatic rd(logic [11:0] a, output logic [63:0] d);
    @(negedge clk); mmio_rd = 1; mmio_addr = a;
    @(posedge clk); #1;
    check("rvalid one cycle after rd", 64'(mmio_rvalid), 64'd1);
    d = mmio_rdata;
    @(negedge clk); mmio_rd = 0;
  endtask

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] v;
    hm_stat = '0;
    hm_stat.init_done  = 1'b1;
    hm_stat.migrations = 32'd7;
    hm_stat.cold_pages = 32'd99;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Reset values: fast region 256 pages (1 MB), slow region to 4 MB, latency 0 / 128.
    rd(12'h000, v); check("region_num reset", v, 2);
    rd(12'h100, v); check("r0 start", v, 0);
    rd(12'h108, v); check("r0 end", v, 64'h0F_FFFF);
    rd(12'h110, v); check("r0 latency", v, 0);
    rd(12'h120, v); check("r1 start", v, 64'h10_0000);
    rd(12'h128, v); check("r1 end", v, 64'h3F_FFFF);
    rd(12'h130, v); check("r1 latency", v, 128);
    rd(12'h138, v); check("r1 bw unlimited", v, 64'hFFFF);
    rd(12'h228, v); check("mig limit", v, 32);
    rd(12'h230, v); check("mig window", v, 100000);
    rd(12'h208, v); check("fast pages", v, 256);
    // Writes to every field.
    wr(12'h000, 4);
    wr(12'h008, 500);
    for (int r = 0; r < 4; r++) begin
      wr(12'h100 + 12'(r * 32),      64'h1000 * (r + 1));
      wr(12'h100 + 12'(r * 32) + 8,  64'h1000 * (r + 2) - 1);
      wr(12'h100 + 12'(r * 32) + 16, 10 * r + 3);
      wr(12'h100 + 12'(r * 32) + 24, 20 * r + 5);
    end
    wr(12'h200, 0); wr(12'h208, 77); wr(12'h210, 9); wr(12'h218, 1234);
    wr(12'h220, 4321); wr(12'h228, 3); wr(12'h230, 999);
    rd(12'h000, v); check("region_num", v, 4);
    check("cfg region_num", 64'(hb_cfg.region_num), 4);
    rd(12'h008, v); check("bw interval", v, 500);
    for (int r = 0; r < 4; r++) begin
      rd(12'h100 + 12'(r * 32), v);      check("start", v, 64'h1000 * (r + 1));
      rd(12'h100 + 12'(r * 32) + 8, v);  check("end", v, 64'h1000 * (r + 2) - 1);
      rd(12'h100 + 12'(r * 32) + 16, v); check("lat", v, 64'(10 * r + 3));
      rd(12'h100 + 12'(r * 32) + 24, v); check("bw", v, 64'(20 * r + 5));
      check("cfg lat", 64'(hb_cfg.region[r].latency), 64'(10 * r + 3));
    end
    check("cfg mig_enable", 64'(hm_cfg.mig_enable), 0);
    check("cfg fast", 64'(hm_cfg.fast_pages), 77);
    check("cfg thr", 64'(hm_cfg.hot_threshold), 9);
    check("cfg cms", 64'(hm_cfg.cms_period), 1234);
    check("cfg bmp", 64'(hm_cfg.bitmap_period), 4321);
    check("cfg limit", 64'(hm_cfg.mig_limit), 3);
    check("cfg window", 64'(hm_cfg.mig_window), 999);
    wr(12'h000, 9);
    rd(12'h000, v); check("region_num clamped", v, 4);
    rd(12'h300, v); check("stat init", v, 1);
    rd(12'h308, v); check("stat migrations", v, 7);
    rd(12'h318, v); check("stat cold", v, 99);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
