// BAR-mapped configuration and status registers of HeteroBox and HeteroMem.
//
// The host reaches these registers with CXL.io MMIO reads and writes to the device BAR; a
// host driver fills them from a region description (number of regions, start and end
// address, extra latency and bandwidth of each). All registers are 64 bits wide at 8-byte
// offsets; unused high bits read as zero. A write takes effect on the next cycle; read data
// appears on mmio_rdata with mmio_rvalid one cycle after mmio_rd.
//
// Register map (byte offsets; the layout is this design's own):
//   0x000 REGION_NUM    number of enabled emulated regions (0..4)
//   0x008 BW_INTERVAL   bandwidth counter reset interval, cycles
//   0x100+0x20*r        region r: +0x00 START, +0x08 END (inclusive), +0x10 LATENCY (cycles),
//                       +0x18 BANDWIDTH (responses per interval)
//   0x200 HM_CTRL       bit 0: migration enable
//   0x208 FAST_PAGES    dPA pages below this are fast memory
//   0x210 HOT_THRESHOLD sketch estimate must exceed this to call a page hot
//   0x218 CMS_PERIOD    sketch reset period, cycles
//   0x220 BITMAP_PERIOD ping-pong bitmap period, cycles
//   0x228 MIG_LIMIT     migration pairs allowed per window
//   0x230 MIG_WINDOW    window length, cycles
//   0x300..0x328        read-only status: INIT_DONE, MIGRATIONS, HOT_PAGES, COLD_PAGES,
//                       HOT_DROPPED, CACHE_MISSES
// Reset values reproduce the paper's main configuration: two regions, fast memory of
// FAST_PAGES pages with no extra latency, the rest slow with 128 cycles, no bandwidth limit,
// and a migration limit of 32 pairs per 100,000 cycles. Threshold, periods and interval
// defaults are this design's choices.
module hb_config_regs
  import hm_pkg::*;
#(
  parameter int unsigned N_PAGES    = 4194304,
  parameter int unsigned FAST_PAGES = 1048576
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        mmio_wr,
  input  logic        mmio_rd,
  input  logic [11:0] mmio_addr,
  input  logic [63:0] mmio_wdata,
  output logic        mmio_rvalid,
  output logic [63:0] mmio_rdata,
  output hb_cfg_t     hb_cfg,
  output hm_cfg_t     hm_cfg,
  input  hm_stat_t    hm_stat
);
  localparam logic [ADDR_W-1:0] FAST_END = ADDR_W'(FAST_PAGES) * (ADDR_W'(1) << PAGE_OFF_W) - 1'b1;
  localparam logic [ADDR_W-1:0] MEM_END  = ADDR_W'(N_PAGES) * (ADDR_W'(1) << PAGE_OFF_W) - 1'b1;

  function automatic hb_cfg_t hb_reset();
    hb_cfg_t c;
    c = '0;
    c.region_num  = 3'd2;
    c.bw_interval = 16'd1024;
    for (int r = 0; r < HB_MAX_REGIONS; r++) c.region[r].bw_limit = '1;
    c.region[0].start_addr = '0;
    c.region[0].end_addr   = FAST_END;
    c.region[0].latency    = '0;
    c.region[1].start_addr = FAST_END + 1'b1;
    c.region[1].end_addr   = MEM_END;
    c.region[1].latency    = 16'd128;
    return c;
  endfunction

  function automatic hm_cfg_t hm_reset();
    hm_cfg_t c;
    c.mig_enable    = 1'b1;
    c.fast_pages    = PAGE_W'(FAST_PAGES);
    c.hot_threshold = 16'd8;
    c.cms_period    = 32'd1_000_000;
    c.bitmap_period = 32'd1_000_000;
    c.mig_limit     = 16'd32;
    c.mig_window    = 32'd100_000;
    return c;
  endfunction

  logic [1:0] r_sel;
  logic [4:0] r_fld;
  assign r_sel = mmio_addr[6:5];
  assign r_fld = mmio_addr[4:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hb_cfg <= hb_reset();
      hm_cfg <= hm_reset();
    end else if (mmio_wr) begin
      if (mmio_addr[11:8] == 4'h1) begin
        unique case (r_fld)
          5'h00: hb_cfg.region[r_sel].start_addr <= mmio_wdata[ADDR_W-1:0];
          5'h08: hb_cfg.region[r_sel].end_addr   <= mmio_wdata[ADDR_W-1:0];
          5'h10: hb_cfg.region[r_sel].latency    <= mmio_wdata[HB_LAT_W-1:0];
          5'h18: hb_cfg.region[r_sel].bw_limit   <= mmio_wdata[HB_BW_W-1:0];
          default: ;
        endcase
      end else begin
        unique case (mmio_addr)
          12'h000: hb_cfg.region_num    <= (mmio_wdata > 64'(HB_MAX_REGIONS)) ? 3'(HB_MAX_REGIONS) : mmio_wdata[2:0];
          12'h008: hb_cfg.bw_interval   <= mmio_wdata[HB_BW_W-1:0];
          12'h200: hm_cfg.mig_enable    <= mmio_wdata[0];
          12'h208: hm_cfg.fast_pages    <= mmio_wdata[PAGE_W-1:0];
          12'h210: hm_cfg.hot_threshold <= mmio_wdata[15:0];
          12'h218: hm_cfg.cms_period    <= mmio_wdata[31:0];
          12'h220: hm_cfg.bitmap_period <= mmio_wdata[31:0];
          12'h228: hm_cfg.mig_limit     <= mmio_wdata[15:0];
          12'h230: hm_cfg.mig_window    <= mmio_wdata[31:0];
          default: ;
        endcase
      end
    end
  end

  logic [63:0] rd_val;
  always_comb begin
    rd_val = '0;
    if (mmio_addr[11:8] == 4'h1) begin
      unique case (r_fld)
        5'h00: rd_val = 64'(hb_cfg.region[r_sel].start_addr);
        5'h08: rd_val = 64'(hb_cfg.region[r_sel].end_addr);
        5'h10: rd_val = 64'(hb_cfg.region[r_sel].latency);
        5'h18: rd_val = 64'(hb_cfg.region[r_sel].bw_limit);
        default: ;
      endcase
    end else begin
      unique case (mmio_addr)
        12'h000: rd_val = 64'(hb_cfg.region_num);
        12'h008: rd_val = 64'(hb_cfg.bw_interval);
        12'h200: rd_val = 64'(hm_cfg.mig_enable);
        12'h208: rd_val = 64'(hm_cfg.fast_pages);
        12'h210: rd_val = 64'(hm_cfg.hot_threshold);
        12'h218: rd_val = 64'(hm_cfg.cms_period);
        12'h220: rd_val = 64'(hm_cfg.bitmap_period);
        12'h228: rd_val = 64'(hm_cfg.mig_limit);
        12'h230: rd_val = 64'(hm_cfg.mig_window);
        12'h300: rd_val = 64'(hm_stat.init_done);
        12'h308: rd_val = 64'(hm_stat.migrations);
        12'h310: rd_val = 64'(hm_stat.hot_pages);
        12'h318: rd_val = 64'(hm_stat.cold_pages);
        12'h320: rd_val = 64'(hm_stat.hot_dropped);
        12'h328: rd_val = 64'(hm_stat.cache_misses);
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mmio_rvalid <= 1'b0;
      mmio_rdata  <= '0;
    end else begin
      mmio_rvalid <= mmio_rd;
      if (mmio_rd) mmio_rdata <= rd_val;
    end
  end
endmodule
