// HeteroMem on HeteroBox: a device-side memory tiering layer for a CXL Type-3 memory
// expander, placed between the CXL controller and the DRAM memory controller.
//
// Host CXL.mem requests enter the remapping unit, which translates host page numbers to
// device page numbers through a table cached on chip. Translated reads feed the profiling
// unit, which finds hot pages in slow memory (Count-Min Sketch) and cold pages in fast
// memory (ping-pong bitmap) and sends (hot, cold) pairs back to the remapping unit. The
// remapping unit then blocks the host, rewrites the mapping and starts the migration unit,
// which swaps the two pages' data. Requests of the remapping unit and of the migration unit
// are merged by an arbiter and pass through the HeteroBox emulation logic, which makes the
// single DRAM look like regions of different latency and bandwidth (by default a fast region
// of FAST_PAGES pages with no extra latency and a slow region with 128 extra cycles), before
// reaching the memory controller. Read responses come back through the emulation logic and
// are routed by tag source: migration data to the migration unit, everything else to the
// remapping unit. All configuration and status registers sit behind the MMIO port (the
// CXL.io BAR); see hb_config_regs for the map. A bank of access counters, one per 2 MB of
// device memory, counts every request the memory controller accepts and can be sampled
// through the acc_rd_* port (see hm_access_counter).
//
// Ports: host_* is the CXL.mem side (requests valid/ready, responses valid-only, tag source
// must be SRC_HOST); mmio_* is the BAR register port; acc_rd_* samples one access counter
// (data one cycle later); mc_* is the memory controller, which
// must execute requests in order and return reads valid-only. Host requests are accepted
// only after init_done (identity tables written, caches and bitmaps cleared).
// The composition follows the paper's system overview; the response routing by tag source
// is this design's choice.
module heteromem_top
  import hm_pkg::*;
#(
  parameter int unsigned N_PAGES        = 4194304,  // 16 GB of 4 KB pages
  parameter int unsigned FAST_PAGES     = 1048576,  // 4 GB fast memory
  parameter int unsigned CACHE_LINES    = 32768,    // 2 MB remapping cache
  parameter int unsigned CMS_D          = 4,
  parameter int unsigned CMS_W          = 1024,
  parameter int unsigned CMS_CNT_W      = 8,
  parameter int unsigned EMU_FIFO_DEPTH = 64,
  parameter int unsigned ACC_SHIFT      = 21        // access counters per 2 MB region
) (
  input  logic        clk,
  input  logic        rst_n,
  // CXL.mem from the CXL controller
  input  logic        host_req_valid,
  output logic        host_req_ready,
  input  mem_req_t    host_req,
  output logic        host_rsp_valid,
  output mem_rsp_t    host_rsp,
  // CXL.io BAR registers
  input  logic        mmio_wr,
  input  logic        mmio_rd,
  input  logic [11:0] mmio_addr,
  input  logic [63:0] mmio_wdata,
  output logic        mmio_rvalid,
  output logic [63:0] mmio_rdata,
  // access counters, one per 2**ACC_SHIFT bytes of device memory
  input  logic        acc_rd_en,
  input  logic [$clog2(N_PAGES >> (ACC_SHIFT - 12))-1:0] acc_rd_idx,
  output logic        acc_rd_valid,
  output logic [31:0] acc_rd_data,
  // memory controller
  output logic        mc_req_valid,
  input  logic        mc_req_ready,
  output mem_req_t    mc_req,
  input  logic        mc_rsp_valid,
  input  mem_rsp_t    mc_rsp,
  // status
  output logic        init_done,
  output logic        migrating
);
  hb_cfg_t  hb_cfg;
  hm_cfg_t  hm_cfg;
  hm_stat_t hm_stat;

  hb_config_regs #(.N_PAGES(N_PAGES), .FAST_PAGES(FAST_PAGES)) u_regs (
    .clk, .rst_n, .mmio_wr, .mmio_rd, .mmio_addr, .mmio_wdata, .mmio_rvalid, .mmio_rdata,
    .hb_cfg, .hm_cfg, .hm_stat);

  // Remapping unit.
  logic     rm_req_valid, rm_req_ready;
  mem_req_t rm_req;
  logic     rm_rsp_valid;
  logic     prof_valid;
  page_t    prof_page, rsv_pages;
  logic     mig_valid, mig_ready;
  page_t    mig_hot_page, mig_cold_page;
  logic     mu_en, mu_done, mu_busy;
  page_t    mu_hot_page, mu_cold_page;
  logic     rm_init, prof_init;
  logic [31:0] miss_count, mig_count;

  // Emulation-side response.
  logic     emu_rsp_valid;
  mem_rsp_t emu_rsp;

  assign rm_rsp_valid = emu_rsp_valid && emu_rsp.tag.src != SRC_MIG;

  hm_remapping_unit #(.N_PAGES(N_PAGES), .CACHE_LINES(CACHE_LINES)) u_remap (
    .clk, .rst_n,
    .host_req_valid, .host_req_ready, .host_req, .host_rsp_valid, .host_rsp,
    .mem_req_valid(rm_req_valid), .mem_req_ready(rm_req_ready), .mem_req(rm_req),
    .mem_rsp_valid(rm_rsp_valid), .mem_rsp(emu_rsp),
    .prof_valid, .prof_page, .rsv_pages,
    .mig_valid, .mig_ready, .mig_hot_page, .mig_cold_page,
    .mu_en, .mu_hot_page, .mu_cold_page, .mu_done,
    .init_done(rm_init), .migrating, .miss_count, .mig_count);

  // Profiling unit.
  logic [31:0] hot_count, cold_count, drop_count;
  hm_profiling_unit #(.FAST_PAGES(FAST_PAGES), .CMS_D(CMS_D), .CMS_W(CMS_W), .CMS_CNT_W(CMS_CNT_W)) u_prof (
    .clk, .rst_n, .cfg(hm_cfg), .rsv_pages,
    .acc_valid(prof_valid), .acc_page(prof_page),
    .mig_valid, .mig_ready, .mig_hot_page, .mig_cold_page,
    .init_done(prof_init), .hot_count, .cold_count, .drop_count);

  // Migration unit.
  logic     mu_req_valid, mu_req_ready;
  mem_req_t mu_req;
  hm_migration_unit u_mig (
    .clk, .rst_n, .en(mu_en), .hot_page(mu_hot_page), .cold_page(mu_cold_page),
    .mem_req_valid(mu_req_valid), .mem_req_ready(mu_req_ready), .mem_req(mu_req),
    .mem_rsp_valid(emu_rsp_valid && emu_rsp.tag.src == SRC_MIG), .mem_rsp(emu_rsp),
    .busy(mu_busy), .done(mu_done));

  // Merge toward HeteroBox.
  logic     arb_valid, arb_ready;
  mem_req_t arb_req;
  hm_req_arbiter #(.N(2)) u_arb (
    .clk, .rst_n,
    .in_valid({mu_req_valid, rm_req_valid}), .in_ready({mu_req_ready, rm_req_ready}),
    .in_req({mu_req, rm_req}),
    .out_valid(arb_valid), .out_ready(arb_ready), .out_req(arb_req));

  // HeteroBox emulation logic in front of the memory controller.
  hb_emulation_logic #(.FIFO_DEPTH(EMU_FIFO_DEPTH)) u_emu (
    .clk, .rst_n, .cfg(hb_cfg),
    .up_req_valid(arb_valid), .up_req_ready(arb_ready), .up_req(arb_req),
    .up_rsp_valid(emu_rsp_valid), .up_rsp(emu_rsp),
    .dn_req_valid(mc_req_valid), .dn_req_ready(mc_req_ready), .dn_req(mc_req),
    .dn_rsp_valid(mc_rsp_valid), .dn_rsp(mc_rsp));

  // Per-region access counters on the memory controller side.
  logic acc_init;
  hm_access_counter #(.N_COUNTERS(N_PAGES >> (ACC_SHIFT - 12)), .CNT_W(32), .REGION_SHIFT(ACC_SHIFT)) u_acc (
    .clk, .rst_n, .acc_valid(mc_req_valid && mc_req_ready), .acc_addr(mc_req.addr),
    .rd_en(acc_rd_en), .rd_idx(acc_rd_idx), .rd_valid(acc_rd_valid), .rd_data(acc_rd_data),
    .init_done(acc_init));

  assign init_done = rm_init && prof_init && acc_init;

  always_comb begin
    hm_stat.init_done    = init_done;
    hm_stat.migrations   = mig_count;
    hm_stat.hot_pages    = hot_count;
    hm_stat.cold_pages   = cold_count;
    hm_stat.hot_dropped  = drop_count;
    hm_stat.cache_misses = miss_count;
  end

  // The migration unit is only started by the remapping unit's transaction.
  a_mu_in_txn: assert property (@(posedge clk) disable iff (!rst_n) mu_busy |-> migrating);
endmodule
