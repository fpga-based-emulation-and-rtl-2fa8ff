// HeteroBox emulation logic: gives each configured region of one homogeneous DRAM its own
// read latency and read bandwidth.
//
// Sits between the request source (HeteroMem) and the memory controller. A free-running
// timestamp register counts cycles. When a read is accepted, the region classifier finds its
// region and the sum timestamp + latency[region] is pushed, with the region, into the time
// stamp FIFO; the request itself goes on to memory unchanged, without the tag. Read data
// coming back is pushed into the response FIFO. Each cycle the pop logic looks at the two
// FIFO heads: once the timestamp has passed the tag and the region's bandwidth counter is
// below its bandwidth register, both heads are popped and the response is sent up one cycle
// later (registered). Bandwidth counters count returned responses per region and are all
// cleared every cfg.bw_interval cycles. Writes are passed through undelayed.
//
// Interface: valid/ready on both request sides, valid-only on both response sides (the
// memory controller and HeteroMem always accept a response). A read is accepted only while
// the memory is ready and the tag FIFO has room; because every response has a tag entry,
// the response FIFO, of equal depth, never overflows. Memory must return reads in order.
//
// The register set, the tag-plus-FIFO mechanism, the per-region bandwidth counter and the
// interval reset follow the paper; FIFO depth, the 32-bit wrap-safe timestamp compare and the
// ready rule are this design's choices. Latency is counted in this module's clock cycles.
module hb_emulation_logic
  import hm_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 64,
  parameter int unsigned TS_W       = 32
) (
  input  logic     clk,
  input  logic     rst_n,
  input  hb_cfg_t  cfg,
  // from HeteroMem
  input  logic     up_req_valid,
  output logic     up_req_ready,
  input  mem_req_t up_req,
  output logic     up_rsp_valid,
  output mem_rsp_t up_rsp,
  // to the memory controller
  output logic     dn_req_valid,
  input  logic     dn_req_ready,
  output mem_req_t dn_req,
  input  logic     dn_rsp_valid,
  input  mem_rsp_t dn_rsp
);
  localparam int unsigned RW = $clog2(HB_MAX_REGIONS);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  typedef struct packed {
    logic [TS_W-1:0] due;     // timestamp + region latency
    logic            limited; // address was in a region (bandwidth applies)
    logic [RW-1:0]   region;
  } ts_entry_t;

  logic [TS_W-1:0]    timestamp;
  logic [HB_BW_W-1:0] interval_cnt;
  logic [HB_BW_W-1:0] bw_cnt [HB_MAX_REGIONS];

  // Region classification of the incoming request.
  logic          cls_hit;
  logic [RW-1:0] cls_region;
  hb_region_classifier u_cls (.addr(up_req.addr), .cfg(cfg), .hit(cls_hit), .region(cls_region));

  // Time stamp FIFO and response FIFO.
  ts_entry_t ts_in, ts_head;
  logic      ts_push, ts_pop, ts_empty, ts_full;
  logic [CW-1:0] ts_count;
  mem_rsp_t  rsp_head;
  logic      rsp_pop, rsp_empty, rsp_full;
  logic [CW-1:0] rsp_count;

  always_comb begin
    ts_in.due     = timestamp + TS_W'(cls_hit ? cfg.region[cls_region].latency : '0);
    ts_in.limited = cls_hit;
    ts_in.region  = cls_region;
  end

  hm_fifo #(.T(ts_entry_t), .DEPTH(FIFO_DEPTH)) u_ts_fifo (
    .clk, .rst_n, .push(ts_push), .wr_data(ts_in), .pop(ts_pop), .rd_data(ts_head),
    .empty(ts_empty), .full(ts_full), .count(ts_count));

  hm_fifo #(.T(mem_rsp_t), .DEPTH(FIFO_DEPTH)) u_rsp_fifo (
    .clk, .rst_n, .push(dn_rsp_valid), .wr_data(dn_rsp), .pop(rsp_pop), .rd_data(rsp_head),
    .empty(rsp_empty), .full(rsp_full), .count(rsp_count));

  // Ready logic and request forwarding.
  assign up_req_ready = dn_req_ready && (up_req.we || !ts_full);
  assign dn_req_valid = up_req_valid && (up_req.we || !ts_full);
  assign dn_req       = up_req;
  assign ts_push      = up_req_valid && up_req_ready && !up_req.we;

  // Pop logic: the timestamp must exceed the tag, and the region must have bandwidth left.
  logic due_passed, bw_ok;
  assign due_passed = $signed(timestamp - ts_head.due) > 0;
  assign bw_ok      = !ts_head.limited || (bw_cnt[ts_head.region] < cfg.region[ts_head.region].bw_limit);
  assign rsp_pop    = !rsp_empty && !ts_empty && due_passed && bw_ok;
  assign ts_pop     = rsp_pop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      timestamp    <= '0;
      interval_cnt <= '0;
      for (int r = 0; r < HB_MAX_REGIONS; r++) bw_cnt[r] <= '0;
      up_rsp_valid <= 1'b0;
      up_rsp       <= '0;
    end else begin
      timestamp    <= timestamp + 1'b1;
      up_rsp_valid <= rsp_pop;
      if (rsp_pop) up_rsp <= rsp_head;
      if (interval_cnt + 1'b1 >= cfg.bw_interval) begin
        interval_cnt <= '0;
        for (int r = 0; r < HB_MAX_REGIONS; r++) bw_cnt[r] <= '0;
      end else begin
        interval_cnt <= interval_cnt + 1'b1;
        if (rsp_pop && ts_head.limited) bw_cnt[ts_head.region] <= bw_cnt[ts_head.region] + 1'b1;
      end
    end
  end

  // Every response has a tag, so the response FIFO never holds more entries than the tag FIFO.
  a_rsp_has_tag: assert property (@(posedge clk) disable iff (!rst_n) rsp_count <= ts_count);
  a_no_rsp_overflow: assert property (@(posedge clk) disable iff (!rst_n) dn_rsp_valid |-> !rsp_full);
endmodule
