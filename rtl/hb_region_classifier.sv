// HeteroBox region classifier: decides which emulated memory region a device address is in.
//
// Each of the enabled regions (index below cfg.region_num) is a byte range
// [start_addr, end_addr], end inclusive as in the configuration file format. All ranges are
// compared in parallel and the lowest matching index wins. `hit` is low when the address
// lies in no enabled region; the emulation logic then adds no latency and no bandwidth
// limit. Purely combinational. The paper names the classifier and its job; the parallel
// compare, the priority on overlap and the no-match behaviour are this design's choices.
module hb_region_classifier
  import hm_pkg::*;
(
  input  addr_t                              addr,
  input  hb_cfg_t                            cfg,
  output logic                               hit,
  output logic [$clog2(HB_MAX_REGIONS)-1:0]  region
);
  always_comb begin
    hit    = 1'b0;
    region = '0;
    for (int i = HB_MAX_REGIONS - 1; i >= 0; i--) begin
      if (32'(i) < 32'(cfg.region_num) &&
          addr >= cfg.region[i].start_addr && addr <= cfg.region[i].end_addr) begin
        hit    = 1'b1;
        region = ($clog2(HB_MAX_REGIONS))'(i);
      end
    end
  end
endmodule
