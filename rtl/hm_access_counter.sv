// Access counters: one counter per 2 MB region of device memory, for observing where the
// memory traffic goes (for example, whether hot data has been gathered into fast memory).
//
// Every request accepted by the memory controller (acc_valid, with its device byte address)
// increments the counter of its 2 MB region, addr >> REGION_SHIFT; counters wrap around.
// The host samples them through a read port: rd_en with rd_idx returns the counter on
// rd_data, with rd_valid, one cycle later. Reading every counter once per sampling interval
// and taking differences (modulo 2^CNT_W) gives that interval's access counts. After reset
// a sweep clears all counters, one per cycle; accesses during the sweep are not counted, and
// init_done rises when it ends. The array has one write port (the increment) and two read
// ports, so it maps onto a block RAM pair. N_COUNTERS must be a power of two.
//
// One 32-bit counter per 2 MB physical page of the device memory follows the paper's
// measurement set-up (8,192 counters for 16 GB). Counting every request the memory controller
// accepts (host traffic after translation, table accesses and migration traffic alike),
// the read port and the wrap-around are this design's choices.
module hm_access_counter
  import hm_pkg::*;
#(
  parameter int unsigned N_COUNTERS   = 8192,  // 16 GB / 2 MB
  parameter int unsigned CNT_W        = 32,
  parameter int unsigned REGION_SHIFT = 21     // 2 MB regions
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          acc_valid,
  input  addr_t                         acc_addr,
  input  logic                          rd_en,
  input  logic [$clog2(N_COUNTERS)-1:0] rd_idx,
  output logic                          rd_valid,
  output logic [CNT_W-1:0]              rd_data,
  output logic                          init_done
);
  localparam int unsigned IW = $clog2(N_COUNTERS);

  logic [CNT_W-1:0] cnt [N_COUNTERS];
  logic [IW:0]      clr_ptr;
  logic [IW-1:0]    acc_idx;

  assign init_done = clr_ptr[IW];
  assign acc_idx   = IW'(acc_addr >> REGION_SHIFT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clr_ptr  <= '0;
      rd_valid <= 1'b0;
    end else begin
      rd_valid <= rd_en && init_done;
      if (!init_done) clr_ptr <= clr_ptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!init_done)     cnt[clr_ptr[IW-1:0]] <= '0;
    else if (acc_valid) cnt[acc_idx] <= cnt[acc_idx] + 1'b1;
  end

  always_ff @(posedge clk) if (rd_en) rd_data <= cnt[rd_idx];
endmodule
