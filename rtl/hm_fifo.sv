// Synchronous first-in first-out queue used for the request, fill, tag, response, cold-page
// and migration queues of the design.
//
// A circular buffer with read and write pointers and an occupancy count. Push and pop may
// happen in the same cycle, also when full (the pop frees the slot). The head is shown
// combinationally on rd_data whenever the queue is not empty. `count` is the occupancy.
// Depth need not be a power of two. Pushing while full without popping, or popping while
// empty, is a caller error caught by assertions. This is a generic helper; its depth at
// each use is this design's choice unless the paper gives one.
module hm_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  T                           wr_data,
  input  logic                       pop,
  output T                           rd_data,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                mem [DEPTH];
  logic [PW-1:0]   rd_ptr, wr_ptr;

  assign empty   = (count == '0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign rd_data = mem[rd_ptr];

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      if (push && !pop) count <= count + 1'b1;
      else if (pop && !push) count <= count - 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
