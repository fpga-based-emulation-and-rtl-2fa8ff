// Behavioural model of the memory controller and DRAM, for simulation only.
//
// Executes requests strictly in the order accepted. Writes merge their bytes (by byte mask)
// into a sparse line store; reads capture the line at acceptance and return it LATENCY
// cycles later, valid-only, one response per cycle, in order. A line never written reads as
// tb_pkg::pattern(address). If READY_PCT < 100 the model drops req_ready at random.
// Backdoor tasks let a testbench read and swap lines directly.
module mem_model
  import hm_pkg::*;
#(
  parameter int unsigned LATENCY   = 10,
  parameter int unsigned READY_PCT = 100
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  output mem_rsp_t rsp
);
  typedef struct {
    longint   due;
    mem_rsp_t r;
  } pend_t;

  line_t  store [logic [ADDR_W-7:0]];
  pend_t  pend  [$];
  longint cycle;
  int     n_reads, n_writes;

  function automatic line_t peek(addr_t a);
    logic [ADDR_W-7:0] li;
    li = a[ADDR_W-1:6];
    return store.exists(li) ? store[li] : tb_pkg::pattern({li, 6'b0});
  endfunction

  function automatic void poke(addr_t a, line_t d);
    store[a[ADDR_W-1:6]] = d;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) req_ready <= 1'b1;
    else        req_ready <= (READY_PCT >= 100) || (($urandom % 100) < READY_PCT);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cycle     <= 0;
      rsp_valid <= 1'b0;
      rsp       <= '0;
      n_reads   <= 0;
      n_writes  <= 0;
    end else begin
      cycle     <= cycle + 1;
      rsp_valid <= 1'b0;
      if (pend.size() > 0 && pend[0].due <= cycle) begin
        rsp_valid <= 1'b1;
        rsp       <= pend[0].r;
        void'(pend.pop_front());
      end
      if (req_valid && req_ready) begin
        if (req.we) begin
          line_t cur;
          cur = peek(req.addr);
          for (int b = 0; b < BE_W; b++)
            if (req.be[b]) cur[b*8 +: 8] = req.wdata[b*8 +: 8];
          poke(req.addr, cur);
          n_writes <= n_writes + 1;
        end else begin
          pend_t p;
          p.due     = cycle + LATENCY;
          p.r.rdata = peek(req.addr);
          p.r.tag   = req.tag;
          pend.push_back(p);
          n_reads <= n_reads + 1;
        end
      end
    end
  end
endmodule
