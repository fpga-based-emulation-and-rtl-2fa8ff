// Round-robin arbiter that merges N valid/ready memory request streams onto one.
//
// Used where the remapping unit joins its table requests with translated host requests
// (the "Arbiter" of the remapping unit's block diagram) and where the migration unit's
// requests join the remapping unit's on their way to the HeteroBox emulation logic.
// A grant is chosen combinationally among the valid inputs, starting from the input after
// the last one served, and it is held (locked) until the output handshake completes, so a
// request that has been presented is never withdrawn. The paper names the arbiter only;
// round-robin and the lock are this design's choices.
module hm_req_arbiter
  import hm_pkg::*;
#(
  parameter int unsigned N = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N-1:0]     in_valid,
  output logic [N-1:0]     in_ready,
  input  mem_req_t [N-1:0] in_req,
  output logic             out_valid,
  input  logic             out_ready,
  output mem_req_t         out_req
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] last, pick, grant;
  logic          locked;
  logic [IW-1:0] lock_idx;
  logic          any;

  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int k = N; k >= 1; k--) begin
      int idx;
      idx = (32'(last) + k) % N;
      if (in_valid[idx]) begin
        any  = 1'b1;
        pick = IW'(idx);
      end
    end
  end

  assign grant     = locked ? lock_idx : pick;
  assign out_valid = locked ? 1'b1 : any;
  assign out_req   = in_req[grant];

  always_comb begin
    in_ready = '0;
    in_ready[grant] = out_valid && out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last     <= IW'(N - 1);
      locked   <= 1'b0;
      lock_idx <= '0;
    end else if (out_valid && out_ready) begin
      last   <= grant;
      locked <= 1'b0;
    end else if (out_valid) begin
      locked   <= 1'b1;
      lock_idx <= grant;
    end
  end

  // A presented request stays valid until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           locked |-> in_valid[lock_idx]);
endmodule
