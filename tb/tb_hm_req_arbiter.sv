// Testbench of the round-robin request arbiter: three sources with random valid patterns and
// random output backpressure. Checks that every request comes out exactly once, in order per
// source, that a presented request is not withdrawn, and that with all sources busy the
// grants rotate (no source waits more than N grants).
module tb_hm_req_arbiter;
  import hm_pkg::*;
  localparam int N = 3;
  localparam int PER_SRC = 200;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid, in_ready;
  mem_req_t [N-1:0] in_req;
  logic out_valid, out_ready;
  mem_req_t out_req;
  int checks = 0, failures = 0;
  int sent [N], got [N], wait_cnt [N];
  bit all_busy_phase;

  hm_req_arbiter #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Sources: the request for source s carries (s, sequence number) in its tag.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_valid <= '0;
      for (int s = 0; s < N; s++) sent[s] <= 0;
    end else begin
      for (int s = 0; s < N; s++) begin
        if (in_valid[s] && in_ready[s]) begin
          sent[s] <= sent[s] + 1;
          in_valid[s] <= (sent[s] + 1 < PER_SRC) && (all_busy_phase || ($urandom % 3 != 0));
          in_req[s].tag.id <= 16'(s * 1000 + sent[s] + 1);
          in_req[s].addr   <= addr_t'(s);
        end else if (!in_valid[s] && sent[s] < PER_SRC) begin
          in_valid[s] <= all_busy_phase || ($urandom % 2 == 0);
          in_req[s].tag.id <= 16'(s * 1000 + sent[s]);
          in_req[s].addr   <= addr_t'(s);
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n) begin
      out_ready <= all_busy_phase ? 1'b1 : ($urandom % 4 != 0);
      for (int s = 0; s < N; s++)
        if (in_valid[s] && !in_ready[s]) wait_cnt[s] <= wait_cnt[s] + (out_valid && out_ready ? 1 : 0);
        else wait_cnt[s] <= 0;
      if (out_valid && out_ready) begin
        int s;
        s = int'(out_req.addr);
        checks++;
        if (out_req.tag.id != 16'(s * 1000 + got[s])) begin
          failures++;
          $display("FAIL source %0d: got id %0d expected %0d", s, out_req.tag.id, s * 1000 + got[s]);
        end
        got[s] <= got[s] + 1;
      end
      for (int s = 0; s < N; s++)
        if (all_busy_phase && wait_cnt[s] > N) begin
          checks++; failures++;
          $display("FAIL source %0d starved", s);
        end
    end
  end

  initial begin
    for (int s = 0; s < N; s++) begin got[s] = 0; wait_cnt[s] = 0; end
    out_ready = 0;
    in_req = '0;
    all_busy_phase = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (600) @(posedge clk);
    all_busy_phase = 1;
    wait (got[0] == PER_SRC && got[1] == PER_SRC && got[2] == PER_SRC);
    repeat (5) @(posedge clk);
    for (int s = 0; s < N; s++) begin
      checks++;
      if (got[s] != PER_SRC) begin failures++; $display("FAIL source %0d delivered %0d", s, got[s]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
