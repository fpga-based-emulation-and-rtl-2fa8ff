// Testbench of the per-region access counters (16 counters of 256-byte regions, 6-bit
// counters so that wrap-around happens). Random accesses, one or none per cycle, are counted
// in a reference model; random reads must return, one cycle later, the reference count as it
// stood before that cycle's access (modulo 2^6). Also checks that nothing is counted and no
// read is answered before init_done, and that every counter reads 0 right after the sweep.
module tb_hm_access_counter;
  import hm_pkg::*;
  localparam int N = 16, CW = 6, SH = 8;

  logic clk = 0, rst_n = 0;
  logic acc_valid, rd_en, rd_valid, init_done;
  addr_t acc_addr;
  logic [3:0] rd_idx;
  logic [CW-1:0] rd_data;
  int checks = 0, failures = 0;
  int ref_cnt [N];
  int exp_q [$];

  hm_access_counter #(.N_COUNTERS(N), .CNT_W(CW), .REGION_SHIFT(SH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Response checker.
  always @(posedge clk) if (rst_n) begin
    if (rd_valid) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected rd_valid"); end
      else begin
        int e;
        e = exp_q.pop_front();
        if (int'(rd_data) != e) begin failures++; $display("FAIL read %0d expected %0d", rd_data, e); end
      end
    end
  end

  initial begin
    acc_valid = 0; acc_addr = '0; rd_en = 0; rd_idx = '0;
    for (int i = 0; i < N; i++) ref_cnt[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Accesses and reads during the clearing sweep have no effect.
    @(negedge clk);
    acc_valid = 1; acc_addr = addr_t'(3 << SH); rd_en = 1; rd_idx = 3;
    @(negedge clk);
    checks++;
    if (rd_valid) begin failures++; $display("FAIL read answered during sweep"); end
    acc_valid = 0; rd_en = 0;
    wait (init_done);
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      rd_en = 1; rd_idx = 4'(i); exp_q.push_back(0);
      @(negedge clk);
    end
    rd_en = 0;
    @(negedge clk);
    for (int t = 0; t < 5000; t++) begin
      int r;
      acc_valid = ($urandom % 3) != 0;
      r = $urandom % N;
      acc_addr = {addr_t'(r) << SH} | addr_t'($urandom % 256);
      rd_en = ($urandom % 4) == 0;
      rd_idx = 4'($urandom % N);
      if (rd_en) exp_q.push_back(ref_cnt[rd_idx] % (1 << CW));
      if (acc_valid) ref_cnt[r]++;
      @(negedge clk);
    end
    acc_valid = 0; rd_en = 0;
    for (int i = 0; i < N; i++) begin
      rd_en = 1; rd_idx = 4'(i); exp_q.push_back(ref_cnt[i] % (1 << CW));
      @(negedge clk);
    end
    rd_en = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d reads unanswered", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
