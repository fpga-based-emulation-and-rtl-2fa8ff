// Testbench of the remapping unit (64 pages, 2-line remapping cache so that lines conflict,
// in-order memory model with random stalls). The testbench plays the migration unit: on
// mu_en it swaps the two pages' data in the memory model and then pulses mu_done.
// Checks:
//  - after power-on the forward and reverse tables in memory hold the identity mapping;
//  - random host reads and writes return, through any number of migrations, exactly the
//    data a plain memory would (a reference model indexed by host address);
//  - after every migration the forward and reverse tables are inverse permutations;
//  - a cache hit reaches memory 2 cycles after the host request is accepted;
//  - host requests are refused while a migration is in progress;
//  - cache misses, hits and migrations all occur, and profiling sees one page per host read.
module tb_hm_remapping_unit;
  import hm_pkg::*;
  import tb_pkg::*;
  localparam int NP = 64, RSV = 1, NMIG = 12;

  logic clk = 0, rst_n = 0;
  logic host_req_valid, host_req_ready, host_rsp_valid;
  mem_req_t host_req, mem_req;
  mem_rsp_t host_rsp, mem_rsp;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic prof_valid, mig_valid, mig_ready, mu_en, mu_done, init_done, migrating;
  page_t prof_page, rsv_pages, mig_hot_page, mig_cold_page, mu_hot_page, mu_cold_page;
  logic [31:0] miss_count, mig_count;
  int checks = 0, failures = 0;
  longint cyc = 0;

  hm_remapping_unit #(.N_PAGES(NP), .CACHE_LINES(2), .FIFO_DEPTH(4)) dut (.*);
  mem_model #(.LATENCY(8), .READY_PCT(80)) mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
                                                 .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp(mem_rsp));
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic fail(string s);
    failures++;
    if (failures < 20) $display("FAIL %s", s);
  endtask

  // Reference host view.
  line_t ref_mem [addr_t];
  function automatic line_t ref_rd(addr_t a);
    addr_t la;
    la = {a[ADDR_W-1:6], 6'b0};
    return ref_mem.exists(la) ? ref_mem[la] : pattern(la);
  endfunction

  line_t exp_data [$];
  int    exp_id   [$];
  int    n_reads_done = 0, n_prof = 0, blocked_seen = 0;

  always @(posedge clk) if (rst_n) begin
    if (host_rsp_valid) begin
      checks++;
      if (exp_data.size() == 0) fail("unexpected host response");
      else begin
        line_t d; int id;
        d = exp_data.pop_front(); id = exp_id.pop_front();
        if (host_rsp.rdata !== d || int'(host_rsp.tag.id) != id) fail($sformatf("host read %0d returned wrong data", id));
      end
      n_reads_done++;
    end
    if (prof_valid) n_prof++;
    if (migrating && host_req_valid) begin
      blocked_seen++;
      checks++;
      if (host_req_ready) fail("host accepted during migration");
    end
  end

  // Migration unit stand-in: swap the two pages in memory, then report done.
  always @(posedge clk) if (rst_n && mu_en) begin
    page_t h, c;
    h = mu_hot_page; c = mu_cold_page;
    fork begin
      repeat (30) @(posedge clk);
      for (int l = 0; l < 64; l++) begin
        line_t a, b;
        a = mem.peek({h, 12'(l * 64)}); b = mem.peek({c, 12'(l * 64)});
        mem.poke({h, 12'(l * 64)}, b); mem.poke({c, 12'(l * 64)}, a);
      end
      @(negedge clk); mu_done = 1;
      @(negedge clk); mu_done = 0;
    end join_none
  end

  function automatic int fwd(int h);
    line_t l;
    l = mem.peek(addr_t'(h * 4));
    return int'(l[(h % 16) * 32 +: 32]);
  endfunction
  function automatic int rev(int d);
    line_t l;
    l = mem.peek(addr_t'(NP * 4 + d * 4));
    return int'(l[(d % 16) * 32 +: 32]);
  endfunction

  task automatic check_tables(string when);
    for (int h = 0; h < NP; h++) begin
      checks++;
      if (fwd(h) >= NP || rev(fwd(h)) != h) fail($sformatf("%s: tables not inverse at hPA page %0d", when, h));
    end
  endtask

  int seq = 0;
  task automatic host_op(bit we, addr_t a);
    @(negedge clk);
    host_req = '0;
    host_req.addr = a; host_req.we = we; host_req.tag.src = SRC_HOST; host_req.tag.id = 16'(seq);
    if (we) begin
      host_req.be = {$urandom, $urandom};
      for (int w = 0; w < 16; w++) host_req.wdata[w*32 +: 32] = $urandom;
    end
    host_req_valid = 1;
    do @(posedge clk); while (!host_req_ready);
    if (we) begin
      line_t cur;
      cur = ref_rd(a);
      for (int b = 0; b < BE_W; b++) if (host_req.be[b]) cur[b*8 +: 8] = host_req.wdata[b*8 +: 8];
      ref_mem[{a[ADDR_W-1:6], 6'b0}] = cur;
    end else begin
      exp_data.push_back(ref_rd(a));
      exp_id.push_back(seq);
    end
    seq++;
    #1 host_req_valid = 0;
  endtask

  function automatic addr_t rand_addr();
    return {page_t'($urandom_range(RSV, NP - 1)), 6'($urandom % 64), 6'b0};
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int migs_sent, miss0;
    host_req_valid = 0; host_req = '0; mig_valid = 0; mig_hot_page = '0; mig_cold_page = '0; mu_done = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (init_done);
    checks++; if (rsv_pages != RSV) fail("reserved page count");
    for (int h = 0; h < NP; h++) begin
      checks++;
      if (fwd(h) != h || rev(h) != h) fail($sformatf("identity table at %0d", h));
    end
    // Hit latency: touch page 5, then read it again when idle.
    host_op(0, {22'd5, 12'h040});
    repeat (40) @(negedge clk);
    begin
      longint t0;
      int id;
      id = seq;
      miss0 = miss_count;
      host_op(0, {22'd5, 12'h080});
      t0 = cyc - 1;
      while (!(mem_req_valid && mem_req_ready && !mem_req.we && mem_req.tag.src == SRC_HOST && int'(mem_req.tag.id) == id)) @(posedge clk);
      checks++;
      if (cyc - t0 != 2 || miss_count != miss0) fail($sformatf("cache hit took %0d cycles to memory", cyc - t0));
    end
    // Random traffic interleaved with migrations.
    migs_sent = 0;
    for (int i = 0; i < 1500; i++) begin
      host_op(($urandom % 3) == 0, rand_addr());
      if (i % 120 == 60 && migs_sent < NMIG) begin
        page_t h, c;
        h = page_t'($urandom_range(32, NP - 1));
        c = page_t'($urandom_range(RSV, 31));
        @(negedge clk);
        mig_valid = 1; mig_hot_page = h; mig_cold_page = c;
        do @(posedge clk); while (!mig_ready);
        #1 mig_valid = 0;
        migs_sent++;
      end
    end
    wait (exp_data.size() == 0 && !migrating);
    repeat (20) @(negedge clk);
    check_tables("end");
    // Read back every line the host wrote.
    foreach (ref_mem[a]) host_op(0, a);
    wait (exp_data.size() == 0);
    checks += 5;
    if (mig_count != NMIG) fail($sformatf("%0d migrations done, %0d sent", mig_count, NMIG));
    if (miss_count == 0) fail("no cache miss");
    if (blocked_seen == 0) fail("host never blocked by a migration");
    if (n_prof != n_reads_done) fail($sformatf("profiled %0d of %0d reads", n_prof, n_reads_done));
    if (n_reads_done < 500) fail("too few reads");
    $display("reads %0d misses %0d migrations %0d blocked %0d", n_reads_done, miss_count, mig_count, blocked_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
