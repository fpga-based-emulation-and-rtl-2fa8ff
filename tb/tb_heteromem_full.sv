// Full-size testbench of heteromem_top at its default parameters: 16 GB of device memory
// (4,194,304 pages of 4 KB), 4 GB of it fast, a 2 MB remapping cache, slow-region latency
// 128 cycles. The memory model stores only the lines that were written, so the whole
// address space can be simulated.
//
// One complete operation: power-on initialisation (identity forward and reverse tables,
// 524,288 line writes, plus cache and bitmap clearing), a read of a fast and of a slow page,
// host writes into a slow page, enough reads of that page to make it hot, the resulting
// migration into a cold fast page, and reads that must then return the written data at
// fast-memory latency. The forward and reverse table entries of both pages are checked in
// memory afterwards, the status registers are read over MMIO, and the access counters of
// the 2 MB regions involved must match the requests the memory model received.
module tb_heteromem_full;
  import hm_pkg::*;
  import tb_pkg::*;
  localparam int NP = 4194304, FP = 1048576;
  localparam int HOT = 3000000;   // a slow host page

  logic clk = 0, rst_n = 0;
  logic host_req_valid, host_req_ready, host_rsp_valid;
  mem_req_t host_req, mc_req;
  mem_rsp_t host_rsp, mc_rsp;
  logic mmio_wr, mmio_rd, mmio_rvalid;
  logic [11:0] mmio_addr;
  logic [63:0] mmio_wdata, mmio_rdata;
  logic mc_req_valid, mc_req_ready, mc_rsp_valid;
  logic init_done, migrating;
  logic acc_rd_en, acc_rd_valid;
  logic [12:0] acc_rd_idx;
  logic [31:0] acc_rd_data;
  int checks = 0, failures = 0;
  longint cyc = 0;

  heteromem_top dut (.*);
  mem_model #(.LATENCY(10)) mem (.clk, .rst_n, .req_valid(mc_req_valid), .req_ready(mc_req_ready),
                                 .req(mc_req), .rsp_valid(mc_rsp_valid), .rsp(mc_rsp));
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic fail(string s);
    failures++;
    if (failures < 20) $display("FAIL @%0d %s", cyc, s);
  endtask

  int ref_acc [int];
  always @(posedge clk) if (rst_n && dut.u_acc.init_done && mc_req_valid && mc_req_ready) begin
    int r;
    r = int'(mc_req.addr >> 21);
    ref_acc[r] = ref_acc.exists(r) ? ref_acc[r] + 1 : 1;
  end

  task automatic acc_expect(int r);
    int e;
    e = ref_acc.exists(r) ? ref_acc[r] : 0;
    @(negedge clk); acc_rd_en = 1; acc_rd_idx = $bits(acc_rd_idx)'(r);
    @(negedge clk); acc_rd_en = 0;
    checks++;
    if (!acc_rd_valid || int'(acc_rd_data) != e) fail($sformatf("access counter %0d: %0d, expected %0d", r, acc_rd_data, e));
  endtask

  task automatic mmio_expect(logic [11:0] a, logic [63:0] e, string what);
    @(negedge clk); mmio_rd = 1; mmio_addr = a;
    @(negedge clk); mmio_rd = 0;
    checks++;
    if (!mmio_rvalid || mmio_rdata != e) fail($sformatf("%s: read %0d expected %0d", what, mmio_rdata, e));
  endtask

  line_t ref_mem [addr_t];
  function automatic line_t ref_rd(addr_t a);
    return ref_mem.exists(a) ? ref_mem[a] : pattern(a);
  endfunction

  line_t  exp_data [$];
  longint issue_cyc [$];
  longint last_lat;
  always @(posedge clk) if (rst_n && host_rsp_valid) begin
    checks++;
    if (exp_data.size() == 0) fail("unexpected host response");
    else begin
      if (host_rsp.rdata !== exp_data.pop_front()) fail("host read returned wrong data");
      last_lat = cyc - issue_cyc.pop_front();
    end
  end

  int seq = 0;
  task automatic host_op(bit we, addr_t a);
    @(negedge clk);
    host_req = '0;
    host_req.addr = a; host_req.we = we; host_req.tag.src = SRC_HOST; host_req.tag.id = 16'(seq);
    if (we) begin
      host_req.be = '1;
      for (int w = 0; w < 16; w++) host_req.wdata[w*32 +: 32] = $urandom;
    end
    host_req_valid = 1;
    do @(posedge clk); while (!host_req_ready);
    if (we) ref_mem[a] = host_req.wdata;
    else begin
      exp_data.push_back(ref_rd(a));
      issue_cyc.push_back(cyc);
    end
    seq++;
    #1 host_req_valid = 0;
  endtask

  task automatic timed_read(addr_t a, output longint lat);
    host_op(0, a);
    while (exp_data.size() != 0) @(posedge clk);
    lat = last_lat;
  endtask

  function automatic int fwd(int h);
    line_t l;
    l = mem.peek(addr_t'(h) * 4);
    return int'(l[(h % 16) * 32 +: 32]);
  endfunction
  function automatic int rev(int d);
    line_t l;
    l = mem.peek(addr_t'(NP) * 4 + addr_t'(d) * 4);
    return int'(l[(d % 16) * 32 +: 32]);
  endfunction

  function automatic addr_t page_addr(int p, int l);
    return {page_t'(p), 6'(l), 6'b0};
  endfunction

  int n_mig = 0, n_hot = 0, hot_dpa = -1, cold_dpa = -1;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_prof.hot_valid) n_hot++;
    if (dut.mu_en) begin hot_dpa = int'(dut.mu_hot_page); cold_dpa = int'(dut.mu_cold_page); end
    if (dut.mu_done) n_mig++;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint lf, ls, lh, t0;
    host_req_valid = 0; host_req = '0; acc_rd_en = 0; acc_rd_idx = '0; mmio_wr = 0; mmio_rd = 0; mmio_addr = '0; mmio_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    t0 = cyc;
    wait (init_done);
    $display("initialisation took %0d cycles, %0d table lines written", cyc - t0, mem.n_writes);
    checks++;
    if (mem.n_writes != 2 * NP / 16) fail("table initialisation write count");
    for (int i = 0; i < 64; i++) begin
      int p;
      p = (i == 0) ? NP - 1 : $urandom_range(0, NP - 1);
      checks++;
      if (fwd(p) != p || rev(p) != p) fail($sformatf("identity table at page %0d", p));
    end
    mmio_expect(12'h000, 2, "REGION_NUM");
    mmio_expect(12'h128, 64'(NP) * 4096 - 1, "slow region end");
    mmio_expect(12'h130, 128, "slow region latency");

    timed_read(page_addr(20000, 0), lf);
    timed_read(page_addr(20000, 1), lf);
    timed_read(page_addr(HOT, 0), ls);
    timed_read(page_addr(HOT, 1), ls);
    $display("fast read %0d cycles, slow read %0d cycles", lf, ls);
    checks++;
    if (ls - lf < 128 - 12 || ls - lf > 130) fail("slow-region latency");

    // Write some of the hot page, then read it until the sketch calls it hot.
    for (int l = 0; l < 64; l += 3) host_op(1, page_addr(HOT, l));
    for (int r = 0; r < 12; r++) host_op(0, page_addr(HOT, (r * 5) % 64));
    while (exp_data.size() != 0 || n_mig == 0) @(posedge clk);
    repeat (10) @(posedge clk);
    $display("migration of slow dPA %0d with fast dPA %0d done at cycle %0d", hot_dpa, cold_dpa, cyc);
    checks += 5;
    if (n_hot != 1) fail("hot detection count");
    if (hot_dpa != HOT) fail("wrong page migrated");
    if (cold_dpa >= FP || cold_dpa < 8192) fail("cold page not in fast memory above the tables");
    if (fwd(HOT) != cold_dpa || rev(cold_dpa) != HOT) fail("tables of the hot page");
    if (fwd(cold_dpa) != HOT || rev(HOT) != cold_dpa) fail("tables of the cold page");

    // The page now lives in fast memory: data intact, fast latency.
    for (int l = 0; l < 64; l++) host_op(0, page_addr(HOT, l));
    while (exp_data.size() != 0) @(posedge clk);
    timed_read(page_addr(HOT, 7), lh);
    timed_read(page_addr(cold_dpa, 9), ls);
    $display("hot page now read in %0d cycles; displaced page in %0d", lh, ls);
    checks += 2;
    if (lh > lf + 2) fail("migrated page not at fast latency");
    if (ls < 128) fail("displaced page not at slow latency");
    acc_expect(0);
    acc_expect(20000 / 512);
    acc_expect(HOT / 512);
    acc_expect(cold_dpa / 512);
    mmio_expect(12'h308, 1, "MIGRATIONS");
    mmio_expect(12'h310, 1, "HOT_PAGES");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
