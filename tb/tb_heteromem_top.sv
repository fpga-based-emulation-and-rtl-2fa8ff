// End-to-end testbench of heteromem_top at reduced size: 64 pages of 4 KB (16 fast, 48
// slow), a 2-line remapping cache, a 64-column sketch and a 16-entry emulation FIFO, with
// an in-order memory model (10-cycle latency, random stalls) as the memory controller.
//
// Sequence: reset values over MMIO; fast- and slow-region read latency; a slow-region
// bandwidth cap; hammering slow pages with migration disabled (no migration may happen);
// then, with migration enabled, a mixed random workload that hammers a set of slow pages
// larger than the supply of cold fast pages, so that pairs are formed, rate limited and
// dropped. A reference model indexed by host address checks every read; after the run the
// forward and reverse tables in memory must be inverse permutations, every migrated page
// must sit in fast memory, and the MMIO status registers must agree with what was seen.
// The per-region access counters must match the requests seen by the memory model.
// Every mechanism below is counted and a failure is counted for any that never occurred.
module tb_heteromem_top;
  import hm_pkg::*;
  import tb_pkg::*;
  localparam int NP = 64, FP = 16, RSV = 1;

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
  logic [3:0] acc_rd_idx;
  logic [31:0] acc_rd_data;
  int checks = 0, failures = 0;
  longint cyc = 0;

  heteromem_top #(.N_PAGES(NP), .FAST_PAGES(FP), .CACHE_LINES(2), .CMS_W(64), .EMU_FIFO_DEPTH(16), .ACC_SHIFT(14)) dut (.*);
  mem_model #(.LATENCY(10), .READY_PCT(85)) mem (.clk, .rst_n, .req_valid(mc_req_valid), .req_ready(mc_req_ready),
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
    r = int'(mc_req.addr >> 14);
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

  // ---------------------------------------------------------------- mechanism counters
  int n_hit, n_miss_fill, n_hot, n_cold, n_pair, n_mig, n_blocked, n_rate_lim, n_drop,
      n_bw_block, n_tag_full, n_lat_wait, n_mig_rd, n_mig_wr, n_bm_swap, n_acc;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_remap.rq_push && !dut.u_remap.tq_push) n_hit++;
    if (dut.u_remap.tq_push) n_miss_fill++;
    if (dut.u_prof.hot_valid) n_hot++;
    if (dut.u_prof.cold_valid && dut.u_prof.cold_ready) n_cold++;
    if (dut.u_prof.mf_push) n_pair++;
    if (dut.mu_done) n_mig++;
    if (host_req_valid && migrating && !host_req_ready) n_blocked++;
    if (!dut.u_prof.mf_empty && dut.hm_cfg.mig_enable && !dut.u_prof.mig_valid) n_rate_lim++;
    if (dut.u_prof.hot_valid && !dut.u_prof.mf_push) n_drop++;
    if (!dut.u_emu.rsp_empty && !dut.u_emu.ts_empty && dut.u_emu.due_passed && !dut.u_emu.bw_ok) n_bw_block++;
    if (dut.u_emu.up_req_valid && !dut.u_emu.up_req.we && dut.u_emu.ts_full) n_tag_full++;
    if (!dut.u_emu.rsp_empty && !dut.u_emu.ts_empty && !dut.u_emu.due_passed) n_lat_wait++;
    if (dut.u_mig.mem_req_valid && dut.u_mig.mem_req_ready && !dut.u_mig.mem_req.we) n_mig_rd++;
    if (dut.u_mig.mem_req_valid && dut.u_mig.mem_req_ready && dut.u_mig.mem_req.we) n_mig_wr++;
    if (dut.u_prof.u_bitmap.sel != $past(dut.u_prof.u_bitmap.sel)) n_bm_swap++;
  end

  // ---------------------------------------------------------------- MMIO
  task automatic mmio_write(logic [11:0] a, logic [63:0] d);
    @(negedge clk); mmio_wr = 1; mmio_addr = a; mmio_wdata = d;
    @(negedge clk); mmio_wr = 0;
  endtask
  task automatic mmio_read(logic [11:0] a, output logic [63:0] d);
    @(negedge clk); mmio_rd = 1; mmio_addr = a;
    @(negedge clk); mmio_rd = 0;
    checks++;
    if (!mmio_rvalid) fail("mmio read not valid after one cycle");
    d = mmio_rdata;
  endtask
  task automatic mmio_expect(logic [11:0] a, logic [63:0] e, string what);
    logic [63:0] d;
    mmio_read(a, d);
    checks++;
    if (d != e) fail($sformatf("%s: read %0d expected %0d", what, d, e));
  endtask

  // ---------------------------------------------------------------- host side with reference
  line_t ref_mem [addr_t];
  function automatic line_t ref_rd(addr_t a);
    addr_t la;
    la = {a[ADDR_W-1:6], 6'b0};
    return ref_mem.exists(la) ? ref_mem[la] : pattern(la);
  endfunction

  line_t  exp_data [$];
  int     exp_id   [$];
  longint issue_cyc [int];
  longint last_lat;
  int     n_rsp = 0;

  always @(posedge clk) if (rst_n && host_rsp_valid) begin
    checks++;
    if (exp_data.size() == 0) fail("unexpected host response");
    else begin
      line_t d; int id;
      d = exp_data.pop_front(); id = exp_id.pop_front();
      if (host_rsp.rdata !== d || int'(host_rsp.tag.id) != id) fail($sformatf("host read %0d wrong data", id));
      last_lat = cyc - issue_cyc[id];
      issue_cyc.delete(id);
    end
    n_rsp++;
  end

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
      issue_cyc[seq] = cyc;
    end
    seq++;
    #1 host_req_valid = 0;
  endtask

  task automatic quiesce();
    while (exp_data.size() != 0 || migrating || dut.u_mig.busy) @(negedge clk);
    repeat (20) @(negedge clk);
  endtask

  // read and wait for the response; returns request-to-response cycles
  task automatic timed_read(addr_t a, output longint lat);
    host_op(0, a);
    while (exp_data.size() != 0) @(posedge clk);
    lat = last_lat;
  endtask

  // ---------------------------------------------------------------- table checks via backdoor
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

  // Each finished migration must have moved the hot page's host page into fast memory.
  always @(posedge clk) if (rst_n && dut.mu_done) begin
    int c;
    c = int'(dut.mu_cold_page);
    checks++;
    if (c >= FP || c < RSV || rev(c) < RSV || fwd(rev(c)) != c)
      fail($sformatf("migration into dPA %0d not reflected in tables", c));
  end

  function automatic addr_t page_addr(int p, int l);
    return {page_t'(p), 6'(l), 6'b0};
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint lf, ls, t0;
    logic [63:0] d;
    host_req_valid = 0; host_req = '0; acc_rd_en = 0; acc_rd_idx = '0; mmio_wr = 0; mmio_rd = 0; mmio_addr = '0; mmio_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (init_done);
    for (int h = 0; h < NP; h++) begin
      checks++;
      if (fwd(h) != h || rev(h) != h) fail($sformatf("identity table at %0d", h));
    end

    // Reset values of the BAR registers.
    mmio_expect(12'h000, 2, "REGION_NUM");
    mmio_expect(12'h100, 0, "region 0 start");
    mmio_expect(12'h108, FP * 4096 - 1, "region 0 end");
    mmio_expect(12'h110, 0, "region 0 latency");
    mmio_expect(12'h120, FP * 4096, "region 1 start");
    mmio_expect(12'h128, NP * 4096 - 1, "region 1 end");
    mmio_expect(12'h130, 128, "region 1 latency");
    mmio_expect(12'h208, FP, "FAST_PAGES");
    mmio_expect(12'h228, 32, "MIG_LIMIT");
    mmio_expect(12'h230, 100000, "MIG_WINDOW");
    mmio_expect(12'h300, 1, "INIT_DONE");

    // Configuration for the short run.
    mmio_write(12'h200, 0);        // migration off for now
    mmio_write(12'h210, 4);        // hot threshold
    mmio_write(12'h220, 40000);    // bitmap period: a few cold-page scans during the run
    mmio_write(12'h228, 3);        // 3 pairs ...
    mmio_write(12'h230, 3000);     // ... per 3000 cycles
    mmio_expect(12'h210, 4, "HOT_THRESHOLD write");

    // Latency: second read of a fast and of a slow page (table line already cached).
    timed_read(page_addr(3, 0), lf);
    timed_read(page_addr(3, 1), lf);
    timed_read(page_addr(56, 0), ls);
    timed_read(page_addr(56, 1), ls);
    $display("fast read %0d cycles, slow read %0d cycles", lf, ls);
    checks += 2;
    if (lf > 40) fail($sformatf("fast read took %0d cycles", lf));
    if (ls < 128 || ls - lf < 128 - 12 || ls - lf > 130) fail($sformatf("slow read %0d vs fast %0d", ls, lf));

    // Bandwidth: cap the slow region at 4 responses per 200 cycles; 16 reads need >= 3 intervals.
    mmio_write(12'h138, 4);
    mmio_write(12'h008, 200);
    t0 = cyc;
    for (int i = 0; i < 16; i++) host_op(0, page_addr(57, i));
    while (exp_data.size() != 0) @(posedge clk);
    $display("16 capped slow reads in %0d cycles", cyc - t0);
    checks++;
    if (cyc - t0 < 3 * 200) fail($sformatf("bandwidth cap not applied: %0d cycles", cyc - t0));
    mmio_write(12'h138, 16'hFFFF);
    mmio_write(12'h008, 1024);

    // Hammer slow pages with migration disabled: nothing may move.
    for (int r = 0; r < 6; r++)
      for (int p = 40; p < 44; p++) host_op(0, page_addr(p, $urandom % 64));
    quiesce();
    mmio_expect(12'h308, 0, "no migration while disabled");
    checks++;
    if (n_mig != 0) fail("migration while disabled");

    // Migration on: mixed workload.
    mmio_write(12'h200, 1);
    for (int i = 0; i < 6000; i++) begin
      int p;
      if ($urandom % 100 < 55) p = $urandom_range(32, NP - 1);      // hot set: 32 slow pages
      else                     p = $urandom_range(RSV, NP - 1);
      host_op(($urandom % 4) == 0, page_addr(p, $urandom % 64));
    end
    quiesce();

    // Tables are consistent and every written line reads back.
    for (int h = 0; h < NP; h++) begin
      checks++;
      if (fwd(h) >= NP || rev(fwd(h)) != h) fail($sformatf("tables not inverse at %0d", h));
    end
    checks++;
    if (fwd(0) != 0) fail("table page moved");
    foreach (ref_mem[a]) host_op(0, a);
    quiesce();

    // Status registers agree with observation.
    mmio_expect(12'h308, n_mig, "MIGRATIONS");
    mmio_expect(12'h310, n_hot, "HOT_PAGES");
    mmio_expect(12'h318, n_cold, "COLD_PAGES");
    mmio_expect(12'h320, n_drop, "HOT_DROPPED");
    mmio_expect(12'h328, n_miss_fill, "CACHE_MISSES");

    // Access counters (16 KB regions here) agree with the requests seen by the memory.
    for (int r = 0; r < 16; r++) acc_expect(r);
    n_acc = 0;
    foreach (ref_acc[r]) if (ref_acc[r] > 0) n_acc++;

    // Rate: no window may have held more than MIG_LIMIT migrations.
    checks++;
    if (n_mig > (cyc / 3000 + 1) * 3) fail("more migrations than the rate limit allows");

    $display("hits %0d misses %0d hot %0d cold %0d pairs %0d migrations %0d blocked %0d rate-limited %0d",
             n_hit, n_miss_fill, n_hot, n_cold, n_pair, n_mig, n_blocked, n_rate_lim);
    $display("dropped %0d bw-blocked %0d tag-fifo-full %0d latency-wait %0d mig-rd %0d mig-wr %0d bitmap-swaps %0d",
             n_drop, n_bw_block, n_tag_full, n_lat_wait, n_mig_rd, n_mig_wr, n_bm_swap);
    checks += 16;
    if (n_hit == 0)       fail("never: remapping cache hit");
    if (n_miss_fill == 0) fail("never: remapping cache miss");
    if (n_hot == 0)       fail("never: hot page detected");
    if (n_cold == 0)      fail("never: cold page found");
    if (n_pair == 0)      fail("never: migration pair formed");
    if (n_mig == 0)       fail("never: migration");
    if (n_blocked == 0)   fail("never: host blocked by migration");
    if (n_rate_lim == 0)  fail("never: migration rate limit");
    if (n_drop == 0)      fail("never: hot page dropped");
    if (n_bw_block == 0)  fail("never: bandwidth cap");
    if (n_tag_full == 0)  fail("never: tag FIFO full");
    if (n_lat_wait == 0)  fail("never: latency wait");
    if (n_mig_rd != 64 * 2 * n_mig || n_mig_wr != 64 * 2 * n_mig) fail("migration traffic is not 128 reads and writes per swap");
    if (n_bm_swap == 0) fail("never: bitmap swap");
    if (n_acc < 2)      fail("never: accesses counted in more than one region");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
