// Testbench of the migration unit with an in-order memory model that randomly stalls.
// Swaps several page pairs and checks that afterwards every line of each page holds the
// other page's former line, that no other line changed, that exactly 128 reads and 128
// writes were issued per swap, that busy/done behave, and that a swap needs at least the
// 256 request cycles of its single memory port and, with the memory accepting 70% of
// cycles, no more than 256 / 0.7 cycles plus the memory latency and a margin of 40.
module tb_hm_migration_unit;
  import hm_pkg::*;
  import tb_pkg::*;
  localparam int LAT = 20;

  logic clk = 0, rst_n = 0;
  logic en, busy, done;
  page_t hot_page, cold_page;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;
  int checks = 0, failures = 0;

  hm_migration_unit dut (.*);
  mem_model #(.LATENCY(LAT), .READY_PCT(70)) mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
                                                   .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp(mem_rsp));
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic addr_t la(page_t p, int l);
    return {p, 12'(l * 64)};
  endfunction

  initial begin
    en = 0; hot_page = '0; cold_page = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      line_t before_h [64], before_c [64], neigh;
      int r0, w0, start, stop;
      page_t h, c;
      h = page_t'(1000 + t * 7);
      c = page_t'(10 + t);
      if (t == 3) begin h = 22'd1000; c = 22'd10; end   // swap back the first pair
      for (int l = 0; l < 64; l++) begin before_h[l] = mem.peek(la(h, l)); before_c[l] = mem.peek(la(c, l)); end
      neigh = mem.peek(la(h + 1, 0));
      r0 = mem.n_reads; w0 = mem.n_writes;
      @(negedge clk);
      en = 1; hot_page = h; cold_page = c;
      @(negedge clk);
      en = 0;
      checks++; if (!busy) begin failures++; $display("FAIL not busy after en"); end
      start = $time;
      wait (done);
      stop = $time;
      @(negedge clk);
      checks++; if (busy) begin failures++; $display("FAIL busy after done"); end
      for (int l = 0; l < 64; l++) begin
        checks += 2;
        if (mem.peek(la(h, l)) !== before_c[l]) begin failures++; $display("FAIL swap %0d: hot page line %0d", t, l); end
        if (mem.peek(la(c, l)) !== before_h[l]) begin failures++; $display("FAIL swap %0d: cold page line %0d", t, l); end
      end
      checks += 3;
      if (mem.peek(la(h + 1, 0)) !== neigh) begin failures++; $display("FAIL neighbour page changed"); end
      if (mem.n_reads - r0 != 128)  begin failures++; $display("FAIL %0d reads", mem.n_reads - r0); end
      if (mem.n_writes - w0 != 128) begin failures++; $display("FAIL %0d writes", mem.n_writes - w0); end
      checks++;
      if ((stop - start) / 10 < 256 || (stop - start) / 10 > 256 * 10 / 7 + LAT + 40) begin
        failures++; $display("FAIL swap %0d took %0d cycles", t, (stop - start) / 10);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
