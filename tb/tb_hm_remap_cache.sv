// Testbench of the remapping cache: random lookups, fills and single-entry updates against a
// reference model of a direct-mapped cache (8 lines over a 64-line table, so lines conflict).
// Checks hit/miss, returned line data one cycle after the lookup, update only when the line
// is resident, and that lookups miss until the tag-clearing sweep after reset has finished.
module tb_hm_remap_cache;
  import hm_pkg::*;
  localparam int LINES = 8, TBL = 64;

  logic clk = 0, rst_n = 0;
  logic rd_en, rd_hit, fill_en, upd_en, init_done;
  logic [5:0] rd_line, fill_line;
  line_t rd_data, fill_data;
  page_t upd_page;
  logic [31:0] upd_val;
  int checks = 0, failures = 0;

  hm_remap_cache #(.LINES(LINES), .TBL_LINES(TBL)) dut (.*);
  always #5 clk = ~clk;

  // Reference: which table line each slot holds, and its data.
  int    ref_line [LINES];
  line_t ref_data [LINES];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < LINES; i++) ref_line[i] = -1;
    rd_en = 0; fill_en = 0; upd_en = 0; rd_line = 0; fill_line = 0; fill_data = '0; upd_page = '0; upd_val = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Lookup during the clearing sweep must miss.
    rd_en = 1; rd_line = 6'd3;
    @(negedge clk);
    checks++; if (rd_hit) begin failures++; $display("FAIL hit during init"); end
    rd_en = 0;
    wait (init_done);
    @(negedge clk);
    for (int t = 0; t < 3000; t++) begin
      int op;
      op = $urandom % 3;
      rd_en = 0; fill_en = 0; upd_en = 0;
      if (op == 0) begin
        fill_en = 1; fill_line = 6'($urandom % TBL);
        for (int w = 0; w < 16; w++) fill_data[w*32 +: 32] = $urandom;
        ref_line[fill_line % LINES] = fill_line;
        ref_data[fill_line % LINES] = fill_data;
        @(negedge clk);
      end else if (op == 1) begin
        int l;
        upd_en = 1; upd_page = page_t'($urandom % (TBL * 16)); upd_val = $urandom;
        l = int'(upd_page) / 16;
        if (ref_line[l % LINES] == l) ref_data[l % LINES][(int'(upd_page) % 16) * 32 +: 32] = upd_val;
        @(negedge clk);
      end else begin
        bit exp_hit;
        rd_en = 1; rd_line = 6'($urandom % TBL);
        exp_hit = (ref_line[rd_line % LINES] == int'(rd_line));
        @(negedge clk);
        rd_en = 0;
        checks++;
        if (rd_hit !== exp_hit || (exp_hit && rd_data !== ref_data[rd_line % LINES])) begin
          failures++;
          if (failures < 10) $display("FAIL lookup line %0d hit %b expected %b", rd_line, rd_hit, exp_hit);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
