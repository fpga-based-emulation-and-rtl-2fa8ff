// Testbench of the region classifier: random region layouts and addresses against a
// reference search, including disabled regions, overlaps (lowest index wins) and the
// inclusive end address.
module tb_hb_region_classifier;
  import hm_pkg::*;

  addr_t   addr;
  hb_cfg_t cfg;
  logic    hit;
  logic [1:0] region;
  int checks = 0, failures = 0;

  hb_region_classifier dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      logic exp_hit;
      logic [1:0] exp_r;
      cfg = '0;
      cfg.region_num = 3'($urandom_range(0, 4));
      for (int r = 0; r < 4; r++) begin
        cfg.region[r].start_addr = addr_t'($urandom_range(0, 1000));
        cfg.region[r].end_addr   = cfg.region[r].start_addr + addr_t'($urandom_range(0, 300));
      end
      case ($urandom % 4)
        0: addr = cfg.region[$urandom % 4].end_addr;        // boundary: inclusive end
        1: addr = cfg.region[$urandom % 4].end_addr + 1;
        2: addr = cfg.region[$urandom % 4].start_addr;
        default: addr = addr_t'($urandom_range(0, 1400));
      endcase
      #1;
      exp_hit = 0; exp_r = 0;
      for (int r = 0; r < 4; r++)
        if (!exp_hit && r < int'(cfg.region_num) &&
            addr >= cfg.region[r].start_addr && addr <= cfg.region[r].end_addr) begin
          exp_hit = 1; exp_r = 2'(r);
        end
      checks++;
      if (hit !== exp_hit || (exp_hit && region !== exp_r)) begin
        failures++;
        if (failures < 10) $display("FAIL addr=%0d hit=%b/%b region=%0d/%0d", addr, hit, exp_hit, region, exp_r);
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
