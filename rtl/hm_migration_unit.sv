// Migration unit: swaps the contents of two 4 KB device pages, one in slow memory holding
// hot data and one in fast memory holding cold data.
//
// The device cannot tell which data is live, so every migration is a swap. On `en` the unit
// latches the two page numbers and then, without waiting for responses, issues line reads
// alternating between the pages (hot line 0, cold line 0, hot line 1, ...). Each returned
// line goes into a buffer large enough for both pages and is written, as soon as possible,
// to the same line of the other page. A write waits only until the read of the line it
// overwrites has been issued; with memory that executes requests in order this guarantees
// that no line is overwritten before it has been read. Writes take priority over reads.
// `done` pulses for one cycle when the last write has been accepted (writes are posted).
//
// Interface: mem_req valid/ready; read responses arrive valid-only with tag source SRC_MIG
// and the read number in the tag id. busy is high from en to done; en is ignored while busy.
// The swap, the non-blocking reads and the write-on-return follow the paper; the read
// order, the issue rule for writes and the buffer size are this design's choices.
module hm_migration_unit
  import hm_pkg::*;
#(
  parameter int unsigned LINES_PER_PAGE = 64
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     en,
  input  page_t    hot_page,
  input  page_t    cold_page,
  output logic     mem_req_valid,
  input  logic     mem_req_ready,
  output mem_req_t mem_req,
  input  logic     mem_rsp_valid,
  input  mem_rsp_t mem_rsp,
  output logic     busy,
  output logic     done
);
  localparam int unsigned NREQ = 2 * LINES_PER_PAGE;
  localparam int unsigned CW   = $clog2(NREQ + 1);
  localparam int unsigned LOFF = $clog2(LINES_PER_PAGE);

  typedef struct packed {
    logic [CW-1:0] id;
    line_t         data;
  } buf_entry_t;

  page_t         pg_hot, pg_cold;
  logic [CW-1:0] rd_cnt, wr_cnt;
  buf_entry_t    head, buf_in;
  logic          buf_empty, buf_full, buf_pop, buf_push;
  logic [$clog2(NREQ+1)-1:0] buf_count;

  assign buf_push = mem_rsp_valid && mem_rsp.tag.src == SRC_MIG;
  assign buf_in   = '{id: CW'(mem_rsp.tag.id), data: mem_rsp.rdata};

  hm_fifo #(.T(buf_entry_t), .DEPTH(NREQ)) u_buf (
    .clk, .rst_n, .push(buf_push), .wr_data(buf_in), .pop(buf_pop), .rd_data(head),
    .empty(buf_empty), .full(buf_full), .count(buf_count));

  // Address of request number k: page by k[0] (0 hot, 1 cold), line k >> 1.
  function automatic addr_t line_addr(page_t pg, logic [CW-1:0] k);
    return {pg, PAGE_OFF_W'(32'(k >> 1) << 6)};
  endfunction

  logic wr_ok, do_wr, do_rd;
  logic [CW-1:0] dest_read;
  assign dest_read = head.id ^ CW'(1);
  assign wr_ok     = busy && !buf_empty && (rd_cnt > dest_read);
  assign do_wr     = wr_ok;
  assign do_rd     = busy && !wr_ok && (rd_cnt < CW'(NREQ));

  always_comb begin
    mem_req       = '0;
    mem_req_valid = do_wr || do_rd;
    mem_req.tag.src = SRC_MIG;
    if (do_wr) begin
      // Line from the hot page (even id) goes to the cold page and vice versa.
      mem_req.addr  = line_addr(head.id[0] ? pg_hot : pg_cold, head.id);
      mem_req.we    = 1'b1;
      mem_req.be    = '1;
      mem_req.wdata = head.data;
      mem_req.tag.id = TAG_ID_W'(head.id);
    end else begin
      mem_req.addr  = line_addr(rd_cnt[0] ? pg_cold : pg_hot, rd_cnt);
      mem_req.tag.id = TAG_ID_W'(rd_cnt);
    end
  end

  assign buf_pop = do_wr && mem_req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      pg_hot  <= '0;
      pg_cold <= '0;
      rd_cnt  <= '0;
      wr_cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (en) begin
          busy    <= 1'b1;
          pg_hot  <= hot_page;
          pg_cold <= cold_page;
          rd_cnt  <= '0;
          wr_cnt  <= '0;
        end
      end else if (mem_req_ready) begin
        if (do_rd) rd_cnt <= rd_cnt + 1'b1;
        if (do_wr) begin
          wr_cnt <= wr_cnt + 1'b1;
          if (wr_cnt == CW'(NREQ - 1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  a_rsp_only_when_busy: assert property (@(posedge clk) disable iff (!rst_n) buf_push |-> busy);
  a_pages_differ: assert property (@(posedge clk) disable iff (!rst_n) (en && !busy) |-> hot_page != cold_page);
endmodule
