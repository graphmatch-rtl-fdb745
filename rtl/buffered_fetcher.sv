// buffered_fetcher: reads one set (a run of consecutive 32-bit elements) per
// request from memory and streams it out line by line.
//
// A request gives an element address and an element count.  The fetcher
// walks the memory lines that hold those elements, issues one line read per
// cycle and marks, for each line, which elements belong to the set (mask) and
// whether it is the set's final line (last).  An empty set produces one line
// with an empty mask.  Requests are queued, so the reads of the next set are
// issued while the current one is still being consumed (prefetching).
//
// Buffering: every issued read reserves a slot in the response buffer, so the
// memory side never has to be stalled on a response (rd_resp has no ready).
// BUF_DEPTH = 32 takes the one depth the prototype states for its memory
// path ("the depth of the reorder stage is set to 32"); the credit scheme and
// the in-order memory port are this design's own choices.
//
// Interfaces: req (valid/ready, set_req_t), out (valid/ready, fline_t),
// rd_req (valid/ready, line address), rd_resp (valid, line data, in order).
module buffered_fetcher
  import gm_pkg::*;
#(
  parameter int unsigned BUF_DEPTH = 32,
  parameter int unsigned REQ_DEPTH = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req_valid,
  output logic       req_ready,
  input  set_req_t   req,
  output logic       out_valid,
  input  logic       out_ready,
  output fline_t     out,
  output logic       rd_req_valid,
  input  logic       rd_req_ready,
  output laddr_t     rd_req_addr,
  input  logic       rd_resp_valid,
  input  line_data_t rd_resp_data
);
  typedef struct packed {
    logic [LINE_ELEMS-1:0] mask;
    logic                  last;
    logic                  nodata;
  } meta_t;

  localparam int unsigned CW = $clog2(BUF_DEPTH + 1);

  // request queue
  set_req_t rq_head;
  logic     rq_empty, rq_full, rq_pop;
  logic [$clog2(REQ_DEPTH+1)-1:0] rq_cnt;
  sync_fifo #(.T(set_req_t), .DEPTH(REQ_DEPTH)) u_rq (
    .clk, .rst_n, .push(req_valid && req_ready), .wdata(req), .pop(rq_pop),
    .rdata(rq_head), .full(rq_full), .empty(rq_empty), .count(rq_cnt));
  assign req_ready = !rq_full;

  // issue state for the request at the head of the queue
  logic   active;
  laddr_t cur_line, first_line, last_line;
  logic [3:0] first_off, last_off;
  logic   empty_set;

  eaddr_t end_addr;  // address of the last element (valid when count > 0)
  assign end_addr = rq_head.addr + rq_head.count - 1'b1;

  // meta and data buffers
  meta_t meta_in, meta_head;
  logic  meta_push, meta_pop, meta_full, meta_empty;
  logic [CW-1:0] meta_cnt;
  sync_fifo #(.T(meta_t), .DEPTH(BUF_DEPTH)) u_meta (
    .clk, .rst_n, .push(meta_push), .wdata(meta_in), .pop(meta_pop),
    .rdata(meta_head), .full(meta_full), .empty(meta_empty), .count(meta_cnt));

  line_data_t data_head;
  logic data_pop, data_full, data_empty;
  logic [CW-1:0] data_cnt;
  sync_fifo #(.T(line_data_t), .DEPTH(BUF_DEPTH)) u_data (
    .clk, .rst_n, .push(rd_resp_valid), .wdata(rd_resp_data), .pop(data_pop),
    .rdata(data_head), .full(data_full), .empty(data_empty), .count(data_cnt));

  // reads in flight or buffered
  logic [CW-1:0] credits_used;

  logic can_issue;
  assign can_issue = active && !meta_full && (credits_used < CW'(BUF_DEPTH));

  // mask of the current line
  logic [LINE_ELEMS-1:0] cur_mask;
  always_comb begin
    for (int i = 0; i < LINE_ELEMS; i++) begin
      cur_mask[i] = ((cur_line != first_line) || (4'(i) >= first_off)) &&
                    ((cur_line != last_line)  || (4'(i) <= last_off));
    end
  end

  always_comb begin
    meta_push    = 1'b0;
    meta_in      = '0;
    rd_req_valid = 1'b0;
    if (active && empty_set && !meta_full) begin
      meta_push = 1'b1;
      meta_in   = '{mask: '0, last: 1'b1, nodata: 1'b1};
    end else if (can_issue && !empty_set) begin
      rd_req_valid = 1'b1;
      meta_push    = rd_req_ready;
      meta_in      = '{mask: cur_mask, last: (cur_line == last_line), nodata: 1'b0};
    end
  end
  assign rd_req_addr = cur_line;

  // the request is finished once its final meta entry is pushed
  assign rq_pop = meta_push && meta_in.last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active     <= 1'b0;
      cur_line   <= '0;
      first_line <= '0;
      last_line  <= '0;
      first_off  <= '0;
      last_off   <= '0;
      empty_set  <= 1'b0;
    end else begin
      if (!active || rq_pop) begin
        // load the next request (the head after a pop appears next cycle)
        active <= 1'b0;
        if (!rq_empty && !rq_pop) begin
          active     <= 1'b1;
          first_line <= rq_head.addr[EADDR_W-1:4];
          cur_line   <= rq_head.addr[EADDR_W-1:4];
          first_off  <= rq_head.addr[3:0];
          last_line  <= end_addr[EADDR_W-1:4];
          last_off   <= end_addr[3:0];
          empty_set  <= (rq_head.count == '0);
        end
      end else if (rd_req_valid && rd_req_ready) begin
        cur_line <= cur_line + 1'b1;
      end
    end
  end

  // output: pair meta with data
  assign out_valid = !meta_empty && (meta_head.nodata || !data_empty);
  assign out.data  = meta_head.nodata ? '0 : data_head;
  assign out.mask  = meta_head.mask;
  assign out.last  = meta_head.last;
  assign meta_pop  = out_valid && out_ready;
  assign data_pop  = meta_pop && !meta_head.nodata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) credits_used <= '0;
    else credits_used <= credits_used + ((rd_req_valid && rd_req_ready) ? 1'b1 : 1'b0)
                                      - (data_pop ? 1'b1 : 1'b0);
  end

  a_resp_space: assert property (@(posedge clk) disable iff (!rst_n) !(rd_resp_valid && data_full));
endmodule
