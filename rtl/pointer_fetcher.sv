// pointer_fetcher: loads the neighbourhood metadata of one matching vertex.
//
// For the vertex at position cfg.pos with identifier v it fetches pointers
// v and v+1 of the configured pointer array (outgoing or incoming CSR); they
// are the left and right bound of v's neighbourhood.  It stores left and
// size = right - left in the matching.  While the fetch is in flight the
// matching waits in a FIFO, so several fetches overlap; results leave in
// input order.  End-of-stream markers, and all matchings when cfg.en is 0,
// pass through unchanged.  The two pointers may lie in one or two memory
// lines.  The fetcher is cached when CACHED = 1 (input set caching).
module pointer_fetcher
  import gm_pkg::*;
#(
  parameter bit          CACHED     = 1'b1,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  ptr_cfg_t   cfg,
  input  logic       in_valid,
  output logic       in_ready,
  input  matching_t  in,
  output logic       out_valid,
  input  logic       out_ready,
  output matching_t  out,
  output logic       rd_req_valid,
  input  logic       rd_req_ready,
  output laddr_t     rd_req_addr,
  input  logic       rd_resp_valid,
  input  line_data_t rd_resp_data,
  output logic       hit
);
  typedef struct packed { matching_t m; logic fetch; } entry_t;

  logic   need_fetch, f_req_valid, f_req_ready, q_full, q_empty, q_pop;
  entry_t q_head;
  logic [$clog2(FIFO_DEPTH+1)-1:0] q_cnt;
  set_req_t f_req;

  assign need_fetch  = cfg.en && !in.eos;
  assign f_req       = '{addr: cfg.ptr_base + in.v[cfg.pos].id, count: vid_t'(2)};
  assign f_req_valid = in_valid && need_fetch && !q_full;
  assign in_ready    = !q_full && (!need_fetch || f_req_ready);

  sync_fifo #(.T(entry_t), .DEPTH(FIFO_DEPTH)) u_q (
    .clk, .rst_n, .push(in_valid && in_ready), .wdata('{m: in, fetch: need_fetch}),
    .pop(q_pop), .rdata(q_head), .full(q_full), .empty(q_empty), .count(q_cnt));

  logic   f_valid, f_ready;
  fline_t f_line;
  if (CACHED) begin : g_cached
    cached_fetcher #(.CACHE_LINES(2)) u_fetch (
      .clk, .rst_n, .req_valid(f_req_valid), .req_ready(f_req_ready), .req(f_req),
      .out_valid(f_valid), .out_ready(f_ready), .out(f_line),
      .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_data, .hit);
  end else begin : g_plain
    buffered_fetcher u_fetch (
      .clk, .rst_n, .req_valid(f_req_valid), .req_ready(f_req_ready), .req(f_req),
      .out_valid(f_valid), .out_ready(f_ready), .out(f_line),
      .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_data);
    assign hit = 1'b0;
  end

  // gather the two pointers from one or two lines
  logic have_l;
  vid_t l_reg;
  vid_t first_e, second_e;
  logic two;
  always_comb begin
    first_e = '0; second_e = '0; two = 1'b0;
    for (int i = LINE_ELEMS - 1; i >= 0; i--)
      if (f_line.mask[i]) begin
        first_e  = f_line.data[i];
        two      = (i < LINE_ELEMS - 1) && f_line.mask[i+1];
        second_e = (i < LINE_ELEMS - 1) ? f_line.data[i+1] : '0;
      end
  end

  vid_t l_val, r_val;
  assign l_val = have_l ? l_reg : first_e;
  assign r_val = two ? second_e : first_e;

  always_comb begin
    out       = q_head.m;
    out_valid = 1'b0;
    f_ready   = 1'b0;
    q_pop     = 1'b0;
    if (!q_empty) begin
      if (!q_head.fetch) begin
        out_valid = 1'b1;
        q_pop     = out_ready;
      end else if (f_valid) begin
        if (f_line.last) begin
          out_valid = 1'b1;
          out.v[cfg.pos].left = l_val;
          out.v[cfg.pos].size = r_val - l_val;
          f_ready = out_ready;
          q_pop   = out_ready;
        end else begin
          f_ready = 1'b1;   // first of two lines: keep the left bound
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_l <= 1'b0;
      l_reg  <= '0;
    end else if (f_valid && f_ready) begin
      have_l <= !f_line.last;
      l_reg  <= first_e;
    end
  end
endmodule
