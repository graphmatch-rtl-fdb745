// cached_fetcher: buffered fetcher with a cache holding the most recently
// fetched input set.
//
// The controller keeps the address and element count of the previous request
// in two registers.  A request equal to it is flagged 'cached'; any other
// request is forwarded to the internal buffered fetcher and flagged
// 'fetched'.  The flags go, in request order, into a FIFO that selects the
// source of the output: for a fetched set, lines from the buffered fetcher
// are passed on and at the same time written into the cache as whole lines
// starting at cache address 0; for a cached set, the lines are read again
// from cache address 0 until the line marked last.  Because lines are written
// as they leave, a cached request is only replayed after the set it repeats
// has completely passed, so no extra ordering logic is needed.
//
// A set longer than CACHE_LINES lines is not cacheable: it is fetched
// normally and the next request cannot hit.  The paper does not give the
// cache size; CACHE_LINES = 64 (1024 elements) is this design's choice, and
// the cache is read combinationally (one replayed line per cycle).
// The interface is identical to buffered_fetcher, plus a one-cycle 'hit'
// pulse per request served from the cache.
module cached_fetcher
  import gm_pkg::*;
#(
  parameter int unsigned BUF_DEPTH   = 32,
  parameter int unsigned CACHE_LINES = 64,
  parameter int unsigned FLAG_DEPTH  = 4
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
  input  line_data_t rd_resp_data,
  output logic       hit
);
  localparam int unsigned CAW = $clog2(CACHE_LINES);

  // ---------------- controller ----------------
  set_req_t last_req;
  logic     last_valid;
  logic     is_hit;
  logic     bf_req_valid, bf_req_ready;
  logic     flag_full, flag_empty, flag_head, flag_pop;
  logic [$clog2(FLAG_DEPTH+1)-1:0] flag_cnt;

  // number of memory lines the request touches
  eaddr_t end_addr;
  vid_t   nlines;
  assign end_addr = req.addr + req.count - 1'b1;
  assign nlines   = (req.count == '0) ? vid_t'(1)
                  : vid_t'(end_addr[EADDR_W-1:4]) - vid_t'(req.addr[EADDR_W-1:4]) + 1'b1;

  assign is_hit       = last_valid && (req == last_req);
  assign req_ready    = !flag_full && (is_hit || bf_req_ready);
  assign bf_req_valid = req_valid && !flag_full && !is_hit;
  assign hit          = req_valid && req_ready && is_hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_req   <= '0;
      last_valid <= 1'b0;
    end else if (req_valid && req_ready && !is_hit) begin
      last_req   <= req;
      last_valid <= (nlines <= vid_t'(CACHE_LINES));
    end
  end

  sync_fifo #(.T(logic), .DEPTH(FLAG_DEPTH)) u_flags (
    .clk, .rst_n, .push(req_valid && req_ready), .wdata(is_hit), .pop(flag_pop),
    .rdata(flag_head), .full(flag_full), .empty(flag_empty), .count(flag_cnt));

  // ---------------- buffered fetcher ----------------
  logic   bf_out_valid, bf_out_ready;
  fline_t bf_out;
  buffered_fetcher #(.BUF_DEPTH(BUF_DEPTH)) u_bf (
    .clk, .rst_n,
    .req_valid(bf_req_valid), .req_ready(bf_req_ready), .req,
    .out_valid(bf_out_valid), .out_ready(bf_out_ready), .out(bf_out),
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_data);

  // ---------------- cache ----------------
  fline_t        cache [CACHE_LINES];
  logic [CAW-1:0] wptr, rptr;
  fline_t        cache_line;
  assign cache_line = cache[rptr];

  // ---------------- output multiplexer ----------------
  always_comb begin
    out_valid    = 1'b0;
    out          = bf_out;
    bf_out_ready = 1'b0;
    if (!flag_empty) begin
      if (flag_head) begin
        out_valid = 1'b1;
        out       = cache_line;
      end else begin
        out_valid    = bf_out_valid;
        bf_out_ready = out_ready;
      end
    end
  end
  assign flag_pop = out_valid && out_ready && out.last;

  always_ff @(posedge clk) begin
    if (!flag_empty && !flag_head && bf_out_valid && out_ready)
      cache[wptr] <= bf_out;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else if (out_valid && out_ready) begin
      if (flag_head) begin
        rptr <= out.last ? '0 : rptr + 1'b1;
      end else begin
        // lines beyond the capacity wrap; such a set is never replayed
        wptr <= out.last ? '0 : wptr + 1'b1;
      end
    end
  end
endmodule
