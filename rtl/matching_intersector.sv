// matching_intersector: extends each partial matching by every vertex in the
// intersection of the neighbourhoods selected by the query.
//
// For each incoming matching the mapping in cfg assigns matching vertex
// cfg.pos[i] to intersector spot i (i < cfg.nsets); spot i reads the set
// (cfg.nbr_base[i] + left, size) of that vertex, so each spot can use the
// outgoing or the incoming neighbour array.  The matching waits in a FIFO
// while the AllCompare intersector works; the combine step then emits one
// copy of it per result element, with the element appended as vertex n
// (metadata still empty), and pops the FIFO at the result's terminator.
// End-of-stream markers travel through the FIFO without an intersection.
module matching_intersector
  import gm_pkg::*;
#(
  parameter int unsigned NSETS      = 4,
  parameter bit          CACHED     = 1'b1,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  isect_cfg_t             cfg,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  matching_t              in,
  output logic                   out_valid,
  input  logic                   out_ready,
  output matching_t              out,
  output logic [NSETS-1:0]       rd_req_valid,
  input  logic [NSETS-1:0]       rd_req_ready,
  output laddr_t [NSETS-1:0]     rd_req_addr,
  input  logic [NSETS-1:0]       rd_resp_valid,
  input  line_data_t [NSETS-1:0] rd_resp_data,
  output logic [NSETS-1:0]       hits
);
  typedef struct packed { matching_t m; logic isect; } entry_t;

  logic q_full, q_empty, q_pop, i_req_valid, i_req_ready, need;
  entry_t q_head;
  logic [$clog2(FIFO_DEPTH+1)-1:0] q_cnt;
  set_req_t [NSETS-1:0] reqs;

  always_comb begin
    for (int i = 0; i < NSETS; i++)
      reqs[i] = '{addr: cfg.nbr_base[i] + in.v[cfg.pos[i]].left, count: in.v[cfg.pos[i]].size};
  end

  assign need        = !in.eos;
  assign i_req_valid = in_valid && need && !q_full;
  assign in_ready    = !q_full && (!need || i_req_ready);

  sync_fifo #(.T(entry_t), .DEPTH(FIFO_DEPTH)) u_q (
    .clk, .rst_n, .push(in_valid && in_ready), .wdata('{m: in, isect: need}),
    .pop(q_pop), .rdata(q_head), .full(q_full), .empty(q_empty), .count(q_cnt));

  logic r_valid, r_ready;
  res_beat_t r;
  allcompare_intersector #(.NSETS(NSETS), .CACHED(CACHED)) u_ac (
    .clk, .rst_n, .cfg_nsets(cfg.nsets),
    .req_valid(i_req_valid), .req_ready(i_req_ready), .reqs,
    .out_valid(r_valid), .out_ready(r_ready), .out(r),
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_data, .hits);

  // combine
  always_comb begin
    out       = q_head.m;
    out_valid = 1'b0;
    r_ready   = 1'b0;
    q_pop     = 1'b0;
    if (!q_empty) begin
      if (!q_head.isect) begin
        out_valid = 1'b1;
        q_pop     = out_ready;
      end else if (r_valid) begin
        if (r.is_elem) begin
          out_valid = 1'b1;
          out.v[q_head.m.n] = '{id: r.elem, left: '0, size: '0};
          out.n     = q_head.m.n + 1'b1;
          r_ready   = out_ready;
        end else begin
          r_ready = 1'b1;
          q_pop   = 1'b1;
        end
      end
    end
  end
endmodule
