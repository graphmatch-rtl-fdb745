// matching_extender: extends partial matchings by one query vertex.
//
// Chain: pointer fetcher (metadata of the vertex named in cfg.ptr) ->
// matching filter (empty sets / failing set pruning, cfg.f1) -> matching
// intersector (cfg.isect) -> matching filter (distinct vertices for
// isomorphism, cfg.f2).  The memory read ports of the pointer fetcher (port
// 0) and of the intersector spots (ports 1..NSETS) are brought out
// separately and merged by the instance's request merger.
module matching_extender
  import gm_pkg::*;
#(
  parameter int unsigned NSETS  = 4,
  parameter bit          CACHED = 1'b1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  ext_cfg_t                 cfg,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  matching_t                in,
  output logic                     out_valid,
  input  logic                     out_ready,
  output matching_t                out,
  output logic [NSETS:0]           rd_req_valid,
  input  logic [NSETS:0]           rd_req_ready,
  output laddr_t [NSETS:0]         rd_req_addr,
  input  logic [NSETS:0]           rd_resp_valid,
  input  line_data_t [NSETS:0]     rd_resp_data,
  output logic [NSETS:0]           hits,
  output logic [1:0]               dropped
);
  logic p_valid, p_ready, a_valid, a_ready, b_valid, b_ready;
  matching_t p_out, a_out, b_out;

  pointer_fetcher #(.CACHED(CACHED)) u_ptr (
    .clk, .rst_n, .cfg(cfg.ptr), .in_valid, .in_ready, .in,
    .out_valid(p_valid), .out_ready(p_ready), .out(p_out),
    .rd_req_valid(rd_req_valid[0]), .rd_req_ready(rd_req_ready[0]), .rd_req_addr(rd_req_addr[0]),
    .rd_resp_valid(rd_resp_valid[0]), .rd_resp_data(rd_resp_data[0]), .hit(hits[0]));

  matching_filter u_f1 (
    .clk, .rst_n, .cfg(cfg.f1), .in_valid(p_valid), .in_ready(p_ready), .in(p_out),
    .out_valid(a_valid), .out_ready(a_ready), .out(a_out), .dropped(dropped[0]));

  matching_intersector #(.NSETS(NSETS), .CACHED(CACHED)) u_isect (
    .clk, .rst_n, .cfg(cfg.isect), .in_valid(a_valid), .in_ready(a_ready), .in(a_out),
    .out_valid(b_valid), .out_ready(b_ready), .out(b_out),
    .rd_req_valid(rd_req_valid[NSETS:1]), .rd_req_ready(rd_req_ready[NSETS:1]),
    .rd_req_addr(rd_req_addr[NSETS:1]), .rd_resp_valid(rd_resp_valid[NSETS:1]),
    .rd_resp_data(rd_resp_data[NSETS:1]), .hits(hits[NSETS:1]));

  matching_filter u_f2 (
    .clk, .rst_n, .cfg(cfg.f2), .in_valid(b_valid), .in_ready(b_ready), .in(b_out),
    .out_valid, .out_ready, .out, .dropped(dropped[1]));
endmodule
