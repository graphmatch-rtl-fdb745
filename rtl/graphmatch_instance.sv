// graphmatch_instance: one complete subgraph query engine on one memory
// channel.
//
// Matchings flow: matching source (edges = two-vertex matchings) -> matching
// filter -> extender 0 -> demux -> extender 1 -> demux -> ... -> extender
// NEXT-1; every demux and the last extender feed the matching multiplexer,
// which feeds the matching sink.  With MAX_LEVELS = 6 there are four
// extenders (levels 2..5).  The query size in the configuration selects at
// which demux complete matchings leave.  Extender k adds query vertex k+2
// and can intersect up to min(k+2, MAX_SETS) neighbourhoods.  All memory
// traffic (two source fetchers, each extender's pointer fetcher and
// intersector spots, and the sink's writes) is merged by the request merger
// onto the instance's single memory port.  The instance controller starts a
// query and reports cycles, matchings, cache hits and pruned matchings.
module graphmatch_instance
  import gm_pkg::*;
#(
  parameter bit CACHED = 1'b1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  inst_cfg_t  cfg,
  input  logic       start,
  output logic       busy,
  output logic       done,
  output vid_t       cycles,
  output vid_t       matchings,
  output vid_t       cache_hits,
  output vid_t       pruned,
  output logic       mem_req_valid,
  input  logic       mem_req_ready,
  output mem_req_t   mem_req,
  input  logic       mem_resp_valid,
  input  line_data_t mem_resp_data
);
  localparam int unsigned NEXT = MAX_LEVELS - 2;

  function automatic int unsigned ext_sets(input int unsigned k);
    return (k + 2 < MAX_SETS) ? k + 2 : MAX_SETS;
  endfunction
  // first merger port of extender k (source uses ports 0 and 1)
  function automatic int unsigned ext_port(input int unsigned k);
    int unsigned p;
    p = 2;
    for (int unsigned j = 0; j < k; j++) p += ext_sets(j) + 1;
    return p;
  endfunction
  localparam int unsigned NRD = ext_port(NEXT);

  logic [NRD-1:0]       rd_req_valid, rd_req_ready, rd_resp_valid, hit_v;
  laddr_t [NRD-1:0]     rd_req_addr;
  line_data_t [NRD-1:0] rd_resp_data;
  logic                 wr_valid, wr_ready;
  mem_req_t             wr_req;

  // ---------------- controller ----------------
  logic run, sink_done;
  vid_t sink_count;
  instance_controller u_ctrl (
    .clk, .rst_n, .start, .run, .sink_done, .sink_count, .busy, .done, .cycles, .matchings);

  // ---------------- source and first filter ----------------
  logic s_valid, s_ready, f_valid, f_ready, src_busy;
  matching_t s_out, f_out;
  logic [NEXT:0][1:0] drops;

  matching_source u_src (
    .clk, .rst_n, .cfg(cfg.src), .start(run), .busy(src_busy),
    .out_valid(s_valid), .out_ready(s_ready), .out(s_out),
    .rd_req_valid(rd_req_valid[1:0]), .rd_req_ready(rd_req_ready[1:0]),
    .rd_req_addr(rd_req_addr[1:0]), .rd_resp_valid(rd_resp_valid[1:0]),
    .rd_resp_data(rd_resp_data[1:0]));
  assign hit_v[1:0] = '0;

  matching_filter u_f0 (
    .clk, .rst_n, .cfg(cfg.f0), .in_valid(s_valid), .in_ready(s_ready), .in(s_out),
    .out_valid(f_valid), .out_ready(f_ready), .out(f_out), .dropped(drops[NEXT][0]));
  assign drops[NEXT][1] = 1'b0;

  // ---------------- extenders, demultiplexers ----------------
  logic      [NEXT:0]   e_in_valid, e_in_ready;
  matching_t [NEXT:0]   e_in;
  logic      [NEXT-1:0] m_valid, m_ready;
  matching_t [NEXT-1:0] m_in;

  assign e_in_valid[0] = f_valid;
  assign e_in[0]       = f_out;
  assign f_ready       = e_in_ready[0];

  for (genvar k = 0; k < NEXT; k++) begin : g_ext
    localparam int unsigned NS = ext_sets(k);
    localparam int unsigned P0 = ext_port(k);
    logic      x_valid, x_ready;
    matching_t x_out;

    matching_extender #(.NSETS(NS), .CACHED(CACHED)) u_ext (
      .clk, .rst_n, .cfg(cfg.ext[k]),
      .in_valid(e_in_valid[k]), .in_ready(e_in_ready[k]), .in(e_in[k]),
      .out_valid(x_valid), .out_ready(x_ready), .out(x_out),
      .rd_req_valid(rd_req_valid[P0 +: NS+1]), .rd_req_ready(rd_req_ready[P0 +: NS+1]),
      .rd_req_addr(rd_req_addr[P0 +: NS+1]), .rd_resp_valid(rd_resp_valid[P0 +: NS+1]),
      .rd_resp_data(rd_resp_data[P0 +: NS+1]), .hits(hit_v[P0 +: NS+1]),
      .dropped(drops[k]));

    if (k < NEXT - 1) begin : g_demux
      matching_demux #(.LEVEL(k + 3)) u_demux (
        .cfg_query_size(cfg.query_size),
        .in_valid(x_valid), .in_ready(x_ready), .in(x_out),
        .next_valid(e_in_valid[k+1]), .next_ready(e_in_ready[k+1]), .next(e_in[k+1]),
        .sink_valid(m_valid[k]), .sink_ready(m_ready[k]), .sink(m_in[k]));
    end else begin : g_last
      assign m_valid[k] = x_valid;
      assign m_in[k]    = x_out;
      assign x_ready    = m_ready[k];
    end
  end
  assign e_in_ready[NEXT] = 1'b0;

  // ---------------- multiplexer and sink ----------------
  logic k_valid, k_ready;
  matching_t k_in;
  matching_mux #(.N(NEXT)) u_mux (
    .clk, .rst_n, .in_valid(m_valid), .in_ready(m_ready), .in(m_in),
    .out_valid(k_valid), .out_ready(k_ready), .out(k_in));

  matching_sink u_sink (
    .clk, .rst_n, .cfg_match_base(cfg.match_base), .start(run),
    .in_valid(k_valid), .in_ready(k_ready), .in(k_in),
    .wr_valid, .wr_ready, .wr_req, .done(sink_done), .match_count(sink_count));

  // ---------------- request merger ----------------
  request_merger #(.NRD(NRD)) u_merge (
    .clk, .rst_n, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_data,
    .wr_valid, .wr_ready, .wr_req, .mem_req_valid, .mem_req_ready, .mem_req,
    .mem_resp_valid, .mem_resp_data);

  // ---------------- statistics ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cache_hits <= '0;
      pruned     <= '0;
    end else if (run) begin
      cache_hits <= '0;
      pruned     <= '0;
    end else begin
      cache_hits <= cache_hits + vid_t'($countones(hit_v));
      pruned     <= pruned + vid_t'($countones(drops));
    end
  end
endmodule
