// allcompare_intersector: intersects up to NSETS sorted sets, streamed from
// memory, with a chain of AllCompare intersect operators.
//
// Structure (left to right, for NSETS = 4):
//   spot i:  fetcher -> line maxer                      (i = 0 .. NSETS-1)
//   op 0:    intersect(spot 0, spot 1)
//   op k:    intersect(line maxer(result of op k-1), spot k+1)
//   after each op a demultiplexer sends its result either on to the next
//   line maxer and operator or to the output multiplexer; the multiplexer
//   feeds a serializer that delivers one result element per cycle.
// The controller takes one request carrying the set of every spot, hands
// each active spot its set, and steers demultiplexers and multiplexer from
// the run-time setting cfg_nsets (2 .. NSETS), which is meant to be written
// before a query runs and held while it runs.  This lets one intersector do
// 2-, 3- or 4-set intersections.
//
// With CACHED = 1 every spot uses a cached fetcher (the prototype variant
// with input set caching), otherwise a plain buffered fetcher.  Each spot
// has its own memory read port; they are merged outside.
// The result leaves as res_beat_t beats: the elements in ascending order,
// then one terminator beat.  Requests may be queued back to back; results
// come out in request order.
module allcompare_intersector
  import gm_pkg::*;
#(
  parameter int unsigned NSETS       = 4,
  parameter bit          CACHED      = 1'b1,
  parameter int unsigned BUF_DEPTH   = 32,
  parameter int unsigned CACHE_LINES = 64
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [2:0]             cfg_nsets,
  input  logic                   req_valid,
  output logic                   req_ready,
  input  set_req_t [NSETS-1:0]   reqs,
  output logic                   out_valid,
  input  logic                   out_ready,
  output res_beat_t              out,
  output logic [NSETS-1:0]       rd_req_valid,
  input  logic [NSETS-1:0]       rd_req_ready,
  output laddr_t [NSETS-1:0]     rd_req_addr,
  input  logic [NSETS-1:0]       rd_resp_valid,
  input  line_data_t [NSETS-1:0] rd_resp_data,
  output logic [NSETS-1:0]       hits
);
  // ---------------- controller ----------------
  logic [NSETS-1:0] active, sent, f_req_valid, f_req_ready, done_now;
  always_comb begin
    for (int i = 0; i < NSETS; i++) begin
      active[i]      = (3'(i) < cfg_nsets);
      f_req_valid[i] = req_valid && active[i] && !sent[i];
      done_now[i]    = !active[i] || sent[i] || f_req_ready[i];
    end
  end
  assign req_ready = &done_now;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sent <= '0;
    else if (req_valid && req_ready) sent <= '0;
    else sent <= sent | (f_req_valid & f_req_ready);
  end

  // ---------------- spots: fetcher + line maxer ----------------
  logic   [NSETS-1:0] f_out_valid, f_out_ready, m_valid, m_ready;
  fline_t [NSETS-1:0] f_out;
  mline_t [NSETS-1:0] m_out;

  for (genvar i = 0; i < NSETS; i++) begin : g_spot
    if (CACHED) begin : g_cached
      cached_fetcher #(.BUF_DEPTH(BUF_DEPTH), .CACHE_LINES(CACHE_LINES)) u_fetch (
        .clk, .rst_n,
        .req_valid(f_req_valid[i]), .req_ready(f_req_ready[i]), .req(reqs[i]),
        .out_valid(f_out_valid[i]), .out_ready(f_out_ready[i]), .out(f_out[i]),
        .rd_req_valid(rd_req_valid[i]), .rd_req_ready(rd_req_ready[i]), .rd_req_addr(rd_req_addr[i]),
        .rd_resp_valid(rd_resp_valid[i]), .rd_resp_data(rd_resp_data[i]), .hit(hits[i]));
    end else begin : g_plain
      buffered_fetcher #(.BUF_DEPTH(BUF_DEPTH)) u_fetch (
        .clk, .rst_n,
        .req_valid(f_req_valid[i]), .req_ready(f_req_ready[i]), .req(reqs[i]),
        .out_valid(f_out_valid[i]), .out_ready(f_out_ready[i]), .out(f_out[i]),
        .rd_req_valid(rd_req_valid[i]), .rd_req_ready(rd_req_ready[i]), .rd_req_addr(rd_req_addr[i]),
        .rd_resp_valid(rd_resp_valid[i]), .rd_resp_data(rd_resp_data[i]));
      assign hits[i] = 1'b0;
    end
    line_maxer u_max (
      .clk, .rst_n,
      .in_valid(f_out_valid[i]), .in_ready(f_out_ready[i]), .in(f_out[i]),
      .out_valid(m_valid[i]), .out_ready(m_ready[i]), .out(m_out[i]));
  end

  // ---------------- operator chain ----------------
  localparam int unsigned NOPS = NSETS - 1;
  logic   [NOPS-1:0] a_valid, a_ready, o_valid, o_ready;
  mline_t [NOPS-1:0] a_in;
  fline_t [NOPS-1:0] o_out;
  // demultiplexer outputs towards the next stage
  logic   [NOPS-1:0] d_valid, d_ready;

  assign a_valid[0] = m_valid[0];
  assign a_in[0]    = m_out[0];
  assign m_ready[0] = a_ready[0];

  for (genvar k = 0; k < NOPS; k++) begin : g_op
    intersect_op u_op (
      .clk, .rst_n,
      .a_valid(a_valid[k]), .a_ready(a_ready[k]), .a(a_in[k]),
      .b_valid(m_valid[k+1]), .b_ready(m_ready[k+1]), .b(m_out[k+1]),
      .out_valid(o_valid[k]), .out_ready(o_ready[k]), .out(o_out[k]));

    // demultiplexer: last active operator goes to the output port
    logic to_out;
    assign to_out     = (3'(k) == cfg_nsets - 3'd2);
    assign d_valid[k] = o_valid[k] && !to_out;

    if (k + 1 < NOPS) begin : g_next
      line_maxer u_rmax (
        .clk, .rst_n,
        .in_valid(d_valid[k]), .in_ready(d_ready[k]), .in(o_out[k]),
        .out_valid(a_valid[k+1]), .out_ready(a_ready[k+1]), .out(a_in[k+1]));
    end else begin : g_end
      assign d_ready[k] = 1'b0;
    end
  end

  // ---------------- output multiplexer and port ----------------
  logic   s_valid, s_ready;
  fline_t s_in;
  always_comb begin
    s_valid = 1'b0;
    s_in    = o_out[0];
    for (int k = 0; k < NOPS; k++) begin
      if (3'(k) == cfg_nsets - 3'd2) begin
        s_valid    = o_valid[k];
        s_in       = o_out[k];
        o_ready[k] = s_ready;
      end else begin
        o_ready[k] = d_ready[k];
      end
    end
  end

  line_serializer u_ser (
    .clk, .rst_n,
    .in_valid(s_valid), .in_ready(s_ready), .in(s_in),
    .out_valid, .out_ready, .out);

  a_nsets: assert property (@(posedge clk) disable iff (!rst_n)
                            req_valid |-> (cfg_nsets >= 3'd2 && cfg_nsets <= 3'(NSETS)));
endmodule
