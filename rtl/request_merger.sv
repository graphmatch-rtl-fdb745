// request_merger: merges the read ports of all requesters of an instance and
// the write port of the matching sink into the single request stream of the
// instance's memory channel, and routes read responses back.
//
// A round-robin arbiter grants one request per cycle.  For every granted
// read the requester's index is queued; memory answers reads in order, so
// each response goes to the requester at the head of that queue.  Readers
// reserve buffer space before they ask, so responses are never stalled.
// The in-order memory port is this design's assumption.
module request_merger
  import gm_pkg::*;
#(
  parameter int unsigned NRD       = 4,
  parameter int unsigned MAX_OUTST = 64
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NRD-1:0]         rd_req_valid,
  output logic [NRD-1:0]         rd_req_ready,
  input  laddr_t [NRD-1:0]       rd_req_addr,
  output logic [NRD-1:0]         rd_resp_valid,
  output line_data_t [NRD-1:0]   rd_resp_data,
  input  logic                   wr_valid,
  output logic                   wr_ready,
  input  mem_req_t               wr_req,
  output logic                   mem_req_valid,
  input  logic                   mem_req_ready,
  output mem_req_t               mem_req,
  input  logic                   mem_resp_valid,
  input  line_data_t             mem_resp_data
);
  localparam int unsigned N  = NRD + 1;           // index NRD = writer
  localparam int unsigned IW = $clog2(N);
  typedef logic [IW-1:0] idx_t;

  logic [N-1:0] req_v;
  idx_t prio, sel;
  logic any, id_full, id_empty;
  idx_t id_head;
  logic [$clog2(MAX_OUTST+1)-1:0] id_cnt;

  always_comb begin
    req_v = {wr_valid, rd_req_valid & {NRD{!id_full}}};
    any = 1'b0;
    sel = prio;
    for (int k = N - 1; k >= 0; k--) begin
      int unsigned idx;
      idx = (int'(prio) + k) % N;
      if (req_v[idx]) begin any = 1'b1; sel = idx_t'(idx); end
    end
  end

  always_comb begin
    mem_req_valid = any;
    if (sel == idx_t'(NRD)) mem_req = wr_req;
    else mem_req = '{we: 1'b0, addr: rd_req_addr[sel], wdata: '0, wmask: '0};
    rd_req_ready = '0;
    wr_ready     = 1'b0;
    if (any && mem_req_ready) begin
      if (sel == idx_t'(NRD)) wr_ready = 1'b1;
      else rd_req_ready[sel] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) prio <= '0;
    else if (any && mem_req_ready) prio <= (sel == idx_t'(N - 1)) ? '0 : sel + 1'b1;
  end

  sync_fifo #(.T(idx_t), .DEPTH(MAX_OUTST)) u_ids (
    .clk, .rst_n, .push(any && mem_req_ready && sel != idx_t'(NRD)), .wdata(sel),
    .pop(mem_resp_valid), .rdata(id_head), .full(id_full), .empty(id_empty), .count(id_cnt));

  always_comb begin
    for (int i = 0; i < NRD; i++) begin
      rd_resp_valid[i] = mem_resp_valid && (id_head == idx_t'(i));
      rd_resp_data[i]  = mem_resp_data;
    end
  end
endmodule
