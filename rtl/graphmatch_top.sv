// graphmatch_top: the GraphMatch accelerator with NINST independent
// instances.
//
// Each instance has its own memory channel (a full copy of the data graph
// lives in every channel) and is otherwise connected only to the shared
// control interface, so instances never exchange matchings.  The host
// either splits one query's vertex set into intervals, one per instance, or
// runs unrelated queries on different instances.  NINST = 4 and six levels
// per instance follow the prototype; caching is on (CACHED = 1), the
// prototype's faster variant.  The memory channels and the host register bus
// are plain ports: the DRAM controllers and the PCIe shell are outside this
// design.
module graphmatch_top
  import gm_pkg::*;
#(
  parameter int unsigned NINST  = 4,
  parameter bit          CACHED = 1'b1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // host control register bus
  input  logic                   ctl_wr_en,
  input  logic [15:0]            ctl_wr_addr,
  input  logic [31:0]            ctl_wr_data,
  input  logic                   ctl_rd_en,
  input  logic [15:0]            ctl_rd_addr,
  output logic [31:0]            ctl_rd_data,
  // one memory channel per instance
  output logic [NINST-1:0]       mem_req_valid,
  input  logic [NINST-1:0]       mem_req_ready,
  output mem_req_t [NINST-1:0]   mem_req,
  input  logic [NINST-1:0]       mem_resp_valid,
  input  line_data_t [NINST-1:0] mem_resp_data
);
  inst_cfg_t [NINST-1:0] cfg;
  logic [NINST-1:0] start, busy, done;
  vid_t [NINST-1:0] cycles, matchings, cache_hits, pruned;

  control_interface #(.NINST(NINST)) u_ctl (
    .clk, .rst_n, .wr_en(ctl_wr_en), .wr_addr(ctl_wr_addr), .wr_data(ctl_wr_data),
    .rd_en(ctl_rd_en), .rd_addr(ctl_rd_addr), .rd_data(ctl_rd_data),
    .cfg, .start, .busy, .done, .cycles, .matchings, .cache_hits, .pruned);

  for (genvar i = 0; i < NINST; i++) begin : g_inst
    graphmatch_instance #(.CACHED(CACHED)) u_inst (
      .clk, .rst_n, .cfg(cfg[i]), .start(start[i]), .busy(busy[i]), .done(done[i]),
      .cycles(cycles[i]), .matchings(matchings[i]), .cache_hits(cache_hits[i]),
      .pruned(pruned[i]),
      .mem_req_valid(mem_req_valid[i]), .mem_req_ready(mem_req_ready[i]), .mem_req(mem_req[i]),
      .mem_resp_valid(mem_resp_valid[i]), .mem_resp_data(mem_resp_data[i]));
  end
endmodule
