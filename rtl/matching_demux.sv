// matching_demux: after the extender that produces matchings with LEVEL
// vertices, sends them on to the next extender, or, when the query has
// exactly LEVEL vertices (cfg_query_size), towards the matching sink through
// the matching multiplexer.  End-of-stream markers take the same way.
// Purely combinational steering of a valid/ready stream.
module matching_demux
  import gm_pkg::*;
#(
  parameter int unsigned LEVEL = 3
) (
  input  logic       [POS_W-1:0] cfg_query_size,
  input  logic       in_valid,
  output logic       in_ready,
  input  matching_t  in,
  output logic       next_valid,
  input  logic       next_ready,
  output matching_t  next,
  output logic       sink_valid,
  input  logic       sink_ready,
  output matching_t  sink
);
  logic to_sink;
  assign to_sink    = (cfg_query_size == POS_W'(LEVEL));
  assign next       = in;
  assign sink       = in;
  assign next_valid = in_valid && !to_sink;
  assign sink_valid = in_valid && to_sink;
  assign in_ready   = to_sink ? sink_ready : next_ready;
endmodule
