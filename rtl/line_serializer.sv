// line_serializer: turns a stream of sparse result lines into one element per
// cycle, followed by a terminator beat that closes the set.
//
// A line is held until all its valid elements have left, lowest index first;
// after the line marked last a beat with is_elem = 0 and last = 1 is sent.
// This is the intersector's output port, which the paper limits to one result
// element per clock cycle.  The separate terminator beat is this design's
// choice.
module line_serializer
  import gm_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  fline_t    in,
  output logic      out_valid,
  input  logic      out_ready,
  output res_beat_t out
);
  logic [LINE_ELEMS-1:0] done;   // elements of the current line already sent
  logic [LINE_ELEMS-1:0] left;
  logic [$clog2(LINE_ELEMS)-1:0] idx;
  logic any;

  assign left = in.mask & ~done;
  always_comb begin
    any = 1'b0;
    idx = '0;
    for (int i = LINE_ELEMS - 1; i >= 0; i--)
      if (left[i]) begin any = 1'b1; idx = ($clog2(LINE_ELEMS))'(i); end
  end

  always_comb begin
    out_valid = in_valid;
    out       = '{elem: in.data[idx], is_elem: any, last: !any && in.last};
    // an empty line that is not last produces nothing
    if (!any && !in.last) out_valid = 1'b0;
    in_ready  = !any && (!in.last || out_ready);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done <= '0;
    else if (in_valid) begin
      if (any && out_ready) done <= done | (LINE_ELEMS'(1) << idx);
      else if (!any && in_ready) done <= '0;
    end
  end
endmodule
