// line_maxer: pipeline stage that attaches to a line the maximum of its
// valid elements.
//
// The maximum is needed by the intersect operator and is not simply the last
// element, because a line can be partly filled (a set shorter than a line, or
// the first and last line of a set that is not line aligned, or the sparse
// lines that an intersect operator emits).  Valid elements of a line are in
// ascending order, so the maximum is the highest-indexed valid element; a
// line with no valid element gets maximum 0.  One register stage with
// valid/ready handshake; a new line is accepted every cycle.
module line_maxer
  import gm_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  fline_t in,
  output logic   out_valid,
  input  logic   out_ready,
  output mline_t out
);
  vid_t max_c;
  always_comb begin
    max_c = '0;
    for (int i = 0; i < LINE_ELEMS; i++)
      if (in.mask[i] && in.data[i] > max_c) max_c = in.data[i];
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out <= '{line: in, max: max_c};
    end
  end
endmodule
