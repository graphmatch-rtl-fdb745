// intersect_op: the AllCompare intersect operator for two sorted sets.
//
// Each input (a, b) is a stream of lines of one sorted set of distinct
// values with each line's maximum attached (from a line maxer).  In every
// step the operator compares every valid element of the current a line with
// every valid element of the current b line (LINE_ELEMS x LINE_ELEMS equality
// comparators) and emits the a line with a mask of the elements that have an
// equal partner.  Then the line with the smaller maximum is discarded, since
// all its elements are smaller than some element still to come in the other
// set; equal maxima discard both lines.  A line with no valid element is
// discarded alone.  So every step retires at least one whole input line.
//
// The intersection ends when either set's last line is discarded: the
// operator then emits a line marked last (its mask may be empty) and drains
// the remaining lines of the other set, so that the next pair of sets starts
// aligned.  Lines without any match are not emitted, so the output is a
// stream of sparse lines of the result set ending with a last line; it can
// feed the next line maxer and intersect operator directly.
//
// Discarding whole lines by their maxima follows the paper's description of
// the operator hardware; the per-element discarding drawn in the paper's
// step-by-step example is not reproduced.  Output is registered (valid/ready).
module intersect_op
  import gm_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   a_valid,
  output logic   a_ready,
  input  mline_t a,
  input  logic   b_valid,
  output logic   b_ready,
  input  mline_t b,
  output logic   out_valid,
  input  logic   out_ready,
  output fline_t out
);
  logic flush_a, flush_b;      // draining the rest of one set
  logic empty_a, empty_b;
  logic [LINE_ELEMS-1:0] eq;
  logic take_a, take_b, end_a, end_b, step, emit;
  logic out_free;

  assign out_free = !out_valid || out_ready;
  assign empty_a  = (a.line.mask == '0);
  assign empty_b  = (b.line.mask == '0);

  // all-to-all equality compare
  always_comb begin
    for (int i = 0; i < LINE_ELEMS; i++) begin
      eq[i] = 1'b0;
      for (int j = 0; j < LINE_ELEMS; j++)
        if (a.line.mask[i] && b.line.mask[j] && (a.line.data[i] == b.line.data[j])) eq[i] = 1'b1;
    end
  end

  always_comb begin
    take_a = 1'b0;
    take_b = 1'b0;
    if (empty_a || empty_b) begin
      take_a = empty_a;
      take_b = empty_b;
    end else begin
      take_a = (a.max <= b.max);
      take_b = (b.max <= a.max);
    end
  end

  assign step  = !flush_a && !flush_b && a_valid && b_valid && out_free;
  assign end_a = take_a && a.line.last;
  assign end_b = take_b && b.line.last;
  assign emit  = step && ((eq != '0) || end_a || end_b);

  assign a_ready = flush_a ? 1'b1 : (step && take_a);
  assign b_ready = flush_b ? 1'b1 : (step && take_b);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      flush_a   <= 1'b0;
      flush_b   <= 1'b0;
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      if (out_free) out_valid <= emit;
      if (emit) out <= '{data: a.line.data, mask: eq, last: end_a || end_b};
      if (flush_a && a_valid && a.line.last) flush_a <= 1'b0;
      if (flush_b && b_valid && b.line.last) flush_b <= 1'b0;
      if (step && end_a && !end_b) flush_b <= 1'b1;
      if (step && end_b && !end_a) flush_a <= 1'b1;
    end
  end
endmodule
