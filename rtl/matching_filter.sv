// matching_filter: drops partial matchings that cannot lead to a result.
//
// With cfg.on set, a matching is dropped when
//  * a vertex selected in cfg.size_mask has a neighbourhood smaller than
//    cfg.min_size for that vertex (min_size 1 removes empty sets, larger
//    values implement failing set pruning: the data vertex needs at least as
//    many neighbours as the query vertex), or
//  * cfg.distinct is set (subgraph isomorphism) and the newest vertex,
//    v[n-1], equals one of the vertices before it.
// With cfg.on clear every matching passes (homomorphism without pruning).
// End-of-stream markers always pass.  One register stage, valid/ready.
module matching_filter
  import gm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  filter_cfg_t cfg,
  input  logic        in_valid,
  output logic        in_ready,
  input  matching_t   in,
  output logic        out_valid,
  input  logic        out_ready,
  output matching_t   out,
  output logic        dropped   // pulse per discarded matching
);
  logic drop;
  always_comb begin
    drop = 1'b0;
    if (cfg.on && !in.eos) begin
      for (int i = 0; i < MAX_LEVELS; i++) begin
        if (cfg.size_mask[i] && (POS_W'(i) < in.n) && (in.v[i].size < vid_t'(cfg.min_size[i])))
          drop = 1'b1;
        if (cfg.distinct && (POS_W'(i) < in.n - 1'b1) && (in.v[i].id == in.v[in.n - 1'b1].id))
          drop = 1'b1;
      end
    end
  end

  assign in_ready = !out_valid || out_ready;
  assign dropped  = in_valid && in_ready && drop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid && !drop;
      if (in_valid) out <= in;
    end
  end
endmodule
