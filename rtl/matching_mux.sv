// matching_mux: merges the matching streams of all levels into the sink
// with a round-robin arbiter (only one input is active for a given query
// size, so the arbitration matters only if streams overlap).  One register
// stage at the output, valid/ready.
module matching_mux
  import gm_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0]        in_valid,
  output logic [N-1:0]        in_ready,
  input  matching_t [N-1:0]   in,
  output logic                out_valid,
  input  logic                out_ready,
  output matching_t           out
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] prio, sel;
  logic any, take;

  always_comb begin
    any = 1'b0;
    sel = prio;
    for (int k = N - 1; k >= 0; k--) begin
      int unsigned idx;
      idx = (int'(prio) + k) % N;
      if (in_valid[idx]) begin any = 1'b1; sel = IW'(idx); end
    end
  end

  assign take = any && (!out_valid || out_ready);
  always_comb begin
    in_ready = '0;
    if (take) in_ready[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
      prio      <= '0;
    end else begin
      if (!out_valid || out_ready) out_valid <= any;
      if (take) begin
        out  <= in[sel];
        prio <= (sel == IW'(N - 1)) ? '0 : sel + 1'b1;
      end
    end
  end
endmodule
