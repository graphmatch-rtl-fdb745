// sync_fifo: single-clock first-word-fall-through FIFO used by all GraphMatch
// stages (fetcher buffers, matching queues, flag queues).
//
// The head entry is visible on 'rdata' whenever 'empty' is low; 'pop' removes
// it.  'push' while full and 'pop' while empty are protocol errors and are
// caught by assertions.  Storage is a plain array so that synthesis can map
// deep instances to block RAM.  'count' reports the fill level.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  T                           wdata,
  input  logic                       pop,
  output T                           rdata,
  output logic                       full,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                mem [DEPTH];
  logic [AW-1:0]   wptr, rptr;
  logic [$clog2(DEPTH+1)-1:0] cnt;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
      cnt  <= '0;
    end else begin
      if (push) wptr <= inc(wptr);
      if (pop)  rptr <= inc(rptr);
      cnt <= cnt + (push ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
    end
  end

  assign rdata = mem[rptr];
  assign full  = (cnt == ($clog2(DEPTH+1))'(DEPTH));
  assign empty = (cnt == '0);
  assign count = cnt;

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
