// mem_model: behavioural stand-in for one off-chip memory channel.
//
// Not synthesizable logic of the design: it models the DDR4 channel and its
// vendor controller seen through a simple line-wide port.  A request is
// accepted when req_ready is high (randomly withheld when STALL is set);
// reads return the line exactly LATENCY cycles later, in order, and writes
// apply their element mask at once.  Testbenches fill and inspect 'mem'
// through the write_elem/read_elem functions.
module mem_model
  import gm_pkg::*;
#(
  parameter int unsigned LINES   = 4096,
  parameter int unsigned LATENCY = 8,
  parameter bit          STALL   = 1'b0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req_valid,
  output logic       req_ready,
  input  mem_req_t   req,
  output logic       resp_valid,
  output line_data_t resp_data
);
  line_data_t mem [LINES];
  logic       pv [LATENCY];
  line_data_t pd [LATENCY];
  int unsigned reads, writes;

  function automatic void write_elem(input int unsigned eaddr, input logic [31:0] val);
    mem[eaddr / LINE_ELEMS][(eaddr % LINE_ELEMS)*VID_W +: VID_W] = val;
  endfunction

  function automatic logic [31:0] read_elem(input int unsigned eaddr);
    return mem[eaddr / LINE_ELEMS][(eaddr % LINE_ELEMS)*VID_W +: VID_W];
  endfunction

  function automatic void clear();
    for (int i = 0; i < LINES; i++) mem[i] = '0;
  endfunction

  always_ff @(posedge clk) begin
    req_ready <= STALL ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LATENCY; i++) pv[i] <= 1'b0;
      reads  <= 0;
      writes <= 0;
    end else begin
      pv[0] <= req_valid && req_ready && !req.we;
      pd[0] <= mem[req.addr % LINES];
      for (int i = 1; i < LATENCY; i++) begin
        pv[i] <= pv[i-1];
        pd[i] <= pd[i-1];
      end
      if (req_valid && req_ready) begin
        if (req.we) begin
          writes <= writes + 1;
          for (int e = 0; e < LINE_ELEMS; e++)
            if (req.wmask[e]) mem[req.addr % LINES][e*VID_W +: VID_W] <= req.wdata[e*VID_W +: VID_W];
        end else reads <= reads + 1;
      end
    end
  end
  assign resp_valid = pv[LATENCY-1];
  assign resp_data  = pd[LATENCY-1];
endmodule
