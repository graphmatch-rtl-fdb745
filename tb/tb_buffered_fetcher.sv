// tb_buffered_fetcher: drives random set requests (including empty sets and
// sets spanning many lines) into the buffered fetcher backed by a memory
// model whose element i holds 3*i+1, and checks every output line's data,
// mask and last flag against the expected values; it also checks that a
// 64-element line-aligned set streams out at one line per cycle once the
// pipeline is full.
module tb_buffered_fetcher;
  import gm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, out_valid, out_ready;
  set_req_t req;
  fline_t out;
  logic rd_req_valid, rd_req_ready, rd_resp_valid;
  laddr_t rd_req_addr;
  line_data_t rd_resp_data;
  mem_req_t mreq;
  int checks = 0, failures = 0;

  buffered_fetcher dut (.*);
  assign mreq = '{we: 1'b0, addr: rd_req_addr, wdata: '0, wmask: '0};
  mem_model #(.LINES(1024), .LATENCY(6), .STALL(1'b1)) u_mem (
    .clk, .rst_n, .req_valid(rd_req_valid), .req_ready(rd_req_ready), .req(mreq),
    .resp_valid(rd_resp_valid), .resp_data(rd_resp_data));

  set_req_t q[$];
  int unsigned exp_addr, exp_left;  // expectations for the set being received
  logic in_set;
  int lines_seen;

  // checker
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    set_req_t r;
    logic [LINE_ELEMS-1:0] m;
    int unsigned line_no;
    if (!in_set) begin
      r = q[0];
      exp_addr = r.addr; exp_left = r.count; in_set = 1;
    end
    checks++;
    if (exp_left == 0) begin
      if (out.mask != 0 || !out.last) begin failures++; $display("FAIL empty set line"); end
      in_set = 0; void'(q.pop_front());
    end else begin
      line_no = exp_addr / LINE_ELEMS;
      m = '0;
      for (int e = 0; e < LINE_ELEMS; e++)
        if (line_no*LINE_ELEMS + e >= exp_addr && exp_left > (line_no*LINE_ELEMS + e - exp_addr)) m[e] = 1;
      if (out.mask != m) begin failures++; $display("FAIL mask %h exp %h", out.mask, m); end
      for (int e = 0; e < LINE_ELEMS; e++)
        if (m[e] && out.data[e] != 3*(line_no*LINE_ELEMS+e)+1) begin
          failures++; $display("FAIL data"); break; end
      exp_left -= $countones(m);
      exp_addr = (line_no + 1) * LINE_ELEMS;
      if (out.last != (exp_left == 0)) begin failures++; $display("FAIL last"); end
      if (exp_left == 0) begin in_set = 0; void'(q.pop_front()); end
    end
  end

  initial begin
    out_ready = 1; req_valid = 0; req = '0; in_set = 0;
    for (int i = 0; i < 1024*LINE_ELEMS; i++) u_mem.write_elem(i, 3*i+1);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random requests with random output backpressure
    fork
      forever begin @(negedge clk); out_ready = ($urandom_range(0, 4) != 0); end
    join_none
    for (int k = 0; k < 200; k++) begin
      set_req_t r;
      r.addr  = $urandom_range(0, 8000);
      r.count = ($urandom_range(0, 9) == 0) ? 0 : $urandom_range(1, 70);
      @(negedge clk);
      req = r; req_valid = 1;
      while (!req_ready) @(negedge clk);
      q.push_back(r);
      @(posedge clk);
    end
    @(negedge clk) req_valid = 0;
    while (q.size() != 0) @(posedge clk);
    disable fork;
    // throughput: 64 aligned elements = 4 lines; after the first line, one per cycle
    out_ready = 1;
    repeat (5) @(posedge clk);
    begin
      set_req_t r; int t0, t1;
      r.addr = 160; r.count = 64;
      q.push_back(r);
      @(negedge clk); req = r; req_valid = 1; @(negedge clk); req_valid = 0;
      while (!(out_valid)) @(posedge clk);
      t0 = $time;
      while (q.size() != 0) @(posedge clk);
      t1 = $time;
      checks++;
      if ((t1 - t0) / 10 > 3 + 6) begin failures++; $display("FAIL slow stream %0d", (t1-t0)/10); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
