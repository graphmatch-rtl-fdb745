// matching_sink: writes complete matchings to the matchings array.
//
// Only the vertex identifiers are kept (the metadata is dropped).  The n
// identifiers of each matching are appended, one per cycle, to a line
// buffer; a full line is written to memory at match_base + 16*k elements.
// At the end-of-stream marker the partly filled line is written with an
// element mask and 'done' is raised until the next 'start'.  The dense
// packing and the one-identifier-per-cycle rate are this design's choices;
// match_base must be line aligned.
module matching_sink
  import gm_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  eaddr_t     cfg_match_base,
  input  logic       start,
  input  logic       in_valid,
  output logic       in_ready,
  input  matching_t  in,
  output logic       wr_valid,
  input  logic       wr_ready,
  output mem_req_t   wr_req,
  output logic       done,
  output vid_t       match_count
);
  logic [LINE_ELEMS-1:0][VID_W-1:0] buf_data;
  logic [$clog2(LINE_ELEMS)-1:0]    fill;
  logic [LINE_ELEMS-1:0]            buf_mask;
  laddr_t                           line_addr;
  logic [POS_W-1:0]                 idx;
  logic                             flushing, full_pending;

  assign wr_valid = full_pending || flushing;
  assign wr_req   = '{we: 1'b1, addr: line_addr, wdata: buf_data, wmask: buf_mask};
  assign in_ready = !full_pending && !flushing && !done &&
                    (in.eos || (idx == in.n - 1'b1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_data <= '0; buf_mask <= '0; fill <= '0; line_addr <= '0; idx <= '0;
      flushing <= 1'b0; full_pending <= 1'b0; done <= 1'b0; match_count <= '0;
    end else begin
      if (start) begin
        line_addr <= cfg_match_base[EADDR_W-1:4];
        done <= 1'b0; match_count <= '0; fill <= '0; buf_mask <= '0; idx <= '0;
      end else if (wr_valid) begin
        if (wr_ready) begin
          full_pending <= 1'b0;
          line_addr    <= line_addr + 1'b1;
          buf_mask     <= '0;
          if (flushing) begin flushing <= 1'b0; done <= 1'b1; end
        end
      end else if (in_valid && !done) begin
        if (in.eos) begin
          if (buf_mask != '0) flushing <= 1'b1;
          else done <= 1'b1;
        end else begin
          buf_data[fill] <= in.v[idx].id;
          buf_mask[fill] <= 1'b1;
          fill <= fill + 1'b1;
          if (fill == ($clog2(LINE_ELEMS))'(LINE_ELEMS - 1)) full_pending <= 1'b1;
          if (idx == in.n - 1'b1) begin
            idx <= '0;
            match_count <= match_count + 1'b1;
          end else idx <= idx + 1'b1;
        end
      end
    end
  end
endmodule
