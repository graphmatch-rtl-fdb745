// matching_source: produces the initial two-vertex matchings, one per edge.
//
// On 'start' it reads pointers v_begin and v_end of the outgoing CSR to learn
// where the interval's neighbours lie, then streams pointers
// [v_begin, v_end] and the neighbours between them sequentially (two
// buffered fetchers).  For every vertex v with neighbour u it emits the
// matching (v with left bound and size; u without metadata).  After the
// last edge it emits an end-of-stream marker.  Restricting a source to a
// vertex interval is how several instances share one query.
module matching_source
  import gm_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  src_cfg_t       cfg,
  input  logic           start,
  output logic           busy,
  output logic           out_valid,
  input  logic           out_ready,
  output matching_t      out,
  output logic [1:0]     rd_req_valid,
  input  logic [1:0]     rd_req_ready,
  output laddr_t [1:0]   rd_req_addr,
  input  logic [1:0]     rd_resp_valid,
  input  line_data_t [1:0] rd_resp_data
);
  typedef enum logic [2:0] {S_IDLE, S_P0, S_P0W, S_P1, S_P1W, S_STREAM, S_RUN, S_EOS} state_t;
  state_t st;

  // fetcher 0: pointers, fetcher 1: neighbours (also used for the two probes)
  logic   [1:0] f_req_valid, f_req_ready, f_valid, f_ready, s_valid, s_ready;
  set_req_t [1:0] f_req;
  fline_t [1:0] f_line;
  res_beat_t [1:0] s_out;
  logic [1:0] sent;

  for (genvar i = 0; i < 2; i++) begin : g_f
    buffered_fetcher u_fetch (
      .clk, .rst_n, .req_valid(f_req_valid[i]), .req_ready(f_req_ready[i]), .req(f_req[i]),
      .out_valid(f_valid[i]), .out_ready(f_ready[i]), .out(f_line[i]),
      .rd_req_valid(rd_req_valid[i]), .rd_req_ready(rd_req_ready[i]), .rd_req_addr(rd_req_addr[i]),
      .rd_resp_valid(rd_resp_valid[i]), .rd_resp_data(rd_resp_data[i]));
  end
  // probe lines are read directly, stream lines through serializers
  logic   [1:0] ser_in_valid, ser_in_ready;
  for (genvar i = 0; i < 2; i++) begin : g_s
    line_serializer u_ser (
      .clk, .rst_n, .in_valid(ser_in_valid[i]), .in_ready(ser_in_ready[i]), .in(f_line[i]),
      .out_valid(s_valid[i]), .out_ready(s_ready[i]), .out(s_out[i]));
  end

  vid_t p_begin, p_end, v, vleft, cur, right;
  logic got_first, have_right;
  vid_t probe;
  always_comb begin
    probe = '0;
    for (int i = LINE_ELEMS - 1; i >= 0; i--) if (f_line[1].mask[i]) probe = f_line[1].data[i];
  end

  logic at_end;
  assign at_end = got_first && (v == cfg.v_end);

  always_comb begin
    f_req_valid  = '0;
    f_req        = '0;
    ser_in_valid = '0;
    f_ready      = '0;
    s_ready      = '0;
    out_valid    = 1'b0;
    out          = '0;
    unique case (st)
      S_P0: begin f_req_valid[1] = 1'b1; f_req[1] = '{addr: cfg.ptr_base + cfg.v_begin, count: vid_t'(1)}; end
      S_P1: begin f_req_valid[1] = 1'b1; f_req[1] = '{addr: cfg.ptr_base + cfg.v_end,   count: vid_t'(1)}; end
      S_P0W, S_P1W: f_ready[1] = 1'b1;
      S_STREAM: begin
        f_req_valid = ~sent;
        f_req[0] = '{addr: cfg.ptr_base + cfg.v_begin, count: cfg.v_end - cfg.v_begin + 1'b1};
        f_req[1] = '{addr: cfg.nbr_base + p_begin,     count: p_end - p_begin};
      end
      S_RUN: begin
        ser_in_valid = f_valid;
        f_ready      = ser_in_ready;
        if (at_end) begin
          // only the terminators of both streams are left
          s_ready[0] = s_valid[0] && !s_out[0].is_elem;
          s_ready[1] = s_valid[1] && !s_out[1].is_elem;
        end else if (!got_first || !have_right) begin
          s_ready[0] = s_valid[0] && s_out[0].is_elem;
        end else if (cur != right && s_valid[1] && s_out[1].is_elem) begin
          out_valid  = 1'b1;
          out.n      = POS_W'(2);
          out.v[0]   = '{id: v, left: vleft, size: right - vleft};
          out.v[1]   = '{id: s_out[1].elem, left: '0, size: '0};
          s_ready[1] = out_ready;
        end
      end
      S_EOS: begin out_valid = 1'b1; out.eos = 1'b1; end
      default: ;
    endcase
  end

  logic [1:0] term_seen;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; sent <= '0; p_begin <= '0; p_end <= '0; v <= '0; vleft <= '0;
      cur <= '0; right <= '0; got_first <= 1'b0; have_right <= 1'b0; term_seen <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (start) st <= S_P0;
        S_P0:   if (f_req_ready[1]) st <= S_P0W;
        S_P0W:  if (f_valid[1]) begin p_begin <= probe; st <= S_P1; end
        S_P1:   if (f_req_ready[1]) st <= S_P1W;
        S_P1W:  if (f_valid[1]) begin p_end <= probe; st <= S_STREAM; sent <= '0; end
        S_STREAM: begin
          sent <= sent | (f_req_valid & f_req_ready);
          if ((sent | f_req_ready) == 2'b11) begin
            st <= S_RUN; v <= cfg.v_begin; got_first <= 1'b0; have_right <= 1'b0; term_seen <= '0;
          end
        end
        S_RUN: begin
          if (at_end) begin
            if (s_ready[0]) term_seen[0] <= 1'b1;
            if (s_ready[1]) term_seen[1] <= 1'b1;
            if ((term_seen | s_ready) == 2'b11) st <= S_EOS;
          end else if (!got_first) begin
            if (s_ready[0]) begin got_first <= 1'b1; vleft <= s_out[0].elem; cur <= s_out[0].elem; end
          end else if (!have_right) begin
            if (s_ready[0]) begin have_right <= 1'b1; right <= s_out[0].elem; end
          end else if (cur == right) begin
            // vertex done (or without neighbours): move on
            v <= v + 1'b1; vleft <= right; have_right <= 1'b0;
          end else if (out_valid && out_ready) begin
            cur <= cur + 1'b1;
          end
        end
        S_EOS: if (out_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end
  assign busy = (st != S_IDLE);
endmodule
