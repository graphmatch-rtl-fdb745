// control_interface: the query parameter registers of all instances and the
// host's window onto them.
//
// The host writes 32-bit words.  Instance i owns the word range
// [i*256, i*256+255]:
//   word 0        write: bit 0 = start the query (one-cycle pulse)
//   word 1        read : bit 0 = busy, bit 1 = done
//   words 2..5    read : cycles, matchings, cache hits, pruned matchings
//   words 16..    write/read: the packed inst_cfg_t, least significant word
//                 first (word 16 holds bits 31:0)
// Reads are registered (data one cycle after rd_en).  The register map is
// this design's own; the paper only states that the host programs query
// parameters and triggers and observes the run over a control interface.
module control_interface
  import gm_pkg::*;
#(
  parameter int unsigned NINST = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   wr_en,
  input  logic [15:0]            wr_addr,
  input  logic [31:0]            wr_data,
  input  logic                   rd_en,
  input  logic [15:0]            rd_addr,
  output logic [31:0]            rd_data,
  output inst_cfg_t [NINST-1:0]  cfg,
  output logic [NINST-1:0]       start,
  input  logic [NINST-1:0]       busy,
  input  logic [NINST-1:0]       done,
  input  vid_t [NINST-1:0]       cycles,
  input  vid_t [NINST-1:0]       matchings,
  input  vid_t [NINST-1:0]       cache_hits,
  input  vid_t [NINST-1:0]       pruned
);
  localparam int unsigned CFG_WORDS = (INST_CFG_W + 31) / 32;
  typedef logic [CFG_WORDS*32-1:0] cfg_bits_t;

  cfg_bits_t [NINST-1:0] regs;
  logic [7:0] w_word, r_word;
  logic [7:0] w_inst, r_inst;
  assign w_inst = wr_addr[15:8];
  assign w_word = wr_addr[7:0];
  assign r_inst = rd_addr[15:8];
  assign r_word = rd_addr[7:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      regs  <= '0;
      start <= '0;
    end else begin
      start <= '0;
      if (wr_en && w_inst < 8'(NINST)) begin
        if (w_word == 8'd0) start[w_inst] <= wr_data[0];
        else if (w_word >= 8'd16 && w_word < 8'(16 + CFG_WORDS))
          regs[w_inst][(w_word - 8'd16) * 32 +: 32] <= wr_data;
      end
    end
  end

  for (genvar i = 0; i < NINST; i++) begin : g_cfg
    assign cfg[i] = inst_cfg_t'(regs[i][INST_CFG_W-1:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_data <= '0;
    else if (rd_en) begin
      rd_data <= '0;
      if (r_inst < 8'(NINST)) begin
        unique case (r_word)
          8'd1: rd_data <= {30'd0, done[r_inst], busy[r_inst]};
          8'd2: rd_data <= cycles[r_inst];
          8'd3: rd_data <= matchings[r_inst];
          8'd4: rd_data <= cache_hits[r_inst];
          8'd5: rd_data <= pruned[r_inst];
          default:
            if (r_word >= 8'd16 && r_word < 8'(16 + CFG_WORDS))
              rd_data <= regs[r_inst][(r_word - 8'd16) * 32 +: 32];
        endcase
      end
    end
  end
endmodule
