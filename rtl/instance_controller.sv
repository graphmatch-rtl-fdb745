// instance_controller: runs one query on one instance.
//
// A 'start' command (from the control interface) is accepted when the
// instance is idle; the controller pulses 'run' to the matching source and
// the matching sink, counts the cycles of the query and finishes when the
// sink reports that the end-of-stream marker, and so every matching, has been
// written.  It reports busy/done and the statistics (cycles, matchings).
// The query size that steers the demultiplexers is held in the
// configuration registers; this controller only sequences the run.
module instance_controller
  import gm_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic run,
  input  logic sink_done,
  input  vid_t sink_count,
  output logic busy,
  output logic done,
  output vid_t cycles,
  output vid_t matchings
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; cycles <= '0; matchings <= '0; run <= 1'b0;
    end else begin
      run <= 1'b0;
      if (!busy && start) begin
        busy <= 1'b1; done <= 1'b0; cycles <= '0; run <= 1'b1;
      end else if (busy) begin
        cycles <= cycles + 1'b1;
        if (sink_done && !run) begin
          busy <= 1'b0; done <= 1'b1; matchings <= sink_count;
        end
      end
    end
  end
endmodule
