// am_sl_processor - trigger-segment chain of one r-phi superlayer.
//
// Input buffer (am_hit_fifo) -> Grouping (am_grouping) -> Fitting (am_fitter).
// Hits and end-of-event markers enter the buffer without back-pressure; the
// fitted segments leave on a valid/ready stream.  `done` pulses once per
// event, after the grouping scan has ended and the fitter has emitted its last
// segment, so that the correlator knows a superlayer has delivered everything
// for that event.
//
// The split of the superlayer chain into buffer, grouping and fitting follows
// the paper; the event framing with end-of-event markers is this design's.
module am_sl_processor
  import am_pkg::*;
#(
  parameter int unsigned NCELL        = 96,
  parameter int unsigned FIFO_DEPTH   = 64,
  parameter int          DRIFT_TOL_NS = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        hit_valid,
  input  hit_word_t   hit_word,
  output logic        seg_valid,
  output seg_t        seg,
  input  logic        seg_ready,
  output logic        done,
  output logic [15:0] ovf_count
);
  logic      f_valid, f_ready;
  hit_word_t f_word;
  logic      c_valid, c_ready;
  cand_t     c_cand;
  logic      g_done, g_busy, pend_done;
  logic [$clog2(FIFO_DEPTH+1)-1:0] f_level;

  am_hit_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_valid (hit_valid),
    .wr_data  (hit_word),
    .rd_valid (f_valid),
    .rd_data  (f_word),
    .rd_ready (f_ready),
    .ovf_count(ovf_count),
    .level    (f_level)
  );

  am_grouping #(.NCELL(NCELL)) u_group (
    .clk, .rst_n,
    .in_valid (f_valid),
    .in_word  (f_word),
    .in_ready (f_ready),
    .out_valid(c_valid),
    .out_cand (c_cand),
    .out_ready(c_ready),
    .done     (g_done),
    .busy     (g_busy)
  );

  am_fitter #(.DRIFT_TOL_NS(DRIFT_TOL_NS)) u_fit (
    .clk, .rst_n,
    .in_valid (c_valid),
    .in_cand  (c_cand),
    .in_ready (c_ready),
    .out_valid(seg_valid),
    .out_seg  (seg),
    .out_ready(seg_ready)
  );

  // the event is complete once the fitter is idle after the scan
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_done <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (g_done) pend_done <= 1'b1;
      else if (pend_done && c_ready && !seg_valid) begin
        pend_done <= 1'b0;
        done      <= 1'b1;
      end
    end
  end
endmodule
