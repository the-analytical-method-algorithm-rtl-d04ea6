// am_chamber_tp - Analytical Method trigger-primitive generator for the r-phi
// view of one drift-tube chamber.
//
// Two superlayer chains (am_sl_processor: input buffer, grouping, fitting)
// turn the hits of SL1 and SL3 into superlayer segments; am_correlator pairs
// SL1/SL3 segments whose times agree within +-25 ns into correlated
// primitives and passes the rest on uncorrelated; am_tp_formatter converts
// each primitive to sector phi / phi_B, computes its bunch crossing and packs
// it into a 64-bit word.
//
// Interface: per superlayer a hit-word input without back-pressure (a hit
// with layer, wire and time in ns since the orbit start, or an end-of-event
// marker); a valid/ready output of 64-bit primitives; `evt_done` pulses once
// all primitives of an event have been handed to the formatter; saturating
// counters report input-buffer overflows, segments dropped at the correlator
// and correlated primitives built.
//
// Timing: processing is event by event - a superlayer starts its scan when it
// reads the end-of-event marker, and correlation starts once both superlayers
// have finished.  See the per-block headers for clock counts.
//
// The chain (grouping, fitting, correlation, quality code, sector coordinates,
// 64-bit primitive) follows the paper's description of the r-phi firmware;
// the confirmation step, the r-z view and the RPC-based super-primitives are
// not part of that firmware and are not built here.  Event framing, buffer
// sizes and the number of cells per layer are this design's choices.
module am_chamber_tp
  import am_pkg::*;
#(
  parameter int unsigned NCELL        = 96,
  parameter int unsigned FIFO_DEPTH   = 64,
  parameter int unsigned NSEG         = 16,
  parameter int          DRIFT_TOL_NS = 2,
  parameter int          SL3_X_OFF_UM = 0,
  parameter int          R_UM         = 4_300_000,
  parameter int          X_CENTER_UM  = 2_016_000
) (
  input  logic        clk,
  input  logic        rst_n,
  // SL1 and SL3 hit streams
  input  logic        sl1_hit_valid,
  input  hit_word_t   sl1_hit,
  input  logic        sl3_hit_valid,
  input  hit_word_t   sl3_hit,
  // trigger primitives
  output logic        tp_valid,
  output tp_word_t    tp_word,
  input  logic        tp_ready,
  output logic        evt_done,
  // status
  output logic [15:0] sl1_ovf_count,
  output logic [15:0] sl3_ovf_count,
  output logic [15:0] seg_drop_count,
  output logic [15:0] corr_count
);
  logic  s1_valid, s1_ready, s1_done;
  logic  s3_valid, s3_ready, s3_done;
  seg_t  s1_seg, s3_seg;
  logic  c_valid, c_ready;
  ctp_t  c_tp;

  am_sl_processor #(.NCELL(NCELL), .FIFO_DEPTH(FIFO_DEPTH), .DRIFT_TOL_NS(DRIFT_TOL_NS)) u_sl1 (
    .clk, .rst_n,
    .hit_valid(sl1_hit_valid), .hit_word(sl1_hit),
    .seg_valid(s1_valid), .seg(s1_seg), .seg_ready(s1_ready),
    .done(s1_done), .ovf_count(sl1_ovf_count)
  );

  am_sl_processor #(.NCELL(NCELL), .FIFO_DEPTH(FIFO_DEPTH), .DRIFT_TOL_NS(DRIFT_TOL_NS)) u_sl3 (
    .clk, .rst_n,
    .hit_valid(sl3_hit_valid), .hit_word(sl3_hit),
    .seg_valid(s3_valid), .seg(s3_seg), .seg_ready(s3_ready),
    .done(s3_done), .ovf_count(sl3_ovf_count)
  );

  am_correlator #(.NSEG(NSEG), .SL3_X_OFF_UM(SL3_X_OFF_UM)) u_corr (
    .clk, .rst_n,
    .s1_valid, .s1_seg, .s1_ready, .s1_done,
    .s3_valid, .s3_seg, .s3_ready, .s3_done,
    .out_valid(c_valid), .out_tp(c_tp), .out_ready(c_ready),
    .done(evt_done),
    .drop_count(seg_drop_count),
    .corr_count(corr_count)
  );

  am_tp_formatter #(.R_UM(R_UM), .X_CENTER_UM(X_CENTER_UM)) u_fmt (
    .clk, .rst_n,
    .in_valid(c_valid), .in_tp(c_tp), .in_ready(c_ready),
    .out_valid(tp_valid), .out_word(tp_word), .out_ready(tp_ready)
  );
endmodule
