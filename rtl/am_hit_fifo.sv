// am_hit_fifo - input buffer of one superlayer.
//
// A synchronous first-word-fall-through FIFO of hit words (a hit, or an
// end-of-event marker).  The incoming stream has no back-pressure, as hits
// from the front end arrive asynchronously at their own pace: a word that
// arrives while the buffer is full is dropped and counted in ovf_count, which
// saturates.  End-of-event markers are never dropped; when the buffer is full
// the marker overwrites the newest hit instead, so that downstream event
// boundaries stay intact.  The read side is a valid/ready stream.
//
// Timing: a word written in cycle n is visible at the output in cycle n+1.
// That the input buffer exists and can overflow follows the paper; its depth
// (64 words), the drop policy and the overflow counter are this design's choice.
module am_hit_fifo
  import am_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  // write side (no back-pressure)
  input  logic      wr_valid,
  input  hit_word_t wr_data,
  // read side
  output logic      rd_valid,
  output hit_word_t rd_data,
  input  logic      rd_ready,
  // status
  output logic [15:0] ovf_count,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int unsigned AW = $clog2(DEPTH);

  hit_word_t          mem [DEPTH];
  logic [AW-1:0]      wptr, rptr;
  logic [AW:0]        cnt;
  logic               full, do_rd, do_wr, do_ovr;

  assign full   = (cnt == (AW+1)'(DEPTH));
  assign do_rd  = rd_valid && rd_ready;
  // a hit arriving on a full buffer is lost; a marker replaces the newest word
  assign do_wr  = wr_valid && (!full || do_rd);
  assign do_ovr = wr_valid && full && !do_rd && wr_data.eoe;

  assign rd_valid = (cnt != '0);
  assign rd_data  = mem[rptr];
  assign level    = cnt;

  always_ff @(posedge clk) begin
    if (do_wr)  mem[wptr] <= wr_data;
    if (do_ovr) mem[wptr - AW'(1)] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
      cnt  <= '0;
      ovf_count <= '0;
    end else begin
      if (do_wr) wptr <= wptr + AW'(1);
      if (do_rd) rptr <= rptr + AW'(1);
      cnt <= cnt + (AW+1)'(do_wr) - (AW+1)'(do_rd);
      if (wr_valid && full && !do_rd && ovf_count != 16'hFFFF)
        ovf_count <= ovf_count + 16'd1;
    end
  end

  // the read pointer only moves over written words
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) do_rd |-> cnt != '0);
endmodule
