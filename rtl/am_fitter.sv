// am_fitter - laterality scan and segment selection of one superlayer.
//
// Takes grouping candidates (3 or 4 hits) on a valid/ready stream and tries
// every laterality hypothesis with am_fit_core, one hypothesis per clock:
//  * 4-hit candidates: among the hypotheses with a physical solution the one
//    with the smallest chi2 is kept and emitted as a single quality-3 segment
//    after the scan (ties keep the first hypothesis in scan order);
//  * 3-hit candidates: every hypothesis with a physical solution is emitted as
//    a quality-1 segment, as soon as it is found.
// For 3-hit candidates only hypotheses whose bits for the empty layer are zero
// are scanned, so none is tried twice.
//
// Timing: a candidate is accepted in one cycle, the scan takes 16 cycles plus
// one cycle to emit the best 4-hit segment; output back-pressure stalls the
// scan.  in_ready is high only in the idle state.
//
// The selection rules (minimum chi2 for 4 hits, all physical solutions for 3
// hits) follow the paper; the sequential one-hypothesis-per-clock schedule is
// this design's choice.
module am_fitter
  import am_pkg::*;
#(
  parameter int DRIFT_TOL_NS = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  cand_t in_cand,
  output logic  in_ready,
  output logic  out_valid,
  output seg_t  out_seg,
  input  logic  out_ready
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_BEST} state_e;

  state_e             state;
  cand_t              cand_q;
  logic [NLAYERS-1:0] lat_q;
  logic               core_valid;
  seg_t               core_seg;
  logic               have_best;
  seg_t               best;
  logic               is4, lat_ok, emit3, advance, last;

  am_fit_core #(.DRIFT_TOL_NS(DRIFT_TOL_NS)) u_core (
    .cand (cand_q),
    .lat  (lat_q),
    .valid(core_valid),
    .seg  (core_seg)
  );

  assign is4     = (cand_q.mask == 4'hF);
  assign lat_ok  = ((lat_q & ~cand_q.mask) == '0);
  assign emit3   = (state == S_RUN) && !is4 && lat_ok && core_valid;
  assign advance = (state == S_RUN) && (!emit3 || out_ready);
  assign last    = (lat_q == 4'hF);

  assign in_ready  = (state == S_IDLE);
  assign out_valid = emit3 || (state == S_BEST);
  assign out_seg   = (state == S_BEST) ? best : core_seg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cand_q    <= '0;
      lat_q     <= '0;
      have_best <= 1'b0;
      best      <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          cand_q    <= in_cand;
          lat_q     <= '0;
          have_best <= 1'b0;
          state     <= S_RUN;
        end
        S_RUN: if (advance) begin
          if (is4 && core_valid && (!have_best || core_seg.chi2 < best.chi2)) begin
            best      <= core_seg;
            have_best <= 1'b1;
          end
          lat_q <= lat_q + 4'd1;
          if (last) begin
            if (is4 && (have_best || core_valid)) state <= S_BEST;
            else                                  state <= S_IDLE;
          end
        end
        S_BEST: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_BEST && !out_ready) |=> (state == S_BEST && $stable(best)));
endmodule
