// am_correlator - Correlation step: combines SL1 and SL3 segments.
//
// Segments of one event from the two r-phi superlayers are stored in two
// small buffers (NSEG entries each; a segment arriving on a full buffer is
// dropped and counted).  When both superlayers have signalled the end of the
// event, each SL1 segment (first the 4-hit ones, then the 3-hit ones, each
// in arrival order) is compared with every unused SL3
// segment; a pair is compatible when the fitted times differ by at most
// +-25 ns.  Of the compatible SL3 segments the one giving the highest
// correlated quality is taken, ties going to the smallest time difference and
// then to the earliest stored.  A matched pair produces one correlated
// primitive and both input segments are retired:
//   t0      = (t0_1 + t0_3) / 2                      (rounded down)
//   x0      = (x_1 + x_3) / 2                        (chamber centre plane)
//   tan psi = (x_3 - x_1) / 235 mm                   (rounded to nearest)
//   quality = 6 (3+3 hits), 7 (4+3) or 8 (4+4).
// Afterwards every segment left unmatched is sent on as an uncorrelated
// primitive (quality 1 or 3), first those of SL1 then those of SL3, with its
// position carried from its superlayer centre to the chamber centre plane
// along its own slope (+-117.5 mm).
//
// Interface: two valid/ready segment inputs, two end-of-event pulses, one
// valid/ready output of chamber primitives (ctp_t) and a `done` pulse after
// the last primitive of the event.  SL3 positions are shifted by SL3_X_OFF_UM
// into the SL1 wire frame.
// Timing: one clock per SL1/SL3 pair compared, one per primitive emitted.
//
// The +-25 ns window, the averaging of times and positions, the slope from the
// position difference over the 235 mm lever arm, the retirement of matched
// segments and the quality codes are the paper's; the buffer sizes, the
// greedy matching order and the projection of uncorrelated segments are
// this design's choices.
module am_correlator
  import am_pkg::*;
#(
  parameter int unsigned NSEG         = 16,
  parameter int          SL3_X_OFF_UM = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        s1_valid,
  input  seg_t        s1_seg,
  output logic        s1_ready,
  input  logic        s1_done,
  input  logic        s3_valid,
  input  seg_t        s3_seg,
  output logic        s3_ready,
  input  logic        s3_done,
  output logic        out_valid,
  output ctp_t        out_tp,
  input  logic        out_ready,
  output logic        done,
  output logic [15:0] drop_count,
  output logic [15:0] corr_count
);
  localparam int unsigned IW = $clog2(NSEG + 1);
  localparam longint HALF_DIST = SL_DIST_UM / 2;

  typedef enum logic [2:0] {S_COLLECT, S_MATCH, S_EMITC, S_EMIT1, S_EMIT3, S_DONE} state_e;

  state_e          state;
  seg_t            b1 [NSEG];
  seg_t            b3 [NSEG];
  logic [IW-1:0]   n1, n3, i, j, bj;
  logic [NSEG-1:0] used1, used3;
  logic            got1, got3, have_bj, pass;
  logic [2:0]      bj_rank;
  logic [TIME_W-1:0] bj_dt;
  ctp_t            corr_q;

  function automatic logic [TIME_W-1:0] absdiff(input logic [TIME_W-1:0] a, input logic [TIME_W-1:0] b);
    return (a > b) ? a - b : b - a;
  endfunction

  function automatic logic [2:0] rank(input seg_t a, input seg_t b);
    return 3'((a.quality == Q_4H) ? 1 : 0) + 3'((b.quality == Q_4H) ? 1 : 0);
  endfunction

  function automatic ctp_t combine(input seg_t a, input seg_t b);
    ctp_t   r;
    longint xa, xb, dx;
    xa = longint'(a.x0_um);
    xb = longint'(b.x0_um) + SL3_X_OFF_UM;
    dx = (xb - xa) * (longint'(1) << TAN_FRAC);
    unique case (rank(a, b))
      3'd0:    r.quality = Q_3P3;
      3'd1:    r.quality = Q_4P3;
      default: r.quality = Q_4P4;
    endcase
    r.sl     = 2'b11;
    r.t0_ns  = TIME_W'((longint'(a.t0_ns) + longint'(b.t0_ns)) >>> 1);
    r.x0_um  = POS_W'((xa + xb) >>> 1);
    r.tanpsi = TAN_W'((dx >= 0) ? (dx + HALF_DIST) / SL_DIST_UM
                                : -((-dx + HALF_DIST) / SL_DIST_UM));
    return r;
  endfunction

  function automatic ctp_t single(input seg_t a, input logic is3, input longint off);
    ctp_t   r;
    longint x, shift;
    x = longint'(a.x0_um) + off;
    // carry the position along the segment to the chamber centre plane
    shift = longint'(a.tanpsi) * HALF_DIST;
    shift = (shift + (longint'(1) <<< (TAN_FRAC - 1))) >>> TAN_FRAC;
    r.quality = a.quality;
    r.sl      = is3 ? 2'b10 : 2'b01;
    r.t0_ns   = a.t0_ns;
    r.x0_um   = POS_W'(is3 ? x - shift : x + shift);
    r.tanpsi  = a.tanpsi;
    return r;
  endfunction

  // comparison of the current pair
  logic              pair_ok, pair_better;
  logic [TIME_W-1:0] pair_dt;
  logic [2:0]        pair_rank;
  assign pair_dt     = absdiff(b1[i].t0_ns, b3[j].t0_ns);
  assign pair_rank   = rank(b1[i], b3[j]);
  assign pair_ok     = (j < n3) && !used3[j] && (pair_dt <= TIME_W'(CORR_WIN_NS));
  assign pair_better = !have_bj || (pair_rank > bj_rank) ||
                       (pair_rank == bj_rank && pair_dt < bj_dt);

  assign s1_ready = (state == S_COLLECT) && !got1;
  assign s3_ready = (state == S_COLLECT) && !got3;

  always_comb begin
    out_valid = 1'b0;
    out_tp    = '0;
    unique case (state)
      S_EMITC: begin out_valid = 1'b1; out_tp = corr_q; end
      S_EMIT1: if (i < n1 && !used1[i]) begin out_valid = 1'b1; out_tp = single(b1[i], 1'b0, 0); end
      S_EMIT3: if (i < n3 && !used3[i]) begin out_valid = 1'b1; out_tp = single(b3[i], 1'b1, SL3_X_OFF_UM); end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (s1_valid && s1_ready && n1 < IW'(NSEG)) b1[n1[$clog2(NSEG)-1:0]] <= s1_seg;
    if (s3_valid && s3_ready && n3 < IW'(NSEG)) b3[n3[$clog2(NSEG)-1:0]] <= s3_seg;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_COLLECT;
      n1 <= '0; n3 <= '0; i <= '0; j <= '0; bj <= '0;
      used1 <= '0; used3 <= '0;
      got1 <= 1'b0; got3 <= 1'b0; have_bj <= 1'b0; pass <= 1'b0;
      bj_rank <= '0; bj_dt <= '0;
      corr_q <= '0;
      done <= 1'b0;
      drop_count <= '0;
      corr_count <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_COLLECT: begin
          if (s1_valid && s1_ready) begin
            if (n1 < IW'(NSEG)) n1 <= n1 + IW'(1);
            else if (drop_count != 16'hFFFF) drop_count <= drop_count + 16'd1;
          end
          if (s3_valid && s3_ready) begin
            if (n3 < IW'(NSEG)) n3 <= n3 + IW'(1);
            else if (drop_count != 16'hFFFF) drop_count <= drop_count + 16'd1;
          end
          if (s1_done) got1 <= 1'b1;
          if (s3_done) got3 <= 1'b1;
          if ((got1 || s1_done) && (got3 || s3_done)) begin
            state <= S_MATCH;
            i <= '0; j <= '0; have_bj <= 1'b0; pass <= 1'b0;
          end
        end
        S_MATCH: begin
          if (i >= n1) begin
            i    <= '0;
            pass <= 1'b1;
            if (pass) state <= S_EMIT1;
          end else if (used1[i] || (pass == (b1[i].quality == Q_4H))) begin
            // 4-hit SL1 segments are matched in the first pass, 3-hit ones in the second
            i <= i + IW'(1);
          end else if (j < n3) begin
            if (pair_ok && pair_better) begin
              have_bj <= 1'b1;
              bj      <= j;
              bj_rank <= pair_rank;
              bj_dt   <= pair_dt;
            end
            j <= j + IW'(1);
          end else begin
            // end of the SL3 sweep for segment i
            if (have_bj) begin
              corr_q <= combine(b1[i], b3[bj]);
              used1[i]  <= 1'b1;
              used3[bj] <= 1'b1;
              state <= S_EMITC;
            end else begin
              i <= i + IW'(1);
            end
            j <= '0;
            have_bj <= 1'b0;
          end
        end
        S_EMITC: if (out_ready) begin
          corr_count <= corr_count + 16'd1;
          i <= i + IW'(1);
          state <= S_MATCH;
        end
        S_EMIT1: begin
          if (i >= n1) begin
            i <= '0;
            state <= S_EMIT3;
          end else if (!out_valid || out_ready) begin
            i <= i + IW'(1);
          end
        end
        S_EMIT3: begin
          if (i >= n3) state <= S_DONE;
          else if (!out_valid || out_ready) i <= i + IW'(1);
        end
        S_DONE: begin
          done  <= 1'b1;
          n1 <= '0; n3 <= '0; i <= '0; j <= '0;
          used1 <= '0; used3 <= '0;
          got1 <= 1'b0; got3 <= 1'b0;
          state <= S_COLLECT;
        end
        default: state <= S_COLLECT;
      endcase
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> $stable(out_tp));
endmodule
