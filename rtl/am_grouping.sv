// am_grouping - Grouping step of one superlayer.
//
// Collects the hits of one event into a hit memory (one entry per cell, the
// earliest hit of a cell is kept) until an end-of-event marker arrives, then
// scans the superlayer with a 10-cell grouping region and emits every
// combination of hits that can belong to one straight muon track.
//
// The region ("macro-cell") is an inverted pyramid anchored on cell k of the
// top layer L4 (layer index 3): 1 cell in L4 (k), 2 cells in L3 (k, k+1),
// 3 cells in L2 (k-1..k+1) and 4 cells in L1 (k-1..k+2) - 10 cells, covering
// every 4-layer path through half-staggered neighbour cells that ends in cell k
// of L4.  Within the region all 120 ways of picking at most one cell per layer
// are examined in parallel.  A combination is a candidate when
//   * it uses 3 or 4 layers whose cells all hold a hit,
//   * any two used layers i<j have wire positions at most (j-i) half cells
//     apart (a track at most one half cell per layer off the vertical),
//   * all its hit times are within the 390 ns maximum drift time,
//   * a 3-layer combination has no 4-layer candidate of the same region that
//     extends it, and, if it lacks L4, uses the right-hand L3 cell (so that a
//     combination shared by two overlapping regions is emitted only once).
// Candidates of a region are sent one per clock on a valid/ready stream;
// a region without candidates costs one clock.  After the last region the
// memory is cleared and `done` pulses for one clock.
//
// Timing: collecting takes one clock per word; the scan takes NCELL+1
// region steps plus one clock per emitted candidate.
//
// The 10-cell region and the selection of geometrically consistent patterns
// are the paper's; the pyramid shape, the pairwise slope rule, the one-hit-
// per-cell memory, the event framing and the duplicate rules are this design's
// choices.
module am_grouping
  import am_pkg::*;
#(
  parameter int unsigned NCELL = 96
) (
  input  logic      clk,
  input  logic      rst_n,
  // hit words from the input buffer
  input  logic      in_valid,
  input  hit_word_t in_word,
  output logic      in_ready,
  // candidates to the fitter
  output logic      out_valid,
  output cand_t     out_cand,
  input  logic      out_ready,
  // end of the scan of one event
  output logic      done,
  output logic      busy
);
  localparam int unsigned NCOMB = 120;   // 5 * 4 * 3 * 2 choices
  localparam int unsigned KW    = $clog2(NCELL + 2) + 1;

  typedef enum logic [1:0] {S_COLLECT, S_SCAN, S_CLEAR} state_e;

  // choice index c_l of layer l (0 = layer unused) -> combination index
  function automatic int choice(input int idx, input int l);
    case (l)
      3: return idx % 2;
      2: return (idx / 2) % 3;
      1: return (idx / 6) % 4;
      default: return idx / 24;
    endcase
  endfunction

  // cell of layer l, choice c >= 1, relative to the anchor k
  function automatic int rel_cell(input int l, input int c);
    return (l >= 2) ? c - 1 : c - 2;   // L4: k; L3: k,k+1; L2/L1: k-1...
  endfunction

  // static part of the candidate rules
  function automatic logic geom_ok(input int idx);
    int p [4];
    int n;
    n = 0;
    for (int l = 0; l < 4; l++) begin
      p[l] = 2 * rel_cell(l, choice(idx, l)) + (l % 2);
      if (choice(idx, l) != 0) n++;
    end
    if (n < 3) return 1'b0;
    for (int i = 0; i < 4; i++)
      for (int j = i + 1; j < 4; j++)
        if (choice(idx, i) != 0 && choice(idx, j) != 0)
          if (p[j] - p[i] > j - i || p[i] - p[j] > j - i) return 1'b0;
    // a region without its L4 cell only keeps combinations on its right L3 cell
    if (choice(idx, 3) == 0 && choice(idx, 2) != 2) return 1'b0;
    return 1'b1;
  endfunction

  state_e                  state;
  logic [NCELL-1:0]        hv [NLAYERS];
  logic [TIME_W-1:0]       ht [NLAYERS][NCELL];
  logic signed [KW-1:0]    k;
  logic                    loaded;
  logic [NCOMB-1:0]        pend, vmask, gmask;
  int                      sel;
  logic                    hit_wr;

  // combinations that extend combination idx by one layer
  function automatic logic [NCOMB-1:0] supersets(input int idx);
    logic [NCOMB-1:0] r;
    logic sup;
    r = '0;
    for (int j = 0; j < NCOMB; j++) begin
      sup = (j != idx);
      for (int l = 0; l < 4; l++)
        if (choice(j, l) == 0 || (choice(idx, l) != 0 && choice(idx, l) != choice(j, l)))
          sup = 1'b0;
      r[j] = sup;
    end
    return r;
  endfunction

  logic [NCOMB-1:0] smask [NCOMB];
  for (genvar g = 0; g < NCOMB; g++) begin : g_geom
    localparam logic             G = geom_ok(g);
    localparam logic [NCOMB-1:0] S = supersets(g);
    assign gmask[g] = G;
    assign smask[g] = S;
  end

  // hits of the current region
  logic                    rv [NLAYERS][5];
  logic [CELL_W-1:0]       rc [NLAYERS][5];
  logic [TIME_W-1:0]       rt [NLAYERS][5];

  always_comb begin
    int c;
    for (int l = 0; l < NLAYERS; l++) begin
      for (int ch = 0; ch < 5; ch++) begin
        c = int'(k) + rel_cell(l, ch);
        rv[l][ch] = 1'b0;
        rc[l][ch] = '0;
        rt[l][ch] = '0;
        if (ch != 0 && c >= 0 && c < int'(NCELL)) begin
          rv[l][ch] = hv[l][c];
          rc[l][ch] = CELL_W'(c);
          rt[l][ch] = ht[l][c];
        end
      end
    end
  end

  // dynamic candidate rules, one small circuit per combination
  logic [NCOMB-1:0] ok;
  for (genvar g = 0; g < NCOMB; g++) begin : g_comb
    localparam int C0 = choice(g, 0);
    localparam int C1 = choice(g, 1);
    localparam int C2 = choice(g, 2);
    localparam int C3 = choice(g, 3);
    logic              full;
    logic [TIME_W-1:0] tmin, tmax;
    always_comb begin
      full = 1'b1;
      tmin = '1;
      tmax = '0;
      if (C0 != 0) begin full &= rv[0][C0]; tmin = rt[0][C0]; tmax = rt[0][C0]; end
      if (C1 != 0) begin
        full &= rv[1][C1];
        if (rt[1][C1] < tmin) tmin = rt[1][C1];
        if (rt[1][C1] > tmax) tmax = rt[1][C1];
      end
      if (C2 != 0) begin
        full &= rv[2][C2];
        if (rt[2][C2] < tmin) tmin = rt[2][C2];
        if (rt[2][C2] > tmax) tmax = rt[2][C2];
      end
      if (C3 != 0) begin
        full &= rv[3][C3];
        if (rt[3][C3] < tmin) tmin = rt[3][C3];
        if (rt[3][C3] > tmax) tmax = rt[3][C3];
      end
    end
    assign ok[g] = gmask[g] && full && (tmax - tmin <= TIME_W'(MAX_DRIFT_NS));
    // a 3-layer combination is dropped when a 4-layer one extends it
    assign vmask[g] = ok[g] && ((ok & smask[g]) == '0);
  end

  // lowest pending combination
  always_comb begin
    sel = 0;
    for (int idx = NCOMB - 1; idx >= 0; idx--)
      if (pend[idx]) sel = idx;
  end

  always_comb begin
    out_cand = '0;
    for (int l = 0; l < NLAYERS; l++) begin
      if (choice(sel, l) != 0) begin
        out_cand.mask[l]    = 1'b1;
        out_cand.wire_no[l] = rc[l][choice(sel, l)];
        out_cand.time_ns[l] = rt[l][choice(sel, l)];
      end
    end
  end

  assign in_ready  = (state == S_COLLECT);
  assign out_valid = (state == S_SCAN) && loaded;
  assign busy      = (state != S_COLLECT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_COLLECT;
      k      <= '0;
      loaded <= 1'b0;
      pend   <= '0;
      done   <= 1'b0;
      for (int l = 0; l < NLAYERS; l++) hv[l] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_COLLECT: if (in_valid) begin
          if (in_word.eoe) begin
            state  <= S_SCAN;
            k      <= -KW'(1);
            loaded <= 1'b0;
          end else if (int'(in_word.hit.wire_no) < int'(NCELL)) begin
            // keep the earliest hit of a cell
            if (hit_wr) hv[in_word.hit.layer][in_word.hit.wire_no] <= 1'b1;
          end
        end
        S_SCAN: begin
          if (!loaded) begin
            if (vmask != '0) begin
              pend   <= vmask;
              loaded <= 1'b1;
            end else if (k == KW'(NCELL - 1)) begin
              state <= S_CLEAR;
            end else begin
              k <= k + KW'(1);
            end
          end else if (out_ready) begin
            pend[sel] <= 1'b0;
            if ((pend & ~(NCOMB'(1) << sel)) == '0) begin
              loaded <= 1'b0;
              if (k == KW'(NCELL - 1)) state <= S_CLEAR;
              else                     k <= k + KW'(1);
            end
          end
        end
        S_CLEAR: begin
          for (int l = 0; l < NLAYERS; l++) hv[l] <= '0;
          done  <= 1'b1;
          state <= S_COLLECT;
        end
        default: state <= S_COLLECT;
      endcase
    end
  end

  // keep the earliest hit of a cell; the time memory needs no reset, it is
  // only read where hv is set
  assign hit_wr = (state == S_COLLECT) && in_valid && !in_word.eoe &&
                  (int'(in_word.hit.wire_no) < int'(NCELL)) &&
                  (!hv[in_word.hit.layer][in_word.hit.wire_no] ||
                   in_word.hit.time_ns < ht[in_word.hit.layer][in_word.hit.wire_no]);

  always_ff @(posedge clk) begin
    if (hit_wr) ht[in_word.hit.layer][in_word.hit.wire_no] <= in_word.hit.time_ns;
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_cand)));
endmodule
