// tb_am_grouping - self-checking test of the grouping step.
//
// Each event holds one or two straight tracks (hits in adjacent half-staggered
// cells) plus random noise hits, sometimes a second hit in an already hit
// cell.  A brute-force model enumerates every choice of at most one stored
// hit per layer and applies the candidate rules directly on wire positions:
// >= 3 layers, pairwise |dp| <= layer distance, time spread <= 390 ns, and a
// 3-layer combination is dropped when a valid 4-layer one extends it inside
// its own 10-cell region (the region is anchored on the L4 cell, or, without
// L4, on the L3 cell minus one).  The set of candidates the block emits must
// equal the model's set, with each candidate emitted once, and `done` must
// pulse once per event.  The output is stalled at random.
`timescale 1ns/1ps
module tb_am_grouping;
  import am_pkg::*;
  localparam int NC = 16;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, done, busy;
  hit_word_t in_word;
  cand_t out_cand;
  int checks = 0, failures = 0, ndone = 0;
  string got [$];

  am_grouping #(.NCELL(NC)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic string key(input logic [3:0] m, input int c [4], input int t [4]);
    string s;
    s = $sformatf("%b", m);
    for (int l = 0; l < 4; l++) if (m[l]) s = {s, $sformatf(":%0d/%0d", c[l], t[l])};
    return s;
  endfunction

  always @(posedge clk) begin
    if (rst_n) out_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && out_valid && out_ready) begin
      int c [4], t [4];
      for (int l = 0; l < 4; l++) begin c[l] = out_cand.wire_no[l]; t[l] = out_cand.time_ns[l]; end
      got.push_back(key(out_cand.mask, c, t));
    end
    if (done) ndone++;
  end

  // stored hit memory of the model
  int hv [4][NC], ht [4][NC];

  function automatic bit comb_ok(input int c [4], input int t [4], input logic [3:0] m);
    int n, tmin, tmax, p [4];
    n = 0; tmin = 1 << 30; tmax = 0;
    for (int l = 0; l < 4; l++) if (m[l]) begin
      n++;
      p[l] = 2 * c[l] + (l % 2);
      if (t[l] < tmin) tmin = t[l];
      if (t[l] > tmax) tmax = t[l];
    end
    if (n < 3 || tmax - tmin > 390) return 0;
    for (int i = 0; i < 4; i++) for (int j = i + 1; j < 4; j++)
      if (m[i] && m[j] && (p[j] - p[i] > j - i || p[i] - p[j] > j - i)) return 0;
    return 1;
  endfunction

  int ncell;          // run-time copy of the cell count
  int lc [4][$];      // stored cells per layer

  task automatic run_event(input int ntrk, input int nnoise);
    hit_word_t w [$];
    hit_word_t h;
    string exp_s [$];
    int c [4], t [4], c2 [4], t2 [4], base, t0, start, anchor;
    bit ext;
    for (int l = 0; l < 4; l++) for (int i = 0; i < NC; i++) hv[l][i] = 0;
    // tracks: walk upwards through neighbouring cells
    for (int k = 0; k < ntrk; k++) begin
      int p;
      p  = 2 * $urandom_range(2, NC - 3);
      t0 = 1000 + $urandom_range(0, 200);
      for (int l = 0; l < 4; l++) begin
        if (l > 0) p = p + (($urandom_range(0, 1) == 1) ? 1 : -1);
        h = '0; h.hit.layer = 2'(l); h.hit.wire_no = CELL_W'((p - (l % 2)) / 2);
        h.hit.time_ns = TIME_W'(t0 + $urandom_range(0, 380));
        if ($urandom_range(0, 5) != 0) w.push_back(h);   // some hits lost
      end
    end
    for (int k = 0; k < nnoise; k++) begin
      h = '0; h.hit.layer = 2'($urandom_range(0, 3)); h.hit.wire_no = CELL_W'($urandom_range(0, NC - 1));
      h.hit.time_ns = TIME_W'(900 + $urandom_range(0, 900));
      w.push_back(h);
    end
    w.shuffle();
    // model memory: earliest hit per cell
    foreach (w[i]) begin
      int l, cc, tt;
      l = w[i].hit.layer; cc = w[i].hit.wire_no; tt = w[i].hit.time_ns;
      if (!hv[l][cc] || tt < ht[l][cc]) begin hv[l][cc] = 1; ht[l][cc] = tt; end
    end
    // brute-force candidates over the stored hits of each layer
    for (int l = 0; l < 4; l++) begin
      lc[l].delete();
      for (int cc = 0; cc < ncell; cc++) if (hv[l][cc]) lc[l].push_back(cc);
    end
    for (int i0 = -1; i0 < lc[0].size(); i0++)
    for (int i1 = -1; i1 < lc[1].size(); i1++)
    for (int i2 = -1; i2 < lc[2].size(); i2++)
    for (int i3 = -1; i3 < lc[3].size(); i3++) begin
      logic [3:0] m;
      int idx [4];
      idx = '{i0, i1, i2, i3};
      for (int l = 0; l < 4; l++) begin
        m[l] = (idx[l] >= 0);
        c[l] = m[l] ? lc[l][idx[l]] : 0;
        t[l] = m[l] ? ht[l][c[l]] : 0;
      end
      if (!comb_ok(c, t, m)) continue;
      if ($countones(m) == 3) begin
        anchor = m[3] ? c[3] : c[2] - 1;
        ext = 0;
        for (int l = 0; l < 4; l++) if (!m[l]) begin
          foreach (lc[l][q]) begin
            c2 = c; t2 = t; c2[l] = lc[l][q]; t2[l] = ht[l][lc[l][q]];
            if (comb_ok(c2, t2, 4'hF) && c2[3] == anchor) ext = 1;
          end
        end
        if (ext) continue;
      end
      exp_s.push_back(key(m, c, t));
    end
    // drive the event
    got.delete();
    start = ndone;
    foreach (w[i]) begin
      @(negedge clk); in_valid = 1; in_word = w[i];
      while (!in_ready) @(negedge clk);
    end
    @(negedge clk); in_word = '0; in_word.eoe = 1; in_valid = 1;
    while (!in_ready) @(negedge clk);
    @(negedge clk); in_valid = 0;
    while (ndone == start) @(posedge clk);
    @(negedge clk);
    check(ndone == start + 1, "one done pulse");
    check(got.size() == exp_s.size(), $sformatf("candidate count %0d vs %0d", got.size(), exp_s.size()));
    foreach (exp_s[i]) begin
      int cnt; cnt = 0;
      foreach (got[j]) if (got[j] == exp_s[i]) cnt++;
      check(cnt == 1, $sformatf("candidate %s emitted %0d times", exp_s[i], cnt));
    end
  endtask

  initial begin
    in_word = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    ncell = NC;
    for (int e = 0; e < 12; e++) run_event($urandom_range(1, 2), $urandom_range(0, 6));
    run_event(0, 0);  // empty event
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
