// tb_am_chamber_tp - end-to-end test of the chamber trigger-primitive
// generator at its default parameters.
//
// Straight muon tracks (t0, position at the chamber centre plane, tan psi)
// are turned into SL1 and SL3 hits with real arithmetic: SL centres at
// -+117.5 mm, layers 13 mm apart, half-staggered 42 mm cells, 54 um/ns drift
// velocity, times rounded to 1 ns.  Event types:
//   * a track seen in both superlayers      -> one correlated primitive,
//                                              quality 8 (4+4) or 7 (4+3)
//   * a track seen in SL1 only             -> one uncorrelated quality-3 primitive
//   * an event with a burst of noise hits sent while the previous event is
//     still being scanned                   -> input-buffer overflow
// For single-track events the primitive of highest quality is compared with
// the track: t0 within 2 ns, BX = round(t0/25), phi and phi_B against
// atan() of the true geometry within 8 and 3 (12 uncorrelated) LSB.  Each mechanism (correlation,
// 3-hit segment in a correlation, uncorrelated output, buffer overflow) must
// occur at least once.
`timescale 1ns/1ps
module tb_am_chamber_tp;
  import am_pkg::*;

  localparam real R_UM  = 4300000.0;
  localparam real XC_UM = 2016000.0;

  logic clk = 0, rst_n = 0;
  logic sl1_hit_valid = 0, sl3_hit_valid = 0, tp_valid, tp_ready = 1, evt_done;
  hit_word_t sl1_hit, sl3_hit;
  tp_word_t tp_word;
  logic [15:0] sl1_ovf_count, sl3_ovf_count, seg_drop_count, corr_count;
  int checks = 0, failures = 0, ndone = 0;
  int n_corr = 0, n_q7 = 0, n_uncorr = 0;
  tp_word_t tps [$];

  am_chamber_tp dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    if (rst_n && tp_valid && tp_ready) tps.push_back(tp_word);
    if (evt_done) ndone++;
  end

  function automatic real rabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // hits of one superlayer for a track; drop_l >= 0 removes that layer
  task automatic make_hits(input real t0, input real x, input real tp, input real zsl,
                           input int drop_l, ref hit_word_t q [$]);
    real xl, w, d;
    int c;
    hit_word_t h;
    for (int l = 0; l < 4; l++) begin
      if (l == drop_l) continue;
      xl = x + tp * (zsl + (l - 1.5) * 13000.0);
      c  = int'($floor((xl - (l % 2) * 21000.0) / 42000.0 + 0.5));
      w  = c * 42000.0 + (l % 2) * 21000.0;
      d  = (xl > w) ? xl - w : w - xl;
      h = '0;
      h.hit.layer = 2'(l);
      h.hit.wire_no = CELL_W'(c);
      h.hit.time_ns = TIME_W'(int'(t0 + d / 54.0));
      q.push_back(h);
    end
  endtask

  task automatic send(ref hit_word_t q1 [$], ref hit_word_t q3 [$]);
    int n;
    n = (q1.size() > q3.size()) ? q1.size() : q3.size();
    for (int i = 0; i <= n; i++) begin
      @(negedge clk);
      sl1_hit_valid = (i <= q1.size());
      sl3_hit_valid = (i <= q3.size());
      sl1_hit = '0; sl3_hit = '0;
      if (i < q1.size()) sl1_hit = q1[i]; else sl1_hit.eoe = 1;
      if (i < q3.size()) sl3_hit = q3[i]; else sl3_hit.eoe = 1;
      if (i > q1.size()) sl1_hit_valid = 0;
      if (i > q3.size()) sl3_hit_valid = 0;
    end
    @(negedge clk); sl1_hit_valid = 0; sl3_hit_valid = 0;
  endtask

  task automatic run_track(input int kind);
    hit_word_t q1 [$], q3 [$];
    real t0, x, tp, phi_e, phib_e;
    int start, best, bx_e, ri, phi_i, phib_i;
    logic [63:0] bw;
    t0 = 2000.0 + $urandom_range(0, 60000);
    x  = 500000.0 + $urandom_range(0, 3000000);
    ri = $urandom_range(0, 1200);
    tp = (ri - 600) / 1000.0;
    make_hits(t0, x, tp, -117500.0, -1, q1);
    if (kind == 1) make_hits(t0, x, tp, 117500.0, -1, q3);
    if (kind == 2) make_hits(t0, x, tp, 117500.0, int'($urandom_range(0, 3)), q3);
    tps.delete();
    start = ndone;
    send(q1, q3);
    while (ndone == start) @(posedge clk);
    repeat (3) @(posedge clk);
    check(tps.size() >= 1, "at least one primitive");
    if (tps.size() == 0) return;
    best = 0;
    foreach (tps[i]) if (tps[i].quality > tps[best].quality) best = i;
    if (tps[best].sl == 2'b11) n_corr++;
    if (tps[best].quality == Q_4P3) n_q7++;
    if (tps[best].sl == 2'b01) n_uncorr++;
    case (kind)
      1: check(tps[best].quality == Q_4P4 && tps[best].sl == 2'b11, $sformatf("4+4 correlated, got q%0d", tps[best].quality));
      2: check(tps[best].quality == Q_4P3 && tps[best].sl == 2'b11, $sformatf("4+3 correlated, got q%0d", tps[best].quality));
      default: check(tps[best].quality == Q_4H && tps[best].sl == 2'b01, $sformatf("uncorrelated q3, got q%0d", tps[best].quality));
    endcase
    check(int'(tps[best].t0_ns) - int'(t0) <= 2 && int'(t0) - int'(tps[best].t0_ns) <= 2,
          $sformatf("t0 %0d vs %0f", tps[best].t0_ns, t0));
    bx_e = int'((int'(tps[best].t0_ns) + 12) / 25);
    check(int'(tps[best].bx) == bx_e, "bx");
    bw     = tps[best];
    phi_i  = int'($signed(bw[28:12]));
    phib_i = int'($signed(bw[11:0]));
    phi_e  = $atan((x - XC_UM) / R_UM) * 131072.0;
    phib_e = ($atan(tp) - $atan((x - XC_UM) / R_UM)) * 2048.0;
    check(rabs(real'(phi_i) - phi_e) < 8.0, $sformatf("phi %0d vs %0f", phi_i, phi_e));
    check(rabs(real'(phib_i) - phib_e) < ((kind == 0) ? 12.0 : 3.0),
          $sformatf("phib %0d vs %0f", phib_i, phib_e));
  endtask

  task automatic run_overflow();
    hit_word_t q1 [$], q3 [$];
    hit_word_t h;
    int start;
    // first event with a track, then at once a burst of 100 noise hits
    make_hits(3000.0, 1500000.0, 0.1, -117500.0, -1, q1);
    make_hits(3000.0, 1500000.0, 0.1, 117500.0, -1, q3);
    start = ndone;
    send(q1, q3);
    q1.delete(); q3.delete();
    for (int i = 0; i < 100; i++) begin
      h = '0; h.hit.layer = 2'($urandom_range(0, 3)); h.hit.wire_no = CELL_W'($urandom_range(0, 95));
      h.hit.time_ns = TIME_W'(20000 + 400 * i);
      q1.push_back(h); q3.push_back(h);
    end
    send(q1, q3);
    while (ndone < start + 2) @(posedge clk);
    check(sl1_ovf_count > 0 && sl3_ovf_count > 0, "buffer overflow counted");
  endtask

  initial begin
    sl1_hit = '0; sl3_hit = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int e = 0; e < 24; e++) run_track(e % 3);
    run_overflow();
    check(n_corr > 0, $sformatf("correlations happened: %0d", n_corr));
    check(n_q7 > 0, $sformatf("3-hit segment in a correlation: %0d", n_q7));
    check(n_uncorr > 0, $sformatf("uncorrelated primitives: %0d", n_uncorr));
    check(corr_count > 0, "correlation counter");
    $display("mechanisms: correlated=%0d q7=%0d uncorrelated=%0d overflow=%0d/%0d",
             n_corr, n_q7, n_uncorr, sl1_ovf_count, sl3_ovf_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
