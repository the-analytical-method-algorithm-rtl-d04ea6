// tb_am_fit_core - self-checking test of the single-hypothesis segment fit.
//
// Random straight tracks (t0, x0, tan(psi)) are turned into hits with real
// arithmetic: the track position in each layer gives the cell, the side of the
// wire and the drift time (rounded to 1 ns).  The fit is applied with the true
// lateralities (3-hit and 4-hit masks) and must return t0 within 2 ns, x0
// within 120 um and tan(psi) within 0.01, with a physical solution; for 4-hit
// tracks the chi2 of the true laterality must not exceed that of any other
// physical laterality.  Degenerate patterns (all hits on one side) must be
// flagged as not physical.
`timescale 1ns/1ps
module tb_am_fit_core;
  import am_pkg::*;

  cand_t              cand;
  logic [NLAYERS-1:0] lat;
  logic               valid;
  seg_t               seg;
  int checks = 0, failures = 0;

  am_fit_core dut (.cand(cand), .lat(lat), .valid(valid), .seg(seg));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  real t0r, x0r, tp, xl, w, ddist;
  int  c, tr, ri;
  logic [3:0] true_lat, mask;
  logic [CHI2_W-1:0] chi_true;

  initial begin
    for (int n = 0; n < 300; n++) begin
      t0r = 1000.0 + $urandom_range(0, 5000);
      x0r = 400000.0 + $urandom_range(0, 1000000);
      ri  = $urandom_range(0, 2000);
      tp  = (ri - 1000) / 1000.0;   // |tan psi| <= 1
      cand = '0;
      for (int l = 0; l < 4; l++) begin
        xl = x0r + tp * (l - 1.5) * 13000.0;
        c  = int'($floor((xl - (l % 2) * 21000.0) / 42000.0 + 0.5));
        w  = c * 42000.0 + (l % 2) * 21000.0;
        ddist = (xl > w) ? xl - w : w - xl;
        true_lat[l] = (xl > w);
        tr = int'(t0r + ddist / 54.0);
        cand.wire_no[l] = CELL_W'(c);
        cand.time_ns[l] = TIME_W'(tr);
      end
      mask = (n % 3 == 0) ? 4'hF : (4'hF & ~(4'b1 << (n % 4)));
      cand.mask = mask;
      // a track with all hits on one side cannot give t0: skip those
      if ((true_lat & mask) == 4'h0 || (true_lat & mask) == mask) begin
        lat = true_lat; #1;
        check(!valid, "degenerate laterality flagged");
        continue;
      end
      lat = true_lat; #1;
      check(valid, $sformatf("physical solution n=%0d", n));
      check($signed(seg.t0_ns) - int'(t0r) <= 2 && int'(t0r) - $signed({1'b0, seg.t0_ns}) <= 2,
            $sformatf("t0 %0d vs %0f", seg.t0_ns, t0r));
      check((real'(seg.x0_um) - x0r) < 120.0 && (x0r - real'(seg.x0_um)) < 120.0,
            $sformatf("x0 %0d vs %0f", seg.x0_um, x0r));
      check((real'(seg.tanpsi) / 4096.0 - tp) < 0.01 && (tp - real'(seg.tanpsi) / 4096.0) < 0.01,
            $sformatf("tanpsi %0d vs %0f", seg.tanpsi, tp));
      check(seg.quality == ((mask == 4'hF) ? Q_4H : Q_3H), "quality");
      if (mask == 4'hF) begin
        chi_true = seg.chi2;
        for (int k = 0; k < 16; k++) begin
          lat = 4'(k); #1;
          if (valid && 4'(k) != true_lat)
            check(seg.chi2 + 64'd20000 >= {24'b0, chi_true}, $sformatf("chi2 minimum at true laterality n=%0d k=%0d", n, k));
        end
      end
    end
    // explicitly degenerate: all left / all right
    cand.mask = 4'hF; lat = 4'h0; #1; check(!valid, "all-left degenerate");
    lat = 4'hF; #1; check(!valid, "all-right degenerate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
