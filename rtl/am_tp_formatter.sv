// am_tp_formatter - conversion of chamber primitives to the 64-bit
// trigger-primitive word in sector coordinates.
//
// The local position x0 (um, chamber centre plane) is taken relative to the
// sector centre, x_s = x0 - X_CENTER_UM, and turned into the azimuth of the
// primitive seen from the beam line, phi = atan(x_s / R_UM), with R_UM the
// radius of the chamber centre plane.  The local direction gives
// psi = atan(tan psi), and the bending angle is phi_B = psi - phi.  Both
// arctangents use a 20-step vectoring CORDIC on 64-bit words (angle LSB
// 2^-20 rad); the constants below are round(2^20 * atan(2^-i)).  The scales
// are 65536 per 0.5 rad for phi (2^17 per rad) and 4096 per 2 rad for phi_B
// (2^11 per rad).  The bunch crossing is t0 / 25 ns, rounded to nearest.
//
// Word layout (tp_word_t): quality[63:60] sl[59:58] bx[57:46] t0[45:29]
// phi[28:12] phiB[11:0].
//
// Interface: valid/ready in and out, one register stage (one clock latency,
// one primitive per clock).
//
// The phi/phi_B definitions and scales and the 64-bit size are the paper's;
// the CORDIC, the bit layout, R_UM and X_CENTER_UM (chamber geometry not in
// the paper) and the BX rounding are this design's choices.
module am_tp_formatter
  import am_pkg::*;
#(
  parameter int R_UM        = 4_300_000,
  parameter int X_CENTER_UM = 2_016_000
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  ctp_t     in_tp,
  output logic     in_ready,
  output logic     out_valid,
  output tp_word_t out_word,
  input  logic     out_ready
);
  localparam int NIT = 20;
  localparam longint ATAN_TAB [NIT] = '{
    823550, 486170, 256879, 130396, 65451, 32757, 16383, 8192, 4096, 2048,
    1024, 512, 256, 128, 64, 32, 16, 8, 4, 2};

  // angle of the vector (x, y), x > 0, in units of 2^-20 rad
  function automatic longint cordic_atan(input longint y_in, input longint x_in);
    longint x, y, z, xn;
    x = x_in; y = y_in; z = 0;
    for (int i = 0; i < NIT; i++) begin
      if (y > 0) begin
        xn = x + (y >>> i);
        y  = y - (x >>> i);
        z  = z + ATAN_TAB[i];
      end else begin
        xn = x - (y >>> i);
        y  = y + (x >>> i);
        z  = z - ATAN_TAB[i];
      end
      x = xn;
    end
    return z;
  endfunction

  function automatic longint rsh_round(input longint v, input int sh);
    return (v + (longint'(1) <<< (sh - 1))) >>> sh;
  endfunction

  tp_word_t w;

  always_comb begin
    longint xs, phi20, psi20;
    xs    = longint'(in_tp.x0_um) - longint'(X_CENTER_UM);
    phi20 = cordic_atan(xs <<< 16, longint'(R_UM) <<< 16);
    psi20 = cordic_atan(longint'(in_tp.tanpsi) <<< 16, longint'(1) <<< (TAN_FRAC + 16));
    w.quality = in_tp.quality;
    w.sl      = in_tp.sl;
    w.bx      = BX_W'((longint'(in_tp.t0_ns) + BX_NS / 2) / BX_NS);
    w.t0_ns   = in_tp.t0_ns;
    w.phi     = PHI_W'(rsh_round(phi20, 20 - 17));
    w.phib    = PHIB_W'(rsh_round(psi20 - phi20, 20 - 11));
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_word  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_word <= w;
    end
  end
endmodule
