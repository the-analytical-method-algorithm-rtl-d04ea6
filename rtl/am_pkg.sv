// am_pkg - constants, types and the fit-coefficient function shared by the
// Analytical Method (AM) drift-tube trigger-primitive generator.
//
// Geometry and physics constants follow the CMS DT chamber: 42 x 13 mm drift
// cells, four half-staggered layers per superlayer (SL), a drift velocity of
// 54 um/ns, a maximum drift time of about 390 ns, 235 mm between the centres of
// the two r-phi superlayers, a +-25 ns SL1/SL3 correlation window, the 1..8
// quality code, 64-bit trigger primitives and the phi / phiB scales
// (65536 per 0.5 rad and 4096 per 2 rad).  Everything else here - the internal
// units (1 um for positions, 1 ns for times), the field widths, the stagger
// convention and the bit layout of the 64-bit word - is this design's choice.
//
// Coordinates inside one superlayer: the layer index l = 0..3 grows away from
// the interaction point (L1..L4), the cell (wire) c of layer l sits at
// x = c*42 mm + (l odd ? 21 mm : 0).  In half-cell units the wire position is
// p = 2c + (l & 1), which is what the grouping logic works with.
//
// fit_coef() solves the linear least-squares problem of the AM fit symbolically
// for one layer mask and one laterality pattern.  With y_i = w_i + s_i*v*T_i
// (wire position plus signed drift distance, s_i = +1 for a hit right of the
// wire) the model is y_i = a + m*l_i + s_i*tau, with a the track position at
// layer 0, m the displacement per layer and tau = v*t0.  The normal matrix
// depends only on the mask and the lateralities, so its adjugate gives integer
// per-hit weights; the division by the determinant D is done by multiplying
// with a rounded 2^RECIP_SH / D reciprocal.  These constants are evaluated
// at elaboration, so the fit hardware is only multiply-accumulate logic.
package am_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int unsigned NLAYERS      = 4;      // layers per superlayer
  localparam int unsigned GROUP_CELLS  = 10;     // cells in one grouping region
  localparam int unsigned CELL_W_UM    = 42000;  // cell width
  localparam int unsigned HALF_CELL_UM = 21000;  // half-stagger between layers
  localparam int unsigned CELL_H_UM    = 13000;  // cell height = layer pitch
  localparam int unsigned VDRIFT_UM_NS = 54;     // drift velocity
  localparam int unsigned MAX_DRIFT_NS = 390;    // maximum drift time
  localparam int unsigned SL_DIST_UM   = 235000; // SL1-SL3 centre distance
  localparam int unsigned CORR_WIN_NS  = 25;     // SL1/SL3 time window (+-)
  localparam int unsigned BX_NS        = 25;     // bunch-crossing period

  // ---------------------------------------------------------------- widths
  localparam int unsigned TIME_W  = 17;  // ns since orbit start (orbit = 89100 ns)
  localparam int unsigned CELL_W  = 7;   // wire number inside a layer
  localparam int unsigned POS_W   = 23;  // signed local position in um (+-4.19 m)
  localparam int unsigned TAN_W   = 16;  // signed tan(psi), Q4.12
  localparam int unsigned TAN_FRAC = 12;
  localparam int unsigned CHI2_W  = 40;  // sum of squared residuals in um^2
  localparam int unsigned BX_W    = 12;
  localparam int unsigned PHI_W   = 17;  // signed, 65536 per 0.5 rad
  localparam int unsigned PHIB_W  = 12;  // signed, 4096 per 2 rad
  localparam int unsigned RECIP_SH = 24; // reciprocal scale of the fit constants

  // ---------------------------------------------------------------- quality
  typedef enum logic [3:0] {
    Q_NONE     = 4'd0,
    Q_3H       = 4'd1,  // 3-hit segment, uncorrelated
    Q_3H_CONF  = 4'd2,  // 3+2 hits, confirmed
    Q_4H       = 4'd3,  // 4-hit segment, uncorrelated
    Q_4H_CONF  = 4'd4,  // 4+2 hits, confirmed
    Q_UNUSED5  = 4'd5,  // label not used
    Q_3P3      = 4'd6,  // 3+3 hits, correlated
    Q_4P3      = 4'd7,  // 4+3 hits, correlated
    Q_4P4      = 4'd8   // 4+4 hits, correlated
  } quality_e;

  // ---------------------------------------------------------------- records
  // One digitised hit of a superlayer.
  typedef struct packed {
    logic [1:0]        layer;
    logic [CELL_W-1:0] wire_no;
    logic [TIME_W-1:0] time_ns;
  } hit_t;

  // Input-buffer word: a hit, or an end-of-event marker.
  typedef struct packed {
    logic eoe;
    hit_t hit;
  } hit_word_t;

  // A grouping candidate: one hit (or none) per layer.
  typedef struct packed {
    logic [NLAYERS-1:0]              mask;   // layers that carry a hit
    logic [NLAYERS-1:0][CELL_W-1:0]  wire_no;   // wire numbers
    logic [NLAYERS-1:0][TIME_W-1:0]  time_ns;
  } cand_t;

  // A superlayer segment produced by the fitter (local SL coordinates).
  typedef struct packed {
    quality_e                   quality;   // Q_3H or Q_4H
    logic [TIME_W-1:0]          t0_ns;     // fitted crossing time
    logic signed [POS_W-1:0]    x0_um;     // position at the SL centre plane
    logic signed [TAN_W-1:0]    tanpsi;    // Q4.12
    logic [CHI2_W-1:0]          chi2;      // um^2
    logic [NLAYERS-1:0]         mask;
    logic [NLAYERS-1:0]         lat;       // 1 = right of the wire
  } seg_t;

  // A chamber-level primitive in local chamber coordinates.
  typedef struct packed {
    quality_e                   quality;
    logic [1:0]                 sl;        // 01 = SL1, 10 = SL3, 11 = both
    logic [TIME_W-1:0]          t0_ns;
    logic signed [POS_W-1:0]    x0_um;     // chamber frame, SL1 wire-0 origin
    logic signed [TAN_W-1:0]    tanpsi;
  } ctp_t;

  // The 64-bit trigger primitive word (field layout is this design's own).
  typedef struct packed {
    quality_e                   quality;   // [63:60]
    logic [1:0]                 sl;        // [59:58]
    logic [BX_W-1:0]            bx;        // [57:46]
    logic [TIME_W-1:0]          t0_ns;     // [45:29]
    logic signed [PHI_W-1:0]    phi;       // [28:12]
    logic signed [PHIB_W-1:0]   phib;      // [11:0]
  } tp_word_t;

  // ---------------------------------------------------------------- fit constants
  typedef struct packed {
    logic                          ok;      // D != 0 and at least 3 layers
    logic [NLAYERS-1:0][15:0]      ca;      // weight of y_i for a    (x at layer 0) * D
    logic [NLAYERS-1:0][15:0]      cm;      // weight of y_i for m    (per layer)    * D
    logic [NLAYERS-1:0][15:0]      ct;      // weight of y_i for tau                 * D
    logic [31:0]                   r_pos;   // round(2^24 / D)
    logic [31:0]                   r_tan;   // round(2^24 * 4096 / (13000 * D))
    logic [31:0]                   r_t0;    // round(2^24 / (54 * D))
  } fit_coef_t;

  function automatic longint rdiv(input longint num, input longint den);
    // rounded division of non-negative num by positive den
    return (num + den / 2) / den;
  endfunction

  function automatic fit_coef_t fit_coef(input logic [NLAYERS-1:0] mask,
                                         input logic [NLAYERS-1:0] lat);
    fit_coef_t r;
    longint n, sz, ss, szz, szs;
    longint a00, a01, a02, a11, a12, a22, d, ad, s;
    r = '0;
    n = 0; sz = 0; ss = 0; szz = 0; szs = 0;
    for (int i = 0; i < NLAYERS; i++) begin
      if (mask[i]) begin
        s    = lat[i] ? 1 : -1;
        n   += 1;
        sz  += i;
        ss  += s;
        szz += i * i;
        szs += i * s;
      end
    end
    // adjugate of [[n,sz,ss],[sz,szz,szs],[ss,szs,n]]
    a00 = szz * n - szs * szs;
    a01 = -(sz * n - szs * ss);
    a02 = sz * szs - szz * ss;
    a11 = n * n - ss * ss;
    a12 = -(n * szs - sz * ss);
    a22 = n * szz - sz * sz;
    d   = n * a00 + sz * a01 + ss * a02;
    if (n >= 3 && d != 0) begin
      ad = (d < 0) ? -d : d;
      r.ok = 1'b1;
      for (int i = 0; i < NLAYERS; i++) begin
        s = lat[i] ? 1 : -1;
        if (mask[i]) begin
          // sign of D folded into the weights so that the reciprocal is positive
          r.ca[i] = 16'((d < 0 ? -1 : 1) * (a00 + a01 * i + a02 * s));
          r.cm[i] = 16'((d < 0 ? -1 : 1) * (a01 + a11 * i + a12 * s));
          r.ct[i] = 16'((d < 0 ? -1 : 1) * (a02 + a12 * i + a22 * s));
        end
      end
      r.r_pos = 32'(rdiv(longint'(1) << RECIP_SH, ad));
      r.r_tan = 32'(rdiv((longint'(1) << RECIP_SH) * 4096, 13000 * ad));
      r.r_t0  = 32'(rdiv(longint'(1) << RECIP_SH, 54 * ad));
    end
    return r;
  endfunction

  // Wire position of (layer, cell) in half-cell units.
  function automatic int half_pos(input logic [1:0] layer, input int wire_no);
    return 2 * wire_no + int'(layer[0]);
  endfunction

endpackage
