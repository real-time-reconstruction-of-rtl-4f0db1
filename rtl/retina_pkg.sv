// retina_pkg: constants, types and elaboration-time functions shared by the
// artificial-retina T-track processor.
//
// Coordinates are signed integers in "units"; one axial retina cell is
// PITCH_A units wide in both x0 and x11, so the full axial band of 258
// columns spans 4128 units (about 0.8 mm per unit for a SciFi quadrant).
// The z position of each of the 12 SciFi layers (x-u-v-x in three stations)
// is kept as the fraction t = (z - ZA) / (ZB - ZA) between the two virtual
// planes that define the track parameters, in Q16.  Straight pattern tracks
// then reach layer l at  x = x0 + (x11 - x0) * t_l , and the axial parabola
// is written as x(t) = a0 + a1 t + a2 t^2 .
// The layer order, the 12 layers and the +-5 degree stereo angles follow the
// paper; the z positions (mm) are nominal SciFi values and, like the units,
// the weight shape and all thresholds, are this design's own choice.
package retina_pkg;

  localparam int COORD_W = 16;                 // signed hit coordinate
  localparam int ACC_W   = 10;                 // engine excitation, saturating
  localparam int NLAYER  = 12;                 // SciFi layers, 3 stations x 4
  localparam int NAX     = 6;                  // axial (x) layers
  localparam int NST     = 6;                  // stereo (u/v) layers
  localparam int LAYER_W = 4;
  localparam int A_FRAC  = 4;                  // fraction bits of fit parameters
  localparam int CHI_FRAC = 4;                 // fraction bits of chi2

  typedef logic signed [COORD_W-1:0] coord_t;

  // Layer z positions in mm and the two virtual planes.
  localparam int ZA = 7800;
  localparam int ZB = 9430;
  localparam int Z_MM [NLAYER] = '{7826, 7896, 7966, 8036,
                                    8508, 8578, 8648, 8718,
                                    9193, 9263, 9333, 9403};
  // Global layer numbers of the axial and stereo layers.
  localparam int AX_LAYER [NAX] = '{0, 3, 4, 7, 8, 11};
  localparam int ST_LAYER [NST] = '{1, 2, 5, 6, 9, 10};
  // Stereo sign: u layers (-5 deg) -1, v layers (+5 deg) +1.
  localparam int ST_SIGN  [NST] = '{-1, 1, -1, 1, -1, 1};
  // cos(5 deg) in Q14 and 1/sin(5 deg) in Q8.
  localparam int COS5_Q14   = 16322;
  localparam int INVSIN5_Q8 = 2937;

  // Raw hit from the readout: layer number and fibre-channel coordinate.
  typedef struct packed {
    logic [LAYER_W-1:0] layer;
    logic [13:0]        channel;
  } raw_hit_t;

  // Reconstructed T-track candidate.
  typedef struct packed {
    logic [8:0]          ax_col;     // x0 cell index of the axial maximum
    logic signed [9:0]   ax_row;     // x11 cell index
    logic signed [23:0]  a0;         // parabola, Q(A_FRAC) units
    logic signed [23:0]  a1;
    logic signed [23:0]  a2;
    logic [15:0]         chi2_ax;    // Q(CHI_FRAC) units^2
    logic                st_found;   // a stereo projection was found
    logic signed [23:0]  y0;         // line y(t) = y0 + (y11 - y0) t, Q(A_FRAC)
    logic signed [23:0]  y11;
    logic [15:0]         chi2_st;
  } track_t;

  // t of a global layer in Q16.
  function automatic int t_q16(input int layer);
    return ((Z_MM[layer] - ZA) * 65536 + (ZB - ZA) / 2) / (ZB - ZA);
  endfunction

  // Receptor of cell (col,row) on a layer with fraction tq (Q16): the cell
  // centre (x0c,x11c) propagated as a straight line.
  function automatic int receptor(input int col, input int row, input int pitch, input int tq);
    int x0c, x11c;
    x0c  = col * pitch + pitch / 2;
    x11c = row * pitch + pitch / 2;
    return x0c + (((x11c - x0c) * tq + 32768) >>> 16);
  endfunction

  // Gaussian weight of a hit at distance d from a receptor:
  // round(WMAX * exp(-d^2 / (2 sigma^2))).
  function automatic int gauss_w(input int d, input int sigma, input int wmax);
    real e;
    e = $exp(-(d * d * 1.0) / (2.0 * sigma * sigma));
    return $rtoi(wmax * e + 0.5);
  endfunction

endpackage
