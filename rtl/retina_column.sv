// retina_column: the processing engines of one column of the retina, i.e.
// all NBAND pattern cells that share one x0 (or y0) value.
//
// Cell k of column `col` is the pattern track through the cell centre
// (x0c, x11c) = ((col+1/2) PITCH, (row+1/2) PITCH), row = col - BOFF + k.  Its
// receptor on a layer with position fraction t (TQ, Q16) is
// x0c + (x11c - x0c) t.  For each hit on the shared hit bus every engine
// takes the distance to its receptor on the hit's layer and, below CUT, adds
// the gaussian weight round(WMAX exp(-d^2/(2 SIGMA^2))), read from a table
// built at elaboration, to its saturating excitation acc[k].  `clear`
// zeroes the column before an event (and has priority over a hit).
//
// Cluster finding: on `find` every engine latches flag[k] when its
// excitation exceeds THRESH and it is a local maximum among its 8 neighbours
// of the (x0,x11) grid.  The neighbours in the columns to the left and right
// come in on acc_l / acc_r; in band indices they are k..k+2 of the left
// column and k-2..k of the right one.  A cell must be strictly above the
// neighbours before it (left column, or the cell below in its own column)
// and not below those after it, so a flat pair yields one maximum.
// `pop` with `pop_k` clears one flag (readout).
//
// Timing: a hit presented in cycle n is in acc after that cycle's clock edge;
// flags are formed in the single `find` cycle.  `col` is meant to be tied
// to a constant, so synthesis folds the receptor arithmetic away.
// From the paper: the engines, their gaussian weight within a fixed
// distance, the accumulation per event and the local cluster finding with a
// threshold.  Grouping the engines by column, the neighbourhood and tie
// rule, the saturating width and all numerical values are this design's own.
module retina_column
  import retina_pkg::*;
#(
  parameter int NBAND  = 100,
  parameter int BOFF   = 25,
  parameter int PITCH  = 16,
  parameter int NL     = 6,
  parameter int TQ [NL] = '{t_q16(0), t_q16(3), t_q16(4), t_q16(7), t_q16(8), t_q16(11)},
  parameter int CUT    = 24,
  parameter int SIGMA  = 8,
  parameter int WMAX   = 15,
  parameter int THRESH = 45,
  parameter int LW     = (NL > 1) ? $clog2(NL) : 1,
  parameter int KW     = $clog2(NBAND)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic [9:0]        col,
  input  logic              hit_valid,
  input  logic [LW-1:0]     hit_layer,
  input  coord_t            hit_coord,
  input  logic [ACC_W-1:0]  acc_l [NBAND],
  input  logic [ACC_W-1:0]  acc_r [NBAND],
  output logic [ACC_W-1:0]  acc   [NBAND],
  input  logic              find,
  input  logic              pop,
  input  logic [KW-1:0]     pop_k,
  output logic [NBAND-1:0]  flag
);

  localparam int WW      = $clog2(WMAX + 1);
  localparam int ACC_MAX = (1 << ACC_W) - 1;

  function automatic logic [CUT*WW-1:0] mk_lut();
    logic [CUT*WW-1:0] v;
    for (int d = 0; d < CUT; d++) v[d*WW +: WW] = WW'(gauss_w(d, SIGMA, WMAX));
    return v;
  endfunction
  localparam logic [CUT*WW-1:0] LUT = mk_lut();

  // receptor on the current hit's layer for every cell
  logic [ACC_W-1:0] nxt [NBAND];
  always_comb begin
    int tq, x0c, x11c, rec, d;
    int s;
    tq  = TQ[(int'(hit_layer) < NL) ? int'(hit_layer) : 0];
    x0c = int'(col) * PITCH + PITCH / 2;
    for (int k = 0; k < NBAND; k++) begin
      x11c = (int'(col) - BOFF + k) * PITCH + PITCH / 2;
      rec  = x0c + (((x11c - x0c) * tq + 32768) >>> 16);
      d    = int'(hit_coord) - rec;
      if (d < 0) d = -d;
      s    = int'(acc[k]);
      if (hit_valid && d < CUT) s += int'(LUT[d*WW +: WW]);
      nxt[k] = (s > ACC_MAX) ? ACC_W'(ACC_MAX) : ACC_W'(s);
    end
  end

  // local maxima
  logic [NBAND-1:0] is_max;
  always_comb begin
    for (int k = 0; k < NBAND; k++) begin
      logic m;
      m = int'(acc[k]) > THRESH;
      // left column: band k, k+1, k+2 (before)
      for (int j = k; j <= k + 2; j++)
        if (j < NBAND && acc[k] <= acc_l[j]) m = 1'b0;
      // same column
      if (k > 0 && acc[k] <= acc[k-1]) m = 1'b0;
      if (k < NBAND - 1 && acc[k] < acc[k+1]) m = 1'b0;
      // right column: band k-2, k-1, k (after)
      for (int j = k - 2; j <= k; j++)
        if (j >= 0 && acc[k] < acc_r[j]) m = 1'b0;
      is_max[k] = m;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NBAND; k++) acc[k] <= '0;
      flag <= '0;
    end else if (clear) begin
      for (int k = 0; k < NBAND; k++) acc[k] <= '0;
      flag <= '0;
    end else begin
      acc <= nxt;
      if (find)     flag <= is_max;
      else if (pop) flag[pop_k] <= 1'b0;
    end
  end

endmodule
