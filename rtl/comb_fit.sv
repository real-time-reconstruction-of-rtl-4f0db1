// comb_fit: linearized least-squares fit over the combinations of the hits
// selected for one retina maximum.
//
// The track is x(t) = a0 + a1 t (+ a2 t^2 when NPAR = 3), t being the layer
// position between the two virtual planes (TQ, Q16).  The fit is linearized
// around the cell's pattern track: with delta_l = hit_l - rec_l the best
// parameters are b = P*delta and the residuals r = R*delta, where P =
// (A'A)^-1 A' and R = I - A P are constant matrices of the layer geometry
// (rows of A: 1, t_l, t_l^2).  They are computed at elaboration in Q14, one
// set for all layers present and one for each single missing layer; so each
// combination costs one pass of constant multiplications (DSP friendly).
// chi2 = sum r_l^2 is in units^2 with CHI_FRAC fraction bits, saturated to
// 16 bits.  An event with more than one layer without a hit is not fitted
// (ok = 0).
//
// Combinations: every layer with two hits contributes a choice of its
// nearest or second hit, so an odometer walks exactly prod(max(cnt_l,1))
// combinations, one per cycle, keeping the one with the smallest chi2 (first
// one on ties).  Latency: 1 + combinations cycles from `start` to `done`
// (1 cycle when not fitted).  Outputs hold until the next `start`.
// par0 = ref0 + b0, par1 = ref1 + b1, par2 = b2, all with A_FRAC fraction
// bits, where ref0 and ref1 describe the cell line rec(t) = ref0 + ref1 t.
// From the paper: a linearized fit (parabola for the axial view, straight
// line for the stereo view) over the combinations of the two closest hits
// per layer, keeping the best chi2.  The fixed-point formats, the treatment
// of a missing layer and the one-combination-per-cycle schedule are this
// design's own.
module comb_fit
  import retina_pkg::*;
#(
  parameter int NL   = 6,
  parameter int NPAR = 3,
  parameter int TQ [NL] = '{t_q16(0), t_q16(3), t_q16(4), t_q16(7), t_q16(8), t_q16(11)},
  parameter int NM   = NL + 1          // coefficient sets: all present, one missing
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  coord_t             rec  [NL],
  input  logic signed [15:0] ref0,
  input  logic signed [15:0] ref1,
  input  logic [1:0]         cnt  [NL],
  input  coord_t             hit  [NL][2],
  output logic               done,
  output logic               ok,
  output logic [15:0]        chi2,
  output logic signed [23:0] par  [3],
  output logic [7:0]         ncomb
);

  localparam int Q = 14;

  // Coefficient of P (which = 1, row = parameter) or R (which = 0) for the
  // layer set that lacks layer `miss` (-1: none missing).
  function automatic int coef(input int which, input int miss, input int r, input int c);
    real a [NL][3];
    real n [3][6];
    real p [3][NL];
    real h, f, v;
    for (int li = 0; li < NL; li++) begin
      real t;
      t = TQ[li] / 65536.0;
      a[li][0] = (li == miss) ? 0.0 : 1.0;
      a[li][1] = (li == miss) ? 0.0 : t;
      a[li][2] = (li == miss) ? 0.0 : t * t;
    end
    // N = A'A augmented with the identity, then Gauss-Jordan inversion.
    for (int i = 0; i < NPAR; i++)
      for (int j = 0; j < 2 * NPAR; j++) begin
        n[i][j] = 0.0;
        if (j < NPAR) for (int li = 0; li < NL; li++) n[i][j] += a[li][i] * a[li][j];
        else n[i][j] = (j - NPAR == i) ? 1.0 : 0.0;
      end
    for (int i = 0; i < NPAR; i++) begin
      h = n[i][i];
      for (int j = 0; j < 2 * NPAR; j++) n[i][j] = n[i][j] / h;
      for (int k = 0; k < NPAR; k++)
        if (k != i) begin
          f = n[k][i];
          for (int j = 0; j < 2 * NPAR; j++) n[k][j] -= f * n[i][j];
        end
    end
    for (int i = 0; i < NPAR; i++)
      for (int li = 0; li < NL; li++) begin
        p[i][li] = 0.0;
        for (int j = 0; j < NPAR; j++) p[i][li] += n[i][NPAR + j] * a[li][j];
      end
    if (which == 1) begin
      v = (r < NPAR) ? p[r][c] : 0.0;
    end else begin
      v = (r == c && r != miss) ? 1.0 : 0.0;
      for (int j = 0; j < NPAR; j++) v -= a[r][j] * p[j][c];
    end
    v = v * (1 << Q);
    return (v < 0.0) ? -$rtoi(-v + 0.5) : $rtoi(v + 0.5);
  endfunction

  logic signed [31:0] rm [NM][NL][NL];
  logic signed [31:0] pm [NM][3][NL];
  for (genvar m = 0; m < NM; m++) begin : g_m
    for (genvar i = 0; i < NL; i++) begin : g_i
      for (genvar j = 0; j < NL; j++) begin : g_j
        assign rm[m][i][j] = 32'(coef(0, m - 1, i, j));
      end
      for (genvar p = 0; p < 3; p++) begin : g_p
        assign pm[m][p][i] = 32'(coef(1, m - 1, p, i));
      end
    end
  end

  // Latched inputs and odometer state.
  logic                busy;
  coord_t              rec_q [NL];
  logic [1:0]          cnt_q [NL];
  coord_t              hit_q [NL][2];
  logic signed [15:0]  ref0_q, ref1_q;
  logic [NL-1:0]       sel;
  logic [$clog2(NM)-1:0] msel;

  // Missing layers of the incoming request.
  int nmiss_in, miss_in;
  always_comb begin
    nmiss_in = 0;
    miss_in  = 0;
    for (int l = 0; l < NL; l++)
      if (cnt[l] == 2'd0) begin
        nmiss_in++;
        miss_in = l + 1;
      end
  end

  // One combination: residuals, chi2 and parameters.
  logic signed [COORD_W:0] dl [NL];
  logic [47:0]             chi_acc;
  logic [15:0]             chi_now;
  logic signed [47:0]      b_now [3];
  logic [NL-1:0]           sel_next;
  logic                    last;
  always_comb begin
    for (int l = 0; l < NL; l++)
      dl[l] = (cnt_q[l] == 2'd0) ? '0
            : ({hit_q[l][sel[l]][COORD_W-1], hit_q[l][sel[l]]} - {rec_q[l][COORD_W-1], rec_q[l]});
    chi_acc = '0;
    for (int i = 0; i < NL; i++) begin
      logic signed [47:0] r;
      r = '0;
      for (int j = 0; j < NL; j++) r += 48'(rm[msel][i][j]) * 48'(dl[j]);
      chi_acc += 48'(r * r) >> (2 * Q - CHI_FRAC);
    end
    chi_now = (chi_acc > 48'hFFFF) ? 16'hFFFF : chi_acc[15:0];
    for (int p = 0; p < 3; p++) begin
      b_now[p] = '0;
      for (int j = 0; j < NL; j++) b_now[p] += 48'(pm[msel][p][j]) * 48'(dl[j]);
      b_now[p] = b_now[p] >>> (Q - A_FRAC);
    end
    // odometer: flip the lowest layer that still has a second hit to try
    sel_next = sel;
    last     = 1'b1;
    for (int l = 0; l < NL; l++) begin
      if (last) begin
        if (!sel[l] && cnt_q[l] == 2'd2) begin
          sel_next[l] = 1'b1;
          last        = 1'b0;
        end else begin
          sel_next[l] = 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      ok     <= 1'b0;
      chi2   <= '0;
      ncomb  <= '0;
      sel    <= '0;
      msel   <= '0;
      ref0_q <= '0;
      ref1_q <= '0;
      for (int p = 0; p < 3; p++) par[p] <= '0;
      for (int l = 0; l < NL; l++) begin
        rec_q[l] <= '0;
        cnt_q[l] <= '0;
        hit_q[l][0] <= '0;
        hit_q[l][1] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (start) begin
        rec_q  <= rec;
        cnt_q  <= cnt;
        hit_q  <= hit;
        ref0_q <= ref0;
        ref1_q <= ref1;
        sel    <= '0;
        msel   <= ($clog2(NM))'(miss_in);
        ncomb  <= '0;
        chi2   <= 16'hFFFF;
        ok     <= 1'b0;
        if (nmiss_in > 1) done <= 1'b1;
        else              busy <= 1'b1;
      end else if (busy) begin
        ncomb <= ncomb + 8'd1;
        if (!ok || chi_now < chi2) begin
          ok     <= 1'b1;
          chi2   <= chi_now;
          par[0] <= 24'(b_now[0]) + 24'(signed'({ref0_q, {A_FRAC{1'b0}}}));
          par[1] <= 24'(b_now[1]) + 24'(signed'({ref1_q, {A_FRAC{1'b0}}}));
          par[2] <= 24'(b_now[2]);
        end
        sel <= sel_next;
        if (last) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
