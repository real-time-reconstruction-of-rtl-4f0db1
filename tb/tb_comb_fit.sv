// tb_comb_fit: random parabola tracks with noise and an occasional missing
// layer or second hit.  For every combination the tb solves the least-
// squares problem itself (normal equations with real numbers, Cramer's rule)
// and checks the minimum chi2, the parameters of the best combination, the
// number of combinations and the latency (1 + combinations cycles).  Runs the
// parabola (NPAR = 3) version.
module tb_comb_fit;
  import retina_pkg::*;
  localparam int NL = 6;
  localparam int TQ [NL] = '{t_q16(0), t_q16(3), t_q16(4), t_q16(7), t_q16(8), t_q16(11)};
  logic clk = 0, rst_n = 0, start = 0, done, ok;
  coord_t rec [NL];
  logic signed [15:0] ref0, ref1;
  logic [1:0] cnt [NL];
  coord_t hit [NL][2];
  logic [15:0] chi2;
  logic signed [23:0] par [3];
  logic [7:0] ncomb;
  int checks = 0, failures = 0;

  comb_fit #(.NL(NL), .NPAR(3), .TQ(TQ)) dut (.*);
  always #5 clk = ~clk;

  // Least-squares parabola through the present points; returns chi2 and b.
  function automatic real lsq(input real d [NL], input bit pres [NL], output real b [3]);
    real s [5], r [3], m [3][3], det, chi;
    for (int k = 0; k < 5; k++) s[k] = 0.0;
    for (int k = 0; k < 3; k++) r[k] = 0.0;
    for (int l = 0; l < NL; l++) if (pres[l]) begin
      real t;
      t = TQ[l] / 65536.0;
      for (int k = 0; k < 5; k++) s[k] += t ** k;
      for (int k = 0; k < 3; k++) r[k] += d[l] * t ** k;
    end
    for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) m[i][j] = s[i + j];
    det = m[0][0] * (m[1][1] * m[2][2] - m[1][2] * m[2][1])
        - m[0][1] * (m[1][0] * m[2][2] - m[1][2] * m[2][0])
        + m[0][2] * (m[1][0] * m[2][1] - m[1][1] * m[2][0]);
    for (int c = 0; c < 3; c++) begin
      real mm [3][3];
      mm = m;
      for (int i = 0; i < 3; i++) mm[i][c] = r[i];
      b[c] = (mm[0][0] * (mm[1][1] * mm[2][2] - mm[1][2] * mm[2][1])
            - mm[0][1] * (mm[1][0] * mm[2][2] - mm[1][2] * mm[2][0])
            + mm[0][2] * (mm[1][0] * mm[2][1] - mm[1][1] * mm[2][0])) / det;
    end
    chi = 0.0;
    for (int l = 0; l < NL; l++) if (pres[l]) begin
      real t, e;
      t = TQ[l] / 65536.0;
      e = d[l] - (b[0] + b[1] * t + b[2] * t * t);
      chi += e * e;
    end
    return chi;
  endfunction

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nmissed = 0, nrej = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int ev = 0; ev < 300; ev++) begin
      real c0, c1, c2, best, second, bb [3];
      int ncomb_exp, nmiss, cyc, r0, r1, r2;
      bit pres [NL];
      ref0 = 16'(1000 + int'($urandom % 2000));
      ref1 = 16'(int'($urandom % 1200) - 400);
      r0 = $urandom % 9;
      r1 = $urandom % 9;
      r2 = $urandom % 17;
      c0 = int'(ref0) + r0 - 4;
      c1 = int'(ref1) + r1 - 4;
      c2 = r2 - 8;
      nmiss = 0;
      for (int l = 0; l < NL; l++) begin
        real t;
        t = TQ[l] / 65536.0;
        rec[l] = coord_t'($rtoi($floor(ref0 + ref1 * t + 0.5)));
        cnt[l] = 2'(1 + ($urandom % 2));
        if ($urandom % 12 == 0) cnt[l] = 0;
        if (ev % 50 == 7 && l < 2) cnt[l] = 0;      // two empty layers
        for (int h = 0; h < 2; h++)
          hit[l][h] = coord_t'($rtoi($floor(c0 + c1 * t + c2 * t * t + 0.5)) + int'($urandom % 13) - 6);
        if (cnt[l] == 0) nmiss++;
        pres[l] = cnt[l] != 0;
      end
      // reference over all combinations
      ncomb_exp = 1;
      for (int l = 0; l < NL; l++) ncomb_exp *= (cnt[l] == 2) ? 2 : 1;
      best = 1.0e30; second = 1.0e30;
      for (int c = 0; c < ncomb_exp; c++) begin
        real d [NL], b [3], chi;
        int k;
        k = c;
        for (int l = 0; l < NL; l++) begin
          int s;
          s = 0;
          if (cnt[l] == 2) begin s = k % 2; k = k / 2; end
          d[l] = pres[l] ? (int'(hit[l][s]) - int'(rec[l])) : 0.0;
        end
        chi = lsq(d, pres, b);
        if (chi < best) begin second = best; best = chi; bb = b; end
        else if (chi < second) second = chi;
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done && cyc < 200) begin @(negedge clk); cyc++; end
      if (nmiss > 1) begin
        nrej++;
        checks++;
        if (ok || cyc != 1) failures++;
        continue;
      end
      if (nmiss == 1) nmissed++;
      checks += 3;
      if (!ok) failures++;
      if (int'(ncomb) != ncomb_exp) failures++;
      if (cyc != 1 + ncomb_exp) begin failures++; $display("latency %0d for %0d", cyc, ncomb_exp); end
      // chi2 in Q4 units^2 within 1 unit^2 + 2 %
      checks++;
      if (fabs(chi2 / 16.0 - (best > 4095.0 ? 4095.9 : best)) > 1.0 + 0.02 * best) begin
        failures++;
        $display("chi2 %f exp %f", chi2 / 16.0, best);
      end
      // parameters of the best combination, when it is clearly the best
      if (second - best > 2.0) begin
        real e [3];
        e[0] = ref0 + bb[0];
        e[1] = ref1 + bb[1];
        e[2] = bb[2];
        for (int p = 0; p < 3; p++) begin
          checks++;
          if (fabs(par[p] / 16.0 - e[p]) > 0.25 + 0.002 * fabs(e[p])) begin
            failures++;
            $display("par%0d %f exp %f", p, par[p] / 16.0, e[p]);
          end
        end
      end
    end
    checks++;
    if (nmissed == 0 || nrej == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
