// tb_stereo_unit: for random axial parabolas and random y-z lines the tb
// builds the u/v hits with the stereo geometry (real arithmetic), adds noise
// hits and a second, weaker line, loads them and starts the unit.  It checks
// that the returned y0/y11 match the true line within the resolution the
// 5-degree stereo angle allows, that the axial fields pass through, and that
// a candidate with no u/v hits comes back with st_found = 0.
module tb_stereo_unit;
  import retina_pkg::*;
  localparam int AW = 8;
  logic clk = 0, rst_n = 0, wr_en = 0, start = 0, busy, res_valid, res_ack = 0;
  logic [AW-1:0] wr_addr = 0;
  logic [2:0] wr_layer = 0;
  coord_t wr_coord = 0;
  logic [AW:0] nhits = 0;
  track_t cand, res;
  int checks = 0, failures = 0, nfound = 0, nmulti = 0;

  stereo_unit #(.AW(AW)) dut (.*);
  always #5 clk = ~clk;

  // maxima the unit examined in the current candidate
  int pops = 0;
  always @(posedge clk) if (dut.pop) pops++;

  function automatic int rnd(input int n);
    int v;
    v = $urandom % n;
    return v;
  endfunction

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real sn, cs;
    sn = $sin(5.0 * 3.14159265358979 / 180.0);
    cs = $cos(5.0 * 3.14159265358979 / 180.0);
    cand = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int ev = 0; ev < 25; ev++) begin
      real a0, a1, a2, y0, y11, z0, z11;
      int n, cyc;
      a0 = 300.0 + rnd(3000); a1 = rnd(800) - 400.0; a2 = rnd(40) - 20.0;
      y0 = 200.0 + rnd(2600); y11 = y0 + rnd(400) - 100.0;
      z0 = 200.0 + rnd(2600); z11 = z0 + rnd(400) - 100.0;
      n = 0;
      if (ev % 8 != 5) begin
        for (int l = 0; l < NST; l++) begin
          real t, x, y, u;
          t = t_q16(ST_LAYER[l]) / 65536.0;
          x = a0 + a1 * t + a2 * t * t;
          // the true line, and (odd events) a second line with hits on 4 layers
          for (int w = 0; w < 2; w++) begin
            if (w == 1 && (ev % 2 == 0 || l >= 4)) continue;
            y = (w == 0) ? y0 + (y11 - y0) * t : z0 + (z11 - z0) * t;
            u = x * cs + ST_SIGN[l] * y * sn;
            @(negedge clk);
            wr_en = 1; wr_addr = AW'(n); wr_layer = 3'(l); wr_coord = coord_t'($rtoi($floor(u + 0.5)));
            n++;
          end
          // noise
          for (int r = 0; r < 3; r++) begin
            @(negedge clk);
            wr_en = 1; wr_addr = AW'(n); wr_layer = 3'(l);
            wr_coord = coord_t'($rtoi(x * cs) + rnd(800) - 400);
            n++;
          end
        end
      end
      @(negedge clk);
      wr_en = 0;
      nhits = (AW+1)'(n);
      cand = '0;
      cand.ax_col = 9'(ev);
      cand.a0 = 24'($rtoi(a0 * 16.0));
      cand.a1 = 24'($rtoi(a1 * 16.0));
      cand.a2 = 24'($rtoi(a2 * 16.0));
      cand.chi2_ax = 16'(ev * 3);
      pops = 0;
      start = 1;
      @(negedge clk); start = 0;
      checks++;
      if (!busy) failures++;
      cyc = 0;
      while (!res_valid && cyc < 20000) begin @(negedge clk); cyc++; end
      checks += 3;
      if (!res_valid) failures++;
      if (res.ax_col != 9'(ev) || res.a1 != cand.a1 || res.chi2_ax != cand.chi2_ax) failures++;
      if (ev % 8 == 5) begin
        if (res.st_found) failures++;
      end else begin
        real e0, e11;
        e0  = res.y0 / 16.0 - y0;
        e11 = res.y11 / 16.0 - y11;
        if (!res.st_found || e0 > 12.0 || e0 < -12.0 || e11 > 12.0 || e11 < -12.0) begin
          failures++;
          $display("ev %0d found %b y0 %f/%f y11 %f/%f", ev, res.st_found, res.y0 / 16.0, y0, res.y11 / 16.0, y11);
        end
        if (res.st_found) nfound++;
        if (pops > 1) nmulti++;
      end
      res_ack = 1;
      @(negedge clk); res_ack = 0;
      @(negedge clk);
      checks++;
      if (busy || res_valid) failures++;
    end
    checks++;
    if (nfound < 10 || nmulti == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
