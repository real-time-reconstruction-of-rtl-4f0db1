// Shared event generator and checker for the retina_tracker testbenches.
// Included inside a testbench module that declares clk, the dut port
// signals, checks/failures and instantiates the tracker as `dut`.

  // mechanism counters
  int n_dup = 0, n_rej = 0, n_miss = 0, n_stall = 0, n_bp = 0, n_nost = 0, n_trk = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_sw.ax_dup) n_dup++;
    if (dut.fit_done && !(dut.fit_ok && int'(dut.fit_chi2) <= dut.CHI2_A_MAX)) n_rej++;
    if (dut.fit_start) begin
      int m;
      m = 0;
      for (int l = 0; l < NAX; l++) if (dut.cnt[l] == 0) m++;
      if (m == 1) n_miss++;
    end
    if (dut.state.name() == "S_DISP" && !dut.free_any) n_stall++;
    if (in_valid && !in_ready) n_bp++;
  end

  // output collection
  localparam int MAXEV = 64;
  track_t got [MAXEV][$];
  int ev_out = 0;
  always @(posedge clk) if (rst_n) begin
    if (trk_valid && ev_out < MAXEV) got[ev_out].push_back(trk);
    if (evt_done) ev_out++;
  end

  // truth of every event
  real tx0 [MAXEV][8], tx11 [MAXEV][8], ta2 [MAXEV][8], ty0 [MAXEV][8], ty11 [MAXEV][8];
  int  kind [MAXEV][8];   // 0 good, 1 zig-zag, 2 missing layer, 3 no stereo
  int  ntk [MAXEV];

  function automatic int rnd(input int n);
    int v;
    v = $urandom % n;
    return v;
  endfunction

  // raw channel of a coordinate: inverse of the switch transform
  function automatic int chan_of(input int layer, input real x);
    int off;
    off = dut.u_sw.OFFSET[layer];
    return $rtoi($floor((x - off) * 65536.0 / 21140.0 + 0.5));
  endfunction

  task automatic send(input int layer, input real x);
    in_valid = 1;
    in_eoe = 0;
    in_hit.layer = 4'(layer);
    in_hit.channel = 14'(chan_of(layer, x));
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1;
  endtask

  // Drive one event; does not wait for its tracks (the next event may be
  // sent at once and is then held off by in_ready).
  task automatic send_event(input int ev, input int ncol, input int nband, input int boff);
    real sn, cs;
    sn = $sin(5.0 * 3.14159265358979 / 180.0);
    cs = $cos(5.0 * 3.14159265358979 / 180.0);
    ntk[ev] = 4 + ev % 3;
    for (int t = 0; t < ntk[ev]; t++) begin
      int c, k;
      c = 2 + t * (ncol - 4) / ntk[ev] + rnd(3);
      k = 4 + rnd(nband - 8);
      if (c - boff + k < 2) k = boff - c + 2;     // keep x11 positive
      tx0[ev][t]  = c * PITCH + 4 + rnd(8);
      tx11[ev][t] = (c - boff + k) * PITCH + 4 + rnd(8);
      ta2[ev][t]  = rnd(9) - 4.0;
      ty0[ev][t]  = 300.0 + rnd(2400);
      ty11[ev][t] = ty0[ev][t] + rnd(300) - 100.0;
      kind[ev][t] = 0;
      if (t == 1 && ev % 2 == 1) kind[ev][t] = 1;
      if (t == 2 && ev % 3 == 0) kind[ev][t] = 2;
      if (t == 0 && ev % 4 == 2) kind[ev][t] = 3;
    end
    for (int t = 0; t < ntk[ev]; t++) begin
      for (int l = 0; l < NAX; l++) begin
        real tt, x;
        tt = t_q16(AX_LAYER[l]) / 65536.0;
        x = tx0[ev][t] + (tx11[ev][t] - tx0[ev][t]) * tt + ta2[ev][t] * tt * (tt - 1.0);
        if (kind[ev][t] == 1) x += (l % 2 == 0) ? 8.0 : -8.0;
        if (kind[ev][t] == 2 && l == 3) continue;
        send(AX_LAYER[l], x + (rnd(3) - 1) * 0.4);
      end
      if (kind[ev][t] != 3)
        for (int l = 0; l < NST; l++) begin
          real tt, x, y;
          tt = t_q16(ST_LAYER[l]) / 65536.0;
          x = tx0[ev][t] + (tx11[ev][t] - tx0[ev][t]) * tt + ta2[ev][t] * tt * (tt - 1.0);
          y = ty0[ev][t] + (ty11[ev][t] - ty0[ev][t]) * tt;
          send(ST_LAYER[l], x * cs + ST_SIGN[l] * y * sn);
        end
    end
    // noise hits, spread over the retina's acceptance
    // (axial noise is kept 30 units away from the tracks, so that the
    // expected result of every fit is known)
    for (int n = 0; n < 20; n++) begin
      int l;
      real xn;
      bit near;
      l = rnd(NLAYER);
      do begin
        xn = 1.0 * rnd(ncol * PITCH);
        near = 0;
        for (int t = 0; t < ntk[ev]; t++) begin
          real tt, x;
          tt = t_q16(l) / 65536.0;
          x = tx0[ev][t] + (tx11[ev][t] - tx0[ev][t]) * tt;
          if (xn - x < 30.0 && x - xn < 30.0) near = 1;
        end
      end while (near && (l % 4 == 0 || l % 4 == 3));
      send(l, xn);
    end
    // extra u/v noise: keeps the stereo units busy longer
    for (int n = 0; n < 30; n++) send(ST_LAYER[rnd(NST)], 1.0 * rnd(ncol * PITCH));
    in_valid = 1;
    in_eoe = 1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1;
    in_valid = 0;
    in_eoe = 0;
  endtask

  // Compare the tracks of event ev with its truth.
  task automatic check_event(input int ev);
    for (int t = 0; t < ntk[ev]; t++) begin
      int nmatch;
      nmatch = 0;
      foreach (got[ev][i]) begin
        real x0, x11;
        track_t g;
        g = got[ev][i];
        x0  = g.a0 / 16.0;
        x11 = (g.a0 + g.a1 + g.a2) / 16.0;
        if (x0 - tx0[ev][t] < 6.0 && tx0[ev][t] - x0 < 6.0 && x11 - tx11[ev][t] < 6.0 && tx11[ev][t] - x11 < 6.0) begin
          nmatch++;
          if (kind[ev][t] == 0 || kind[ev][t] == 2) begin
            real e0, e11;
            e0  = g.y0 / 16.0 - ty0[ev][t];
            e11 = g.y11 / 16.0 - ty11[ev][t];
            checks++;
            if (!g.st_found || e0 > 32.0 || e0 < -32.0 || e11 > 32.0 || e11 < -32.0) begin
              failures++;
              $display("ev %0d trk %0d stereo %b y0 %f/%f y11 %f/%f", ev, t, g.st_found,
                       g.y0 / 16.0, ty0[ev][t], g.y11 / 16.0, ty11[ev][t]);
            end
          end
          if (kind[ev][t] == 3) begin
            checks++;
            if (g.st_found) failures++;
            else n_nost++;
          end
        end
      end
      checks++;
      if (kind[ev][t] == 1 ? (nmatch != 0) : (nmatch != 1)) begin
        failures++;
        $display("ev %0d trk %0d kind %0d matched %0d times (x0 %f x11 %f)", ev, t, kind[ev][t],
                 nmatch, tx0[ev][t], tx11[ev][t]);
      end
    end
    n_trk += got[ev].size();
  endtask

  // Send nev events back to back, wait for all of them, check them.
  task automatic run_events(input int nev, input int ncol, input int nband, input int boff);
    int cyc;
    @(posedge clk); #1;
    for (int ev = 0; ev < nev; ev++) send_event(ev, ncol, nband, boff);
    cyc = 0;
    while (ev_out < nev && cyc < 5000000) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (ev_out != nev) failures++;
    for (int ev = 0; ev < nev; ev++) check_event(ev);
  endtask

  task automatic report_mechanisms();
    $display("tracks out %0d, duplications %0d, chi2 rejections %0d, missing-layer fits %0d, stalls %0d, back-pressure %0d, no-stereo %0d",
             n_trk, n_dup, n_rej, n_miss, n_stall, n_bp, n_nost);
    checks += 7;
    if (n_trk == 0)   failures++;
    if (n_dup == 0)   failures++;
    if (n_rej == 0)   failures++;
    if (n_miss == 0)  failures++;
    if (n_stall == 0) failures++;
    if (n_bp == 0)    failures++;
    if (n_nost == 0)  failures++;
  endtask

