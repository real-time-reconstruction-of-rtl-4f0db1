// tb_retina_array: a 30-column x 12-cell retina.  Tracks are injected as hits
// on the receptors of chosen cells (plus noise).  The tb keeps its own copy
// of every excitation on the full grid, finds the local maxima by the rule of
// the design, and checks that the readout returns exactly those cells, in
// (column, row) order, one per cycle, with their excitations.  Sector gating
// is checked by sending hits with their sector bit cleared.
module tb_retina_array;
  import retina_pkg::*;
  localparam int NCOL = 30, NBAND = 12, BOFF = 4, PITCH = 16, NL = 6, CUT = 24, SIGMA = 8;
  localparam int WMAX = 15, THRESH = 45, NSEC = 3;
  localparam int TQ [NL] = '{t_q16(0), t_q16(3), t_q16(4), t_q16(7), t_q16(8), t_q16(11)};
  localparam int CW = $clog2(NCOL), RW = $clog2(NCOL + NBAND) + 1;
  logic clk = 0, rst_n = 0, clear = 0, hit_valid = 0, find = 0, pop = 0;
  logic [2:0] hit_layer = 0;
  coord_t hit_coord = 0;
  logic [NSEC-1:0] hit_sec = '1;
  logic max_valid;
  logic [CW-1:0] max_col;
  logic signed [RW-1:0] max_row;
  logic [ACC_W-1:0] max_acc;
  int checks = 0, failures = 0, nmax = 0;
  int model [NCOL][NBAND];

  retina_array #(.NCOL(NCOL), .NBAND(NBAND), .BOFF(BOFF), .PITCH(PITCH), .NL(NL), .TQ(TQ),
                 .CUT(CUT), .SIGMA(SIGMA), .WMAX(WMAX), .THRESH(THRESH), .NSEC(NSEC)) dut (.*);
  always #5 clk = ~clk;

  function automatic int rec_of(int c, int k, int l);
    real x0c, x11c;
    x0c  = c * PITCH + PITCH / 2;
    x11c = (c - BOFF + k) * PITCH + PITCH / 2;
    return $rtoi(x0c) + $rtoi($floor((x11c - x0c) * TQ[l] / 65536.0 + 0.5));
  endfunction

  function automatic int w_of(int d);
    return $rtoi($floor(WMAX * $exp(-(d * d) / (2.0 * SIGMA * SIGMA)) + 0.5));
  endfunction

  function automatic int at(int c, int row);   // excitation at grid point, 0 outside
    int k;
    k = row - c + BOFF;
    if (c < 0 || c >= NCOL || k < 0 || k >= NBAND) return -1;
    return model[c][k];
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int ev = 0; ev < 12; ev++) begin
      int ntrk;
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int c = 0; c < NCOL; c++) for (int k = 0; k < NBAND; k++) model[c][k] = 0;
      ntrk = 1 + ev % 4;
      for (int t = 0; t < ntrk; t++) begin
        int c, k;
        c = $urandom % NCOL;
        k = $urandom % NBAND;
        for (int l = 0; l < NL; l++)
          for (int rep = 0; rep < 2; rep++) begin
            int x, noise;
            logic [NSEC-1:0] sm;
            noise = $urandom % 5;
            x = rec_of(c, k, l) + noise - 2;
            // every 7th hit goes to no sector and must be ignored
            sm = ((t + l + rep) % 7 == 3) ? '0 : '1;
            hit_valid = 1; hit_layer = 3'(l); hit_coord = coord_t'(x); hit_sec = sm;
            if (sm != '0)
              for (int cc = 0; cc < NCOL; cc++)
                for (int kk = 0; kk < NBAND; kk++) begin
                  int d;
                  d = x - rec_of(cc, kk, l);
                  if (d < 0) d = -d;
                  if (d < CUT) model[cc][kk] += w_of(d);
                  if (model[cc][kk] > 1023) model[cc][kk] = 1023;
                end
            @(negedge clk);
          end
      end
      hit_valid = 0;
      find = 1;
      @(negedge clk); find = 0;
      // expected maxima in (column, band) order
      for (int c = 0; c < NCOL; c++)
        for (int k = 0; k < NBAND; k++) begin
          bit m;
          int row;
          row = c - BOFF + k;
          m = model[c][k] > THRESH;
          for (int dc = -1; dc <= 1; dc++)
            for (int dr = -1; dr <= 1; dr++) begin
              int v;
              if (dc == 0 && dr == 0) continue;
              v = at(c + dc, row + dr);
              if (v < 0) continue;
              if ((dc < 0 || (dc == 0 && dr < 0)) ? (model[c][k] <= v) : (model[c][k] < v)) m = 0;
            end
          if (m) begin
            checks += 4;
            nmax++;
            if (!max_valid) failures++;
            if (int'(max_col) != c) failures++;
            if (int'(max_row) != row) failures++;
            if (int'(max_acc) != model[c][k]) failures++;
            if (failures > 0 && failures < 6)
              $display("ev %0d exp (%0d,%0d,%0d) got %b (%0d,%0d,%0d)", ev, c, row, model[c][k],
                       max_valid, max_col, max_row, max_acc);
            pop = 1;
            @(negedge clk);
            pop = 0;
          end
        end
      checks++;
      if (max_valid) failures++;
    end
    checks++;
    if (nmax < 12) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
