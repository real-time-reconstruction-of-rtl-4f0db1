// tb_retina_column: one column of 20 engines.  Random hits near the
// receptors; the tb recomputes every cell's excitation (gaussian weight with
// real arithmetic, saturation, clear) and, with random neighbour columns,
// the local-maximum flags, then pops them one by one.
module tb_retina_column;
  import retina_pkg::*;
  localparam int NBAND = 20, BOFF = 5, PITCH = 16, NL = 6, CUT = 24, SIGMA = 8, WMAX = 15;
  localparam int THRESH = 45;
  localparam int TQ [NL] = '{t_q16(0), t_q16(3), t_q16(4), t_q16(7), t_q16(8), t_q16(11)};
  localparam int KW = $clog2(NBAND);
  logic clk = 0, rst_n = 0, clear = 0, hit_valid = 0, find = 0, pop = 0;
  logic [9:0] col = 10'd7;
  logic [2:0] hit_layer = 0;
  coord_t hit_coord = 0;
  logic [ACC_W-1:0] acc_l [NBAND], acc_r [NBAND], acc [NBAND];
  logic [KW-1:0] pop_k = 0;
  logic [NBAND-1:0] flag;
  int checks = 0, failures = 0, nflags = 0;
  int model [NBAND];

  retina_column #(.NBAND(NBAND), .BOFF(BOFF), .PITCH(PITCH), .NL(NL), .TQ(TQ), .CUT(CUT),
                  .SIGMA(SIGMA), .WMAX(WMAX), .THRESH(THRESH)) dut (.*);
  always #5 clk = ~clk;

  function automatic int rec_of(int k, int l);
    real x0c, x11c;
    x0c  = int'(col) * PITCH + PITCH / 2;
    x11c = (int'(col) - BOFF + k) * PITCH + PITCH / 2;
    return $rtoi(x0c) + $rtoi($floor((x11c - x0c) * TQ[l] / 65536.0 + 0.5));
  endfunction

  function automatic int w_of(int d);
    return $rtoi($floor(WMAX * $exp(-(d * d) / (2.0 * SIGMA * SIGMA)) + 0.5));
  endfunction

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < NBAND; k++) begin acc_l[k] = 0; acc_r[k] = 0; model[k] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int ev = 0; ev < 20; ev++) begin
      int ntrk, nh;
      int tk [3];
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int k = 0; k < NBAND; k++) model[k] = 0;
      // a few "tracks" through chosen cells plus noise hits
      ntrk = 1 + ev % 3;
      for (int t = 0; t < 3; t++) tk[t] = int'($urandom % NBAND);
      nh = 0;
      for (int n = 0; n < 60 + (ev == 3 ? 400 : 0); n++) begin
        int l, x;
        l = int'($urandom % NL);
        if (n % 3 == 0 || ev == 3) x = rec_of(tk[n % ntrk], l) + int'($urandom % 5) - 2;
        else x = rec_of(int'($urandom % NBAND), l) + int'($urandom % 61) - 30;
        hit_valid = ($urandom % 8) != 0;
        hit_layer = 3'(l);
        hit_coord = coord_t'(x);
        if (hit_valid)
          for (int k = 0; k < NBAND; k++) begin
            int d;
            d = x - rec_of(k, l);
            if (d < 0) d = -d;
            if (d < CUT) model[k] += w_of(d);
            if (model[k] > 1023) model[k] = 1023;
          end
        @(negedge clk);
      end
      hit_valid = 0;
      for (int k = 0; k < NBAND; k++) begin
        checks++;
        if (int'(acc[k]) != model[k]) begin
          failures++;
          if (failures < 8) $display("ev %0d cell %0d acc %0d exp %0d", ev, k, acc[k], model[k]);
        end
      end
      // neighbours, then cluster finding
      for (int k = 0; k < NBAND; k++) begin
        acc_l[k] = ACC_W'($urandom % 90);
        acc_r[k] = ACC_W'($urandom % 90);
        if (ev % 4 == 1) acc_l[k] = 0;
      end
      find = 1;
      @(negedge clk); find = 0;
      for (int k = 0; k < NBAND; k++) begin
        bit m;
        m = model[k] > THRESH;
        for (int dc = -1; dc <= 1; dc++)
          for (int dr = -1; dr <= 1; dr++) begin
            int nk, nv;
            bit is_before;
            if (dc == 0 && dr == 0) continue;
            nk = k + dr - dc;
            if (nk < 0 || nk >= NBAND) continue;
            nv = (dc < 0) ? int'(acc_l[nk]) : (dc > 0) ? int'(acc_r[nk]) : model[nk];
            is_before = (dc < 0) || (dc == 0 && dr < 0);
            if (is_before ? (model[k] <= nv) : (model[k] < nv)) m = 0;
          end
        checks++;
        if (flag[k] !== m) begin
          failures++;
          if (failures < 8) $display("ev %0d flag %0d = %b exp %b", ev, k, flag[k], m);
        end
        nflags += m;
      end
      // pop every flag
      for (int k = 0; k < NBAND; k++) if (flag[k]) begin
        pop = 1; pop_k = KW'(k);
        @(negedge clk);
      end
      pop = 0;
      checks++;
      if (flag != '0) failures++;
    end
    checks++;
    if (nflags < 5) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
