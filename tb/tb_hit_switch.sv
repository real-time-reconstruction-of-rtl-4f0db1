// tb_hit_switch: random raw hits on all 12 layers (plus an invalid layer
// number).  The tb recomputes the coordinate transform, the axial/stereo
// split with the local layer numbers, and the sector mask by brute force
// over every cell of each sector; it also checks the duplication flag and
// that duplication happens.
module tb_hit_switch;
  import retina_pkg::*;
  localparam int NCOL = 258, NBAND = 100, BOFF = 25, PITCH = 16, CUT = 24, NSEC = 6;
  localparam int SC = 21140;
  localparam int OFF [NLAYER] = '{3, -2, 0, 5, -7, 1, 0, 2, -1, 4, -3, 6};
  logic clk = 0, rst_n = 0, in_valid = 0;
  raw_hit_t in_hit;
  logic ax_valid, st_valid, ax_dup;
  logic [2:0] ax_layer, st_layer;
  coord_t ax_coord, st_coord;
  logic [NSEC-1:0] ax_sec;
  int checks = 0, failures = 0, ndup = 0;
  int lo [NSEC][NAX], hi [NSEC][NAX];

  hit_switch #(.NCOL(NCOL), .NBAND(NBAND), .BOFF(BOFF), .PITCH(PITCH), .CUT(CUT), .NSEC(NSEC),
               .CH_SCALE_Q16(SC), .OFFSET(OFF)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // receptor extremes per sector by brute force
    for (int s = 0; s < NSEC; s++)
      for (int l = 0; l < NAX; l++) begin lo[s][l] = 1 << 30; hi[s][l] = -(1 << 30); end
    for (int c = 0; c < NCOL; c++)
      for (int k = 0; k < NBAND; k++)
        for (int l = 0; l < NAX; l++) begin
          int s, r;
          real x0c, x11c;
          s = c * NSEC / NCOL;
          x0c = c * PITCH + PITCH / 2;
          x11c = (c - BOFF + k) * PITCH + PITCH / 2;
          r = $rtoi(x0c) + $rtoi($floor((x11c - x0c) * t_q16(AX_LAYER[l]) / 65536.0 + 0.5));
          if (r < lo[s][l]) lo[s][l] = r;
          if (r > hi[s][l]) hi[s][l] = r;
        end
    in_hit = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int gl, ch, x, cls, loc;
      logic [NSEC-1:0] m;
      @(negedge clk);
      gl = (n % 97 == 0) ? 13 : $urandom % 12;
      ch = $urandom % 13000;
      in_valid = ($urandom % 5) != 0;
      in_hit.layer = 4'(gl);
      in_hit.channel = 14'(ch);
      x = $rtoi($floor(ch * SC / 65536.0 + 0.5)) + ((gl < 12) ? OFF[gl] : OFF[0]);
      cls = -1; loc = 0;
      for (int l = 0; l < NAX; l++) if (AX_LAYER[l] == gl) begin cls = 0; loc = l; end
      for (int l = 0; l < NST; l++) if (ST_LAYER[l] == gl) begin cls = 1; loc = l; end
      m = '0;
      if (cls == 0)
        for (int s = 0; s < NSEC; s++) m[s] = (x > lo[s][loc] - CUT) && (x < hi[s][loc] + CUT);
      @(negedge clk);
      checks += 2;
      if (ax_valid !== (in_valid && cls == 0)) failures++;
      if (st_valid !== (in_valid && cls == 1)) failures++;
      if (in_valid && cls == 0) begin
        checks += 4;
        if (int'(ax_layer) != loc) failures++;
        if (int'(ax_coord) != x) begin failures++; if (failures < 8) $display("x %0d exp %0d", ax_coord, x); end
        if (ax_sec !== m) begin failures++; if (failures < 8) $display("sec %b exp %b x=%0d l=%0d", ax_sec, m, x, loc); end
        if (ax_dup !== ($countones(m) > 1)) failures++;
        if (ax_dup) ndup++;
      end
      if (in_valid && cls == 1) begin
        checks += 2;
        if (int'(st_layer) != loc) failures++;
        if (int'(st_coord) != x) failures++;
      end
      in_valid = 0;
    end
    checks++;
    if (ndup == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
