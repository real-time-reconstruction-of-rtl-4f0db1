// tb_stereo_transform: builds u/v hits from known (x(t), y) points with the
// stereo geometry in real arithmetic and checks that the block recovers y
// (within the fixed-point error) and flags the acceptance window, with the
// one-cycle latency.
module tb_stereo_transform;
  import retina_pkg::*;
  localparam int YMIN = -96, YMAX = 3296;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [2:0] in_layer = 0;
  coord_t in_u = 0;
  logic signed [23:0] a [3];
  logic out_valid, out_in_acc;
  logic [2:0] out_layer;
  coord_t out_y;
  int checks = 0, failures = 0, nin = 0, nout = 0;

  stereo_transform #(.YMIN(YMIN), .YMAX(YMAX)) dut (.*);
  always #5 clk = ~clk;

  function automatic int rnd(input int n);
    int v;
    v = $urandom % n;
    return v;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real sn, cs;
    sn = $sin(5.0 * 3.14159265358979 / 180.0);
    cs = $cos(5.0 * 3.14159265358979 / 180.0);
    a[0] = 0; a[1] = 0; a[2] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      real x, y, t, u, a0, a1, a2;
      int l, s, ye, ui;
      @(negedge clk);
      a0 = 200.0 + rnd(3000);
      a1 = rnd(1600) - 800.0;
      a2 = rnd(200) - 100.0;
      a[0] = 24'($rtoi(a0 * 16.0));
      a[1] = 24'($rtoi(a1 * 16.0));
      a[2] = 24'($rtoi(a2 * 16.0));
      l = rnd(NST);
      s = ST_SIGN[l];
      t = t_q16(ST_LAYER[l]) / 65536.0;
      x = a0 + a1 * t + a2 * t * t;
      y = rnd(3800) - 250.0;
      u = x * cs + s * y * sn;
      in_valid = 1;
      in_layer = 3'(l);
      in_u = coord_t'($rtoi($floor(u + 0.5)));
      // the rounding of u to a unit limits the precision of y to ~ 1/(2 sin 5deg)
      ui = in_u;
      ye = $rtoi($floor(s * (ui - x * cs) / sn + 0.5));
      @(negedge clk);
      in_valid = 0;
      checks += 3;
      if (!out_valid || out_layer != 3'(l)) failures++;
      if (int'(out_y) - ye > 2 || ye - int'(out_y) > 2) begin
        failures++;
        if (failures < 8) $display("y %0d exp %0d (true %f)", out_y, ye, y);
      end
      if (ye > YMIN + 2 && ye < YMAX - 2 && !out_in_acc) failures++;
      else if ((ye < YMIN - 2 || ye > YMAX + 2) && out_in_acc) failures++;
      if (out_in_acc) nin++; else nout++;
    end
    checks++;
    if (nin == 0 || nout == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
