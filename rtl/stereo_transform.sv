// stereo_transform: turns a u/v hit into a y coordinate for the stereo
// retina of one axial track candidate.
//
// A stereo layer measures u = x*cos(5deg) + s*y*sin(5deg), s = -1 for u
// layers and +1 for v layers.  With the axial parabola x(t) = a0 + a1 t +
// a2 t^2 evaluated at the layer's t, the hit gives
//     y = s * (u - x(t)*cos(5deg)) / sin(5deg).
// A hit is marked `in_acc` when y lies in [YMIN, YMAX), the y range the
// stereo retina covers (plus its distance cut); only those hits belong to
// the candidate.  Registered output, one hit per cycle, latency 1 cycle.
// From the paper: u/v coordinates are turned into y using a0, a1, a2 from the
// axial parabola fit, and a stereo retina only receives the hits compatible
// with its axial candidate.  The fixed-point constants (cos in Q14, 1/sin in
// Q8) and the acceptance window are this design's choice.
module stereo_transform
  import retina_pkg::*;
#(
  parameter int YMIN = -96,
  parameter int YMAX = 3296
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [2:0]         in_layer,     // stereo layer 0..5
  input  coord_t             in_u,
  input  logic signed [23:0] a [3],        // Q(A_FRAC)
  output logic               out_valid,
  output logic [2:0]         out_layer,
  output coord_t             out_y,
  output logic               out_in_acc
);

  logic signed [31:0] tq  [NST];
  logic signed [31:0] tq2 [NST];
  for (genvar l = 0; l < NST; l++) begin : g_t
    assign tq[l]  = 32'(t_q16(ST_LAYER[l]));
    assign tq2[l] = 32'((t_q16(ST_LAYER[l]) * t_q16(ST_LAYER[l]) + 32768) >> 16);
  end

  logic signed [63:0] xt, du, y;
  logic [2:0]         ly;
  always_comb begin
    ly = (int'(in_layer) < NST) ? in_layer : 3'd0;
    // x(t) in Q(A_FRAC)
    xt = 64'(a[0]) + ((64'(a[1]) * 64'(tq[ly]) + 64'(a[2]) * 64'(tq2[ly]) + 64'sd32768) >>> 16);
    // u - x cos, Q(A_FRAC)
    du = (64'(in_u) <<< A_FRAC) - ((xt * 64'(COS5_Q14) + 64'sd8192) >>> 14);
    y  = (du * 64'(INVSIN5_Q8) * 64'(ST_SIGN[ly]) + (64'sd1 <<< (A_FRAC + 7))) >>> (A_FRAC + 8);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_layer  <= '0;
      out_y      <= '0;
      out_in_acc <= 1'b0;
    end else begin
      out_valid  <= in_valid;
      out_layer  <= in_layer;
      out_y      <= coord_t'(y);
      out_in_acc <= (y >= 64'(YMIN)) && (y < 64'(YMAX));
    end
  end

endmodule
