// hit_switch: the switching stage in front of the axial retina.
//
// Every cycle it may take one raw SciFi hit (layer 0..11, fibre channel).
// It converts the channel to a coordinate in retina units,
//     coord = (channel * CH_SCALE_Q16 + 2^15) >> 16 + OFFSET[layer],
// sorts the hit into the axial class (layers 0,3,4,7,8,11, renumbered 0..5)
// or the stereo class (1,2,5,6,9,10, renumbered 0..5), and for an axial hit
// computes the set of engine sectors (column groups of the axial retina) it
// must reach: sector s is enabled when the coordinate lies within CUT of the
// range of receptors the sector's cells have on that layer.  A hit that
// reaches more than one sector is duplicated; `dup` flags that case.
// Output is registered: latency 1 cycle, one hit per cycle, no back-pressure.
// From the paper: hits are coordinate-transformed and delivered to the right
// place in the engine array, with duplication.  The linear channel
// transform, its constants and the column-sector routing are this design's
// own.
module hit_switch
  import retina_pkg::*;
#(
  parameter int NCOL  = 258,
  parameter int NBAND = 100,
  parameter int BOFF  = 25,
  parameter int PITCH = 16,
  parameter int CUT   = 24,
  parameter int NSEC  = 6,
  parameter int CH_SCALE_Q16 = 21140,   // units per fibre channel, Q16
  // u layers start at -256 so that tracks near x = 0 keep u >= channel 0
  parameter int OFFSET [NLAYER] = '{0, -256, 0, 0, 0, -256, 0, 0, 0, -256, 0, 0}
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  raw_hit_t        in_hit,
  output logic            ax_valid,
  output logic [2:0]      ax_layer,
  output coord_t          ax_coord,
  output logic [NSEC-1:0] ax_sec,
  output logic            ax_dup,
  output logic            st_valid,
  output logic [2:0]      st_layer,
  output coord_t          st_coord
);

  // Lowest / highest receptor of sector s on axial layer l.  Receptors grow
  // with both column and row, so the extremes are the sector's first cell
  // (first column, band index 0) and last cell (last column, last index).
  function automatic int sec_lo(input int s, input int l);
    int c;
    c = (s * NCOL + NSEC - 1) / NSEC;
    return receptor(c, c - BOFF, PITCH, t_q16(AX_LAYER[l])) - CUT;
  endfunction
  function automatic int sec_hi(input int s, input int l);
    int c;
    c = ((s + 1) * NCOL + NSEC - 1) / NSEC - 1;
    return receptor(c, c - BOFF + NBAND - 1, PITCH, t_q16(AX_LAYER[l])) + CUT;
  endfunction

  coord_t lo [NSEC][NAX];
  coord_t hi [NSEC][NAX];
  for (genvar s = 0; s < NSEC; s++) begin : g_s
    for (genvar l = 0; l < NAX; l++) begin : g_l
      assign lo[s][l] = coord_t'(sec_lo(s, l));
      assign hi[s][l] = coord_t'(sec_hi(s, l));
    end
  end

  // Class and local number of each global layer.
  logic       is_ax;
  logic [2:0] loc;
  coord_t     coord;
  logic [NSEC-1:0] sec;
  always_comb begin
    is_ax = 1'b0;
    loc   = '0;
    for (int l = 0; l < NAX; l++)
      if (int'(in_hit.layer) == AX_LAYER[l]) begin
        is_ax = 1'b1;
        loc   = 3'(l);
      end
    for (int l = 0; l < NST; l++)
      if (int'(in_hit.layer) == ST_LAYER[l]) loc = 3'(l);
    coord = coord_t'(((32'(in_hit.channel) * CH_SCALE_Q16 + 32768) >>> 16)
                     + OFFSET[(int'(in_hit.layer) < NLAYER) ? in_hit.layer : '0]);
    for (int s = 0; s < NSEC; s++)
      sec[s] = (coord > lo[s][loc]) && (coord < hi[s][loc]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ax_valid <= 1'b0;
      st_valid <= 1'b0;
      ax_layer <= '0;
      st_layer <= '0;
      ax_coord <= '0;
      st_coord <= '0;
      ax_sec   <= '0;
      ax_dup   <= 1'b0;
    end else begin
      ax_valid <= in_valid && is_ax && (int'(in_hit.layer) < NLAYER);
      st_valid <= in_valid && !is_ax && (int'(in_hit.layer) < NLAYER);
      ax_layer <= loc;
      st_layer <= loc;
      ax_coord <= coord;
      st_coord <= coord;
      ax_sec   <= sec;
      ax_dup   <= in_valid && is_ax && ((sec & (sec - 1'b1)) != '0);
    end
  end

endmodule
