// tb_retina_tracker: end-to-end test of the T-track processor.
//
// Each event holds a few simulated tracks: a straight-ish (slightly curved)
// x-z projection seen on the 6 axial layers and a y-z line seen through the
// u/v layers, turned into raw fibre channels with the inverse of the
// switch's transform, plus random noise hits.  Some events also carry
//   - a zig-zag x pattern that excites the retina but fails the chi2 cut,
//   - a track with one axial layer missing,
//   - a track without u/v hits (stereo projection not found).
// The tb checks that every good track comes out once with its x and y
// parameters close to the truth, that rejected patterns do not come out,
// and that every mechanism of the design was exercised: hit duplication in
// the switch, chi2 rejection, a fit with a missing layer, a stall while all
// stereo units are busy, input back-pressure and a candidate without stereo
// projection.  The size parameters are overridden to keep it short (one
// stereo unit, so that candidates have to wait for it); the
// full-size run is tb_retina_tracker_full.
module tb_retina_tracker;
  import retina_pkg::*;
  localparam int NCOL = 48, NBAND = 24, BOFF = 6, NSEC = 3, NSTEREO = 1, AW = 9;
  localparam int PITCH = 16;
  localparam int NEV = 8;

  logic clk = 0, rst_n = 0, in_valid = 0, in_eoe = 0, in_ready, trk_valid, evt_done;
  raw_hit_t in_hit = '0;
  track_t trk;
  int checks = 0, failures = 0;

  retina_tracker #(.NCOL(NCOL), .NBAND(NBAND), .BOFF(BOFF), .NSEC(NSEC), .NSTEREO(NSTEREO),
                   .AW(AW)) dut (.*);
  always #5 clk = ~clk;

  `include "tb_tracker_events.svh"

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_events(NEV, NCOL, NBAND, BOFF);
    report_mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
