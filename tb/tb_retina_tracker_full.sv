// tb_retina_tracker_full: the tracker with every parameter at its default
// (25800-cell axial retina over 258 x0 columns, three 500-cell stereo units)
// taking eight complete events, with the same generator and checks as
// tb_retina_tracker (shared through tb_tracker_events.svh).
// Each event is a burst of raw hits, one per 10 ns clock while in_ready is
// high, closed by an end-of-event beat; every track that comes out on
// trk_valid is compared with the generated tracks (axial cell, parabola,
// y-z line) and every generated track must be found by evt_done.  The
// mechanism counters (hit duplication in the switch, chi2 rejection,
// missing-layer fit, stereo-unit stall, input back-pressure) are printed;
// with three stereo units and four to six tracks per event a stall is not
// guaranteed here, so the stall is required only by the reduced-size
// testbench, which has a single stereo unit.
// The event content is this testbench's own; the sizes are the design's
// defaults, which follow the paper's 25800 axial and 500 stereo cells.
// A watchdog ends the run with a failure after 20 ms of simulated time.
module tb_retina_tracker_full;
  import retina_pkg::*;
  localparam int PITCH = 16;

  logic clk = 0, rst_n = 0, in_valid = 0, in_eoe = 0, in_ready, trk_valid, evt_done;
  raw_hit_t in_hit = '0;
  track_t trk;
  int checks = 0, failures = 0;

  retina_tracker dut (.*);
  always #5 clk = ~clk;

  `include "tb_tracker_events.svh"

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_events(8, dut.NCOL, dut.NBAND, dut.BOFF);
    $display("tracks out %0d, duplications %0d, chi2 rejections %0d, missing-layer fits %0d, stalls %0d, back-pressure %0d",
             n_trk, n_dup, n_rej, n_miss, n_stall, n_bp);
    checks++;
    if (n_trk == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
