// retina_array: the array of processing engines that maps one retina, with
// its local-maximum search and maxima readout.
//
// The track-parameter plane (x0,x11) -- or (y0,y11) for a stereo retina -- is
// cut into square cells of PITCH units.  Only a diagonal band is covered:
// column `col` (x0 index, 0..NCOL-1) holds NBAND cells whose x11 index is
// row = col - BOFF + k, k = 0..NBAND-1.  Every cell is a retina_engine whose
// receptors are the straight line through the cell centre evaluated at the
// layer fractions TQ (Q16).  Hits are broadcast to all engines of the
// column sectors enabled in `hit_sec` (sector s holds columns with
// col*NSEC/NCOL == s); the switch upstream sets those bits.
//
// After the last hit of an event the controller pulses `find`.  On that edge
// every cell latches a flag if its excitation exceeds THRESH and is a local
// maximum among its 8 neighbours in the full (x0,x11) grid: it must be
// strictly greater than the neighbours that come before it (smaller column,
// or same column and smaller row) and at least equal to those after it, so a
// plateau gives one maximum.  All flags are formed in parallel in one cycle.
// The readout then presents the flagged cell with the smallest (col,row) on
// max_* while max_valid is high; `pop` removes it, so maxima come out one per
// cycle.  `clear` zeroes excitations and flags for the next event.
//
// From the paper: the engine array over a diagonal band, 25800 axial cells
// per quadrant, 50x50 stereo cells with 500 in the band, the local-maximum
// search after each event and the excitation threshold.  The band shape
// (258 columns x 100, 50 x 10), the neighbourhood, the tie rule, the sector
// split and the one-maximum-per-cycle readout are this design's own.
module retina_array
  import retina_pkg::*;
#(
  parameter int NCOL   = 258,
  parameter int NBAND  = 100,
  parameter int BOFF   = 25,
  parameter int PITCH  = 16,
  parameter int NL     = 6,
  parameter int TQ [NL] = '{t_q16(0), t_q16(3), t_q16(4), t_q16(7), t_q16(8), t_q16(11)},
  parameter int CUT    = 24,
  parameter int SIGMA  = 8,
  parameter int WMAX   = 15,
  parameter int THRESH = 45,
  parameter int NSEC   = 6,
  parameter int LW     = (NL > 1) ? $clog2(NL) : 1,
  parameter int CW     = $clog2(NCOL),
  parameter int RW     = $clog2(NCOL + NBAND) + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 hit_valid,
  input  logic [LW-1:0]        hit_layer,
  input  coord_t               hit_coord,
  input  logic [NSEC-1:0]      hit_sec,
  input  logic                 find,
  input  logic                 pop,
  output logic                 max_valid,
  output logic [CW-1:0]        max_col,
  output logic signed [RW-1:0] max_row,
  output logic [ACC_W-1:0]     max_acc
);

  logic [ACC_W-1:0] acc  [NCOL][NBAND];
  logic [ACC_W-1:0] zero [NBAND];
  logic [NBAND-1:0] flag [NCOL];
  logic [$clog2(NBAND)-1:0] sel_k;
  logic [CW-1:0]            sel_c;
  logic                     any;

  assign zero = '{default: '0};

  for (genvar c = 0; c < NCOL; c++) begin : g_col
    localparam int SEC = c * NSEC / NCOL;
    logic [ACC_W-1:0] nb_l [NBAND];
    logic [ACC_W-1:0] nb_r [NBAND];
    if (c > 0) begin : g_l
      assign nb_l = acc[c-1];
    end else begin : g_l0
      assign nb_l = zero;
    end
    if (c < NCOL - 1) begin : g_r
      assign nb_r = acc[c+1];
    end else begin : g_r0
      assign nb_r = zero;
    end
    retina_column #(
      .NBAND(NBAND), .BOFF(BOFF), .PITCH(PITCH), .NL(NL), .TQ(TQ), .CUT(CUT),
      .SIGMA(SIGMA), .WMAX(WMAX), .THRESH(THRESH), .LW(LW)
    ) u_col (
      .clk, .rst_n, .clear,
      .col       (10'(c)),
      .hit_valid (hit_valid && hit_sec[SEC]),
      .hit_layer, .hit_coord,
      .acc_l     (nb_l),
      .acc_r     (nb_r),
      .acc       (acc[c]),
      .find,
      .pop       (pop && any && sel_c == CW'(c)),
      .pop_k     (sel_k),
      .flag      (flag[c])
    );
  end

  // Readout: first column holding a flag, then first flagged cell in it.
  always_comb begin
    any   = 1'b0;
    sel_c = '0;
    for (int c = NCOL - 1; c >= 0; c--) begin
      if (|flag[c]) begin
        any   = 1'b1;
        sel_c = CW'(c);
      end
    end
    sel_k = '0;
    for (int k = NBAND - 1; k >= 0; k--) begin
      if (flag[sel_c][k]) sel_k = ($clog2(NBAND))'(k);
    end
  end

  assign max_valid = any;
  assign max_col   = sel_c;
  assign max_row   = RW'(signed'({1'b0, sel_c})) - RW'(BOFF) + RW'({1'b0, sel_k});
  assign max_acc   = acc[sel_c][sel_k];

endmodule
