// retina_tracker: T-track processor for one SciFi quadrant built on the
// artificial-retina algorithm.  Top of the design.
//
// Hits of one event come in on in_* (one per cycle while in_ready), followed
// by one beat with in_eoe set.  Processing then runs in three stages:
//   1. x-z projection: hit_switch transforms every hit; axial (x) hits are
//      delivered to the sectors of the 25800-engine axial retina, which
//      accumulates gaussian weights, and are also kept in an axial hit
//      buffer; u/v hits are copied to the buffer of every stereo unit.  After
//      the end of the event the retina flags its local maxima above
//      threshold.
//   2. ghost removal: each maximum, one at a time, gets its two closest hits
//      per axial layer (closest_hits) and a linearized parabola fit over
//      their combinations (comb_fit).  Candidates with chi2 above
//      CHI2_A_MAX, or with more than one empty layer, are dropped.
//   3. stereo association: a surviving candidate is handed to a free stereo
//      unit (NSTEREO of them, working in parallel); when all are busy the
//      top waits (a stall).  Each unit returns the candidate with its best
//      y-z line.
// Finished tracks leave on trk_valid/trk, one per cycle, lowest unit first;
// the sink must accept them at once.  evt_done pulses once all tracks of the
// event are out; the retina is then cleared and in_ready rises again, so
// events are processed one after the other.
// Latency per event: hits + ~4 cycles, then per axial maximum (axial hits +
// 2) + (1 + combinations) + 2 cycles, overlapped with the stereo units.
// From the paper: the three-stage sequence, the axial retina of 25800 cells,
// the chi2 cut on the parabola fit, three stereo retinas of 500 cells per
// chip and the best-chi2 stereo choice.  The event framing, buffering, the
// dispatch and output order, and all numerical thresholds are this design's
// own.
module retina_tracker
  import retina_pkg::*;
#(
  parameter int NCOL       = 258,
  parameter int NBAND      = 100,
  parameter int BOFF       = 25,
  parameter int PITCH      = 16,
  parameter int CUT        = 24,
  parameter int SIGMA      = 8,
  parameter int WMAX       = 15,
  parameter int THRESH     = 45,
  parameter int NSEC       = 6,
  parameter int CHI2_A_MAX = 256,      // Q(CHI_FRAC) units^2
  parameter int NSTEREO    = 3,
  parameter int AW         = 10,       // log2 of hits buffered per class
  parameter int S_NCOL     = 50,
  parameter int S_NBAND    = 10,
  parameter int S_BOFF     = 5,
  parameter int S_PITCH    = 64,
  parameter int S_CUT      = 96,
  parameter int S_SIGMA    = 32,
  parameter int S_THRESH   = 30
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  logic      in_eoe,
  input  raw_hit_t  in_hit,
  output logic      in_ready,
  output logic      trk_valid,
  output track_t    trk,
  output logic      evt_done
);

  localparam int TQ [NAX] = '{t_q16(0), t_q16(3), t_q16(4), t_q16(7), t_q16(8), t_q16(11)};
  localparam int CW = $clog2(NCOL);
  localparam int RW = $clog2(NCOL + NBAND) + 1;

  typedef enum logic [3:0] {S_FILL, S_DRAIN, S_FIND, S_NEXT, S_CH, S_FIT, S_DISP, S_WAIT, S_CLR} state_t;
  state_t state;

  // ---- switch ----
  logic            ax_valid, st_valid, ax_dup;
  logic [2:0]      ax_layer, st_layer;
  coord_t          ax_coord, st_coord;
  logic [NSEC-1:0] ax_sec;
  hit_switch #(.NCOL(NCOL), .NBAND(NBAND), .BOFF(BOFF), .PITCH(PITCH), .CUT(CUT), .NSEC(NSEC)) u_sw (
    .clk, .rst_n,
    .in_valid(in_valid && in_ready && !in_eoe), .in_hit,
    .ax_valid, .ax_layer, .ax_coord, .ax_sec, .ax_dup,
    .st_valid, .st_layer, .st_coord
  );

  // ---- axial hit buffer ----
  logic [AW:0]   nax, nst;
  logic [AW-1:0] ax_raddr;
  logic [18:0]   ax_rdata;
  wire ax_store = ax_valid && !nax[AW];
  wire st_store = st_valid && !nst[AW];
  hit_buffer #(.W(19), .DEPTH(1 << AW)) u_axbuf (
    .clk, .we(ax_store), .waddr(nax[AW-1:0]), .wdata({ax_layer, ax_coord}),
    .raddr(ax_raddr), .rdata(ax_rdata)
  );

  // ---- axial retina ----
  logic                 clr, find, pop, max_valid;
  logic [CW-1:0]        max_col;
  logic signed [RW-1:0] max_row;
  logic [ACC_W-1:0]     max_acc;
  retina_array #(
    .NCOL(NCOL), .NBAND(NBAND), .BOFF(BOFF), .PITCH(PITCH), .NL(NAX), .TQ(TQ),
    .CUT(CUT), .SIGMA(SIGMA), .WMAX(WMAX), .THRESH(THRESH), .NSEC(NSEC)
  ) u_ret (
    .clk, .rst_n, .clear(clr),
    .hit_valid(ax_valid), .hit_layer(ax_layer), .hit_coord(ax_coord), .hit_sec(ax_sec),
    .find, .pop, .max_valid, .max_col, .max_row, .max_acc
  );

  // ---- hit selection and parabola fit for the current maximum ----
  logic [CW-1:0]        mc;
  logic signed [RW-1:0] mr;
  coord_t               rec [NAX];
  logic signed [15:0]   ref0, ref1;
  always_comb begin
    for (int l = 0; l < NAX; l++) rec[l] = coord_t'(receptor(int'(mc), int'(mr), PITCH, TQ[l]));
    ref0 = 16'(int'(mc) * PITCH + PITCH / 2);
    ref1 = 16'((int'(mr) - int'(mc)) * PITCH);
  end

  logic       ch_start, ch_done;
  logic [1:0] cnt [NAX];
  coord_t     hit [NAX][2];
  closest_hits #(.NL(NAX), .AW(AW), .CUT(CUT)) u_ch (
    .clk, .rst_n, .start(ch_start), .rec, .nhits(nax),
    .rd_addr(ax_raddr), .rd_layer(ax_rdata[18:16]), .rd_coord(coord_t'(ax_rdata[15:0])),
    .done(ch_done), .cnt, .hit
  );

  logic               fit_start, fit_done, fit_ok;
  logic [15:0]        fit_chi2;
  logic signed [23:0] fit_par [3];
  logic [7:0]         fit_ncomb;
  comb_fit #(.NL(NAX), .NPAR(3), .TQ(TQ)) u_fit (
    .clk, .rst_n, .start(fit_start), .rec, .ref0, .ref1, .cnt, .hit,
    .done(fit_done), .ok(fit_ok), .chi2(fit_chi2), .par(fit_par), .ncomb(fit_ncomb)
  );

  // ---- stereo units ----
  track_t               cand;
  logic [NSTEREO-1:0]   su_start, su_busy, su_valid, su_ack;
  track_t               su_res [NSTEREO];
  for (genvar u = 0; u < NSTEREO; u++) begin : g_su
    stereo_unit #(
      .NCOL(S_NCOL), .NBAND(S_NBAND), .BOFF(S_BOFF), .PITCH(S_PITCH), .CUT(S_CUT),
      .SIGMA(S_SIGMA), .WMAX(WMAX), .THRESH(S_THRESH), .AW(AW)
    ) u_su (
      .clk, .rst_n,
      .wr_en(st_store), .wr_addr(nst[AW-1:0]), .wr_layer(st_layer), .wr_coord(st_coord),
      .nhits(nst),
      .start(su_start[u]), .cand, .busy(su_busy[u]),
      .res_valid(su_valid[u]), .res(su_res[u]), .res_ack(su_ack[u])
    );
  end

  // first idle unit, first unit with a result
  logic                       free_any, out_any;
  logic [$clog2(NSTEREO+1)-1:0] free_u, out_u;
  always_comb begin
    free_any = 1'b0;
    free_u   = '0;
    out_any  = 1'b0;
    out_u    = '0;
    for (int u = NSTEREO - 1; u >= 0; u--) begin
      if (!su_busy[u]) begin
        free_any = 1'b1;
        free_u   = ($clog2(NSTEREO+1))'(u);
      end
      if (su_valid[u]) begin
        out_any = 1'b1;
        out_u   = ($clog2(NSTEREO+1))'(u);
      end
    end
  end

  assign trk_valid = out_any;
  assign trk       = su_res[out_u];
  for (genvar u = 0; u < NSTEREO; u++) begin : g_ctl
    assign su_ack[u]   = out_any && (int'(out_u) == u);
    assign su_start[u] = (state == S_DISP) && free_any && (int'(free_u) == u);
  end

  logic [1:0] drain;
  assign in_ready  = (state == S_FILL);
  assign clr       = (state == S_CLR);
  assign find      = (state == S_FIND);
  assign pop       = (state == S_NEXT) && max_valid;
  assign ch_start  = pop;
  assign fit_start = (state == S_CH) && ch_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_FILL;
      nax      <= '0;
      nst      <= '0;
      drain    <= '0;
      mc       <= '0;
      mr       <= '0;
      cand     <= '0;
      evt_done <= 1'b0;
    end else begin
      evt_done <= 1'b0;
      if (ax_store) nax <= nax + 1'b1;
      if (st_store) nst <= nst + 1'b1;
      unique case (state)
        S_FILL: if (in_valid && in_eoe) begin
          drain <= 2'd2;
          state <= S_DRAIN;
        end
        S_DRAIN: begin
          drain <= drain - 2'd1;
          if (drain == 2'd1) state <= S_FIND;
        end
        S_FIND: state <= S_NEXT;
        S_NEXT: begin
          if (max_valid) begin
            mc    <= max_col;
            mr    <= max_row;
            state <= S_CH;
          end else begin
            state <= S_WAIT;
          end
        end
        S_CH: if (ch_done) state <= S_FIT;
        S_FIT: if (fit_done) begin
          if (fit_ok && int'(fit_chi2) <= CHI2_A_MAX) begin
            cand          <= '0;
            cand.ax_col   <= 9'(mc);
            cand.ax_row   <= 10'(mr);
            cand.a0       <= fit_par[0];
            cand.a1       <= fit_par[1];
            cand.a2       <= fit_par[2];
            cand.chi2_ax  <= fit_chi2;
            state         <= S_DISP;
          end else begin
            state <= S_NEXT;
          end
        end
        S_DISP: if (free_any) state <= S_NEXT;
        S_WAIT: if (su_busy == '0) begin
          evt_done <= 1'b1;
          state    <= S_CLR;
        end
        S_CLR: begin
          nax   <= '0;
          nst   <= '0;
          state <= S_FILL;
        end
        default: state <= S_FILL;
      endcase
    end
  end

endmodule
