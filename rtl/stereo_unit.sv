// stereo_unit: one stereo retina with its controller; finds the y-z
// projection of one axial track candidate.
//
// While the event is loaded the unit copies the event's u/v hits into its own
// buffer (wr_*).  On `start` it receives an axial candidate (cell and
// parabola a0..a2) and:
//   1. clears its retina (1 cycle);
//   2. streams the stored u/v hits through stereo_transform; hits whose y
//      falls in the retina's acceptance are accumulated in the 50x50-cell
//      stereo retina (500 cells in the diagonal band of (y0,y11)) and kept,
//      as y, in a second buffer;
//   3. pulses `find`; the retina flags its local maxima above THRESH;
//   4. for each maximum: closest_hits picks the two nearest y hits per
//      stereo layer, comb_fit fits a straight line y(t) = y0 + (y11-y0) t over
//      their combinations, and the maximum whose best chi2 is smallest is
//      kept (no cut on chi2);
//   5. presents the finished track on res_* until res_ack.
// A candidate without any stereo maximum is returned with st_found = 0.
// `busy` is high from `start` until the result is taken.  Latency is about
// 2*nhits + 6 cycles plus, per maximum, (y hits + 2) + (1 + combinations)
// cycles.
// From the paper: one stereo retina per axial candidate, 50x50 cells with 500
// in the band, the same maxima search as the axial retina, the straight-line
// fit with no chi2 requirement and the choice of the best chi2 over all
// maxima.  The sequencing, buffers and numerical parameters are this design's
// own.
// The start-while-idle assertion is disabled during reset; that is the only
// synchronous use of rst_n and it exists only for verification.
module stereo_unit
  import retina_pkg::*;
#(
  parameter int NCOL   = 50,
  parameter int NBAND  = 10,
  parameter int BOFF   = 5,
  parameter int PITCH  = 64,
  parameter int CUT    = 96,
  parameter int SIGMA  = 32,
  parameter int WMAX   = 15,
  parameter int THRESH = 30,
  parameter int AW     = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  // event u/v hits (layer 0..5 = global 1,2,5,6,9,10)
  input  logic               wr_en,
  input  logic [AW-1:0]      wr_addr,
  input  logic [2:0]         wr_layer,
  input  coord_t             wr_coord,
  input  logic [AW:0]        nhits,
  // axial candidate
  input  logic               start,
  input  track_t             cand,
  output logic               busy,
  // result
  output logic               res_valid,
  output track_t             res,
  input  logic               res_ack
);

  localparam int TQ [NST] = '{t_q16(1), t_q16(2), t_q16(5), t_q16(6), t_q16(9), t_q16(10)};
  localparam int CW = $clog2(NCOL);
  localparam int RW = $clog2(NCOL + NBAND) + 1;

  typedef enum logic [3:0] {S_IDLE, S_CLR, S_XF, S_DRAIN, S_FIND, S_NEXT, S_CH, S_FIT, S_RES} state_t;
  state_t state;

  // raw u/v hit buffer
  logic [AW-1:0]  raw_raddr;
  logic [18:0]    raw_rdata;
  hit_buffer #(.W(19), .DEPTH(1 << AW)) u_raw (
    .clk, .we(wr_en), .waddr(wr_addr), .wdata({wr_layer, wr_coord}),
    .raddr(raw_raddr), .rdata(raw_rdata)
  );

  // transform
  logic [AW:0] idx;
  logic        rd_pend;
  logic        xf_valid, xf_acc;
  logic [2:0]  xf_layer;
  coord_t      xf_y;
  stereo_transform #(.YMIN(-CUT), .YMAX(NCOL * PITCH + CUT)) u_xf (
    .clk, .rst_n,
    .in_valid(rd_pend), .in_layer(raw_rdata[18:16]), .in_u(coord_t'(raw_rdata[15:0])),
    .a('{res.a0, res.a1, res.a2}),
    .out_valid(xf_valid), .out_layer(xf_layer), .out_y(xf_y), .out_in_acc(xf_acc)
  );
  wire xf_take = xf_valid && xf_acc && (state == S_XF || state == S_DRAIN);

  // y hit buffer
  logic [AW:0]   ny;
  logic [AW-1:0] y_raddr;
  logic [18:0]   y_rdata;
  hit_buffer #(.W(19), .DEPTH(1 << AW)) u_ybuf (
    .clk, .we(xf_take), .waddr(ny[AW-1:0]), .wdata({xf_layer, xf_y}),
    .raddr(y_raddr), .rdata(y_rdata)
  );

  // stereo retina
  logic               clr, find, pop, max_valid;
  logic [CW-1:0]      max_col;
  logic signed [RW-1:0] max_row;
  logic [ACC_W-1:0]   max_acc;
  retina_array #(
    .NCOL(NCOL), .NBAND(NBAND), .BOFF(BOFF), .PITCH(PITCH), .NL(NST), .TQ(TQ),
    .CUT(CUT), .SIGMA(SIGMA), .WMAX(WMAX), .THRESH(THRESH), .NSEC(1)
  ) u_ret (
    .clk, .rst_n, .clear(clr),
    .hit_valid(xf_take), .hit_layer(xf_layer), .hit_coord(xf_y), .hit_sec(1'b1),
    .find, .pop, .max_valid, .max_col, .max_row, .max_acc
  );

  // receptors of the current maximum
  logic [CW-1:0]        mc;
  logic signed [RW-1:0] mr;
  coord_t               rec [NST];
  logic signed [15:0]   ref0, ref1;
  always_comb begin
    for (int l = 0; l < NST; l++) rec[l] = coord_t'(receptor(int'(mc), int'(mr), PITCH, TQ[l]));
    ref0 = 16'(int'(mc) * PITCH + PITCH / 2);
    ref1 = 16'((int'(mr) - int'(mc)) * PITCH);
  end

  logic        ch_start, ch_done;
  logic [1:0]  cnt [NST];
  coord_t      hit [NST][2];
  closest_hits #(.NL(NST), .AW(AW), .CUT(CUT)) u_ch (
    .clk, .rst_n, .start(ch_start), .rec, .nhits(ny),
    .rd_addr(y_raddr), .rd_layer(y_rdata[18:16]), .rd_coord(coord_t'(y_rdata[15:0])),
    .done(ch_done), .cnt, .hit
  );

  logic               fit_start, fit_done, fit_ok;
  logic [15:0]        fit_chi2;
  logic signed [23:0] fit_par [3];
  logic [7:0]         fit_ncomb;
  comb_fit #(.NL(NST), .NPAR(2), .TQ(TQ)) u_fit (
    .clk, .rst_n, .start(fit_start), .rec, .ref0, .ref1, .cnt, .hit,
    .done(fit_done), .ok(fit_ok), .chi2(fit_chi2), .par(fit_par), .ncomb(fit_ncomb)
  );

  logic [2:0] drain;

  assign busy      = (state != S_IDLE);
  assign raw_raddr = idx[AW-1:0];
  assign clr       = (state == S_CLR);
  assign find      = (state == S_FIND);
  assign pop       = (state == S_NEXT) && max_valid;
  assign ch_start  = pop;
  assign fit_start = (state == S_CH) && ch_done;
  assign res_valid = (state == S_RES);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      idx     <= '0;
      rd_pend <= 1'b0;
      ny      <= '0;
      drain   <= '0;
      mc      <= '0;
      mr      <= '0;
      res     <= '0;
    end else begin
      rd_pend <= 1'b0;
      if (xf_take) ny <= ny + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          res          <= cand;
          res.st_found <= 1'b0;
          res.y0       <= '0;
          res.y11      <= '0;
          res.chi2_st  <= 16'hFFFF;
          state        <= S_CLR;
        end
        S_CLR: begin
          idx   <= '0;
          ny    <= '0;
          state <= S_XF;
        end
        S_XF: begin
          if (idx < nhits) begin
            rd_pend <= 1'b1;
            idx     <= idx + 1'b1;
          end else begin
            drain <= 3'd3;
            state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          drain <= drain - 3'd1;
          if (drain == 3'd1) state <= S_FIND;
        end
        S_FIND: state <= S_NEXT;
        S_NEXT: begin
          if (max_valid) begin
            mc    <= max_col;
            mr    <= max_row;
            state <= S_CH;
          end else begin
            state <= S_RES;
          end
        end
        S_CH:  if (ch_done) state <= S_FIT;
        S_FIT: if (fit_done) begin
          if (fit_ok && (!res.st_found || fit_chi2 < res.chi2_st)) begin
            res.st_found <= 1'b1;
            res.chi2_st  <= fit_chi2;
            res.y0       <= fit_par[0];
            res.y11      <= fit_par[0] + fit_par[1];
          end
          state <= S_NEXT;
        end
        S_RES: if (res_ack) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // A new candidate may only be handed to an idle unit.
  property p_start_idle;
    @(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE;
  endproperty
  a_start_idle: assert property (p_start_idle);

endmodule
