// closest_hits: picks, on each layer, the two hits nearest to the receptors
// of one retina cell.
//
// After `start` the block reads hits 0..nhits-1 of an event buffer (one
// address per cycle on rd_addr, data one cycle later on rd_layer/rd_coord)
// and keeps, per layer, the nearest and the second-nearest hit whose
// distance to that layer's receptor `rec` is below CUT -- the hits the cell
// itself took a weight from.  On a tie the earlier hit wins.  When the scan
// is over `done` pulses for one cycle and cnt[l] (0, 1 or 2) and hit[l][0]
// (nearest) / hit[l][1] hold the result until the next `start`.
// Latency: `done` is high nhits + 3 cycles after the cycle of `start` (2
// cycles for an empty buffer).
// From the paper: the fit uses the combinations of the two closest hits to
// the cell receptor on each layer.  Reading them back from a hit buffer,
// instead of storing them inside every engine, is this design's choice.
module closest_hits
  import retina_pkg::*;
#(
  parameter int NL  = 6,
  parameter int AW  = 10,
  parameter int CUT = 24,
  parameter int LW  = (NL > 1) ? $clog2(NL) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  coord_t         rec [NL],
  input  logic [AW:0]    nhits,
  output logic [AW-1:0]  rd_addr,
  input  logic [LW-1:0]  rd_layer,
  input  coord_t         rd_coord,
  output logic           done,
  output logic [1:0]     cnt [NL],
  output coord_t         hit [NL][2]
);

  logic              busy, pend;
  logic [AW:0]       idx;
  logic [COORD_W:0]  bestd [NL][2];
  logic [COORD_W:0]  ad;

  assign rd_addr = idx[AW-1:0];

  always_comb begin
    logic signed [COORD_W:0] d;
    d  = {rd_coord[COORD_W-1], rd_coord} - {rec[rd_layer][COORD_W-1], rec[rd_layer]};
    ad = d[COORD_W] ? (COORD_W+1)'(-d) : (COORD_W+1)'(d);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      pend <= 1'b0;
      done <= 1'b0;
      idx  <= '0;
      for (int l = 0; l < NL; l++) begin
        cnt[l]      <= '0;
        hit[l][0]   <= '0;
        hit[l][1]   <= '0;
        bestd[l][0] <= '0;
        bestd[l][1] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        pend <= 1'b0;
        idx  <= '0;
        for (int l = 0; l < NL; l++) cnt[l] <= '0;
      end else if (busy) begin
        // issue the next read
        pend <= idx < nhits;
        if (idx < nhits) idx <= idx + 1'b1;
        // evaluate the word read in the previous cycle
        if (pend && int'(ad) < CUT) begin
          if (cnt[rd_layer] == 2'd0 || ad < bestd[rd_layer][0]) begin
            hit[rd_layer][1]   <= hit[rd_layer][0];
            bestd[rd_layer][1] <= bestd[rd_layer][0];
            hit[rd_layer][0]   <= rd_coord;
            bestd[rd_layer][0] <= ad;
            if (cnt[rd_layer] != 2'd2) cnt[rd_layer] <= cnt[rd_layer] + 2'd1;
          end else if (cnt[rd_layer] == 2'd1 || ad < bestd[rd_layer][1]) begin
            hit[rd_layer][1]   <= rd_coord;
            bestd[rd_layer][1] <= ad;
            cnt[rd_layer]      <= 2'd2;
          end
        end
        if (!pend && idx >= nhits) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
