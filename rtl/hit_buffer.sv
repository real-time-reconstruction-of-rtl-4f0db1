// hit_buffer: simple dual-port event hit memory.
//
// Holds the hits of the event being processed so that, once a maximum has
// been found, its hits can be read back and the closest ones picked for the
// fit.  One write port and one read port; the read is synchronous, so data
// for the address presented in cycle n is on `rdata` in cycle n+1.  A write
// and a read of the same address in one cycle return the old word.
// The paper does not describe how hits are kept for the fit; this buffer, its
// depth (DEPTH hits per event and per hit class) and its one-cycle read
// latency are this design's own.
module hit_buffer #(
  parameter int W     = 19,
  parameter int DEPTH = 1024,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
