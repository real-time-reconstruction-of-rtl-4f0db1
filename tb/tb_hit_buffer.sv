// tb_hit_buffer: writes random words, reads them back and checks the
// one-cycle read latency and the read-before-write behaviour.
module tb_hit_buffer;
  localparam int W = 19, DEPTH = 64, AW = 6;
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  hit_buffer #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = W'($urandom); model[i] = wdata;
    end
    for (int n = 0; n < 500; n++) begin
      logic [W-1:0] expv;
      @(negedge clk);
      raddr = AW'($urandom);
      we    = ($urandom % 2) == 0;
      waddr = ($urandom % 4 == 0) ? raddr : AW'($urandom);
      wdata = W'($urandom);
      expv  = model[raddr];
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== expv) begin
        failures++;
        if (failures < 10) $display("read %0d got %h exp %h", raddr, rdata, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
