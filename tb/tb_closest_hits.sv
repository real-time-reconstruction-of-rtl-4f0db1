// tb_closest_hits: random events in a behavioural one-cycle-latency memory;
// the two nearest in-cut hits per layer are recomputed here by a stable
// sort, and the start-to-done latency is checked (nhits + 3 cycles, 2 when
// the buffer is empty).
module tb_closest_hits;
  import retina_pkg::*;
  localparam int NL = 6, AW = 8, CUT = 24;
  logic clk = 0, rst_n = 0, start = 0, done;
  coord_t rec [NL];
  logic [AW:0] nhits = 0;
  logic [AW-1:0] rd_addr;
  logic [2:0] rd_layer;
  coord_t rd_coord;
  logic [1:0] cnt [NL];
  coord_t hit [NL][2];
  logic [2:0] mem_l [1 << AW];
  coord_t     mem_c [1 << AW];
  int checks = 0, failures = 0;

  closest_hits #(.NL(NL), .AW(AW), .CUT(CUT)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    rd_layer <= mem_l[rd_addr];
    rd_coord <= mem_c[rd_addr];
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int ev = 0; ev < 60; ev++) begin
      int n, cyc;
      int ecnt [NL];
      int eb [NL][2];
      int ed [NL][2];
      n = (ev == 0) ? 0 : int'($urandom % 200);
      for (int l = 0; l < NL; l++) rec[l] = coord_t'(500 + int'($urandom % 2000));
      for (int i = 0; i < n; i++) begin
        mem_l[i] = 3'($urandom % NL);
        mem_c[i] = coord_t'(int'(rec[mem_l[i]]) + int'($urandom % 81) - 40);
      end
      // reference: keep the two smallest distances, earlier hit first on ties
      for (int l = 0; l < NL; l++) ecnt[l] = 0;
      for (int i = 0; i < n; i++) begin
        int l, d;
        l = mem_l[i];
        d = int'(mem_c[i]) - int'(rec[l]);
        if (d < 0) d = -d;
        if (d >= CUT) continue;
        if (ecnt[l] == 0) begin eb[l][0] = mem_c[i]; ed[l][0] = d; ecnt[l] = 1; end
        else if (d < ed[l][0]) begin
          eb[l][1] = eb[l][0]; ed[l][1] = ed[l][0];
          eb[l][0] = mem_c[i]; ed[l][0] = d; ecnt[l] = 2;
        end else if (ecnt[l] == 1 || d < ed[l][1]) begin
          eb[l][1] = mem_c[i]; ed[l][1] = d; ecnt[l] = 2;
        end
      end
      nhits = (AW+1)'(n);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != ((n == 0) ? 2 : n + 3)) begin
        failures++;
        $display("latency %0d for %0d hits", cyc, n);
      end
      for (int l = 0; l < NL; l++) begin
        checks++;
        if (int'(cnt[l]) != ecnt[l]) failures++;
        else begin
          if (ecnt[l] > 0 && int'(hit[l][0]) != eb[l][0]) failures++;
          if (ecnt[l] > 1 && int'(hit[l][1]) != eb[l][1]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
