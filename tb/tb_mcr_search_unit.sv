// tb_mcr_search_unit: random distance sequences (with repeated minima)
// checked for the first index of the minimum and for done one cycle after
// the last distance.
module tb_mcr_search_unit;
  localparam int DW = 24, CW = 16;
  logic clk = 0, rst_n = 0, start = 0, dist_valid = 0, done;
  logic [CW-1:0] n_class, best_idx;
  logic [DW-1:0] dist_in, best_dist;
  int checks = 0, failures = 0;

  mcr_search_unit #(.DW(DW), .CW(CW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int n, bi, bd;
      n = 1 + t % 30;
      bi = 0; bd = 0;
      n_class = CW'(n);
      start = 1; @(negedge clk); start = 0;
      for (int c = 0; c < n; c++) begin
        int d;
        d = $urandom_range(20) * 10;
        if (c == 0 || d < bd) begin bd = d; bi = c; end
        dist_valid = 1; dist_in = DW'(d);
        @(negedge clk);
        dist_valid = 0;
        if (t % 2) @(negedge clk);  // gaps between classes
        checks++;
        if (done && c != n - 1) begin failures++; $display("FAIL early done"); end
      end
      if (t % 2 == 0) begin
        #1;
        checks++;
        if (!done) begin failures++; $display("FAIL done not one cycle after last"); end
      end else begin
        // with a gap, done was high in the cycle after the last distance
      end
      checks += 2;
      if (int'(best_idx) != bi) begin failures++; $display("FAIL idx %0d exp %0d", best_idx, bi); end
      if (int'(best_dist) != bd) begin failures++; $display("FAIL dist %0d exp %0d", best_dist, bd); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
