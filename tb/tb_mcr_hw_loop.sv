// tb_mcr_hw_loop: runs the nested loop counter for several trip-count
// combinations and compares every step's (rep, line, outer, iter, first/last
// flags) with a software nested loop; also checks the total step count.
module tb_mcr_hw_loop;
  localparam int W = 16;
  logic clk = 0, rst_n = 0, start = 0;
  logic [W-1:0] n_rep, n_line, n_outer, rep, line, outer, iter;
  logic active, rep_first, line_first, line_last, last;
  int checks = 0, failures = 0;

  mcr_hw_loop #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    n_rep = 1; n_line = 1; n_outer = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    chk(!active, "idle after reset");
    for (int t = 0; t < 27; t++) begin
      int nr, nln, no, it;
      nr = 1 + t % 3; nln = 1 + (t / 3) % 3 * 3; no = 1 + t / 9;
      n_rep = W'(nr); n_line = W'(nln); n_outer = W'(no);
      start = 1;
      @(negedge clk);
      start = 0;
      n_rep = '1; n_line = '1; n_outer = '1;   // trip counts are latched
      it = 0;
      for (int o = 0; o < no; o++)
        for (int l = 0; l < nln; l++)
          for (int r = 0; r < nr; r++) begin
            bit lst;
            lst = (o == no - 1) && (l == nln - 1) && (r == nr - 1);
            chk(active, "active");
            chk(int'(rep) == r && int'(line) == l && int'(outer) == o && int'(iter) == it,
                $sformatf("indices r%0d l%0d o%0d", r, l, o));
            chk(rep_first == (r == 0) && line_first == (l == 0) && line_last == (l == nln - 1), "flags");
            chk(last == lst, "last");
            @(negedge clk);
            if (r == nr - 1) it++;
          end
      chk(!active, "inactive after the last step");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
