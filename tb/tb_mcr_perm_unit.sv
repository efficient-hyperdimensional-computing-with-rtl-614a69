// tb_mcr_perm_unit: exhaustive source-line indices for vectors of 1..40 lines
// and every shift below the line count, checked against (i - s) mod nl; also
// checks that the mapping is a bijection.
module tb_mcr_perm_unit;
  localparam int AW = 16;
  logic [AW-1:0] nl, shift, out_idx, src_idx;
  int checks = 0, failures = 0;

  mcr_perm_unit #(.AW(AW)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 1; n <= 40; n++) begin
      for (int s = 0; s < n; s++) begin
        bit seen [64];
        foreach (seen[i]) seen[i] = 0;
        for (int i = 0; i < n; i++) begin
          nl = AW'(n); shift = AW'(s); out_idx = AW'(i);
          #1;
          checks++;
          if (int'(src_idx) != (i - s + n) % n) begin
            failures++;
            if (failures < 10) $display("FAIL nl=%0d s=%0d i=%0d got %0d", n, s, i, src_idx);
          end
          if (src_idx < 64) seen[src_idx] = 1;
        end
        for (int i = 0; i < n; i++) begin
          checks++;
          if (!seen[i]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
