// tb_mcr_bind_unit: random binding and unbinding of SIMD-lane lines checked
// against integer modular arithmetic.
module tb_mcr_bind_unit;
  import mcr_ref_pkg::*;
  localparam int R = 16, SIMD = 8, B = 4;
  logic unbind;
  logic [SIMD-1:0][B-1:0] a, b, y;
  int checks = 0, failures = 0;

  mcr_bind_unit #(.R(R), .SIMD(SIMD)) dut (.unbind, .a, .b, .y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 400; n++) begin
      unbind = n[0];
      for (int l = 0; l < SIMD; l++) begin
        a[l] = B'($urandom_range(R - 1));
        b[l] = B'($urandom_range(R - 1));
      end
      #1;
      for (int l = 0; l < SIMD; l++) begin
        int e;
        e = unbind ? mod_r(int'(a[l]) - int'(b[l]), R) : mod_r(int'(a[l]) + int'(b[l]), R);
        checks++;
        if (int'(y[l]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d unbind=%0d a=%0d b=%0d y=%0d exp=%0d", l, unbind, a[l], b[l], y[l], e);
        end
      end
    end
    // binding followed by unbinding restores the operand
    for (int l = 0; l < SIMD; l++) begin a[l] = B'(l * 3 + 1); b[l] = B'(15 - l); end
    unbind = 0; #1;
    a = y; unbind = 1; #1;
    for (int l = 0; l < SIMD; l++) begin
      checks++;
      if (y[l] != B'(l * 3 + 1)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
