// tb_mcr_sup_unit: the Superposition Unit with the shared cos/sin LUT,
// random accumulators and Z_r lines, both halves, with and without init,
// checked against real-valued cos/sin and FP-bit wrap-around addition.
module tb_mcr_sup_unit;
  import mcr_ref_pkg::*;
  localparam int R = 16, SIMD = 8, FP = 16, B = 4, H = 4, AMP = 31;
  logic half, init;
  logic [SIMD-1:0][B-1:0] zr_line;
  logic [SIMD-1:0][FP-1:0] acc_line, out_line;
  logic [H-1:0][B-1:0] lut_addr;
  logic [H-1:0][FP-1:0] lut_cos, lut_sin;
  int checks = 0, failures = 0;

  mcr_sup_unit #(.R(R), .SIMD(SIMD), .FP(FP)) dut (.*);
  mcr_trig_lut #(.R(R), .FP(FP), .AMP(AMP), .NPORT(H)) lut (.addr(lut_addr), .cos_o(lut_cos), .sin_o(lut_sin));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 300; n++) begin
      half = n[0]; init = (n % 5 == 0);
      for (int l = 0; l < SIMD; l++) begin
        zr_line[l]  = B'($urandom_range(R - 1));
        acc_line[l] = FP'($urandom);
      end
      #1;
      for (int l = 0; l < H; l++) begin
        int k, er, ei;
        k  = half ? zr_line[H + l] : zr_line[l];
        er = (init ? 0 : int'($signed(acc_line[l]))) + ref_cos(k, R, AMP);
        ei = (init ? 0 : int'($signed(acc_line[H + l]))) + ref_sin(k, R, AMP);
        checks += 2;
        if (out_line[l] != FP'(er)) begin failures++; $display("FAIL re lane %0d", l); end
        if (out_line[H + l] != FP'(ei)) begin failures++; $display("FAIL im lane %0d", l); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
