// tb_mcr_trig_lut: every table entry against real-valued cos/sin, for the
// default modulus and for r = 8 and r = 64.
module tb_mcr_trig_lut;
  import mcr_ref_pkg::*;
  localparam int FP = 16, AMP = 31;
  int checks = 0, failures = 0;

  logic [7:0][3:0]  a16;  logic [7:0][FP-1:0] c16, s16;
  logic [7:0][2:0]  a8;   logic [7:0][FP-1:0] c8, s8;
  logic [7:0][5:0]  a64;  logic [7:0][FP-1:0] c64, s64;

  mcr_trig_lut #(.R(16), .FP(FP), .AMP(AMP), .NPORT(8))  d16 (.addr(a16), .cos_o(c16), .sin_o(s16));
  mcr_trig_lut #(.R(8),  .FP(FP), .AMP(1000), .NPORT(8)) d8  (.addr(a8),  .cos_o(c8),  .sin_o(s8));
  mcr_trig_lut #(.R(64), .FP(FP), .AMP(16383), .NPORT(8)) d64 (.addr(a64), .cos_o(c64), .sin_o(s64));

  task automatic chk(int got, int exp, string what, int k);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s k=%0d got=%0d exp=%0d", what, k, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 64; k++) begin
      for (int p = 0; p < 8; p++) begin
        a16[p] = 4'((k + p) % 16);
        a8[p]  = 3'((k + p) % 8);
        a64[p] = 6'((k + p) % 64);
      end
      #1;
      for (int p = 0; p < 8; p++) begin
        chk(int'($signed(c16[p])), ref_cos((k + p) % 16, 16, AMP), "cos16", k + p);
        chk(int'($signed(s16[p])), ref_sin((k + p) % 16, 16, AMP), "sin16", k + p);
        chk(int'($signed(c8[p])),  ref_cos((k + p) % 8, 8, 1000), "cos8", k + p);
        chk(int'($signed(s8[p])),  ref_sin((k + p) % 8, 8, 1000), "sin8", k + p);
        chk(int'($signed(c64[p])), ref_cos((k + p) % 64, 64, 16383), "cos64", k + p);
        chk(int'($signed(s64[p])), ref_sin((k + p) % 64, 64, 16383), "sin64", k + p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
