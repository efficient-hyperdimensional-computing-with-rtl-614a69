// tb_mcr_norm_unit: the Normalization Unit with the shared LUT. Random
// Cartesian components in all quadrants (including exact multiples of the
// phasors, sums of phasors and the zero vector) are projected and compared
// with the reference winner-take-all and, for noise-free phasor multiples,
// with the known phase; the r/4+1 cycles per line are checked.
module tb_mcr_norm_unit;
  import mcr_ref_pkg::*;
  localparam int R = 16, SIMD = 8, FP = 16, B = 4, H = 4, AMP = 31, K = R / 4 + 1;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_half = 0, in_ready, word_valid;
  logic [SIMD-1:0][FP-1:0] in_line;
  logic [H-1:0][B-1:0] lut_addr;
  logic [H-1:0][FP-1:0] lut_cos, lut_sin;
  logic [SIMD-1:0][B-1:0] word;
  int checks = 0, failures = 0, cyc = 0;
  int exp_w[SIMD];

  mcr_norm_unit #(.R(R), .SIMD(SIMD), .FP(FP)) dut (.*);
  mcr_trig_lut #(.R(R), .FP(FP), .AMP(AMP), .NPORT(H)) lut (.addr(lut_addr), .cos_o(lut_cos), .sin_o(lut_sin));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one complex component; mode 0: m * phasor(k), 1: random, 2: sum of phasors
  task automatic make(int mode, output int re, output int im, output int known);
    known = -1;
    if (mode == 0) begin
      int k, m;
      k = $urandom_range(R - 1); m = $urandom_range(1, 200);
      re = m * ref_cos(k, R, AMP); im = m * ref_sin(k, R, AMP); known = k;
    end else if (mode == 1) begin
      re = int'($urandom_range(40000)) - 20000; im = int'($urandom_range(40000)) - 20000;
    end else begin
      re = 0; im = 0;
      for (int j = 0; j < 7; j++) begin
        int k; k = $urandom_range(R - 1);
        re += ref_cos(k, R, AMP); im += ref_sin(k, R, AMP);
      end
    end
  endtask

  task automatic run_word(int mode, bit zero);
    int t0;
    for (int hf = 0; hf < 2; hf++) begin
      for (int l = 0; l < H; l++) begin
        int re, im, kn;
        make(mode, re, im, kn);
        if (zero) begin re = 0; im = 0; kn = 0; end
        in_line[l] = FP'(re); in_line[H + l] = FP'(im);
        exp_w[hf * H + l] = ref_norm(longint'(re), longint'(im), R, AMP);
        if (kn >= 0) begin
          checks++;
          if (exp_w[hf * H + l] != kn) begin failures++; $display("FAIL reference phase %0d vs %0d", exp_w[hf*H+l], kn); end
        end
      end
      checks++;
      if (!in_ready) begin failures++; $display("FAIL not ready"); end
      in_valid = 1; in_half = hf[0];
      if (hf == 0) t0 = cyc;
      @(negedge clk);
      in_valid = 0;
      repeat (K - 1) @(negedge clk);
    end
    // word_valid is expected exactly 2K cycles after the first line
    while (!word_valid) @(negedge clk);
    checks++;
    if (cyc != t0 + 2 * K) begin failures++; $display("FAIL latency %0d exp %0d", cyc - t0, 2 * K); end
    for (int l = 0; l < SIMD; l++) begin
      checks++;
      if (int'(word[l]) != exp_w[l]) begin
        failures++; $display("FAIL lane %0d got %0d exp %0d (mode %0d)", l, word[l], exp_w[l], mode);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 150; n++) run_word(n % 3, 1'b0);
    run_word(0, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
