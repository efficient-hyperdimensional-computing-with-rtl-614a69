// tb_mcr_simd_sweep: the basic operations of the MCR-HDCU at the four SIMD
// widths 8, 16, 32 and 64 and the vector sizes 64, 512 and 2048, the grid the
// per-operation timings of the design are usually quoted for.
//
// Four instances of mcr_hdcu_ops_env, one per SIMD width, run side by side
// from one clock; each checks its results and busy times against the
// reference model and prints its cycle counts. The test passes when all four
// finish with no failure. r, FP and the scratchpad size are the defaults.
module tb_mcr_simd_sweep;
  logic clk = 0, rst_n = 0;
  logic done [4];
  int ck [4], fl [4];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mcr_hdcu_ops_env #(.SIMD(8))  e8  (.clk, .rst_n, .done(done[0]), .checks(ck[0]), .failures(fl[0]));
  mcr_hdcu_ops_env #(.SIMD(16)) e16 (.clk, .rst_n, .done(done[1]), .checks(ck[1]), .failures(fl[1]));
  mcr_hdcu_ops_env #(.SIMD(32)) e32 (.clk, .rst_n, .done(done[2]), .checks(ck[2]), .failures(fl[2]));
  mcr_hdcu_ops_env #(.SIMD(64)) e64 (.clk, .rst_n, .done(done[3]), .checks(ck[3]), .failures(fl[3]));

  initial begin
    repeat (200000) @(posedge clk);
    for (int i = 0; i < 4; i++) begin checks += ck[i]; failures += fl[i]; end
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done[0] && done[1] && done[2] && done[3]);
    @(negedge clk);
    for (int i = 0; i < 4; i++) begin checks += ck[i]; failures += fl[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
