// tb_mcr_sup_spm: fills the superposition scratchpad (default 2 KB,
// 128 x 128 bits) and reads it back, with read-modify-write in place as the
// Superposition Unit uses it.
module tb_mcr_sup_spm;
  localparam int WIDTH = 128, BYTES = 2048, DEPTH = 128, AW = 7;
  logic clk = 0, r_en = 0, w_en = 0;
  logic [AW-1:0] r_addr, w_addr;
  logic [WIDTH-1:0] r_data, w_data;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  mcr_sup_spm #(.WIDTH(WIDTH), .SPM_BYTES(BYTES)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      w_en = 1; w_addr = AW'(i);
      w_data = {$urandom, $urandom, $urandom, $urandom}; model[i] = w_data;
      @(negedge clk);
    end
    w_en = 0;
    for (int n = 0; n < 1000; n++) begin
      int a;
      a = $urandom_range(DEPTH - 1);
      r_en = 1; r_addr = AW'(a);
      w_en = n[0]; w_addr = AW'(a); w_data = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk);
      checks++;
      if (r_data != model[a]) begin failures++; if (failures < 10) $display("FAIL line %0d", a); end
      if (w_en) model[a] = w_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
