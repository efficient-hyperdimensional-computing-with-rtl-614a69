// tb_mcr_spm: fills a Z_r scratchpad (default 2 KB, 512 x 32 bits) with
// random lines and reads them back through both read ports, including a
// read of the line being written (old data expected).
module tb_mcr_spm;
  localparam int WIDTH = 32, BYTES = 2048, DEPTH = 512, AW = 9;
  logic clk = 0, ra_en = 0, rb_en = 0, w_en = 0;
  logic [AW-1:0] ra_addr, rb_addr, w_addr;
  logic [WIDTH-1:0] ra_data, rb_data, w_data;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  mcr_spm #(.WIDTH(WIDTH), .SPM_BYTES(BYTES)) dut (.*);

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
      w_en = 1; w_addr = AW'(i); w_data = $urandom; model[i] = w_data;
      @(negedge clk);
    end
    w_en = 0;
    for (int n = 0; n < 2000; n++) begin
      int a, b;
      a = $urandom_range(DEPTH - 1); b = $urandom_range(DEPTH - 1);
      ra_en = 1; rb_en = 1; ra_addr = AW'(a); rb_addr = AW'(b);
      // a concurrent write to line a: the read must return the old value
      w_en = n[0]; w_addr = AW'(a); w_data = $urandom;
      @(negedge clk);
      checks += 2;
      if (ra_data != model[a]) begin failures++; if (failures < 10) $display("FAIL A line %0d", a); end
      if (rb_data != model[b] && !(w_en && a == b)) begin failures++; if (failures < 10) $display("FAIL B line %0d", b); end
      if (w_en) model[a] = w_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
