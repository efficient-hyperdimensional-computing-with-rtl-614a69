// tb_mcr_dist_unit: streams random vector pairs through the Distance Unit,
// single and back to back, and checks each distance against the integer
// reference and the result latency (last line + log2(SIMD) + 2 cycles).
module tb_mcr_dist_unit;
  import mcr_ref_pkg::*;
  localparam int R = 16, SIMD = 8, B = 4, DW = 24, LV = 3;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  logic [SIMD-1:0][B-1:0] op1, op2;
  logic result_valid;
  logic [DW-1:0] result;
  int checks = 0, failures = 0;
  int exp_q[$];
  int exp_t[$];
  int cyc = 0;

  mcr_dist_unit #(.R(R), .SIMD(SIMD), .ACC_W(DW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(posedge clk) if (rst_n && result_valid) begin
    int e, t;
    e = exp_q.pop_front();
    t = exp_t.pop_front();
    checks += 2;
    if (int'(result) != e) begin
      failures++; $display("FAIL dist got %0d exp %0d", result, e);
    end
    if (cyc != t) begin
      failures++; $display("FAIL latency at cycle %0d exp %0d", cyc, t);
    end
  end

  task automatic send_vec(int nl, bit gap);
    int sum = 0;
    for (int i = 0; i < nl; i++) begin
      for (int l = 0; l < SIMD; l++) begin
        op1[l] = B'($urandom_range(R - 1));
        op2[l] = B'($urandom_range(R - 1));
        sum += comp_dist(op1[l], op2[l], R);
      end
      in_valid = 1; in_first = (i == 0); in_last = (i == nl - 1);
      if (i == nl - 1) begin
        exp_q.push_back(sum);
        // sampled at cycle cyc now; result_valid seen LV+2 cycles later
        exp_t.push_back(cyc + LV + 2);
      end
      @(negedge clk);
    end
    in_valid = 0; in_first = 0; in_last = 0;
    if (gap) repeat (3) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 400; n++) send_vec(1 + n % 17, n % 3 == 0);
    // all-equal and all-opposite vectors: distance 0 and nl*SIMD*r/2
    for (int i = 0; i < 4; i++) begin
      op1 = '0; op2 = '0;
      for (int l = 0; l < SIMD; l++) begin op1[l] = B'(l); op2[l] = B'(l + R / 2); end
      in_valid = 1; in_first = (i == 0); in_last = (i == 3);
      if (i == 3) begin exp_q.push_back(4 * SIMD * R / 2); exp_t.push_back(cyc + LV + 2); end
      @(negedge clk);
    end
    in_valid = 0; in_last = 0;
    repeat (LV + 6) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
