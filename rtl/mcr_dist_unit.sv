// mcr_dist_unit: the Distance Unit, modular Manhattan distance
//   delta(h, u) = sum_i min((h_i - u_i) mod r, (u_i - h_i) mod r).
//
// Structure (as drawn for the unit): for each of the SIMD lanes two b-bit
// subtractors (SUB1 = op1 - op2, SUB2 = op2 - op1, wrapped by overflow) feed
// a min circuit; the SIMD per-lane minima are registered (Stage0) and summed
// by a pipelined binary tree adder with log2(SIMD) registered levels; a final
// adder/accumulator (ADD/ACC) sums the per-line partial sums over the
// HVDIM/SIMD lines of the vectors.
//
// Interface: one line pair per cycle with in_valid. in_first marks the first
// line of a vector (the accumulator restarts instead of adding) and in_last
// the final one; the tags travel with the data through the pipeline. The
// distance of a vector pair appears on result with a one-cycle result_valid
// pulse 2 + log2(SIMD) cycles after its last line was presented, so a vector
// of HVDIM/SIMD lines takes HVDIM/SIMD + log2(SIMD) + 2 cycles; the two extra
// cycles are the Stage0 and ACC registers that the paper's latency formula
// does not count. Back-to-back vectors (in_first right after in_last) are
// supported, which is what the search loop relies on.
module mcr_dist_unit
  import mcr_pkg::*;
#(
  parameter int R     = DEF_R,
  parameter int SIMD  = DEF_SIMD,
  parameter int ACC_W = 24,
  localparam int B    = $clog2(R),
  localparam int LV   = $clog2(SIMD)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic                    in_last,
  input  logic [SIMD-1:0][B-1:0]  op1,
  input  logic [SIMD-1:0][B-1:0]  op2,
  output logic                    result_valid,
  output logic [ACC_W-1:0]        result
);

  // Tree of LV levels; level 0 is Stage0 (the registered minima).
  logic [SIMD-1:0][ACC_W-1:0] stage [LV+1];
  logic [LV:0]                v_q, f_q, l_q;
  logic [SIMD-1:0][B-1:0]     mins;

  always_comb begin
    for (int l = 0; l < SIMD; l++) begin
      logic [B-1:0] d1, d2;
      d1 = op1[l] - op2[l];          // SUB1
      d2 = op2[l] - op1[l];          // SUB2
      mins[l] = (d1 < d2) ? d1 : d2; // MIN
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= '0; f_q <= '0; l_q <= '0;
    end else begin
      v_q[0] <= in_valid; f_q[0] <= in_first; l_q[0] <= in_last;
      for (int s = 1; s <= LV; s++) begin
        v_q[s] <= v_q[s-1]; f_q[s] <= f_q[s-1]; l_q[s] <= l_q[s-1];
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < SIMD; l++) stage[0][l] <= ACC_W'(mins[l]);
    for (int s = 1; s <= LV; s++)
      for (int l = 0; l < SIMD; l++)
        if (l < (SIMD >> s)) stage[s][l] <= stage[s-1][2*l] + stage[s-1][2*l+1];
        else                 stage[s][l] <= '0;
  end

  // ADD / ACC
  logic [ACC_W-1:0] acc;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc          <= '0;
      result_valid <= 1'b0;
    end else begin
      result_valid <= v_q[LV] & l_q[LV];
      if (v_q[LV]) acc <= (f_q[LV] ? '0 : acc) + stage[LV][0];
    end
  end

  assign result = acc;

endmodule
