// mcr_norm_unit: the Normalization Unit, winner-take-all projection of
// Cartesian accumulators back onto Z_r.
//
// For a complex component v = (re, im) the result is
//   w = argmax_k ( re*cos(2*pi*k/r) + im*sin(2*pi*k/r) ),
// the direction with the largest inner product, which avoids division and
// atan2. The quadrant of v is read from the sign bits of re and im and only
// the r/4+1 directions of that closed quadrant are candidates:
//   re>=0, im>=0 -> k = 0 .. r/4        re<0, im>=0 -> k = r/4 .. r/2
//   re<0,  im<0  -> k = r/2 .. 3r/4     re>=0, im<0 -> k = 3r/4 .. r (= 0)
// Each of the SIMD/2 lanes has two signed multipliers and one adder and
// tests one candidate per cycle, so an accumulator line (SIMD/2 components,
// layout as in mcr_sup_unit) takes r/4+1 cycles and an HVDIM vector
// 2*HVDIM/SIMD*(r/4+1) cycles, the latency the paper gives. On a tie the
// lower candidate wins; a zero vector therefore maps to the first candidate
// of quadrant 0, i.e. 0. (The paper resolves a zero component by the mean of
// the bundled inputs, which the accumulator no longer holds; that rule is not
// implemented.)
//
// Interface: present a line with in_valid for one cycle, with in_half telling
// whether it is the lower (0) or upper (1) half of an output Z_r line. The
// next line may be presented r/4+1 cycles later, when in_ready is high again. One
// cycle after the last candidate of an upper half, word_valid pulses with the
// SIMD-component Z_r line in word. The candidate directions come from the
// shared cos/sin LUTs through lut_addr. Requires r >= 4.
module mcr_norm_unit
  import mcr_pkg::*;
#(
  parameter int R    = DEF_R,
  parameter int SIMD = DEF_SIMD,
  parameter int FP   = DEF_FP,
  localparam int B   = $clog2(R),
  localparam int H   = SIMD / 2,
  localparam int K   = R / 4 + 1,
  localparam int CW  = $clog2(K + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_half,
  input  logic [SIMD-1:0][FP-1:0] in_line,
  output logic                    in_ready,
  output logic [H-1:0][B-1:0]     lut_addr,
  input  logic [H-1:0][FP-1:0]    lut_cos,
  input  logic [H-1:0][FP-1:0]    lut_sin,
  output logic                    word_valid,
  output logic [SIMD-1:0][B-1:0]  word
);

  logic [SIMD-1:0][FP-1:0] line_q;
  logic                    half_q;
  logic                    busy;
  logic [CW-1:0]           cand;      // candidate being tested
  logic signed [2*FP:0]    best_ip [H];
  logic [B-1:0]            best_k  [H];
  logic [H-1:0][B-1:0]     lo_q;      // finished lower half

  logic [SIMD-1:0][FP-1:0] cur;
  logic [CW-1:0]           c_now;
  logic                    active;
  logic signed [2*FP:0]    ip      [H];
  logic [B-1:0]            k_now   [H];
  logic [B-1:0]            win_k   [H];

  assign active   = in_valid | busy;
  assign cur      = in_valid ? in_line : line_q;
  assign c_now    = in_valid ? '0 : cand;
  assign in_ready = !busy;

  // candidate directions (kept apart from the inner products so the LUT
  // address does not depend on the LUT data)
  always_comb begin
    for (int l = 0; l < H; l++) begin
      logic [1:0] quad;
      // quadrant 0..3 counter-clockwise, from the sign bits of re and im
      quad        = {cur[H + l][FP-1], cur[l][FP-1] ^ cur[H + l][FP-1]};
      k_now[l]    = B'({quad, {(B-2){1'b0}}}) + B'(c_now);
      lut_addr[l] = k_now[l];
    end
  end

  always_comb begin
    for (int l = 0; l < H; l++) begin
      ip[l] = (2*FP+1)'($signed(cur[l]) * $signed(lut_cos[l]))
            + (2*FP+1)'($signed(cur[H + l]) * $signed(lut_sin[l]));
      win_k[l] = (c_now == '0 || ip[l] > best_ip[l]) ? k_now[l] : best_k[l];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      cand       <= '0;
      half_q     <= 1'b0;
      word_valid <= 1'b0;
    end else begin
      word_valid <= 1'b0;
      if (in_valid) begin
        busy   <= 1'b1;
        cand   <= CW'(1);
        half_q <= in_half;
      end else if (busy) begin
        if (cand == CW'(K - 1)) begin
          busy <= 1'b0;
          cand <= '0;
          word_valid <= half_q;
        end else begin
          cand <= cand + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) line_q <= in_line;
    if (active) begin
      for (int l = 0; l < H; l++) begin
        if (c_now == '0 || ip[l] > best_ip[l]) begin
          best_ip[l] <= ip[l];
          best_k[l]  <= k_now[l];
        end
      end
    end
    // last candidate: the winner goes to the half it belongs to
    if (busy && !in_valid && cand == CW'(K - 1)) begin
      for (int l = 0; l < H; l++) begin
        if (half_q) word[H + l] <= win_k[l];
        else        lo_q[l]     <= win_k[l];
      end
      if (half_q) for (int l = 0; l < H; l++) word[l] <= lo_q[l];
    end
  end

endmodule
