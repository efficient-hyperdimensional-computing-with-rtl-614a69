// mcr_sup_unit: the Superposition Unit (bundling in Cartesian form).
//
// Superposition of MCR vectors maps each component value k in Z_r to the
// phasor (cos 2*pi*k/r, sin 2*pi*k/r) and adds the phasors. Normalization
// back to Z_r is a separate operation (mcr_norm_unit), so that many vectors
// can be accumulated at FP-bit fixed-point precision before one final
// projection.
//
// One accumulator line of the superposition SPM holds SIMD/2 complex
// components: lanes 0..SIMD/2-1 are the real parts and lanes
// SIMD/2..SIMD-1 the imaginary parts of the same SIMD/2 components (this
// line layout is this design's choice). A Z_r line holds SIMD components, so
// it is held for two cycles: half = 0 processes its lower SIMD/2 components
// against one accumulator line, half = 1 its upper SIMD/2 components against
// the next. Each selected component addresses the shared cos/sin LUTs
// (lut_addr); cos is added to the real part and sin to the imaginary part
// (two banks of SIMD/2 FP-bit adders, wrap-around on overflow). With init = 1
// the accumulator input is taken as zero, which starts a new bundle without a
// separate clearing pass (an addition of this design).
//
// Combinational; with one accumulator line per cycle an HVDIM vector takes
// 2*HVDIM/SIMD cycles, as in the paper.
module mcr_sup_unit
  import mcr_pkg::*;
#(
  parameter int R    = DEF_R,
  parameter int SIMD = DEF_SIMD,
  parameter int FP   = DEF_FP,
  localparam int B   = $clog2(R),
  localparam int H   = SIMD / 2
) (
  input  logic                    half,
  input  logic                    init,
  input  logic [SIMD-1:0][B-1:0]  zr_line,   // Z_r operand (rs1)
  input  logic [SIMD-1:0][FP-1:0] acc_line,  // Data_read from the SPM
  output logic [H-1:0][B-1:0]     lut_addr,
  input  logic [H-1:0][FP-1:0]    lut_cos,
  input  logic [H-1:0][FP-1:0]    lut_sin,
  output logic [SIMD-1:0][FP-1:0] out_line   // Data_write to the SPM
);

  always_comb begin
    for (int l = 0; l < H; l++)
      lut_addr[l] = half ? zr_line[H + l] : zr_line[l];
  end

  always_comb begin
    for (int l = 0; l < H; l++) begin
      out_line[l]    = (init ? '0 : acc_line[l])     + lut_cos[l];  // Real_out
      out_line[H + l] = (init ? '0 : acc_line[H + l]) + lut_sin[l]; // Imag_out
    end
  end

endmodule
