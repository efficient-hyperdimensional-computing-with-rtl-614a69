// mcr_trig_lut: the compact cos/sin lookup tables of the MCR-HDCU.
//
// For every value k of Z_r the tables hold round(AMP*cos(2*pi*k/r)) and
// round(AMP*sin(2*pi*k/r)) as signed FP-bit fixed-point numbers, i.e. the
// phasor that component value k stands for. NPORT independent read ports are
// provided so that SIMD/2 lanes can look up one value each per cycle. The
// table is purely combinational (a ROM); its contents are computed at
// elaboration time by mcr_pkg::trig_q from r and AMP.
//
// Following the paper, one pair of tables serves both the Superposition Unit
// (mapping Z_r components to Cartesian form) and the Normalization Unit
// (candidate directions). The amplitude AMP is this design's choice: the
// paper does not give the fixed-point scaling; the default leaves 10 bits of
// headroom so that up to 1024 superpositions fit in an FP-bit accumulator.
module mcr_trig_lut
  import mcr_pkg::*;
#(
  parameter int R     = DEF_R,
  parameter int FP    = DEF_FP,
  parameter int AMP   = def_amp(DEF_FP),
  parameter int NPORT = DEF_SIMD / 2,
  localparam int B    = $clog2(R)
) (
  input  logic [NPORT-1:0][B-1:0]         addr,
  output logic [NPORT-1:0][FP-1:0]        cos_o,
  output logic [NPORT-1:0][FP-1:0]        sin_o
);

  logic [FP-1:0] cos_rom [R];
  logic [FP-1:0] sin_rom [R];

  always_comb begin
    for (int k = 0; k < R; k++) begin
      cos_rom[k] = FP'(trig_q(k, R, AMP, 1'b0));
      sin_rom[k] = FP'(trig_q(k, R, AMP, 1'b1));
    end
  end

  always_comb begin
    for (int p = 0; p < NPORT; p++) begin
      cos_o[p] = cos_rom[addr[p]];
      sin_o[p] = sin_rom[addr[p]];
    end
  end

endmodule
