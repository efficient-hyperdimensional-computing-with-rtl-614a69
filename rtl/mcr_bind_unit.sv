// mcr_bind_unit: binding and unbinding of MCR hypervectors.
//
// Binding is the component-wise modular sum c_i = (h_i + u_i) mod r and
// unbinding the component-wise modular difference c_i = (h_i - u_i) mod r.
// With r a power of two and b = log2(r) bits per component the modulo is the
// natural overflow of a b-bit adder, so the unit is SIMD b-bit
// adders/subtractors working in parallel on one SPM line (SIMD components).
// It is combinational; the controller streams HVDIM/SIMD lines through it,
// one per cycle, which gives the paper's latency of HVDIM/SIMD cycles plus
// the one-cycle SPM read.
module mcr_bind_unit
  import mcr_pkg::*;
#(
  parameter int R    = DEF_R,
  parameter int SIMD = DEF_SIMD,
  localparam int B   = $clog2(R)
) (
  input  logic                     unbind,  // 0: a + b, 1: a - b
  input  logic [SIMD-1:0][B-1:0]   a,
  input  logic [SIMD-1:0][B-1:0]   b,
  output logic [SIMD-1:0][B-1:0]   y
);

  always_comb begin
    for (int l = 0; l < SIMD; l++)
      y[l] = unbind ? (a[l] - b[l]) : (a[l] + b[l]);
  end

endmodule
