// mcr_perm_unit: the Permutation Unit, a block-cyclic permutation done by
// read-address remapping.
//
// Instead of shuffling components inside an SPM line, whole lines (blocks of
// SIMD components) are rotated: output line i of an HV of nl = HVDIM/SIMD
// lines is input line (i - shift) mod nl, so the vector is streamed out of
// the SPM already permuted. This gives nl distinct permutations (all
// block-level cyclic shifts). The rotation direction (towards higher line
// indices) is this design's choice; the paper only says read addresses are
// offset by multiples of SIMD lanes.
//
// The unit is the address arithmetic: given the output line index it returns
// the source line index. shift must be below nl (shift values of nl or more
// are taken modulo nl by one conditional subtraction only, so callers keep
// shift < nl). Combinational; HVDIM/SIMD cycles per vector.
module mcr_perm_unit
  import mcr_pkg::*;
#(
  parameter int AW = CMD_AW
) (
  input  logic [AW-1:0] nl,       // lines per hypervector
  input  logic [AW-1:0] shift,    // rotation in lines (blocks)
  input  logic [AW-1:0] out_idx,  // output line index, 0..nl-1
  output logic [AW-1:0] src_idx   // line to read
);

  logic [AW-1:0] s;
  logic [AW:0]   diff;

  always_comb begin
    s    = (shift >= nl) ? shift - nl : shift;
    diff = {1'b0, out_idx} - {1'b0, s};
    src_idx = diff[AW] ? AW'(diff) + nl : AW'(diff);
  end

endmodule
