// mcr_fu_map: the input, intermediate and output mapping of the FU cluster.
//
// Input mapping: the SPM read data (operands A and B of the Z_r SPMs and the
// accumulator line of the superposition SPM) are steered to the operand
// inputs of the functional unit that the current operation uses; the
// operands of idle units are held at zero so they do not toggle (operand
// isolation, this design's choice). The shared cos/sin LUT is addressed by
// the Superposition Unit during OP_SUP/OP_SUP_INIT and by the Normalization
// Unit otherwise.
// Intermediate mapping: the distances produced by the Distance Unit during a
// search are fed to the search logic, which closes the hardware search loop.
// Output mapping: the result of the active unit is selected onto the Z_r
// write port (binding, permutation, normalization words, or a scalar
// distance or class index zero-extended to a full line) and onto the
// accumulator write port (superposition). Purely combinational.
module mcr_fu_map
  import mcr_pkg::*;
#(
  parameter int R    = DEF_R,
  parameter int SIMD = DEF_SIMD,
  parameter int FP   = DEF_FP,
  parameter int DW   = 24,
  localparam int B   = $clog2(R),
  localparam int ZW  = B * SIMD,
  localparam int SW  = FP * SIMD,
  localparam int H   = SIMD / 2
) (
  input  op_e                   op,
  // SPM read data
  input  logic [ZW-1:0]         op_a,
  input  logic [ZW-1:0]         op_b,
  input  logic [SW-1:0]         acc_rd,
  // FU operands
  output logic [ZW-1:0]         bind_a,
  output logic [ZW-1:0]         bind_b,
  output logic [ZW-1:0]         dist_a,
  output logic [ZW-1:0]         dist_b,
  output logic [ZW-1:0]         sup_zr,
  output logic [SW-1:0]         sup_acc,
  output logic [SW-1:0]         norm_line,
  // shared LUT
  input  logic [H-1:0][B-1:0]   sup_lut_addr,
  input  logic [H-1:0][B-1:0]   norm_lut_addr,
  output logic [H-1:0][B-1:0]   lut_addr,
  // intermediate: distance -> search
  input  logic                  dist_valid,
  input  logic [DW-1:0]         dist_result,
  output logic                  search_valid,
  output logic [DW-1:0]         search_dist,
  // FU results
  input  logic [ZW-1:0]         bind_y,
  input  logic [ZW-1:0]         norm_word,
  input  logic [SW-1:0]         sup_y,
  input  logic [CMD_AW-1:0]     search_idx,
  // SPM write data
  output logic [ZW-1:0]         zr_wdata,
  output logic [SW-1:0]         acc_wdata,
  output logic [DW-1:0]         scalar
);

  logic is_bind, is_sup, is_norm, is_dist, is_search;

  always_comb begin
    is_bind   = (op == OP_BIND) || (op == OP_UNBIND);
    is_sup    = (op == OP_SUP)  || (op == OP_SUP_INIT);
    is_norm   = (op == OP_NORM);
    is_search = (op == OP_SEARCH);
    is_dist   = (op == OP_DIST) || is_search;

    bind_a    = is_bind ? op_a : '0;
    bind_b    = is_bind ? op_b : '0;
    dist_a    = is_dist ? op_a : '0;
    dist_b    = is_dist ? op_b : '0;
    sup_zr    = is_sup  ? op_a : '0;
    sup_acc   = is_sup  ? acc_rd : '0;
    norm_line = is_norm ? acc_rd : '0;
    lut_addr  = is_sup  ? sup_lut_addr : norm_lut_addr;

    search_valid = is_search & dist_valid;
    search_dist  = dist_result;

    scalar = is_search ? DW'(search_idx) : dist_result;
    unique case (op)
      OP_BIND, OP_UNBIND: zr_wdata = bind_y;
      OP_PERM:            zr_wdata = op_a;
      OP_NORM:            zr_wdata = norm_word;
      OP_DIST, OP_SEARCH: zr_wdata = ZW'(scalar);
      default:            zr_wdata = '0;
    endcase
    acc_wdata = sup_y;
  end

endmodule
