// mcr_hdcu: MCR-HDCU, a coprocessor for Modular Composite Representation
// (MCR) hypervectors, top level.
//
// An MCR hypervector has HVDIM components in Z_r (r a power of two, b =
// log2 r bits each). The coprocessor executes whole-vector operations on
// vectors held in local scratchpads, SIMD components per cycle:
//   binding / unbinding   component-wise modular add / subtract
//   superposition         add the phasors (cos, sin) of a vector's
//                         components to a fixed-point Cartesian accumulator
//   normalization         project an accumulator back to Z_r by a
//                         winner-take-all over the r/4+1 quadrant directions
//   permutation           block-cyclic rotation by whole SPM lines
//   distance              modular Manhattan distance
//   search                index of the nearest of HVCLASS prototypes
//
// Structure: the control unit (mcr_ctrl with its hardware loops) takes a
// decoded command from the host (hdcu_req / hdcu_busy), the SPMI (mcr_spmi)
// holds three Z_r scratchpads of b*SIMD-bit lines and one superposition
// scratchpad of FP*SIMD-bit lines, the mapping logic (mcr_fu_map) steers
// operands and results, and the functional units are mcr_bind_unit,
// mcr_sup_unit, mcr_norm_unit, mcr_perm_unit, mcr_dist_unit and
// mcr_search_unit; the last two together form the search. One pair of
// cos/sin tables (mcr_trig_lut) is shared by superposition and
// normalization. FU_EN removes units at elaboration time.
//
// The host core, its instruction decoding and main memory are outside: the
// command arrives already decoded (cmd_t in mcr_pkg), and the host's
// load/store unit reaches the scratchpads through the lsu_* port while the
// coprocessor is idle. DIST and SEARCH also return their scalar on
// result/result_valid, in the cycle it is written to the SPM.
// Timing of each operation: see mcr_ctrl.
module mcr_hdcu
  import mcr_pkg::*;
#(
  parameter int R         = DEF_R,
  parameter int SIMD      = DEF_SIMD,
  parameter int FP        = DEF_FP,
  parameter int SPM_BYTES = DEF_SPM_BYTES,
  parameter int N_ZR_SPM  = DEF_N_ZR_SPM,
  parameter logic [4:0] FU_EN = DEF_FU_EN,
  parameter int AMP       = def_amp(FP),
  parameter int DW        = 24,
  localparam int B        = $clog2(R),
  localparam int ZW       = B * SIMD,
  localparam int SW       = FP * SIMD,
  localparam int H        = SIMD / 2,
  localparam int ZAW      = $clog2(SPM_BYTES * 8 / ZW),
  localparam int SAW      = $clog2(SPM_BYTES * 8 / SW)
) (
  input  logic              clk,
  input  logic              rst_n,
  // command interface from the host core
  input  logic              hdcu_req,
  input  cmd_t              hdcu_cmd,
  output logic              hdcu_busy,
  output logic              result_valid,
  output logic [DW-1:0]     result,
  // LSU access to the scratchpads
  input  logic              lsu_req,
  input  logic              lsu_we,
  input  logic              lsu_sup,
  input  logic [1:0]        lsu_spm,
  input  logic [CMD_AW-1:0] lsu_line,
  input  logic [SW-1:0]     lsu_wdata,
  output logic              lsu_gnt,
  output logic              lsu_rvalid,
  output logic [SW-1:0]     lsu_rdata
);

  op_e               cur_op;
  logic [CMD_AW-1:0] hvdim, hvclass;
  logic              fa_en, fb_en, fs_en, fw_en, fws_en;
  logic [1:0]        fa_spm, fb_spm, fw_spm;
  logic [ZAW-1:0]    fa_line, fb_line, fw_line;
  logic [SAW-1:0]    fs_line, fws_line;
  logic [CMD_AW-1:0] perm_nl, perm_shift, perm_idx, perm_src;
  logic              sup_half, sup_init;
  logic              norm_in_valid, norm_half, norm_word_valid, norm_ready;
  logic              dist_in_valid, dist_in_first, dist_in_last, dist_result_valid;
  logic [DW-1:0]     dist_result;
  logic              search_start, search_done, search_valid;
  logic [DW-1:0]     search_dist, search_best_dist, scalar;
  logic [CMD_AW-1:0] search_idx;

  logic [ZW-1:0]     op_a, op_b, zr_wdata;
  logic [SW-1:0]     acc_rd, acc_wdata;
  logic [ZW-1:0]     bind_a, bind_b, bind_y, dist_a, dist_b, sup_zr, norm_word;
  logic [SW-1:0]     sup_acc, sup_y, norm_line;
  logic [H-1:0][B-1:0]  lut_addr, sup_lut_addr, norm_lut_addr;
  logic [H-1:0][FP-1:0] lut_cos, lut_sin;

  mcr_ctrl #(.R(R), .SIMD(SIMD), .FP(FP), .SPM_BYTES(SPM_BYTES), .FU_EN(FU_EN)) u_ctrl (
    .clk, .rst_n, .hdcu_req, .hdcu_cmd, .hdcu_busy, .cur_op, .hvdim, .hvclass,
    .fa_en, .fa_spm, .fa_line, .fb_en, .fb_spm, .fb_line, .fs_en, .fs_line,
    .fw_en, .fw_spm, .fw_line, .fws_en, .fws_line,
    .perm_nl, .perm_shift, .perm_idx, .perm_src,
    .sup_half, .sup_init, .norm_in_valid, .norm_half, .norm_word_valid,
    .dist_in_valid, .dist_in_first, .dist_in_last, .dist_result_valid,
    .search_start, .search_done
  );

  mcr_spmi #(.R(R), .SIMD(SIMD), .FP(FP), .SPM_BYTES(SPM_BYTES), .N_ZR_SPM(N_ZR_SPM)) u_spmi (
    .clk, .rst_n, .busy(hdcu_busy),
    .fa_en, .fa_spm, .fa_line, .fb_en, .fb_spm, .fb_line, .fs_en, .fs_line,
    .fw_en, .fw_spm, .fw_line, .fw_data(zr_wdata),
    .fws_en, .fws_line, .fws_data(acc_wdata),
    .op_a, .op_b, .acc_rd,
    .lsu_req, .lsu_we, .lsu_sup, .lsu_spm, .lsu_line, .lsu_wdata,
    .lsu_gnt, .lsu_rvalid, .lsu_rdata
  );

  mcr_fu_map #(.R(R), .SIMD(SIMD), .FP(FP), .DW(DW)) u_map (
    .op(cur_op), .op_a, .op_b, .acc_rd,
    .bind_a, .bind_b, .dist_a, .dist_b, .sup_zr, .sup_acc, .norm_line,
    .sup_lut_addr, .norm_lut_addr, .lut_addr,
    .dist_valid(dist_result_valid), .dist_result, .search_valid, .search_dist,
    .bind_y, .norm_word, .sup_y, .search_idx,
    .zr_wdata, .acc_wdata, .scalar
  );

  mcr_trig_lut #(.R(R), .FP(FP), .AMP(AMP), .NPORT(H)) u_lut (
    .addr(lut_addr), .cos_o(lut_cos), .sin_o(lut_sin)
  );

  mcr_perm_unit #(.AW(CMD_AW)) u_perm (
    .nl(perm_nl), .shift(perm_shift), .out_idx(perm_idx), .src_idx(perm_src)
  );

  if (FU_EN[FU_BIND]) begin : g_bind
    mcr_bind_unit #(.R(R), .SIMD(SIMD)) u_bind (
      .unbind(cur_op == OP_UNBIND), .a(bind_a), .b(bind_b), .y(bind_y)
    );
  end else begin : g_no_bind
    assign bind_y = '0;
  end

  if (FU_EN[FU_SUP]) begin : g_sup
    mcr_sup_unit #(.R(R), .SIMD(SIMD), .FP(FP)) u_sup (
      .half(sup_half), .init(sup_init), .zr_line(sup_zr), .acc_line(sup_acc),
      .lut_addr(sup_lut_addr), .lut_cos, .lut_sin, .out_line(sup_y)
    );
  end else begin : g_no_sup
    assign sup_y = '0;
    assign sup_lut_addr = '0;
  end

  if (FU_EN[FU_NORM]) begin : g_norm
    mcr_norm_unit #(.R(R), .SIMD(SIMD), .FP(FP)) u_norm (
      .clk, .rst_n, .in_valid(norm_in_valid), .in_half(norm_half),
      .in_line(norm_line), .in_ready(norm_ready), .lut_addr(norm_lut_addr),
      .lut_cos, .lut_sin, .word_valid(norm_word_valid), .word(norm_word)
    );
  end else begin : g_no_norm
    assign norm_word_valid = 1'b0;
    assign norm_word = '0;
    assign norm_lut_addr = '0;
    assign norm_ready = 1'b1;
  end

  if (FU_EN[FU_DIST]) begin : g_dist
    mcr_dist_unit #(.R(R), .SIMD(SIMD), .ACC_W(DW)) u_dist (
      .clk, .rst_n, .in_valid(dist_in_valid), .in_first(dist_in_first),
      .in_last(dist_in_last), .op1(dist_a), .op2(dist_b),
      .result_valid(dist_result_valid), .result(dist_result)
    );
    mcr_search_unit #(.DW(DW), .CW(CMD_AW)) u_search (
      .clk, .rst_n, .start(search_start), .n_class(hvclass),
      .dist_valid(search_valid), .dist_in(search_dist),
      .done(search_done), .best_idx(search_idx), .best_dist(search_best_dist)
    );
  end else begin : g_no_dist
    assign dist_result_valid = 1'b0;
    assign dist_result = '0;
    assign search_done = 1'b0;
    assign search_idx = '0;
    assign search_best_dist = '0;
  end

  assign result_valid = fw_en && (cur_op == OP_DIST || cur_op == OP_SEARCH);
  assign result       = scalar;

  a_norm_ready: assert property (@(posedge clk) disable iff (!rst_n)
    norm_in_valid |-> norm_ready)
    else $error("normalization line issued while the unit is busy");

  // The modulo comes for free from binary overflow only when r is a power of
  // two; the quadrant logic needs r >= 4 and the lane split an even SIMD.
  if (R < 4 || (R & (R - 1)) != 0) begin : g_bad_r
    $error("R must be a power of two and at least 4");
  end
  if (SIMD < 2 || (SIMD & (SIMD - 1)) != 0) begin : g_bad_simd
    $error("SIMD must be a power of two and at least 2");
  end
  if (N_ZR_SPM < 1 || N_ZR_SPM > 4) begin : g_bad_nspm
    $error("N_ZR_SPM must be 1 to 4 (two-bit scratchpad field)");
  end

endmodule
