// mcr_ctrl: the control unit of the MCR-HDCU (FU controller and SPM access
// handler, driving the hardware loops in mcr_hw_loop).
//
// The host issues one decoded command (cmd_t) with hdcu_req while hdcu_busy
// is low; the command is taken in that cycle and hdcu_busy stays high until
// the whole vector operation has been written back. OP_CFG only loads the
// runtime registers HVDIM (components per vector, a multiple of SIMD) and
// HVCLASS (number of class prototypes for a search) and does not raise busy.
//
// Per operation, with nl = HVDIM/SIMD lines per vector, K = r/4+1 and
// L = log2(SIMD), the controller runs the loops below and issues one SPM
// access per step; read data reach the units one cycle later and results are
// written back the cycle after that (or when the unit reports them):
//   BIND/UNBIND  nl steps: read rs1+i, rs2+i, write rd+i       busy nl+1
//   PERM         nl steps: read rs1+src(i), write rd+i          busy nl+1
//   SUP(_INIT)   2nl steps: read Z_r rs1+i/2 (held two steps) and
//                accumulator rs2+i, write accumulator rs2+i      busy 2nl+1
//   NORM         2nl lines x K steps: read accumulator rs1+i on the first
//                step of a line, write rd+i/2 per finished word  busy 2nl*K+2
//   DIST         nl steps: read rs1+i, rs2+i, write the distance busy nl+L+3
//   SEARCH       HVCLASS x nl steps: read rs1+i, rs2+c*nl+i; prototypes lie
//                back to back; write the winning index            busy HVCLASS*nl+L+4
// The paper's latencies are nl, nl, 2nl, 2nl*K and nl+L; the remaining one to
// four cycles are the SPM read, the write-back and the Stage0/ACC registers
// of the Distance Unit. Operations whose unit is disabled by FU_EN, and
// OP_NOP, are accepted and ignored. The command encoding, this busy/req
// protocol and the placement of prototypes are this design's choices.
module mcr_ctrl
  import mcr_pkg::*;
#(
  parameter int R         = DEF_R,
  parameter int SIMD      = DEF_SIMD,
  parameter int FP        = DEF_FP,
  parameter int SPM_BYTES = DEF_SPM_BYTES,
  parameter logic [4:0] FU_EN = DEF_FU_EN,
  localparam int ZAW      = $clog2(SPM_BYTES * 8 / ($clog2(R) * SIMD)),
  localparam int SAW      = $clog2(SPM_BYTES * 8 / (FP * SIMD)),
  localparam int K        = R / 4 + 1,
  localparam int LSIMD    = $clog2(SIMD)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              hdcu_req,
  input  cmd_t              hdcu_cmd,
  output logic              hdcu_busy,
  output op_e               cur_op,
  output logic [CMD_AW-1:0] hvdim,
  output logic [CMD_AW-1:0] hvclass,
  // SPM accesses
  output logic              fa_en,
  output logic [1:0]        fa_spm,
  output logic [ZAW-1:0]    fa_line,
  output logic              fb_en,
  output logic [1:0]        fb_spm,
  output logic [ZAW-1:0]    fb_line,
  output logic              fs_en,
  output logic [SAW-1:0]    fs_line,
  output logic              fw_en,
  output logic [1:0]        fw_spm,
  output logic [ZAW-1:0]    fw_line,
  output logic              fws_en,
  output logic [SAW-1:0]    fws_line,
  // permutation address unit
  output logic [CMD_AW-1:0] perm_nl,
  output logic [CMD_AW-1:0] perm_shift,
  output logic [CMD_AW-1:0] perm_idx,
  input  logic [CMD_AW-1:0] perm_src,
  // functional-unit control
  output logic              sup_half,
  output logic              sup_init,
  output logic              norm_in_valid,
  output logic              norm_half,
  input  logic              norm_word_valid,
  output logic              dist_in_valid,
  output logic              dist_in_first,
  output logic              dist_in_last,
  input  logic              dist_result_valid,
  output logic              search_start,
  input  logic              search_done
);

  typedef enum logic {S_IDLE, S_RUN} state_e;
  state_e state;
  cmd_t   cmd_q;

  // hardware loops
  logic              lp_start, lp_active, lp_rep_first, lp_line_first, lp_line_last, lp_last;
  logic [CMD_AW-1:0] lp_nrep, lp_nline, lp_nouter;
  logic [CMD_AW-1:0] lp_rep, lp_line, lp_outer, lp_iter;

  mcr_hw_loop #(.W(CMD_AW)) u_loop (
    .clk, .rst_n,
    .start      (lp_start),
    .n_rep      (lp_nrep),
    .n_line     (lp_nline),
    .n_outer    (lp_nouter),
    .active     (lp_active),
    .rep        (lp_rep),
    .line       (lp_line),
    .outer      (lp_outer),
    .iter       (lp_iter),
    .rep_first  (lp_rep_first),
    .line_first (lp_line_first),
    .line_last  (lp_line_last),
    .last       (lp_last)
  );

  logic [CMD_AW-1:0] nl;
  assign nl = hvdim >> LSIMD;

  function automatic logic fu_on(op_e o);
    case (o)
      OP_BIND, OP_UNBIND: return FU_EN[FU_BIND];
      OP_SUP, OP_SUP_INIT: return FU_EN[FU_SUP];
      OP_NORM:            return FU_EN[FU_NORM];
      OP_PERM:            return FU_EN[FU_PERM];
      OP_DIST, OP_SEARCH: return FU_EN[FU_DIST];
      default:            return 1'b0;
    endcase
  endfunction

  logic accept;
  assign accept = (state == S_IDLE) && hdcu_req && hdcu_cmd.op != OP_CFG && fu_on(hdcu_cmd.op);

  always_comb begin
    lp_start  = accept;
    lp_nrep   = CMD_AW'(1);
    lp_nline  = nl;
    lp_nouter = CMD_AW'(1);
    case (hdcu_cmd.op)
      OP_SUP, OP_SUP_INIT: lp_nline = nl << 1;
      OP_NORM: begin lp_nline = nl << 1; lp_nrep = CMD_AW'(K); end
      OP_SEARCH: lp_nouter = hvclass;
      default: ;
    endcase
  end

  // ---- issue stage (combinational from the loop state) -----------------
  logic step;
  assign step   = (state == S_RUN) && lp_active;
  assign cur_op = cmd_q.op;

  assign perm_nl    = nl;
  assign perm_shift = cmd_q.rs2.line;
  assign perm_idx   = lp_line;

  always_comb begin
    fa_en = 1'b0; fb_en = 1'b0; fs_en = 1'b0;
    fa_spm = cmd_q.rs1.spm; fb_spm = cmd_q.rs2.spm;
    fa_line = ZAW'(cmd_q.rs1.line + lp_line);
    fb_line = ZAW'(cmd_q.rs2.line + lp_line);
    fs_line = SAW'(cmd_q.rs2.line + lp_line);
    if (step) begin
      unique case (cmd_q.op)
        OP_BIND, OP_UNBIND: begin fa_en = 1'b1; fb_en = 1'b1; end
        OP_PERM: begin
          fa_en   = 1'b1;
          fa_line = ZAW'(cmd_q.rs1.line + perm_src);
        end
        OP_SUP, OP_SUP_INIT: begin
          fa_en   = 1'b1;
          fa_line = ZAW'(cmd_q.rs1.line + (lp_line >> 1));
          fs_en   = 1'b1;
        end
        OP_NORM: begin
          fs_en   = lp_rep_first;
          fs_line = SAW'(cmd_q.rs1.line + lp_line);
        end
        OP_DIST, OP_SEARCH: begin
          fa_en   = 1'b1;
          fb_en   = 1'b1;
          fb_line = ZAW'(cmd_q.rs2.line + lp_iter);
        end
        default: ;
      endcase
    end
  end

  // ---- data stage (one cycle after the read) ----------------------------
  logic              p_v, p_last, p_half, p_first, p_lline;
  logic [CMD_AW-1:0] p_line;
  logic [CMD_AW-1:0] wcnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_v <= 1'b0; p_last <= 1'b0; p_half <= 1'b0; p_first <= 1'b0; p_lline <= 1'b0;
      p_line <= '0;
    end else begin
      p_v     <= step && (cmd_q.op != OP_NORM || lp_rep_first);
      p_last  <= lp_last;
      p_half  <= lp_line[0];
      p_first <= lp_line_first;
      p_lline <= lp_line_last;
      p_line  <= lp_line;
    end
  end

  assign sup_half      = p_half;
  assign sup_init      = (cmd_q.op == OP_SUP_INIT);
  assign norm_in_valid = p_v && cmd_q.op == OP_NORM;
  assign norm_half     = p_half;
  assign dist_in_valid = p_v && (cmd_q.op == OP_DIST || cmd_q.op == OP_SEARCH);
  assign dist_in_first = p_first;
  assign dist_in_last  = p_lline;
  assign search_start  = accept && hdcu_cmd.op == OP_SEARCH;

  // ---- write-back --------------------------------------------------------
  logic op_done;
  always_comb begin
    fw_en = 1'b0; fws_en = 1'b0; op_done = 1'b0;
    fw_spm   = cmd_q.rd.spm;
    fw_line  = ZAW'(cmd_q.rd.line + p_line);
    fws_line = SAW'(cmd_q.rs2.line + p_line);
    if (state == S_RUN) begin
      unique case (cmd_q.op)
        OP_BIND, OP_UNBIND, OP_PERM: begin
          fw_en = p_v; op_done = p_v && p_last;
        end
        OP_SUP, OP_SUP_INIT: begin
          fws_en = p_v; op_done = p_v && p_last;
        end
        OP_NORM: begin
          fw_en   = norm_word_valid;
          fw_line = ZAW'(cmd_q.rd.line + wcnt);
          op_done = norm_word_valid && (wcnt == nl - 1'b1);
        end
        OP_DIST: begin
          fw_en = dist_result_valid; fw_line = ZAW'(cmd_q.rd.line);
          op_done = dist_result_valid;
        end
        OP_SEARCH: begin
          fw_en = search_done; fw_line = ZAW'(cmd_q.rd.line);
          op_done = search_done;
        end
        default: op_done = 1'b1;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cmd_q   <= '0;
      hvdim   <= CMD_AW'(SIMD);
      hvclass <= CMD_AW'(1);
      wcnt    <= '0;
    end else begin
      if (state == S_IDLE) begin
        wcnt <= '0;
        if (hdcu_req && hdcu_cmd.op == OP_CFG) begin
          hvdim   <= hdcu_cmd.rs1.line;
          hvclass <= hdcu_cmd.rs2.line;
        end
        if (accept) begin
          cmd_q <= hdcu_cmd;
          state <= S_RUN;
        end
      end else begin
        if (fw_en) wcnt <= wcnt + 1'b1;
        if (op_done) state <= S_IDLE;
      end
    end
  end

  assign hdcu_busy = (state == S_RUN);

  // ---- protocol checks ---------------------------------------------------
  a_cfg_dim: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && hdcu_req && hdcu_cmd.op == OP_CFG) |->
      (hdcu_cmd.rs1.line != '0 && hdcu_cmd.rs1.line[LSIMD-1:0] == '0 && hdcu_cmd.rs2.line != '0))
    else $error("HVDIM must be a non-zero multiple of SIMD and HVCLASS non-zero");
  a_perm_shift: assert property (@(posedge clk) disable iff (!rst_n)
    (accept && hdcu_cmd.op == OP_PERM) |-> (hdcu_cmd.rs2.line < nl))
    else $error("permutation shift must be below HVDIM/SIMD");
  a_one_loop: assert property (@(posedge clk) disable iff (!rst_n)
    lp_start |-> !lp_active);

endmodule
