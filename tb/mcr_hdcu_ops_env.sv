// mcr_hdcu_ops_env: test environment that runs every basic operation of one
// MCR-HDCU instance of a given SIMD width, used by tb_mcr_simd_sweep.
//
// For each HVDIM in {64, 512, 2048} it loads random vectors through the LSU,
// runs BIND, UNBIND, PERM (a random shift) and DIST, and, where the
// accumulator fits the superposition scratchpad (4*HVDIM bytes), SUP_INIT,
// SUP and NORM. Results are read back through the LSU and compared with the
// reference model, and the busy time of each command is compared with
// nl + 1, 2nl + 1, 2nl(r/4+1) + 2 and nl + log2(SIMD) + 3 cycles, where
// nl = HVDIM/SIMD. The busy times are printed as a table, one row per
// HVDIM. r, FP and the scratchpad size are the defaults.
// Ports: clk and rst_n in; done rises when the sequence has finished, with
// the number of checks and failures on the two counters.
module mcr_hdcu_ops_env
  import mcr_pkg::*;
  import mcr_ref_pkg::*;
#(
  parameter int SIMD = 8
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int R = DEF_R, FP = DEF_FP, B = $clog2(R), H = SIMD / 2, AMP = def_amp(DEF_FP);
  localparam int K = R / 4 + 1, L = $clog2(SIMD), ZW = B * SIMD, SW = FP * SIMD, DW = 24;
  localparam int ZL = DEF_SPM_BYTES * 8 / ZW;   // lines per Z_r scratchpad
  localparam int SL = DEF_SPM_BYTES * 8 / SW;   // lines of the accumulator scratchpad

  logic hdcu_req, hdcu_busy, result_valid;
  cmd_t hdcu_cmd;
  logic [DW-1:0] result;
  logic lsu_req, lsu_we, lsu_sup, lsu_gnt, lsu_rvalid;
  logic [1:0] lsu_spm;
  logic [CMD_AW-1:0] lsu_line;
  logic [SW-1:0] lsu_wdata, lsu_rdata;

  mcr_hdcu #(.SIMD(SIMD)) dut (.*);

  int zm [3][ZL][SIMD];
  int am [SL][SIMD];
  int last_result = -1;

  always @(posedge clk) if (result_valid) last_result = int'(result);

  task automatic chk(bit c, string w);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL SIMD=%0d: %s", SIMD, w);
    end
  endtask

  function automatic logic [ZW-1:0] pack_zr(int s, int line);
    logic [ZW-1:0] d;
    for (int l = 0; l < SIMD; l++) d[l*B +: B] = B'(zm[s][line][l]);
    return d;
  endfunction

  function automatic opnd_t od(int s, int line);
    opnd_t o;
    o.spm = 2'(s); o.line = CMD_AW'(line);
    return o;
  endfunction

  task automatic lsu_write_zr(int s, int line);
    lsu_req = 1; lsu_we = 1; lsu_sup = 0; lsu_spm = 2'(s); lsu_line = CMD_AW'(line);
    lsu_wdata = SW'(pack_zr(s, line));
    @(negedge clk);
    lsu_req = 0;
  endtask

  task automatic lsu_read(bit sup, int s, int line, output logic [SW-1:0] d);
    lsu_req = 1; lsu_we = 0; lsu_sup = sup; lsu_spm = 2'(s); lsu_line = CMD_AW'(line);
    @(negedge clk);
    lsu_req = 0;
    d = lsu_rdata;
  endtask

  task automatic check_zr(int s, int l0, int nl, string w);
    logic [SW-1:0] d;
    for (int i = 0; i < nl; i++) begin
      lsu_read(0, s, l0 + i, d);
      chk(d[ZW-1:0] == pack_zr(s, l0 + i), $sformatf("%s line %0d", w, i));
    end
  endtask

  task automatic exec(op_e op, opnd_t rd, opnd_t rs1, opnd_t rs2, output int bc);
    hdcu_cmd.op = op; hdcu_cmd.rd = rd; hdcu_cmd.rs1 = rs1; hdcu_cmd.rs2 = rs2;
    hdcu_req = 1;
    @(negedge clk);
    hdcu_req = 0;
    bc = 0;
    while (hdcu_busy) begin bc++; @(negedge clk); end
  endtask

  task automatic run_dim(int hvdim);
    int nl, bc, sh, dexp;
    int t_bind, t_sup, t_norm, t_perm, t_dist;
    logic [SW-1:0] d;
    nl = hvdim / SIMD;
    hdcu_cmd.op = OP_CFG; hdcu_cmd.rs1 = od(0, hvdim); hdcu_cmd.rs2 = od(0, 1);
    hdcu_req = 1; @(negedge clk); hdcu_req = 0;
    // operands: SPM0 lines 0.., SPM1 lines 0..
    for (int i = 0; i < nl; i++) begin
      for (int l = 0; l < SIMD; l++) begin
        zm[0][i][l] = $urandom_range(R - 1);
        zm[1][i][l] = $urandom_range(R - 1);
      end
      lsu_write_zr(0, i);
      lsu_write_zr(1, i);
    end
    // bind into SPM2, unbind back into SPM2 after it
    exec(OP_BIND, od(2, 0), od(0, 0), od(1, 0), bc);
    t_bind = bc;
    chk(bc == nl + 1, $sformatf("bind busy %0d exp %0d", bc, nl + 1));
    for (int i = 0; i < nl; i++)
      for (int l = 0; l < SIMD; l++) zm[2][i][l] = mod_r(zm[0][i][l] + zm[1][i][l], R);
    check_zr(2, 0, nl, "bind");
    if (2 * nl <= ZL) begin
      exec(OP_UNBIND, od(2, nl), od(2, 0), od(1, 0), bc);
      chk(bc == nl + 1, "unbind busy");
      for (int i = 0; i < nl; i++)
        for (int l = 0; l < SIMD; l++) zm[2][nl + i][l] = mod_r(zm[2][i][l] - zm[1][i][l], R);
      check_zr(2, nl, nl, "unbind");
      for (int i = 0; i < nl; i++) chk(pack_zr(2, nl + i) == pack_zr(0, i), "unbind restores");
    end
    // permutation of SPM0 into SPM1 (SPM1 is reloaded by the model)
    sh = $urandom_range(nl - 1);
    exec(OP_PERM, od(1, 0), od(0, 0), od(0, sh), bc);
    t_perm = bc;
    chk(bc == nl + 1, "perm busy");
    for (int i = 0; i < nl; i++)
      for (int l = 0; l < SIMD; l++) zm[1][i][l] = zm[0][(i - sh + nl) % nl][l];
    check_zr(1, 0, nl, $sformatf("perm by %0d", sh));
    // distance between SPM0 and SPM2, written to SPM1 after the permuted vector
    dexp = 0;
    for (int i = 0; i < nl; i++)
      for (int l = 0; l < SIMD; l++) dexp += comp_dist(zm[0][i][l], zm[2][i][l], R);
    exec(OP_DIST, od(1, ZL - 1), od(0, 0), od(2, 0), bc);
    t_dist = bc;
    chk(bc == nl + L + 3, $sformatf("dist busy %0d exp %0d", bc, nl + L + 3));
    chk(last_result == dexp, $sformatf("distance %0d exp %0d", last_result, dexp));
    lsu_read(0, 1, ZL - 1, d);
    chk(int'(d[ZW-1:0]) == (dexp & ((1 << ZW) - 1)), "distance in SPM");
    // superposition and normalization where the accumulator fits
    t_sup = -1; t_norm = -1;
    if (2 * nl <= SL) begin
      for (int v = 0; v < 3; v++) begin
        int s;
        s = (v == 0) ? 0 : (v == 1) ? 2 : 1;
        exec(v == 0 ? OP_SUP_INIT : OP_SUP, od(0, 0), od(s, 0), od(0, 0), bc);
        t_sup = bc;
        chk(bc == 2 * nl + 1, "sup busy");
        for (int c = 0; c < hvdim; c++) begin
          int k, j, l;
          k = zm[s][c / SIMD][c % SIMD];
          j = c / H; l = c % H;
          am[j][l]     = int'($signed(FP'((v == 0 ? 0 : am[j][l]) + ref_cos(k, R, AMP))));
          am[j][H + l] = int'($signed(FP'((v == 0 ? 0 : am[j][H + l]) + ref_sin(k, R, AMP))));
        end
      end
      for (int j = 0; j < 2 * nl; j++) begin
        lsu_read(1, 0, j, d);
        for (int l = 0; l < SIMD; l++) chk(d[l*FP +: FP] == FP'(am[j][l]), "accumulator");
      end
      exec(OP_NORM, od(2, 0), od(0, 0), od(0, 0), bc);
      t_norm = bc;
      chk(bc == 2 * nl * K + 2, $sformatf("norm busy %0d exp %0d", bc, 2 * nl * K + 2));
      for (int c = 0; c < hvdim; c++)
        zm[2][c / SIMD][c % SIMD] = ref_norm(longint'(am[c / H][c % H]),
                                             longint'(am[c / H][H + c % H]), R, AMP);
      check_zr(2, 0, nl, "norm");
    end
    $display("  SIMD %3d  HVDIM %5d  busy cycles: bind %4d  sup %4d  norm %5d  perm %4d  dist %4d%s",
             SIMD, hvdim, t_bind, t_sup, t_norm, t_perm, t_dist,
             (t_sup < 0) ? "  (accumulator does not fit: sup/norm skipped)" : "");
  endtask

  initial begin
    done = 0; checks = 0; failures = 0;
    hdcu_req = 0; hdcu_cmd = '0;
    lsu_req = 0; lsu_we = 0; lsu_sup = 0; lsu_spm = '0; lsu_line = '0; lsu_wdata = '0;
    wait (rst_n);
    @(negedge clk);
    run_dim(64);
    run_dim(512);
    run_dim(2048);
    done = 1;
  end
endmodule
