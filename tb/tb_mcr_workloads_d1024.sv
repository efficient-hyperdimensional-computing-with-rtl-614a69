// tb_mcr_workloads_d1024: classification workloads with hypervectors of
// D = 1024 components, the size used for the accuracy and speed-up results
// of MCR-4 on tabular data sets.
//
// At D = 1024 an accumulator takes 4 KB, twice the default superposition
// scratchpad, so this test builds the coprocessor with SPM_BYTES = 4096
// (all four scratchpads 4 KB) and otherwise default parameters. A Z_r
// scratchpad then holds eight vectors; the shapes whose prototypes fit the
// scratchpads (HabermanSurvival d=3 c=2, Adult d=14 c=2, UCIHAR d=561 c=6,
// Cardio10 d=21 c=10) are run, the last with its search split over two
// scratchpads. The flow, the synthetic data and the checks are those of
// tb_mcr_workloads: every key and level vector is streamed in through the
// LSU, each feature is bound and superimposed, the bundle is normalized and
// searched, and the accumulator, the query, the class and the busy time of
// every command are compared with the reference model. The printed kernel
// cycles can be set against published times for these shapes at 150 MHz.
module tb_mcr_workloads_d1024;
  import mcr_pkg::*;
  import mcr_ref_pkg::*;
  localparam int R = 16, SIMD = 8, FP = 16, B = 4, H = SIMD / 2, AMP = 31;
  localparam int K = R / 4 + 1, L = 3, ZW = B * SIMD, SW = FP * SIMD, DW = 24;
  localparam int D = 1024, NL = D / SIMD, NLEV = 16;
  localparam int SPM_BYTES = 4096, ZL = SPM_BYTES * 8 / ZW;
  localparam int P1 = ZL / NL, P2 = (ZL - 2 * NL) / NL;  // prototypes per scratchpad
  localparam int NSET = 4;
  localparam string SET_NAME [NSET] = '{"HabermanSurvival", "Adult", "UCIHAR", "Cardio10"};
  localparam int SET_D [NSET] = '{3, 14, 561, 21};
  localparam int SET_C [NSET] = '{2, 2, 6, 10};

  logic clk = 0, rst_n = 0;
  logic hdcu_req = 0, hdcu_busy, result_valid;
  cmd_t hdcu_cmd;
  logic [DW-1:0] result;
  logic lsu_req = 0, lsu_we = 0, lsu_sup = 0, lsu_gnt, lsu_rvalid;
  logic [1:0] lsu_spm;
  logic [CMD_AW-1:0] lsu_line;
  logic [SW-1:0] lsu_wdata, lsu_rdata;

  mcr_hdcu #(.SPM_BYTES(SPM_BYTES)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int last_result = -1;
  int n_split = 0, n_hit = 0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (result_valid) last_result = int'(result);

  task automatic chk(bit c, string w);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", w); end
  endtask

  // ---- software model ----------------------------------------------------
  int zm [3][ZL][SIMD];
  int am [2 * NL][SIMD];
  int lev [NLEV][D];
  int key [D];
  int q [D];

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

  // ---- host side -----------------------------------------------------------
  task automatic lsu_write_zr(int s, int line);
    lsu_req = 1; lsu_we = 1; lsu_sup = 0; lsu_spm = 2'(s); lsu_line = CMD_AW'(line);
    lsu_wdata = SW'(pack_zr(s, line));
    #1 chk(lsu_gnt, "LSU grant");
    @(negedge clk);
    lsu_req = 0;
  endtask

  task automatic lsu_read(bit sup, int s, int line, output logic [SW-1:0] d);
    lsu_req = 1; lsu_we = 0; lsu_sup = sup; lsu_spm = 2'(s); lsu_line = CMD_AW'(line);
    @(negedge clk);
    lsu_req = 0;
    d = lsu_rdata;
  endtask

  // load a D-component vector into SPM s from line l0
  task automatic load_vec(int s, int l0, int v []);
    for (int i = 0; i < NL; i++) begin
      for (int l = 0; l < SIMD; l++) zm[s][l0 + i][l] = v[i * SIMD + l];
      lsu_write_zr(s, l0 + i);
    end
  endtask

  // issue a command, wait for completion, return the busy cycles
  task automatic exec(op_e op, opnd_t rd, opnd_t rs1, opnd_t rs2, output int bc);
    hdcu_cmd.op = op; hdcu_cmd.rd = rd; hdcu_cmd.rs1 = rs1; hdcu_cmd.rs2 = rs2;
    hdcu_req = 1;
    @(negedge clk);
    hdcu_req = 0;
    bc = 0;
    while (hdcu_busy) begin bc++; @(negedge clk); end
  endtask

  task automatic cfg(int hvdim, int hvclass);
    hdcu_cmd.op = OP_CFG; hdcu_cmd.rd = '0;
    hdcu_cmd.rs1 = od(0, hvdim); hdcu_cmd.rs2 = od(0, hvclass);
    hdcu_req = 1; @(negedge clk); hdcu_req = 0;
  endtask

  function automatic int dist_q(int s, int l0);
    int d = 0;
    for (int c = 0; c < D; c++) d += comp_dist(q[c], zm[s][l0 + c / SIMD][c % SIMD], R);
    return d;
  endfunction

  // search c prototypes from line l0 of SPM s; returns the index and counts
  // the busy cycles into cyc
  task automatic search(int s, int l0, int c, output int idx, inout int cyc);
    int bc, best, bd;
    cfg(D, c);
    exec(OP_SEARCH, od(1, 3 * NL), od(1, NL), od(s, l0), bc);
    cyc += bc + 1;
    chk(bc == c * NL + L + 4, $sformatf("search latency %0d exp %0d", bc, c * NL + L + 4));
    best = 0; bd = dist_q(s, l0);
    for (int p = 1; p < c; p++)
      if (dist_q(s, l0 + p * NL) < bd) begin bd = dist_q(s, l0 + p * NL); best = p; end
    chk(last_result == best, $sformatf("search result %0d exp %0d", last_result, best));
    idx = last_result;
  endtask

  task automatic inference(int set);
    int nf, nc, target, bc, cyc, idx, exp_cyc;
    int v [] = new [D];
    logic [SW-1:0] d;
    nf = SET_D[set]; nc = SET_C[set];
    cyc = 0;
    cfg(D, nc);
    // encode: SPM0 lines 0..NL-1 key, NL..2NL-1 level vector; SPM1 line 0 bound
    for (int c = 0; c < 2 * NL; c++)
      for (int l = 0; l < SIMD; l++) am[c][l] = 0;
    for (int f = 0; f < nf; f++) begin
      int lv;
      for (int c = 0; c < D; c++) key[c] = $urandom_range(R - 1);
      lv = $urandom_range(NLEV - 1);
      load_vec(0, 0, key);
      load_vec(0, NL, lev[lv]);
      exec(OP_BIND, od(1, 0), od(0, 0), od(0, NL), bc);
      cyc += bc + 1;
      chk(bc == NL + 1, "bind latency");
      exec(f == 0 ? OP_SUP_INIT : OP_SUP, od(0, 0), od(1, 0), od(0, 0), bc);
      cyc += bc + 1;
      chk(bc == 2 * NL + 1, "sup latency");
      for (int c = 0; c < D; c++) begin
        int k, j, l;
        k = mod_r(key[c] + lev[lv][c], R);
        zm[1][c / SIMD][c % SIMD] = k;
        j = c / H; l = c % H;
        am[j][l]     = int'($signed(FP'((f == 0 ? 0 : am[j][l]) + ref_cos(k, R, AMP))));
        am[j][H + l] = int'($signed(FP'((f == 0 ? 0 : am[j][H + l]) + ref_sin(k, R, AMP))));
      end
    end
    for (int j = 0; j < 2 * NL; j++) begin
      lsu_read(1, 0, j, d);
      for (int l = 0; l < SIMD; l++)
        chk(d[l*FP +: FP] == FP'(am[j][l]), $sformatf("accumulator line %0d lane %0d", j, l));
    end
    exec(OP_NORM, od(1, NL), od(0, 0), od(0, 0), bc);
    cyc += bc + 1;
    chk(bc == 2 * NL * K + 2, "norm latency");
    for (int c = 0; c < D; c++) begin
      q[c] = ref_norm(longint'(am[c / H][c % H]), longint'(am[c / H][H + c % H]), R, AMP);
      zm[1][NL + c / SIMD][c % SIMD] = q[c];
    end
    for (int i = 0; i < NL; i++) begin
      lsu_read(0, 1, NL + i, d);
      chk(d[ZW-1:0] == pack_zr(1, NL + i), $sformatf("query line %0d", i));
    end
    // prototypes: the target one is the query with about 1/8 of it changed
    target = $urandom_range(nc - 1);
    for (int p = 0; p < nc; p++) begin
      for (int c = 0; c < D; c++)
        v[c] = (p != target) ? $urandom_range(R - 1)
             : (c % 8 == 3) ? mod_r(q[c] + 3, R) : q[c];
      if (p < P1) load_vec(2, p * NL, v);
      else        load_vec(0, 2 * NL + (p - P1) * NL, v);
    end
    if (nc <= P1) search(2, 0, nc, idx, cyc);
    else begin
      int i0, i1, d0, d1;
      n_split++;
      search(2, 0, P1, i0, cyc);
      search(0, 2 * NL, nc - P1, i1, cyc);
      exec(OP_DIST, od(1, 3 * NL + 1), od(1, NL), od(2, i0 * NL), bc);
      cyc += bc + 1;
      d0 = last_result;
      chk(d0 == dist_q(2, i0 * NL), "distance to first winner");
      exec(OP_DIST, od(1, 3 * NL + 1), od(1, NL), od(0, 2 * NL + i1 * NL), bc);
      cyc += bc + 1;
      d1 = last_result;
      chk(d1 == dist_q(0, 2 * NL + i1 * NL), "distance to second winner");
      idx = (d1 < d0) ? P1 + i1 : i0;
    end
    if (idx == target) n_hit++;
    exp_cyc = nf * (3 * NL + 4) + 2 * NL * K + 3
            + ((nc <= P1) ? nc * NL + L + 5
                          : P1 * NL + (nc - P1) * NL + 2 * (L + 5) + 2 * (NL + L + 4));
    chk(cyc == exp_cyc, $sformatf("kernel cycles %0d exp %0d", cyc, exp_cyc));
    $display("  %-16s d=%3d c=%3d  class %0d (target %0d)  kernel %0d cycles = %0.2f us at 150 MHz",
             SET_NAME[set], nf, nc, idx, target, cyc, cyc / 150.0);
  endtask

  initial begin
    hdcu_cmd = '0;
    // level vectors: thermometer code over a random base
    for (int c = 0; c < D; c++) begin
      int b0, b1;
      b0 = $urandom_range(R - 1);
      b1 = mod_r(b0 + R / 2, R);
      for (int v = 0; v < NLEV; v++) lev[v][c] = (c < v * (D / NLEV)) ? b1 : b0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int s = 0; s < NSET; s++) inference(s);
    chk(n_split > 0, "split search over two scratchpads happened");
    chk(n_hit == NSET, $sformatf("noisy prototype found in %0d of %0d", n_hit, NSET));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
