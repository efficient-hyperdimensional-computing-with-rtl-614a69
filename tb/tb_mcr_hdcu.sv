// tb_mcr_hdcu: end-to-end test of the MCR-HDCU at its default parameters
// (r = 16, SIMD = 8, FP = 16, four 2 KB scratchpads).
//
// For HVDIM = 64 and HVDIM = 512 (the largest vector the 2 KB superposition
// SPM can accumulate) it runs a nearest-prototype classification the way a
// host program would: the LSU loads random key and value vectors and two
// class prototypes (one random, one a noisy copy of the expected query);
// each feature is bound to its value, the bound vectors are superimposed
// (the first with OP_SUP_INIT), the bundle is normalized, and OP_SEARCH
// returns the class. Unbinding, permutation and distance are run on the
// results as well. Every result is read back through the LSU and compared
// with a software model of MCR arithmetic (mcr_ref_pkg), and the busy time
// of every operation is compared with its expected cycle count.
// Mechanisms counted (each must occur): every operation, accumulation on an
// initialized bundle, modular wrap-around in binding, normalization in all
// four quadrants, a search whose best match changes, commands held while
// the unit is busy, LSU reads/writes and LSU requests refused while busy,
// and an operation ignored because its unit is disabled (second instance
// built with only the binding unit).
module tb_mcr_hdcu;
  import mcr_pkg::*;
  import mcr_ref_pkg::*;
  localparam int R = 16, SIMD = 8, FP = 16, B = 4, H = SIMD / 2, AMP = 31;
  localparam int K = R / 4 + 1, L = 3, ZW = B * SIMD, SW = FP * SIMD, DW = 24;
  localparam int NFEAT = 3, NCLASS = 2;

  logic clk = 0, rst_n = 0;
  logic hdcu_req = 0, hdcu_busy, result_valid;
  cmd_t hdcu_cmd;
  logic [DW-1:0] result;
  logic lsu_req = 0, lsu_we = 0, lsu_sup = 0, lsu_gnt, lsu_rvalid;
  logic [1:0] lsu_spm;
  logic [CMD_AW-1:0] lsu_line;
  logic [SW-1:0] lsu_wdata, lsu_rdata;

  mcr_hdcu dut (.*);

  // second instance: binding only, the other units removed
  logic req2 = 0, busy2, rv2, gnt2, rvalid2;
  logic [DW-1:0] res2;
  logic [SW-1:0] rdata2;
  mcr_hdcu #(.FU_EN(5'b00001)) dut_bind_only (
    .clk, .rst_n, .hdcu_req(req2), .hdcu_cmd, .hdcu_busy(busy2),
    .result_valid(rv2), .result(res2),
    .lsu_req(1'b0), .lsu_we(1'b0), .lsu_sup(1'b0), .lsu_spm(2'd0), .lsu_line('0),
    .lsu_wdata('0), .lsu_gnt(gnt2), .lsu_rvalid(rvalid2), .lsu_rdata(rdata2)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_op[op_e];
  int n_sup_accum = 0, n_wrap = 0, n_quad[4], n_best_change = 0;
  int n_held = 0, n_lsu_wr = 0, n_lsu_rd = 0, n_lsu_refused = 0, n_disabled = 0;
  int last_result = -1;

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

  // ---- software model of the scratchpads --------------------------------
  int zm [3][512][SIMD];           // component values
  int am [128][SIMD];              // accumulator lines (signed FP-bit values)

  function automatic logic [ZW-1:0] pack_zr(int s, int line);
    logic [ZW-1:0] d;
    for (int l = 0; l < SIMD; l++) d[l*B +: B] = B'(zm[s][line][l]);
    return d;
  endfunction

  // ---- host-side helpers --------------------------------------------------
  task automatic lsu_write_zr(int s, int line);
    lsu_req = 1; lsu_we = 1; lsu_sup = 0; lsu_spm = 2'(s); lsu_line = CMD_AW'(line);
    lsu_wdata = SW'(pack_zr(s, line));
    #1 chk(lsu_gnt, "LSU grant");
    @(negedge clk);
    lsu_req = 0;
    n_lsu_wr++;
  endtask

  task automatic lsu_read(bit sup, int s, int line, output logic [SW-1:0] d);
    lsu_req = 1; lsu_we = 0; lsu_sup = sup; lsu_spm = 2'(s); lsu_line = CMD_AW'(line);
    @(negedge clk);
    lsu_req = 0;
    chk(lsu_rvalid, "LSU rvalid");
    d = lsu_rdata;
    n_lsu_rd++;
  endtask

  task automatic check_zr(int s, int line0, int nl, string w);
    logic [SW-1:0] d;
    for (int i = 0; i < nl; i++) begin
      lsu_read(0, s, line0 + i, d);
      chk(d[ZW-1:0] == pack_zr(s, line0 + i), $sformatf("%s line %0d: %h exp %h", w, i, d[ZW-1:0], pack_zr(s, line0 + i)));
    end
  endtask

  task automatic check_acc(int line0, int nacc);
    logic [SW-1:0] d;
    for (int j = 0; j < nacc; j++) begin
      lsu_read(1, 0, line0 + j, d);
      for (int l = 0; l < SIMD; l++)
        chk(d[l*FP +: FP] == FP'(am[line0 + j][l]), $sformatf("acc line %0d lane %0d", j, l));
    end
  endtask

  function automatic opnd_t od(int s, int line);
    opnd_t o;
    o.spm = 2'(s); o.line = CMD_AW'(line);
    return o;
  endfunction

  // Issues a command as the host would (holding the request while the unit
  // is busy) and waits for completion; returns the busy cycles.
  task automatic exec(op_e op, opnd_t rd, opnd_t rs1, opnd_t rs2, output int bc);
    hdcu_cmd.op = op; hdcu_cmd.rd = rd; hdcu_cmd.rs1 = rs1; hdcu_cmd.rs2 = rs2;
    hdcu_req = 1;
    #1;
    if (hdcu_busy) n_held++;
    while (hdcu_busy) begin @(negedge clk); #1; end
    @(negedge clk);
    hdcu_req = 0;
    bc = 0;
    while (hdcu_busy) begin
      if (bc == 2) begin
        // the LSU is refused while the coprocessor works
        lsu_req = 1; lsu_we = 1; lsu_sup = 0; lsu_spm = 0; lsu_line = 0; lsu_wdata = '1;
        #1;
        chk(!lsu_gnt, "LSU refused while busy");
        if (!lsu_gnt) n_lsu_refused++;
        lsu_req = 0;
      end
      bc++;
      @(negedge clk);
    end
    if (n_op.exists(op)) n_op[op]++; else n_op[op] = 1;
  endtask

  // Issue a command without waiting, so the next one is held while busy.
  task automatic issue_only(op_e op, opnd_t rd, opnd_t rs1, opnd_t rs2);
    hdcu_cmd.op = op; hdcu_cmd.rd = rd; hdcu_cmd.rs1 = rs1; hdcu_cmd.rs2 = rs2;
    hdcu_req = 1;
    @(negedge clk);
    hdcu_req = 0;
    if (n_op.exists(op)) n_op[op]++; else n_op[op] = 1;
  endtask

  task automatic cfg(int hvdim, int hvclass);
    hdcu_cmd.op = OP_CFG; hdcu_cmd.rd = '0;
    hdcu_cmd.rs1 = od(0, hvdim); hdcu_cmd.rs2 = od(0, hvclass);
    hdcu_req = 1; @(negedge clk); hdcu_req = 0;
    chk(!hdcu_busy, "CFG does not raise busy");
    if (n_op.exists(OP_CFG)) n_op[OP_CFG]++; else n_op[OP_CFG] = 1;
  endtask

  // ---- model operations ---------------------------------------------------
  task automatic m_bind(bit un, int sd, int ld, int sa, int la, int sb, int lb, int nl);
    for (int i = 0; i < nl; i++)
      for (int l = 0; l < SIMD; l++) begin
        if (!un && zm[sa][la + i][l] + zm[sb][lb + i][l] >= R) n_wrap++;
        zm[sd][ld + i][l] = un ? mod_r(zm[sa][la + i][l] - zm[sb][lb + i][l], R)
                               : mod_r(zm[sa][la + i][l] + zm[sb][lb + i][l], R);
      end
  endtask

  task automatic m_sup(bit init, int sa, int la, int lacc, int nl);
    for (int c = 0; c < nl * SIMD; c++) begin
      int k, j, l, re, im;
      k = zm[sa][la + c / SIMD][c % SIMD];
      j = lacc + c / H; l = c % H;
      re = (init ? 0 : am[j][l]) + ref_cos(k, R, AMP);
      im = (init ? 0 : am[j][H + l]) + ref_sin(k, R, AMP);
      am[j][l] = int'($signed(FP'(re)));
      am[j][H + l] = int'($signed(FP'(im)));
    end
  endtask

  task automatic m_norm(int lacc, int sd, int ld, int nl);
    for (int c = 0; c < nl * SIMD; c++) begin
      int j, l, re, im;
      j = lacc + c / H; l = c % H;
      re = am[j][l]; im = am[j][H + l];
      n_quad[(re >= 0 && im >= 0) ? 0 : (re < 0 && im >= 0) ? 1 : (re < 0) ? 2 : 3]++;
      zm[sd][ld + c / SIMD][c % SIMD] = ref_norm(longint'(re), longint'(im), R, AMP);
    end
  endtask

  function automatic int m_dist(int sa, int la, int sb, int lb, int nl);
    int d = 0;
    for (int i = 0; i < nl; i++)
      for (int l = 0; l < SIMD; l++) d += comp_dist(zm[sa][la + i][l], zm[sb][lb + i][l], R);
    return d;
  endfunction

  task automatic m_perm(int sd, int ld, int sa, int la, int nl, int s);
    for (int i = 0; i < nl; i++)
      for (int l = 0; l < SIMD; l++) zm[sd][ld + i][l] = zm[sa][la + (i - s + nl) % nl][l];
  endtask

  // ---- one classification at a given dimension -------------------------
  task automatic classify(int hvdim);
    int nl, bc, exp_idx, d0, d1, best;
    logic [SW-1:0] d;
    nl = hvdim / SIMD;
    cfg(hvdim, NCLASS);
    // layout: SPM0 keys, SPM1 values, SPM2 bound / query / prototypes / outputs
    for (int f = 0; f < NFEAT; f++)
      for (int i = 0; i < nl; i++) begin
        for (int l = 0; l < SIMD; l++) begin
          zm[0][f * nl + i][l] = $urandom_range(R - 1);
          zm[1][f * nl + i][l] = $urandom_range(R - 1);
        end
        lsu_write_zr(0, f * nl + i);
        lsu_write_zr(1, f * nl + i);
      end
    // encode: q = norm( sum_f key_f (bind) value_f )
    for (int f = 0; f < NFEAT; f++) begin
      exec(OP_BIND, od(2, 0), od(0, f * nl), od(1, f * nl), bc);
      chk(bc == nl + 1, $sformatf("bind latency %0d exp %0d", bc, nl + 1));
      m_bind(0, 2, 0, 0, f * nl, 1, f * nl, nl);
      check_zr(2, 0, nl, "bind");
      exec(f == 0 ? OP_SUP_INIT : OP_SUP, od(0, 0), od(2, 0), od(0, 0), bc);
      chk(bc == 2 * nl + 1, $sformatf("sup latency %0d exp %0d", bc, 2 * nl + 1));
      if (f > 0) n_sup_accum++;
      m_sup(f == 0, 2, 0, 0, nl);
    end
    check_acc(0, 2 * nl);
    exec(OP_NORM, od(2, nl), od(0, 0), od(0, 0), bc);
    chk(bc == 2 * nl * K + 2, $sformatf("norm latency %0d exp %0d", bc, 2 * nl * K + 2));
    m_norm(0, 2, nl, nl);
    check_zr(2, nl, nl, "norm");
    // prototypes: class 0 random, class 1 = query with 1/8 of components changed
    for (int i = 0; i < nl; i++) begin
      for (int l = 0; l < SIMD; l++) begin
        zm[2][2 * nl + i][l] = $urandom_range(R - 1);
        zm[2][3 * nl + i][l] = (l == i % SIMD) ? mod_r(zm[2][nl + i][l] + 5, R) : zm[2][nl + i][l];
      end
      lsu_write_zr(2, 2 * nl + i);
      lsu_write_zr(2, 3 * nl + i);
    end
    d0 = m_dist(2, nl, 2, 2 * nl, nl);
    d1 = m_dist(2, nl, 2, 3 * nl, nl);
    exp_idx = (d1 < d0) ? 1 : 0;
    exec(OP_SEARCH, od(2, 7 * nl + 1), od(2, nl), od(2, 2 * nl), bc);
    chk(bc == NCLASS * nl + L + 4, $sformatf("search latency %0d exp %0d", bc, NCLASS * nl + L + 4));
    chk(last_result == exp_idx, $sformatf("search result %0d exp %0d", last_result, exp_idx));
    lsu_read(0, 2, 7 * nl + 1, d);
    chk(int'(d[ZW-1:0]) == exp_idx, "search index written to SPM");
    if (exp_idx > 0) n_best_change++;
    // distance to each prototype
    exec(OP_DIST, od(2, 7 * nl), od(2, nl), od(2, 3 * nl), bc);
    chk(bc == nl + L + 3, $sformatf("dist latency %0d exp %0d", bc, nl + L + 3));
    chk(last_result == d1, $sformatf("distance %0d exp %0d", last_result, d1));
    lsu_read(0, 2, 7 * nl, d);
    chk(int'(d[ZW-1:0]) == d1, "distance written to SPM");
    // unbinding the query with key 0 and permuting it
    exec(OP_UNBIND, od(2, 4 * nl), od(2, nl), od(0, 0), bc);
    chk(bc == nl + 1, "unbind latency");
    m_bind(1, 2, 4 * nl, 2, nl, 0, 0, nl);
    check_zr(2, 4 * nl, nl, "unbind");
    for (int s = 0; s < 3; s++) begin
      int sh;
      sh = (s == 0) ? 0 : (s == 1) ? 1 : nl - 1;
      exec(OP_PERM, od(2, 5 * nl), od(2, 4 * nl), od(0, sh), bc);
      chk(bc == nl + 1, "perm latency");
      m_perm(2, 5 * nl, 2, 4 * nl, nl, sh);
      check_zr(2, 5 * nl, nl, "perm");
    end
    // search again where class 0 is the copy: the first class stays best
    exec(OP_SEARCH, od(2, 7 * nl + 2), od(2, 3 * nl), od(2, 3 * nl), bc);
    chk(last_result == 0, "self search gives class 0");
    // back-to-back commands: the second is held while the first runs
    issue_only(OP_BIND, od(2, 6 * nl), od(0, 0), od(1, 0));
    m_bind(0, 2, 6 * nl, 0, 0, 1, 0, nl);
    exec(OP_UNBIND, od(2, 6 * nl), od(2, 6 * nl), od(1, 0), bc);
    m_bind(1, 2, 6 * nl, 2, 6 * nl, 1, 0, nl);
    check_zr(2, 6 * nl, nl, "bind then unbind restores key");
    for (int i = 0; i < nl; i++) chk(pack_zr(2, 6 * nl + i) == pack_zr(0, i), "unbind inverse");
  endtask

  initial begin
    hdcu_cmd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    classify(64);
    classify(512);
    // a disabled unit ignores its operation
    hdcu_cmd.op = OP_NORM; req2 = 1; @(negedge clk); req2 = 0; #1;
    chk(!busy2, "disabled normalization unit ignores OP_NORM");
    if (!busy2) n_disabled++;
    hdcu_cmd.op = OP_BIND; req2 = 1; @(negedge clk); req2 = 0; #1;
    chk(busy2, "binding still runs on the reduced instance");
    repeat (20) @(negedge clk);
    // every mechanism must have happened
    foreach (n_op[o]) $display("  %s executed %0d times", o.name(), n_op[o]);
    for (int o = int'(OP_CFG); o <= int'(OP_SEARCH); o++) chk(n_op.exists(op_e'(o)), $sformatf("op %s never ran", op_e'(o)));
    $display("  accumulate=%0d wrap=%0d quadrants=%0d/%0d/%0d/%0d best_change=%0d held=%0d lsu_wr=%0d lsu_rd=%0d refused=%0d disabled=%0d",
             n_sup_accum, n_wrap, n_quad[0], n_quad[1], n_quad[2], n_quad[3], n_best_change, n_held,
             n_lsu_wr, n_lsu_rd, n_lsu_refused, n_disabled);
    chk(n_sup_accum > 0, "accumulation");
    chk(n_wrap > 0, "wrap-around");
    for (int q = 0; q < 4; q++) chk(n_quad[q] > 0, $sformatf("quadrant %0d", q));
    chk(n_best_change > 0, "search best change");
    chk(n_held > 0, "held command");
    chk(n_lsu_wr > 0 && n_lsu_rd > 0 && n_lsu_refused > 0, "LSU");
    chk(n_disabled > 0, "disabled unit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
