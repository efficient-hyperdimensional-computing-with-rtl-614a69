// tb_mcr_ctrl: the control unit alone. The functional units are replaced by
// small cycle models (permutation addresses, a normalization unit answering
// r/4+1 cycles per line, a distance unit answering log2(SIMD)+2 cycles after
// the last line, search logic answering one cycle after the last distance).
// For every operation the testbench records each SPM access the controller
// issues and compares the sequences of line addresses and the number of
// busy cycles with the schedule expected for that operation.
module tb_mcr_ctrl;
  import mcr_pkg::*;
  localparam int R = 16, SIMD = 8, K = 5, L = 3, ZAW = 9, SAW = 7;
  localparam int HVDIM = 32, NL = HVDIM / SIMD, HVCLASS = 3;
  logic clk = 0, rst_n = 0, hdcu_req = 0, hdcu_busy;
  cmd_t hdcu_cmd;
  op_e cur_op;
  logic [CMD_AW-1:0] hvdim, hvclass;
  logic fa_en, fb_en, fs_en, fw_en, fws_en;
  logic [1:0] fa_spm, fb_spm, fw_spm;
  logic [ZAW-1:0] fa_line, fb_line, fw_line;
  logic [SAW-1:0] fs_line, fws_line;
  logic [CMD_AW-1:0] perm_nl, perm_shift, perm_idx, perm_src;
  logic sup_half, sup_init, norm_in_valid, norm_half, dist_in_valid, dist_in_first, dist_in_last, search_start;
  logic norm_word_valid = 0, dist_result_valid = 0, search_done = 0;
  int checks = 0, failures = 0;

  mcr_ctrl dut (.*);

  always #5 clk = ~clk;

  // permutation address model
  always_comb perm_src = (perm_idx + perm_nl - perm_shift) % perm_nl;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string w);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", w); end
  endtask

  int qa[$], qb[$], qs[$], qw[$], qws[$];

  // Issues one command and collects the controller's accesses until busy
  // drops; returns the number of busy cycles.
  task automatic run(op_e op, int rd, int rs1, int rs2, output int busy_cycles);
    int cyc, norm_at[$], dist_at[$], results, sdone_at;
    qa.delete(); qb.delete(); qs.delete(); qw.delete(); qws.delete();
    hdcu_cmd = '0;
    hdcu_cmd.op = op; hdcu_cmd.rd.spm = 2'd2; hdcu_cmd.rd.line = CMD_AW'(rd);
    hdcu_cmd.rs1.spm = 2'd0; hdcu_cmd.rs1.line = CMD_AW'(rs1);
    hdcu_cmd.rs2.spm = 2'd1; hdcu_cmd.rs2.line = CMD_AW'(rs2);
    hdcu_req = 1;
    @(negedge clk);
    hdcu_req = 0;
    busy_cycles = 0; cyc = 0; results = 0; sdone_at = -1;
    while (hdcu_busy && cyc < 1000) begin
      // unit models: outputs for this cycle
      norm_word_valid   = (norm_at.size() > 0 && norm_at[0] == cyc);
      if (norm_word_valid) void'(norm_at.pop_front());
      dist_result_valid = (dist_at.size() > 0 && dist_at[0] == cyc);
      if (dist_result_valid) void'(dist_at.pop_front());
      search_done       = (sdone_at == cyc);
      #1;
      if (fa_en) qa.push_back(int'(fa_line));
      if (fb_en) qb.push_back(int'(fb_line));
      if (fs_en) qs.push_back(int'(fs_line));
      if (fw_en) begin qw.push_back(int'(fw_line)); chk(fw_spm == 2'd2, "write spm"); end
      if (fws_en) qws.push_back(int'(fws_line));
      if (fa_en) chk(fa_spm == 2'd0, "A spm");
      if (fb_en) chk(fb_spm == 2'd1, "B spm");
      if (norm_in_valid && norm_half) norm_at.push_back(cyc + K);
      if (dist_in_valid && dist_in_last) dist_at.push_back(cyc + L + 2);
      if (dist_result_valid && op == OP_SEARCH) begin
        results++;
        if (results == HVCLASS) sdone_at = cyc + 1;
      end
      busy_cycles++;
      cyc++;
      @(negedge clk);
    end
    norm_word_valid = 0; dist_result_valid = 0; search_done = 0;
  endtask

  task automatic cmp(int q[$], int e[$], string w);
    chk(q.size() == e.size(), $sformatf("%s count %0d exp %0d", w, q.size(), e.size()));
    for (int i = 0; i < q.size() && i < e.size(); i++)
      chk(q[i] == e[i], $sformatf("%s[%0d] = %0d exp %0d", w, i, q[i], e[i]));
  endtask

  initial begin
    int bc;
    int ea[$], eb[$], es[$], ew[$], ews[$];
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // configuration: must not raise busy
    hdcu_cmd = '0; hdcu_cmd.op = OP_CFG; hdcu_cmd.rs1.line = CMD_AW'(HVDIM); hdcu_cmd.rs2.line = CMD_AW'(HVCLASS);
    hdcu_req = 1; @(negedge clk); hdcu_req = 0;
    chk(!hdcu_busy && hvdim == HVDIM && hvclass == HVCLASS, "cfg");

    // BIND
    run(OP_BIND, 100, 10, 20, bc);
    ea = {}; eb = {}; ew = {};
    for (int i = 0; i < NL; i++) begin ea.push_back(10 + i); eb.push_back(20 + i); ew.push_back(100 + i); end
    cmp(qa, ea, "bind A"); cmp(qb, eb, "bind B"); cmp(qw, ew, "bind W");
    chk(bc == NL + 1, $sformatf("bind busy %0d", bc));
    // PERM by 3 blocks
    run(OP_PERM, 50, 40, 3, bc);
    ea = {}; ew = {};
    for (int i = 0; i < NL; i++) begin ea.push_back(40 + (i + NL - 3) % NL); ew.push_back(50 + i); end
    cmp(qa, ea, "perm A"); cmp(qw, ew, "perm W");
    chk(bc == NL + 1, $sformatf("perm busy %0d", bc));
    // SUP
    run(OP_SUP, 0, 30, 4, bc);
    ea = {}; es = {}; ews = {};
    for (int i = 0; i < 2 * NL; i++) begin ea.push_back(30 + i / 2); es.push_back(4 + i); ews.push_back(4 + i); end
    cmp(qa, ea, "sup A"); cmp(qs, es, "sup S"); cmp(qws, ews, "sup WS");
    chk(bc == 2 * NL + 1, $sformatf("sup busy %0d", bc));
    // NORM
    run(OP_NORM, 60, 8, 0, bc);
    es = {}; ew = {};
    for (int i = 0; i < 2 * NL; i++) es.push_back(8 + i);
    for (int i = 0; i < NL; i++) ew.push_back(60 + i);
    cmp(qs, es, "norm S"); cmp(qw, ew, "norm W");
    chk(bc == 2 * NL * K + 2, $sformatf("norm busy %0d", bc));
    // DIST
    run(OP_DIST, 70, 12, 24, bc);
    ea = {}; eb = {}; ew = {70};
    for (int i = 0; i < NL; i++) begin ea.push_back(12 + i); eb.push_back(24 + i); end
    cmp(qa, ea, "dist A"); cmp(qb, eb, "dist B"); cmp(qw, ew, "dist W");
    chk(bc == NL + L + 3, $sformatf("dist busy %0d", bc));
    // SEARCH over HVCLASS prototypes stored back to back
    run(OP_SEARCH, 80, 12, 200, bc);
    ea = {}; eb = {}; ew = {80};
    for (int c = 0; c < HVCLASS; c++)
      for (int i = 0; i < NL; i++) begin ea.push_back(12 + i); eb.push_back(200 + c * NL + i); end
    cmp(qa, ea, "search A"); cmp(qb, eb, "search B"); cmp(qw, ew, "search W");
    chk(bc == HVCLASS * NL + L + 4, $sformatf("search busy %0d", bc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
