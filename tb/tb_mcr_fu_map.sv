// tb_mcr_fu_map: for every operation, checks which unit receives the SPM
// operands (the others see zeros), who addresses the shared LUT, that search
// distances reach the search logic only during a search, and which result is
// written to the Z_r and accumulator write ports.
module tb_mcr_fu_map;
  import mcr_pkg::*;
  localparam int ZW = 32, SW = 128, DW = 24, H = 4, B = 4;
  op_e op;
  logic [ZW-1:0] op_a, op_b, bind_a, bind_b, dist_a, dist_b, sup_zr, bind_y, norm_word, zr_wdata;
  logic [SW-1:0] acc_rd, sup_acc, norm_line, sup_y, acc_wdata;
  logic [H-1:0][B-1:0] sup_lut_addr, norm_lut_addr, lut_addr;
  logic dist_valid, search_valid;
  logic [DW-1:0] dist_result, search_dist, scalar;
  logic [CMD_AW-1:0] search_idx;
  int checks = 0, failures = 0;

  mcr_fu_map dut (.*);

  task automatic chk(bit c, string w);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s op=%s", w, op.name()); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      bit bnd, sup, nrm, dst, srch;
      op = op_e'(n % 10);
      op_a = $urandom; op_b = $urandom; acc_rd = {$urandom, $urandom, $urandom, $urandom};
      sup_lut_addr = 16'($urandom); norm_lut_addr = 16'($urandom);
      dist_valid = 1; dist_result = DW'($urandom); search_idx = CMD_AW'($urandom);
      bind_y = $urandom; norm_word = $urandom; sup_y = {$urandom, $urandom, $urandom, $urandom};
      #1;
      bnd  = op inside {OP_BIND, OP_UNBIND};
      sup  = op inside {OP_SUP, OP_SUP_INIT};
      nrm  = op == OP_NORM;
      srch = op == OP_SEARCH;
      dst  = op == OP_DIST || srch;
      chk(bind_a == (bnd ? op_a : '0) && bind_b == (bnd ? op_b : '0), "bind operands");
      chk(dist_a == (dst ? op_a : '0) && dist_b == (dst ? op_b : '0), "dist operands");
      chk(sup_zr == (sup ? op_a : '0) && sup_acc == (sup ? acc_rd : '0), "sup operands");
      chk(norm_line == (nrm ? acc_rd : '0), "norm operand");
      chk(lut_addr == (sup ? sup_lut_addr : norm_lut_addr), "lut address");
      chk(search_valid == srch && search_dist == dist_result, "intermediate");
      chk(acc_wdata == sup_y, "acc write");
      case (op)
        OP_BIND, OP_UNBIND: chk(zr_wdata == bind_y, "zr write bind");
        OP_PERM:            chk(zr_wdata == op_a, "zr write perm");
        OP_NORM:            chk(zr_wdata == norm_word, "zr write norm");
        OP_DIST:            chk(zr_wdata == ZW'(dist_result), "zr write dist");
        OP_SEARCH:          chk(zr_wdata == ZW'(search_idx), "zr write search");
        default:            chk(zr_wdata == '0, "zr write idle");
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
