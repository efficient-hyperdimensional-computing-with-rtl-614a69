// tb_mcr_spmi: the scratchpad interface at its default size. The LSU fills
// all four SPMs and reads them back while idle; with busy set, the FU ports
// read operands A and B from any pair of Z_r SPMs (also the same one) and
// the accumulator, and write through both write ports; the LSU must not be
// granted while busy. All data are compared with a software model.
module tb_mcr_spmi;
  import mcr_pkg::*;
  localparam int ZW = 32, SW = 128, ZD = 512, SD = 128, ZAW = 9, SAW = 7;
  logic clk = 0, rst_n = 0, busy = 0;
  logic fa_en = 0, fb_en = 0, fs_en = 0, fw_en = 0, fws_en = 0;
  logic [1:0] fa_spm, fb_spm, fw_spm;
  logic [ZAW-1:0] fa_line, fb_line, fw_line;
  logic [SAW-1:0] fs_line, fws_line;
  logic [ZW-1:0] fw_data, op_a, op_b;
  logic [SW-1:0] fws_data, acc_rd;
  logic lsu_req = 0, lsu_we = 0, lsu_sup = 0, lsu_gnt, lsu_rvalid;
  logic [1:0] lsu_spm;
  logic [CMD_AW-1:0] lsu_line;
  logic [SW-1:0] lsu_wdata, lsu_rdata;
  logic [ZW-1:0] zm [3][ZD];
  logic [SW-1:0] sm [SD];
  int checks = 0, failures = 0;

  mcr_spmi dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string w);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", w); end
  endtask

  task automatic lsu_write(bit sup, int spm, int line, logic [SW-1:0] d);
    lsu_req = 1; lsu_we = 1; lsu_sup = sup; lsu_spm = 2'(spm); lsu_line = CMD_AW'(line); lsu_wdata = d;
    #1 chk(lsu_gnt, "grant while idle");
    @(negedge clk);
    lsu_req = 0;
  endtask

  task automatic lsu_read(bit sup, int spm, int line, output logic [SW-1:0] d);
    lsu_req = 1; lsu_we = 0; lsu_sup = sup; lsu_spm = 2'(spm); lsu_line = CMD_AW'(line);
    @(negedge clk);
    lsu_req = 0;
    chk(lsu_rvalid, "rvalid");
    d = lsu_rdata;
  endtask

  initial begin
    logic [SW-1:0] d;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 3; s++)
      for (int i = 0; i < ZD; i++) begin
        zm[s][i] = $urandom;
        lsu_write(0, s, i, SW'(zm[s][i]));
      end
    for (int i = 0; i < SD; i++) begin
      sm[i] = {$urandom, $urandom, $urandom, $urandom};
      lsu_write(1, 0, i, sm[i]);
    end
    for (int n = 0; n < 200; n++) begin
      int s, i;
      s = $urandom_range(3); i = $urandom_range(s == 3 ? SD - 1 : ZD - 1);
      lsu_read(s == 3, s % 3, i, d);
      chk(s == 3 ? d == sm[i] : d == SW'(zm[s][i]), $sformatf("lsu read spm %0d line %0d", s, i));
    end
    // FU phase
    busy = 1;
    lsu_req = 1; lsu_we = 1; lsu_sup = 0; lsu_spm = 0; lsu_line = 0; lsu_wdata = '1;
    #1 chk(!lsu_gnt, "no grant while busy");
    for (int n = 0; n < 400; n++) begin
      int sa, sb, la, lb, ls, sw, lw, lws;
      sa = $urandom_range(2); sb = $urandom_range(2);
      la = $urandom_range(ZD - 1); lb = $urandom_range(ZD - 1); ls = $urandom_range(SD - 1);
      sw = $urandom_range(2); lw = $urandom_range(ZD - 1); lws = $urandom_range(SD - 1);
      fa_en = 1; fa_spm = 2'(sa); fa_line = ZAW'(la);
      fb_en = 1; fb_spm = 2'(sb); fb_line = ZAW'(lb);
      fs_en = 1; fs_line = SAW'(ls);
      fw_en = 1; fw_spm = 2'(sw); fw_line = ZAW'(lw); fw_data = $urandom;
      fws_en = 1; fws_line = SAW'(lws); fws_data = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk);
      chk(op_a == zm[sa][la], "op_a");
      chk(op_b == zm[sb][lb], "op_b");
      chk(acc_rd == sm[ls], "acc_rd");
      zm[sw][lw] = fw_data;
      sm[lws] = fws_data;
    end
    fa_en = 0; fb_en = 0; fs_en = 0; fw_en = 0; fws_en = 0;
    lsu_req = 0;
    @(negedge clk);
    busy = 0;
    for (int n = 0; n < 200; n++) begin
      int s, i;
      s = $urandom_range(3); i = $urandom_range(s == 3 ? SD - 1 : ZD - 1);
      lsu_read(s == 3, s % 3, i, d);
      chk(s == 3 ? d == sm[i] : d == SW'(zm[s][i]), "read back after FU writes");
    end
    lsu_read(0, 0, 0, d);
    chk(d == SW'(zm[0][0]), "refused LSU write had no effect");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
