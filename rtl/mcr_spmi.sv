// mcr_spmi: the scratchpad memory interface (SPMI) with the SPMs it serves.
//
// The SPMI owns N_ZR_SPM Z_r scratchpads (b*SIMD bits per line) and the
// superposition scratchpad (FP*SIMD bits per line) and connects them to two
// masters: the functional-unit datapath, steered by the control unit, and
// the host core's load/store unit (LSU access, used by the transfer
// instructions that move vectors between main memory and the SPMs).
//
// FU side: two Z_r read ports (operands A and B, each may address any Z_r
// SPM), one accumulator read port, one Z_r write port and one accumulator
// write port. Read data arrive one cycle after the address (op_a, op_b,
// acc_rd). LSU side: a simple request/grant port. The LSU is granted only
// while the coprocessor is idle (busy = 0), so the two masters never
// collide; this arbitration rule is this design's choice. An LSU read
// returns lsu_rdata with lsu_rvalid one cycle after the grant; Z_r data are
// zero-extended to the FP*SIMD-bit LSU word and a Z_r write uses its low
// b*SIMD bits.
module mcr_spmi
  import mcr_pkg::*;
#(
  parameter int R         = DEF_R,
  parameter int SIMD      = DEF_SIMD,
  parameter int FP        = DEF_FP,
  parameter int SPM_BYTES = DEF_SPM_BYTES,
  parameter int N_ZR_SPM  = DEF_N_ZR_SPM,
  localparam int ZW       = $clog2(R) * SIMD,
  localparam int SW       = FP * SIMD,
  localparam int ZAW      = $clog2(SPM_BYTES * 8 / ZW),
  localparam int SAW      = $clog2(SPM_BYTES * 8 / SW)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              busy,
  // FU datapath
  input  logic              fa_en,
  input  logic [1:0]        fa_spm,
  input  logic [ZAW-1:0]    fa_line,
  input  logic              fb_en,
  input  logic [1:0]        fb_spm,
  input  logic [ZAW-1:0]    fb_line,
  input  logic              fs_en,
  input  logic [SAW-1:0]    fs_line,
  input  logic              fw_en,
  input  logic [1:0]        fw_spm,
  input  logic [ZAW-1:0]    fw_line,
  input  logic [ZW-1:0]     fw_data,
  input  logic              fws_en,
  input  logic [SAW-1:0]    fws_line,
  input  logic [SW-1:0]     fws_data,
  output logic [ZW-1:0]     op_a,
  output logic [ZW-1:0]     op_b,
  output logic [SW-1:0]     acc_rd,
  // LSU access
  input  logic              lsu_req,
  input  logic              lsu_we,
  input  logic              lsu_sup,     // 1: superposition SPM
  input  logic [1:0]        lsu_spm,
  input  logic [CMD_AW-1:0] lsu_line,
  input  logic [SW-1:0]     lsu_wdata,
  output logic              lsu_gnt,
  output logic              lsu_rvalid,
  output logic [SW-1:0]     lsu_rdata
);

  logic [ZW-1:0] ra_data [N_ZR_SPM];
  logic [ZW-1:0] rb_data [N_ZR_SPM];
  logic [1:0]    sel_a_q, sel_b_q;
  logic          lsu_sup_q;

  logic lsu_rd, lsu_wr;
  assign lsu_gnt = lsu_req & ~busy;
  assign lsu_rd  = lsu_gnt & ~lsu_we;
  assign lsu_wr  = lsu_gnt &  lsu_we;

  // port A is shared by the FU (busy) and the LSU (idle)
  logic           a_en;
  logic [1:0]     a_spm;
  logic [ZAW-1:0] a_line;
  logic           w_en;
  logic [1:0]     w_spm;
  logic [ZAW-1:0] w_line;
  logic [ZW-1:0]  w_data;
  logic           s_en, ws_en;
  logic [SAW-1:0] s_line, ws_line;
  logic [SW-1:0]  ws_data;

  always_comb begin
    if (busy) begin
      a_en = fa_en; a_spm = fa_spm; a_line = fa_line;
      w_en = fw_en; w_spm = fw_spm; w_line = fw_line; w_data = fw_data;
      s_en = fs_en; s_line = fs_line;
      ws_en = fws_en; ws_line = fws_line; ws_data = fws_data;
    end else begin
      a_en = lsu_rd & ~lsu_sup; a_spm = lsu_spm; a_line = ZAW'(lsu_line);
      w_en = lsu_wr & ~lsu_sup; w_spm = lsu_spm; w_line = ZAW'(lsu_line);
      w_data = lsu_wdata[ZW-1:0];
      s_en = lsu_rd & lsu_sup; s_line = SAW'(lsu_line);
      ws_en = lsu_wr & lsu_sup; ws_line = SAW'(lsu_line); ws_data = lsu_wdata;
    end
  end

  for (genvar g = 0; g < N_ZR_SPM; g++) begin : g_spm
    mcr_spm #(.WIDTH(ZW), .SPM_BYTES(SPM_BYTES)) u_spm (
      .clk     (clk),
      .ra_en   (a_en && a_spm == 2'(g)),
      .ra_addr (a_line),
      .ra_data (ra_data[g]),
      .rb_en   (busy && fb_en && fb_spm == 2'(g)),
      .rb_addr (fb_line),
      .rb_data (rb_data[g]),
      .w_en    (w_en && w_spm == 2'(g)),
      .w_addr  (w_line),
      .w_data  (w_data)
    );
  end

  mcr_sup_spm #(.WIDTH(SW), .SPM_BYTES(SPM_BYTES)) u_sup_spm (
    .clk    (clk),
    .r_en   (s_en),
    .r_addr (s_line),
    .r_data (acc_rd),
    .w_en   (ws_en),
    .w_addr (ws_line),
    .w_data (ws_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_a_q <= '0; sel_b_q <= '0; lsu_rvalid <= 1'b0; lsu_sup_q <= 1'b0;
    end else begin
      if (a_en) sel_a_q <= a_spm;
      if (busy && fb_en) sel_b_q <= fb_spm;
      lsu_rvalid <= lsu_rd;
      if (lsu_rd) lsu_sup_q <= lsu_sup;
    end
  end

  always_comb begin
    op_a = '0;
    op_b = '0;
    for (int g = 0; g < N_ZR_SPM; g++) begin
      if (sel_a_q == 2'(g)) op_a = ra_data[g];
      if (sel_b_q == 2'(g)) op_b = rb_data[g];
    end
    lsu_rdata = lsu_sup_q ? acc_rd : SW'(op_a);
  end

endmodule
