// mcr_spm: a Z_r scratchpad memory (SPM) of the MCR-HDCU.
//
// Each line holds one SIMD-component slice of a hypervector, b*SIMD bits,
// so one line per cycle keeps the SIMD lanes fed. Size is given in bytes
// (default 2 KB: 512 lines of 32 bits at SIMD = 8, r = 16). The memory has
// two synchronous read ports and one write port, so that both operands of a
// binary operation can come from the same SPM (the number of ports is this
// design's choice). Reads return data one cycle after the address; a read
// of the line being written in the same cycle returns the old contents.
// Written as a plain array so a synthesis tool can map it to block RAM.
module mcr_spm
  import mcr_pkg::*;
#(
  parameter int WIDTH     = $clog2(DEF_R) * DEF_SIMD,
  parameter int SPM_BYTES = DEF_SPM_BYTES,
  localparam int DEPTH    = SPM_BYTES * 8 / WIDTH,
  localparam int AW       = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             ra_en,
  input  logic [AW-1:0]    ra_addr,
  output logic [WIDTH-1:0] ra_data,
  input  logic             rb_en,
  input  logic [AW-1:0]    rb_addr,
  output logic [WIDTH-1:0] rb_data,
  input  logic             w_en,
  input  logic [AW-1:0]    w_addr,
  input  logic [WIDTH-1:0] w_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (w_en)  mem[w_addr] <= w_data;
    if (ra_en) ra_data <= mem[ra_addr];
    if (rb_en) rb_data <= mem[rb_addr];
  end

endmodule
