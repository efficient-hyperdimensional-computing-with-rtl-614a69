// mcr_sup_spm: the Superposition SPM, the wide scratchpad that holds
// superposition accumulators in fixed-point Cartesian form.
//
// A line is FP*SIMD bits wide: SIMD/2 real parts followed by SIMD/2
// imaginary parts (FP bits each) of SIMD/2 complex components, so the
// Superposition and Normalization Units can read and write SIMD/2 complex
// components per cycle. Default 2 KB: 128 lines of 128 bits at SIMD = 8,
// FP = 16, which holds one accumulated vector of up to 512 components.
// One synchronous read port (one-cycle latency) and one write port; a read
// of the line being written returns the old contents.
module mcr_sup_spm
  import mcr_pkg::*;
#(
  parameter int WIDTH     = DEF_FP * DEF_SIMD,
  parameter int SPM_BYTES = DEF_SPM_BYTES,
  localparam int DEPTH    = SPM_BYTES * 8 / WIDTH,
  localparam int AW       = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             r_en,
  input  logic [AW-1:0]    r_addr,
  output logic [WIDTH-1:0] r_data,
  input  logic             w_en,
  input  logic [AW-1:0]    w_addr,
  input  logic [WIDTH-1:0] w_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (w_en) mem[w_addr] <= w_data;
    if (r_en) r_data <= mem[r_addr];
  end

endmodule
