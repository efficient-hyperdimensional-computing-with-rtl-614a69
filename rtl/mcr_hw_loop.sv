// mcr_hw_loop: the hardware loop counters of the control unit.
//
// Operations run as loops in hardware so the host issues one instruction per
// whole-vector operation. This block is a three-level nested counter:
// rep (innermost, 0..n_rep-1), line (0..n_line-1) and outer (0..n_outer-1),
// plus a flat count of steps (iter). It advances one step per cycle while
// active. The controller uses it as: rep = candidate cycles of a
// normalization, line = SPM line within a vector, outer = class of a search.
//
// Interface: start loads the trip counts (each at least 1) and zeroes the
// indices; the first step is the cycle after start. last is high in the
// final step, after which active drops. Trip counts are held internally.
module mcr_hw_loop
  import mcr_pkg::*;
#(
  parameter int W = CMD_AW
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] n_rep,
  input  logic [W-1:0] n_line,
  input  logic [W-1:0] n_outer,
  output logic         active,
  output logic [W-1:0] rep,
  output logic [W-1:0] line,
  output logic [W-1:0] outer,
  output logic [W-1:0] iter,
  output logic         rep_first,
  output logic         line_first,
  output logic         line_last,
  output logic         last
);

  logic [W-1:0] nr_q, nl_q, no_q;
  logic rep_last, outer_last;

  assign rep_first  = (rep == '0);
  assign rep_last   = (rep == nr_q - 1'b1);
  assign line_first = (line == '0);
  assign line_last  = (line == nl_q - 1'b1);
  assign outer_last = (outer == no_q - 1'b1);
  assign last       = active & rep_last & line_last & outer_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      rep <= '0; line <= '0; outer <= '0; iter <= '0;
      nr_q <= W'(1); nl_q <= W'(1); no_q <= W'(1);
    end else if (start) begin
      active <= 1'b1;
      rep <= '0; line <= '0; outer <= '0; iter <= '0;
      nr_q <= n_rep; nl_q <= n_line; no_q <= n_outer;
    end else if (active) begin
      if (last) begin
        active <= 1'b0;
      end
      if (!rep_last) begin
        rep <= rep + 1'b1;
      end else begin
        rep  <= '0;
        iter <= iter + 1'b1;
        if (!line_last) begin
          line <= line + 1'b1;
        end else begin
          line  <= '0;
          outer <= outer + 1'b1;
        end
      end
    end
  end

endmodule
