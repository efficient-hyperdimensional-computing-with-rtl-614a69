// mcr_search_unit: the search (nearest-prototype) logic.
//
// During a search the controller streams the query against HVCLASS class
// prototypes stored one after another, and the Distance Unit delivers one
// distance per class. This unit counts the classes, compares each distance
// with the best one so far (held in a register) and keeps the lower one and
// its class index; on equal distances the earlier class is kept (this
// design's choice). After the n_class-th distance, done pulses for one cycle
// with best_idx and best_dist, which the controller writes back to the SPM.
//
// Interface: start (one cycle) clears the state; dist_valid/dist_in come from
// the Distance Unit. done follows the last dist_valid by one cycle.
module mcr_search_unit
  import mcr_pkg::*;
#(
  parameter int DW = 24,
  parameter int CW = CMD_AW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [CW-1:0] n_class,
  input  logic          dist_valid,
  input  logic [DW-1:0] dist_in,
  output logic          done,
  output logic [CW-1:0] best_idx,
  output logic [DW-1:0] best_dist
);

  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      done      <= 1'b0;
      best_idx  <= '0;
      best_dist <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        cnt <= '0;
      end else if (dist_valid) begin
        if (cnt == '0 || dist_in < best_dist) begin
          best_dist <= dist_in;
          best_idx  <= cnt;
        end
        cnt <= cnt + 1'b1;
        if (cnt == n_class - 1'b1) done <= 1'b1;
      end
    end
  end

endmodule
