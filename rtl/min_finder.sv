// min_finder: running arg-min over the class distances of one query.
//
// "start" resets it; each "valid" presents a class id and its distance, and
// the comparator keeps the smaller one in the register (ties keep the
// earlier, lower id). Comparator plus feedback register are as published.
//
// Timing: min_id/min_dist reflect every input up to the previous edge.
module min_finder
  import fsl_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        valid,
  input  logic [7:0]  id,
  input  logic [31:0] dist_in,
  output logic [7:0]  min_id,
  output logic [31:0] min_dist
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      min_id <= '0; min_dist <= '1;
    end else if (start) begin
      min_id <= '0; min_dist <= '1;
    end else if (valid && dist_in < min_dist) begin
      min_id <= id; min_dist <= dist_in;
    end
endmodule
