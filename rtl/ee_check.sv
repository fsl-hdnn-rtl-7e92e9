// ee_check: early-exit confidence check.
//
// After each CONV block b (1..nblk) the classifier reports its prediction.
// Counting starts at block E_s: there the run length is 1; at every later
// block it grows by one if the prediction equals the previous block's and
// restarts at 1 otherwise. Inference exits as soon as the run length reaches
// E_c, and always at the last block. This follows the published rule
// "terminate when predictions remain consistent across E_c consecutive CONV
// blocks, starting from the E_s-th block"; treating the last block as a
// forced exit and the restart-at-1 count are this design's reading.
//
// Timing: exit_now/run_len update at the edge after "valid".
module ee_check
  import fsl_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       valid,
  input  logic [2:0] blk,
  input  logic [7:0] pred,
  input  logic [2:0] es,
  input  logic [2:0] ec,
  input  logic [2:0] nblk,
  output logic       exit_now,
  output logic [2:0] run_len
);
  logic [7:0] prev;
  logic [2:0] len;

  always_comb begin
    if (blk < es)                           len = 3'd0;
    else if (blk == es || pred != prev)     len = 3'd1;
    else                                    len = run_len + 3'd1;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      prev <= '0; run_len <= '0; exit_now <= 1'b0;
    end else if (valid) begin
      prev     <= pred;
      run_len  <= len;
      exit_now <= (len != 3'd0 && len >= ec) || (blk >= nblk);
    end
endmodule
