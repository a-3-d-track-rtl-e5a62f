// seg_fifo -- fixed-latency pipeline for the segment data.
//
// The segments leaving the bunch crossing analyzer are needed again after the
// extrapolation, assembly and selection stages, to compute PT addresses and to
// report phi and eta of the chosen muons. This shift register of DEPTH stages
// delivers them; tap[k] is the input delayed by k+1 clocks. Its place in the
// processor is given by the block diagram; the shift-register form is this
// design's choice. Valid flags are cleared on reset.
module seg_fifo
  import sp_pkg::*;
#(
  parameter int N     = N_ALL,
  parameter int DEPTH = 3
) (
  input  logic clk,
  input  logic rst,
  input  seg_t din [N],
  output seg_t tap [DEPTH][N]
);
  always_ff @(posedge clk)
    for (int i = 0; i < N; i++) begin
      tap[0][i] <= din[i];
      for (int k = 1; k < DEPTH; k++) tap[k][i] <= tap[k-1][i];
      if (rst) for (int k = 0; k < DEPTH; k++) tap[k][i].valid <= 1'b0;
    end
endmodule
