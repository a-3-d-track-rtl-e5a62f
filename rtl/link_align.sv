// link_align -- bunch-crossing alignment of the optical links.
//
// The LCT words of the 15 links reach the board with different delays. Each link
// passes through a shift register of MAXD stages and its output is taken from the
// stage chosen by delay[i], so link i leaves delay[i]+1 clocks after it entered.
// The delays are set once per run from the control interface. That the links are
// aligned is stated in the description of the board; the shift-register method and
// the delay range are this design's choice. Reset clears the valid flags.
module link_align
  import sp_pkg::*;
#(
  parameter int N    = N_LINK,
  parameter int MAXD = 4,
  localparam int DW  = $clog2(MAXD)
) (
  input  logic          clk,
  input  logic          rst,
  input  lct_t          lct_in  [N],
  input  logic [DW-1:0] delay   [N],
  output lct_t          lct_out [N]
);
  lct_t sr [N][MAXD];

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      sr[i][0] <= lct_in[i];
      for (int k = 1; k < MAXD; k++) sr[i][k] <= sr[i][k-1];
      if (rst) for (int k = 0; k < MAXD; k++) sr[i][k].valid <= 1'b0;
    end
  end

  always_comb
    for (int i = 0; i < N; i++) lct_out[i] = sr[i][delay[i]];
endmodule
