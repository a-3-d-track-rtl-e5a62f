// eu -- Extrapolation Unit for one pair of stations.
//
// Every segment a[i] of the first station is tested against every segment b[j]
// of the second, all in parallel. The pair is linked when both are valid, not
// both held over from the previous crossing, their phi differ by at most
// DPHI_MAX, their eta by at most DETA_MAX (when CHECK_ETA is set; barrel segments
// carry no eta) and both bend angles, taken as signed, have magnitude at most
// PHIB_MAX, i.e. neither segment points away from the interaction region. The
// window test follows the processor's description; the window values and the bend
// test as a magnitude limit are this design's choice. Timing: one clock, link
// bits registered, cleared on reset.
module eu
  import sp_pkg::*;
#(
  parameter int NA        = 6,
  parameter int NB        = 3,
  parameter int DPHI_MAX  = 128,
  parameter int DETA_MAX  = 8,
  parameter int PHIB_MAX  = 12,
  parameter bit CHECK_ETA = 1'b1
) (
  input  logic          clk,
  input  logic          rst,
  input  seg_t          a      [NA],
  input  logic          a_late [NA],
  input  seg_t          b      [NB],
  input  logic          b_late [NB],
  output logic [NB-1:0] lnk    [NA]   // lnk[i][j]: a[i] and b[j] linked
);
  function automatic logic in_win(input logic [12:0] x, input logic [12:0] y,
                                  input int lim);
    logic [12:0] d;
    d = (x > y) ? x - y : y - x;
    return 32'(d) <= lim;
  endfunction

  function automatic logic bend_ok(input logic [4:0] pb);
    logic [4:0] mag;
    mag = pb[4] ? -pb : pb;
    return !(pb == 5'b10000) && 32'(mag) <= PHIB_MAX;
  endfunction

  logic [NB-1:0] lnk_d [NA];

  always_comb
    for (int i = 0; i < NA; i++)
      for (int j = 0; j < NB; j++)
        lnk_d[i][j] = a[i].valid && b[j].valid && !(a_late[i] && b_late[j])
                   && in_win(13'(a[i].phi), 13'(b[j].phi), DPHI_MAX)
                   && (!CHECK_ETA || in_win(13'(a[i].eta), 13'(b[j].eta), DETA_MAX))
                   && bend_ok(a[i].phib) && bend_ok(b[j].phib);

  always_ff @(posedge clk)
    for (int i = 0; i < NA; i++) lnk[i] <= rst ? '0 : lnk_d[i];
endmodule
