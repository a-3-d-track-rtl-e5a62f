// pt_precalc -- PT look-up address of one candidate track.
//
// The stations of the track are taken in the order MB, ME1, ME2, ME3, ME4. dphi_a
// is the phi of the first segment minus that of the second, saturated to DPHIA_W
// signed bits; dphi_b is the second minus the third, shifted right by two (less
// precision is needed there) and saturated to DPHIB_W signed bits, zero if the
// track has only two segments. Address = {station mask 5, dphi_a, dphi_b, eta 4},
// where eta is the top four bits of the eta of the output segment (ME2, else
// ME3, else ME4). Using two phi differences, the coarser second one, eta and
// track type follows the processor's description; the bit allocation is this
// design's. Nine copies run in parallel with the final selection. Timing: one
// clock, registered.
module pt_precalc
  import sp_pkg::*;
#(
  parameter int DPHIA_W = 8,
  parameter int DPHIB_W = 4,
  localparam int AW     = N_ST + DPHIA_W + DPHIB_W + 4
) (
  input  logic          clk,
  input  track_t        trk,
  input  seg_t          segs [N_ALL],
  output logic [AW-1:0] addr
);
  function automatic logic signed [15:0] sat(input logic signed [15:0] x, input int w);
    logic signed [15:0] hi, lo;
    hi = 16'((1 << (w - 1)) - 1);
    lo = -hi - 16'sd1;
    return (x > hi) ? hi : (x < lo) ? lo : x;
  endfunction

  logic [11:0]        phi [3];
  logic [6:0]         eta;
  int                 n;
  logic signed [15:0] da, db;
  logic [AW-1:0]      addr_d;

  always_comb begin
    n = 0;
    for (int k = 0; k < 3; k++) phi[k] = '0;
    for (int s = 0; s < N_ST; s++)
      if (trk.mask[s] && n < 3) begin
        phi[n] = segs[seg_index(s, int'(trk.id[s]))].phi;
        n = n + 1;
      end
    if (trk.mask[ST_ME2])      eta = segs[seg_index(ST_ME2, int'(trk.id[ST_ME2]))].eta;
    else if (trk.mask[ST_ME3]) eta = segs[seg_index(ST_ME3, int'(trk.id[ST_ME3]))].eta;
    else                       eta = segs[seg_index(ST_ME4, int'(trk.id[ST_ME4]))].eta;
    da = sat($signed({4'b0, phi[0]}) - $signed({4'b0, phi[1]}), DPHIA_W);
    db = (n >= 3) ? sat(($signed({4'b0, phi[1]}) - $signed({4'b0, phi[2]})) >>> 2, DPHIB_W)
                  : 16'sd0;
    addr_d = {trk.mask, da[DPHIA_W-1:0], db[DPHIB_W-1:0], eta[6:3]};
  end

  always_ff @(posedge clk) addr <= addr_d;
endmodule
