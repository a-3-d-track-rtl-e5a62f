// tau -- Track Assembler Unit.
//
// The unit is keyed on one station (KEY) and builds one track per key segment
// (three keys). For key k, lnk[k][s] holds the link bits from the extrapolation
// unit that pairs the key station with station s, one bit per segment of s. The
// track takes, for each station with at least one link, the lowest-index linked
// segment (the port cards send their LCTs best first); the key segment itself
// completes it. The station mask is the code naming the stations on the track,
// and the rank is {number of stations, station 1 present}. A key with no link
// yields no track. Combining links into tracks and coding the stations follow the
// processor's description; the lowest-index choice and the rank are this
// design's. Timing: one clock, registered, valid cleared on reset.
module tau
  import sp_pkg::*;
#(
  parameter int KEY  = ST_ME2,
  parameter int NKEY = N_SEG
) (
  input  logic       clk,
  input  logic       rst,
  input  logic [7:0] lnk [NKEY][N_ST],  // unused stations and bits tied to 0
  output track_t     trk [NKEY]
);
  track_t t_d [NKEY];

  always_comb begin
    for (int k = 0; k < NKEY; k++) begin
      t_d[k] = '0;
      for (int s = 0; s < N_ST; s++) begin
        if (s != KEY && lnk[k][s] != '0) begin
          t_d[k].mask[s] = 1'b1;
          for (int b = 7; b >= 0; b--)
            if (lnk[k][s][b]) t_d[k].id[s] = sid_t'(b);
        end
      end
      t_d[k].valid     = t_d[k].mask != '0;
      t_d[k].mask[KEY] = t_d[k].valid;
      t_d[k].id[KEY]   = sid_t'(k);
      t_d[k].rank      = t_d[k].valid ? track_rank(t_d[k].mask) : 4'd0;
    end
  end

  always_ff @(posedge clk)
    for (int k = 0; k < NKEY; k++) trk[k] <= rst ? '0 : t_d[k];
endmodule
