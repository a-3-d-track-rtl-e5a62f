// sp_mux -- routes the three selected tracks to the assignment unit.
//
// For each output place p the precalculated PT address of candidate best_idx[p]
// is chosen, and phi and eta are read from the delayed segment data: the segment
// of station 2 on the track, else station 3, else station 4. Combinational; its
// inputs are all registered in the same clock (final selection, PT
// precalculation and the segment pipeline). The multiplexer sits between the
// FIFO, the final selection and the assignment unit in the block diagram; its
// contents are this design's.
module sp_mux
  import sp_pkg::*;
#(
  parameter int AW  = 21,
  localparam int IW = $clog2(N_TRK)
) (
  input  track_t        best     [N_OUT],
  input  logic [IW-1:0] best_idx [N_OUT],
  input  logic [AW-1:0] addr     [N_TRK],
  input  seg_t          segs     [N_ALL],
  output logic          valid    [N_OUT],
  output logic [AW-1:0] pt_addr  [N_OUT],
  output logic [11:0]   phi      [N_OUT],
  output logic [6:0]    eta      [N_OUT]
);
  always_comb
    for (int p = 0; p < N_OUT; p++) begin
      int k;
      valid[p]   = best[p].valid;
      pt_addr[p] = addr[best_idx[p]];
      if (best[p].mask[ST_ME2])      k = seg_index(ST_ME2, int'(best[p].id[ST_ME2]));
      else if (best[p].mask[ST_ME3]) k = seg_index(ST_ME3, int'(best[p].id[ST_ME3]));
      else                           k = seg_index(ST_ME4, int'(best[p].id[ST_ME4]));
      phi[p] = segs[k].phi;
      eta[p] = segs[k].eta;
    end
endmodule
