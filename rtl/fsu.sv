// fsu -- Final Selection Unit.
//
// Several assemblers can build the same muon from different key stations. A
// track is cancelled when it shares a segment (same station, same index) with
// another valid track that beats it: higher rank, or equal rank and lower index.
// The surviving tracks are ordered by the same rule and the first NSEL are output
// in order, best first, with their candidate index; empty places have valid = 0.
// Cancelling redundant tracks and selecting the best three of nine in one clock
// follow the processor's description; the sharing and ordering rules are this
// design's. Timing: one clock, registered outputs, cleared on reset.
// `cancelled` and `dropped` count tracks removed this crossing, for monitoring.
module fsu
  import sp_pkg::*;
#(
  parameter int NT   = N_TRK,
  parameter int NSEL = N_OUT,
  localparam int IW  = $clog2(NT)
) (
  input  logic          clk,
  input  logic          rst,
  input  track_t        trk      [NT],
  output track_t        best     [NSEL],
  output logic [IW-1:0] best_idx [NSEL],
  output logic [3:0]    cancelled,   // tracks cancelled as redundant
  output logic [3:0]    dropped      // surviving tracks beyond NSEL
);
  function automatic logic beats(input int j, input int i);
    return trk[j].rank > trk[i].rank || (trk[j].rank == trk[i].rank && j < i);
  endfunction

  function automatic logic shares(input int j, input int i);
    logic r;
    r = 1'b0;
    for (int s = 0; s < N_ST; s++)
      if (trk[i].mask[s] && trk[j].mask[s] && trk[i].id[s] == trk[j].id[s]) r = 1'b1;
    return r;
  endfunction

  logic [NT-1:0] alive;
  int            pos [NT];
  track_t        best_d [NSEL];
  logic [IW-1:0] idx_d  [NSEL];
  logic [3:0]    canc_d, drop_d;

  always_comb begin
    canc_d = '0;
    drop_d = '0;
    for (int i = 0; i < NT; i++) begin
      alive[i] = trk[i].valid;
      for (int j = 0; j < NT; j++)
        if (j != i && trk[j].valid && trk[i].valid && shares(j, i) && beats(j, i))
          alive[i] = 1'b0;
      if (trk[i].valid && !alive[i]) canc_d = canc_d + 4'd1;
    end
    for (int i = 0; i < NT; i++) begin
      pos[i] = 0;
      for (int j = 0; j < NT; j++)
        if (j != i && alive[j] && beats(j, i)) pos[i] = pos[i] + 1;
    end
    for (int p = 0; p < NSEL; p++) begin
      best_d[p] = '0;
      idx_d[p]  = '0;
    end
    for (int i = 0; i < NT; i++)
      if (alive[i]) begin
        if (pos[i] < NSEL) begin
          best_d[pos[i]] = trk[i];
          idx_d[pos[i]]  = IW'(i);
        end else begin
          drop_d = drop_d + 4'd1;
        end
      end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < NSEL; p++) begin
      best[p]     <= rst ? '0 : best_d[p];
      best_idx[p] <= idx_d[p];
    end
    cancelled <= rst ? '0 : canc_d;
    dropped   <= rst ? '0 : drop_d;
  end

  // Outputs are packed best first: no gap before a valid place, rank not rising.
  for (genvar p = 1; p < NSEL; p++) begin : g_order
    a_order: assert property (@(posedge clk) disable iff (rst)
      best[p].valid |-> best[p-1].valid && best[p-1].rank >= best[p].rank);
  end
endmodule
