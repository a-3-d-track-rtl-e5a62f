// bxa -- Bunch Crossing Analyzer.
//
// LCTs of one muon may reach the processor in two successive bunch crossings.
// For every segment slot the analyzer passes on a newly arrived valid segment; if
// none arrives, it presents the previous crossing's segment once more and flags
// it late. A segment is therefore visible in two successive crossings and can be
// linked with a partner that arrives one crossing after it. A held segment is not
// held a second time, and a new segment replaces a held one. The one-crossing
// window follows the processor's description; the hold-and-flag method is this
// design's choice. Timing: one clock, registered outputs, valid cleared on reset.
module bxa
  import sp_pkg::*;
#(
  parameter int N = N_ALL
) (
  input  logic clk,
  input  logic rst,
  input  seg_t seg_in  [N],
  output seg_t seg_out [N],
  output logic late    [N]   // segment is the previous crossing's, held once
);
  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (rst) begin
        seg_out[i] <= '0;
        late[i]    <= 1'b0;
      end else if (seg_in[i].valid) begin
        seg_out[i] <= seg_in[i];
        late[i]    <= 1'b0;
      end else if (seg_out[i].valid && !late[i]) begin
        late[i]    <= 1'b1;
      end else begin
        seg_out[i].valid <= 1'b0;
        late[i]          <= 1'b0;
      end
    end
  end

  // A held copy is always a valid segment.
  for (genvar i = 0; i < N; i++) begin : g_chk
    a_late_valid: assert property (@(posedge clk) disable iff (rst) late[i] |-> seg_out[i].valid);
  end
endmodule
