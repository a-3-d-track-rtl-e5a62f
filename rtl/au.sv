// au -- Assignment Unit: PT look-up for the three best muons.
//
// Each output place has its own PT memory of 2**PT_AW words (4 MB as 2M x 16).
// The word read at pt_addr[p] holds {unused 8, quality 2, sign 1, pt 5}. The muon
// word is {valid, pt, sign, quality, phi[11:7], eta[6:1]}; a place without a
// track gives an all-zero word. The memory size follows the description; the
// word layouts are this design's. Timing: one clock, memory and side registers.
module au
  import sp_pkg::*;
#(
  parameter int PT_AW = 21,
  parameter int PT_DW = 16
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             valid   [N_OUT],
  input  logic [PT_AW-1:0] pt_addr [N_OUT],
  input  logic [11:0]      phi     [N_OUT],
  input  logic [6:0]       eta     [N_OUT],
  output muon_t            mu      [N_OUT],
  // table loading
  input  logic [N_OUT-1:0] wr_en,
  input  logic [PT_AW-1:0] wr_addr,
  input  logic [PT_DW-1:0] wr_data
);
  logic [PT_DW-1:0] q [N_OUT];
  logic             v1 [N_OUT];
  logic [11:0]      phi1 [N_OUT];
  logic [6:0]       eta1 [N_OUT];

  for (genvar p = 0; p < N_OUT; p++) begin : g_lut
    lut_sram #(.AW(PT_AW), .DW(PT_DW)) u_pt (
      .clk, .rd_addr(pt_addr[p]), .rd_data(q[p]),
      .wr_en(wr_en[p]), .wr_addr, .wr_data);
  end

  always_ff @(posedge clk)
    for (int p = 0; p < N_OUT; p++) begin
      v1[p]   <= rst ? 1'b0 : valid[p];
      phi1[p] <= phi[p];
      eta1[p] <= eta[p];
    end

  always_comb
    for (int p = 0; p < N_OUT; p++) begin
      mu[p] = '0;
      if (v1[p]) begin
        mu[p].valid   = 1'b1;
        mu[p].pt      = q[p][4:0];
        mu[p].sign    = q[p][5];
        mu[p].quality = q[p][7:6];
        mu[p].phi     = phi1[p][11:7];
        mu[p].eta     = eta1[p][6:1];
      end
    end
endmodule
