// csctf_sp -- one sector of the endcap muon track finder: three sector receivers
// and the sector processor of one board, for a 60-degree sector.
//
// Data flow, one bunch crossing per 40 MHz clock:
//   15 links, two 16-bit frames each at 80 MHz -> frame_assembler (1 clock after
//   the second frame) -> 15 LCT words -> link_align (1 clock + programmed delay)
//   -> 15 sector_receiver look-up chains (2 clocks) -> segment bus of 23 slots,
//      with the 8 barrel segments delayed to match (5 clocks)
//   -> bxa, the bunch crossing analyzer (1 clock)
//   -> six extrapolation units EU1-2, EU1-3, EU2-3, EU2-4, EU3-4, EU MB1-2 (1 clock)
//   -> three track assemblers keyed on stations 2, 3 and 4: nine tracks (1 clock)
//   -> fsu, cancellation and best three of nine (1 clock), while pt_precalc
//      forms the PT address of all nine tracks
//   -> sp_mux and au, PT look-up and output muon words (1 clock).
// The segment data reach the later stages through seg_fifo. The sector
// processor takes 5 clocks and the receivers 2: a muon leaves 7 clocks after its
// LCT words leave the alignment stage, 8 after they are assembled from the
// frames and 9 after the 40 MHz edge that follows the second frame's capture,
// when all link delays are 0.
// The look-up memories (3 per link, 3 PT tables) are loaded through one bus:
// lut_sel = 3*link + {0: PHIL, 1: ETAG, 2: PHIG} for the receivers, 45 + place
// for the PT tables, which take lut_data[15:0]. The stages and their order, the
// memory sizes and the latency follow the processor's description; the
// pairing of stations in the assemblers, the window values, the loading bus and
// all word layouts are this design's choices.
module csctf_sp
  import sp_pkg::*;
#(
  parameter int ALIGN_MAXD = 4,
  parameter int PHIL_AW    = 18,
  parameter int ETAG_AW    = 19,
  parameter int PHIG_AW    = 19,
  parameter int PT_AW      = 21,
  parameter int DPHI_MAX   = 128,
  parameter int DETA_MAX   = 8,
  parameter int PHIB_MAX   = 12,
  localparam int DLW       = $clog2(ALIGN_MAXD),
  localparam int LAW       = (ETAG_AW > PHIL_AW) ? ETAG_AW : PHIL_AW,
  localparam int BAW       = (LAW > PT_AW) ? LAW : PT_AW
) (
  input  logic           clk80,      // link frame clock, edges aligned with clk
  input  logic           clk,        // 40 MHz bunch crossing clock
  input  logic           rst,
  input  logic [15:0]    rx_data    [N_LINK],   // link frames, high half first
  input  logic           rx_dv      [N_LINK],
  input  logic [DLW-1:0] link_delay [N_LINK],
  input  seg_t           mb_in      [N_MB],
  input  logic           lut_we,
  input  logic [5:0]     lut_sel,
  input  logic [BAW-1:0] lut_addr,
  input  logic [17:0]    lut_data,
  output muon_t          mu_out     [N_OUT],
  // monitoring, per crossing: tracks cancelled as redundant, tracks beyond the best three
  output logic [3:0]     mon_cancelled,
  output logic [3:0]     mon_dropped
);
  localparam int IW = $clog2(N_TRK);
  localparam int AW = N_ST + 8 + 4 + 4;

  // ---------------- sector receivers ----------------
  lct_t lct_in [N_LINK];
  lct_t lct_al [N_LINK];

  frame_assembler #(.N(N_LINK)) u_frames (.clk80, .clk, .rst, .rx_data, .rx_dv, .lct(lct_in));

  seg_t sr_seg [N_LINK];
  // A barrel segment is captured on the same 40 MHz edge as the first frame of
  // the LCT words of its crossing; five stages match frame assembly, alignment
  // (at delay 0) and the two receiver look-ups.
  localparam int MB_DLY = 5;
  seg_t mb_d   [MB_DLY][N_MB];
  seg_t segs   [N_ALL];

  link_align #(.N(N_LINK), .MAXD(ALIGN_MAXD)) u_align (
    .clk, .rst, .lct_in, .delay(link_delay), .lct_out(lct_al));

  for (genvar l = 0; l < N_LINK; l++) begin : g_sr
    logic [2:0] we;
    always_comb
      for (int t = 0; t < 3; t++) we[t] = lut_we && (int'(lut_sel) == 3 * l + t);
    sector_receiver #(.PHIL_AW(PHIL_AW), .ETAG_AW(ETAG_AW), .PHIG_AW(PHIG_AW)) u_sr (
      .clk, .rst, .lct(lct_al[l]), .seg(sr_seg[l]),
      .wr_en(we), .wr_addr(lut_addr[LAW-1:0]), .wr_data(lut_data));
  end

  always_ff @(posedge clk)
    for (int i = 0; i < N_MB; i++) begin
      mb_d[0][i] <= mb_in[i];
      for (int k = 1; k < MB_DLY; k++) mb_d[k][i] <= mb_d[k-1][i];
      if (rst) for (int k = 0; k < MB_DLY; k++) mb_d[k][i].valid <= 1'b0;
    end

  always_comb begin
    for (int i = 0; i < N_MB; i++) segs[B_MB + i] = mb_d[MB_DLY-1][i];
    for (int l = 0; l < N_LINK; l++) segs[B_ME1 + l] = sr_seg[l];
  end

  // ---------------- bunch crossing analyzer ----------------
  seg_t s1 [N_ALL];
  logic late [N_ALL];

  bxa #(.N(N_ALL)) u_bxa (.clk, .rst, .seg_in(segs), .seg_out(s1), .late);

  // ---------------- extrapolation units ----------------
  seg_t me1 [N_ME1], me2 [N_SEG], me3 [N_SEG], me4 [N_SEG], mb [N_MB];
  logic me1_l [N_ME1], me2_l [N_SEG], me3_l [N_SEG], me4_l [N_SEG], mb_l [N_MB];

  always_comb begin
    for (int i = 0; i < N_MB; i++)  begin mb[i]  = s1[B_MB + i];  mb_l[i]  = late[B_MB + i];  end
    for (int i = 0; i < N_ME1; i++) begin me1[i] = s1[B_ME1 + i]; me1_l[i] = late[B_ME1 + i]; end
    for (int i = 0; i < N_SEG; i++) begin
      me2[i] = s1[B_ME2 + i]; me2_l[i] = late[B_ME2 + i];
      me3[i] = s1[B_ME3 + i]; me3_l[i] = late[B_ME3 + i];
      me4[i] = s1[B_ME4 + i]; me4_l[i] = late[B_ME4 + i];
    end
  end

  logic [N_SEG-1:0] l12 [N_ME1], l13 [N_ME1], l23 [N_SEG], l24 [N_SEG], l34 [N_SEG],
                    lmb [N_MB];

  eu #(.NA(N_ME1), .NB(N_SEG), .DPHI_MAX(DPHI_MAX), .DETA_MAX(DETA_MAX), .PHIB_MAX(PHIB_MAX))
    u_eu12 (.clk, .rst, .a(me1), .a_late(me1_l), .b(me2), .b_late(me2_l), .lnk(l12));
  eu #(.NA(N_ME1), .NB(N_SEG), .DPHI_MAX(DPHI_MAX), .DETA_MAX(DETA_MAX), .PHIB_MAX(PHIB_MAX))
    u_eu13 (.clk, .rst, .a(me1), .a_late(me1_l), .b(me3), .b_late(me3_l), .lnk(l13));
  eu #(.NA(N_SEG), .NB(N_SEG), .DPHI_MAX(DPHI_MAX), .DETA_MAX(DETA_MAX), .PHIB_MAX(PHIB_MAX))
    u_eu23 (.clk, .rst, .a(me2), .a_late(me2_l), .b(me3), .b_late(me3_l), .lnk(l23));
  eu #(.NA(N_SEG), .NB(N_SEG), .DPHI_MAX(DPHI_MAX), .DETA_MAX(DETA_MAX), .PHIB_MAX(PHIB_MAX))
    u_eu24 (.clk, .rst, .a(me2), .a_late(me2_l), .b(me4), .b_late(me4_l), .lnk(l24));
  eu #(.NA(N_SEG), .NB(N_SEG), .DPHI_MAX(DPHI_MAX), .DETA_MAX(DETA_MAX), .PHIB_MAX(PHIB_MAX))
    u_eu34 (.clk, .rst, .a(me3), .a_late(me3_l), .b(me4), .b_late(me4_l), .lnk(l34));
  eu #(.NA(N_MB), .NB(N_SEG), .DPHI_MAX(DPHI_MAX), .DETA_MAX(DETA_MAX), .PHIB_MAX(PHIB_MAX),
       .CHECK_ETA(1'b0))
    u_eumb (.clk, .rst, .a(mb), .a_late(mb_l), .b(me2), .b_late(me2_l), .lnk(lmb));

  // ---------------- track assemblers ----------------
  logic [7:0] k2 [N_SEG][N_ST], k3 [N_SEG][N_ST], k4 [N_SEG][N_ST];

  always_comb begin
    for (int k = 0; k < N_SEG; k++)
      for (int s = 0; s < N_ST; s++) begin
        k2[k][s] = '0;
        k3[k][s] = '0;
        k4[k][s] = '0;
      end
    for (int k = 0; k < N_SEG; k++) begin
      for (int i = 0; i < N_ME1; i++) begin
        k2[k][ST_ME1][i] = l12[i][k];
        k3[k][ST_ME1][i] = l13[i][k];
      end
      for (int i = 0; i < N_MB; i++) k2[k][ST_MB][i] = lmb[i][k];
      for (int j = 0; j < N_SEG; j++) begin
        k2[k][ST_ME3][j] = l23[k][j];
        k2[k][ST_ME4][j] = l24[k][j];
        k3[k][ST_ME2][j] = l23[j][k];
        k3[k][ST_ME4][j] = l34[k][j];
        k4[k][ST_ME2][j] = l24[j][k];
        k4[k][ST_ME3][j] = l34[j][k];
      end
    end
  end

  track_t trk [N_TRK];
  track_t t2 [N_SEG], t3 [N_SEG], t4 [N_SEG];

  tau #(.KEY(ST_ME2)) u_tau1 (.clk, .rst, .lnk(k2), .trk(t2));
  tau #(.KEY(ST_ME3)) u_tau2 (.clk, .rst, .lnk(k3), .trk(t3));
  tau #(.KEY(ST_ME4)) u_tau3 (.clk, .rst, .lnk(k4), .trk(t4));

  always_comb
    for (int k = 0; k < N_SEG; k++) begin
      trk[k]             = t2[k];
      trk[N_SEG + k]     = t3[k];
      trk[2 * N_SEG + k] = t4[k];
    end

  // ---------------- segment pipeline ----------------
  seg_t tap [3][N_ALL];
  seg_fifo #(.N(N_ALL), .DEPTH(3)) u_fifo (.clk, .rst, .din(s1), .tap);

  // ---------------- final selection and PT precalculation ----------------
  track_t        best     [N_OUT];
  logic [IW-1:0] best_idx [N_OUT];
  logic [AW-1:0] addr     [N_TRK];

  fsu #(.NT(N_TRK), .NSEL(N_OUT)) u_fsu (
    .clk, .rst, .trk, .best, .best_idx, .cancelled(mon_cancelled), .dropped(mon_dropped));

  for (genvar t = 0; t < N_TRK; t++) begin : g_pre
    pt_precalc u_pre (.clk, .trk(trk[t]), .segs(tap[1]), .addr(addr[t]));
  end

  // ---------------- multiplexer and assignment ----------------
  logic          m_valid [N_OUT];
  logic [AW-1:0] m_addr  [N_OUT];
  logic [11:0]   m_phi   [N_OUT];
  logic [6:0]    m_eta   [N_OUT];

  sp_mux #(.AW(AW)) u_mux (
    .best, .best_idx, .addr, .segs(tap[2]),
    .valid(m_valid), .pt_addr(m_addr), .phi(m_phi), .eta(m_eta));

  // The precalculated address is AW bits; a smaller PT table uses its low bits.
  logic [PT_AW-1:0] m_addr_pt [N_OUT];
  always_comb
    for (int p = 0; p < N_OUT; p++) m_addr_pt[p] = PT_AW'(m_addr[p]);

  logic [N_OUT-1:0] pt_we;
  always_comb
    for (int p = 0; p < N_OUT; p++) pt_we[p] = lut_we && (int'(lut_sel) == 3 * N_LINK + p);

  au #(.PT_AW(PT_AW), .PT_DW(16)) u_au (
    .clk, .rst, .valid(m_valid), .pt_addr(m_addr_pt), .phi(m_phi), .eta(m_eta),
    .mu(mu_out), .wr_en(pt_we), .wr_addr(lut_addr[PT_AW-1:0]), .wr_data(lut_data[15:0]));
endmodule
