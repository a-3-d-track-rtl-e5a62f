// sector_receiver -- conversion of one link's LCT into a track segment in sector
// coordinates, by three cascaded look-up memories.
//
// First memory (PHIL, 256K x 18): address {2'b0, CLCT pattern 4, quality 3,
// half strip 8, L/R bend 1}; data {phi local 10, phib local 6} in bits [15:0].
// Its output feeds two memories read in parallel:
//   ETAG (512K x 18): address {phib local 6, phi local[9:8], CSC_ID 4, eta appr 7};
//                     data {phib 5, eta 7} in bits [11:0].
//   PHIG (512K x 18): address {phi local 10, eta appr[6:2], CSC_ID 4};
//                     data {phi 12} in bits [11:0].
// The memory sizes and field widths are those of the board; which bits of phi
// local and eta appr are used, and where fields sit in the words, are this
// design's choice. Geometry and alignment corrections live in the table contents.
// Timing: segment out two clocks after the LCT in; CSC_ID, eta appr, quality and
// valid are carried along in registers. Each memory has its own write enable on
// a shared load address/data bus.
module sector_receiver
  import sp_pkg::*;
#(
  parameter int PHIL_AW = 18,
  parameter int ETAG_AW = 19,
  parameter int PHIG_AW = 19,
  parameter int DW      = 18,
  localparam int LAW    = (ETAG_AW > PHIL_AW) ? ETAG_AW : PHIL_AW
) (
  input  logic           clk,
  input  logic           rst,
  input  lct_t           lct,
  output seg_t           seg,
  // table loading
  input  logic [2:0]     wr_en,      // {PHIG, ETAG, PHIL}
  input  logic [LAW-1:0] wr_addr,
  input  logic [DW-1:0]  wr_data
);
  logic [DW-1:0] phil_q, etag_q, phig_q;
  logic [9:0]    phi_local;
  logic [5:0]    phib_local;

  // stage 1 side registers
  logic       v1, v2;
  logic [2:0] q1, q2;
  logic [3:0] csc1;
  logic [6:0] eta1;

  lut_sram #(.AW(PHIL_AW), .DW(DW)) u_phil (
    .clk, .rd_addr(PHIL_AW'({lct.patt, lct.quality, lct.halfstrip, lct.lr})),
    .rd_data(phil_q), .wr_en(wr_en[0]), .wr_addr(wr_addr[PHIL_AW-1:0]), .wr_data);

  assign phi_local  = phil_q[15:6];
  assign phib_local = phil_q[5:0];

  lut_sram #(.AW(ETAG_AW), .DW(DW)) u_etag (
    .clk, .rd_addr(ETAG_AW'({phib_local, phi_local[9:8], csc1, eta1})),
    .rd_data(etag_q), .wr_en(wr_en[1]), .wr_addr(wr_addr[ETAG_AW-1:0]), .wr_data);

  lut_sram #(.AW(PHIG_AW), .DW(DW)) u_phig (
    .clk, .rd_addr(PHIG_AW'({phi_local, eta1[6:2], csc1})),
    .rd_data(phig_q), .wr_en(wr_en[2]), .wr_addr(wr_addr[PHIG_AW-1:0]), .wr_data);

  always_ff @(posedge clk) begin
    if (rst) begin
      v1 <= 1'b0;
      v2 <= 1'b0;
    end else begin
      v1 <= lct.valid;
      v2 <= v1;
    end
    q1   <= lct.quality;
    q2   <= q1;
    csc1 <= lct.csc_id;
    eta1 <= lct.eta_appr;
  end

  always_comb begin
    seg.valid   = v2;
    seg.quality = q2;
    seg.phi     = phig_q[11:0];
    seg.eta     = etag_q[6:0];
    seg.phib    = etag_q[11:7];
  end
endmodule
