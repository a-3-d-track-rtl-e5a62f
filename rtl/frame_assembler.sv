// frame_assembler -- joins the two 16-bit frames of each optical link into the
// 32-bit LCT word of one bunch crossing.
//
// The link deserializers deliver one 16-bit frame per 80 MHz clock, so one LCT
// word takes two frames. The two clocks are assumed to come from one source with
// their rising edges aligned: the first frame (word bits 31:16) is captured by
// the 80 MHz edge that coincides with the 40 MHz rising edge, the second (bits
// 15:0) by the following mid-period edge, and the 40 MHz register takes both at
// the next 40 MHz edge. If the receiver did not flag either frame as valid data
// (rx_dv low) the word's valid bit is cleared. Two frames per word is the
// link format described for the board; the clock relation and the use of rx_dv
// are this design's choice. Latency: word out one 40 MHz clock after its second
// frame. Reset clears the valid bits.
module frame_assembler
  import sp_pkg::*;
#(
  parameter int N = N_LINK
) (
  input  logic        clk80,
  input  logic        clk,       // 40 MHz, rising edges aligned with clk80
  input  logic        rst,
  input  logic [15:0] rx_data [N],
  input  logic        rx_dv   [N],
  output lct_t        lct     [N]
);
  logic [15:0] hi [N], lo [N];
  logic        dv_hi [N], dv_lo [N];

  always_ff @(posedge clk80)
    for (int i = 0; i < N; i++) begin
      hi[i]    <= lo[i];
      lo[i]    <= rx_data[i];
      dv_hi[i] <= dv_lo[i];
      dv_lo[i] <= rx_dv[i];
    end

  always_ff @(posedge clk)
    for (int i = 0; i < N; i++) begin
      lct[i] <= lct_t'({hi[i], lo[i]});
      if (rst || !(dv_hi[i] && dv_lo[i])) lct[i].valid <= 1'b0;
    end
endmodule
