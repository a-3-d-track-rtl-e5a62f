// lut_sram -- look-up table memory standing for one of the board's synchronous
// SRAMs (sector-receiver LUTs and the PT assignment LUT).
//
// 2**AW words of DW bits. The read address is applied every clock and the word
// appears at rd_data one clock later (flow-through SRAM plus the capture register
// of the logic that reads it). A write port loads the table, as the board's
// control interface would; a write and a read of the same word in one clock
// return the old word. Contents are not reset: the table must be loaded before use.
module lut_sram #(
  parameter int AW = 19,
  parameter int DW = 18
) (
  input  logic          clk,
  input  logic [AW-1:0] rd_addr,
  output logic [DW-1:0] rd_data,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [DW-1:0] wr_data
);
  logic [DW-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
