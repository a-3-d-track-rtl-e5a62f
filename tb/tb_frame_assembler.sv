// tb_frame_assembler -- sends random 32-bit words on 15 links as pairs of 16-bit
// frames at 80 MHz, high half first, with occasional frames not flagged valid,
// and checks the assembled words one 40 MHz clock after their second frame.
module tb_frame_assembler;
  import sp_pkg::*;
  localparam int N = N_LINK;
  logic clk80 = 1'b1, clk = 1'b0, rst;
  // both clocks from one process so that their common edges fall in one step
  always #6.25 begin
    clk80 = ~clk80;
    if (clk80) clk = ~clk;
  end
  logic [15:0] rx_data [N];
  logic        rx_dv [N];
  lct_t        lct [N];
  logic [31:0] word [N];
  logic        wdv [N][2];
  logic [31:0] hist [300][N];
  logic        hv [300][N];
  int checks = 0, failures = 0, n_inval = 0, c40 = 0;

  frame_assembler #(.N(N)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // frame driver: first half before the aligned edge, second before the mid edge
  always @(negedge clk80)
    for (int i = 0; i < N; i++) begin
      rx_data[i] = clk ? word[i][15:0] : word[i][31:16];
      rx_dv[i]   = clk ? wdv[i][1] : wdv[i][0];
    end

  initial begin
    rst = 1;
    for (int i = 0; i < N; i++) begin word[i] = '0; wdv[i] = '{1, 1}; end
    repeat (4) @(posedge clk);
    rst = 0;
    for (int c = 0; c < 300; c++) begin
      @(negedge clk);
      // a word set at a falling edge is framed in the next 40 MHz period and
      // leaves the assembler after the 40 MHz edge that follows its second
      // frame: it is visible two falling edges later
      if (c >= 2)
        for (int i = 0; i < N; i++) begin
          lct_t e;
          e = lct_t'(hist[c-2][i]);
          if (!hv[c-2][i]) e.valid = 0;
          checks++;
          if (lct[i] !== e) begin
            failures++;
            if (failures < 5) $display("c %0d link %0d: got %h want %h", c, i, lct[i], e);
          end
        end
      for (int i = 0; i < N; i++) begin
        word[i] = $urandom;
        wdv[i][0] = ($urandom % 8) != 0; wdv[i][1] = ($urandom % 8) != 0;
        hist[c][i] = word[i];
        hv[c][i] = wdv[i][0] && wdv[i][1];
        if (!hv[c][i]) n_inval++;
      end
    end
    repeat (4) @(posedge clk);
    checks++; if (n_inval == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
