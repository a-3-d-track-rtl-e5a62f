// tb_lut_sram -- loads a small table with pseudo-random words, reads every word
// back and checks one-clock read latency, and checks that a read of a word being
// written in the same clock returns the old word.
module tb_lut_sram;
  localparam int AW = 8, DW = 18;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [AW-1:0] rd_addr, wr_addr;
  logic [DW-1:0] rd_data, wr_data;
  logic          wr_en;
  int checks = 0, failures = 0;
  logic [DW-1:0] model [2**AW];

  lut_sram #(.AW(AW), .DW(DW)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_addr = 0; wr_addr = 0; wr_data = 0;
    for (int a = 0; a < 2**AW; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a); wr_data = DW'($urandom); model[a] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    for (int a = 0; a < 2**AW; a++) begin
      rd_addr = AW'((a * 37) % (2**AW));
      @(posedge clk); #1;
      checks++;
      if (rd_data !== model[rd_addr]) begin
        failures++;
        $display("read %0d: got %h want %h", rd_addr, rd_data, model[rd_addr]);
      end
      @(negedge clk);
    end
    // read during write of the same word: old data, then new data
    rd_addr = 8'd5; wr_addr = 8'd5; wr_data = ~model[5]; wr_en = 1;
    @(posedge clk); #1;
    checks++; if (rd_data !== model[5]) failures++;
    @(negedge clk) wr_en = 0;
    @(posedge clk); #1;
    checks++; if (rd_data !== ~model[5]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
