// tb_link_align -- drives random LCT words on 15 links with random delay settings
// and checks that each link comes out delay+1 clocks later, and that reset clears
// the valid flags.
module tb_link_align;
  import sp_pkg::*;
  localparam int N = N_LINK, MAXD = 4;
  logic clk = 0, rst;
  always #5 clk = ~clk;
  lct_t       lct_in [N], lct_out [N];
  logic [1:0] delay [N];
  lct_t       hist [N][$];
  int checks = 0, failures = 0;

  link_align #(.N(N), .MAXD(MAXD)) dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1;
    for (int i = 0; i < N; i++) begin lct_in[i] = '0; delay[i] = 2'(i % MAXD); end
    repeat (5) @(posedge clk);
    #1;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (lct_out[i].valid !== 1'b0) failures++;
    end
    @(negedge clk) rst = 0;
    for (int c = 0; c < 400; c++) begin
      if (c % 100 == 0)
        for (int i = 0; i < N; i++) begin delay[i] = 2'($urandom); hist[i].delete(); end
      for (int i = 0; i < N; i++) begin
        lct_in[i] = lct_t'($urandom);
        hist[i].push_front(lct_in[i]);
      end
      @(posedge clk); #1;
      for (int i = 0; i < N; i++)
        if (hist[i].size() > int'(delay[i])) begin
          checks++;
          if (lct_out[i] !== hist[i][delay[i]]) begin
            failures++;
            if (failures < 5) $display("link %0d delay %0d: got %h want %h", i, delay[i],
                                       lct_out[i], hist[i][delay[i]]);
          end
        end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
