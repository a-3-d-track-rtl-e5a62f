// tb_seg_fifo -- random segment words through the three-stage pipeline; checks
// every tap against the input of k+1 clocks earlier.
module tb_seg_fifo;
  import sp_pkg::*;
  localparam int N = N_ALL, DEPTH = 3;
  logic clk = 0, rst;
  always #5 clk = ~clk;
  seg_t din [N], tap [DEPTH][N];
  seg_t hist [$];
  int checks = 0, failures = 0;

  seg_fifo #(.N(N), .DEPTH(DEPTH)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1;
    for (int i = 0; i < N; i++) din[i] = '0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int c = 0; c < 200; c++) begin
      for (int i = 0; i < N; i++) din[i] = seg_t'($urandom);
      hist.push_front(din[c % N]);
      @(posedge clk); #1;
      for (int k = 0; k < DEPTH; k++)
        if (c >= k + N) begin
          // tap[k] holds the word pushed k clocks before the latest one
          checks++;
          if (tap[k][(c - k) % N] !== hist[k]) failures++;
        end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
