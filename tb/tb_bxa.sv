// tb_bxa -- random segment arrivals on eight slots; a reference model in the
// testbench predicts, per crossing, the segment presented and whether it is a
// held copy. Also checks the reset state.
module tb_bxa;
  import sp_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst;
  always #5 clk = ~clk;
  seg_t seg_in [N], seg_out [N];
  logic late [N];
  seg_t m_seg [N];
  logic m_late [N], m_held [N];
  int checks = 0, failures = 0, n_late = 0;

  bxa #(.N(N)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1;
    for (int i = 0; i < N; i++) begin seg_in[i] = '0; m_seg[i] = '0; m_held[i] = 0; end
    repeat (3) @(posedge clk);
    #1;
    for (int i = 0; i < N; i++) begin checks++; if (seg_out[i].valid) failures++; end
    @(negedge clk) rst = 0;
    for (int c = 0; c < 500; c++) begin
      for (int i = 0; i < N; i++) begin
        seg_in[i] = seg_t'($urandom);
        seg_in[i].valid = ($urandom % 3) == 0;
        // reference: new segment wins; else last fresh one shown once more
        if (seg_in[i].valid) begin
          m_seg[i] = seg_in[i]; m_late[i] = 0; m_held[i] = 0;
        end else if (m_seg[i].valid && !m_held[i]) begin
          m_late[i] = 1; m_held[i] = 1;
        end else begin
          m_seg[i].valid = 0; m_late[i] = 0; m_held[i] = 0;
        end
      end
      @(posedge clk); #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (seg_out[i].valid !== m_seg[i].valid ||
            (m_seg[i].valid && (seg_out[i] !== m_seg[i] || late[i] !== m_late[i]))) begin
          failures++;
          if (failures < 5) $display("c %0d slot %0d: got %h/%b want %h/%b", c, i,
                                     seg_out[i], late[i], m_seg[i], m_late[i]);
        end
        if (m_seg[i].valid && m_late[i]) n_late++;
      end
      @(negedge clk);
    end
    checks++; if (n_late == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
