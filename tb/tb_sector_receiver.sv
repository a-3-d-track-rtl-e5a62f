// tb_sector_receiver -- loads the three tables of one link at full size with
// entries computed from hash functions of the address, only at the addresses the
// test uses, then streams random LCTs and checks each segment two clocks later
// against the chain worked out in the testbench.
module tb_sector_receiver;
  import sp_pkg::*;
  logic clk = 0, rst;
  always #5 clk = ~clk;
  lct_t        lct;
  seg_t        seg;
  logic [2:0]  wr_en;
  logic [18:0] wr_addr;
  logic [17:0] wr_data;
  int checks = 0, failures = 0;
  lct_t stim [64];
  seg_t want [64];

  sector_receiver dut (.*);

  function automatic logic [17:0] hsh(input logic [18:0] a, input int salt);
    logic [31:0] x;
    x = (32'(a) + 32'(salt)) * 32'h9E3779B1;
    return 18'(x >> 11);
  endfunction

  task automatic wr(input int t, input logic [18:0] a, input logic [17:0] d);
    @(negedge clk);
    wr_en = 3'b001 << t; wr_addr = a; wr_data = d;
    @(negedge clk);
    wr_en = 0;
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; wr_en = 0; wr_addr = 0; wr_data = 0; lct = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int n = 0; n < 64; n++) begin
      logic [17:0] a1, d1, d2, d3;
      logic [18:0] a2, a3;
      stim[n] = lct_t'($urandom);
      stim[n].valid = (n % 5) != 3;
      a1 = {2'b0, stim[n].patt, stim[n].quality, stim[n].halfstrip, stim[n].lr};
      d1 = {2'b0, hsh(19'(a1), 1)[15:0]};
      wr(0, 19'(a1), d1);
      a2 = {d1[5:0], d1[15:14], stim[n].csc_id, stim[n].eta_appr};
      d2 = hsh(a2, 2);
      wr(1, a2, d2);
      a3 = {d1[15:6], stim[n].eta_appr[6:2], stim[n].csc_id};
      d3 = hsh(a3, 3);
      wr(2, a3, d3);
      want[n] = '{valid: stim[n].valid, quality: stim[n].quality, phi: d3[11:0],
                  eta: d2[6:0], phib: d2[11:7]};
    end
    // stream the LCTs back to back
    for (int n = 0; n < 66; n++) begin
      @(negedge clk);
      lct = (n < 64) ? stim[n] : '0;
      if (n >= 2) begin
        checks++;
        if (seg.valid !== want[n-2].valid ||
            (want[n-2].valid && seg !== want[n-2])) begin
          failures++;
          if (failures < 5) $display("lct %0d: got %h want %h", n - 2, seg, want[n-2]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
