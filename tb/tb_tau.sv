// tb_tau -- random link patterns into an assembler keyed on station 3; each
// resulting track (mask, chosen segment per station, rank) is compared one clock
// later with the rule recomputed in the testbench.
module tb_tau;
  import sp_pkg::*;
  localparam int KEY = ST_ME3;
  logic clk = 0, rst;
  always #5 clk = ~clk;
  logic [7:0] lnk [N_SEG][N_ST];
  track_t     trk [N_SEG];
  int checks = 0, failures = 0, n2 = 0, n3 = 0;

  tau #(.KEY(KEY)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1;
    for (int k = 0; k < N_SEG; k++) for (int s = 0; s < N_ST; s++) lnk[k][s] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int c = 0; c < 400; c++) begin
      for (int k = 0; k < N_SEG; k++)
        for (int s = 0; s < N_ST; s++) begin
          // only the stations this assembler is wired to carry links
          if (s == ST_ME1)      lnk[k][s] = ($urandom % 3 == 0) ? 8'($urandom) & 8'h3f : 8'h0;
          else if (s == ST_ME2 || s == ST_ME4)
                                lnk[k][s] = ($urandom % 3 == 0) ? 8'($urandom) & 8'h07 : 8'h0;
          else                  lnk[k][s] = '0;
        end
      @(posedge clk); #1;
      for (int k = 0; k < N_SEG; k++) begin
        int ns; bit any;
        ns = 0; any = 0;
        for (int s = 0; s < N_ST; s++) if (lnk[k][s] != 0) begin any = 1; ns++; end
        checks++;
        if (trk[k].valid !== any) failures++;
        if (any) begin
          if (ns == 1) n2++; else n3++;
          checks++;
          if (trk[k].rank !== 4'({3'(ns + 1), lnk[k][ST_ME1] != 0}) ||
              !trk[k].mask[KEY] || trk[k].id[KEY] !== 3'(k)) failures++;
          for (int s = 0; s < N_ST; s++) if (s != KEY) begin
            checks++;
            if (trk[k].mask[s] !== (lnk[k][s] != 0)) failures++;
            else if (lnk[k][s] != 0) begin
              int lo; lo = 0;
              while (!lnk[k][s][lo]) lo++;
              if (int'(trk[k].id[s]) != lo) failures++;
            end
          end
        end
      end
      @(negedge clk);
    end
    checks++; if (n2 == 0 || n3 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
