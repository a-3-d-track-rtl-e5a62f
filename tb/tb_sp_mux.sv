// tb_sp_mux -- random selections, addresses and segments; checks that each place
// gets the address of its selected candidate and the phi/eta of the segment of
// station 2 on the track, else station 3, else station 4.
module tb_sp_mux;
  import sp_pkg::*;
  track_t      best [N_OUT];
  logic [3:0]  best_idx [N_OUT];
  logic [20:0] addr [N_TRK];
  seg_t        segs [N_ALL];
  logic        valid [N_OUT];
  logic [20:0] pt_addr [N_OUT];
  logic [11:0] phi [N_OUT];
  logic [6:0]  eta [N_OUT];
  int checks = 0, failures = 0;

  sp_mux dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 500; c++) begin
      for (int t = 0; t < N_TRK; t++) addr[t] = 21'($urandom);
      for (int i = 0; i < N_ALL; i++) segs[i] = seg_t'($urandom);
      for (int p = 0; p < N_OUT; p++) begin
        best[p] = '0;
        best[p].valid = $urandom % 2;
        best[p].mask = 5'($urandom);
        if (best[p].mask[4:2] == 0) best[p].mask[4] = 1;
        for (int s = 0; s < N_ST; s++) best[p].id[s] = 3'($urandom % 3);
        best_idx[p] = 4'($urandom % N_TRK);
      end
      #1;
      for (int p = 0; p < N_OUT; p++) begin
        int k;
        k = best[p].mask[2] ? 14 + int'(best[p].id[2]) :
            best[p].mask[3] ? 17 + int'(best[p].id[3]) : 20 + int'(best[p].id[4]);
        checks++;
        if (valid[p] !== best[p].valid || pt_addr[p] !== addr[best_idx[p]] ||
            phi[p] !== segs[k].phi || eta[p] !== segs[k].eta) failures++;
      end
      #9;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
