// tb_fsu -- random sets of nine tracks built from a small pool of segments so
// that they often share segments. The testbench cancels and sorts them its own
// way (explicit pairwise elimination, then repeated pick of the best) and
// compares the three outputs and their indices one clock later.
module tb_fsu;
  import sp_pkg::*;
  logic clk = 0, rst;
  always #5 clk = ~clk;
  track_t     trk [N_TRK], best [N_OUT];
  logic [3:0] best_idx [N_OUT];
  logic [3:0] cancelled, dropped;
  int checks = 0, failures = 0, n_canc = 0, n_drop = 0;

  fsu dut (.*);


  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1;
    for (int t = 0; t < N_TRK; t++) trk[t] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int c = 0; c < 600; c++) begin
      bit kill [N_TRK];
      bit taken [N_TRK];
      int sel [N_OUT];
      int nalive, ncanc;
      for (int t = 0; t < N_TRK; t++) begin
        trk[t] = '0;
        trk[t].valid = ($urandom % 4) != 0;
        trk[t].mask = 5'($urandom);
        for (int s = 0; s < N_ST; s++) trk[t].id[s] = 3'($urandom % 3);
        if ($countones(trk[t].mask) < 2) trk[t].mask = 5'b01100;
        trk[t].rank = {3'($countones(trk[t].mask)), trk[t].mask[1]};
      end
      // reference cancellation
      ncanc = 0;
      for (int i = 0; i < N_TRK; i++) begin
        kill[i] = 0;
        for (int j = 0; j < N_TRK; j++) begin
          bit sh; sh = 0;
          for (int s = 0; s < N_ST; s++)
            if (trk[i].mask[s] && trk[j].mask[s] && trk[i].id[s] == trk[j].id[s]) sh = 1;
          if (i != j && trk[i].valid && trk[j].valid && sh &&
              (trk[j].rank > trk[i].rank || (trk[j].rank == trk[i].rank && j < i)))
            kill[i] = 1;
        end
        if (trk[i].valid && kill[i]) ncanc++;
      end
      // reference selection: pick the best remaining three times
      nalive = 0;
      for (int i = 0; i < N_TRK; i++) begin
        taken[i] = 0;
        if (trk[i].valid && !kill[i]) nalive++;
      end
      for (int p = 0; p < N_OUT; p++) begin
        sel[p] = -1;
        for (int i = 0; i < N_TRK; i++)
          if (trk[i].valid && !kill[i] && !taken[i] &&
              (sel[p] < 0 || trk[i].rank > trk[sel[p]].rank)) sel[p] = i;
        if (sel[p] >= 0) taken[sel[p]] = 1;
      end
      @(posedge clk); #1;
      for (int p = 0; p < N_OUT; p++) begin
        checks++;
        if (sel[p] < 0) begin
          if (best[p].valid) failures++;
        end else if (!best[p].valid || int'(best_idx[p]) != sel[p] || best[p] !== trk[sel[p]]) begin
          failures++;
          if (failures < 5) $display("c %0d place %0d: got idx %0d want %0d", c, p, best_idx[p], sel[p]);
        end
      end
      checks += 2;
      if (int'(cancelled) != ncanc) failures++;
      if (int'(dropped) != (nalive > N_OUT ? nalive - N_OUT : 0)) failures++;
      n_canc += ncanc;
      if (nalive > N_OUT) n_drop++;
      @(negedge clk);
    end
    checks++; if (n_canc == 0 || n_drop == 0) failures++;
    $display("cancelled %0d, crossings with dropped tracks %0d", n_canc, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
