// tb_pt_precalc -- random tracks over random segments; the PT address is
// recomputed in the testbench with integer arithmetic (station order, phi
// differences, saturation, coarse second difference, eta bits) and compared one
// clock later.
module tb_pt_precalc;
  import sp_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  track_t      trk;
  seg_t        segs [N_ALL];
  logic [20:0] addr;
  int checks = 0, failures = 0, nsat = 0, n3 = 0;

  pt_precalc dut (.*);

  function automatic int base(input int s);
    case (s) 0: return 0; 1: return 8; 2: return 14; 3: return 17; default: return 20; endcase
  endfunction
  function automatic int clampi(input int x, input int lo, input int hi);
    return x < lo ? lo : x > hi ? hi : x;
  endfunction

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 1000; c++) begin
      int ph [$];
      int e, da, db, key;
      for (int i = 0; i < N_ALL; i++) segs[i] = seg_t'($urandom);
      if (c % 2 == 0) for (int i = 0; i < N_ALL; i++) segs[i].phi = 12'(2000 + $urandom % 200);
      trk = '0; trk.valid = 1;
      trk.mask = 5'($urandom);
      if (trk.mask[4:2] == 0) trk.mask[2] = 1;
      if ($countones(trk.mask) < 2) trk.mask[3] = 1;
      for (int s = 0; s < N_ST; s++) trk.id[s] = 3'($urandom % (s == 0 ? 8 : s == 1 ? 6 : 3));
      ph.delete();
      for (int s = 0; s < N_ST; s++) if (trk.mask[s]) ph.push_back(int'(segs[base(s) + int'(trk.id[s])].phi));
      da = clampi(ph[0] - ph[1], -128, 127);
      if (ph.size() >= 3) begin
        n3++;
        db = clampi((ph[1] - ph[2]) >>> 2, -8, 7);
      end else db = 0;
      if (da == 127 || da == -128) nsat++;
      key = trk.mask[2] ? 2 : trk.mask[3] ? 3 : 4;
      e = int'(segs[base(key) + int'(trk.id[key])].eta) >> 3;
      @(posedge clk); #1;
      checks++;
      if (addr !== {trk.mask, 8'(da), 4'(db), 4'(e)}) begin
        failures++;
        if (failures < 5) $display("got %h want %h", addr, {trk.mask, 8'(da), 4'(db), 4'(e)});
      end
      @(negedge clk);
    end
    checks++; if (nsat == 0 || n3 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
