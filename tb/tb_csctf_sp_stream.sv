// tb_csctf_sp_stream -- the board at full rate: a new crossing every clock, with
// random LCTs on all 15 links and random barrel segments, checked against a
// crossing-level reference model kept in the testbench.
//
// Before the stream, each link's tables are loaded with a pool of 16 LCTs whose
// segments fall around four phi/eta clusters, so that stubs of different
// stations often link, often share segments and often exceed three tracks. The
// model repeats the bunch crossing analyzer, the window test of every station
// pair, the assemblers, cancellation and selection, and the PT address, written
// independently of the RTL. For every crossing and output place it predicts
// valid, phi, eta (from the muon word, 9 clocks after the crossing is handed to
// the link model) and the PT address presented to the PT memories one clock
// earlier. Runs at the default sizes.
module tb_csctf_sp_stream;
  import sp_pkg::*;
  localparam int NCROSS = 3000, POOL = 16;
  localparam int DPHI = 128, DETA = 8, PHIB = 12;

  logic clk80 = 1'b1, clk = 1'b0, rst;
  always #6.25 begin
    clk80 = ~clk80;
    if (clk80) clk = ~clk;
  end

  lct_t        lct_in [N_LINK];
  logic [15:0] rx_data [N_LINK];
  logic        rx_dv [N_LINK];
  logic [1:0]  link_delay [N_LINK];
  seg_t        mb_in [N_MB];
  logic        lut_we;
  logic [5:0]  lut_sel;
  logic [20:0] lut_addr;
  logic [17:0] lut_data;
  muon_t       mu_out [N_OUT];
  logic [3:0]  mon_cancelled, mon_dropped;

  csctf_sp dut (.*);

  always @(negedge clk80)
    for (int i = 0; i < N_LINK; i++) begin
      rx_data[i] = clk ? lct_in[i][15:0] : lct_in[i][31:16];
      rx_dv[i]   = 1'b1;
    end

  int checks = 0, failures = 0, cyc = 0;
  int n_mu = 0, n_canc = 0, n_drop = 0, n_late_trk = 0, n_full = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #5000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- pool of LCTs per link ----------------
  lct_t pool_l [N_LINK][POOL];
  seg_t pool_s [N_LINK][POOL];

  task automatic lut_write(input int sel, input logic [20:0] a, input logic [17:0] d);
    @(negedge clk);
    lut_we = 1; lut_sel = 6'(sel); lut_addr = a; lut_data = d;
    @(negedge clk);
    lut_we = 0;
  endtask

  function automatic seg_t rnd_seg(input int cl, input bit barrel);
    seg_t s;
    s.valid = 1; s.quality = 3'($urandom);
    s.phi = 12'(400 + 900 * cl + int'($urandom % 161) - 80);
    s.eta = barrel ? 7'd0 : 7'(20 + 25 * cl + int'($urandom % 13) - 6);
    s.phib = 5'($urandom % 29) - 5'd14;
    return s;
  endfunction

  // ---------------- reference model ----------------
  typedef struct { bit v; logic [20:0] addr; logic [11:0] phi; logic [6:0] eta; } exp_t;
  seg_t m_seg [N_ALL];
  bit   m_late [N_ALL];

  function automatic int iabs(input int x); return x < 0 ? -x : x; endfunction
  function automatic int sb(input logic [4:0] p); return p[4] ? int'(p) - 32 : int'(p); endfunction
  function automatic int clampi(input int x, input int lo, input int hi);
    return x < lo ? lo : x > hi ? hi : x;
  endfunction
  function automatic int bse(input int st);
    return st == 0 ? 0 : st == 1 ? 8 : st == 2 ? 14 : st == 3 ? 17 : 20;
  endfunction
  function automatic int nseg(input int st);
    return st == 0 ? 8 : st == 1 ? 6 : 3;
  endfunction

  function automatic bit linked(input int x, input int y, input bit ceta);
    seg_t a, b;
    a = m_seg[x]; b = m_seg[y];
    return a.valid && b.valid && !(m_late[x] && m_late[y])
        && iabs(int'(a.phi) - int'(b.phi)) <= DPHI
        && (!ceta || iabs(int'(a.eta) - int'(b.eta)) <= DETA)
        && iabs(sb(a.phib)) <= PHIB && iabs(sb(b.phib)) <= PHIB;
  endfunction

  // one crossing through the model; S are the segments entering the analyzer
  task automatic model(input seg_t S [N_ALL], output exp_t e [N_OUT],
                       output int ncanc, output int ndrop, output bit anylate);
    int tmask [9], tid [9][5], trank [9];
    bit tv [9], kill [9], taken [9];
    int keys [3], others [3][4], nother [3];
    // analyzer
    for (int i = 0; i < N_ALL; i++)
      if (S[i].valid) begin m_seg[i] = S[i]; m_late[i] = 0; end
      else if (m_seg[i].valid && !m_late[i]) m_late[i] = 1;
      else begin m_seg[i].valid = 0; m_late[i] = 0; end
    // assemblers: key station and the stations linked to it
    keys = '{2, 3, 4};
    others[0] = '{1, 0, 3, 4}; nother[0] = 4;
    others[1] = '{1, 2, 4, -1}; nother[1] = 3;
    others[2] = '{2, 3, -1, -1}; nother[2] = 2;
    anylate = 0;
    for (int u = 0; u < 3; u++)
      for (int k = 0; k < 3; k++) begin
        int t; t = 3 * u + k;
        tmask[t] = 0; tv[t] = 0;
        for (int o = 0; o < nother[u]; o++) begin
          int s; s = others[u][o];
          for (int j = nseg(s) - 1; j >= 0; j--)
            if (linked(bse(s) + j, bse(keys[u]) + k, s != 0)) begin
              tmask[t] |= 1 << s; tid[t][s] = j;
            end
        end
        if (tmask[t] != 0) begin
          tv[t] = 1; tmask[t] |= 1 << keys[u]; tid[t][keys[u]] = k;
          trank[t] = 2 * $countones(tmask[t]) + ((tmask[t] >> 1) & 1);
          for (int s = 0; s < 5; s++)
            if (tmask[t][s] && m_late[bse(s) + tid[t][s]]) anylate = 1;
        end
      end
    // cancellation and selection
    ncanc = 0;
    for (int i = 0; i < 9; i++) begin
      kill[i] = 0; taken[i] = 0;
      for (int j = 0; j < 9; j++) begin
        bit sh; sh = 0;
        for (int s = 0; s < 5; s++)
          if (tmask[i][s] && tmask[j][s] && tid[i][s] == tid[j][s]) sh = 1;
        if (i != j && tv[i] && tv[j] && sh &&
            (trank[j] > trank[i] || (trank[j] == trank[i] && j < i))) kill[i] = 1;
      end
      if (tv[i] && kill[i]) ncanc++;
    end
    ndrop = -3;
    for (int i = 0; i < 9; i++) if (tv[i] && !kill[i]) ndrop++;
    if (ndrop < 0) ndrop = 0;
    for (int p = 0; p < 3; p++) begin
      int b; b = -1;
      for (int i = 0; i < 9; i++)
        if (tv[i] && !kill[i] && !taken[i] && (b < 0 || trank[i] > trank[b])) b = i;
      e[p].v = b >= 0;
      e[p].addr = '0; e[p].phi = '0; e[p].eta = '0;
      if (b >= 0) begin
        int ph [$]; int da, db, key; seg_t ks;
        taken[b] = 1;
        for (int s = 0; s < 5; s++) if (tmask[b][s]) ph.push_back(int'(m_seg[bse(s) + tid[b][s]].phi));
        da = clampi(ph[0] - ph[1], -128, 127);
        db = ph.size() >= 3 ? clampi((ph[1] - ph[2]) >>> 2, -8, 7) : 0;
        key = tmask[b][2] ? 2 : tmask[b][3] ? 3 : 4;
        ks = m_seg[bse(key) + tid[b][key]];
        e[p].addr = {5'(tmask[b]), 8'(da), 4'(db), 4'(int'(ks.eta) >> 3)};
        e[p].phi = ks.phi; e[p].eta = ks.eta;
      end
    end
  endtask

  // ---------------- expected results by output cycle ----------------
  exp_t exp_at [int][N_OUT];
  logic [20:0] addr_prev [N_OUT];

  always @(negedge clk) begin
    if (!rst && exp_at.exists(cyc)) begin
      for (int p = 0; p < N_OUT; p++) begin
        exp_t e; e = exp_at[cyc][p];
        checks++;
        if (mu_out[p].valid !== e.v ||
            (e.v && (mu_out[p].phi !== e.phi[11:7] || mu_out[p].eta !== e.eta[6:1] ||
                     addr_prev[p] !== e.addr))) begin
          failures++;
          if (failures < 6)
            $display("cycle %0d place %0d: got v%b phi %h eta %h addr %h, want v%b phi %h eta %h addr %h",
                     cyc, p, mu_out[p].valid, mu_out[p].phi, mu_out[p].eta, addr_prev[p],
                     e.v, e.phi[11:7], e.eta[6:1], e.addr);
        end
        if (e.v) n_mu++;
      end
      exp_at.delete(cyc);
    end
    for (int p = 0; p < N_OUT; p++) addr_prev[p] = dut.m_addr_pt[p];
  end

  initial begin
    rst = 1; lut_we = 0; lut_sel = 0; lut_addr = 0; lut_data = 0;
    for (int i = 0; i < N_LINK; i++) begin lct_in[i] = '0; link_delay[i] = 0; end
    for (int i = 0; i < N_MB; i++) mb_in[i] = '0;
    for (int i = 0; i < N_ALL; i++) begin m_seg[i] = '0; m_late[i] = 0; end
    repeat (4) @(negedge clk);
    rst = 0;
    // load the pools
    for (int l = 0; l < N_LINK; l++)
      for (int c = 0; c < POOL; c++) begin
        lct_t x; logic [9:0] phl; logic [5:0] pbl; seg_t s;
        s = rnd_seg(c % 4, 0);
        x = '0; x.valid = 1; x.quality = s.quality; x.halfstrip = 8'(c); x.csc_id = 4'(l);
        x.eta_appr = 7'(c * 5); x.patt = 4'(l);
        phl = 10'(c * 11 + 3); pbl = 6'(c);
        lut_write(3 * l + 0, 21'({x.patt, x.quality, x.halfstrip, x.lr}), {2'b0, phl, pbl});
        lut_write(3 * l + 1, 21'({pbl, phl[9:8], x.csc_id, x.eta_appr}), {6'b0, s.phib, s.eta});
        lut_write(3 * l + 2, 21'({phl, x.eta_appr[6:2], x.csc_id}), {6'b0, s.phi});
        pool_l[l][c] = x; pool_s[l][c] = s;
      end
    repeat (12) @(negedge clk);
    // the stream: one crossing per clock
    for (int n = 0; n < NCROSS; n++) begin
      seg_t S [N_ALL];
      exp_t e [N_OUT];
      int nc, nd; bit al;
      int occ;
      occ = (n / 500) % 3;    // alternate light, medium and heavy occupancy
      for (int i = 0; i < N_ALL; i++) S[i] = '0;
      for (int l = 0; l < N_LINK; l++) begin
        if ($urandom % 6 < 1 + 2 * occ) begin
          int c; c = $urandom % POOL;
          lct_in[l] = pool_l[l][c]; S[B_ME1 + l] = pool_s[l][c];
        end else lct_in[l] = '0;
      end
      for (int i = 0; i < N_MB; i++) begin
        if ($urandom % 10 < 1 + occ) mb_in[i] = rnd_seg($urandom % 4, 1);
        else mb_in[i] = '0;
        S[B_MB + i] = mb_in[i];
      end
      model(S, e, nc, nd, al);
      n_canc += nc; if (nd > 0) n_drop++; if (al) n_late_trk++;
      if (e[2].v) n_full++;
      // handed at this falling edge: captured on the next rising edge, results
      // visible after the 9th rising edge from that one
      exp_at[cyc + 10] = e;
      @(negedge clk);
    end
    for (int l = 0; l < N_LINK; l++) lct_in[l] = '0;
    for (int i = 0; i < N_MB; i++) mb_in[i] = '0;
    repeat (15) @(negedge clk);
    $display("crossings %0d, muons %0d, cancelled %0d, crossings with dropped tracks %0d, tracks using a held segment %0d, crossings with 3 muons %0d",
             NCROSS, n_mu, n_canc, n_drop, n_late_trk, n_full);
    checks += 4;
    if (n_canc == 0) failures++;
    if (n_drop == 0) failures++;
    if (n_late_trk == 0) failures++;
    if (n_mu == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
