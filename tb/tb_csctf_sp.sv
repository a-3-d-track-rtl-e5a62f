// tb_csctf_sp -- end-to-end test of one sector at its default (full) size.
//
// The testbench loads only the look-up entries it needs: for every LCT it
// invents it picks a unique PHIL address per link and fills PHIL, ETAG and PHIG so
// that the chain yields the segment (phi, eta, bend) it wants. For every expected
// muon it computes the PT address itself and loads a distinctive PT word there.
// Scenarios run one after another, separated by idle crossings:
//   * muons with 2, 3 and 4 endcap stations (station 2 and 3 keys),
//   * a track seen by all three assemblers (redundant copies cancelled),
//   * four distinct muons in one crossing (only the best three reported),
//   * a barrel + station 2 muon,
//   * an LCT arriving one crossing late (bunch crossing analyzer),
//   * a link with a programmed alignment delay,
//   * random single muons over random station sets, the expected result
//     predicted from the assembler rules.
// Every output muon must match the prediction in content and arrive 9 clocks
// after the word is handed to the link model: 1 for framing, 1 frame assembly,
// 1 alignment, 2 receiver and 5 processor.
// Mechanism counters must all be non-zero at the end.
module tb_csctf_sp;
  import sp_pkg::*;
  logic clk80 = 1'b1, clk = 1'b0, rst;
  // both clocks from one process so that their common edges fall in one step
  always #6.25 begin
    clk80 = ~clk80;
    if (clk80) clk = ~clk;
  end

  lct_t        lct_in [N_LINK];     // word per link for the current crossing
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

  // link serializer model: high half of the word, then the low half
  always @(negedge clk80)
    for (int i = 0; i < N_LINK; i++) begin
      rx_data[i] = clk ? lct_in[i][15:0] : lct_in[i][31:16];
      rx_dv[i]   = 1'b1;
    end

  int checks = 0, failures = 0;
  int cyc = 0;
  int n_cancel = 0, n_drop = 0, n_late = 0, n_mb = 0, n_align = 0, n_3st = 0,
      n_2st = 0, n_4st = 0, n_muons = 0;
  int lct_cnt [N_LINK];

  typedef struct { int cyc; muon_t mu; } obs_t;
  obs_t seen [$];
  obs_t want [$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst) begin
      n_cancel += int'(mon_cancelled);
      n_drop   += int'(mon_dropped);
    end
  end
  always @(negedge clk)
    if (!rst)
      for (int p = 0; p < N_OUT; p++)
        if (mu_out[p].valid) seen.push_back('{cyc, mu_out[p]});

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- helpers ----------------
  task automatic lut_write(input int sel, input logic [20:0] a, input logic [17:0] d);
    @(negedge clk);
    lut_we = 1; lut_sel = 6'(sel); lut_addr = a; lut_data = d;
    @(negedge clk);
    lut_we = 0;
  endtask

  // Program the receiver tables of a link so that the returned LCT gives segment s.
  task automatic make_lct(input int link, input seg_t s, output lct_t l);
    int c;
    logic [9:0] phl; logic [5:0] pbl;
    c = lct_cnt[link]++;
    l = '0;
    l.valid = 1; l.quality = s.quality; l.halfstrip = 8'(c); l.patt = 4'(c >> 8);
    l.lr = 0; l.csc_id = 4'(link); l.eta_appr = 7'(c * 3);
    phl = 10'(c * 7 + 1); pbl = 6'(c);
    lut_write(3 * link + 0, 21'({l.patt, l.quality, l.halfstrip, l.lr}), {2'b0, phl, pbl});
    lut_write(3 * link + 1, 21'({pbl, phl[9:8], l.csc_id, l.eta_appr}), {6'b0, s.phib, s.eta});
    lut_write(3 * link + 2, 21'({phl, l.eta_appr[6:2], l.csc_id}), {6'b0, s.phi});
  endtask

  function automatic int clampi(input int x, input int lo, input int hi);
    return x < lo ? lo : x > hi ? hi : x;
  endfunction

  // Expected PT address of a track given the segments on it, by station.
  function automatic logic [20:0] exp_addr(input logic [4:0] mask, input seg_t st [N_ST]);
    int ph [$];
    int da, db, key;
    for (int s = 0; s < N_ST; s++) if (mask[s]) ph.push_back(int'(st[s].phi));
    da = clampi(ph[0] - ph[1], -128, 127);
    db = ph.size() >= 3 ? clampi((ph[1] - ph[2]) >>> 2, -8, 7) : 0;
    key = mask[2] ? 2 : mask[3] ? 3 : 4;
    return {mask, 8'(da), 4'(db), 4'(int'(st[key].eta) >> 3)};
  endfunction

  // Load a PT word for an expected muon and queue the expected output.
  task automatic expect_muon(input logic [4:0] mask, input seg_t st [N_ST], input int at,
                             input int tag);
    logic [20:0] a;
    logic [15:0] w;
    int key;
    muon_t m;
    a = exp_addr(mask, st);
    w = {8'b0, 2'(tag), 1'(tag >> 2), 5'(tag * 3 + 1)};
    for (int p = 0; p < N_OUT; p++) lut_write(3 * N_LINK + p, a, 18'(w));
    key = mask[2] ? 2 : mask[3] ? 3 : 4;
    m = '{valid: 1'b1, pt: w[4:0], sign: w[5], quality: w[7:6],
          phi: st[key].phi[11:7], eta: st[key].eta[6:1]};
    want.push_back('{at, m});
    case ($countones(mask)) 2: n_2st++; 3: n_3st++; default: n_4st++; endcase
    if (mask[ST_MB]) n_mb++;
  endtask

  function automatic seg_t mkseg(input int phi, input int eta);
    seg_t s;
    s.valid = 1; s.quality = 3'(5); s.phi = 12'(phi); s.eta = 7'(eta);
    s.phib = 5'($urandom % 9) - 5'd4;
    return s;
  endfunction

  int link_of [N_ST][8];
  initial begin
    for (int i = 0; i < 8; i++) begin
      link_of[ST_MB][i] = -1;
      link_of[ST_ME1][i] = i;
      link_of[ST_ME2][i] = 6 + i;
      link_of[ST_ME3][i] = 9 + i;
      link_of[ST_ME4][i] = 12 + i;
    end
  end

  // Apply one crossing of inputs: per station, segment index and segment.
  typedef struct { int st; int id; seg_t s; } hit_t;

  task automatic fire(input hit_t h [$], output int cap);
    lct_t l [N_LINK];
    bit   used [N_LINK];
    for (int i = 0; i < N_LINK; i++) used[i] = 0;
    foreach (h[k])
      if (h[k].st != ST_MB) begin
        int ln;
        ln = link_of[h[k].st][h[k].id];
        make_lct(ln, h[k].s, l[ln]);
        used[ln] = 1;
      end
    @(negedge clk);
    for (int i = 0; i < N_LINK; i++) lct_in[i] = used[i] ? l[i] : '0;
    foreach (h[k]) if (h[k].st == ST_MB) mb_in[h[k].id] = h[k].s;
    cap = cyc + 1;
    @(negedge clk);
    for (int i = 0; i < N_LINK; i++) lct_in[i] = '0;
    for (int i = 0; i < N_MB; i++) mb_in[i] = '0;
  endtask

  task automatic settle();
    repeat (14) @(negedge clk);
  endtask

  // ---------------- scenarios ----------------
  initial begin
    hit_t h [$];
    seg_t st [N_ST];
    int cap;
    rst = 1; lut_we = 0; lut_sel = 0; lut_addr = 0; lut_data = 0;
    for (int i = 0; i < N_LINK; i++) begin lct_in[i] = '0; link_delay[i] = 0; lct_cnt[i] = 0; end
    for (int i = 0; i < N_MB; i++) mb_in[i] = '0;
    repeat (5) @(negedge clk);
    rst = 0;
    repeat (10) @(negedge clk);

    // 1. three stations ME1-ME2-ME3
    st[ST_ME1] = mkseg(1000, 40); st[ST_ME2] = mkseg(1040, 42); st[ST_ME3] = mkseg(1060, 44);
    h = '{'{ST_ME1, 0, st[ST_ME1]}, '{ST_ME2, 0, st[ST_ME2]}, '{ST_ME3, 0, st[ST_ME3]}};
    expect_muon(5'b01110, st, 0, 1);
    fire(h, cap); want[$].cyc = cap + 9; settle();

    // 2. ME2-ME3-ME4: built by all three assemblers, two copies cancelled
    st[ST_ME2] = mkseg(2500, 60); st[ST_ME3] = mkseg(2450, 61); st[ST_ME4] = mkseg(2420, 63);
    h = '{'{ST_ME2, 1, st[ST_ME2]}, '{ST_ME3, 2, st[ST_ME3]}, '{ST_ME4, 0, st[ST_ME4]}};
    expect_muon(5'b11100, st, 0, 2);
    fire(h, cap); want[$].cyc = cap + 9; settle();

    // 3. four distinct two-station muons: best three reported, one dropped
    begin
      seg_t a2, a3, b2, b3, c2, c4, d3, d4;
      a2 = mkseg(500, 20);  a3 = mkseg(520, 21);
      b2 = mkseg(1200, 30); b3 = mkseg(1180, 31);
      c2 = mkseg(2000, 50); c4 = mkseg(2030, 52);
      d3 = mkseg(3000, 70); d4 = mkseg(3010, 70);
      h = '{'{ST_ME2, 0, a2}, '{ST_ME3, 0, a3}, '{ST_ME2, 1, b2}, '{ST_ME3, 1, b3},
            '{ST_ME2, 2, c2}, '{ST_ME4, 2, c4}, '{ST_ME3, 2, d3}, '{ST_ME4, 0, d4}};
      st[ST_ME2] = a2; st[ST_ME3] = a3; expect_muon(5'b01100, st, 0, 3);
      st[ST_ME2] = b2; st[ST_ME3] = b3; expect_muon(5'b01100, st, 0, 4);
      st[ST_ME2] = c2; st[ST_ME4] = c4; expect_muon(5'b10100, st, 0, 5);
      fire(h, cap);
      for (int k = 1; k <= 3; k++) want[want.size() - k].cyc = cap + 9;
      settle();
    end

    // 4. barrel segment with station 2
    st[ST_MB] = mkseg(3500, 0); st[ST_ME2] = mkseg(3530, 33);
    h = '{'{ST_MB, 3, st[ST_MB]}, '{ST_ME2, 2, st[ST_ME2]}};
    expect_muon(5'b00101, st, 0, 6);
    fire(h, cap); want[$].cyc = cap + 9; settle();

    // 5. station 2 LCT one crossing after station 1: linked through the held copy
    begin
      lct_t l1, l2;
      st[ST_ME1] = mkseg(1700, 35); st[ST_ME2] = mkseg(1730, 37);
      make_lct(link_of[ST_ME1][1], st[ST_ME1], l1);
      make_lct(link_of[ST_ME2][1], st[ST_ME2], l2);
      expect_muon(5'b00110, st, 0, 7);
      @(negedge clk);
      lct_in[link_of[ST_ME1][1]] = l1;
      @(negedge clk);
      lct_in[link_of[ST_ME1][1]] = '0;
      lct_in[link_of[ST_ME2][1]] = l2;
      cap = cyc + 1;
      @(negedge clk);
      lct_in[link_of[ST_ME2][1]] = '0;
      want[$].cyc = cap + 9;
      n_late++;
      settle();
    end

    // 6. link 9 (station 3, segment 0) delayed by one crossing on the board
    begin
      lct_t l2, l3;
      link_delay[9] = 2'd1;
      st[ST_ME2] = mkseg(3900, 90); st[ST_ME3] = mkseg(3880, 92);
      make_lct(link_of[ST_ME2][0], st[ST_ME2], l2);
      make_lct(link_of[ST_ME3][0], st[ST_ME3], l3);
      expect_muon(5'b01100, st, 0, 0);
      @(negedge clk);
      lct_in[9] = l3;            // arrives one crossing early on its fibre
      @(negedge clk);
      lct_in[9] = '0;
      lct_in[6] = l2;
      cap = cyc + 1;
      @(negedge clk);
      lct_in[6] = '0;
      want[$].cyc = cap + 9;
      n_align++;
      settle();
      link_delay[9] = 2'd0;
      settle();
    end

    // 7. random single muons over random station sets
    for (int r = 0; r < 60; r++) begin
      logic [4:0] m, exp_m;
      int phi0, eta0;
      h = {};
      phi0 = 200 + $urandom % 3600; eta0 = 10 + $urandom % 100;
      m = 5'($urandom);
      for (int s = 0; s < N_ST; s++)
        if (m[s]) begin
          int id;
          id = s == ST_MB ? $urandom % 8 : s == ST_ME1 ? $urandom % 6 : $urandom % 3;
          st[s] = mkseg(phi0 + int'($urandom % 60) - 30, s == ST_MB ? 0 : eta0 + int'($urandom % 5) - 2);
          h.push_back('{s, id, st[s]});
        end
      // prediction from the assembler rules
      if (m[ST_ME2])      exp_m = m;
      else if (m[ST_ME3]) exp_m = m & ~5'b00001;
      else                exp_m = '0;
      if ($countones(exp_m) >= 2) expect_muon(exp_m, st, 0, r);
      fire(h, cap);
      if ($countones(exp_m) >= 2) want[$].cyc = cap + 9;
      settle();
    end

    settle();
    // ---------------- compare ----------------
    checks++;
    if (seen.size() != want.size()) begin
      failures++;
      $display("muons seen %0d, expected %0d", seen.size(), want.size());
    end
    foreach (want[i]) begin
      bit hit; hit = 0;
      foreach (seen[j]) if (seen[j].cyc == want[i].cyc && seen[j].mu == want[i].mu) hit = 1;
      checks++;
      if (!hit) begin
        failures++;
        $display("missing muon %0d at cycle %0d: %h", i, want[i].cyc, want[i].mu);
        foreach (seen[j]) if (seen[j].mu == want[i].mu) $display("  seen at cycle %0d", seen[j].cyc);
      end else n_muons++;
    end
    $display("muons %0d: 2-st %0d 3-st %0d 4-st %0d barrel %0d; cancelled %0d dropped %0d late %0d aligned %0d",
             n_muons, n_2st, n_3st, n_4st, n_mb, n_cancel, n_drop, n_late, n_align);
    checks += 8;
    if (n_2st == 0) failures++;
    if (n_3st == 0) failures++;
    if (n_4st == 0) failures++;
    if (n_mb == 0) failures++;
    if (n_cancel == 0) failures++;
    if (n_drop == 0) failures++;
    if (n_late == 0) failures++;
    if (n_align == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
