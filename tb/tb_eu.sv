// tb_eu -- random station-1 and station-2 segments clustered in phi and eta;
// every pair's link bit is compared with the window test computed in integers
// in the testbench, one clock after the segments are applied. Both an eta-checking
// unit and one without eta check (barrel) are tested.
module tb_eu;
  import sp_pkg::*;
  localparam int NA = 6, NB = 3, DPHI = 40, DETA = 3, PHIB = 9;
  logic clk = 0, rst;
  always #5 clk = ~clk;
  seg_t a [NA], b [NB];
  logic a_late [NA], b_late [NB];
  logic [NB-1:0] lnk [NA], lnk_ne [NA];
  int checks = 0, failures = 0, n_link = 0, n_nolink = 0;

  eu #(.NA(NA), .NB(NB), .DPHI_MAX(DPHI), .DETA_MAX(DETA), .PHIB_MAX(PHIB)) dut (.*);
  eu #(.NA(NA), .NB(NB), .DPHI_MAX(DPHI), .DETA_MAX(DETA), .PHIB_MAX(PHIB),
       .CHECK_ETA(1'b0)) dut_ne (.clk, .rst, .a, .a_late, .b, .b_late, .lnk(lnk_ne));

  function automatic int iabs(input int x); return x < 0 ? -x : x; endfunction
  function automatic int sbend(input logic [4:0] p); return p[4] ? int'(p) - 32 : int'(p); endfunction

  function automatic bit ref_link(input seg_t x, input logic xl, input seg_t y,
                                  input logic yl, input bit ceta);
    return x.valid && y.valid && !(xl && yl)
        && iabs(int'(x.phi) - int'(y.phi)) <= DPHI
        && (!ceta || iabs(int'(x.eta) - int'(y.eta)) <= DETA)
        && iabs(sbend(x.phib)) <= PHIB && iabs(sbend(y.phib)) <= PHIB;
  endfunction

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1;
    for (int i = 0; i < NA; i++) begin a[i] = '0; a_late[i] = 0; end
    for (int j = 0; j < NB; j++) begin b[j] = '0; b_late[j] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int c = 0; c < 400; c++) begin
      int p0, e0;
      p0 = 100 + $urandom % 3800; e0 = 10 + $urandom % 100;
      for (int i = 0; i < NA; i++) begin
        a[i].valid = ($urandom % 5) != 0; a[i].quality = 3'($urandom);
        a[i].phi = 12'(p0 + int'($urandom % 120) - 60);
        a[i].eta = 7'(e0 + int'($urandom % 10) - 5);
        a[i].phib = 5'($urandom); a_late[i] = ($urandom % 4) == 0;
      end
      for (int j = 0; j < NB; j++) begin
        b[j].valid = ($urandom % 5) != 0; b[j].quality = 3'($urandom);
        b[j].phi = 12'(p0 + int'($urandom % 120) - 60);
        b[j].eta = 7'(e0 + int'($urandom % 10) - 5);
        b[j].phib = 5'($urandom); b_late[j] = ($urandom % 4) == 0;
      end
      @(posedge clk); #1;
      for (int i = 0; i < NA; i++)
        for (int j = 0; j < NB; j++) begin
          bit r, rn;
          r  = ref_link(a[i], a_late[i], b[j], b_late[j], 1);
          rn = ref_link(a[i], a_late[i], b[j], b_late[j], 0);
          checks += 2;
          if (lnk[i][j] !== r)     failures++;
          if (lnk_ne[i][j] !== rn) failures++;
          if (r) n_link++; else n_nolink++;
        end
      @(negedge clk);
    end
    checks++; if (n_link < 50 || n_nolink < 50) failures++;
    $display("links %0d, non-links %0d", n_link, n_nolink);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
