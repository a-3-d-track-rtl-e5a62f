// tb_au -- loads the three PT tables (reduced to 256 words) with random words,
// then applies random addresses and checks the muon words one clock later:
// PT, sign and quality from the table, phi and eta bits carried through, and an
// all-zero word for an empty place.
module tb_au;
  import sp_pkg::*;
  localparam int AW = 8;
  logic clk = 0, rst;
  always #5 clk = ~clk;
  logic          valid [N_OUT];
  logic [AW-1:0] pt_addr [N_OUT];
  logic [11:0]   phi [N_OUT];
  logic [6:0]    eta [N_OUT];
  muon_t         mu [N_OUT];
  logic [2:0]    wr_en;
  logic [AW-1:0] wr_addr;
  logic [15:0]   wr_data;
  logic [15:0]   model [N_OUT][2**AW];
  int checks = 0, failures = 0;

  au #(.PT_AW(AW)) dut (.*);

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; wr_en = 0; wr_addr = 0; wr_data = 0;
    for (int p = 0; p < N_OUT; p++) begin valid[p] = 0; pt_addr[p] = 0; phi[p] = 0; eta[p] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int p = 0; p < N_OUT; p++)
      for (int a = 0; a < 2**AW; a++) begin
        wr_en = 3'b001 << p; wr_addr = AW'(a); wr_data = 16'($urandom); model[p][a] = wr_data;
        @(negedge clk);
      end
    wr_en = 0;
    for (int c = 0; c < 300; c++) begin
      muon_t want [N_OUT];
      for (int p = 0; p < N_OUT; p++) begin
        valid[p] = ($urandom % 4) != 0; pt_addr[p] = AW'($urandom);
        phi[p] = 12'($urandom); eta[p] = 7'($urandom);
        want[p] = '0;
        if (valid[p])
          want[p] = '{valid: 1'b1, pt: model[p][pt_addr[p]][4:0], sign: model[p][pt_addr[p]][5],
                      quality: model[p][pt_addr[p]][7:6], phi: phi[p][11:7], eta: eta[p][6:1]};
      end
      @(posedge clk); #1;
      for (int p = 0; p < N_OUT; p++) begin
        checks++;
        if (mu[p] !== want[p]) begin
          failures++;
          if (failures < 5) $display("place %0d: got %h want %h", p, mu[p], want[p]);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
