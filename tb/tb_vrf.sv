// tb_vrf: self-checking test of the banked VRF slice (512 words, 8 banks, 7 ports).
//
// Every cycle each port requests at random (read or write, random address). The
// testbench computes the expected grants itself from the bank mapping
// bank = (a + a/16) mod 8 and the fixed port priority, keeps a model of the
// storage, and checks the grants, the read data one cycle after a granted read,
// and that two words of consecutive registers at the same offset never share a bank.
module tb_vrf;
  import speed_pkg::*;
  localparam int NP = 7, WORDS = 512, NB = 8, WPV = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        req [NP], we [NP], gnt [NP], rv [NP];
  logic [8:0]  addr [NP];
  logic [63:0] wd [NP], rd [NP];

  vrf #(.WORDS(WORDS), .NBANKS(NB), .WPV(WPV), .NP(NP)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .we_i(we), .addr_i(addr), .wdata_i(wd),
    .gnt_o(gnt), .rvalid_o(rv), .rdata_o(rd));

  int checks = 0, failures = 0;
  logic [63:0] model [WORDS];
  bit          known [WORDS];
  bit          exp_rv [NP];
  logic [63:0] exp_rd [NP];
  bit          exp_known [NP];

  function automatic int bank(int a);
    return (a + a / WPV) % NB;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit taken [NB];
    bit eg [NP];
    for (int i = 0; i < WORDS; i++) known[i] = 0;
    for (int p = 0; p < NP; p++) begin req[p] = 0; we[p] = 0; addr[p] = '0; wd[p] = '0; exp_rv[p] = 0; end
    for (int a = 0; a < WORDS - WPV; a++) begin
      checks++;
      if (bank(a) == bank(a + WPV)) failures++;
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        req[p] = ($urandom_range(1) == 1); we[p] = ($urandom_range(1) == 1);
        addr[p] = (t < 200) ? 9'(t * 3 + p) : 9'($urandom);
        wd[p] = {$urandom, $urandom};
      end
      #1;
      // read data of last cycle's grants
      for (int p = 0; p < NP; p++) begin
        checks++;
        if (rv[p] != exp_rv[p] || (exp_rv[p] && exp_known[p] && rd[p] !== exp_rd[p])) begin
          failures++;
          if (failures < 10) $display("ERROR: port %0d rvalid %0d rdata %h expected %0d %h", p, rv[p], rd[p], exp_rv[p], exp_rd[p]);
        end
      end
      for (int b = 0; b < NB; b++) taken[b] = 0;
      for (int p = 0; p < NP; p++) begin
        eg[p] = req[p] && !taken[bank(int'(addr[p]))];
        if (eg[p]) taken[bank(int'(addr[p]))] = 1;
        checks++;
        if (gnt[p] != eg[p]) begin failures++; $display("ERROR: grant port %0d", p); end
      end
      @(posedge clk);
      for (int p = 0; p < NP; p++) begin
        exp_rv[p] = eg[p] && !we[p];
        exp_rd[p] = model[addr[p]];
        exp_known[p] = known[addr[p]];
      end
      for (int p = 0; p < NP; p++)
        if (eg[p] && we[p]) begin model[addr[p]] = wd[p]; known[addr[p]] = 1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
