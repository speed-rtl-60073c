// tb_mp_pe: self-checking test of the multi-precision PE.
//
// For each precision (16, 8, 4 bit) it runs random dot products of 1..8 steps:
// operands are driven for consecutive cycles with first on the first step and
// last on the last; the result must equal the signed dot product computed here
// and res_valid_o must rise exactly two clock edges after the last step was
// applied. It also checks that x/w/control are forwarded after one cycle.
module tb_mp_pe;
  import speed_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  prec_e       prec;
  logic [63:0] x, w, xo, wo;
  logic        v, f, l, vo, fo, lo, rv;
  logic [31:0] res;

  mp_pe dut (.clk_i(clk), .rst_ni(rst_n), .prec_i(prec), .x_i(x), .w_i(w), .valid_i(v),
             .first_i(f), .last_i(l), .x_o(xo), .w_o(wo), .valid_o(vo), .first_o(fo),
             .last_o(lo), .res_o(res), .res_valid_o(rv));

  int checks = 0, failures = 0;

  function automatic int signed dotw(logic [63:0] a, logic [63:0] b, prec_e p);
    int signed s = 0;
    case (p)
      PREC_16: s = int'($signed(a[15:0])) * int'($signed(b[15:0]));
      PREC_8:  for (int e = 0; e < 4; e++)  s += int'($signed(a[e*8 +: 8])) * int'($signed(b[e*8 +: 8]));
      default: for (int e = 0; e < 16; e++) s += int'($signed(a[e*4 +: 4])) * int'($signed(b[e*4 +: 4]));
    endcase
    return s;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int signed ref_sum;
    int L, lat;
    prec = PREC_16; x = '0; w = '0; v = 0; f = 0; l = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      prec = prec_e'(t % 3);
      L = 1 + $urandom_range(7);
      ref_sum = 0;
      for (int k = 0; k < L; k++) begin
        @(negedge clk);
        x = {$urandom, $urandom}; w = {$urandom, $urandom};
        if (t % 7 == 0) begin x = {16{4'h8}}; w = {16{4'h8}}; end   // most negative digits
        v = 1; f = (k == 0); l = (k == L - 1);
        ref_sum += dotw(x, w, prec);
        @(posedge clk); #1;
        checks++;
        if (xo !== x || wo !== w || vo !== 1'b1 || fo !== f || lo !== l) begin
          failures++; $display("ERROR: forwarding");
        end
      end
      @(negedge clk); v = 0; f = 0; l = 0; x = '0; w = '0;
      lat = 1;
      while (!rv && lat < 5) begin @(posedge clk); #1; lat++; end
      checks++;
      if (lat != 2 || res !== 32'(ref_sum)) begin
        failures++;
        $display("ERROR: prec %0d L %0d: res %0d (latency %0d), expected %0d (latency 2)",
                 prec, L, $signed(res), lat, ref_sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
