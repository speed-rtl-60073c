// tb_tensor_core: self-checking test of the systolic tensor core (3 x 2 PEs, to
// exercise unequal row and column counts).
//
// Each test drives L random steps of one input word per row and one weight word
// per column, aligned in time, with first/last on the first/last step. PE(r,c)
// must produce the dot product of row r's inputs with column c's weights, and
// its res_valid_o must rise r+c+2 clock edges after the last step is sampled.
module tb_tensor_core;
  import speed_pkg::*;
  localparam int R = 3, C = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  prec_e       prec;
  logic [63:0] x [R];
  logic [63:0] w [C];
  logic        v, f, l;
  logic [31:0] res [R][C];
  logic        rv  [R][C];

  tensor_core #(.TILE_R(R), .TILE_C(C)) dut (
    .clk_i(clk), .rst_ni(rst_n), .prec_i(prec), .x_i(x), .w_i(w), .valid_i(v),
    .first_i(f), .last_i(l), .res_o(res), .res_valid_o(rv));

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
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int signed ref_sum [R][C];
  int        got_lat [R][C];
  int        cyc;

  initial begin
    int L;
    prec = PREC_16; v = 0; f = 0; l = 0;
    for (int r = 0; r < R; r++) x[r] = '0;
    for (int c = 0; c < C; c++) w[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 60; t++) begin
      prec = prec_e'(t % 3);
      L = 1 + $urandom_range(9);
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin ref_sum[r][c] = 0; got_lat[r][c] = -1; end
      for (int k = 0; k < L; k++) begin
        @(negedge clk);
        for (int r = 0; r < R; r++) x[r] = {$urandom, $urandom};
        for (int c = 0; c < C; c++) w[c] = {$urandom, $urandom};
        v = 1; f = (k == 0); l = (k == L - 1);
        for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) ref_sum[r][c] += dotw(x[r], w[c], prec);
      end
      @(posedge clk); #1;
      @(negedge clk); v = 0; f = 0; l = 0;
      cyc = 1;
      for (int n = 0; n < R + C + 4; n++) begin
        for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
          if (rv[r][c]) begin
            got_lat[r][c] = cyc;
            checks++;
            if (res[r][c] !== 32'(ref_sum[r][c])) begin
              failures++;
              $display("ERROR: PE(%0d,%0d) %0d expected %0d", r, c, $signed(res[r][c]), ref_sum[r][c]);
            end
          end
        @(posedge clk); #1; cyc++;
      end
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        checks++;
        if (got_lat[r][c] != r + c + 2) begin
          failures++;
          $display("ERROR: PE(%0d,%0d) latency %0d expected %0d", r, c, got_lat[r][c], r + c + 2);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
