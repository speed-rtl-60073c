// tb_lane: self-checking test of one lane (lane 1 of 4): VRF, lane sequencer,
// ALU and MPTU together.
//
// The testbench writes operands through the load-unit port, runs a 16-bit
// element VSUB and a 32-bit VADD on the lane (lane 1 of 4 with 37 vector words
// holds ceil(36/4) = 9 of them), then an 8-bit MM VSAM on the lane's MPTU while
// the store port reads, and reads every result back through the store-unit
// port. Results are compared with values computed here; the ALU done pulse must
// come after 9 words, and an instruction with no word in this lane must be done
// in the cycle after issue.
module tb_lane;
  import speed_pkg::*;
  localparam int LANES = 4, ID = 1, WPV = 16, R = 2, C = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  vinstr_t     ins;
  logic        alv, mpv, ald, mpd, ldq, ldg, stq, stg, strv, busy, ew, ei, ea;
  logic [8:0]  lda, sta;
  logic [63:0] ldw, strd;

  lane #(.LANES(LANES), .LANE_ID(ID), .TILE_R(R), .TILE_C(C)) dut (
    .clk_i(clk), .rst_ni(rst_n), .instr_i(ins), .alu_valid_i(alv), .mptu_valid_i(mpv),
    .alu_done_o(ald), .mptu_done_o(mpd),
    .ld_req_i(ldq), .ld_addr_i(lda), .ld_wdata_i(ldw), .ld_gnt_o(ldg),
    .st_req_i(stq), .st_addr_i(sta), .st_gnt_o(stg), .st_rvalid_o(strv), .st_rdata_o(strd),
    .mptu_busy_o(busy), .ev_w_reuse_o(ew), .ev_i_reuse_o(ei), .ev_acc_o(ea));

  int checks = 0, failures = 0;
  logic [63:0] mv [512];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int a, logic [63:0] d);
    @(negedge clk);
    ldq = 1; lda = 9'(a); ldw = d;
    @(posedge clk);
    while (!ldg) @(posedge clk);
    #1 ldq = 0;
    mv[a] = d;
  endtask

  task automatic rd(int a, output logic [63:0] d);
    @(negedge clk);
    stq = 1; sta = 9'(a);
    @(posedge clk);
    while (!stg) @(posedge clk);
    #1 stq = 0;
    @(posedge clk); #1;
    d = strd;
  endtask

  task automatic issue(vinstr_t v, bit alu);
    @(negedge clk);
    ins = v; alv = alu; mpv = !alu;
    @(negedge clk);
    alv = 0; mpv = 0;
  endtask

  function automatic int signed dot8(logic [63:0] x, logic [63:0] w);
    int signed s = 0;
    for (int e = 0; e < 4; e++) s += int'($signed(x[e*8 +: 8])) * int'($signed(w[e*8 +: 8]));
    return s;
  endfunction

  initial begin
    vinstr_t v;
    logic [63:0] d, e;
    int cyc;
    ins = '0; alv = 0; mpv = 0; ldq = 0; lda = '0; ldw = '0; stq = 0; sta = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 9; i++) begin
      wr(2*WPV + i, {$urandom, $urandom});
      wr(3*WPV + i, {$urandom, $urandom});
    end
    // VSUB.VV v4 = v2 - v3 at SEW 16, 37 words over 4 lanes
    v = '0; v.fu = FU_ALU; v.alu_op = ALU_SUB; v.sew = 2'd1; v.vd = 5'd4; v.vs2 = 5'd2; v.vs1 = 5'd3;
    v.nwords = 16'd37;
    issue(v, 1'b1);
    cyc = 0;
    while (!ald) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc < 9 || cyc > 40) begin failures++; $display("ERROR: ALU took %0d cycles for 9 words", cyc); end
    for (int i = 0; i < 9; i++) begin
      rd(4*WPV + i, d);
      for (int h = 0; h < 4; h++) e[h*16 +: 16] = mv[2*WPV + i][h*16 +: 16] - mv[3*WPV + i][h*16 +: 16];
      checks++;
      if (d !== e) begin failures++; $display("ERROR: VSUB word %0d %h expected %h", i, d, e); end
    end
    // VADD.VV at SEW 32 with a single vector word: nothing in lane 1
    v.alu_op = ALU_ADD; v.sew = 2'd2; v.nwords = 16'd1;
    @(negedge clk); ins = v; alv = 1; @(negedge clk); alv = 0;
    checks++;
    if (!ald) begin failures++; $display("ERROR: empty ALU instruction not done at once"); end
    // 8-bit MM, N = 1, L = 3: inputs 2 blocks of L*R words, weights 2 blocks of L*C words
    for (int i = 0; i < 12; i++) wr(6*WPV + i, {$urandom, $urandom});
    for (int i = 0; i < 12; i++) wr(7*WPV + i, {$urandom, $urandom});
    v = '0; v.fu = FU_MPTU; v.vd = 5'd8; v.vs1 = 5'd6; v.vs2 = 5'd7; v.red_len = 16'd3;
    v.cfg.prec = PREC_8; v.cfg.ksize = 4'd1; v.cfg.nstage_m1 = 3'd0; v.cfg.dataflow = DF_MM;
    issue(v, 1'b0);
    while (!mpd) @(negedge clk);
    for (int j = 0; j < 2; j++) begin
      int signed res [2];
      for (int h = 0; h < 2; h++) begin
        int p, r, c;
        p = 2*j + h; r = p / C; c = p % C;
        res[h] = 0;
        for (int blk = 0; blk < 2; blk++)
          for (int k = 0; k < 3; k++)
            res[h] += dot8(mv[6*WPV + blk*3*R + k*R + r], mv[7*WPV + blk*3*C + k*C + c]);
      end
      rd(8*WPV + j, d);
      checks++;
      if (d !== {res[1], res[0]}) begin failures++; $display("ERROR: MM word %0d %h expected %h", j, d, {res[1], res[0]}); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
